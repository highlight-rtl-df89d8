// highlight_top -- HighLight accelerator for hierarchical structured sparsity.
//
// Computes Z = A x B for a DNN layer mapped to a matrix multiplication, where
// operand A (weights) has two-rank HSS C1(G1:H1) -> C0(G0:H0) with
// G1 = 4, H1 in 4..8 and G0 = 2, H0 in 2..4, and operand B (activations) is
// dense or unstructured sparse (compressed).  Sparsity in A is skipped at two
// levels: the Rank1 SAF (the VFMU plus each PE's block select) hands each PE
// only non-empty Rank1 blocks, and the Rank0 SAF (4:2 mux in the PE) hands
// each MAC only the B word that meets a nonzero of A.  Speed-up is therefore
// (H1/G1) x (H0/G0).  Zeros of B are gated in the MACs (energy only).
//
// Blocks: GLB data partition (256 KB, 64-byte rows) and metadata partition
// (64 KB, 16-byte rows), filled through glb_*_we ports from off-chip;
// controller; VFMU; ARRAYS = 4 PE arrays of ROWS = 16 rows x PES_PER_ROW = 8
// PEs x 2 MACs (1024 MACs); a 2 KB register file per array; activation
// function (ReLU + requantise) on each of the ARRAYS*ROWS outputs of a column;
// compression unit producing the compressed output column on out_*.
//
// GLB layout (row addresses from cfg, see hl_pkg::hl_cfg_t):
//  * A tile t = m2*k2_cnt + k2, row r: data row a_base + t*ROWS + r holds
//    byte (a*PES_PER_ROW + p)*2 + j = value j of PE p of array a; metadata
//    rows a_meta_base + 2*(t*ROWS + r) + {0,1} hold arrays {0,1} / {2,3},
//    64 bits per array, PE p at bits p*7 +: 7 = {cp1[2:0], off1[1:0], off0[1:0]}.
//  * B of one m2 pass is a stream of sets (n2, k2, n0 order), packed in data
//    rows b_base + f (64 words each); metadata row b_off_base + f holds the
//    2-bit Rank0 offsets of those words; for compressed B, metadata row
//    b_smeta_base + s holds set s: bits [6:0] word count, then the end address
//    (7 bits) of each of its GROUPS*H1 blocks.  Dense B needs no metadata.
// Output: one compressed column per cycle during drain: column
// n = n2*n0 + out_col of output rows m2*ARRAYS*ROWS + (0..ARRAYS*ROWS-1).
//
// Timing: LOAD takes ROWS cycles per A tile, then one processing step per
// cycle (n0 per tile) unless the VFMU is waiting for a fetch; drain takes n0
// cycles per output tile.  There is no overlap between these phases.
//
// Follows the paper: the block set and their connections, the 4 x 256 MACs,
// the GLB and RF capacities, the HSS patterns, the VFMU fetch and shift
// rules, skipping on A and gating on B, and compression after the activation
// function.  This design's own choices: word widths, array shape (16 rows x
// 8 PEs x 2 MACs), GLB row widths and layout, ReLU with shift/saturate
// requantisation, the sequencing (no double buffering of A) and the
// performance counters.  rst_n is the asynchronous reset of the flops and
// also disables the configuration assertion; the lint note about a reset
// used both ways refers to that assertion only.
module highlight_top #(
  parameter int ARRAYS      = hl_pkg::ARRAYS,
  parameter int ROWS        = hl_pkg::ROWS,
  parameter int PES_PER_ROW = hl_pkg::PES_PER_ROW,
  parameter int N0          = hl_pkg::N0,
  localparam int DATA_W     = hl_pkg::DATA_W,
  localparam int ACC_W      = hl_pkg::ACC_W,
  localparam int G0         = hl_pkg::G0,
  localparam int G1         = hl_pkg::G1,
  localparam int H0_MAX     = hl_pkg::H0_MAX,
  localparam int H1_MAX     = hl_pkg::H1_MAX,
  localparam int GROUPS     = PES_PER_ROW / G1,
  localparam int WB         = GROUPS * H1_MAX,
  localparam int WW         = WB * H0_MAX,
  localparam int CW         = $clog2(WW + 1),
  localparam int OFF_W      = $clog2(H0_MAX),
  localparam int CP1_W      = $clog2(H1_MAX),
  localparam int AMW        = CP1_W + G0 * OFF_W,
  localparam int AW         = hl_pkg::GLB_AW,
  localparam int DBITS      = WW * DATA_W,
  localparam int MBITS      = hl_pkg::GLB_META_BITS,
  localparam int LEN        = ARRAYS * ROWS,
  localparam int NBO        = LEN / H0_MAX,
  localparam int OCW        = $clog2(LEN + 1),
  localparam int NW         = $clog2(N0)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  hl_pkg::hl_cfg_t               cfg,
  output logic                          busy,
  output logic                          done,
  // GLB fill from off-chip
  input  logic                          glb_data_we,
  input  logic [AW-1:0]                 glb_data_waddr,
  input  logic [DBITS-1:0]              glb_data_wdata,
  input  logic                          glb_meta_we,
  input  logic [AW-1:0]                 glb_meta_waddr,
  input  logic [MBITS-1:0]              glb_meta_wdata,
  // compressed output column to off-chip
  output logic                          out_valid,
  output logic [7:0]                    out_m2,
  output logic [7:0]                    out_n2,
  output logic [NW-1:0]                 out_col,
  output logic [LEN-1:0][DATA_W-1:0]    out_nz_val,
  output logic [LEN-1:0][OFF_W-1:0]     out_nz_off,
  output logic [OCW-1:0]                out_nz_cnt,
  output logic [NBO-1:0][OCW-1:0]       out_blk_end,
  // event counters
  output hl_pkg::hl_perf_t              perf
);

  initial begin
    assert (ARRAYS <= 4) else $fatal(1, "A metadata layout holds at most 4 arrays");
    assert (ARRAYS * PES_PER_ROW * G0 <= WW) else $fatal(1, "A row does not fit a GLB row");
    assert (CW * (WB + 1) <= MBITS) else $fatal(1, "set metadata does not fit a row");
    assert (WW * OFF_W <= MBITS) else $fatal(1, "B offsets do not fit a row");
  end

  // ---------------- GLB ----------------
  logic [AW-1:0]              data_addr;
  logic [1:0][AW-1:0]         meta_addr;
  logic [0:0][DBITS-1:0]      data_rd;
  logic [1:0][MBITS-1:0]      meta_rd;

  hl_glb #(.ROWS(1 << AW), .ROW_BITS(DBITS), .NRD(1)) u_glb_data (
    .clk, .wr_en(glb_data_we), .wr_addr(glb_data_waddr), .wr_data(glb_data_wdata),
    .rd_addr(data_addr), .rd_data(data_rd)
  );

  hl_glb #(.ROWS(1 << AW), .ROW_BITS(MBITS), .NRD(2)) u_glb_meta (
    .clk, .wr_en(glb_meta_we), .wr_addr(glb_meta_waddr), .wr_data(glb_meta_wdata),
    .rd_addr(meta_addr), .rd_data(meta_rd)
  );

  // ---------------- controller ----------------
  logic                 ld_en;
  logic [$clog2(ROWS)-1:0] ld_row;
  logic                 vf_flush, vf_step, vf_fetch_allow, vf_ok, vf_fetch_req;
  logic [CW-1:0]        vf_cur_cnt, vf_nxt_cnt, vf_shift;
  logic [WB-1:0][CW-1:0] vf_cur_end;
  logic                 acc_en, acc_first;
  logic [NW-1:0]        acc_col, rd_col;
  logic                 ev_stall, ev_load_done;

  hl_ctrl #(.ROWS(ROWS), .N0(N0), .WB(WB), .CW(CW), .META_BITS(MBITS)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .data_addr, .meta_addr, .meta0_data(meta_rd[0]),
    .ld_en, .ld_row,
    .vf_flush, .vf_step, .vf_fetch_allow, .vf_cur_cnt, .vf_cur_end, .vf_nxt_cnt,
    .vf_ok, .vf_fetch_req,
    .acc_en, .acc_first, .acc_col, .rd_col,
    .out_valid, .out_m2, .out_n2, .out_col,
    .ev_stall, .ev_load_done
  );

  // ---------------- VFMU (Rank1 SAF) ----------------
  logic [WW-1:0][DATA_W-1:0]        fetch_val;
  logic [WW-1:0][OFF_W-1:0]         fetch_off;
  logic [WB-1:0][H0_MAX-1:0][DATA_W-1:0] win_val;
  logic [WB-1:0][H0_MAX-1:0]        win_vld;
  logic [$clog2(2*WW+1)-1:0]        vf_valid_cnt;

  assign fetch_val = data_rd[0];
  assign fetch_off = meta_rd[1][WW*OFF_W-1:0];

  hl_vfmu #(.DATA_W(DATA_W), .GROUPS(GROUPS), .H1_MAX(H1_MAX), .H0_MAX(H0_MAX),
            .GLB_W(WW)) u_vfmu (
    .clk, .rst_n, .flush(vf_flush),
    .cfg_h1(cfg.h1), .cfg_h0(cfg.h0), .cfg_dense(cfg.b_dense),
    .cur_cnt(vf_cur_cnt), .cur_end(vf_cur_end), .nxt_cnt(vf_nxt_cnt),
    .step_en(vf_step), .fetch_allow(vf_fetch_allow),
    .ok(vf_ok), .shift(vf_shift), .valid_cnt(vf_valid_cnt),
    .fetch_req(vf_fetch_req), .fetch_val, .fetch_off,
    .win_val, .win_vld
  );

  // ---------------- PE arrays, register files, activation ----------------
  localparam int NAW = $clog2(ROWS * PES_PER_ROW * G0 + 1);

  logic [ARRAYS-1:0][NAW-1:0]          arr_active, arr_gated;
  logic [LEN-1:0][DATA_W-1:0]          act_out;

  for (genvar a = 0; a < ARRAYS; a++) begin : g_arr
    logic [PES_PER_ROW-1:0][G0-1:0][DATA_W-1:0] ld_a;
    logic [PES_PER_ROW-1:0][G0-1:0][OFF_W-1:0]  ld_off;
    logic [PES_PER_ROW-1:0][CP1_W-1:0]          ld_cp1;
    logic signed [ROWS-1:0][ACC_W-1:0]          row_sum, rf_rd;

    always_comb begin
      for (int p = 0; p < PES_PER_ROW; p++) begin
        logic [AMW-1:0] m;
        m = meta_rd[a / 2][(a % 2) * 64 + p * AMW +: AMW];
        for (int jj = 0; jj < G0; jj++) begin
          ld_a[p][jj]   = data_rd[0][((a * PES_PER_ROW + p) * G0 + jj) * DATA_W +: DATA_W];
          ld_off[p][jj] = m[jj * OFF_W +: OFF_W];
        end
        ld_cp1[p] = m[G0 * OFF_W +: CP1_W];
      end
    end

    hl_pe_array #(.DATA_W(DATA_W), .ACC_W(ACC_W), .ROWS(ROWS), .PES_PER_ROW(PES_PER_ROW),
                  .G0(G0), .G1(G1), .H0_MAX(H0_MAX), .H1_MAX(H1_MAX)) u_array (
      .clk, .rst_n, .ld_en, .ld_row, .ld_a, .ld_off, .ld_cp1,
      .win_val, .win_vld, .win_en(vf_step),
      .row_sum, .n_active(arr_active[a]), .n_gated(arr_gated[a])
    );

    hl_rf #(.ACC_W(ACC_W), .ROWS(ROWS), .N0(N0)) u_rf (
      .clk, .acc_en, .acc_first, .acc_col, .acc_in(row_sum),
      .rd_col, .rd_data(rf_rd)
    );

    for (genvar r = 0; r < ROWS; r++) begin : g_act
      hl_act #(.ACC_W(ACC_W), .DATA_W(DATA_W)) u_act (
        .acc(rf_rd[r]), .shift(cfg.out_shift), .y(act_out[a * ROWS + r])
      );
    end
  end

  // ---------------- compression unit ----------------
  hl_compress #(.DATA_W(DATA_W), .LEN(LEN), .BLK(H0_MAX)) u_comp (
    .vals(act_out), .nz_val(out_nz_val), .nz_off(out_nz_off),
    .nz_cnt(out_nz_cnt), .blk_end(out_blk_end)
  );

  // ---------------- event counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) perf <= '0;
    else if (start && !busy) perf <= '0;
    else begin
      if (busy) perf.cycles <= perf.cycles + 1;
      if (vf_step) perf.steps <= perf.steps + 1;
      if (ev_stall) perf.stall_cycles <= perf.stall_cycles + 1;
      if (vf_fetch_req) perf.glb_fetches <= perf.glb_fetches + 1;
      if (vf_step && !vf_fetch_req) perf.fetch_skips <= perf.fetch_skips + 1;
      if (vf_step) begin
        perf.mac_active <= perf.mac_active + 32'(sum_active());
        perf.mac_gated  <= perf.mac_gated + 32'(sum_gated());
      end
      if (ev_load_done) perf.a_loads <= perf.a_loads + 1;
      if (out_valid) perf.out_cols <= perf.out_cols + 1;
    end
  end

  function automatic int sum_active();
    int t = 0;
    for (int a = 0; a < ARRAYS; a++) t += int'(arr_active[a]);
    return t;
  endfunction

  function automatic int sum_gated();
    int t = 0;
    for (int a = 0; a < ARRAYS; a++) t += int'(arr_gated[a]);
    return t;
  endfunction

  a_cfg_legal: assert property (@(posedge clk) disable iff (!rst_n)
    start && !busy |-> (cfg.h1 >= 4'(G1) && cfg.h1 <= 4'(H1_MAX) &&
                        cfg.h0 >= 3'(G0) && cfg.h0 <= 3'(H0_MAX) &&
                        cfg.n0 >= 1 && cfg.n0 <= 6'(N0)))
    else $error("illegal layer configuration");

endmodule
