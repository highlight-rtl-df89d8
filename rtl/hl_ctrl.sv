// hl_ctrl -- sequencer of HighLight's HSS-operand-stationary dataflow.
//
// Walks the loop nest
//   for m2 (output-row tiles, ARRAYS x ROWS rows each; arrays = pfor m2-p)
//     for n2 (output-column tiles of n0 columns)
//       for k2 (reduction tiles, one set of Rank1 blocks = GROUPS*H1*H0 values)
//         LOAD : A tile rows 0..ROWS-1 -> stationary PE registers, one row of
//                all arrays per cycle (GLB data row + two metadata rows)
//         STEP : for n0 columns: one processing step per column; the VFMU
//                delivers the column's set of B blocks, the arrays add into
//                the register file (overwrite on k2 = 0)
//       DRAIN: n0 cycles, one register-file column per cycle through the
//              activation function and compression unit to the output
// Operand B of one m2 pass is a single stream of sets in the GLB, consumed in
// (n2, k2, n0) order; the VFMU is flushed and the stream restarted for every
// m2.  A step waits (stall) while the VFMU does not hold the whole set.  For a
// compressed B the set metadata (count, block end addresses) of set s is in
// metadata row b_smeta_base + s: the controller keeps set s in a register and
// presents set s+1 (or s when not stepping) as the "next" set to the VFMU's
// fetch decision.  B row f and its offsets are at b_base + f / b_off_base + f.
// The paper gives the loop nest and the stationarity; the state machine,
// address map and the lack of double buffering of A are this design's.
module hl_ctrl #(
  parameter int ROWS      = hl_pkg::ROWS,
  parameter int N0        = hl_pkg::N0,
  parameter int WB        = hl_pkg::WIN_BLOCKS,
  parameter int CW        = hl_pkg::CNT_W,
  parameter int META_BITS = hl_pkg::GLB_META_BITS,
  localparam int RW       = $clog2(ROWS),
  localparam int NW       = $clog2(N0),
  localparam int GLB_AW   = hl_pkg::GLB_AW
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  hl_pkg::hl_cfg_t             cfg,
  output logic                        busy,
  output logic                        done,
  // GLB read addresses
  output logic [GLB_AW-1:0]           data_addr,
  output logic [1:0][GLB_AW-1:0]      meta_addr,
  input  logic [META_BITS-1:0]        meta0_data,
  // PE array load
  output logic                        ld_en,
  output logic [RW-1:0]               ld_row,
  // VFMU
  output logic                        vf_flush,
  output logic                        vf_step,
  output logic                        vf_fetch_allow,
  output logic [CW-1:0]               vf_cur_cnt,
  output logic [WB-1:0][CW-1:0]       vf_cur_end,
  output logic [CW-1:0]               vf_nxt_cnt,
  input  logic                        vf_ok,
  input  logic                        vf_fetch_req,
  // register file
  output logic                        acc_en,
  output logic                        acc_first,
  output logic [NW-1:0]               acc_col,
  output logic [NW-1:0]               rd_col,
  // output column
  output logic                        out_valid,
  output logic [7:0]                  out_m2,
  output logic [7:0]                  out_n2,
  output logic [NW-1:0]               out_col,
  // events
  output logic                        ev_stall,
  output logic                        ev_load_done
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_STEP, S_DRAIN, S_DONE} state_t;

  state_t              state;
  logic [7:0]          m2, n2, k2;
  logic [RW-1:0]       r;
  logic [NW-1:0]       j;          // column within the tile (step or drain)
  logic [15:0]         s;          // set index within the m2 pass
  logic [GLB_AW-1:0]   f;          // B row index within the m2 pass
  logic                cur_loaded;
  logic [META_BITS-1:0] cur_meta;
  logic [15:0]         tile;
  logic [GLB_AW-1:0]   a_row;

  function automatic logic [CW-1:0] meta_cnt(input logic [META_BITS-1:0] m);
    return m[CW-1:0];
  endfunction

  always_comb begin
    tile  = 16'(m2) * 16'(cfg.k2_cnt) + 16'(k2);
    a_row = GLB_AW'(tile * 16'(ROWS)) + GLB_AW'(r);

    busy = (state != S_IDLE) && (state != S_DONE);

    ld_en  = (state == S_LOAD);
    ld_row = r;

    // a compressed B needs set s's metadata registered before stepping
    vf_step        = (state == S_STEP) && vf_ok && (cfg.b_dense || cur_loaded);
    vf_fetch_allow = (state == S_STEP);
    vf_flush       = (state == S_IDLE && start) ||
                     (state == S_DRAIN && j == NW'(cfg.n0 - 1) &&
                      n2 == cfg.n2_cnt - 1 && m2 != cfg.m2_cnt - 1);
    vf_cur_cnt     = meta_cnt(cur_meta);
    for (int i = 0; i < WB; i++) vf_cur_end[i] = cur_meta[CW + CW*i +: CW];
    vf_nxt_cnt     = (vf_step || !cur_loaded) ? meta_cnt(meta0_data) : vf_cur_cnt;

    if (state == S_LOAD) begin
      data_addr    = cfg.a_base + a_row;
      meta_addr[0] = cfg.a_meta_base + GLB_AW'({a_row, 1'b0});
      meta_addr[1] = cfg.a_meta_base + GLB_AW'({a_row, 1'b1});
    end else begin
      data_addr    = cfg.b_base + f;
      meta_addr[0] = cfg.b_smeta_base + GLB_AW'(s) + GLB_AW'(vf_step && cur_loaded);
      meta_addr[1] = cfg.b_off_base + f;
    end

    acc_en    = vf_step;
    acc_first = (k2 == 8'd0);
    acc_col   = j;
    rd_col    = j;

    out_valid = (state == S_DRAIN);
    out_m2    = m2;
    out_n2    = n2;
    out_col   = j;

    ev_stall     = (state == S_STEP) && !vf_step;
    ev_load_done = (state == S_LOAD) && (r == RW'(ROWS - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      m2         <= '0;
      n2         <= '0;
      k2         <= '0;
      r          <= '0;
      j          <= '0;
      s          <= '0;
      f          <= '0;
      cur_loaded <= 1'b0;
      cur_meta   <= '0;
      done       <= 1'b0;
    end else begin
      if (vf_fetch_req && state == S_STEP) f <= f + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          m2 <= '0; n2 <= '0; k2 <= '0; r <= '0; j <= '0;
          s <= '0; f <= '0; cur_loaded <= 1'b0; done <= 1'b0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          r <= r + 1'b1;
          if (r == RW'(ROWS - 1)) begin
            r     <= '0;
            j     <= '0;
            state <= S_STEP;
          end
        end
        S_STEP: begin
          if (!cfg.b_dense && !cur_loaded) begin
            cur_meta   <= meta0_data;      // metadata of set s
            cur_loaded <= 1'b1;
          end else if (vf_step) begin
            cur_meta <= meta0_data;        // metadata of set s+1
            s        <= s + 1'b1;
            j        <= j + 1'b1;
            if (j == NW'(cfg.n0 - 1)) begin
              j <= '0;
              if (k2 == cfg.k2_cnt - 1) state <= S_DRAIN;
              else begin
                k2    <= k2 + 1'b1;
                state <= S_LOAD;
              end
            end
          end
        end
        S_DRAIN: begin
          j <= j + 1'b1;
          if (j == NW'(cfg.n0 - 1)) begin
            j  <= '0;
            k2 <= '0;
            state <= S_LOAD;
            if (n2 == cfg.n2_cnt - 1) begin
              n2 <= '0;
              if (m2 == cfg.m2_cnt - 1) state <= S_DONE;
              else begin
                m2         <= m2 + 1'b1;
                s          <= '0;
                f          <= '0;
                cur_loaded <= 1'b0;
              end
            end else n2 <= n2 + 1'b1;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
