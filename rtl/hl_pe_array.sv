// hl_pe_array -- one PE array: ROWS rows of PES_PER_ROW PEs.
//
// All rows see the same operand-B window (the current set of Rank1 blocks,
// WIN_BLOCKS blocks laid out as GROUPS groups of H1_MAX block slots); each
// row holds the stationary A tile of a different output row.  The PEs of a
// row are split into GROUPS groups of G1 PEs; group g works on Rank1 fiber g
// of the set, so each of its G1 PEs holds one of the G1 non-empty Rank1
// blocks of that fiber.  Within a row the MAC partial sums are chained from
// PE 0 to the last PE (spatial accumulation); row_sum is the chain's end,
// valid in the same cycle as win_val.  A rows are loaded one per cycle
// through ld_* with ld_row naming the row.  n_active counts the MACs doing
// work this cycle, n_gated those gated on a missing B value.  The
// 16-row x 8-PE x 2-MAC shape reconciles the paper's "16x16 PE array" label
// with its 256 MACs per array; see the top-level notes.
module hl_pe_array #(
  parameter int DATA_W      = hl_pkg::DATA_W,
  parameter int ACC_W       = hl_pkg::ACC_W,
  parameter int ROWS        = hl_pkg::ROWS,
  parameter int PES_PER_ROW = hl_pkg::PES_PER_ROW,
  parameter int G0          = hl_pkg::G0,
  parameter int G1          = hl_pkg::G1,
  parameter int H0_MAX      = hl_pkg::H0_MAX,
  parameter int H1_MAX      = hl_pkg::H1_MAX,
  localparam int GROUPS     = PES_PER_ROW / G1,
  localparam int WB         = GROUPS * H1_MAX,
  localparam int OFF_W      = $clog2(H0_MAX),
  localparam int CP1_W      = $clog2(H1_MAX),
  localparam int RW         = $clog2(ROWS),
  localparam int NW         = $clog2(ROWS * PES_PER_ROW * G0 + 1)
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          ld_en,
  input  logic [RW-1:0]                                 ld_row,
  input  logic [PES_PER_ROW-1:0][G0-1:0][DATA_W-1:0]    ld_a,
  input  logic [PES_PER_ROW-1:0][G0-1:0][OFF_W-1:0]     ld_off,
  input  logic [PES_PER_ROW-1:0][CP1_W-1:0]             ld_cp1,
  input  logic [WB-1:0][H0_MAX-1:0][DATA_W-1:0]         win_val,
  input  logic [WB-1:0][H0_MAX-1:0]                     win_vld,
  input  logic                                          win_en,
  output logic signed [ROWS-1:0][ACC_W-1:0]             row_sum,
  output logic [NW-1:0]                                 n_active,
  output logic [NW-1:0]                                 n_gated
);

  initial begin
    assert (PES_PER_ROW % G1 == 0) else $fatal(1, "PES_PER_ROW must be a multiple of G1");
  end

  logic [ROWS-1:0][PES_PER_ROW-1:0][G0-1:0] act;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic signed [PES_PER_ROW:0][ACC_W-1:0] chain;
    assign chain[0] = '0;
    for (genvar p = 0; p < PES_PER_ROW; p++) begin : g_pe
      hl_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W), .G0(G0),
              .H0_MAX(H0_MAX), .H1_MAX(H1_MAX)) u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .ld_en     (ld_en && (ld_row == RW'(r))),
        .ld_a      (ld_a[p]),
        .ld_off    (ld_off[p]),
        .ld_cp1    (ld_cp1[p]),
        .grp_val   (win_val[(p / G1) * H1_MAX +: H1_MAX]),
        .grp_vld   (win_vld[(p / G1) * H1_MAX +: H1_MAX]),
        .psum_in   (chain[p]),
        .psum_out  (chain[p+1]),
        .mac_active(act[r][p])
      );
    end
    assign row_sum[r] = chain[PES_PER_ROW];
  end

  always_comb begin
    n_active = '0;
    n_gated  = '0;
    if (win_en) begin
      for (int r = 0; r < ROWS; r++)
        for (int p = 0; p < PES_PER_ROW; p++)
          for (int j = 0; j < G0; j++) begin
            n_active += NW'(act[r][p][j]);
            n_gated  += NW'(!act[r][p][j]);
          end
    end
  end

endmodule
