// hl_pe -- processing element with the Rank0 skipping SAF.
//
// HighLight keeps operand A stationary: each PE holds one non-empty Rank0
// block of A, i.e. its G0 = 2 nonzero values and their offsets (CP metadata)
// inside the block, plus the Rank1 CP that says which Rank1 block of its
// Rank1 fiber the block came from.  Every processing step the Rank1 skipping
// SAF delivers the operand-B blocks of the PE's Rank1 fiber (grp_val/grp_vld,
// H1_MAX blocks of H0_MAX words, each with a valid bit; words removed by
// compression are invalid).  The PE
//   1. picks its block with the Rank1 CP (the per-PE end of the Rank1 SAF),
//   2. picks one word per MAC with the 4:2 mux on the Rank0 CPs
//      (the Rank0 skipping SAF), and
//   3. feeds two chained MACs, which add into the row partial sum psum_in
//      and pass it on as psum_out; a MAC whose B word is invalid is gated.
// The stationary registers load when ld_en is high.  The datapath from
// grp_val to psum_out is combinational, one step per cycle.
module hl_pe #(
  parameter int DATA_W = hl_pkg::DATA_W,
  parameter int ACC_W  = hl_pkg::ACC_W,
  parameter int G0     = hl_pkg::G0,
  parameter int H0_MAX = hl_pkg::H0_MAX,
  parameter int H1_MAX = hl_pkg::H1_MAX,
  localparam int OFF_W = $clog2(H0_MAX),
  localparam int CP1_W = $clog2(H1_MAX)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // stationary operand A load
  input  logic                                  ld_en,
  input  logic [G0-1:0][DATA_W-1:0]             ld_a,
  input  logic [G0-1:0][OFF_W-1:0]              ld_off,
  input  logic [CP1_W-1:0]                      ld_cp1,
  // operand B blocks of this PE's Rank1 fiber
  input  logic [H1_MAX-1:0][H0_MAX-1:0][DATA_W-1:0] grp_val,
  input  logic [H1_MAX-1:0][H0_MAX-1:0]             grp_vld,
  // partial-sum chain
  input  logic signed [ACC_W-1:0]               psum_in,
  output logic signed [ACC_W-1:0]               psum_out,
  output logic [G0-1:0]                         mac_active
);

  logic [G0-1:0][DATA_W-1:0] a_q;
  logic [G0-1:0][OFF_W-1:0]  off_q;
  logic [CP1_W-1:0]          cp1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
      off_q <= '0;
      cp1_q <= '0;
    end else if (ld_en) begin
      a_q   <= ld_a;
      off_q <= ld_off;
      cp1_q <= ld_cp1;
    end
  end

  // Rank1 block select and Rank0 H0_MAX:G0 select
  logic [H0_MAX-1:0][DATA_W-1:0] blk_val;
  logic [H0_MAX-1:0]             blk_vld;
  logic [G0-1:0][DATA_W-1:0]     b_sel;
  logic [G0-1:0]                 b_vld;

  always_comb begin
    blk_val = grp_val[cp1_q];
    blk_vld = grp_vld[cp1_q];
    for (int j = 0; j < G0; j++) begin
      b_sel[j] = blk_val[off_q[j]];
      b_vld[j] = blk_vld[off_q[j]];
    end
  end

  logic signed [G0:0][ACC_W-1:0] chain;
  assign chain[0] = psum_in;

  for (genvar j = 0; j < G0; j++) begin : g_mac
    hl_mac #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_mac (
      .a       (a_q[j]),
      .b       (b_sel[j]),
      .b_vld   (b_vld[j]),
      .psum_in (chain[j]),
      .psum_out(chain[j+1]),
      .active  (mac_active[j])
    );
  end

  assign psum_out = chain[G0];

endmodule
