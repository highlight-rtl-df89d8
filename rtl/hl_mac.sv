// hl_mac -- multiply-accumulate unit with gating on operand B.
//
// Adds a*b to the partial sum arriving from the previous MAC of the PE row
// and passes the result on (the MACs of a row form a chain that ends at the
// register file).  When the selected operand B value is absent (b_vld = 0,
// a zero removed by compression) the MAC is gated: its operands are held at
// zero so the multiplier does not toggle, the partial sum passes through
// unchanged and `active` is low.  Gating keeps the cycle count unchanged, so
// all PEs stay in step.  Purely combinational; operands are signed.
// Gating on operand B's zeros follows the paper; doing it by operand
// isolation, and the 8-bit / 32-bit widths, are this design's choices.
module hl_mac #(
  parameter int DATA_W = hl_pkg::DATA_W,
  parameter int ACC_W  = hl_pkg::ACC_W
) (
  input  logic signed [DATA_W-1:0] a,
  input  logic signed [DATA_W-1:0] b,
  input  logic                     b_vld,
  input  logic signed [ACC_W-1:0]  psum_in,
  output logic signed [ACC_W-1:0]  psum_out,
  output logic                     active
);

  logic signed [DATA_W-1:0]   a_g, b_g;
  logic signed [2*DATA_W-1:0] prod;

  always_comb begin
    active   = b_vld;
    a_g      = b_vld ? a : '0;   // operand isolation
    b_g      = b_vld ? b : '0;
    prod     = a_g * b_g;
    psum_out = psum_in + ACC_W'(prod);
  end

endmodule
