// hl_act -- activation function unit.
//
// Turns a finished ACC_W-bit output sum into a DATA_W-bit activation for the
// next layer: ReLU, then an arithmetic right shift by `shift` (requantisation)
// and saturation to the largest positive DATA_W-bit value.  The paper names
// the unit and mentions ReLU as the activation that makes operand B sparse;
// the requantisation by shift and saturation are choices of this design.
// Combinational, one value per instance.
module hl_act #(
  parameter int ACC_W  = hl_pkg::ACC_W,
  parameter int DATA_W = hl_pkg::DATA_W
) (
  input  logic signed [ACC_W-1:0]  acc,
  input  logic [4:0]               shift,
  output logic signed [DATA_W-1:0] y
);

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (DATA_W - 1)) - 1);

  logic signed [ACC_W-1:0] r, s;

  always_comb begin
    r = (acc < 0) ? '0 : acc;          // ReLU
    s = r >>> shift;                    // requantise
    y = (s > MAXV) ? DATA_W'(MAXV) : DATA_W'(s);
  end

endmodule
