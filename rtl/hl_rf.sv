// hl_rf -- partial-sum register file of one PE array.
//
// Holds the output partial sums Z[m1][n0] of the array's ROWS rows for N0
// output columns (ROWS x N0 x ACC_W bits = 2 KB at the defaults, the size the
// paper gives).  In a processing step the array delivers one partial sum per
// row for column acc_col; with acc_first high (first reduction tile) they
// overwrite the column, otherwise they are added to it.  After the last
// reduction tile the columns are read out through rd_col/rd_data
// (combinational) towards the activation function.  Reset clears nothing:
// the first tile always overwrites.
// The size follows the paper; the row x column organisation, the
// overwrite-on-first-tile rule and the combinational read are this design's.
module hl_rf #(
  parameter int ACC_W = hl_pkg::ACC_W,
  parameter int ROWS  = hl_pkg::ROWS,
  parameter int N0    = hl_pkg::N0,
  localparam int CW   = $clog2(N0)
) (
  input  logic                          clk,
  input  logic                          acc_en,
  input  logic                          acc_first,
  input  logic [CW-1:0]                 acc_col,
  input  logic signed [ROWS-1:0][ACC_W-1:0] acc_in,
  input  logic [CW-1:0]                 rd_col,
  output logic signed [ROWS-1:0][ACC_W-1:0] rd_data
);

  logic signed [ACC_W-1:0] psum [ROWS][N0];

  always_ff @(posedge clk) begin
    if (acc_en) begin
      for (int r = 0; r < ROWS; r++)
        psum[r][acc_col] <= acc_first ? acc_in[r] : psum[r][acc_col] + acc_in[r];
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) rd_data[r] = psum[r][rd_col];
  end

endmodule
