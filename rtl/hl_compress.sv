// hl_compress -- compression unit for output activations.
//
// After the activation function, HighLight compresses each output column so
// that it can serve as an unstructured-sparse operand B of the next layer.
// The input is one column of LEN activations (all arrays' rows, in k order).
// The output uses the operand-B format:
//   nz_val/nz_off : the nonzero values packed to the front, each with its
//                   offset inside its Rank0 block of BLK values,
//   nz_cnt        : the number of nonzeros,
//   blk_end       : the end address (exclusive, in packed words) of every
//                   block, i.e. a running count of nonzeros.
// Slots of nz_val past nz_cnt are zero.  Combinational, one column per cycle.
// The paper gives the format and the unit's place after the activation
// function; the prefix-count packing is this design's implementation, and
// the block size is fixed at BLK (re-blocking for another H0 is left to the
// layout of the next layer's operand B).
module hl_compress #(
  parameter int DATA_W = hl_pkg::DATA_W,
  parameter int LEN    = hl_pkg::ARRAYS * hl_pkg::ROWS,
  parameter int BLK    = hl_pkg::H0_MAX,
  localparam int NB    = LEN / BLK,
  localparam int OFF_W = $clog2(BLK),
  localparam int CW    = $clog2(LEN + 1)
) (
  input  logic [LEN-1:0][DATA_W-1:0] vals,
  output logic [LEN-1:0][DATA_W-1:0] nz_val,
  output logic [LEN-1:0][OFF_W-1:0]  nz_off,
  output logic [CW-1:0]              nz_cnt,
  output logic [NB-1:0][CW-1:0]      blk_end
);

  always_comb begin
    logic [CW-1:0] pre;   // nonzeros among vals[0..i-1]
    pre     = '0;
    nz_val  = '0;
    nz_off  = '0;
    blk_end = '0;
    for (int i = 0; i < LEN; i++) begin
      if (vals[i] != '0) begin
        nz_val[pre[CW-2:0]] = vals[i];
        nz_off[pre[CW-2:0]] = OFF_W'(i % BLK);
        pre = pre + 1'b1;
      end
      if (i % BLK == BLK - 1) blk_end[i / BLK] = pre;
    end
    nz_cnt = pre;
  end

endmodule
