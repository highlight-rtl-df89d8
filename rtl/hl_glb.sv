// hl_glb -- one partition of the global buffer (GLB).
//
// The GLB sits between off-chip memory and the PE arrays and holds operand A,
// operand B and their metadata.  HighLight splits it into a 256 KB data
// partition and a 64 KB metadata partition; each is one instance of this
// module.  It is a plain row-addressed memory: one write port, filled from
// off-chip, and NRD read ports.  Reads are combinational (data of rd_addr in
// the same cycle) so that a row fetched at a processing step is written into
// the VFMU at the end of that step, the timing drawn in the operand-B
// fetch walk-throughs.  Row widths and the number of read ports are choices
// of this design; capacity follows the paper.  A synthesised version would
// map this array onto SRAM macros and move the fetch decision one cycle
// earlier.
module hl_glb #(
  parameter int ROWS     = hl_pkg::GLB_DATA_ROWS,
  parameter int ROW_BITS = hl_pkg::GLB_DATA_BITS,
  parameter int NRD      = 1,
  localparam int AW      = $clog2(ROWS)
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [AW-1:0]                 wr_addr,
  input  logic [ROW_BITS-1:0]           wr_data,
  input  logic [NRD-1:0][AW-1:0]        rd_addr,
  output logic [NRD-1:0][ROW_BITS-1:0]  rd_data
);

  logic [ROW_BITS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_comb begin
    for (int i = 0; i < NRD; i++) rd_data[i] = mem[rd_addr[i]];
  end

endmodule
