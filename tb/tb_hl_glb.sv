// tb_hl_glb -- self-checking testbench of a GLB partition (reduced to 256
// rows of 128 bits, two read ports): random writes mirrored in a reference
// array, reads on both ports checked in the same cycle.
module tb_hl_glb;
  localparam int ROWS = 256, RB = 128;
  logic clk = 0, wr_en; logic [7:0] wr_addr; logic [RB-1:0] wr_data;
  logic [1:0][7:0] rd_addr; logic [1:0][RB-1:0] rd_data;
  hl_glb #(.ROWS(ROWS), .ROW_BITS(RB), .NRD(2)) dut (.*);
  always #5 clk = ~clk;
  logic [RB-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = 0; rd_addr = '0;
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 8'(i);
      wr_data = {$urandom, $urandom, $urandom, $urandom}; ref_mem[i] = wr_data;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      wr_en = 1'($urandom % 2); wr_addr = 8'($urandom);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      rd_addr[0] = 8'($urandom); rd_addr[1] = 8'($urandom);
      #1;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rd_data[p] != ref_mem[rd_addr[p]]) begin failures++; $display("FAIL: port %0d addr %0d", p, rd_addr[p]); end
      end
      @(posedge clk); if (wr_en) ref_mem[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
