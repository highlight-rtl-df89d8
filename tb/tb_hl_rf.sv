// tb_hl_rf -- self-checking testbench of the partial-sum register file at
// its full size (16 rows x 32 columns): random overwrite/accumulate updates
// and reads against a reference array.
module tb_hl_rf;
  localparam int ROWS = 16, N0 = 32;
  logic clk = 0, acc_en, acc_first; logic [4:0] acc_col, rd_col;
  logic signed [ROWS-1:0][31:0] acc_in, rd_data;
  hl_rf #(.ACC_W(32), .ROWS(ROWS), .N0(N0)) dut (.*);
  always #5 clk = ~clk;
  int ref_rf [ROWS][N0];
  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    acc_en = 0; acc_first = 0; acc_col = 0; rd_col = 0; acc_in = '0;
    for (int c = 0; c < N0; c++) begin
      @(negedge clk); acc_en = 1; acc_first = 1; acc_col = 5'(c);
      for (int r = 0; r < ROWS; r++) begin acc_in[r] = 32'($urandom % 1000); ref_rf[r][c] = acc_in[r]; end
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      acc_en = 1'($urandom % 2); acc_first = ($urandom % 8) == 0; acc_col = 5'($urandom);
      for (int r = 0; r < ROWS; r++) acc_in[r] = 32'($urandom % 2000) - 1000;
      rd_col = 5'($urandom);
      #1;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (rd_data[r] != ref_rf[r][rd_col]) begin failures++; $display("FAIL: r%0d c%0d", r, rd_col); end
      end
      @(posedge clk);
      if (acc_en) for (int r = 0; r < ROWS; r++)
        ref_rf[r][acc_col] = acc_first ? acc_in[r] : ref_rf[r][acc_col] + acc_in[r];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
