// tb_hl_act -- self-checking testbench of the activation function: ReLU,
// arithmetic right shift and saturation to +127 against a reference.
module tb_hl_act;
  logic signed [31:0] acc; logic [4:0] shift; logic signed [7:0] y;
  hl_act #(.ACC_W(32), .DATA_W(8)) dut (.acc, .shift, .y);
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 3000; i++) begin
      int e;
      acc = (i % 3 == 0) ? 32'($urandom) : 32'($urandom % 4000) - 2000;
      shift = 5'($urandom % 12);
      #1;
      e = (acc < 0) ? 0 : (acc >>> shift);
      if (e > 127) e = 127;
      checks++;
      if (y != 8'(e)) begin failures++; $display("FAIL: acc=%0d sh=%0d y=%0d exp=%0d", acc, shift, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
