// tb_hl_mac -- self-checking testbench of the gated MAC: random signed
// operands and partial sums with B present or absent; a present B adds a*b,
// an absent B leaves the partial sum unchanged and clears `active`.
module tb_hl_mac;
  logic signed [7:0] a, b; logic b_vld; logic signed [31:0] pin, pout; logic active;
  hl_mac #(.DATA_W(8), .ACC_W(32)) dut (.a, .b, .b_vld, .psum_in(pin), .psum_out(pout), .active);
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      longint e;
      a = 8'($urandom); b = 8'($urandom); b_vld = ($urandom % 4) != 0;
      pin = 32'($urandom % 200000) - 100000;
      if (i == 0) begin a = -128; b = -128; b_vld = 1; end
      #1;
      e = longint'(pin) + (b_vld ? longint'(a) * longint'(b) : 0);
      checks += 2;
      if (pout != 32'(e)) begin failures++; $display("FAIL: a=%0d b=%0d v=%0d p=%0d got %0d", a, b, b_vld, pin, pout); end
      if (active != b_vld) begin failures++; $display("FAIL: active"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
