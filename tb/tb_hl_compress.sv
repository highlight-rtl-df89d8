// tb_hl_compress -- self-checking testbench of the compression unit: random
// 64-value columns of varying density (all zero and all nonzero included);
// checks the packed nonzeros, their block offsets, the count and every
// block end address against a software packing.
module tb_hl_compress;
  localparam int LEN = 64, BLK = 4, NB = LEN / BLK;
  logic [LEN-1:0][7:0] vals, nz_val; logic [LEN-1:0][1:0] nz_off;
  logic [6:0] nz_cnt; logic [NB-1:0][6:0] blk_end;
  hl_compress #(.DATA_W(8), .LEN(LEN), .BLK(BLK)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      int dens, n;
      dens = (t == 0) ? 0 : (t == 1) ? 100 : int'($urandom % 101);
      n = 0;
      for (int i = 0; i < LEN; i++) vals[i] = (($urandom % 100) < dens) ? 8'($urandom % 255 + 1) : 8'd0;
      #1;
      for (int i = 0; i < LEN; i++) begin
        if (vals[i] != 0) begin
          chk(nz_val[n] == vals[i], $sformatf("t%0d val %0d", t, n));
          chk(nz_off[n] == 2'(i % BLK), $sformatf("t%0d off %0d", t, n));
          n++;
        end
        if (i % BLK == BLK - 1) chk(blk_end[i / BLK] == 7'(n), $sformatf("t%0d end %0d", t, i / BLK));
      end
      chk(nz_cnt == 7'(n), "count");
      for (int i = n; i < LEN; i++) chk(nz_val[i] == 0, "padding zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
