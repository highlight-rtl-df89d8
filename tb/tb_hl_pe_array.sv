// tb_hl_pe_array -- self-checking testbench of a full-size PE array
// (16 rows x 8 PEs x 2 MACs, two Rank1 groups of G1 = 4 PEs).  Loads random
// stationary A rows, drives random windows of 16 B blocks with missing
// words, and checks every row sum and the active/gated MAC counts against a
// reference that applies the block and offset selection itself; PEs of
// group 1 must read blocks 8..15.
module tb_hl_pe_array;
  localparam int ROWS = 16, PES = 8, G1 = 4, H1_MAX = 8, H0_MAX = 4, WB = 2 * H1_MAX;
  logic clk = 0, rst_n = 0, ld_en, win_en; logic [3:0] ld_row;
  logic [PES-1:0][1:0][7:0] ld_a; logic [PES-1:0][1:0][1:0] ld_off; logic [PES-1:0][2:0] ld_cp1;
  logic [WB-1:0][H0_MAX-1:0][7:0] win_val; logic [WB-1:0][H0_MAX-1:0] win_vld;
  logic signed [ROWS-1:0][31:0] row_sum; logic [8:0] n_active, n_gated;
  hl_pe_array #(.DATA_W(8), .ACC_W(32), .ROWS(ROWS), .PES_PER_ROW(PES), .G0(2), .G1(G1),
                .H0_MAX(H0_MAX), .H1_MAX(H1_MAX)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int ra[ROWS][PES][2], ro[ROWS][PES][2], rc[ROWS][PES];
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ld_en = 0; win_en = 0; ld_row = 0; ld_a = '0; ld_off = '0; ld_cp1 = '0; win_val = '0; win_vld = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk); ld_en = 1; ld_row = 4'(r);
        for (int p = 0; p < PES; p++) begin
          ld_cp1[p] = 3'($urandom); rc[r][p] = int'(ld_cp1[p]);
          for (int j = 0; j < 2; j++) begin
            ld_a[p][j] = 8'($urandom); ld_off[p][j] = 2'($urandom);
            ra[r][p][j] = int'($signed(ld_a[p][j])); ro[r][p][j] = int'(ld_off[p][j]);
          end
        end
      end
      @(negedge clk); ld_en = 0;
      for (int st = 0; st < 10; st++) begin
        int na, ng;
        na = 0; ng = 0;
        @(negedge clk); win_en = 1;
        for (int b = 0; b < WB; b++) for (int o = 0; o < H0_MAX; o++) begin
          win_val[b][o] = 8'($urandom); win_vld[b][o] = ($urandom % 4) != 0;
        end
        #1;
        for (int r = 0; r < ROWS; r++) begin
          int e;
          e = 0;
          for (int p = 0; p < PES; p++) for (int j = 0; j < 2; j++) begin
            int b;
            b = (p / G1) * H1_MAX + rc[r][p];
            if (win_vld[b][ro[r][p][j]]) begin
              e += ra[r][p][j] * int'($signed(win_val[b][ro[r][p][j]])); na++;
            end else ng++;
          end
          chk(row_sum[r] == e, $sformatf("it%0d row %0d sum %0d exp %0d", it, r, row_sum[r], e));
        end
        chk(n_active == 9'(na) && n_gated == 9'(ng), "active/gated counts");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
