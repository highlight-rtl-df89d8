// tb_hl_ctrl -- self-checking testbench of the dataflow sequencer.
// Runs a reduced controller (4-row arrays, 4-column register file) through
// small layers, with dense and compressed operand B, while a stand-in for
// the VFMU refuses a step at random (stalls).  The observed sequence of A-row
// loads (with their GLB addresses), accumulation steps (column, first-tile
// flag) and drained columns (m2, n2, column) must equal the loop nest
// m2 / n2 / k2 / {load rows, n0 steps} / drain computed here; the VFMU must
// be flushed once per m2 pass, a compressed B must read set s+1's metadata
// while stepping set s, and done must rise at the end.
module tb_hl_ctrl;
  import hl_pkg::*;
  localparam int ROWS = 4, N0 = 4, WB = 16, CW = 7;
  logic clk = 0, rst_n = 0, start = 0;
  hl_cfg_t cfg;
  logic busy, done, ld_en, vf_flush, vf_step, vf_fetch_allow, vf_ok, vf_fetch_req;
  logic acc_en, acc_first, out_valid, ev_stall, ev_load_done;
  logic [GLB_AW-1:0] data_addr; logic [1:0][GLB_AW-1:0] meta_addr; logic [127:0] meta0_data;
  logic [1:0] ld_row; logic [CW-1:0] vf_cur_cnt, vf_nxt_cnt; logic [WB-1:0][CW-1:0] vf_cur_end;
  logic [1:0] acc_col, rd_col, out_col; logic [7:0] out_m2, out_n2;

  hl_ctrl #(.ROWS(ROWS), .N0(N0), .WB(WB), .CW(CW), .META_BITS(128)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (50000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // metadata of set s reads back s in its count field
  always_comb meta0_data = 128'(meta_addr[0] - cfg.b_smeta_base);
  // stand-in VFMU: random readiness, no fetches
  assign vf_fetch_req = 1'b0;

  string got [$], exp [$];
  int flushes, stalls;
  always @(posedge clk) if (rst_n) begin
    if (ld_en) got.push_back($sformatf("L r%0d a%0d m%0d", ld_row, data_addr, meta_addr[0]));
    if (acc_en) got.push_back($sformatf("S c%0d f%0d", acc_col, acc_first));
    if (out_valid) got.push_back($sformatf("D m%0d n%0d c%0d", out_m2, out_n2, out_col));
    if (vf_flush) flushes++;
    if (ev_stall) stalls++;
    if (vf_step && !cfg.b_dense) chk(vf_cur_cnt == 7'(int'(meta_addr[0]) - int'(cfg.b_smeta_base) - 1) &&
                                     vf_nxt_cnt == 7'(meta_addr[0] - cfg.b_smeta_base),
                                     "set metadata s / s+1");
  end
  always @(negedge clk) vf_ok = ($urandom % 4) != 0;

  task automatic run(input int m2c, input int n2c, input int k2c, input int n0, input bit dense);
    int cyc;
    got.delete(); exp.delete(); flushes = 0; stalls = 0;
    cfg = '0; cfg.h1 = 4; cfg.h0 = 4; cfg.b_dense = dense; cfg.m2_cnt = 8'(m2c); cfg.n2_cnt = 8'(n2c);
    cfg.k2_cnt = 8'(k2c); cfg.n0 = 6'(n0); cfg.a_base = 100; cfg.a_meta_base = 600; cfg.b_smeta_base = 2000;
    for (int m2 = 0; m2 < m2c; m2++)
      for (int n2 = 0; n2 < n2c; n2++) begin
        for (int k2 = 0; k2 < k2c; k2++) begin
          for (int r = 0; r < ROWS; r++) begin
            int row;
            row = (m2 * k2c + k2) * ROWS + r;
            exp.push_back($sformatf("L r%0d a%0d m%0d", r, 100 + row, 600 + 2 * row));
          end
          for (int c = 0; c < n0; c++) exp.push_back($sformatf("S c%0d f%0d", c, k2 == 0));
        end
        for (int c = 0; c < n0; c++) exp.push_back($sformatf("D m%0d n%0d c%0d", m2, n2, c));
      end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin @(posedge clk); cyc++; end
    chk(done, "done");
    chk(got.size() == exp.size(), $sformatf("event count %0d vs %0d", got.size(), exp.size()));
    foreach (exp[i]) chk(i < got.size() && got[i] == exp[i],
                         $sformatf("event %0d: got '%s' exp '%s'", i, i < got.size() ? got[i] : "-", exp[i]));
    chk(flushes == m2c, $sformatf("flushes %0d", flushes));
    chk(stalls > 0, "stalls exercised");
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(2, 2, 3, 3, 1);
    run(2, 1, 2, 4, 0);
    run(1, 3, 1, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
