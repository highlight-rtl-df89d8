// tb_hl_vfmu -- self-checking testbench of the Variable Fetch Management Unit.
//
// Uses the reduced configuration of the paper's walk-throughs: one Rank1
// fiber per step (GROUPS = 1), H1_MAX = H0_MAX = 4, 16-word GLB rows and a
// 32-word buffer.
//  1. The compressed operand B of the 2:3 walk-through: B values B_k at
//     k = 0,1,3,4,5,6,8,9,13,...,45, sets of three 4-word blocks with 8, 11,
//     8, 7 nonzeros.  Checks per step the shift (0, 8, 11, 8), the valid
//     entries left (8, 13, 5), the fetch pattern (row0, row1, none, row2)
//     and every expanded block word.
//  2. Random sparse and dense streams for every H1 in 2..4 and H0 in 2..4,
//     long enough to wrap the buffer many times, checked against a reference
//     model of the fetch rule and the block contents; after the first fill
//     no step may stall.
module tb_hl_vfmu;
  localparam int GROUPS = 1, H1_MAX = 4, H0_MAX = 4, GLB_W = 16;
  localparam int WB = GROUPS * H1_MAX, WW = WB * H0_MAX, CW = $clog2(WW + 1);
  localparam int DEPTH = 2 * WW;
  localparam int KMAX = 4096;

  logic clk = 0, rst_n = 0, flush = 0;
  logic [3:0] cfg_h1; logic [2:0] cfg_h0; logic cfg_dense;
  logic [CW-1:0] cur_cnt, nxt_cnt; logic [WB-1:0][CW-1:0] cur_end;
  logic step_en, fetch_allow, ok, fetch_req;
  logic [CW-1:0] shift; logic [$clog2(DEPTH+1)-1:0] valid_cnt;
  logic [GLB_W-1:0][7:0] fetch_val; logic [GLB_W-1:0][1:0] fetch_off;
  logic [WB-1:0][H0_MAX-1:0][7:0] win_val; logic [WB-1:0][H0_MAX-1:0] win_vld;

  hl_vfmu #(.DATA_W(8), .GROUPS(GROUPS), .H1_MAX(H1_MAX), .H0_MAX(H0_MAX), .GLB_W(GLB_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // test data: dense vector bd[k], stream of stored words, per-set metadata
  int bd [KMAX];
  int sv [$], so [$];               // stream values / offsets
  int scnt [$]; int send [$][$];    // per-set count and block end addresses

  function automatic void build(input int h1, input int h0, input bit dense, input int nsets);
    int L = h1 * h0;
    sv.delete(); so.delete(); scnt.delete(); send.delete();
    for (int s = 0; s < nsets; s++) begin
      int c = 0; int e[$];
      for (int b = 0; b < h1; b++) begin
        for (int o = 0; o < h0; o++) begin
          int k = s * L + b * h0 + o;
          if (dense || bd[k] != 0) begin sv.push_back(bd[k]); so.push_back(o); c++; end
        end
        e.push_back(c);
      end
      scnt.push_back(c); send.push_back(e);
    end
    while (sv.size() % GLB_W != 0 || sv.size() < (nsets + 4) * WW) begin sv.push_back(0); so.push_back(0); end
  endfunction

  // run nsets steps; returns number of stalled cycles after the first step
  task automatic run(input int h1, input int h0, input bit dense, input int nsets,
                     input bit fig14, output int stalls);
    int s = 0, f = 0, rv = 0, cyc = 0, L = h1 * h0;
    int exp_shift[4] = '{0, 8, 11, 8}; int exp_left[4] = '{0, 8, 13, 5}; bit exp_fetch[4] = '{1, 1, 0, 1};
    stalls = 0;
    cfg_h1 = 4'(h1); cfg_h0 = 3'(h0); cfg_dense = dense; fetch_allow = 1;
    @(negedge clk); flush = 1; step_en = 0; @(negedge clk); flush = 0;
    while (s < nsets) begin
      int cur_len, nxt_len, consume; bit exp_req;
      cur_cnt = CW'(scnt[s]);
      for (int b = 0; b < WB; b++) cur_end[b] = (b < h1) ? CW'(send[s][b]) : '0;
      cur_len = dense ? L : scnt[s];
      step_en = (rv >= cur_len);
      nxt_len = step_en ? (dense ? L : scnt[s+1]) : cur_len;
      nxt_cnt = CW'(step_en ? scnt[s+1] : scnt[s]);
      for (int i = 0; i < GLB_W; i++) begin
        fetch_val[i] = 8'(sv[f * GLB_W + i]); fetch_off[i] = 2'(so[f * GLB_W + i]);
      end
      #1;
      consume = step_en ? cur_len : 0;
      exp_req = (rv - consume) < nxt_len;
      chk(ok == (rv >= cur_len), $sformatf("ok h1=%0d h0=%0d s=%0d", h1, h0, s));
      chk(fetch_req == exp_req, $sformatf("fetch_req h1=%0d h0=%0d s=%0d", h1, h0, s));
      chk(shift == CW'(consume), "shift");
      if (fig14 && cyc < 4) begin
        chk(shift == CW'(exp_shift[cyc]), $sformatf("fig14 shift step %0d = %0d", cyc, shift));
        chk(fetch_req == exp_fetch[cyc], $sformatf("fig14 fetch step %0d", cyc));
        if (cyc > 0) chk(rv - consume == exp_left[cyc], $sformatf("fig14 valid left step %0d", cyc));
      end
      if (step_en) begin
        for (int b = 0; b < WB; b++)
          for (int o = 0; o < H0_MAX; o++) begin
            int k = s * L + b * h0 + o;
            bit ev = (b < h1) && (o < h0) && (dense || bd[k] != 0);
            chk(win_vld[b][o] == ev, $sformatf("vld s=%0d b=%0d o=%0d", s, b, o));
            if (ev) chk(win_val[b][o] == 8'(bd[k]), $sformatf("val s=%0d b=%0d o=%0d", s, b, o));
          end
      end else if (s > 0) stalls++;
      @(posedge clk);
      rv = rv - consume + (exp_req ? GLB_W : 0);
      if (exp_req) f++;
      if (step_en) s++;
      cyc++;
      @(negedge clk);
      chk(int'(valid_cnt) == rv, "valid count");
    end
    step_en = 0;
  endtask

  initial begin
    int st;
    cfg_h1 = 3; cfg_h0 = 4; cfg_dense = 0; cur_cnt = 0; nxt_cnt = 0; cur_end = '0;
    step_en = 0; fetch_allow = 0; fetch_val = '0; fetch_off = '0;
    repeat (2) @(posedge clk); rst_n = 1;

    // 1. compressed B from the 2:3 walk-through
    foreach (bd[k]) bd[k] = 0;
    foreach (bd[k]) if (k < 48) bd[k] = k + 1;
    foreach (bd[k]) if (k inside {2, 7, 10, 11, 12, 29, 30, 31, 35, 37, 40, 41, 46, 47}) bd[k] = 0;
    build(3, 4, 0, 4);
    chk(scnt[0] == 8 && scnt[1] == 11 && scnt[2] == 8 && scnt[3] == 7, "fig14 set counts");
    run(3, 4, 0, 3, 1, st);

    // 2. random streams, every pattern, sparse and dense
    for (int dense = 0; dense < 2; dense++)
      for (int h1 = 2; h1 <= 4; h1++)
        for (int h0 = 2; h0 <= 4; h0++) begin
          foreach (bd[k]) bd[k] = (($urandom % 100) < 40) ? 0 : int'($urandom % 127) + 1;
          if (dense != 0) foreach (bd[k]) if (bd[k] == 0) bd[k] = 5;
          build(h1, h0, dense[0], 60);
          run(h1, h0, dense[0], 59, 0, st);
          chk(st == 0, $sformatf("no stall after first fill h1=%0d h0=%0d dense=%0d (%0d)", h1, h0, dense, st));
        end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
