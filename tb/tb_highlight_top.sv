// tb_highlight_top -- end-to-end testbench of the HighLight accelerator at
// its default size (4 arrays x 16 rows x 8 PEs x 2 MACs, full GLB and RF).
//
// For each layer it generates an operand A with two-rank HSS
// C1(4:H1) -> C0(2:H0) (random choice of the non-empty Rank1 blocks and of
// the nonzeros inside them), an operand B with random zeros, writes the
// A tiles, the operand-B stream and all metadata into the GLB in the layout
// described in highlight_top, runs the layer and compares every compressed
// output column with Z = A x B computed here, passed through ReLU, shift,
// saturation and packing.  It also checks the step count, the number of A
// tile loads, the exact cycle count of the schedule and that stalls occur
// only for the first fill of each m2 pass.
// Layers: dense B with C1(4:8)->C0(2:4) (75% sparse A); compressed B with
// C1(4:5)->C0(2:3); compressed, very sparse B with dense A (4:4, 2:2); and
// C1(4:6)->C0(2:4) with a full 32-column register-file tile.  Each mechanism
// (Rank1 skipping, Rank0 skipping, gating, fetch skipping, first-fill stall,
// buffer wrap, multi-tile accumulation, m2 flush, zero removal in the
// compression unit, dense and compressed B) is counted and must occur.
module tb_highlight_top;
  import hl_pkg::*;
  localparam int LEN = ARRAYS * ROWS;
  localparam int MMAX = 128, KMAX = 512, NMAX = 64;

  logic clk = 0, rst_n = 0, start = 0;
  hl_cfg_t cfg;
  logic busy, done;
  logic glb_data_we = 0, glb_meta_we = 0;
  logic [GLB_AW-1:0] glb_data_waddr, glb_meta_waddr;
  logic [GLB_DATA_BITS-1:0] glb_data_wdata;
  logic [GLB_META_BITS-1:0] glb_meta_wdata;
  logic out_valid; logic [7:0] out_m2, out_n2; logic [4:0] out_col;
  logic [LEN-1:0][7:0] out_nz_val; logic [LEN-1:0][1:0] out_nz_off;
  logic [6:0] out_nz_cnt; logic [LEN/4-1:0][6:0] out_blk_end;
  hl_perf_t perf;

  highlight_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_rank1_skip, n_rank0_skip, n_gated, n_fetch_skip, n_stall, n_wrap, n_multi_k,
      n_m2_flush, n_zero_drop, n_dense_b, n_sparse_b;

  int A [MMAX][KMAX];
  int B [KMAX][NMAX];
  int Y [MMAX][NMAX];
  int outs_seen;

  task automatic wr_data(input int addr, input logic [GLB_DATA_BITS-1:0] d);
    @(negedge clk); glb_data_we = 1; glb_data_waddr = GLB_AW'(addr); glb_data_wdata = d;
    @(negedge clk); glb_data_we = 0;
  endtask
  task automatic wr_meta(input int addr, input logic [GLB_META_BITS-1:0] d);
    @(negedge clk); glb_meta_we = 1; glb_meta_waddr = GLB_AW'(addr); glb_meta_wdata = d;
    @(negedge clk); glb_meta_we = 0;
  endtask

  task automatic layer(input int h1, input int h0, input bit dense, input int bzero_pct,
                       input int m2c, input int n2c, input int k2c, input int n0, input int shift);
    int L, M, N, K, nsets, nwords, cyc_exp;
    int sv [$], so [$];
    L = GROUPS * h1 * h0; M = m2c * LEN; N = n2c * n0; K = k2c * L;
    // ---- operand A with two-rank HSS, packed per tile ----
    for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) A[m][k] = 0;
    for (int m2 = 0; m2 < m2c; m2++)
      for (int k2 = 0; k2 < k2c; k2++)
        for (int r = 0; r < ROWS; r++) begin
          logic [GLB_DATA_BITS-1:0] drow;
          logic [1:0][GLB_META_BITS-1:0] mrow;
          int row;
          drow = '0; mrow = '0;
          row = (m2 * k2c + k2) * ROWS + r;
          for (int a = 0; a < ARRAYS; a++) begin
            int m;
            m = m2 * LEN + a * ROWS + r;
            for (int g = 0; g < GROUPS; g++) begin
              int blks [$];
              int pick [$];
              for (int b = 0; b < h1; b++) blks.push_back(b);
              blks.shuffle();
              for (int i = 0; i < G1; i++) pick.push_back(blks[i]);
              pick.sort();
              for (int i = 0; i < G1; i++) begin
                int p, offs [$], sel [$];
                p = g * G1 + i;
                for (int o = 0; o < h0; o++) offs.push_back(o);
                offs.shuffle();
                for (int j = 0; j < G0; j++) sel.push_back(offs[j]);
                sel.sort();
                for (int j = 0; j < G0; j++) begin
                  int v, k;
                  v = int'($urandom % 41) - 20;
                  if (v == 0) v = 7;
                  k = k2 * L + (g * h1 + pick[i]) * h0 + sel[j];
                  A[m][k] = v;
                  drow[((a * PES_PER_ROW + p) * G0 + j) * 8 +: 8] = 8'(v);
                  mrow[a / 2][(a % 2) * 64 + p * A_META_W + j * OFF_W +: OFF_W] = OFF_W'(sel[j]);
                end
                mrow[a / 2][(a % 2) * 64 + p * A_META_W + G0 * OFF_W +: CP1_W] = CP1_W'(pick[i]);
              end
            end
          end
          wr_data(row, drow);
          wr_meta(2 * row, mrow[0]);
          wr_meta(2 * row + 1, mrow[1]);
        end
    // ---- operand B and its stream of sets ----
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++)
      B[k][n] = (int'($urandom % 100) < bzero_pct) ? 0 : int'($urandom % 40) + 1;
    nsets = 0;
    for (int n2 = 0; n2 < n2c; n2++)
      for (int k2 = 0; k2 < k2c; k2++)
        for (int j = 0; j < n0; j++) begin
          logic [GLB_META_BITS-1:0] smeta;
          int n, c;
          n = n2 * n0 + j; c = 0; smeta = '0;
          for (int b = 0; b < GROUPS * h1; b++) begin
            for (int o = 0; o < h0; o++) begin
              int v;
              v = B[k2 * L + b * h0 + o][n];
              if (dense || v != 0) begin sv.push_back(v); so.push_back(o); c++; end
            end
            smeta[CNT_W + CNT_W * b +: CNT_W] = CNT_W'(c);
          end
          smeta[CNT_W-1:0] = CNT_W'(c);
          if (!dense) wr_meta(2048 + nsets, smeta);
          nsets++;
        end
    while (sv.size() % GLB_WORDS != 0) begin sv.push_back(0); so.push_back(0); end
    sv.push_back(0); so.push_back(0);   // the fetch rule may look one row past the end
    while (sv.size() % GLB_WORDS != 0) begin sv.push_back(0); so.push_back(0); end
    nwords = sv.size();
    for (int f = 0; f < nwords / GLB_WORDS; f++) begin
      logic [GLB_DATA_BITS-1:0] drow;
      logic [GLB_META_BITS-1:0] orow;
      for (int i = 0; i < GLB_WORDS; i++) begin
        drow[i * 8 +: 8] = 8'(sv[f * GLB_WORDS + i]);
        orow[i * OFF_W +: OFF_W] = OFF_W'(so[f * GLB_WORDS + i]);
      end
      wr_data(1024 + f, drow);
      wr_meta(1024 + f, orow);
    end
    // ---- reference result ----
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) begin
        longint z;
        z = 0;
        for (int k = 0; k < K; k++) z += longint'(A[m][k]) * longint'(B[k][n]);
        z = (z < 0) ? 0 : (z >>> shift);
        Y[m][n] = (z > 127) ? 127 : int'(z);
      end
    // ---- run ----
    cfg = '0;
    cfg.h1 = 4'(h1); cfg.h0 = 3'(h0); cfg.b_dense = dense;
    cfg.m2_cnt = 8'(m2c); cfg.n2_cnt = 8'(n2c); cfg.k2_cnt = 8'(k2c); cfg.n0 = 6'(n0);
    cfg.out_shift = 5'(shift);
    cfg.a_base = 0; cfg.a_meta_base = 0; cfg.b_base = 1024; cfg.b_off_base = 1024; cfg.b_smeta_base = 2048;
    outs_seen = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin
      @(posedge clk);
      if (out_valid) begin
        int n, cnt, pos;
        n = int'(out_n2) * n0 + int'(out_col);
        cnt = 0;
        for (int i = 0; i < LEN; i++) begin
          int y;
          y = Y[int'(out_m2) * LEN + i][n];
          if (y != 0) begin
            chk(out_nz_val[cnt] == 8'(y) && out_nz_off[cnt] == 2'(i % 4),
                $sformatf("h1=%0d h0=%0d m2=%0d n=%0d nz %0d: got %0d exp %0d", h1, h0, out_m2, n, cnt,
                          out_nz_val[cnt], y));
            cnt++;
          end
          if (i % 4 == 3) chk(out_blk_end[i / 4] == 7'(cnt), "block end address");
        end
        chk(out_nz_cnt == 7'(cnt), $sformatf("nonzero count m2=%0d n=%0d", out_m2, n));
        if (cnt < LEN) n_zero_drop++;
        pos = 0;
        outs_seen++;
      end
    end
    // ---- schedule and counters ----
    cyc_exp = m2c * (n2c * (k2c * (ROWS + n0) + n0) + 1);
    chk(outs_seen == m2c * n2c * n0, $sformatf("output columns %0d", outs_seen));
    chk(perf.steps == 32'(m2c * n2c * k2c * n0), $sformatf("steps %0d", perf.steps));
    chk(perf.a_loads == 32'(m2c * n2c * k2c), "A tile loads");
    chk(perf.stall_cycles == 32'(m2c), $sformatf("stalls %0d (first fill only)", perf.stall_cycles));
    chk(perf.cycles == 32'(cyc_exp), $sformatf("cycles %0d exp %0d", perf.cycles, cyc_exp));
    chk(perf.mac_active + perf.mac_gated == perf.steps * 32'(ARRAYS * ROWS * PES_PER_ROW * G0),
        "every MAC busy or gated each step");
    $display("layer C1(4:%0d)->C0(2:%0d) B %s %0d%% zeros: M=%0d N=%0d K=%0d, %0d steps, %0d cycles, %0d fetches, %0d gated MACs",
             h1, h0, dense ? "dense" : "compressed", bzero_pct, M, N, K, perf.steps, perf.cycles,
             perf.glb_fetches, perf.mac_gated);
    if (h1 > G1) n_rank1_skip++;
    if (h0 > G0) n_rank0_skip++;
    if (perf.mac_gated > 0) n_gated++;
    if (perf.fetch_skips > 0) n_fetch_skip++;
    if (perf.stall_cycles > 0) n_stall++;
    if (perf.glb_fetches * 32'(GLB_WORDS) > 32'(VFMU_DEPTH)) n_wrap++;
    if (k2c > 1) n_multi_k++;
    if (m2c > 1) n_m2_flush++;
    if (dense) n_dense_b++; else n_sparse_b++;
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    layer(8, 4, 1, 50, 2, 2, 2, 8, 6);
    layer(5, 3, 0, 50, 1, 2, 3, 6, 5);
    layer(4, 2, 0, 85, 2, 1, 2, 5, 3);
    layer(6, 4, 0, 30, 1, 1, 2, 32, 6);
    chk(n_rank1_skip > 0, "Rank1 skipping exercised");
    chk(n_rank0_skip > 0, "Rank0 skipping exercised");
    chk(n_gated > 0, "gating exercised");
    chk(n_fetch_skip > 0, "fetch skipping exercised");
    chk(n_stall > 0, "first-fill stall exercised");
    chk(n_wrap > 0, "VFMU buffer wrap exercised");
    chk(n_multi_k > 0, "multi-tile accumulation exercised");
    chk(n_m2_flush > 0, "m2 flush exercised");
    chk(n_zero_drop > 0, "compression zero removal exercised");
    chk(n_dense_b > 0 && n_sparse_b > 0, "dense and compressed B exercised");
    $display("mechanisms: rank1_skip=%0d rank0_skip=%0d gated=%0d fetch_skip=%0d stall=%0d wrap=%0d multi_k=%0d m2_flush=%0d zero_drop=%0d dense=%0d sparse=%0d",
             n_rank1_skip, n_rank0_skip, n_gated, n_fetch_skip, n_stall, n_wrap, n_multi_k,
             n_m2_flush, n_zero_drop, n_dense_b, n_sparse_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
