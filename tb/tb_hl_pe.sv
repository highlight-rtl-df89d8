// tb_hl_pe -- self-checking testbench of the PE (Rank0 skipping SAF + MACs).
//  1. The two-PE example of the down-sized architecture: PE0 holds a, c at
//     Rank0 offsets 0, 2 of Rank1 block 0, PE1 holds j, k at offsets 1, 2 of
//     Rank1 block 2; with dense B_0..B_15 the chained row sum must be
//     a*B0 + c*B2 + j*B9 + k*B10.
//  2. Random stationary loads and random B blocks with missing words:
//     psum_out = psum_in + sum of a_j * B[cp1][off_j] over present words,
//     mac_active equals the presence bits.
module tb_hl_pe;
  localparam int H1_MAX = 8, H0_MAX = 4;
  logic clk = 0, rst_n = 0;
  logic [1:0] ld_en;
  logic [1:0][1:0][7:0] ld_a; logic [1:0][1:0][1:0] ld_off; logic [1:0][2:0] ld_cp1;
  logic [H1_MAX-1:0][H0_MAX-1:0][7:0] grp_val; logic [H1_MAX-1:0][H0_MAX-1:0] grp_vld;
  logic signed [31:0] p0_in, p0_out, p1_out; logic [1:0] act0, act1;

  hl_pe #(.DATA_W(8), .ACC_W(32), .G0(2), .H0_MAX(H0_MAX), .H1_MAX(H1_MAX)) pe0 (
    .clk, .rst_n, .ld_en(ld_en[0]), .ld_a(ld_a[0]), .ld_off(ld_off[0]), .ld_cp1(ld_cp1[0]),
    .grp_val, .grp_vld, .psum_in(p0_in), .psum_out(p0_out), .mac_active(act0));
  hl_pe #(.DATA_W(8), .ACC_W(32), .G0(2), .H0_MAX(H0_MAX), .H1_MAX(H1_MAX)) pe1 (
    .clk, .rst_n, .ld_en(ld_en[1]), .ld_a(ld_a[1]), .ld_off(ld_off[1]), .ld_cp1(ld_cp1[1]),
    .grp_val, .grp_vld, .psum_in(p0_out), .psum_out(p1_out), .mac_active(act1));

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int a_v[2][2], o_v[2][2], c_v[2];
    ld_en = 0; ld_a = '0; ld_off = '0; ld_cp1 = '0; grp_val = '0; grp_vld = '0; p0_in = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // 1. down-sized example: a=3, c=-5, j=7, k=2; B_k = k + 10
    @(negedge clk); ld_en = 2'b11;
    ld_a[0] = {8'(-5), 8'(3)}; ld_off[0] = {2'd2, 2'd0}; ld_cp1[0] = 3'd0;
    ld_a[1] = {8'(2), 8'(7)};  ld_off[1] = {2'd2, 2'd1}; ld_cp1[1] = 3'd2;
    a_v = '{'{3, -5}, '{7, 2}}; o_v = '{'{0, 2}, '{1, 2}}; c_v = '{0, 2};
    @(negedge clk); ld_en = 0;
    for (int b = 0; b < 4; b++) for (int o = 0; o < 4; o++) begin
      grp_val[b][o] = 8'(b * 4 + o + 10); grp_vld[b][o] = 1;
    end
    #1;
    chk(p1_out == 3 * 10 + (-5) * 12 + 7 * 19 + 2 * 20, $sformatf("example row sum %0d", p1_out));
    chk(act0 == 2'b11 && act1 == 2'b11, "example all MACs active");
    // 2. random
    for (int t = 0; t < 2000; t++) begin
      int e;
      @(negedge clk);
      ld_en = 2'($urandom);
      for (int p = 0; p < 2; p++) begin
        ld_a[p] = 16'($urandom); ld_off[p] = 4'($urandom); ld_cp1[p] = 3'($urandom);
        if (ld_en[p]) begin
          a_v[p][0] = int'($signed(ld_a[p][0])); a_v[p][1] = int'($signed(ld_a[p][1]));
          o_v[p][0] = int'(ld_off[p][0]); o_v[p][1] = int'(ld_off[p][1]); c_v[p] = int'(ld_cp1[p]);
        end
      end
      @(negedge clk); ld_en = 0;
      for (int b = 0; b < H1_MAX; b++) for (int o = 0; o < H0_MAX; o++) begin
        grp_val[b][o] = 8'($urandom); grp_vld[b][o] = ($urandom % 3) != 0;
      end
      p0_in = 32'($urandom % 100000) - 50000;
      #1;
      e = p0_in;
      for (int p = 0; p < 2; p++) for (int j = 0; j < 2; j++)
        if (grp_vld[c_v[p]][o_v[p][j]]) e += a_v[p][j] * int'($signed(grp_val[c_v[p]][o_v[p][j]]));
      chk(p1_out == e, $sformatf("t%0d row sum %0d exp %0d", t, p1_out, e));
      chk(act0[0] == grp_vld[c_v[0]][o_v[0][0]] && act1[1] == grp_vld[c_v[1]][o_v[1][1]], "gating");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
