// hl_vfmu -- Variable Fetch Management Unit, the core of the Rank1 skipping SAF.
//
// Operand B lives in the GLB in aligned rows of GLB_W words, but each
// processing step needs one *set* of Rank1 blocks whose length varies: for a
// dense B it is GROUPS*H1*H0 words (H1, H0 are the layer's HSS pattern of
// operand A), for a compressed B it is the set's nonzero count, read from
// the metadata.  The VFMU bridges the two like a bitstream parser:
//   * a circular buffer of DEPTH = 2 x (GROUPS*H1_MAX blocks of H0_MAX)
//     words holds operand-B words and their Rank0 offsets;
//   * a step (step_en) consumes one set: the read pointer shifts by the set
//     length (`shift`);
//   * a GLB row is fetched (fetch_req, data on fetch_val/fetch_off in the
//     same cycle, written at the clock edge) only when the entries left after
//     this step cannot cover the next set (nxt_cnt); otherwise no fetch is
//     made, which lets the metadata catch up with data already fetched;
//   * `ok` says the current set is entirely in the buffer.
// The current set is split into its blocks: block i of the set ends at
// cur_end[i] (dense: (i+1)*H0), and each word is placed in its block slot by
// its Rank0 offset (dense: its position), giving for each of the GROUPS
// Rank1 fibers H1_MAX block slots of H0_MAX words with valid bits (win_*).
// Slots past H1 are padding and invalid.  Those expanded blocks go to every
// PE; each PE picks its block with its own Rank1 CP.
// Follows the paper: buffer of 2 x Hmax blocks, shift per step equal to the
// set's length, fetch only when the valid entries fall short of the next set.
// This design's choices: the per-PE block selection sits in the PE instead of
// start/end-address muxes inside the VFMU, and a missing word is signalled by
// a valid bit that gates the MAC.
// Two assertions check the handshake: a step is taken only when the whole set
// is buffered, and a fetch never overwrites unread words.  They are disabled
// by rst_n, which is also the asynchronous reset of the flops; the lint note
// about a reset used both ways refers only to that.
module hl_vfmu #(
  parameter int DATA_W = hl_pkg::DATA_W,
  parameter int GROUPS = hl_pkg::GROUPS,
  parameter int H1_MAX = hl_pkg::H1_MAX,
  parameter int H0_MAX = hl_pkg::H0_MAX,
  parameter int GLB_W  = hl_pkg::GLB_WORDS,
  localparam int WB    = GROUPS * H1_MAX,
  localparam int WW    = WB * H0_MAX,
  localparam int DEPTH = 2 * WW,
  localparam int PW    = $clog2(DEPTH),
  localparam int VW    = $clog2(DEPTH + 1),
  localparam int CW    = $clog2(WW + 1),
  localparam int OFF_W = $clog2(H0_MAX)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  flush,
  // layer configuration
  input  logic [3:0]                            cfg_h1,
  input  logic [2:0]                            cfg_h0,
  input  logic                                  cfg_dense,
  // set metadata (compressed operand B)
  input  logic [CW-1:0]                         cur_cnt,
  input  logic [WB-1:0][CW-1:0]                 cur_end,
  input  logic [CW-1:0]                         nxt_cnt,
  // control
  input  logic                                  step_en,
  input  logic                                  fetch_allow,
  output logic                                  ok,
  output logic [CW-1:0]                         shift,
  output logic [VW-1:0]                         valid_cnt,
  // GLB row fetch
  output logic                                  fetch_req,
  input  logic [GLB_W-1:0][DATA_W-1:0]          fetch_val,
  input  logic [GLB_W-1:0][OFF_W-1:0]           fetch_off,
  // expanded blocks of the current set
  output logic [WB-1:0][H0_MAX-1:0][DATA_W-1:0] win_val,
  output logic [WB-1:0][H0_MAX-1:0]             win_vld
);

  initial begin
    assert (DEPTH == (1 << PW)) else $fatal(1, "VFMU depth must be a power of two");
    assert (GLB_W <= WW) else $fatal(1, "GLB row wider than one set");
  end

  logic [DATA_W-1:0] buf_val [DEPTH];
  logic [OFF_W-1:0]  buf_off [DEPTH];
  logic [PW-1:0]     rd_ptr, wr_ptr;
  logic [VW-1:0]     valid_q;

  // set lengths
  logic [CW-1:0] dense_len, cur_len, nxt_len, consume;
  logic [VW-1:0] left;

  always_comb begin
    dense_len = CW'(GROUPS) * CW'(cfg_h1) * CW'(cfg_h0);
    cur_len   = cfg_dense ? dense_len : cur_cnt;
    nxt_len   = cfg_dense ? dense_len : nxt_cnt;
    ok        = (valid_q >= VW'(cur_len));
    consume   = step_en ? cur_len : '0;
    shift     = consume;
    left      = valid_q - VW'(consume);
    fetch_req = fetch_allow && !flush && (left < VW'(nxt_len));
    valid_cnt = valid_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr  <= '0;
      wr_ptr  <= '0;
      valid_q <= '0;
    end else if (flush) begin
      rd_ptr  <= '0;
      wr_ptr  <= '0;
      valid_q <= '0;
    end else begin
      rd_ptr  <= rd_ptr + PW'(consume);
      valid_q <= left + (fetch_req ? VW'(GLB_W) : '0);
      if (fetch_req) wr_ptr <= wr_ptr + PW'(GLB_W);
    end
  end

  always_ff @(posedge clk) begin
    if (fetch_req) begin
      for (int i = 0; i < GLB_W; i++) begin
        buf_val[wr_ptr + PW'(i)] <= fetch_val[i];
        buf_off[wr_ptr + PW'(i)] <= fetch_off[i];
      end
    end
  end

  // split the current set into blocks and place words by their offsets
  always_comb begin
    int gb, st, en, a;
    logic [PW-1:0] idx;
    logic [OFF_W-1:0] off;
    win_val = '0;
    win_vld = '0;
    gb = 0; st = 0; en = 0; a = 0; idx = '0; off = '0;
    for (int g = 0; g < GROUPS; g++) begin
      for (int b = 0; b < H1_MAX; b++) begin
        gb = g * int'(cfg_h1) + b;
        if (b < int'(cfg_h1) && gb < WB) begin
          if (cfg_dense) begin
            st = gb * int'(cfg_h0);
            en = st + int'(cfg_h0);
          end else begin
            st = (gb == 0) ? 0 : int'(cur_end[gb-1]);
            en = int'(cur_end[gb]);
          end
          for (int i = 0; i < H0_MAX; i++) begin
            a   = st + i;
            idx = rd_ptr + PW'(a);
            off = cfg_dense ? OFF_W'(i) : buf_off[idx];
            if (a < en) begin
              win_val[g*H1_MAX + b][off] = buf_val[idx];
              win_vld[g*H1_MAX + b][off] = 1'b1;
            end
          end
        end
      end
    end
  end

  // a step may only consume a set that is fully buffered, and a fetch must fit
  a_step_ok: assert property (@(posedge clk) disable iff (!rst_n || flush)
                              step_en |-> ok)
    else $error("VFMU stepped without a full set");
  a_no_ovf: assert property (@(posedge clk) disable iff (!rst_n || flush)
                             fetch_req |-> (left + VW'(GLB_W) <= VW'(DEPTH)))
    else $error("VFMU fetch would overflow the buffer");

endmodule
