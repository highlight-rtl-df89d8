// hl_pkg -- shared constants and types of the HighLight sparse DNN accelerator.
//
// HighLight multiplies an operand A that carries two-rank hierarchical
// structured sparsity (HSS), C1(G1:H1) -> C0(G0:H0), by an operand B that is
// dense or unstructured sparse.  The sizes below are the main configuration:
// 1024 MACs in four PE arrays (ARRAYS), Rank1 patterns 4:{4..8} (G1, H1_MAX),
// Rank0 patterns 2:{2..4} (G0, H0_MAX), a 256 KB data + 64 KB metadata global
// buffer and a 2 KB register file per array.  The word widths (8-bit signed
// operands, 32-bit partial sums), the split of a 16-row array into 8 PEs of
// two MACs per row, and the GLB row widths are choices of this design; the
// paper does not state them.
package hl_pkg;

  // datapath widths (design choice)
  localparam int DATA_W = 8;
  localparam int ACC_W  = 32;

  // HSS pattern support: C1(4:{4<=H<=8}) -> C0(2:{2<=H<=4})
  localparam int G0     = 2;
  localparam int H0_MAX = 4;
  localparam int G1     = 4;
  localparam int H1_MAX = 8;

  // compute organisation: 4 arrays x 16 rows x 8 PEs x 2 MACs = 1024 MACs
  localparam int ARRAYS      = 4;
  localparam int ROWS        = 16;
  localparam int PES_PER_ROW = 8;
  localparam int GROUPS      = PES_PER_ROW / G1;      // Rank1 fibers per PE row

  // one processing step consumes one set of GROUPS*H1 Rank1 blocks of B
  localparam int WIN_BLOCKS = GROUPS * H1_MAX;        // 16 blocks
  localparam int WIN_WORDS  = WIN_BLOCKS * H0_MAX;    // 64 words

  // register file: 2 KB per array = ROWS x N0 partial sums of ACC_W bits
  localparam int N0 = 2048 * 8 / (ROWS * ACC_W);      // 32 columns

  // global buffer: data partition 256 KB, metadata partition 64 KB
  localparam int GLB_WORDS     = WIN_WORDS;           // operand words per data row
  localparam int GLB_DATA_BITS = GLB_WORDS * DATA_W;  // 512
  localparam int GLB_DATA_ROWS = 256 * 1024 * 8 / GLB_DATA_BITS;  // 4096
  localparam int GLB_META_BITS = 128;
  localparam int GLB_META_ROWS = 64 * 1024 * 8 / GLB_META_BITS;   // 4096
  localparam int GLB_AW        = 12;

  // VFMU buffer: 2 x Hmax blocks (of both groups) of operand B
  localparam int VFMU_DEPTH = 2 * WIN_WORDS;          // 128 words

  localparam int OFF_W = $clog2(H0_MAX);              // Rank0 CP width
  localparam int CP1_W = $clog2(H1_MAX);              // Rank1 CP width
  localparam int CNT_W = $clog2(WIN_WORDS + 1);       // words in one set

  // per-PE stationary A metadata packed in the metadata partition:
  // {cp1, off1, off0}
  localparam int A_META_W = CP1_W + G0 * OFF_W;       // 7 bits

  // layer configuration, held stable while the accelerator is busy
  typedef struct packed {
    logic [3:0]        h1;            // Rank1 H of operand A (4..8)
    logic [2:0]        h0;            // Rank0 H of operand A (2..4)
    logic              b_dense;       // 1: operand B stored dense
    logic [7:0]        m2_cnt;        // output-row tiles of ARRAYS*ROWS rows
    logic [7:0]        n2_cnt;        // output-column tiles of n0 columns
    logic [7:0]        k2_cnt;        // reduction tiles of GROUPS*H1*H0 values
    logic [5:0]        n0;            // columns per tile (1..N0)
    logic [4:0]        out_shift;     // requantisation shift of the outputs
    logic [GLB_AW-1:0] a_base;        // data row of the first A tile row
    logic [GLB_AW-1:0] a_meta_base;   // metadata row of the first A tile row
    logic [GLB_AW-1:0] b_base;        // data row of the first B row
    logic [GLB_AW-1:0] b_off_base;    // metadata row with offsets of B row 0
    logic [GLB_AW-1:0] b_smeta_base;  // metadata row of B step-set 0
  } hl_cfg_t;

  // performance/event counters reported by the top
  typedef struct packed {
    logic [31:0] cycles;
    logic [31:0] steps;          // processing steps (one B set each)
    logic [31:0] stall_cycles;   // steps held because the VFMU lacked data
    logic [31:0] glb_fetches;    // B rows fetched into the VFMU
    logic [31:0] fetch_skips;    // steps with no GLB fetch needed
    logic [31:0] mac_active;     // MAC operations performed
    logic [31:0] mac_gated;      // MAC operations gated on a zero B value
    logic [31:0] a_loads;        // A tiles loaded into the PE arrays
    logic [31:0] out_cols;       // compressed output columns sent off-chip
  } hl_perf_t;

endpackage
