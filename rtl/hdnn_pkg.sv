// hdnn_pkg: types, constants and helper functions shared by the hybrid
// Spatial/Winograd CONV accelerator.
//
// Parallel factors PI (input-channel lanes), PO (output-channel lanes) and PT
// (Winograd input tile size, PT = m + r - 1) follow the VU9P configuration of
// the design (PI = PO = 4, PT = 6, i.e. F(4x4,3x3)); PT = 4 selects F(2x2,3x3).
// Data widths follow the published precision: 8-bit parameters and feature
// maps in memory, 12-bit transformed features inside the PE.
//
// Every instruction is 128 bits wide and starts with OPCODE, DEPT_FLAG and
// BUFF_ID, in the field order of the instruction-set figure. The figure prints
// only bit 0 and bit 127, so all field widths and bit positions below are this
// design's own choice. Fields are packed LSB first (OPCODE at bit 0).
package hdnn_pkg;

  // ---------------- configuration ----------------
  localparam int unsigned PI_DEF   = 4;   // input-channel parallelism
  localparam int unsigned PO_DEF   = 4;   // output-channel parallelism
  localparam int unsigned PT_DEF   = 6;   // Winograd input tile size (4 or 6)
  localparam int unsigned RK       = 3;   // Winograd kernel size r
  localparam int unsigned FW       = 8;   // feature map width in memory / buffers
  localparam int unsigned WW       = 8;   // weight / bias width
  localparam int unsigned PW       = 12;  // transformed feature width in the PE
  localparam int unsigned ACC_W    = 32;  // accumulator width
  localparam int unsigned DRAM_AW  = 32;  // byte address width

  // ---------------- opcodes ----------------
  typedef enum logic [2:0] {
    OP_LOAD_INP  = 3'd0,
    OP_LOAD_WGT  = 3'd1,
    OP_LOAD_BIAS = 3'd2,
    OP_COMP      = 3'd3,
    OP_SAVE      = 3'd4
  } opcode_e;

  // DEPT_FLAG bit meanings (dependency tokens through the handshake FIFOs)
  // LOAD_INP / LOAD_WGT / SAVE : [0] wait for a token before starting,
  //                               [1] emit a token when finished.
  // COMP : [0] wait inp-ready  [1] emit inp-free
  //        [2] wait wgt-ready  [3] emit wgt-free
  //        [4] wait out-free   [5] emit out-ready
  localparam int unsigned DF_WAIT = 0;
  localparam int unsigned DF_SIG  = 1;
  localparam int unsigned DF_WAIT_INP = 0;
  localparam int unsigned DF_SIG_INP  = 1;
  localparam int unsigned DF_WAIT_WGT = 2;
  localparam int unsigned DF_SIG_WGT  = 3;
  localparam int unsigned DF_WAIT_OUT = 4;
  localparam int unsigned DF_SIG_OUT  = 5;

  // LOAD_INP / LOAD_WGT / LOAD_BIAS instruction (LSB first)
  typedef struct packed {
    logic [12:0] save_fence;   // [127:115] LOAD_INP: SAVEs that must be done first
    logic [9:0]  iw_blk_num;   // [114:105] number of (padded) rows to load
    logic [9:0]  wino_offset;  // [104:95]  first padded row of the group
    logic        wino_flag;    // [94]      buffer/DRAM layout: 1 = WINO
    logic [3:0]  pads;         // [93:90]   zero padding on each side
    logic [29:0] size;         // [89:60]   INP: {CV,W,H}; WGT/BIAS: entries
    logic [31:0] dram_base;    // [59:28]   byte address
    logic [15:0] buff_base;    // [27:12]   word address inside one buffer half
    logic [2:0]  buff_id;      // [11:9]    bit 0: ping-pong half
    logic [5:0]  dept_flag;    // [8:3]
    logic [2:0]  opcode;       // [2:0]
  } load_inst_t;

  // COMP instruction
  typedef struct packed {
    logic [23:0] rsrv;         // [127:104]
    logic        acc_last;     // [103]  QUAN_PARAM: last partial sum -> output buffer
    logic        acc_first;    // [102]  QUAN_PARAM: first partial sum, clears accumulation
    logic [4:0]  shift;        // [101:97] QUAN_PARAM: arithmetic right shift
    logic        relu;         // [96]
    logic [3:0]  off_c;        // [95:92] WINO_OFFSET column offset (kernel piece / tap)
    logic [3:0]  off_r;        // [91:88] WINO_OFFSET row offset
    logic        wino_flag;    // [87]
    logic [2:0]  stride;       // [86:84] spatial stride
    logic [7:0]  oc_num;       // [83:76] output channel groups Fk
    logic [7:0]  ic_num;       // [75:68] input channel groups Fc
    logic [9:0]  ow_num;       // [67:58] output columns (spat) / tiles (wino) Fy
    logic [9:0]  iw_num;       // [57:48] padded input width held in the input buffer
    logic [10:0] wgt_base;     // [47:37]
    logic [10:0] out_base;     // [36:26]
    logic [13:0] inp_base;     // [25:12]
    logic [2:0]  buff_id;      // [11:9] {out, wgt, inp} ping-pong halves
    logic [5:0]  dept_flag;    // [8:3]
    logic [2:0]  opcode;       // [2:0]
  } comp_inst_t;

  // SAVE instruction
  typedef struct packed {
    logic [11:0] rsrv;         // [127:116]
    logic [9:0]  ow_blk_num;   // [115:106] entries along the width Fy
    logic [9:0]  oc_blk_num;   // [105:96]  entries along output channels Fk
    logic        dst_wino;     // [95]  WINO_FLAG[1]: DRAM layout to write
    logic        src_wino;     // [94]  WINO_FLAG[0]: layout of the output buffer
    logic [3:0]  pool;         // [93:90] 1 = none, 2 = 2x2 max pooling
    logic [29:0] size;         // [89:60] {unused,KV,Wo}: DRAM row width and channel vectors
    logic [31:0] dram_base;    // [59:28]
    logic [15:0] buff_base;    // [27:12]
    logic [2:0]  buff_id;      // [11:9]
    logic [5:0]  dept_flag;    // [8:3]
    logic [2:0]  opcode;       // [2:0]
  } save_inst_t;

  // ---------------- Winograd constant matrices ----------------
  // B^T (PT x PT) of F(m x m, 3 x 3), m = PT - 2.
  function automatic int bt_coef(int unsigned pt, int unsigned i, int unsigned k);
    int bt6 [6][6];
    int bt4 [4][4];
    bt6 = '{'{4, 0,-5, 0, 1, 0},
            '{0,-4,-4, 1, 1, 0},
            '{0, 4,-4,-1, 1, 0},
            '{0,-2,-1, 2, 1, 0},
            '{0, 2,-1,-2, 1, 0},
            '{0, 4, 0,-5, 0, 1}};
    bt4 = '{'{1, 0,-1, 0},
            '{0, 1, 1, 0},
            '{0,-1, 1, 0},
            '{0, 1, 0,-1}};
    if (pt == 6) return bt6[i][k];
    return bt4[i%4][k%4];
  endfunction

  // A^T (m x PT) of F(m x m, 3 x 3).
  function automatic int at_coef(int unsigned pt, int unsigned i, int unsigned k);
    int at6 [4][6];
    int at4 [2][4];
    at6 = '{'{1, 1, 1, 1, 1, 0},
            '{0, 1,-1, 2,-2, 0},
            '{0, 1, 1, 4, 4, 0},
            '{0, 1,-1, 8,-8, 1}};
    at4 = '{'{1, 1, 1, 0},
            '{0, 1,-1,-1}};
    if (pt == 6) return at6[i%4][k];
    return at4[i%2][k%4];
  endfunction

  function automatic int unsigned max_u(int unsigned a, int unsigned b);
    return (a > b) ? a : b;
  endfunction

endpackage
