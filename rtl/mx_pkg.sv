// mx_pkg: sizes, number formats, command encodings and arithmetic helpers shared by
// every block of the Mamba-X accelerator.
//
// Sizes that follow the paper: 8 systolic scan arrays with a chunk of 16 positions,
// state dimension 16 (all Vision Mamba models), a 64x64 GEMM engine, 384 KB of on-chip
// buffer, INT8 weights and activations, 16- and 32-entry SFU lookup tables, and a
// partial state with 2 extra fractional bits. Everything else here (the 1024-bit buffer
// word, the 24-bit state register, the Q8.8 SFU format, the command layout) is this
// design's own choice and is documented next to its definition.
package mx_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned CHUNK      = 16;            // SSA chunk size (positions per SSA)
  localparam int unsigned NSSA       = 8;             // number of SSAs
  localparam int unsigned SEG        = NSSA * CHUNK;  // positions scanned per row issue (128)
  localparam int unsigned MDIM       = 16;            // SSM state dimension m
  localparam int unsigned GEMM_N     = 64;            // GEMM engine is GEMM_N x GEMM_N PEs
  localparam int unsigned WORD_BYTES = SEG;           // buffer / DRAM word: 128 INT8 lanes
  localparam int unsigned WORD_W     = WORD_BYTES * 8;
  localparam int unsigned BUF_BYTES  = 384 * 1024;    // on-chip buffer capacity
  localparam int unsigned BUF_WORDS  = BUF_BYTES / WORD_BYTES;  // 3072
  localparam int unsigned BUF_AW     = $clog2(BUF_WORDS);
  localparam int unsigned DRAM_AW    = 32;            // DRAM word address width

  // ---------------- number formats ----------------
  localparam int unsigned QFRAC = 2;    // extra fractional bits of the partial state
  localparam int unsigned QW    = 24;   // partial-state width (sign + 19 int + 2 frac + headroom)
  localparam int unsigned XW    = 16;   // SFU input/output: signed Q8.8
  localparam int unsigned XFRAC = 8;
  localparam int unsigned AFRAC = 12;   // SFU slope a: signed Q4.12, intercept b: Q8.8
  localparam int unsigned ACCW  = 40;   // PPU MAC accumulator
  localparam int unsigned GACCW = 32;   // GEMM PE accumulator

  typedef logic signed [7:0]       int8_t;
  typedef logic signed [QW-1:0]    state_t;
  typedef logic signed [XW-1:0]    fx16_t;
  typedef logic signed [5:0]       shamt_t;   // signed shift: >0 right (round), <0 left

  // ---------------- SFU ----------------
  localparam int unsigned SFU_ENTRIES = 32;   // largest LUT (SiLU, softplus)
  localparam int unsigned EXP_ENTRIES = 16;   // exponential LUT
  localparam int unsigned SFU_LEVELS  = $clog2(SFU_ENTRIES);
  typedef enum logic [1:0] {FN_EXP = 2'd0, FN_SILU = 2'd1, FN_SOFTPLUS = 2'd2} sfu_fn_e;

  // ---------------- VPU ----------------
  typedef enum logic [2:0] {
    VOP_DELTA = 3'd0,   // x16 = Delta*A (to SFU exp), q8 = Delta*B*u
    VOP_MUL   = 3'd1,   // q8 = x*y
    VOP_ADD   = 3'd2,   // q8 = x+y
    VOP_FLIP  = 3'd3,   // q8 = x reversed along the vector
    VOP_PASS  = 3'd4    // x16 = x (rescaled) for a stand-alone SFU pass
  } vop_e;

  // ---------------- controller commands ----------------
  typedef enum logic [2:0] {
    CMD_LOAD  = 3'd0,   // DRAM -> buffer
    CMD_STORE = 3'd1,   // buffer -> DRAM
    CMD_GEMM  = 3'd2,   // out[64x64] = A[64xK] * B[Kx64]
    CMD_SSM   = 3'd3,   // selective SSM of one hidden channel
    CMD_VEC   = 3'd4,   // VPU element-wise op over words
    CMD_SFU   = 3'd5    // SFU non-linear function over words
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e           op;
    logic [DRAM_AW-1:0] dram_addr;  // LOAD/STORE
    logic [BUF_AW-1:0] addr0;       // LOAD/STORE buffer addr; GEMM A; SSM Delta; VEC/SFU x
    logic [BUF_AW-1:0] addr1;       // GEMM B; SSM u; VEC y
    logic [BUF_AW-1:0] addr2;       // SSM Z
    logic [BUF_AW-1:0] addr3;       // SSM B (MDIM words per segment)
    logic [BUF_AW-1:0] addr4;       // SSM C (MDIM words per segment)
    logic [BUF_AW-1:0] addr5;       // SSM A word (bytes 0..MDIM-1)
    logic [BUF_AW-1:0] dst;         // GEMM/SSM/VEC/SFU result
    logic [15:0]       len;         // words (LOAD/STORE/VEC/SFU), K (GEMM), segments (SSM)
    vop_e              vop;         // VEC op
    sfu_fn_e           fn;          // SFU function
    shamt_t            sh0;         // SSM: Delta*A -> Q8.8 ; VEC/GEMM: result ; SFU: input
    shamt_t            sh1;         // SSM: Delta*B*u -> Q ; SFU: output
    shamt_t            sh2;         // SSM: PPU output requantisation
    logic [3:0]        k;           // SSM: s_dA = 2^-k (hardware-friendly scale)
  } cmd_t;

  // ---------------- arithmetic helpers ----------------
  // Signed shift with round-half-up on right shifts (sh > 0) and plain left shift (sh < 0).
  function automatic logic signed [63:0] shift_round(input logic signed [63:0] x,
                                                      input int sh);
    logic signed [63:0] r;
    if (sh > 0) begin
      r = (x + (64'sd1 <<< (sh - 1))) >>> sh;
    end else if (sh < 0) begin
      r = x <<< (-sh);
    end else begin
      r = x;
    end
    return r;
  endfunction

  function automatic int8_t sat8(input logic signed [63:0] x);
    if (x > 64'sd127) return 8'sd127;
    else if (x < -64'sd128) return -8'sd128;
    else return int8_t'(x);
  endfunction

  function automatic fx16_t sat16(input logic signed [63:0] x);
    if (x > 64'sd32767) return 16'sh7fff;
    else if (x < -64'sd32768) return 16'sh8000;
    else return fx16_t'(x);
  endfunction

  function automatic state_t satq(input logic signed [63:0] x);
    logic signed [63:0] mx, mn;
    mx = (64'sd1 <<< (QW - 1)) - 1;
    mn = -(64'sd1 <<< (QW - 1));
    if (x > mx) return state_t'(mx);
    else if (x < mn) return state_t'(mn);
    else return state_t'(x);
  endfunction

endpackage
