// ssm_pipe: the selective-SSM datapath of Mamba-X, VPU -> SFU -> systolic scan arrays -> PPU.
//
// For one hidden channel h and one segment of SEG = NS*N sequence positions, the caller
// issues the MD state rows m = 0..MD-1 on consecutive cycles, each with Delta[l], u[l],
// B[m][l], A[h][m], C[m][l] and Z[l]. The datapath follows the paper's dataflow:
//   VPU : Delta*A[m] (to Q8.8) and Delta*B[m]*u (to INT8 Q)
//   SFU : exp(Delta*A), then quantised to INT8 P with the power-of-two scale 2^-k
//   SSA : NS arrays, array j scanning positions j*N..j*N+N-1; array j is fed j cycles
//         after array 0 (the paper's one-cycle interval between chunks)
//   PPU : LISU joins the chunks (and the segments), MACs form sum_m state*C, times Z
// After the row flagged last_m the PPU emits one INT8 vector y[SEG] for the segment.
// A sequence longer than SEG is issued as successive segments; first_seg marks the first,
// which starts from a zero state.
//
// The same VPU and SFU are reachable on their own (mode): a VPU element-wise operation
// returns its result VPU_LAT cycles later, and an SFU pass (VOP_PASS) returns
// sat8(f(x) >> sh1) VPU_LAT+SFU_LAT+1 cycles later. Only one mode may be in flight at a time.
//
// Latencies (cycles from in_valid): VPU 1, SFU 6, SSA 4, PPU NS+1: y_valid 11+NS+1 = 20
// cycles after the last_m row. One row per cycle, no stall. Shift amounts are signed
// (>0 right with rounding). The number formats and requantisation steps are this design's
// choice, the order of the units and the exponential-before-scan follow the paper.
module ssm_pipe
  import mx_pkg::*;
#(
  parameter int unsigned NS = NSSA,
  parameter int unsigned N  = CHUNK,
  parameter int unsigned MD = MDIM,
  localparam int unsigned L  = NS * N,
  localparam int unsigned MW = (MD > 1) ? $clog2(MD) : 1,
  localparam int unsigned IW = $clog2(SFU_ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  // SFU table configuration
  input  logic          cfg_we,
  input  sfu_fn_e       cfg_fn,
  input  logic [1:0]    cfg_sel,
  input  logic [IW-1:0] cfg_idx,
  input  fx16_t         cfg_data,
  // one row per cycle
  input  logic          in_valid,
  input  logic          ssm_mode,     // 1: selective SSM row, 0: stand-alone VPU/SFU op
  input  vop_e          vop,          // stand-alone VPU op (VOP_PASS: SFU pass)
  input  sfu_fn_e       fn,           // stand-alone SFU function
  input  int8_t         x_in  [L],    // Delta        | VPU operand x
  input  int8_t         y_in  [L],    // u            | VPU operand y
  input  int8_t         w_in  [L],    // B[m]
  input  int8_t         c_in  [L],    // C[m]
  input  int8_t         z_in  [L],    // Z
  input  int8_t         a_in,         // A[h][m]
  input  logic [MW-1:0] m_in,
  input  logic          first_m,
  input  logic          last_m,
  input  logic          first_seg,
  input  shamt_t        sh0,          // Delta*A -> Q8.8      | VPU result shift | SFU input shift
  input  shamt_t        sh1,          // Delta*B*u -> Q       | SFU output shift
  input  shamt_t        sh2,          // PPU output shift
  input  logic [3:0]    k,            // s_dA = 2^-k
  output logic          out_valid,
  output int8_t         out_data [L]
);
  localparam int unsigned VLAT = 1;
  localparam int unsigned SLAT = SFU_LEVELS + 1;
  localparam int unsigned ALAT = $clog2(N);

  // ---------------- VPU ----------------
  logic  v_valid;
  int8_t v_q8  [L];
  fx16_t v_x16 [L];
  logic [7:0] v_tag_unused;
  vop_e  vop_eff;
  assign vop_eff = ssm_mode ? VOP_DELTA : vop;

  vpu #(.LANES(L)) u_vpu (
    .clk, .rst_n, .in_valid, .op(vop_eff), .x(x_in), .y(y_in), .w(w_in), .a(a_in),
    .sh0, .sh1, .tag_in(8'd0),
    .out_valid(v_valid), .q8(v_q8), .x16(v_x16), .tag_out(v_tag_unused)
  );

  // side information from the issue cycle, delayed to the SFU output
  typedef struct packed {
    logic          ssm;
    logic          vec;     // stand-alone VPU element-wise op
    logic          sfu;     // stand-alone SFU pass
    sfu_fn_e       fn;
    logic [3:0]    k;
    logic [MW-1:0] m;
    logic          first_seg;
    shamt_t        sh1;
  } side_t;
  side_t s0, s1, s7;
  always_comb begin
    s0.ssm       = in_valid && ssm_mode;
    s0.vec       = in_valid && !ssm_mode && vop != VOP_PASS;
    s0.sfu       = in_valid && !ssm_mode && vop == VOP_PASS;
    s0.fn        = ssm_mode ? FN_EXP : fn;
    s0.k         = k;
    s0.m         = m_in;
    s0.first_seg = first_seg;
    s0.sh1       = sh1;
  end
  delay_line #(.W($bits(side_t)), .D(VLAT), .RST(1)) u_s1 (.clk, .rst_n, .d(s0), .q(s1));
  delay_line #(.W($bits(side_t)), .D(SLAT), .RST(1)) u_s7 (.clk, .rst_n, .d(s1), .q(s7));

  // ---------------- SFU ----------------
  logic  f_valid;
  fx16_t f_y [L];
  logic [7:0] f_tag_unused;
  sfu #(.LANES(L)) u_sfu (
    .clk, .rst_n, .cfg_we, .cfg_fn, .cfg_sel, .cfg_idx, .cfg_data,
    .in_valid(v_valid && (s1.ssm || s1.sfu)), .fn(s1.fn), .x_in(v_x16), .tag_in(8'd0),
    .out_valid(f_valid), .y_out(f_y), .tag_out(f_tag_unused)
  );

  // Q waits for the exponential
  logic [L*8-1:0] q_pk, q_dl;
  for (genvar l = 0; l < L; l++) begin : g_qpk
    assign q_pk[l*8 +: 8] = v_q8[l];
  end
  delay_line #(.W(L*8), .D(SLAT)) u_qd (.clk, .rst_n, .d(q_pk), .q(q_dl));

  // P = exp(Delta A) on the 2^-k grid
  int8_t p_vec [L];
  always_comb begin
    for (int l = 0; l < L; l++)
      p_vec[l] = sat8(shift_round(64'(f_y[l]), int'(XFRAC) - int'(s7.k)));
  end

  // ---------------- SSAs, fed one cycle apart ----------------
  localparam int unsigned TAGW = MW + 1;
  logic          a_valid [NS];
  int8_t         a_pp    [NS][N];
  state_t        a_qs    [NS][N];
  logic [3:0]    a_k     [NS];
  logic [MW-1:0] a_m     [NS];
  logic          a_first [NS];

  for (genvar j = 0; j < NS; j++) begin : g_ssa
    localparam int unsigned SKW = N*16 + 4 + TAGW;
    logic [SKW-1:0] sk_in, sk_out;
    logic           sv_out;
    int8_t          p_j [N];
    int8_t          q_j [N];
    logic [TAGW-1:0] tag_o;
    for (genvar i = 0; i < N; i++) begin : g_pk
      assign sk_in[i*16 +: 16] = {p_vec[j*N+i], q_dl[(j*N+i)*8 +: 8]};
      assign p_j[i] = int8_t'(sk_out[i*16+8 +: 8]);
      assign q_j[i] = int8_t'(sk_out[i*16 +: 8]);
    end
    assign sk_in[N*16 +: 4 + TAGW] = {s7.k, s7.m, s7.first_seg};
    delay_line #(.W(SKW), .D(j)) u_sk (.clk, .rst_n, .d(sk_in), .q(sk_out));
    delay_line #(.W(1), .D(j), .RST(1)) u_skv (.clk, .rst_n, .d(f_valid && s7.ssm), .q(sv_out));

    ssa #(.N(N), .TAGW(TAGW)) u_ssa (
      .clk, .rst_n, .in_valid(sv_out), .p_in(p_j), .q_in(q_j),
      .k_in(sk_out[N*16+TAGW +: 4]), .tag_in(sk_out[N*16 +: TAGW]),
      .out_valid(a_valid[j]), .p_out(a_pp[j]), .q_out(a_qs[j]), .k_out(a_k[j]), .tag_out(tag_o)
    );
    assign a_m[j]     = tag_o[TAGW-1:1];
    assign a_first[j] = tag_o[0];
  end

  // ---------------- PPU ----------------
  localparam int unsigned CLAT = VLAT + SLAT + ALAT;   // issue -> SSA 0 output
  localparam int unsigned CZW  = 2*L*8 + 2 + $bits(shamt_t);
  logic [CZW-1:0] cz_in, cz_out;
  int8_t  c_al [L];
  int8_t  z_al [L];
  logic   fm_al, lm_al;
  shamt_t osh_al;
  for (genvar l = 0; l < L; l++) begin : g_cz
    assign cz_in[l*8 +: 8]     = c_in[l];
    assign cz_in[(L+l)*8 +: 8] = z_in[l];
    assign c_al[l] = int8_t'(cz_out[l*8 +: 8]);
    assign z_al[l] = int8_t'(cz_out[(L+l)*8 +: 8]);
  end
  assign cz_in[2*L*8 +: 2 + $bits(shamt_t)] = {first_m, last_m, sh2};
  assign {fm_al, lm_al, osh_al} = cz_out[2*L*8 +: 2 + $bits(shamt_t)];
  delay_line #(.W(CZW), .D(CLAT)) u_cz (.clk, .rst_n, .d(cz_in), .q(cz_out));

  logic  y_valid;
  int8_t y_vec [L];
  ppu #(.NS(NS), .N(N), .MD(MD)) u_ppu (
    .clk, .rst_n,
    .s_valid(a_valid), .s_pp(a_pp), .s_qs(a_qs), .s_k(a_k), .s_m(a_m), .s_first(a_first),
    .c_in(c_al), .z_in(z_al), .first_m(fm_al), .last_m(lm_al), .osh(osh_al),
    .y_valid, .y_out(y_vec)
  );

  // ---------------- result ----------------
  int8_t sfu_q8 [L];
  logic  sfu_v;
  always_ff @(posedge clk) begin
    if (!rst_n) sfu_v <= 1'b0;
    else        sfu_v <= f_valid && s7.sfu;
    for (int l = 0; l < L; l++) sfu_q8[l] <= sat8(shift_round(64'(f_y[l]), int'(s7.sh1)));
  end

  always_comb begin
    out_valid = y_valid || sfu_v || (v_valid && s1.vec);
    if (y_valid)    out_data = y_vec;
    else if (sfu_v) out_data = sfu_q8;
    else            out_data = v_q8;
  end
endmodule
