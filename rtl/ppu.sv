// ppu: post processing unit of the selective SSM.
//
// It takes the partial states of the NS systolic scan arrays, resolves the dependencies
// between their chunks in the Long Input Support Unit (lisu), and then performs the two
// steps the paper assigns to the PPU: a MAC array computes the inner product of the states
// with C along the state dimension m (y_l = sum_m state_{m,l} * C_{m,l}), and the result is
// multiplied by Z. One MAC per sequence position (NS*N of them) accumulates as the m rows
// stream past, one row per cycle; the row tagged first_m restarts the sum and the row
// tagged last_m releases y*Z, rounded by a right shift (osh) and saturated to INT8. The
// per-lane MAC organisation, the shift-based requantisation and the widths are this
// design's choice; the paper's figure shows only "MAC" boxes followed by a multiplier.
//
// Timing: the SSA outputs arrive skewed (SSA j one cycle after SSA j-1, as the SSAs are
// fed). c, z and the row flags are given aligned with SSA 0's output. The LISU adds one
// cycle, a deskew register chain aligns all chunks NS cycles after SSA 0's output, and the
// result is registered: y_valid rises NS+1 cycles after the SSA 0 output of the last row.
module ppu
  import mx_pkg::*;
#(
  parameter int unsigned NS = NSSA,
  parameter int unsigned N  = CHUNK,
  parameter int unsigned MD = MDIM,
  localparam int unsigned MW = (MD > 1) ? $clog2(MD) : 1,
  localparam int unsigned L  = NS * N
) (
  input  logic          clk,
  input  logic          rst_n,
  // from the SSAs (skewed by one cycle per SSA)
  input  logic          s_valid [NS],
  input  int8_t         s_pp    [NS][N],
  input  state_t        s_qs    [NS][N],
  input  logic [3:0]    s_k     [NS],
  input  logic [MW-1:0] s_m     [NS],
  input  logic          s_first [NS],
  // aligned with SSA 0's output
  input  int8_t         c_in    [L],
  input  int8_t         z_in    [L],
  input  logic          first_m,
  input  logic          last_m,
  input  shamt_t        osh,
  // result: one INT8 vector per segment after the last m row
  output logic          y_valid,
  output int8_t         y_out   [L]
);
  logic          l_valid [NS];
  state_t        l_st    [NS][N];
  logic [MW-1:0] l_m     [NS];

  lisu #(.NS(NS), .N(N), .MD(MD)) u_lisu (
    .clk, .rst_n,
    .in_valid(s_valid), .pp_in(s_pp), .qs_in(s_qs), .k_in(s_k), .m_in(s_m),
    .first_in(s_first),
    .out_valid(l_valid), .st_out(l_st), .m_out(l_m)
  );

  // deskew: chunk j is delayed NS-1-j more cycles so all chunks line up
  state_t st_al [L];
  logic   v_al;
  for (genvar j = 0; j < NS; j++) begin : g_deskew
    logic [N*QW-1:0] packed_in, packed_out;
    for (genvar i = 0; i < N; i++) begin : g_pk
      assign packed_in[i*QW +: QW] = l_st[j][i];
      assign st_al[j*N+i]          = state_t'(packed_out[i*QW +: QW]);
    end
    delay_line #(.W(N*QW), .D(NS-1-j)) u_dl (.clk, .rst_n, .d(packed_in), .q(packed_out));
    if (j == 0) begin : g_v
      delay_line #(.W(1), .D(NS-1), .RST(1'b1)) u_dv (.clk, .rst_n, .d(l_valid[0]), .q(v_al));
    end
  end

  // side information delayed by NS (LISU register + NS-1 deskew stages)
  localparam int unsigned SBW = 2*L*8 + 2 + $bits(shamt_t);
  logic [SBW-1:0] sb_in, sb_out;
  int8_t  c_al [L];
  int8_t  z_al [L];
  logic   fm_al, lm_al;
  shamt_t osh_al;
  for (genvar l = 0; l < L; l++) begin : g_sb
    assign sb_in[l*8 +: 8]       = c_in[l];
    assign sb_in[(L+l)*8 +: 8]   = z_in[l];
    assign c_al[l]               = int8_t'(sb_out[l*8 +: 8]);
    assign z_al[l]               = int8_t'(sb_out[(L+l)*8 +: 8]);
  end
  assign sb_in[2*L*8 +: 2 + $bits(shamt_t)] = {first_m, last_m, osh};
  assign {fm_al, lm_al, osh_al} = sb_out[2*L*8 +: 2 + $bits(shamt_t)];
  delay_line #(.W(SBW), .D(NS)) u_sb (.clk, .rst_n, .d(sb_in), .q(sb_out));

  // MAC array and Z multiplier
  logic signed [ACCW-1:0] acc   [L];
  logic signed [ACCW-1:0] acc_n [L];
  int8_t                  y_n   [L];
  always_comb begin
    for (int l = 0; l < L; l++) begin
      acc_n[l] = (fm_al ? '0 : acc[l]) + ACCW'(st_al[l] * c_al[l]);
      y_n[l]   = sat8(shift_round(64'(acc_n[l]) * 64'(z_al[l]), int'(osh_al)));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) y_valid <= 1'b0;
    else        y_valid <= v_al && lm_al;
  end
  always_ff @(posedge clk) begin
    if (v_al) begin
      acc <= acc_n;
      if (lm_al) y_out <= y_n;
    end
  end
endmodule
