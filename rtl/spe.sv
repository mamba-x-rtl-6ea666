// spe: scan processing element of the systolic scan array.
//
// One Kogge-Stone combine step of the selective-scan recurrence state_n = P_n*state_{n-1}+Q_n.
// The element takes the earlier pair (P_n, Q_n) and the later pair (P_{n+1}, Q_{n+1}) and
// returns (P_n*P_{n+1}, P_{n+1}*Q_n + Q_{n+1}). It has two multipliers and one adder, as the
// paper's SPE does, and two rescaling steps: P is INT8 with a power-of-two scale
// s_dA = 2^-k, so multiplying a product by s_dA is an arithmetic right shift by k (the
// paper's hardware-friendly approximation of the scaling factor). Both shifts round to
// nearest (half up), which is this design's choice.
//
// Number formats: P is signed INT8 (scale 2^-k); Q is a QW-bit fixed-point value carrying
// QFRAC = 2 extra fractional bits below the INT8 grid of the Q scale (paper: "2 extra
// fractional bits"); the widths of the products and the saturation of both outputs are
// this design's choice. Purely combinational: the SSA places a register row after each
// row of SPEs.
module spe
  import mx_pkg::*;
#(
  parameter int unsigned PW  = 8,
  parameter int unsigned QWD = QW
) (
  input  logic signed [PW-1:0]  p_lo,   // P_n     (earlier position)
  input  logic signed [QWD-1:0] q_lo,   // Q_n
  input  logic signed [PW-1:0]  p_hi,   // P_{n+1} (later position)
  input  logic signed [QWD-1:0] q_hi,   // Q_{n+1}
  input  logic [3:0]            k,      // rescale shift, s_dA = 2^-k
  output logic signed [PW-1:0]  p_out,  // P_n * P_{n+1}            (rescaled)
  output logic signed [QWD-1:0] q_out   // P_{n+1} * Q_n + Q_{n+1}  (rescaled)
);
  logic signed [2*PW-1:0]   pp;
  logic signed [PW+QWD-1:0] pq;
  logic signed [63:0]       pp_r, pq_r, sum;

  always_comb begin
    pp    = p_lo * p_hi;                       // multiplier 1
    pq    = p_hi * q_lo;                       // multiplier 2
    pp_r  = shift_round(64'(pp), int'(k));     // rescale by s_dA (shift)
    pq_r  = shift_round(64'(pq), int'(k));     // rescale by s_dA (shift)
    sum   = pq_r + 64'(q_hi);                  // adder
    if (pp_r > 64'sd127)       p_out = PW'(127);
    else if (pp_r < -64'sd128) p_out = PW'(-128);
    else                       p_out = PW'(pp_r);
    if (sum > ((64'sd1 <<< (QWD - 1)) - 1))  q_out = {1'b0, {(QWD-1){1'b1}}};
    else if (sum < -(64'sd1 <<< (QWD - 1)))  q_out = {1'b1, {(QWD-1){1'b0}}};
    else                                     q_out = QWD'(sum);
  end
endmodule
