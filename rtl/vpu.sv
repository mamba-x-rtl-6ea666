// vpu: vector processing unit, element-wise INT8 operations over LANES lanes.
//
// In the selective SSM the VPU produces, for one state row m, Delta*A (sent on to the SFU's
// exponential) and Delta*B*u (sent on to the scan arrays as Q), as the paper's dataflow
// describes. It also offers element-wise multiply and add and the "flip" that reverses
// the token order for Vision Mamba's backward path; a pass operation feeds a vector to the
// SFU on its own. The paper lists LayerNorm and Conv1D among the VPU's jobs but gives no
// detail of them; they are not part of this unit.
//
// Requantisation (this design's choice): every product is brought to its output scale by a
// signed shift (sh > 0: right shift with round-half-up, sh < 0: left shift) and saturated;
// with power-of-two scales this realises the per-channel activation scales of the paper's
// hybrid quantisation, the shift amounts being chosen per command.
//   VOP_DELTA: x16 = sat16((x*a)  >> sh0)  (Q8.8 for the SFU)   q8 = sat8((x*w*y) >> sh1)
//              with x = Delta, a = A[m] (scalar), w = B[m], y = u
//   VOP_MUL  : q8 = sat8((x*y) >> sh0)     VOP_ADD: q8 = sat8(x+y)
//   VOP_FLIP : q8[l] = x[LANES-1-l]        VOP_PASS: x16 = sat16(x >> sh0)
// Timing: one register, result valid one cycle after in_valid; one vector per cycle.
module vpu
  import mx_pkg::*;
#(
  parameter int unsigned LANES = SEG,
  parameter int unsigned TAGW  = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  vop_e            op,
  input  int8_t           x    [LANES],
  input  int8_t           y    [LANES],
  input  int8_t           w    [LANES],
  input  int8_t           a,
  input  shamt_t          sh0,
  input  shamt_t          sh1,
  input  logic [TAGW-1:0] tag_in,
  output logic            out_valid,
  output int8_t           q8   [LANES],
  output fx16_t           x16  [LANES],
  output logic [TAGW-1:0] tag_out
);
  int8_t q8_n  [LANES];
  fx16_t x16_n [LANES];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      q8_n[l]  = '0;
      x16_n[l] = '0;
      unique case (op)
        VOP_DELTA: begin
          x16_n[l] = sat16(shift_round(64'(x[l]) * 64'(a), int'(sh0)));
          q8_n[l]  = sat8(shift_round(64'(x[l]) * 64'(w[l]) * 64'(y[l]), int'(sh1)));
        end
        VOP_MUL:  q8_n[l]  = sat8(shift_round(64'(x[l]) * 64'(y[l]), int'(sh0)));
        VOP_ADD:  q8_n[l]  = sat8(64'(x[l]) + 64'(y[l]));
        VOP_FLIP: q8_n[l]  = x[LANES-1-l];
        VOP_PASS: x16_n[l] = sat16(shift_round(64'(x[l]), int'(sh0)));
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    q8      <= q8_n;
    x16     <= x16_n;
    tag_out <= tag_in;
  end
endmodule
