// gemm_pe: one processing element of the output-stationary GEMM engine.
// It multiplies the INT8 operand arriving from the left (a) with the one arriving from above
// (b), adds the product into its own 32-bit accumulator when the valid bit travelling with
// a is set, and forwards a, b and valid to its right and lower neighbours through
// registers. clear zeroes the accumulator. One cycle per hop. The output-stationary PE
// follows the paper's GEMM engine; the 32-bit accumulator width is this design's choice.
module gemm_pe
  import mx_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  int8_t                   a_in,
  input  int8_t                   b_in,
  input  logic                    v_in,
  output int8_t                   a_out,
  output int8_t                   b_out,
  output logic                    v_out,
  output logic signed [GACCW-1:0] acc
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_out <= 1'b0;
      acc   <= '0;
    end else begin
      v_out <= v_in;
      if (clear)     acc <= '0;
      else if (v_in) acc <= acc + GACCW'(a_in * b_in);
    end
    a_out <= a_in;
    b_out <= b_in;
  end
endmodule
