// gemm_engine: output-stationary systolic GEMM engine of N x N processing elements.
//
// Computes C[N x N] = A[N x K] * B[K x N] for the linear projections of Vision Mamba
// (the paper's engine: output-stationary systolic array, 64 x 64 PEs, INT8). Every cycle
// with in_valid one column of A (a_col[i] = A[i][k]) and one row of B (b_row[j] = B[k][j])
// enter. Row i of A is delayed i cycles and column j of B j cycles before entering the
// array, so that A[i][k] and B[k][j] meet in PE (i,j); operands then move one PE right
// (A) or down (B) per cycle and each PE keeps its own sum C[i][j]. K is unbounded; the
// accumulators are 32 bits wide (this design's choice).
//
// Control: clear (one cycle, before the first column) zeroes all sums. busy stays high
// until the last operand pair has reached PE (N-1,N-1), 2N-1 cycles after the last input.
// The sums are then read one row per cycle: rd_data = C[rd_row][*] (combinational).
// The skew registers, busy counter and row read-out are this design's choices.
module gemm_engine
  import mx_pkg::*;
#(
  parameter int unsigned N = GEMM_N,
  localparam int unsigned RW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  int8_t                   a_col  [N],
  input  int8_t                   b_row  [N],
  output logic                    busy,
  input  logic [RW-1:0]           rd_row,
  output logic signed [GACCW-1:0] rd_data [N]
);
  int8_t a_sk [N];
  int8_t b_sk [N];
  logic  v_sk [N];

  // input skew: row/column i delayed by i cycles
  for (genvar i = 0; i < N; i++) begin : g_skew
    logic [7:0] a_q, b_q;
    logic       v_q;
    delay_line #(.W(8), .D(i))           u_a (.clk, .rst_n, .d(a_col[i]), .q(a_q));
    delay_line #(.W(8), .D(i))           u_b (.clk, .rst_n, .d(b_row[i]), .q(b_q));
    delay_line #(.W(1), .D(i), .RST(1)) u_v (.clk, .rst_n, .d(in_valid), .q(v_q));
    assign a_sk[i] = int8_t'(a_q);
    assign b_sk[i] = int8_t'(b_q);
    assign v_sk[i] = v_q;
  end

  int8_t                   a_h [N][N];   // a leaving PE (i,j) to the right
  int8_t                   b_v [N][N];   // b leaving PE (i,j) downwards
  logic                    v_h [N][N];
  logic signed [GACCW-1:0] acc [N][N];

  for (genvar i = 0; i < N; i++) begin : g_r
    for (genvar j = 0; j < N; j++) begin : g_c
      gemm_pe u_pe (
        .clk, .rst_n, .clear,
        .a_in ((j == 0) ? a_sk[i] : a_h[i][j-1]),
        .b_in ((i == 0) ? b_sk[j] : b_v[i-1][j]),
        .v_in ((j == 0) ? v_sk[i] : v_h[i][j-1]),
        .a_out(a_h[i][j]), .b_out(b_v[i][j]), .v_out(v_h[i][j]),
        .acc  (acc[i][j])
      );
    end
  end

  // drain counter
  localparam int unsigned DRAIN = 2 * N - 1;
  logic [$clog2(DRAIN+1)-1:0] cnt;
  always_ff @(posedge clk) begin
    if (!rst_n)        cnt <= '0;
    else if (in_valid) cnt <= ($bits(cnt))'(DRAIN);
    else if (cnt != 0) cnt <= cnt - 1'b1;
  end
  assign busy = in_valid || (cnt != 0);

  always_comb begin
    for (int j = 0; j < N; j++) rd_data[j] = acc[rd_row][j];
  end
endmodule
