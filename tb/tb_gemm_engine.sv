// tb_gemm_engine: the output-stationary GEMM engine, at 16x16 PEs to keep the build short (the default is 64x64). Two products are computed one
// after the other (K = 24 and K = 5, random INT8 operands including -128), the second after
// a clear, and all 256 sums are read out row by row and compared with a direct matrix
// product. busy must fall exactly 2N-1 = 31 cycles after the last operand.
module tb_gemm_engine;
  import mx_pkg::*;
  localparam int N = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        clear = 0, in_valid = 0, busy;
  int8_t       a_col [N], b_row [N];
  logic [3:0]  rd_row = 0;
  logic signed [31:0] rd_data [N];

  gemm_engine #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  task automatic run(input int K);
    longint A [N][], B [][N], C [N][N];
    int drain;
    for (int i = 0; i < N; i++) A[i] = new[K];
    B = new[K];
    for (int i = 0; i < N; i++) for (int k = 0; k < K; k++)
      A[i][k] = (k == 0 && i == 0) ? -128 : longint'($urandom_range(0, 255)) - 128;
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++)
      B[k][j] = (k == 0 && j == 0) ? -128 : longint'($urandom_range(0, 255)) - 128;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      C[i][j] = 0;
      for (int k = 0; k < K; k++) C[i][j] += A[i][k] * B[k][j];
    end
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    for (int k = 0; k < K; k++) begin
      in_valid <= 1;
      for (int i = 0; i < N; i++) begin a_col[i] <= 8'(A[i][k]); b_row[i] <= 8'(B[k][i]); end
      @(posedge clk);
    end
    in_valid <= 0;
    drain = 0;
    @(posedge clk);
    while (busy) begin drain++; @(posedge clk); end
    checks++;
    if (drain != 2 * N - 1) begin failures++; $display("FAIL drain %0d cycles", drain); end
    for (int i = 0; i < N; i++) begin
      rd_row <= 4'(i);
      @(posedge clk);
      #1;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (rd_data[j] !== 32'(C[i][j])) begin
          failures++;
          if (failures < 10) $display("FAIL K=%0d C[%0d][%0d] = %0d expected %0d", K, i, j, rd_data[j], C[i][j]);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(24);
    run(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
