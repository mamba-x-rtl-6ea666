// tb_lisu: the long input support unit with 8 stages of 16 positions and 16 state rows.
// Three segments of 16 rows each are fed with the one-cycle skew between stages that the
// SSAs produce; the first segment starts from a zero state, the next two continue from the
// carry of the previous segment. Every output state is compared with a reference that
// walks the chunks in order (state = round(Pprefix * carry / 2^k) + partial), and every
// stage must answer exactly one cycle after its input.
module tb_lisu;
  import mx_pkg::*;
  import tb_ref_pkg::*;
  localparam int NS = 8, N = 16, MD = 16, NSEG = 3, R = NSEG * MD;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          in_valid [NS], out_valid [NS], first_in [NS];
  int8_t         pp_in [NS][N];
  state_t        qs_in [NS][N], st_out [NS][N];
  logic [3:0]    k_in [NS];
  logic [3:0]    m_in [NS], m_out [NS];

  lisu #(.NS(NS), .N(N), .MD(MD)) dut (.*);

  longint pp [R][NS][N], qs [R][NS][N], ex [R][NS][N];
  int     kk [R];
  int checks = 0, failures = 0, cyc = 0, t0 = -1;
  int nout [NS];

  initial begin
    longint carry [MD];
    for (int m = 0; m < MD; m++) carry[m] = 0;
    for (int r = 0; r < R; r++) begin
      kk[r] = $urandom_range(6, 8);
      for (int j = 0; j < NS; j++)
        for (int i = 0; i < N; i++) begin
          pp[r][j][i] = $urandom_range(0, 127);
          qs[r][j][i] = longint'($urandom_range(0, 20000)) - 10000;
        end
    end
    for (int r = 0; r < R; r++) begin
      int m;
      longint c;
      m = r % MD;
      c = (r < MD) ? 0 : carry[m];
      for (int j = 0; j < NS; j++) begin
        for (int i = 0; i < N; i++) ex[r][j][i] = cq(rshift(pp[r][j][i] * c, kk[r]) + qs[r][j][i]);
        c = ex[r][j][N-1];
      end
      carry[m] = c;
    end
    for (int j = 0; j < NS; j++) begin in_valid[j] = 0; nout[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
  end

  // skewed stimulus: stage j receives row (cyc - t0 - j)
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && t0 < 0) t0 = cyc + 1;
    for (int j = 0; j < NS; j++) begin
      int r;
      r = (t0 < 0) ? -1 : cyc + 1 - t0 - j;
      if (r >= 0 && r < R) begin
        in_valid[j] <= 1;
        first_in[j] <= (r < MD);
        m_in[j]     <= 4'(r % MD);
        k_in[j]     <= 4'(kk[r]);
        for (int i = 0; i < N; i++) begin
          pp_in[j][i] <= 8'(pp[r][j][i]);
          qs_in[j][i] <= 24'(qs[r][j][i]);
        end
      end else begin
        in_valid[j] <= 0;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < NS; j++) if (out_valid[j]) begin
      int r;
      r = nout[j];
      checks++;
      if (cyc - t0 - j - 1 != r) begin
        failures++; $display("FAIL stage %0d row %0d timing (cycle %0d)", j, r, cyc - t0);
      end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (st_out[j][i] !== 24'(ex[r][j][i])) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d stage %0d pos %0d: %0d expected %0d",
                                      r, j, i, st_out[j][i], ex[r][j][i]);
        end
      end
      nout[j]++;
    end
    if (nout[NS-1] == R) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
