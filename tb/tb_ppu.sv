// tb_ppu: the post processing unit (LISU + MAC array + Z multiplier) at its defaults
// (8 SSAs x 16 positions, 16 state rows). Two segments of 16 rows are fed with the SSAs'
// one-cycle skew; the expected output of each segment is y_l = sat8(round(Z_l * sum_m
// state_{m,l} * C_{m,l} / 2^osh)) with the states from a sequential chunk-by-chunk
// reference. Checks every lane and that y_valid comes NS+1 = 9 cycles after SSA 0 has
// delivered the last row.
module tb_ppu;
  import mx_pkg::*;
  import tb_ref_pkg::*;
  localparam int NS = 8, N = 16, MD = 16, L = NS * N, NSEG = 2, R = NSEG * MD;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          s_valid [NS], s_first [NS];
  int8_t         s_pp [NS][N];
  state_t        s_qs [NS][N];
  logic [3:0]    s_k [NS], s_m [NS];
  int8_t         c_in [L], z_in [L], y_out [L];
  logic          first_m = 0, last_m = 0, y_valid;
  shamt_t        osh = 0;

  ppu #(.NS(NS), .N(N), .MD(MD)) dut (.*);

  longint pp [R][L], qs [R][L], cc [R][L], zz [NSEG][L], ey [NSEG][L];
  int     kk [R], oshv [NSEG];
  int checks = 0, failures = 0, cyc = 0, t0 = -1, nseg_out = 0;

  initial begin
    longint carry [MD], st, c, acc [L];
    for (int m = 0; m < MD; m++) carry[m] = 0;
    for (int s = 0; s < NSEG; s++) begin
      oshv[s] = $urandom_range(8, 14);
      for (int l = 0; l < L; l++) begin zz[s][l] = longint'($urandom_range(0, 255)) - 128; acc[l] = 0; end
      for (int m = 0; m < MD; m++) begin
        int r;
        r = s * MD + m;
        kk[r] = 7;
        for (int l = 0; l < L; l++) begin
          pp[r][l] = $urandom_range(60, 127);
          qs[r][l] = longint'($urandom_range(0, 2000)) - 1000;
          cc[r][l] = longint'($urandom_range(0, 255)) - 128;
        end
        c = (s == 0) ? 0 : carry[m];
        for (int j = 0; j < NS; j++) begin
          for (int i = 0; i < N; i++) begin
            st = cq(rshift(pp[r][j*N+i] * c, kk[r]) + qs[r][j*N+i]);
            acc[j*N+i] += st * cc[r][j*N+i];
            if (i == N - 1) c = st;
          end
        end
        carry[m] = c;
      end
      for (int l = 0; l < L; l++) ey[s][l] = c8(rshift(acc[l] * zz[s][l], oshv[s]));
    end
    for (int j = 0; j < NS; j++) s_valid[j] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && t0 < 0) t0 = cyc + 1;
    for (int j = 0; j < NS; j++) begin
      int r;
      r = (t0 < 0) ? -1 : cyc + 1 - t0 - j;
      if (r >= 0 && r < R) begin
        s_valid[j] <= 1;
        s_first[j] <= (r < MD);
        s_m[j]     <= 4'(r % MD);
        s_k[j]     <= 4'(kk[r]);
        for (int i = 0; i < N; i++) begin
          s_pp[j][i] <= 8'(pp[r][j*N+i]);
          s_qs[j][i] <= 24'(qs[r][j*N+i]);
        end
      end else s_valid[j] <= 0;
      if (j == 0) begin
        if (r >= 0 && r < R) begin
          first_m <= (r % MD == 0);
          last_m  <= (r % MD == MD - 1);
          osh     <= 6'(oshv[r / MD]);
          for (int l = 0; l < L; l++) begin c_in[l] <= 8'(cc[r][l]); z_in[l] <= 8'(zz[r / MD][l]); end
        end else begin
          first_m <= 0; last_m <= 0;
        end
      end
    end
  end

  always @(posedge clk) if (rst_n && y_valid) begin
    int s;
    s = nseg_out;
    checks++;
    // last row of segment s reached SSA 0's output at cycle t0 + s*MD + MD-1
    if (cyc - t0 != s * MD + MD - 1 + NS + 1) begin
      failures++; $display("FAIL segment %0d output at cycle %0d", s, cyc - t0);
    end
    for (int l = 0; l < L; l++) begin
      checks++;
      if (y_out[l] !== 8'(ey[s][l])) begin
        failures++;
        if (failures < 10) $display("FAIL seg %0d lane %0d: %0d expected %0d", s, l, y_out[l], ey[s][l]);
      end
    end
    nseg_out++;
    if (nseg_out == NSEG) begin
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
