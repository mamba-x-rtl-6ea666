// tb_ssa: the systolic scan array at its default chunk of 16. Feeds 40 state rows on
// back-to-back cycles (random INT8 P, Q and shift k), compares every output row with an
// explicit Kogge-Stone reference, checks that each row of a unit-P case (P = 2^k) equals
// the plain running sum of Q, and checks the latency of log2(16) = 4 cycles and the
// throughput of one row per cycle.
module tb_ssa;
  import mx_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 16, R = 40, LAT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid = 0, out_valid;
  int8_t       p_in [N], q_in [N], p_out [N];
  state_t      q_out [N];
  logic [3:0]  k_in = 0, k_out;
  logic [7:0]  tag_in = 0, tag_out;

  ssa #(.N(N), .TAGW(8)) dut (.*);

  longint pr [R][N], qr [R][N];
  int     kr [R];
  int checks = 0, failures = 0, got = 0, cyc = 0, t_in0 = -1, t_out0 = -1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && t_in0 < 0) t_in0 = cyc;
  end

  initial begin
    for (int r = 0; r < R; r++) begin
      kr[r] = $urandom_range(5, 8);
      for (int i = 0; i < N; i++) begin
        pr[r][i] = (r == 3) ? (1 << kr[r]) : $urandom_range(0, 127);
        qr[r][i] = longint'($urandom_range(0, 255)) - 128;
      end
      if (r == 3) kr[r] = 6;
      if (r == 3) for (int i = 0; i < N; i++) pr[r][i] = 64;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int r = 0; r < R; r++) begin
      in_valid <= 1;
      k_in     <= 4'(kr[r]);
      tag_in   <= 8'(r);
      for (int i = 0; i < N; i++) begin
        p_in[i] <= 8'(pr[r][i]);
        q_in[i] <= 8'(qr[r][i]);
      end
      @(posedge clk);
    end
    in_valid <= 0;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint p1[], q1[], pp[], qs[];
    int r;
    r = int'(tag_out);
    if (got == 0) t_out0 = cyc;
    checks++;
    if (r != got) begin failures++; $display("FAIL order: got row %0d expected %0d", r, got); end
    p1 = new[N]; q1 = new[N];
    for (int i = 0; i < N; i++) begin p1[i] = pr[r][i]; q1[i] = qr[r][i]; end
    ks_ref(N, p1, q1, kr[r], pp, qs);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (p_out[i] !== 8'(pp[i]) || q_out[i] !== 24'(qs[i])) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d pos %0d: p %0d/%0d q %0d/%0d", r, i,
                                    p_out[i], pp[i], q_out[i], qs[i]);
      end
    end
    if (r == 3) begin   // unit P: running sum of Q with 2 fractional bits
      longint s = 0;
      for (int i = 0; i < N; i++) begin
        s += qr[r][i] * 4;
        checks++;
        if (q_out[i] !== 24'(s)) begin failures++; $display("FAIL unit-P pos %0d", i); end
      end
    end
    got++;
    if (got == R) begin
      checks++;
      if (t_out0 - t_in0 != LAT) begin
        failures++; $display("FAIL latency %0d, expected %0d", t_out0 - t_in0, LAT);
      end
      checks++;
      if (cyc - t_out0 != R - 1) begin
        failures++; $display("FAIL throughput: %0d rows in %0d cycles", R, cyc - t_out0 + 1);
      end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
