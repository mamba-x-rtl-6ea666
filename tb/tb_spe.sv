// tb_spe: random check of the scan processing element against the reference step
// (P' = round(Pn*Pn1 / 2^k), Q' = round(Pn1*Qn / 2^k) + Qn1, both saturated), plus corner
// cases: P = 2^k (Delta A = 1) must return Q' = Qn + Qn1 and P' = Pn exactly.
module tb_spe;
  import tb_ref_pkg::*;
  logic signed [7:0]  p_lo, p_hi, p_out;
  logic signed [23:0] q_lo, q_hi, q_out;
  logic [3:0]         k;
  int checks = 0, failures = 0;

  spe dut (.p_lo, .q_lo, .p_hi, .q_hi, .k, .p_out, .q_out);

  task automatic check(input string what);
    longint pe, qe;
    spe_ref(p_lo, q_lo, p_hi, q_hi, k, pe, qe);
    checks++;
    if (p_out !== 8'(pe) || q_out !== 24'(qe)) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: p %0d %0d q %0d %0d k %0d -> p %0d (exp %0d) q %0d (exp %0d)",
                 what, p_lo, p_hi, q_lo, q_hi, k, p_out, pe, q_out, qe);
    end
  endtask

  initial begin
    for (int t = 0; t < 4000; t++) begin
      p_lo = 8'($urandom);  p_hi = 8'($urandom);
      q_lo = 24'(signed'($urandom_range(0, 400000)) - 200000);
      q_hi = 24'(signed'($urandom_range(0, 400000)) - 200000);
      k    = 4'($urandom_range(0, 10));
      #1 check("random");
    end
    // Delta A = 1: P = 2^k passes Q through unchanged
    for (int t = 0; t < 200; t++) begin
      k = 4'($urandom_range(3, 6));
      p_hi = 8'(1 << k); p_lo = 8'(1 << k);
      q_lo = 24'(signed'($urandom_range(0, 20000)) - 10000);
      q_hi = 24'(signed'($urandom_range(0, 20000)) - 10000);
      #1;
      checks++;
      if (q_out !== q_lo + q_hi || p_out !== p_lo) begin
        failures++;
        $display("FAIL unit-P: q %0d + %0d -> %0d", q_lo, q_hi, q_out);
      end
    end
    // saturation of the state
    k = 4'd0; p_hi = 8'sd127; q_lo = 24'sh3fffff; q_hi = 24'sh3fffff; p_lo = 8'sd127;
    #1 check("saturate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
