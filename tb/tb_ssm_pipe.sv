// tb_ssm_pipe: self-checking testbench of the selective-SSM datapath (VPU -> SFU -> 8 SSAs
// -> PPU) at its default size (8 arrays x 16 positions, 16 state rows).
//
// The testbench fits a 16-segment exp table, writes it through the configuration port,
// then scans one channel over 3 segments (384 positions, so the carry passes between
// chunks and between segments) with random Delta, u, B, C, Z and a negative A per row.
// Every output lane is compared with a bit-exact reference of the whole chain, and also
// loosely with a plain sequential floating-point recurrence (at least 90 % of lanes
// within 3 LSB). The output must come 20 cycles after the last row of each segment and
// segments are issued back to back (one row per cycle). A VPU multiply and an SFU exp
// pass, issued after the scan, check the stand-alone modes and their latencies (1 and 8).
module tb_ssm_pipe;
  import mx_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = SEG, MD = MDIM, NSEG = 3;
  localparam int SH0 = 3, SH1 = 14, SH2 = 22, K = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       cfg_we = 0;
  sfu_fn_e    cfg_fn = FN_EXP;
  logic [1:0] cfg_sel = 0;
  logic [4:0] cfg_idx = 0;
  fx16_t      cfg_data = 0;
  logic       in_valid = 0, ssm_mode = 0, first_m = 0, last_m = 0, first_seg = 0;
  vop_e       vop = VOP_MUL;
  sfu_fn_e    fn = FN_EXP;
  int8_t      x_in [L], y_in [L], w_in [L], c_in [L], z_in [L];
  int8_t      a_in = 0;
  logic [3:0] m_in = 0;
  shamt_t     sh0 = 0, sh1 = 0, sh2 = 0;
  logic [3:0] k = 0;
  logic       out_valid;
  int8_t      out_data [L];

  ssm_pipe dut (.*);

  int checks = 0, failures = 0, near = 0, total = 0;
  longint cyc = 0;
  longint bp[], ca[], cb[], y_ref[], y_seq[];
  longint dl[], ul[], zl[], bm[], cm[], am[];
  longint xv [L], yv [L];
  longint t_last [NSEG + 2];
  int     n_out = 0, ni = 0;

  initial begin
    #2000000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && (last_m || !ssm_mode)) begin t_last[ni] = cyc; ni++; end
    if (out_valid && rst_n) begin
      if (n_out < NSEG) begin
        for (int l = 0; l < L; l++) begin
          checks++;
          if (out_data[l] != y_ref[n_out*L+l]) begin
            failures++;
            if (failures < 10) $display("FAIL seg %0d lane %0d: %0d expected %0d",
                                        n_out, l, out_data[l], y_ref[n_out*L+l]);
          end
          total++;
          if ((out_data[l] - y_seq[n_out*L+l]) <= 3 && (y_seq[n_out*L+l] - out_data[l]) <= 3) near++;
        end
        checks++;
        if (cyc - t_last[n_out] != 20) begin
          failures++; $display("FAIL seg %0d latency %0d", n_out, cyc - t_last[n_out]);
        end
      end else if (n_out == NSEG) begin   // VPU multiply
        for (int l = 0; l < L; l++) begin
          checks++;
          if (out_data[l] != c8(rshift(xv[l] * yv[l], 4))) begin
            failures++;
            if (failures < 10) $display("FAIL mul lane %0d", l);
          end
        end
        checks++;
        if (cyc - t_last[n_out] != 1) begin failures++; $display("FAIL mul latency %0d", cyc - t_last[n_out]); end
      end else begin                      // SFU exp pass
        for (int l = 0; l < L; l++) begin
          checks++;
          if (out_data[l] != c8(rshift(pwl_ref(c16(xv[l] * 16), 16, bp, ca, cb), 1))) begin
            failures++;
            if (failures < 10) $display("FAIL sfu lane %0d: %0d", l, out_data[l]);
          end
        end
        checks++;
        if (cyc - t_last[n_out] != 8) begin failures++; $display("FAIL sfu latency %0d", cyc - t_last[n_out]); end
      end
      n_out++;
    end
  end


  task automatic wr(input int sel, input int idx, input longint val);
    cfg_we <= 1; cfg_fn <= FN_EXP; cfg_sel <= 2'(sel); cfg_idx <= 5'(idx);
    cfg_data <= 16'(val);
    @(posedge clk);
  endtask

  initial begin
    exp_table(bp, ca, cb);
    dl = new[NSEG*L]; ul = new[NSEG*L]; zl = new[NSEG*L];
    bm = new[NSEG*MD*L]; cm = new[NSEG*MD*L]; am = new[MD];
    for (int i = 0; i < NSEG*L; i++) begin
      dl[i] = $urandom_range(1, 127);
      ul[i] = longint'($urandom_range(0, 255)) - 128;
      zl[i] = longint'($urandom_range(0, 255)) - 128;
    end
    for (int i = 0; i < NSEG*MD*L; i++) begin
      bm[i] = longint'($urandom_range(0, 255)) - 128;
      cm[i] = longint'($urandom_range(0, 255)) - 128;
    end
    for (int m = 0; m < MD; m++) am[m] = -longint'($urandom_range(1, 128));
    ssm_ref(NSEG, dl, ul, zl, bm, cm, am, SH0, SH1, SH2, K, bp, ca, cb, y_ref, y_seq);

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 15; i++) wr(0, i, bp[i]);
    for (int s = 0; s < 16; s++) begin wr(1, s, ca[s]); wr(2, s, cb[s]); end
    cfg_we <= 0;
    @(posedge clk);

    // scan: 3 segments x 16 rows, back to back
    for (int s = 0; s < NSEG; s++) begin
      for (int m = 0; m < MD; m++) begin
        in_valid <= 1; ssm_mode <= 1;
        first_m <= (m == 0); last_m <= (m == MD-1); first_seg <= (s == 0);
        m_in <= 4'(m); a_in <= 8'(am[m]);
        sh0 <= 6'(SH0); sh1 <= 6'(SH1); sh2 <= 6'(SH2); k <= 4'(K);
        for (int l = 0; l < L; l++) begin
          x_in[l] <= 8'(dl[s*L+l]); y_in[l] <= 8'(ul[s*L+l]); z_in[l] <= 8'(zl[s*L+l]);
          w_in[l] <= 8'(bm[(s*MD+m)*L+l]); c_in[l] <= 8'(cm[(s*MD+m)*L+l]);
        end
        @(posedge clk);
      end
    end
    in_valid <= 0; ssm_mode <= 0; last_m <= 0;
    repeat (30) @(posedge clk);

    // stand-alone VPU multiply
    for (int l = 0; l < L; l++) begin
      xv[l] = longint'($urandom_range(0, 255)) - 128; yv[l] = longint'($urandom_range(0, 255)) - 128;
      x_in[l] <= 8'(xv[l]); y_in[l] <= 8'(yv[l]);
    end
    in_valid <= 1; vop <= VOP_MUL; sh0 <= 6'sd4;
    @(posedge clk);
    in_valid <= 0;
    repeat (5) @(posedge clk);

    // stand-alone SFU exp pass: x/16 in [-8, 0], output exp*128
    for (int l = 0; l < L; l++) begin
      xv[l] = -longint'($urandom_range(0, 128)); x_in[l] <= 8'(xv[l] < -128 ? -128 : xv[l]);
      if (xv[l] < -128) xv[l] = -128;
    end
    in_valid <= 1; vop <= VOP_PASS; fn <= FN_EXP; sh0 <= -6'sd4; sh1 <= 6'sd1;
    @(posedge clk);
    in_valid <= 0;
    repeat (15) @(posedge clk);

    checks++;
    if (n_out != NSEG + 2) begin failures++; $display("FAIL outputs %0d", n_out); end
    checks++;
    if (near * 10 < total * 9) begin failures++; $display("FAIL sequential cross-check %0d/%0d", near, total); end
    $display("sequential cross-check: %0d of %0d lanes within 3 LSB", near, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
