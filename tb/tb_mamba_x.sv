// tb_mamba_x: end-to-end self-checking testbench of the Mamba-X top level.
//
// The accelerator is connected to a behavioural DRAM (random ready stalls, 4-cycle read
// latency). A host routine programs the SFU exp table and then issues a command program:
//   LOAD  (DRAM -> buffer) of the SSM operands, the GEMM operands and the vector operands
//   SSM   one hidden channel over 2 segments (256 tokens), so the scan state carries
//         across the segment boundary through the long-input support unit
//   GEMM  A[GN x 20] * B[20 x GN] on the output-stationary array
//   VEC   element-wise multiply, then element-wise add
//   SFU   exp over 4 words
//   STORE (buffer -> DRAM) of every result
// The stored DRAM words are compared with bit-exact references (the SSM chain, the
// integer matrix product, the element-wise ops, the exp table). The testbench counts the
// mechanisms it must see - DRAM stalls on read and write, a segment carried from the
// previous one, each command type, a change of active unit between commands, the GEMM
// drain, SSM rows issued back to back - and fails if any count is zero. Command
// latencies are checked against the design's cycle budget (SSM: 18 cycles per segment
// plus the 20-cycle pipeline; GEMM: K feed cycles, 2N-1 drain, N write-back rows).
// The GEMM engine is built at GN = 16 here to keep the simulation build short; every
// other unit is at its default size.
module tb_mamba_x;
  import mx_pkg::*;
  import tb_ref_pkg::*;

  localparam int GN = 16, L = SEG, MD = MDIM, NSEG = 2, K = 20;
  localparam int SH0 = 3, SH1 = 14, SH2 = 22, KS = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       cmd_valid = 0, cmd_ready, cmd_done;
  cmd_t       cmd;
  logic       cfg_we = 0;
  sfu_fn_e    cfg_fn = FN_EXP;
  logic [1:0] cfg_sel = 0;
  logic [4:0] cfg_idx = 0;
  fx16_t      cfg_data = 0;
  logic              dram_rq_valid, dram_rq_ready, dram_rs_valid, dram_wq_valid, dram_wq_ready;
  logic [31:0]       dram_rq_addr, dram_wq_addr;
  logic [WORD_W-1:0] dram_rs_data, dram_wq_data;
  logic              stall_en = 1;

  mamba_x #(.GN(GN)) dut (.*);

  dram_model #(.W(WORD_W), .WORDS(2048), .LAT(4), .STALL_PCT(30)) u_dram (
    .clk, .stall_en, .rq_valid(dram_rq_valid), .rq_ready(dram_rq_ready), .rq_addr(dram_rq_addr),
    .rs_valid(dram_rs_valid), .rs_data(dram_rs_data), .wq_valid(dram_wq_valid),
    .wq_ready(dram_wq_ready), .wq_addr(dram_wq_addr), .wq_data(dram_wq_data)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint bp[], ca[], cb[], y_ref[], y_seq[];
  longint dl[], ul[], zl[], bm[], cm[], am[];
  longint ga [GN][K], gb [K][GN];
  longint vx [8][L], vy [8][L];

  // mechanism counters
  int n_rd_stall = 0, n_wr_stall = 0, n_carry = 0, n_switch = 0, n_drain = 0, n_b2b = 0;
  int n_op [6];
  cmd_op_e last_op;
  logic    have_last = 0;

  initial begin
    #5000000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic prev_row = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dram_rq_valid && !dram_rq_ready) n_rd_stall++;
    if (dram_wq_valid && !dram_wq_ready) n_wr_stall++;
    if (dut.p_valid && dut.p_ssm && dut.p_first_m && !dut.p_first_seg) n_carry++;
    if (dut.p_valid && dut.p_ssm && prev_row && dut.p_m != 0) n_b2b++;
    prev_row <= dut.p_valid && dut.p_ssm;
    if (dut.u_gemm.busy && !dut.u_gemm.in_valid) n_drain++;
  end

  task automatic wr_cfg(input int sel, input int idx, input longint val);
    cfg_we <= 1; cfg_fn <= FN_EXP; cfg_sel <= 2'(sel); cfg_idx <= 5'(idx);
    cfg_data <= 16'(val);
    @(posedge clk);
  endtask

  function automatic logic [7:0] b8(longint v); return 8'(v); endfunction

  task automatic put(input int addr, input int l, input longint v);
    u_dram.mem[addr][l*8 +: 8] = b8(v);
  endtask

  function automatic longint get(input int addr, input int l);
    return longint'(int8_t'(u_dram.mem[addr][l*8 +: 8]));
  endfunction

  // issue one command and wait for done; returns the cycles from acceptance to done
  task automatic run(input cmd_t c, output longint dur);
    longint t0;
    cmd <= c; cmd_valid <= 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    t0 = cyc;
    cmd_valid <= 0;
    @(posedge clk);
    while (!cmd_done) @(posedge clk);
    dur = cyc - t0;
    n_op[int'(c.op)]++;
    if (have_last && last_op != c.op) n_switch++;
    last_op = c.op; have_last = 1;
  endtask

  function automatic cmd_t mk(input cmd_op_e op);
    cmd_t c;
    c = '0;
    c.op = op;
    return c;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    cmd_t   c;
    longint dur;
    for (int i = 0; i < 6; i++) n_op[i] = 0;
    for (int a = 0; a < 2048; a++) u_dram.mem[a] = '0;
    exp_table(bp, ca, cb);

    // ---- DRAM image ----
    // 0..1 Delta, 2..3 u, 4..5 Z, 6..37 B, 38..69 C, 70 A
    dl = new[NSEG*L]; ul = new[NSEG*L]; zl = new[NSEG*L];
    bm = new[NSEG*MD*L]; cm = new[NSEG*MD*L]; am = new[MD];
    for (int i = 0; i < NSEG*L; i++) begin
      dl[i] = $urandom_range(1, 127);
      ul[i] = longint'($urandom_range(0, 255)) - 128;
      zl[i] = longint'($urandom_range(0, 255)) - 128;
      put(0 + i / L, i % L, dl[i]); put(2 + i / L, i % L, ul[i]); put(4 + i / L, i % L, zl[i]);
    end
    for (int i = 0; i < NSEG*MD*L; i++) begin
      bm[i] = longint'($urandom_range(0, 255)) - 128;
      cm[i] = longint'($urandom_range(0, 255)) - 128;
      put(6 + i / L, i % L, bm[i]); put(38 + i / L, i % L, cm[i]);
    end
    for (int m = 0; m < MD; m++) begin am[m] = -longint'($urandom_range(1, 128)); put(70, m, am[m]); end
    ssm_ref(NSEG, dl, ul, zl, bm, cm, am, SH0, SH1, SH2, KS, bp, ca, cb, y_ref, y_seq);
    // 80.. GEMM A columns, 100.. GEMM B rows
    for (int k = 0; k < K; k++)
      for (int i = 0; i < GN; i++) begin
        ga[i][k] = longint'($urandom_range(0, 255)) - 128; put(80 + k, i, ga[i][k]);
        gb[k][i] = longint'($urandom_range(0, 255)) - 128; put(100 + k, i, gb[k][i]);
      end
    // 130..133 x, 134..137 y, 140..143 SFU input
    for (int w = 0; w < 4; w++)
      for (int l = 0; l < L; l++) begin
        vx[w][l] = longint'($urandom_range(0, 255)) - 128; put(130 + w, l, vx[w][l]);
        vy[w][l] = longint'($urandom_range(0, 255)) - 128; put(134 + w, l, vy[w][l]);
        vx[4+w][l] = -longint'($urandom_range(0, 127));   put(140 + w, l, vx[4+w][l]);
      end

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 15; i++) wr_cfg(0, i, bp[i]);
    for (int s = 0; s < 16; s++) begin wr_cfg(1, s, ca[s]); wr_cfg(2, s, cb[s]); end
    cfg_we <= 0;
    @(posedge clk);

    // ---- program ----
    c = mk(CMD_LOAD); c.dram_addr = 0; c.addr0 = 0; c.len = 71;
    run(c, dur);
    check(dur >= 71, $sformatf("load 1 took %0d cycles", dur));
    c = mk(CMD_LOAD); c.dram_addr = 80; c.addr0 = 80; c.len = 64;
    run(c, dur);

    c = mk(CMD_SSM); c.addr0 = 0; c.addr1 = 2; c.addr2 = 4; c.addr3 = 6; c.addr4 = 38;
    c.addr5 = 70; c.dst = 200; c.len = NSEG; c.sh0 = SH0; c.sh1 = SH1; c.sh2 = SH2; c.k = KS;
    run(c, dur);
    $display("SSM of %0d segments: %0d cycles", NSEG, dur);
    check(dur <= 18 * NSEG + 25, $sformatf("SSM took %0d cycles", dur));

    c = mk(CMD_GEMM); c.addr0 = 80; c.addr1 = 100; c.len = K; c.dst = 210; c.sh0 = 10;
    run(c, dur);
    $display("GEMM K=%0d on %0dx%0d: %0d cycles", K, GN, GN, dur);
    check(dur >= K + 2 * GN - 1 + GN && dur <= K + 3 * GN + 6, $sformatf("GEMM took %0d cycles", dur));

    c = mk(CMD_VEC); c.vop = VOP_MUL; c.addr0 = 130; c.addr1 = 134; c.len = 4; c.dst = 230; c.sh0 = 4;
    run(c, dur);
    check(dur <= 4 + 4, $sformatf("VEC took %0d cycles", dur));
    c = mk(CMD_VEC); c.vop = VOP_ADD; c.addr0 = 130; c.addr1 = 134; c.len = 2; c.dst = 240;
    run(c, dur);
    c = mk(CMD_SFU); c.fn = FN_EXP; c.addr0 = 140; c.len = 4; c.dst = 250; c.sh0 = -6'sd4; c.sh1 = 6'sd1;
    run(c, dur);
    check(dur <= 4 + 11, $sformatf("SFU took %0d cycles", dur));

    c = mk(CMD_STORE); c.dram_addr = 1000; c.addr0 = 200; c.len = 54;
    run(c, dur);
    repeat (5) @(posedge clk);

    // ---- results ----
    for (int s = 0; s < NSEG; s++)
      for (int l = 0; l < L; l++)
        check(get(1000 + s, l) == y_ref[s*L+l],
              $sformatf("ssm seg %0d lane %0d: %0d expected %0d", s, l, get(1000 + s, l), y_ref[s*L+l]));
    for (int i = 0; i < GN; i++)
      for (int j = 0; j < L; j++) begin
        longint acc;
        acc = 0;
        if (j < GN) begin
          for (int k = 0; k < K; k++) acc += ga[i][k] * gb[k][j];
          acc = c8(rshift(acc, 10));
        end
        check(get(1010 + i, j) == acc, $sformatf("gemm %0d,%0d: %0d expected %0d", i, j, get(1010 + i, j), acc));
      end
    for (int w = 0; w < 4; w++)
      for (int l = 0; l < L; l++) begin
        check(get(1030 + w, l) == c8(rshift(vx[w][l] * vy[w][l], 4)), $sformatf("mul %0d,%0d", w, l));
        if (w < 2) check(get(1040 + w, l) == c8(vx[w][l] + vy[w][l]), $sformatf("add %0d,%0d", w, l));
        check(get(1050 + w, l) == c8(rshift(pwl_ref(c16(vx[4+w][l] * 16), 16, bp, ca, cb), 1)),
              $sformatf("sfu %0d,%0d", w, l));
      end

    $display("mechanisms: rd_stall=%0d wr_stall=%0d carry=%0d switch=%0d drain=%0d b2b=%0d",
             n_rd_stall, n_wr_stall, n_carry, n_switch, n_drain, n_b2b);
    $display("commands: load=%0d store=%0d gemm=%0d ssm=%0d vec=%0d sfu=%0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_op[4], n_op[5]);
    check(n_rd_stall > 0, "no DRAM read stall");
    check(n_wr_stall > 0, "no DRAM write stall");
    check(n_carry > 0, "no segment carry");
    check(n_switch > 0, "no unit switch");
    check(n_drain > 0, "no GEMM drain");
    check(n_b2b > 0, "no back-to-back SSM rows");
    for (int i = 0; i < 6; i++) check(n_op[i] > 0, $sformatf("command %0d never ran", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
