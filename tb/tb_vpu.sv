// tb_vpu: every VPU operation on random 128-lane INT8 vectors with random shift amounts
// (both directions), compared lane by lane with reference arithmetic; one result per cycle
// with a latency of one cycle.
module tb_vpu;
  import mx_pkg::*;
  import tb_ref_pkg::*;
  localparam int LANES = 128, V = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid = 0, out_valid;
  vop_e       op = VOP_DELTA;
  int8_t      x [LANES], y [LANES], w [LANES], q8 [LANES];
  fx16_t      x16 [LANES];
  int8_t      a = 0;
  shamt_t     sh0 = 0, sh1 = 0;
  logic [7:0] tag_in = 0, tag_out;

  vpu #(.LANES(LANES)) dut (.*);

  longint xv [V][LANES], yv [V][LANES], wv [V][LANES];
  int     opv [V], s0v [V], s1v [V], av [V];
  int checks = 0, failures = 0, got = 0, cyc = 0, t_in0 = -1, t_out0 = -1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && t_in0 < 0) t_in0 = cyc;
  end

  initial begin
    for (int v = 0; v < V; v++) begin
      opv[v] = v % 5;
      s0v[v] = $urandom_range(0, 12) - 3;
      s1v[v] = $urandom_range(0, 16);
      av[v]  = $urandom_range(0, 255) - 128;
      for (int l = 0; l < LANES; l++) begin
        xv[v][l] = longint'($urandom_range(0, 255)) - 128;
        yv[v][l] = longint'($urandom_range(0, 255)) - 128;
        wv[v][l] = longint'($urandom_range(0, 255)) - 128;
      end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int v = 0; v < V; v++) begin
      in_valid <= 1;
      op  <= vop_e'(opv[v]);
      sh0 <= 6'(s0v[v]);
      sh1 <= 6'(s1v[v]);
      a   <= 8'(av[v]);
      tag_in <= 8'(v);
      for (int l = 0; l < LANES; l++) begin
        x[l] <= 8'(xv[v][l]); y[l] <= 8'(yv[v][l]); w[l] <= 8'(wv[v][l]);
      end
      @(posedge clk);
    end
    in_valid <= 0;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int v;
    v = int'(tag_out);
    if (got == 0) t_out0 = cyc;
    for (int l = 0; l < LANES; l++) begin
      longint e8, e16;
      e8 = 0; e16 = 0;
      case (opv[v])
        0: begin e16 = c16(rshift(xv[v][l] * av[v], s0v[v]));
                 e8 = c8(rshift(xv[v][l] * wv[v][l] * yv[v][l], s1v[v])); end
        1: e8 = c8(rshift(xv[v][l] * yv[v][l], s0v[v]));
        2: e8 = c8(xv[v][l] + yv[v][l]);
        3: e8 = xv[v][LANES-1-l];
        default: e16 = c16(rshift(xv[v][l], s0v[v]));
      endcase
      checks++;
      if (q8[l] !== 8'(e8) || x16[l] !== 16'(e16)) begin
        failures++;
        if (failures < 10) $display("FAIL vec %0d op %0d lane %0d: q8 %0d/%0d x16 %0d/%0d", v, opv[v], l,
                                    q8[l], e8, x16[l], e16);
      end
    end
    got++;
    if (got == V) begin
      checks++;
      if (t_out0 - t_in0 != 1 || cyc - t_out0 != V - 1) begin
        failures++; $display("FAIL timing");
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
