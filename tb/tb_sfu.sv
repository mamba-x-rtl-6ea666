// tb_sfu: the special function unit at its default 128 lanes. The testbench fits chord
// (piecewise-linear) tables itself: 16 segments for exp over [-8.5, 0], 32 for SiLU over
// [-8.7, 10.2] and 32 for softplus over [-17.6, 2.7] (the input ranges the paper reports),
// with evenly spaced breakpoints, and writes them through the configuration port. Random
// input vectors of all three functions are then streamed back to back. Each output lane is
// compared exactly with a linear-search evaluation of the same table and, loosely, with the
// true function; the 6-cycle latency and one-vector-per-cycle rate are checked too.
module tb_sfu;
  import mx_pkg::*;
  import tb_ref_pkg::*;
  localparam int LANES = 128, V = 30, LAT = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       cfg_we = 0;
  sfu_fn_e    cfg_fn = FN_EXP;
  logic [1:0] cfg_sel = 0;
  logic [4:0] cfg_idx = 0;
  fx16_t      cfg_data = 0;
  logic       in_valid = 0, out_valid;
  sfu_fn_e    fn = FN_EXP;
  fx16_t      x_in [LANES], y_out [LANES];
  logic [7:0] tag_in = 0, tag_out;

  sfu #(.LANES(LANES)) dut (.*);

  longint bp [3][31], ca [3][32], cb [3][32];
  int     ne [3];
  real    lo [3], hi [3];
  longint xv [V][LANES];
  int     fv [V];
  int checks = 0, failures = 0, got = 0, cyc = 0, t_in0 = -1, t_out0 = -1, nerr = 0;

  function automatic real f(int fi, real x);
    if (fi == 0) return $exp(x);
    if (fi == 1) return x / (1.0 + $exp(-x));
    return $ln(1.0 + $exp(x));
  endfunction

  task automatic wr(input int fi, input int sel, input int idx, input longint val);
    cfg_we <= 1; cfg_fn <= sfu_fn_e'(fi); cfg_sel <= 2'(sel); cfg_idx <= 5'(idx);
    cfg_data <= 16'(val);
    @(posedge clk);
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && t_in0 < 0) t_in0 = cyc;
  end

  initial begin
    ne = '{16, 32, 32};
    lo = '{-8.5, -8.7, -17.6};
    hi = '{0.0, 10.2, 2.7};
    for (int fi = 0; fi < 3; fi++) begin
      real h, xl, xr, a;
      h = (hi[fi] - lo[fi]) / (ne[fi] - 2);
      for (int i = 0; i < ne[fi] - 1; i++) bp[fi][i] = longint'($floor((lo[fi] + i * h) * 256.0 + 0.5));
      for (int s = 0; s < ne[fi]; s++) begin
        if (s == 0) begin xl = lo[fi]; a = 0.0; end
        else if (s == ne[fi] - 1) begin
          xl = real'(bp[fi][s-1]) / 256.0;
          a = (fi == 0) ? 0.0 : (f(fi, xl + 0.5) - f(fi, xl)) / 0.5;
        end else begin
          xl = real'(bp[fi][s-1]) / 256.0; xr = real'(bp[fi][s]) / 256.0;
          a = (f(fi, xr) - f(fi, xl)) / (xr - xl);
        end
        ca[fi][s] = longint'($floor(a * 4096.0 + 0.5));
        cb[fi][s] = longint'($floor((f(fi, xl) - a * xl) * 256.0 + 0.5));
      end
    end
    for (int v = 0; v < V; v++) begin
      fv[v] = v % 3;
      for (int l = 0; l < LANES; l++)
        xv[v][l] = longint'($floor((lo[fv[v]] - 0.5 + (hi[fv[v]] - lo[fv[v]] + 1.0) *
                   real'($urandom_range(0, 100000)) / 100000.0) * 256.0));
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int fi = 0; fi < 3; fi++) begin
      for (int i = 0; i < ne[fi] - 1; i++) wr(fi, 0, i, bp[fi][i]);
      for (int s = 0; s < ne[fi]; s++) begin wr(fi, 1, s, ca[fi][s]); wr(fi, 2, s, cb[fi][s]); end
    end
    cfg_we <= 0;
    for (int v = 0; v < V; v++) begin
      in_valid <= 1;
      fn       <= sfu_fn_e'(fv[v]);
      tag_in   <= 8'(v);
      for (int l = 0; l < LANES; l++) x_in[l] <= 16'(xv[v][l]);
      @(posedge clk);
    end
    in_valid <= 0;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int v, fi;
    v = int'(tag_out);
    fi = fv[v];
    if (got == 0) t_out0 = cyc;
    checks++;
    if (v != got) begin failures++; $display("FAIL order %0d/%0d", v, got); end
    for (int l = 0; l < LANES; l++) begin
      longint bpa[], aa[], ba[], e;
      real err;
      bpa = new[31]; aa = new[32]; ba = new[32];
      for (int i = 0; i < 31; i++) bpa[i] = bp[fi][i];
      for (int i = 0; i < 32; i++) begin aa[i] = ca[fi][i]; ba[i] = cb[fi][i]; end
      e = pwl_ref(xv[v][l], ne[fi], bpa, aa, ba);
      checks++;
      if (y_out[l] !== 16'(e)) begin
        failures++;
        if (failures < 10) $display("FAIL fn %0d x %0d: y %0d expected %0d", fi, xv[v][l], y_out[l], e);
      end
      err = real'(y_out[l]) / 256.0 - f(fi, real'(xv[v][l]) / 256.0);
      if (err < 0) err = -err;
      if (real'(xv[v][l]) / 256.0 >= lo[fi] && real'(xv[v][l]) / 256.0 <= hi[fi]) begin
        checks++;
        if (err > 0.1) begin
          failures++; nerr++;
          if (nerr < 5) $display("FAIL accuracy fn %0d x %f err %f", fi, real'(xv[v][l]) / 256.0, err);
        end
      end
    end
    got++;
    if (got == V) begin
      checks++;
      if (t_out0 - t_in0 != LAT) begin failures++; $display("FAIL latency %0d", t_out0 - t_in0); end
      checks++;
      if (cyc - t_out0 != V - 1) begin failures++; $display("FAIL rate"); end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
