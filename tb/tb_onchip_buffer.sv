// tb_onchip_buffer: the 384 KB buffer (3072 words of 1024 bits). Writes random words to
// random addresses while both read ports read random addresses, and compares every read
// (one cycle after its request) with a shadow copy, including the read-old-data rule for a
// read and a write of the same word in one cycle. Ends with a sweep of the first and last
// words.
module tb_onchip_buffer;
  import mx_pkg::*;
  localparam int WORDS = 3072, W = 1024;

  logic clk = 0;
  always #5 clk = ~clk;

  logic          rd0_en = 0, rd1_en = 0, wr_en = 0;
  logic [11:0]   rd0_addr = 0, rd1_addr = 0, wr_addr = 0;
  logic [W-1:0]  rd0_data, rd1_data, wr_data = 0;

  onchip_buffer dut (.*);

  logic [W-1:0] shadow [WORDS];
  bit           known  [WORDS];
  int checks = 0, failures = 0;

  function automatic logic [W-1:0] rword();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    logic [W-1:0] e0, e1;
    bit c0, c1;
    for (int i = 0; i < WORDS; i++) known[i] = 0;
    // fill
    for (int i = 0; i < WORDS; i++) begin
      wr_en <= 1; wr_addr <= 12'(i); wr_data <= rword();
      @(posedge clk);
      shadow[i] = wr_data; known[i] = 1;
    end
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      int a0, a1, aw;
      a0 = $urandom_range(0, WORDS - 1);
      a1 = (t % 7 == 0) ? aw : $urandom_range(0, WORDS - 1);
      aw = (t % 5 == 0) ? a0 : $urandom_range(0, WORDS - 1);
      rd0_en <= 1; rd0_addr <= 12'(a0);
      rd1_en <= 1; rd1_addr <= 12'(a1);
      wr_en  <= 1; wr_addr  <= 12'(aw); wr_data <= rword();
      e0 = shadow[a0]; e1 = shadow[a1];
      @(posedge clk);
      shadow[aw] = wr_data;
      #1;
      checks += 2;
      if (rd0_data !== e0) begin failures++; if (failures < 5) $display("FAIL port0 addr %0d", a0); end
      if (rd1_data !== e1) begin failures++; if (failures < 5) $display("FAIL port1 addr %0d", a1); end
    end
    wr_en <= 0;
    // read port holds its data when not enabled
    rd0_en <= 1; rd0_addr <= 12'(WORDS - 1); rd1_en <= 0;
    @(posedge clk);
    rd0_en <= 0;
    @(posedge clk); @(posedge clk); #1;
    checks++;
    if (rd0_data !== shadow[WORDS-1]) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
