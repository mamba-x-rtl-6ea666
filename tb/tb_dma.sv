// tb_dma: the DMA between a DRAM model that stalls at random (30 % of cycles) and a real
// on-chip buffer. A 40-word load and a 30-word store are run; every moved word is compared
// with its source, done must pulse once per transfer, and stalls must have happened.
// With the DRAM never stalling a store moves one word per cycle, which is checked too.
module tb_dma;
  import mx_pkg::*;
  localparam int W = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          start = 0, dir_store = 0, busy, done;
  logic [31:0]   dram_addr = 0;
  logic [11:0]   buf_addr = 0;
  logic [15:0]   len = 0;
  logic          rq_valid, rq_ready, rs_valid, wq_valid, wq_ready;
  logic [31:0]   rq_addr, wq_addr;
  logic [W-1:0]  rs_data, wq_data;
  logic          b_rd_en, b_wr_en;
  logic [11:0]   b_rd_addr, b_wr_addr;
  logic [W-1:0]  b_rd_data, b_wr_data, unused1;
  logic          fast = 0;

  dma dut (.*);
  onchip_buffer u_buf (.clk, .rd0_en(b_rd_en), .rd0_addr(b_rd_addr), .rd0_data(b_rd_data),
                       .rd1_en(1'b0), .rd1_addr(12'd0), .rd1_data(unused1),
                       .wr_en(b_wr_en), .wr_addr(b_wr_addr), .wr_data(b_wr_data));
  dram_model #(.W(W), .WORDS(1024), .LAT(5), .STALL_PCT(30)) u_dram (
    .clk, .stall_en(!fast), .rq_valid, .rq_ready, .rq_addr, .rs_valid, .rs_data,
    .wq_valid, .wq_ready, .wq_addr, .wq_data);

  int checks = 0, failures = 0, ndone = 0;
  always @(posedge clk) if (done) ndone++;

  function automatic logic [W-1:0] rword();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic xfer(input bit st, input int da, input int ba, input int n, output int cycles);
    int c0;
    dir_store <= st; dram_addr <= 32'(da); buf_addr <= 12'(ba); len <= 16'(n); start <= 1;
    @(posedge clk);
    start <= 0;
    c0 = 0;
    while (!done) begin @(posedge clk); c0++; end
    cycles = c0;
    @(posedge clk);
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < 1024; i++) u_dram.mem[i] = rword();
    for (int i = 0; i < 3072; i++) u_buf.mem[i] = rword();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    xfer(0, 100, 200, 40, cyc);
    for (int i = 0; i < 40; i++) begin
      checks++;
      if (u_buf.mem[200+i] !== u_dram.mem[100+i]) begin failures++; $display("FAIL load word %0d", i); end
    end
    xfer(1, 500, 10, 30, cyc);
    for (int i = 0; i < 30; i++) begin
      checks++;
      if (u_dram.mem[500+i] !== u_buf.mem[10+i]) begin failures++; $display("FAIL store word %0d", i); end
    end
    fast = 1;
    @(posedge clk); @(posedge clk);
    xfer(1, 700, 300, 20, cyc);
    for (int i = 0; i < 20; i++) begin
      checks++;
      if (u_dram.mem[700+i] !== u_buf.mem[300+i]) begin failures++; $display("FAIL fast store %0d", i); end
    end
    checks++;
    if (cyc > 20 + 2) begin failures++; $display("FAIL store rate: 20 words in %0d cycles", cyc); end
    checks++;
    if (ndone != 3) begin failures++; $display("FAIL done pulses %0d", ndone); end
    checks++;
    if (u_dram.n_stalls == 0) begin failures++; $display("FAIL no DRAM stall happened"); end
    $display("stalls=%0d reads=%0d writes=%0d", u_dram.n_stalls, u_dram.n_reads, u_dram.n_writes);
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
