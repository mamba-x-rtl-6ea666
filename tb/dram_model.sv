// dram_model: behavioural model of the off-chip DRAM for the testbenches (not part of the
// design). WORDS words of W bits; read requests are accepted when a pseudo-random ready is
// high and answered in order LAT cycles later; write requests are accepted likewise. The
// stall probability is STALL_PCT percent while stall_en is high. Counts accepted reads and writes, and the
// cycles on which it held ready low while a request was waiting.
module dram_model #(
  parameter int unsigned W         = 1024,
  parameter int unsigned WORDS     = 1024,
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 30
) (
  input  logic          clk,
  input  logic          stall_en,
  input  logic          rq_valid,
  output logic          rq_ready,
  input  logic [31:0]   rq_addr,
  output logic          rs_valid,
  output logic [W-1:0]  rs_data,
  input  logic          wq_valid,
  output logic          wq_ready,
  input  logic [31:0]   wq_addr,
  input  logic [W-1:0]  wq_data
);
  logic [W-1:0] mem [WORDS];
  logic         pv [LAT];
  logic [W-1:0] pd [LAT];
  int n_reads = 0, n_writes = 0, n_stalls = 0;

  initial begin
    for (int i = 0; i < LAT; i++) pv[i] = 1'b0;
    rq_ready = 1'b0;
    wq_ready = 1'b0;
  end

  always @(posedge clk) begin
    pv[0] <= rq_valid && rq_ready;
    pd[0] <= mem[rq_addr % WORDS];
    for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    if (rq_valid && rq_ready) n_reads++;
    if (wq_valid && wq_ready) begin mem[wq_addr % WORDS] <= wq_data; n_writes++; end
    if ((rq_valid && !rq_ready) || (wq_valid && !wq_ready)) n_stalls++;
    rq_ready <= !stall_en || ($urandom_range(0, 99) >= STALL_PCT);
    wq_ready <= !stall_en || ($urandom_range(0, 99) >= STALL_PCT);
  end
  assign rs_valid = pv[LAT-1];
  assign rs_data  = pd[LAT-1];
endmodule
