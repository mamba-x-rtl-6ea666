// onchip_buffer: the accelerator's on-chip scratchpad.
//
// 384 KB (the paper's capacity) organised as WORDS words of W bits; one word is one
// 128-lane INT8 vector, the width of one segment of the scan arrays and of one DRAM beat
// (about the paper's 136.5 GB/s at 1 GHz). Two read ports and one write port, so that a
// compute unit can fetch two operand vectors per cycle while results are written back.
// Reads are synchronous: rd_data appears the cycle after rd_en and holds until the next
// read on that port. A read and a write of the same address in one cycle return the old
// word. The word width, the port count and the single-array organisation (rather than
// banked SRAM macros) are this design's choices; the paper sizes the buffer with CACTI
// and gives no organisation. The contents are not reset.
module onchip_buffer
  import mx_pkg::*;
#(
  parameter int unsigned WORDS = BUF_WORDS,
  parameter int unsigned W     = WORD_W,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rd0_en,
  input  logic [AW-1:0] rd0_addr,
  output logic [W-1:0]  rd0_data,
  input  logic          rd1_en,
  input  logic [AW-1:0] rd1_addr,
  output logic [W-1:0]  rd1_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data
);
  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (rd0_en) rd0_data <= mem[rd0_addr];
    if (rd1_en) rd1_data <= mem[rd1_addr];
    if (wr_en)  mem[wr_addr] <= wr_data;
  end
endmodule
