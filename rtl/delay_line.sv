// delay_line: a W-bit value delayed by D clock cycles through a chain of registers
// (D = 0 passes the value straight through). Used to keep side information (coefficient
// vectors, tags, valid bits) aligned with the pipelined datapaths. Reset, when RST is set,
// clears the stages (used for valid bits); data stages are not reset. A helper of this
// design, not a unit of the paper. With D = 0 the clock and reset inputs are unused, which
// the linter reports as unused signals; they stay so that every instance has one port list.
module delay_line #(
  parameter int unsigned W   = 1,
  parameter int unsigned D   = 1,
  parameter bit          RST = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [D];
    always_ff @(posedge clk) begin
      if (RST && !rst_n) begin
        for (int i = 0; i < D; i++) r[i] <= '0;
      end else begin
        r[0] <= d;
        for (int i = 1; i < D; i++) r[i] <= r[i-1];
      end
    end
    assign q = r[D-1];
  end
endmodule
