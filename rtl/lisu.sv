// lisu: Long Input Support Unit, the inter-chunk stage of the selective scan.
//
// Each SSA delivers, for one state row m, the partial states of its chunk computed as if
// the state before the chunk were zero, together with the prefix products of P. The LISU
// holds one extra row of SPEs per SSA (as the paper describes) that folds the true state
// entering the chunk into every position: state_i = Pprefix_i * state_in + partial_i. The
// SSAs are fed one cycle apart (SSA j is j cycles behind SSA 0), so stage j receives its
// SSA's output exactly one cycle after stage j-1 has registered the final state of the
// preceding chunk, and that value is handed on directly, as in the paper's example of
// chunk 1 -> 2 -> 3.
//
// This design's own addition: sequences longer than NS*N positions are scanned in several
// segments. The final state of the last SSA is written into a carry register indexed by m,
// and stage 0 reads it when the next segment of the same m arrives (flag first = 0 there;
// first = 1 starts a sequence from a zero state). The issuing side must leave at least NS
// cycles between the two issues of one m (an MDIM-row sweep already does).
//
// Timing: every stage is one register; output j is valid one cycle after input j.
module lisu
  import mx_pkg::*;
#(
  parameter int unsigned NS = NSSA,
  parameter int unsigned N  = CHUNK,
  parameter int unsigned MD = MDIM,
  localparam int unsigned MW = (MD > 1) ? $clog2(MD) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid [NS],
  input  int8_t           pp_in    [NS][N],   // prefix products from SSA j
  input  state_t          qs_in    [NS][N],   // partial states from SSA j
  input  logic [3:0]      k_in     [NS],
  input  logic [MW-1:0]   m_in     [NS],
  input  logic            first_in [NS],      // first segment of the sequence
  output logic            out_valid[NS],
  output state_t          st_out   [NS][N],   // full states
  output logic [MW-1:0]   m_out    [NS]
);
  state_t carry_mem [MD];
  state_t carry_in  [NS];
  state_t st_c      [NS][N];
  int8_t  p_unused  [NS][N];

  for (genvar j = 0; j < NS; j++) begin : g_stage
    if (j == 0) begin : g_head
      assign carry_in[j] = first_in[j] ? '0 : carry_mem[m_in[j]];
    end else begin : g_chain
      assign carry_in[j] = st_out[j-1][N-1];
    end
    for (genvar i = 0; i < N; i++) begin : g_pos
      spe u_spe (
        .p_lo (8'sd0),          .q_lo (carry_in[j]),
        .p_hi (pp_in[j][i]),    .q_hi (qs_in[j][i]),
        .k    (k_in[j]),
        .p_out(p_unused[j][i]), .q_out(st_c[j][i])
      );
    end
    always_ff @(posedge clk) begin
      if (!rst_n) out_valid[j] <= 1'b0;
      else        out_valid[j] <= in_valid[j];
    end
    always_ff @(posedge clk) begin
      if (in_valid[j]) begin
        st_out[j] <= st_c[j];
        m_out[j]  <= m_in[j];
      end
    end
  end

  // the last stage's final state carries into the next segment of the same m
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int m = 0; m < MD; m++) carry_mem[m] <= '0;
    end else if (in_valid[NS-1]) begin
      carry_mem[m_in[NS-1]] <= st_c[NS-1][N-1];
    end
  end

  // a chained stage must see the same state row that its predecessor finished last cycle
  for (genvar j = 1; j < NS; j++) begin : g_chk
    a_chain: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid[j] |-> (out_valid[j-1] && m_out[j-1] == m_in[j]))
      else $error("lisu: stage %0d fed without its predecessor's state", j);
  end
endmodule
