// ssa: systolic scan array for one chunk of CHUNK positions.
//
// The Kogge-Stone parallel prefix of the selective-scan recurrence is laid out as
// log2(CHUNK) rows. In row r (distance d = 2^r) position i >= d holds an SPE that combines
// the pair from position i-d of the row above (earlier) with the pair at position i;
// positions i < d hold only a register, as in the paper's figure of the SSA (row 1:
// registers at the first position, row 2 at the first two). A register row follows every
// SPE row, so one (Delta A, Delta B*u) row vector of one state index m enters per cycle and
// successive m rows flow through the rows in a pipeline.
//
// Input: CHUNK INT8 pairs (P = quantised exp(Delta A), Q = quantised Delta B*u). Q is
// widened to the QW-bit partial-state format with QFRAC extra fractional bits on entry.
// Output after LAT = log2(CHUNK) cycles: for every position the prefix product of P and the
// partial state (the scan result assuming a zero state before the chunk). Sideband tags
// (k, and a user word the caller uses for m and flags) travel with the data. No stall:
// in_valid may be high every cycle. Reset clears only the valid bits.
module ssa
  import mx_pkg::*;
#(
  parameter int unsigned N    = CHUNK,
  parameter int unsigned TAGW = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  int8_t                   p_in [N],
  input  int8_t                   q_in [N],
  input  logic [3:0]              k_in,
  input  logic [TAGW-1:0]         tag_in,
  output logic                    out_valid,
  output int8_t                   p_out [N],   // prefix product of P
  output state_t                  q_out [N],   // partial state
  output logic [3:0]              k_out,
  output logic [TAGW-1:0]         tag_out
);
  localparam int unsigned LAT = $clog2(N);

  int8_t          p_r [LAT+1][N];
  state_t         q_r [LAT+1][N];
  logic [3:0]     k_r [LAT+1];
  logic [TAGW-1:0] t_r [LAT+1];
  logic           v_r [LAT+1];

  // row 0: the inputs, Q widened with QFRAC extra fractional bits
  always_comb begin
    for (int i = 0; i < N; i++) begin
      p_r[0][i] = p_in[i];
      q_r[0][i] = state_t'(signed'(q_in[i])) <<< QFRAC;
    end
    k_r[0] = k_in;
    t_r[0] = tag_in;
    v_r[0] = in_valid;
  end

  for (genvar r = 0; r < LAT; r++) begin : g_row
    localparam int unsigned D = 1 << r;
    int8_t  p_c [N];
    state_t q_c [N];
    for (genvar i = 0; i < N; i++) begin : g_pos
      if (i >= D) begin : g_spe
        spe u_spe (
          .p_lo (p_r[r][i-D]), .q_lo (q_r[r][i-D]),
          .p_hi (p_r[r][i]),   .q_hi (q_r[r][i]),
          .k    (k_r[r]),
          .p_out(p_c[i]),      .q_out(q_c[i])
        );
      end else begin : g_reg
        assign p_c[i] = p_r[r][i];
        assign q_c[i] = q_r[r][i];
      end
    end
    always_ff @(posedge clk) begin
      if (!rst_n) v_r[r+1] <= 1'b0;
      else        v_r[r+1] <= v_r[r];
    end
    always_ff @(posedge clk) begin
      p_r[r+1] <= p_c;
      q_r[r+1] <= q_c;
      k_r[r+1] <= k_r[r];
      t_r[r+1] <= t_r[r];
    end
  end

  assign out_valid = v_r[LAT];
  assign p_out     = p_r[LAT];
  assign q_out     = q_r[LAT];
  assign k_out     = k_r[LAT];
  assign tag_out   = t_r[LAT];
endmodule
