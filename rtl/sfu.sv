// sfu: special function unit, piecewise-linear SiLU, exponential and softplus.
//
// Each function is cut into segments by breakpoints bp_0 < bp_1 < ...; inside segment i it
// is approximated by y = a_i*x + b_i. As in the paper, the unit is made of an address
// decoding unit (ADU) per lane that finds the segment of its input by binary search over
// the breakpoints, one lookup table (LUT) of coefficients (a_i, b_i) shared by all lanes
// through a crossbar (here: a per-lane read multiplexer), and a compute unit (CU) per lane
// that evaluates a*x+b. The exponential uses a 16-entry table and SiLU and softplus a
// 32-entry table (paper's sizes). The breakpoints and coefficients are found offline by the
// paper's profile-guided fitting and are not printed, so the tables are writable through a
// configuration port.
//
// Binary search: with E entries there are E-1 breakpoints and log2(E) levels; the level
// with step s compares x with bp[idx + s - 1] and adds s to idx when x >= that breakpoint
// (for 16 entries: bp7, then bp3/bp11, then bp1/5/9/13, then the even ones, as in the
// paper's figure). Each level is one pipeline register; the 16-entry exponential skips the
// first level of the 32-entry search. Latency: LEVELS+1 = 6 cycles, one vector per cycle.
//
// Formats (this design's choice): x and y signed Q8.8 (16 bit), a signed Q4.12, b Q8.8,
// y saturated. Table writes: cfg_sel 0 = breakpoint, 1 = a, 2 = b; cfg_idx entry number.
module sfu
  import mx_pkg::*;
#(
  parameter int unsigned LANES = SEG,
  parameter int unsigned ENT   = SFU_ENTRIES,
  parameter int unsigned EENT  = EXP_ENTRIES,
  parameter int unsigned TAGW  = 8,
  localparam int unsigned LEV  = $clog2(ENT),
  localparam int unsigned ELEV = $clog2(EENT),
  localparam int unsigned IW   = $clog2(ENT)
) (
  input  logic            clk,
  input  logic            rst_n,
  // table configuration
  input  logic            cfg_we,
  input  sfu_fn_e         cfg_fn,
  input  logic [1:0]      cfg_sel,
  input  logic [IW-1:0]   cfg_idx,
  input  fx16_t           cfg_data,
  // data
  input  logic            in_valid,
  input  sfu_fn_e         fn,
  input  fx16_t           x_in  [LANES],
  input  logic [TAGW-1:0] tag_in,
  output logic            out_valid,
  output fx16_t           y_out [LANES],
  output logic [TAGW-1:0] tag_out
);
  // ---------------- tables ----------------
  fx16_t bp [3][ENT-1];
  fx16_t ca [3][ENT];
  fx16_t cb [3][ENT];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int f = 0; f < 3; f++) begin
        for (int e = 0; e < ENT; e++) begin
          ca[f][e] <= '0;
          cb[f][e] <= '0;
          if (e < ENT - 1) bp[f][e] <= '0;
        end
      end
    end else if (cfg_we && cfg_fn != sfu_fn_e'(2'd3)) begin
      if (cfg_sel == 2'd0 && 32'(cfg_idx) < ENT - 1) bp[cfg_fn][IW'(cfg_idx)] <= cfg_data;
      if (cfg_sel == 2'd1) ca[cfg_fn][cfg_idx] <= cfg_data;
      if (cfg_sel == 2'd2) cb[cfg_fn][cfg_idx] <= cfg_data;
    end
  end

  // ---------------- ADU: one pipeline stage per search level ----------------
  fx16_t           xs  [LEV+1][LANES];
  logic [IW-1:0]   ids [LEV+1][LANES];
  sfu_fn_e         fs  [LEV+1];
  logic [TAGW-1:0] ts  [LEV+1];
  logic            vs  [LEV+1];

  always_comb begin
    xs[0] = x_in;
    for (int l = 0; l < LANES; l++) ids[0][l] = '0;
    fs[0] = fn;
    ts[0] = tag_in;
    vs[0] = in_valid;
  end

  for (genvar s = 0; s < LEV; s++) begin : g_lvl
    localparam int unsigned B    = LEV - 1 - s;     // bit decided at this level
    localparam int unsigned STEP = 1 << B;
    logic [IW-1:0] id_n [LANES];
    always_comb begin
      for (int l = 0; l < LANES; l++) begin
        id_n[l] = ids[s][l];
        if (!(fs[s] == FN_EXP && B >= ELEV)) begin
          if (xs[s][l] >= bp[fs[s]][ids[s][l] + IW'(STEP - 1)]) id_n[l] = ids[s][l] + IW'(STEP);
        end
      end
    end
    always_ff @(posedge clk) begin
      if (!rst_n) vs[s+1] <= 1'b0;
      else        vs[s+1] <= vs[s];
      xs[s+1]  <= xs[s];
      ids[s+1] <= id_n;
      fs[s+1]  <= fs[s];
      ts[s+1]  <= ts[s];
    end
  end

  // ---------------- LUT fetch through the crossbar, CU: y = a*x + b ----------------
  fx16_t y_n [LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      y_n[l] = sat16(shift_round(64'(ca[fs[LEV]][ids[LEV][l]]) * 64'(xs[LEV][l]), AFRAC)
                     + 64'(cb[fs[LEV]][ids[LEV][l]]));
    end
  end
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vs[LEV];
    y_out   <= y_n;
    tag_out <= ts[LEV];
  end
endmodule
