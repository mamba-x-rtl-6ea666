// controller: command sequencer of Mamba-X.
//
// The paper's overview shows a controller between the on-chip buffer and the compute
// units and says that units are activated on demand as Vision Mamba's operations require;
// it gives no instruction set. This controller is this design's own minimal one: it accepts
// one command at a time (cmd_valid/cmd_ready, cmd_ready high when idle) and pulses done
// when the command has finished and its results are in the buffer.
//   CMD_LOAD/STORE : starts the DMA (addr0 = buffer word, dram_addr, len words)
//   CMD_GEMM       : clears the GEMM engine, streams K = len columns of A (word addr0+k,
//                    lanes 0..63 = A[i][k]) and rows of B (word addr1+k), waits for the
//                    array to drain, then writes row i of sat8(C >> sh0) to word dst+i
//                    (lanes 64..127 zero)
//   CMD_VEC/SFU    : streams len word pairs (addr0+i, addr1+i) through the VPU or the SFU
//                    and writes each result to dst+i
//   CMD_SSM        : selective SSM of one hidden channel over len segments of 128 tokens:
//                    for segment s it reads Delta (addr0+s), u (addr1+s), Z (addr2+s) and
//                    the A word (addr5, byte m = A[h][m]), then issues the 16 state rows
//                    with B (addr3+16s+m) and C (addr4+16s+m), one row per cycle; the
//                    output vector of segment s goes to dst+s
// Buffer reads have one cycle latency, so operands are handed to the units one cycle after
// their read is issued. An SSM segment takes 18 issue cycles.
module controller
  import mx_pkg::*;
#(
  parameter int unsigned AW = BUF_AW,
  parameter int unsigned W  = WORD_W,
  parameter int unsigned L  = SEG,
  parameter int unsigned GN = GEMM_N,
  parameter int unsigned MD = MDIM,
  localparam int unsigned MW = (MD > 1) ? $clog2(MD) : 1,
  localparam int unsigned GW = (GN > 1) ? $clog2(GN) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // command port
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  cmd_t                    cmd,
  output logic                    done,
  // buffer (compute side)
  output logic                    rd0_en,
  output logic [AW-1:0]           rd0_addr,
  input  logic [W-1:0]            rd0_data,
  output logic                    rd1_en,
  output logic [AW-1:0]           rd1_addr,
  input  logic [W-1:0]            rd1_data,
  output logic                    wr_en,
  output logic [AW-1:0]           wr_addr,
  output logic [W-1:0]            wr_data,
  // DMA
  output logic                    dma_start,
  output logic                    dma_store,
  output logic [DRAM_AW-1:0]      dma_dram_addr,
  output logic [AW-1:0]           dma_buf_addr,
  output logic [15:0]             dma_len,
  input  logic                    dma_done,
  // GEMM engine
  output logic                    g_clear,
  output logic                    g_valid,
  output int8_t                   g_a [GN],
  output int8_t                   g_b [GN],
  input  logic                    g_busy,
  output logic [GW-1:0]           g_row,
  input  logic signed [GACCW-1:0] g_acc [GN],
  // selective-SSM datapath
  output logic                    p_valid,
  output logic                    p_ssm,
  output vop_e                    p_vop,
  output sfu_fn_e                 p_fn,
  output int8_t                   p_x [L],
  output int8_t                   p_y [L],
  output int8_t                   p_w [L],
  output int8_t                   p_c [L],
  output int8_t                   p_z [L],
  output int8_t                   p_a,
  output logic [MW-1:0]           p_m,
  output logic                    p_first_m,
  output logic                    p_last_m,
  output logic                    p_first_seg,
  output shamt_t                  p_sh0,
  output shamt_t                  p_sh1,
  output shamt_t                  p_sh2,
  output logic [3:0]              p_k,
  input  logic                    p_out_valid,
  input  int8_t                   p_out [L]
);
  typedef enum logic [3:0] {
    S_IDLE, S_DMA, S_GCLR, S_GFEED, S_GWAIT, S_GOUT, S_VFEED, S_VWAIT,
    S_XRD0, S_XRD1, S_XM, S_XWAIT
  } state_e;

  state_e      st;
  cmd_t        c;
  logic [15:0] cnt;       // issue counter (k, word, segment)
  logic [15:0] ocnt;      // results written
  logic [MW-1:0] mcnt;
  logic [GW-1:0] rcnt;

  // operand hand-off, one cycle after the reads
  logic          f_v, f_g, f_first_m, f_last_m, f_first_seg;
  logic [MW-1:0] f_m;
  logic [W-1:0]  delta_w, u_w, z_w, a_w;

  function automatic int8_t lane(input logic [W-1:0] w, input int unsigned l);
    return int8_t'(w[l*8 +: 8]);
  endfunction

  assign cmd_ready = (st == S_IDLE);

  // ---------------- buffer reads ----------------
  always_comb begin
    rd0_en = 1'b0; rd1_en = 1'b0;
    rd0_addr = '0; rd1_addr = '0;
    unique case (st)
      S_GFEED: begin
        rd0_en = 1'b1; rd0_addr = c.addr0 + AW'(cnt);
        rd1_en = 1'b1; rd1_addr = c.addr1 + AW'(cnt);
      end
      S_VFEED: begin
        rd0_en = 1'b1; rd0_addr = c.addr0 + AW'(cnt);
        rd1_en = 1'b1; rd1_addr = c.addr1 + AW'(cnt);
      end
      S_XRD0: begin
        rd0_en = 1'b1; rd0_addr = c.addr0 + AW'(cnt);
        rd1_en = 1'b1; rd1_addr = c.addr1 + AW'(cnt);
      end
      S_XRD1: begin
        rd0_en = 1'b1; rd0_addr = c.addr2 + AW'(cnt);
        rd1_en = 1'b1; rd1_addr = c.addr5;
      end
      S_XM: begin
        rd0_en = 1'b1; rd0_addr = c.addr3 + AW'(cnt * MD) + AW'(mcnt);
        rd1_en = 1'b1; rd1_addr = c.addr4 + AW'(cnt * MD) + AW'(mcnt);
      end
      default: ;
    endcase
  end

  // ---------------- unit inputs ----------------
  always_comb begin
    p_valid     = f_v;
    p_ssm       = (c.op == CMD_SSM);
    p_vop       = (c.op == CMD_SFU) ? VOP_PASS : c.vop;
    p_fn        = c.fn;
    p_m         = f_m;
    p_first_m   = f_first_m;
    p_last_m    = f_last_m;
    p_first_seg = f_first_seg;
    p_sh0       = c.sh0;
    p_sh1       = c.sh1;
    p_sh2       = c.sh2;
    p_k         = c.k;
    p_a         = lane(a_w, 32'(f_m));
    for (int l = 0; l < L; l++) begin
      if (c.op == CMD_SSM) begin
        p_x[l] = lane(delta_w, l);
        p_y[l] = lane(u_w, l);
        p_w[l] = lane(rd0_data, l);
        p_c[l] = lane(rd1_data, l);
        p_z[l] = lane(z_w, l);
      end else begin
        p_x[l] = lane(rd0_data, l);
        p_y[l] = lane(rd1_data, l);
        p_w[l] = '0;
        p_c[l] = '0;
        p_z[l] = '0;
      end
    end
    g_valid = f_g;
    for (int i = 0; i < GN; i++) begin
      g_a[i] = lane(rd0_data, i);
      g_b[i] = lane(rd1_data, i);
    end
  end

  // ---------------- buffer writes ----------------
  always_comb begin
    g_row   = rcnt;
    wr_en   = 1'b0;
    wr_addr = c.dst + AW'(ocnt);
    wr_data = '0;
    if (st == S_GOUT) begin
      wr_en   = 1'b1;
      wr_addr = c.dst + AW'(rcnt);
      for (int j = 0; j < GN; j++)
        wr_data[j*8 +: 8] = sat8(shift_round(64'(g_acc[j]), int'(c.sh0)));
    end else if (p_out_valid) begin
      wr_en = 1'b1;
      for (int l = 0; l < L; l++) wr_data[l*8 +: 8] = p_out[l];
    end
  end

  assign dma_start     = (st == S_DMA) && (cnt == 0);
  assign dma_store     = (c.op == CMD_STORE);
  assign dma_dram_addr = c.dram_addr;
  assign dma_buf_addr  = c.addr0;
  assign dma_len       = c.len;
  assign g_clear       = (st == S_GCLR);

  // ---------------- sequencing ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      c    <= '0;
      cnt  <= '0;
      ocnt <= '0;
      mcnt <= '0;
      rcnt <= '0;
      done <= 1'b0;
      f_v  <= 1'b0;
      f_g  <= 1'b0;
      f_m  <= '0;
      f_first_m <= 1'b0; f_last_m <= 1'b0; f_first_seg <= 1'b0;
      delta_w <= '0; u_w <= '0; z_w <= '0; a_w <= '0;
    end else begin
      done <= 1'b0;
      f_v  <= 1'b0;
      f_g  <= 1'b0;
      if (p_out_valid && st != S_GOUT) ocnt <= ocnt + 1'b1;
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          c    <= cmd;
          cnt  <= '0;
          ocnt <= '0;
          mcnt <= '0;
          rcnt <= '0;
          unique case (cmd.op)
            CMD_LOAD, CMD_STORE: st <= S_DMA;
            CMD_GEMM:            st <= S_GCLR;
            CMD_SSM:             st <= (cmd.len == 0) ? S_XWAIT : S_XRD0;
            default:             st <= (cmd.len == 0) ? S_VWAIT : S_VFEED;
          endcase
        end
        S_DMA: begin
          cnt <= 16'd1;
          if (dma_done) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        S_GCLR: st <= (c.len == 0) ? S_GWAIT : S_GFEED;
        S_GFEED: begin
          f_g <= 1'b1;
          cnt <= cnt + 1'b1;
          if (cnt + 16'd1 == c.len) st <= S_GWAIT;
        end
        S_GWAIT: if (!f_g && !g_busy) st <= S_GOUT;
        S_GOUT: begin
          rcnt <= rcnt + 1'b1;
          if (32'(rcnt) == GN - 1) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        S_VFEED: begin
          f_v <= 1'b1;
          cnt <= cnt + 1'b1;
          if (cnt + 16'd1 == c.len) st <= S_VWAIT;
        end
        S_VWAIT, S_XWAIT: if (ocnt == c.len || (p_out_valid && ocnt + 16'd1 == c.len)) begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        S_XRD0: st <= S_XRD1;
        S_XRD1: begin
          delta_w <= rd0_data;
          u_w     <= rd1_data;
          st      <= S_XM;
        end
        S_XM: begin
          if (mcnt == 0) begin
            z_w <= rd0_data;
            a_w <= rd1_data;
          end
          f_v         <= 1'b1;
          f_m         <= mcnt;
          f_first_m   <= (mcnt == 0);
          f_last_m    <= (32'(mcnt) == MD - 1);
          f_first_seg <= (cnt == 0);
          mcnt        <= mcnt + 1'b1;
          if (32'(mcnt) == MD - 1) begin
            mcnt <= '0;
            cnt  <= cnt + 1'b1;
            st   <= (cnt + 16'd1 == c.len) ? S_XWAIT : S_XRD0;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
