// mamba_x: top level of the Mamba-X Vision Mamba accelerator.
//
// The blocks of the paper's architecture overview, wired together: an on-chip buffer
// (384 KB), a DMA unit to off-chip DRAM, a controller, an output-stationary 64x64 GEMM
// engine, and the selective-SSM datapath (VPU, SFU, eight systolic scan arrays with a
// chunk of 16, and the PPU with its long-input support unit). A host issues commands
// (see controller) and is told when each has finished; data moves between DRAM and the
// buffer through the DMA and every compute unit reads and writes the buffer.
//
// Ports: the command port, the DRAM channels of the DMA (DRAM itself is off-chip), and
// the write port of the SFU's breakpoint/coefficient tables, which the host programs
// before use. While the DMA runs it owns buffer read port 0 and the write port; otherwise
// the controller does. Synchronous active-low reset.
module mamba_x
  import mx_pkg::*;
#(
  parameter int unsigned GN    = GEMM_N,     // GEMM engine is GN x GN PEs
  parameter int unsigned WORDS = BUF_WORDS   // on-chip buffer words
) (
  input  logic               clk,
  input  logic               rst_n,
  // host command port
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  output logic               cmd_done,
  // SFU table configuration
  input  logic               cfg_we,
  input  sfu_fn_e            cfg_fn,
  input  logic [1:0]         cfg_sel,
  input  logic [$clog2(SFU_ENTRIES)-1:0] cfg_idx,
  input  fx16_t              cfg_data,
  // DRAM
  output logic               dram_rq_valid,
  input  logic               dram_rq_ready,
  output logic [DRAM_AW-1:0] dram_rq_addr,
  input  logic               dram_rs_valid,
  input  logic [WORD_W-1:0]  dram_rs_data,
  output logic               dram_wq_valid,
  input  logic               dram_wq_ready,
  output logic [DRAM_AW-1:0] dram_wq_addr,
  output logic [WORD_W-1:0]  dram_wq_data
);
  localparam int unsigned MW = $clog2(MDIM);
  localparam int unsigned AW = $clog2(WORDS);

  // ---------------- buffer ----------------
  logic              b_rd0_en, b_rd1_en, b_wr_en;
  logic [AW-1:0] b_rd0_addr, b_rd1_addr, b_wr_addr;
  logic [WORD_W-1:0] b_rd0_data, b_rd1_data, b_wr_data;

  onchip_buffer #(.WORDS(WORDS)) u_buf (
    .clk,
    .rd0_en(b_rd0_en), .rd0_addr(b_rd0_addr), .rd0_data(b_rd0_data),
    .rd1_en(b_rd1_en), .rd1_addr(b_rd1_addr), .rd1_data(b_rd1_data),
    .wr_en(b_wr_en),   .wr_addr(b_wr_addr),   .wr_data(b_wr_data)
  );

  // ---------------- DMA ----------------
  logic               d_start, d_store, d_busy, d_done;
  logic [DRAM_AW-1:0] d_dram_addr;
  logic [AW-1:0]  d_buf_addr;
  logic [15:0]        d_len;
  logic               d_rd_en, d_wr_en;
  logic [AW-1:0]  d_rd_addr, d_wr_addr;
  logic [WORD_W-1:0]  d_wr_data;

  dma #(.AW(AW)) u_dma (
    .clk, .rst_n, .start(d_start), .dir_store(d_store), .dram_addr(d_dram_addr),
    .buf_addr(d_buf_addr), .len(d_len), .busy(d_busy), .done(d_done),
    .rq_valid(dram_rq_valid), .rq_ready(dram_rq_ready), .rq_addr(dram_rq_addr),
    .rs_valid(dram_rs_valid), .rs_data(dram_rs_data),
    .wq_valid(dram_wq_valid), .wq_ready(dram_wq_ready), .wq_addr(dram_wq_addr),
    .wq_data(dram_wq_data),
    .b_rd_en(d_rd_en), .b_rd_addr(d_rd_addr), .b_rd_data(b_rd0_data),
    .b_wr_en(d_wr_en), .b_wr_addr(d_wr_addr), .b_wr_data(d_wr_data)
  );

  // ---------------- controller ----------------
  logic              c_rd0_en, c_rd1_en, c_wr_en;
  logic [AW-1:0] c_rd0_addr, c_rd1_addr, c_wr_addr;
  logic [WORD_W-1:0] c_wr_data;

  logic                    g_clear, g_valid, g_busy;
  int8_t                   g_a [GN];
  int8_t                   g_b [GN];
  logic [$clog2(GN)-1:0]   g_row;
  logic signed [GACCW-1:0] g_acc [GN];

  logic          p_valid, p_ssm, p_first_m, p_last_m, p_first_seg, p_out_valid;
  vop_e          p_vop;
  sfu_fn_e       p_fn;
  int8_t         p_x [SEG];
  int8_t         p_y [SEG];
  int8_t         p_w [SEG];
  int8_t         p_c [SEG];
  int8_t         p_z [SEG];
  int8_t         p_out [SEG];
  int8_t         p_a;
  logic [MW-1:0] p_m;
  shamt_t        p_sh0, p_sh1, p_sh2;
  logic [3:0]    p_k;

  controller #(.AW(AW), .GN(GN)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done(cmd_done),
    .rd0_en(c_rd0_en), .rd0_addr(c_rd0_addr), .rd0_data(b_rd0_data),
    .rd1_en(c_rd1_en), .rd1_addr(c_rd1_addr), .rd1_data(b_rd1_data),
    .wr_en(c_wr_en), .wr_addr(c_wr_addr), .wr_data(c_wr_data),
    .dma_start(d_start), .dma_store(d_store), .dma_dram_addr(d_dram_addr),
    .dma_buf_addr(d_buf_addr), .dma_len(d_len), .dma_done(d_done),
    .g_clear, .g_valid, .g_a, .g_b, .g_busy, .g_row, .g_acc,
    .p_valid, .p_ssm, .p_vop, .p_fn, .p_x, .p_y, .p_w, .p_c, .p_z, .p_a, .p_m,
    .p_first_m, .p_last_m, .p_first_seg, .p_sh0, .p_sh1, .p_sh2, .p_k,
    .p_out_valid, .p_out
  );

  // buffer port ownership
  always_comb begin
    if (d_busy) begin
      b_rd0_en = d_rd_en;  b_rd0_addr = d_rd_addr;
      b_wr_en  = d_wr_en;  b_wr_addr  = d_wr_addr;  b_wr_data = d_wr_data;
    end else begin
      b_rd0_en = c_rd0_en; b_rd0_addr = c_rd0_addr;
      b_wr_en  = c_wr_en;  b_wr_addr  = c_wr_addr;  b_wr_data = c_wr_data;
    end
    b_rd1_en   = c_rd1_en;
    b_rd1_addr = c_rd1_addr;
  end

  // ---------------- GEMM engine ----------------
  gemm_engine #(.N(GN)) u_gemm (
    .clk, .rst_n, .clear(g_clear), .in_valid(g_valid), .a_col(g_a), .b_row(g_b),
    .busy(g_busy), .rd_row(g_row), .rd_data(g_acc)
  );

  // ---------------- selective-SSM datapath ----------------
  ssm_pipe u_ssm (
    .clk, .rst_n, .cfg_we, .cfg_fn, .cfg_sel, .cfg_idx, .cfg_data,
    .in_valid(p_valid), .ssm_mode(p_ssm), .vop(p_vop), .fn(p_fn),
    .x_in(p_x), .y_in(p_y), .w_in(p_w), .c_in(p_c), .z_in(p_z), .a_in(p_a),
    .m_in(p_m), .first_m(p_first_m), .last_m(p_last_m), .first_seg(p_first_seg),
    .sh0(p_sh0), .sh1(p_sh1), .sh2(p_sh2), .k(p_k),
    .out_valid(p_out_valid), .out_data(p_out)
  );
endmodule
