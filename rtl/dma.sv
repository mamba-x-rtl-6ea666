// dma: moves blocks of words between off-chip DRAM and the on-chip buffer.
//
// A transfer is started with start and the fields of cmd (dir 0 = load DRAM -> buffer,
// 1 = store buffer -> DRAM, len words from dram_addr to buf_addr or back); done pulses for
// one cycle when the last word has been written. The paper only says the DMA orchestrates
// on- and off-chip data movement; the interfaces below are this design's choice.
//
// DRAM side: a read-request channel (valid/ready, word address), an in-order read-response
// channel without back-pressure, and a write channel (valid/ready, address and data).
// Loads keep issuing requests while the DRAM accepts them, and each response is written
// straight into the buffer. Stores read the buffer one word ahead and keep the write
// request valid until it is accepted: one word per cycle when the DRAM does not stall.
// Rules checked by assertions: a request held valid keeps its address and data until it
// is accepted.
module dma
  import mx_pkg::*;
#(
  parameter int unsigned AW = BUF_AW,
  parameter int unsigned W  = WORD_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               dir_store,
  input  logic [DRAM_AW-1:0] dram_addr,
  input  logic [AW-1:0]      buf_addr,
  input  logic [15:0]        len,
  output logic               busy,
  output logic               done,
  // DRAM
  output logic               rq_valid,
  input  logic               rq_ready,
  output logic [DRAM_AW-1:0] rq_addr,
  input  logic               rs_valid,
  input  logic [W-1:0]       rs_data,
  output logic               wq_valid,
  input  logic               wq_ready,
  output logic [DRAM_AW-1:0] wq_addr,
  output logic [W-1:0]       wq_data,
  // buffer
  output logic               b_rd_en,
  output logic [AW-1:0]      b_rd_addr,
  input  logic [W-1:0]       b_rd_data,
  output logic               b_wr_en,
  output logic [AW-1:0]      b_wr_addr,
  output logic [W-1:0]       b_wr_data
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_SRD, S_SEND} state_e;
  state_e             st;
  logic [DRAM_AW-1:0] daddr;
  logic [AW-1:0]      baddr;
  logic [15:0]        n_len, n_iss, n_done;

  assign busy     = (st != S_IDLE);
  assign rq_valid = (st == S_LOAD) && (n_iss != n_len);
  assign rq_addr  = daddr + DRAM_AW'(n_iss);
  assign wq_valid = (st == S_SEND);
  assign wq_addr  = daddr + DRAM_AW'(n_done);
  assign wq_data  = b_rd_data;

  assign b_wr_en   = (st == S_LOAD) && rs_valid;
  assign b_wr_addr = baddr + AW'(n_done);
  assign b_wr_data = rs_data;

  always_comb begin
    b_rd_en   = 1'b0;
    b_rd_addr = baddr + AW'(n_done);
    if (st == S_SRD) begin
      b_rd_en = 1'b1;
    end else if (st == S_SEND && wq_ready && (n_done + 16'd1 != n_len)) begin
      b_rd_en   = 1'b1;
      b_rd_addr = baddr + AW'(n_done + 16'd1);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      done   <= 1'b0;
      n_iss  <= '0;
      n_done <= '0;
      n_len  <= '0;
      daddr  <= '0;
      baddr  <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          daddr  <= dram_addr;
          baddr  <= buf_addr;
          n_len  <= len;
          n_iss  <= '0;
          n_done <= '0;
          if (len == 0)       done <= 1'b1;
          else if (dir_store) st   <= S_SRD;
          else                st   <= S_LOAD;
        end
        S_LOAD: begin
          if (rq_valid && rq_ready) n_iss <= n_iss + 1'b1;
          if (rs_valid) begin
            n_done <= n_done + 1'b1;
            if (n_done + 16'd1 == n_len) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end
          end
        end
        S_SRD: st <= S_SEND;
        S_SEND: if (wq_ready) begin
          n_done <= n_done + 1'b1;
          if (n_done + 16'd1 == n_len) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_rq_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rq_valid && !rq_ready |=> rq_valid && $stable(rq_addr))
    else $error("dma: read request changed before it was accepted");
  a_wq_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wq_valid && !wq_ready |=> wq_valid && $stable(wq_addr) && $stable(wq_data))
    else $error("dma: write request changed before it was accepted");
endmodule
