// scu_dma: one DMA channel of the serial communications unit.
//
// The paper gives every one of the 24 link wires its own DMA unit that streams
// the sent or received words to or from memory, programmed as a sequence of
// block-strided moves held as simple chained instructions inside the SCU.
// This module is one such unit. An instruction (qcdoc_pkg::desc_t) moves
// nblk blocks of blk_len consecutive 64-bit words, the block starts being
// stride words apart, beginning at word address base. When it is done the
// channel goes on with instruction `next`, unless `last` is set, and then
// raises `done` until the next start.
//
// SEND = 1: words are read from memory and offered on out_*.
// SEND = 0: words taken from in_* are written to memory.
//
// Own choices: NDESC instruction registers per channel, written through
// desc_we; at most one memory access outstanding per channel (the SCU
// interleaves the 24 channels on its memory port); blk_len and nblk of zero
// are treated as one.
//
// Memory port: m_req/m_gnt handshake, m_we selects a write; read data come
// back on m_rvalid some cycles after the grant, in order.
module scu_dma
  import qcdoc_pkg::*;
#(
  parameter bit SEND = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  // instruction load and control
  input  logic               desc_we,
  input  logic [1:0]         desc_idx,
  input  desc_t              desc_wdata,
  input  logic               start,
  input  logic [1:0]         start_idx,
  output logic               busy,
  output logic               done,
  // memory port
  output logic               m_req,
  output logic               m_we,
  output logic [MADDR_W-1:0] m_addr,
  output word_t              m_wdata,
  input  logic               m_gnt,
  input  logic               m_rvalid,
  input  word_t              m_rdata,
  // word stream to the link (SEND = 1)
  output logic               out_valid,
  output word_t              out_data,
  input  logic               out_ready,
  // word stream from the link (SEND = 0)
  input  logic               in_valid,
  input  word_t              in_data,
  output logic               in_ready
);

  desc_t              desc [NDESC];
  logic [1:0]         cur_idx;
  logic [MADDR_W-1:0] blk_base;
  logic [15:0]        off, blk_cnt;
  logic               issued_all;   // every word of the chain has been issued
  logic               rd_out;       // read outstanding (SEND)
  logic               have;         // word held (read data or word to write)
  word_t              hold;

  desc_t cur;
  assign cur = desc[cur_idx];

  logic last_in_blk, last_blk;
  assign last_in_blk = (off + 16'd1 >= cur.blk_len);
  assign last_blk    = (blk_cnt + 16'd1 >= cur.nblk);

  assign m_addr  = blk_base + MADDR_W'(off);
  assign m_we    = !SEND;
  assign m_wdata = hold;

  always_comb begin
    if (SEND) begin
      m_req     = busy && !issued_all && !rd_out && !have;
      out_valid = have;
      in_ready  = 1'b0;
    end else begin
      m_req     = have;
      out_valid = 1'b0;
      in_ready  = busy && !issued_all && !have;
    end
  end
  assign out_data = hold;

  // one word of the chain has been issued to memory
  logic step;
  assign step = m_req && m_gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NDESC; i++) desc[i] <= '0;
      cur_idx    <= '0;
      blk_base   <= '0;
      off        <= '0;
      blk_cnt    <= '0;
      issued_all <= 1'b0;
      rd_out     <= 1'b0;
      have       <= 1'b0;
      hold       <= '0;
      busy       <= 1'b0;
      done       <= 1'b0;
    end else begin
      if (desc_we) desc[desc_idx] <= desc_wdata;

      if (start && !busy) begin
        busy       <= 1'b1;
        done       <= 1'b0;
        cur_idx    <= start_idx;
        blk_base   <= desc[start_idx].base;
        off        <= '0;
        blk_cnt    <= '0;
        issued_all <= 1'b0;
      end

      // data movement
      if (SEND) begin
        if (step)                  rd_out <= 1'b1;
        if (m_rvalid && rd_out)    begin rd_out <= 1'b0; have <= 1'b1; hold <= m_rdata; end
        if (out_valid && out_ready) have <= 1'b0;
      end else begin
        if (in_valid && in_ready)  begin have <= 1'b1; hold <= in_data; end
        if (step)                  have <= 1'b0;
      end

      // address sequencing
      if (step) begin
        if (!last_in_blk) off <= off + 16'd1;
        else begin
          off <= '0;
          if (!last_blk) begin
            blk_cnt  <= blk_cnt + 16'd1;
            blk_base <= blk_base + cur.stride;
          end else if (!cur.last) begin
            cur_idx  <= cur.next;
            blk_cnt  <= '0;
            blk_base <= desc[cur.next].base;
          end else begin
            issued_all <= 1'b1;
          end
        end
      end

      // completion: all issued and nothing left in flight
      if (busy && issued_all && !rd_out && !have && !step) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  // handshake rules
  assert property (@(posedge clk) disable iff (!rst_n) m_req && !m_gnt |=> m_req && $stable(m_addr));
  assert property (@(posedge clk) disable iff (!rst_n) m_rvalid |-> rd_out || !SEND);

endmodule
