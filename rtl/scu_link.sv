// scu_link: one end of a nearest-neighbour link of the serial communications
// unit (SCU). It sends 64-bit words on its outgoing byte stream and receives
// words from the neighbour on the incoming byte stream; the acknowledgements
// for each direction travel on the opposite stream.
//
// Protocol (following the paper): the receiver has four buffers, each
// acknowledged on its own, so up to four words can be in flight. Buffers 0-2
// carry the DMA data stream, buffer 3 is the supervisor buffer that the
// processor loads and unloads directly. A word is acknowledged only after it
// has been taken out of its receive buffer. A word that arrives with a parity
// error is answered at once with an "ack with error" (NACK), which makes the
// sender send the same word again into the same buffer. The 8 header bits that
// identify a frame are protected by a single-error-correcting code so that a
// single bit error there is corrected (counted on hdr_fixed).
//
// This design's own choices: data words use buffers 0,1,2,0,1,... in turn and
// the receiver hands them on in the same order, which keeps the stream in
// order across retries; frame layout as in qcdoc_pkg (6 symbols of 2 bytes per
// data frame, 1 symbol per ack, zero symbol when idle); pending NACKs go out
// before ACKs, ACKs before retries, retries before supervisor words and those
// before new data words. Both ends must start from reset on a symbol boundary
// (the byte-alignment of the serial macro is outside this block).
//
// Interface: tx_byte is the byte offered to the serial macro, taken when
// tx_take is high; rx_byte arrives when rx_valid is high. snd_* and rcv_* are
// valid/ready word streams to and from the DMA channels; sup_tx_* is the
// supervisor send register (ready when buffer 3 of the neighbour is free),
// sup_rx_full is the supervisor interrupt, cleared by sup_rx_release.
// Timing: one byte per tx_take; a data word costs 12 bytes on the wire, an
// acknowledgement 2 bytes.
module scu_link
  import qcdoc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // serial macro side
  output logic [7:0]  tx_byte,
  input  logic        tx_take,
  input  logic [7:0]  rx_byte,
  input  logic        rx_valid,
  // DMA send stream
  input  logic        snd_valid,
  input  word_t       snd_data,
  output logic        snd_ready,
  // DMA receive stream
  output logic        rcv_valid,
  output word_t       rcv_data,
  input  logic        rcv_ready,
  // supervisor channel
  input  logic        sup_tx_valid,
  input  word_t       sup_tx_data,
  output logic        sup_tx_ready,
  output logic        sup_rx_full,
  output word_t       sup_rx_data,
  input  logic        sup_rx_release,
  // status and events
  output logic        tx_busy,     // some sent word is not yet acknowledged
  output logic        ev_retry,    // a word is being sent again
  output logic        ev_nack,     // a received word had an error, NACK queued
  output logic        hdr_fixed    // a header bit error was corrected
);

  // ------------------------------------------------------------------
  // receive side
  // ------------------------------------------------------------------
  logic        rx_half;
  logic [7:0]  rx_lo;
  logic        rx_in_frame;
  logic [2:0]  rx_cnt;
  logic [1:0]  rx_idx;
  word_t       rx_word;
  logic [NBUF-1:0] rbuf_full;
  word_t       rbuf [NBUF];
  logic [1:0]  rd_slot;

  logic [NBUF-1:0] ack_rcvd, nack_rcvd;   // from the neighbour, for our slots
  logic [NBUF-1:0] ack_send, nack_send;   // to be sent to the neighbour

  logic [15:0] rx_sym;
  logic        rx_sym_valid;
  logic [8:0]  rx_dec;
  hdr_t        rx_hdr;
  logic        rx_par_ok;

  assign rx_sym_valid = rx_valid && rx_half;
  assign rx_sym       = {rx_byte, rx_lo};
  assign rx_dec       = hdr_decode(rx_sym);
  assign rx_hdr       = hdr_t'(rx_dec[7:0]);
  assign rx_par_ok    = (rx_sym[1:0] == word_parity(rx_word));

  always_comb begin
    ack_rcvd  = '0;
    nack_rcvd = '0;
    nack_send = '0;
    hdr_fixed = 1'b0;
    if (rx_sym_valid && !rx_in_frame && rx_dec[8]) begin
      hdr_fixed = (hdr_check(rx_sym[7:0]) != rx_sym[11:8]);
      case (rx_hdr.ftype)
        FT_ACK:  ack_rcvd[rx_hdr.buf_idx]  = 1'b1;
        FT_NACK: nack_rcvd[rx_hdr.buf_idx] = 1'b1;
        default: ;
      endcase
    end
    if (rx_sym_valid && rx_in_frame && rx_cnt == 3'd4 && !rx_par_ok)
      nack_send[rx_idx] = 1'b1;
  end
  assign ev_nack = |nack_send;

  // in-order hand-off of data buffers, supervisor buffer to the processor
  assign rcv_valid   = rbuf_full[rd_slot];
  assign rcv_data    = rbuf[rd_slot];
  assign sup_rx_full = rbuf_full[SUP_BUF];
  assign sup_rx_data = rbuf[SUP_BUF];

  always_comb begin
    ack_send = '0;
    if (rcv_valid && rcv_ready) ack_send[rd_slot] = 1'b1;
    if (sup_rx_release && rbuf_full[SUP_BUF]) ack_send[SUP_BUF] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_half     <= 1'b0;
      rx_lo       <= '0;
      rx_in_frame <= 1'b0;
      rx_cnt      <= '0;
      rx_idx      <= '0;
      rx_word     <= '0;
      rbuf_full   <= '0;
      rd_slot     <= '0;
      for (int i = 0; i < NBUF; i++) rbuf[i] <= '0;
    end else begin
      if (rx_valid) begin
        rx_half <= ~rx_half;
        if (!rx_half) rx_lo <= rx_byte;
      end
      if (rx_sym_valid) begin
        if (!rx_in_frame) begin
          if (rx_dec[8] && rx_hdr.ftype == FT_DATA) begin
            rx_in_frame <= 1'b1;
            rx_cnt      <= '0;
            rx_idx      <= rx_hdr.buf_idx;
          end
        end else if (rx_cnt != 3'd4) begin
          rx_word[16*rx_cnt[1:0] +: 16] <= rx_sym;
          rx_cnt <= rx_cnt + 3'd1;
        end else begin
          rx_in_frame <= 1'b0;
          if (rx_par_ok && !rbuf_full[rx_idx]) begin
            rbuf[rx_idx]      <= rx_word;
            rbuf_full[rx_idx] <= 1'b1;
          end
        end
      end
      if (rcv_valid && rcv_ready) begin
        rbuf_full[rd_slot] <= 1'b0;
        rd_slot <= (rd_slot == 2'(NDATABUF - 1)) ? 2'd0 : rd_slot + 2'd1;
      end
      if (sup_rx_release) rbuf_full[SUP_BUF] <= 1'b0;
    end
  end

  // ------------------------------------------------------------------
  // send side
  // ------------------------------------------------------------------
  logic [15:0]     cur_sym;
  logic            tx_half;
  logic [15:0]     frm_q [5];
  logic [2:0]      frm_left;
  logic [NBUF-1:0] slot_busy, resend, ack_pend, nack_pend;
  word_t           slot_word [NBUF];
  logic [1:0]      next_slot;

  assign tx_byte = tx_half ? cur_sym[15:8] : cur_sym[7:0];
  assign tx_busy = |slot_busy;

  // symbol boundary: the next symbol is chosen when the high byte is taken
  logic adv, pick;
  assign adv  = tx_take && tx_half;
  assign pick = adv && (frm_left == 3'd0);

  // frame selection
  typedef enum logic [2:0] {SEL_IDLE, SEL_NACK, SEL_ACK, SEL_RETRY, SEL_SUP, SEL_DATA} sel_e;
  sel_e       sel;
  logic [1:0] sel_idx;

  function automatic logic [1:0] lowest(input logic [NBUF-1:0] v);
    logic [1:0] r;
    r = '0;
    for (int i = NBUF - 1; i >= 0; i--) if (v[i]) r = 2'(i);
    return r;
  endfunction

  always_comb begin
    sel     = SEL_IDLE;
    sel_idx = '0;
    if (|nack_pend)                            begin sel = SEL_NACK;  sel_idx = lowest(nack_pend); end
    else if (|ack_pend)                        begin sel = SEL_ACK;   sel_idx = lowest(ack_pend);  end
    else if (|resend)                          begin sel = SEL_RETRY; sel_idx = lowest(resend);    end
    else if (sup_tx_valid && !slot_busy[SUP_BUF]) begin sel = SEL_SUP; sel_idx = 2'(SUP_BUF);      end
    else if (snd_valid && !slot_busy[next_slot])   begin sel = SEL_DATA; sel_idx = next_slot;      end
  end

  assign sup_tx_ready = pick && sel == SEL_SUP;
  assign snd_ready    = pick && sel == SEL_DATA;
  assign ev_retry     = pick && sel == SEL_RETRY;

  word_t frm_word;
  always_comb begin
    case (sel)
      SEL_SUP:  frm_word = sup_tx_data;
      SEL_DATA: frm_word = snd_data;
      default:  frm_word = slot_word[sel_idx];
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_sym   <= '0;
      tx_half   <= 1'b0;
      frm_left  <= '0;
      slot_busy <= '0;
      resend    <= '0;
      ack_pend  <= '0;
      nack_pend <= '0;
      next_slot <= '0;
      for (int i = 0; i < 5; i++) frm_q[i] <= '0;
      for (int i = 0; i < NBUF; i++) slot_word[i] <= '0;
    end else begin
      // acknowledgements from the neighbour
      slot_busy <= slot_busy & ~ack_rcvd;
      resend    <= resend | nack_rcvd;
      // acknowledgements we owe the neighbour
      ack_pend  <= ack_pend  | ack_send;
      nack_pend <= nack_pend | nack_send;

      if (tx_take) tx_half <= ~tx_half;
      if (adv && frm_left != 3'd0) begin
        cur_sym  <= frm_q[0];
        for (int i = 0; i < 4; i++) frm_q[i] <= frm_q[i+1];
        frm_q[4] <= '0;
        frm_left <= frm_left - 3'd1;
      end else if (pick) begin
        case (sel)
          SEL_NACK: begin
            cur_sym <= hdr_symbol('{ftype: FT_NACK, buf_idx: sel_idx, rsvd: '0});
            nack_pend[sel_idx] <= 1'b0;
          end
          SEL_ACK: begin
            cur_sym <= hdr_symbol('{ftype: FT_ACK, buf_idx: sel_idx, rsvd: '0});
            ack_pend[sel_idx] <= 1'b0;
          end
          SEL_RETRY, SEL_SUP, SEL_DATA: begin
            cur_sym <= hdr_symbol('{ftype: FT_DATA, buf_idx: sel_idx, rsvd: '0});
            frm_q[0] <= frm_word[15:0];
            frm_q[1] <= frm_word[31:16];
            frm_q[2] <= frm_word[47:32];
            frm_q[3] <= frm_word[63:48];
            frm_q[4] <= {14'b0, word_parity(frm_word)};
            frm_left <= 3'd5;
            if (sel == SEL_RETRY) resend[sel_idx] <= 1'b0;
            else begin
              slot_busy[sel_idx] <= 1'b1;
              slot_word[sel_idx] <= frm_word;
            end
            if (sel == SEL_DATA)
              next_slot <= (next_slot == 2'(NDATABUF - 1)) ? 2'd0 : next_slot + 2'd1;
          end
          default: cur_sym <= '0;
        endcase
      end
    end
  end

  // a slot is only reused after its acknowledgement
  assert property (@(posedge clk) disable iff (!rst_n)
                   (pick && (sel == SEL_SUP || sel == SEL_DATA)) |-> !slot_busy[sel_idx]);
  // a NACK only arrives for a word that is outstanding
  assert property (@(posedge clk) disable iff (!rst_n)
                   (|(nack_rcvd & ~slot_busy)) == 1'b0);

endmodule
