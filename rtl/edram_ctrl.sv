// edram_ctrl: controller between the 4 MByte embedded DRAM and its users.
//
// The EDRAM macro is read and written a whole 1024-bit row at a time. The
// processor core reads 256-bit cache lines, delivered as two 128-bit beats on
// consecutive cycles, and the paper asks that a sequential stream run at one
// beat per cycle while the row (page) accesses of the DRAM stay hidden. This
// controller does that with two 1024-bit row buffers: a line that hits in a
// buffer is accepted at once and its beats follow on the next two cycles; a new
// request can be accepted in the cycle of the previous last beat, so hits
// stream without gaps. Whenever the most recently used buffer holds row r and
// the other buffer does not hold row r+1, the controller fetches row r+1 into
// the other buffer. A row holds 8 beats, so with a row access time under 8
// cycles a sequential stream never waits after its first row.
//
// A second, 128-bit port stands for the processor local bus (PLB) side, used
// by the SCU DMA: single-beat reads and writes with byte enables, always
// served from the EDRAM itself. The core has its own 128-bit write port.
// Writes go straight through to the EDRAM and are merged into any row buffer
// holding that row, so the buffers never hold stale data. Only one EDRAM
// access is outstanding at a time; priority is core demand miss, core write,
// PLB, then prefetch.
//
// Error correction: every 64-bit word of the EDRAM carries 8 check bits of a
// SEC-DED code (e_wcheck / e_rcheck, 128 bits per row). Every row read is
// decoded on its way in: single bit errors are corrected (ev_ecc_fix), double
// errors are reported (ev_ecc_err). The EDRAM is written in whole 64-bit
// words, so a write that covers only part of a word needs the rest of it:
// taken from a row buffer if one holds the row, otherwise read first
// (read-modify-write, one extra EDRAM access). Corrected errors are not
// written back.
//
// From the paper: 1024-bit EDRAM bus plus bits for error correction and
// detection, 256-bit lines, 128-bit beats, buffering that hides page misses
// for sequential access, 4 MByte (ROWS = 32768 rows). Own choices: two row
// buffers, next-row prefetch, the port handshakes, write through, the code
// and its word size (the paper names neither).
//
// Interfaces: *_req/*_gnt handshakes (a request is taken in the cycle its
// grant is high); the EDRAM macro answers a read with e_rvalid some cycles
// after e_gnt. Addresses: c_raddr in lines, c_waddr and p_addr in beats,
// e_row in rows. Check byte k of e_wcheck / e_rcheck protects data bits
// 64k+63:64k and is written together with them (e_wbe[8k]).
module edram_ctrl
  import qcdoc_pkg::*;
#(
  parameter int unsigned ROWS = 32768,
  localparam int unsigned RW  = $clog2(ROWS),
  localparam int unsigned LAW = RW + 2,
  localparam int unsigned BAW = RW + 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // core line reads
  input  logic                 c_rreq,
  input  logic [LAW-1:0]       c_raddr,
  output logic                 c_rgnt,
  output logic                 c_rvalid,
  output logic [BEAT_W-1:0]    c_rdata,
  output logic                 c_rlast,
  // core beat writes
  input  logic                 c_wreq,
  input  logic [BAW-1:0]       c_waddr,
  input  logic [BEAT_W-1:0]    c_wdata,
  input  logic [BEAT_W/8-1:0]  c_wbe,
  output logic                 c_wgnt,
  // PLB slave
  input  logic                 p_req,
  input  logic                 p_we,
  input  logic [BAW-1:0]       p_addr,
  input  logic [BEAT_W-1:0]    p_wdata,
  input  logic [BEAT_W/8-1:0]  p_be,
  output logic                 p_gnt,
  output logic                 p_rvalid,
  output logic [BEAT_W-1:0]    p_rdata,
  // EDRAM macro
  output logic                 e_req,
  output logic                 e_we,
  output logic [RW-1:0]        e_row,
  output logic [ROW_W-1:0]     e_wdata,
  output logic [ROW_W/8-1:0]   e_wbe,
  input  logic                 e_gnt,
  input  logic                 e_rvalid,
  input  logic [ROW_W-1:0]     e_rdata,
  output logic [CHK_W-1:0]     e_wcheck,
  input  logic [CHK_W-1:0]     e_rcheck,
  // events
  output logic                 ev_hit,
  output logic                 ev_miss,
  output logic                 ev_prefetch,
  output logic                 ev_ecc_fix,
  output logic                 ev_ecc_err
);

  localparam int unsigned BPR = ROW_W / BEAT_W;   // beats per row (8)
  localparam int unsigned WPR = ROW_W / WORD_W;   // words per row (16)
  localparam int unsigned WPB = BEAT_W / WORD_W;  // words per beat (2)

  // ---------------- row buffers ----------------
  logic [ROW_W-1:0] buf_data [2];
  logic [RW-1:0]    buf_row  [2];
  logic [1:0]       buf_vld;
  logic             mru;

  logic [RW-1:0] req_row;
  logic [1:0]    req_sub;
  assign req_row = c_raddr[LAW-1:2];
  assign req_sub = c_raddr[1:0];

  logic [1:0] hit_v;
  logic       hit, hit_buf;
  always_comb begin
    for (int b = 0; b < 2; b++) hit_v[b] = buf_vld[b] && buf_row[b] == req_row;
    hit     = |hit_v;
    hit_buf = hit_v[1];
  end

  // ---------------- beat output ----------------
  logic [LINE_W-1:0] line_q;
  logic [1:0]        beats_left;
  logic              can_take;
  assign can_take = (beats_left <= 2'd1);
  assign c_rgnt   = c_rreq && hit && can_take;
  assign c_rvalid = (beats_left != 2'd0);
  assign c_rdata  = (beats_left == 2'd2) ? line_q[BEAT_W-1:0] : line_q[LINE_W-1:BEAT_W];
  assign c_rlast  = (beats_left == 2'd1);
  assign ev_hit   = c_rgnt;

  // ---------------- EDRAM access engine ----------------
  typedef enum logic [2:0] {A_NONE, A_FILL, A_CWR, A_PLB, A_PF, A_RMW} acc_e;
  typedef enum logic [1:0] {R_BUF, R_PLB, R_RMW} rdk_e;
  acc_e          acc;
  logic          rd_pend;
  rdk_e          rd_kind;     // what the outstanding read is for
  logic          rd_buf;      // buffer being filled
  logic [RW-1:0] rd_row;
  logic [2:0]    rd_beat;

  // prefetch looks at the buffer used by this cycle's grant, if any, so that
  // the next row is asked for in the same cycle the stream enters a row
  logic          mru_n;
  logic [RW-1:0] pf_row;
  logic          pf_need;
  assign mru_n   = c_rgnt ? hit_buf : mru;
  assign pf_row  = buf_row[mru_n] + RW'(1);
  assign pf_need = buf_vld[mru_n] && !(buf_vld[!mru_n] && buf_row[!mru_n] == pf_row);

  // the write (or PLB read) in question: the core's if it asks, else the PLB's
  logic [BAW-1:0]        w_addr;
  logic [BEAT_W-1:0]     w_data;
  logic [BEAT_W/8-1:0]   w_be;
  logic [RW-1:0]         w_row;
  always_comb begin
    w_addr = c_wreq ? c_waddr : p_addr;
    w_data = c_wreq ? c_wdata : p_wdata;
    w_be   = c_wreq ? c_wbe   : p_be;
    w_row  = w_addr[BAW-1:3];
  end

  // old contents of that beat, for words that are written only in part
  logic [BEAT_W-1:0] rmw_old;
  logic [BAW-1:0]    rmw_addr;
  logic              rmw_vld;
  logic [1:0]        wb_hit;
  logic              wb_buf, old_ok, need_rmw;
  logic [WPB-1:0]    w_part, w_word;
  logic [BEAT_W-1:0] old_beat, m_data;
  always_comb begin
    for (int b = 0; b < 2; b++) wb_hit[b] = buf_vld[b] && buf_row[b] == w_row;
    wb_buf   = wb_hit[1];
    old_beat = (|wb_hit) ? buf_data[wb_buf][w_addr[2:0]*BEAT_W +: BEAT_W] : rmw_old;
    old_ok   = (|wb_hit) || (rmw_vld && rmw_addr == w_addr);
    for (int j = 0; j < WPB; j++) begin
      w_word[j] = |w_be[j*8 +: 8];
      w_part[j] = w_word[j] && !(&w_be[j*8 +: 8]);
    end
    need_rmw = (|w_part) && !old_ok;
    for (int i = 0; i < BEAT_W / 8; i++)
      m_data[i*8 +: 8] = w_be[i] ? w_data[i*8 +: 8] : old_beat[i*8 +: 8];
  end

  always_comb begin
    acc = A_NONE;
    if (!rd_pend) begin
      if (c_rreq && !hit)   acc = A_FILL;
      else if (c_wreq)      acc = need_rmw ? A_RMW : A_CWR;
      else if (p_req)       acc = (p_we && need_rmw) ? A_RMW : A_PLB;
      else if (pf_need)     acc = A_PF;
    end
  end

  always_comb begin
    e_req    = (acc != A_NONE);
    e_we     = (acc == A_CWR) || (acc == A_PLB && p_we);
    e_wdata  = {BPR{m_data}};
    for (int j = 0; j < WPB; j++) e_wcheck[j*ECC_W +: ECC_W] = ecc_check(m_data[j*WORD_W +: WORD_W]);
    for (int k = WPB; k < WPR; k++) e_wcheck[k*ECC_W +: ECC_W] = e_wcheck[(k % WPB)*ECC_W +: ECC_W];
    e_wbe    = '0;
    if (e_we)
      for (int j = 0; j < WPB; j++)
        e_wbe[w_addr[2:0]*(BEAT_W/8) + j*8 +: 8] = {8{w_word[j]}};
    case (acc)
      A_FILL:       e_row = req_row;
      A_PF:         e_row = pf_row;
      default:      e_row = w_row;
    endcase
  end

  // error correction of everything read from the EDRAM
  logic [ROW_W-1:0] rd_fix;
  logic             any_fix, any_bad;
  always_comb begin
    ecc_res_t r;
    any_fix = 1'b0;
    any_bad = 1'b0;
    for (int k = 0; k < WPR; k++) begin
      r = ecc_decode(e_rdata[k*WORD_W +: WORD_W], e_rcheck[k*ECC_W +: ECC_W]);
      rd_fix[k*WORD_W +: WORD_W] = r.data;
      any_fix |= r.fixed;
      any_bad |= r.bad;
    end
  end
  assign ev_ecc_fix = e_rvalid && rd_pend && any_fix;
  assign ev_ecc_err = e_rvalid && rd_pend && any_bad;

  assign c_wgnt      = (acc == A_CWR) && e_gnt;
  assign p_gnt       = (acc == A_PLB) && e_gnt;
  assign ev_miss     = (acc == A_FILL) && e_gnt;
  assign ev_prefetch = (acc == A_PF) && e_gnt;

  assign p_rvalid = e_rvalid && rd_pend && rd_kind == R_PLB;
  assign p_rdata  = rd_fix[rd_beat*BEAT_W +: BEAT_W];

  // a write merges into a buffer that holds its row
  logic       wr_done;
  logic [1:0] wr_hit;
  assign wr_done = e_req && e_we && e_gnt;
  always_comb
    for (int b = 0; b < 2; b++) wr_hit[b] = wr_done && buf_vld[b] && buf_row[b] == e_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_vld    <= '0;
      mru        <= 1'b0;
      beats_left <= '0;
      line_q     <= '0;
      rd_pend    <= 1'b0;
      rd_kind    <= R_BUF;
      rmw_vld    <= 1'b0;
      rmw_addr   <= '0;
      rmw_old    <= '0;
      rd_buf     <= 1'b0;
      rd_row     <= '0;
      rd_beat    <= '0;
      for (int b = 0; b < 2; b++) begin
        buf_data[b] <= '0;
        buf_row[b]  <= '0;
      end
    end else begin
      // beats
      if (c_rgnt) begin
        line_q     <= buf_data[hit_buf][req_sub*LINE_W +: LINE_W];
        beats_left <= 2'd2;
        mru        <= hit_buf;
      end else if (beats_left != 2'd0) begin
        beats_left <= beats_left - 2'd1;
      end

      // issue a read
      if (e_req && !e_we && e_gnt) begin
        rd_pend <= 1'b1;
        rd_kind <= (acc == A_PLB) ? R_PLB : (acc == A_RMW) ? R_RMW : R_BUF;
        rd_buf  <= !mru_n;
        rd_row  <= e_row;
        rd_beat <= w_addr[2:0];
        if (acc == A_FILL || acc == A_PF) buf_vld[!mru_n] <= 1'b0;
      end

      // read data
      if (e_rvalid && rd_pend) begin
        rd_pend <= 1'b0;
        if (rd_kind == R_RMW) begin
          rmw_old  <= rd_fix[rd_beat*BEAT_W +: BEAT_W];
          rmw_addr <= {rd_row, rd_beat};
          rmw_vld  <= 1'b1;
        end
        if (rd_kind == R_BUF) begin
          buf_data[rd_buf] <= rd_fix;
          buf_row[rd_buf]  <= rd_row;
          buf_vld[rd_buf]  <= 1'b1;
        end
      end

      // any write may change the beat held for a read-modify-write
      if (wr_done) rmw_vld <= 1'b0;

      // write merge
      for (int b = 0; b < 2; b++)
        if (wr_hit[b])
          for (int i = 0; i < BEAT_W / 8; i++)
            if (w_be[i]) buf_data[b][w_addr[2:0]*BEAT_W + i*8 +: 8] <= w_data[i*8 +: 8];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) e_rvalid |-> rd_pend);
  assert property (@(posedge clk) disable iff (!rst_n) c_rgnt |-> hit);

endmodule
