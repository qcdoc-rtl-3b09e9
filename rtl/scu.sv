// scu: serial communications unit of the QCDOC node.
//
// The SCU joins a node to its nearest neighbours. It has NLINK links (12 by
// default: the 24 send and receive wires of the three serial macros), each an
// scu_link protocol engine, and one scu_dma channel per wire: channel l
// (0..NLINK-1) sends on link l, channel NLINK+l stores what arrives on link l.
// All channels share one 128-bit memory port on the processor local bus.
// Each link also has the supervisor register pair that the processor loads and
// unloads directly, with an interrupt when a supervisor word arrives.
//
// Register port (own choice; the paper only says that the DMA instructions are
// loaded into the SCU). cfg_addr[11:10] selects:
//   0: DMA instructions. cfg_addr[9:5] channel, [4:3] instruction, [2:0]
//      field: 0 base, 1 blk_len, 2 nblk, 3 stride, 4 {last,next} = wdata[2:0];
//      fields 0-3 are staged, writing field 4 stores the whole instruction.
//   1: channel control, cfg_addr[4:0] channel. Write starts the chain at
//      instruction wdata[1:0]; read gives {done, busy}.
//   2: supervisor, cfg_addr[3:0] link. cfg_addr[4]=0: write sends a word,
//      read returns the received word. cfg_addr[4]=1: write releases the
//      received word (which acknowledges it), read gives {tx_pending, rx_full}.
// Reads are combinational. irq_sup[l] is high while a supervisor word waits on
// link l, irq_done[c] while channel c has finished its chain.
//
// Memory port: p_req/p_gnt request handshake, p_addr in 128-bit units with
// byte enables; read data return in order on p_rvalid. Up to RDQ reads may be
// outstanding. Channels are served round robin, one access per cycle.
module scu
  import qcdoc_pkg::*;
#(
  parameter int unsigned NL  = NLINK,
  parameter int unsigned RDQ = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // serial macros
  output logic [7:0]           tx_byte  [NL],
  input  logic                 tx_take  [NL],
  input  logic [7:0]           rx_byte  [NL],
  input  logic                 rx_valid [NL],
  // register port
  input  logic                 cfg_we,
  input  logic [11:0]          cfg_addr,
  input  logic [63:0]          cfg_wdata,
  output logic [63:0]          cfg_rdata,
  output logic [NL-1:0]        irq_sup,
  output logic [2*NL-1:0]      irq_done,
  // memory port (PLB master)
  output logic                 p_req,
  output logic                 p_we,
  output logic [MADDR_W-2:0]   p_addr,
  output logic [BEAT_W-1:0]    p_wdata,
  output logic [BEAT_W/8-1:0]  p_be,
  input  logic                 p_gnt,
  input  logic                 p_rvalid,
  input  logic [BEAT_W-1:0]    p_rdata,
  // events, for monitoring
  output logic [NL-1:0]        ev_retry,
  output logic [NL-1:0]        ev_nack,
  output logic [NL-1:0]        ev_hdr_fixed,
  output logic [NL-1:0]        link_busy
);

  localparam int unsigned NC = 2 * NL;
  localparam int unsigned CW = $clog2(NC);

  // ---------------- register decode ----------------
  logic [1:0] sel;
  assign sel = cfg_addr[11:10];

  desc_t      stage;
  logic [NC-1:0] desc_we, start;
  desc_t      desc_wdata;
  always_comb begin
    desc_wdata      = stage;
    desc_wdata.next = cfg_wdata[1:0];
    desc_wdata.last = cfg_wdata[2];
  end

  always_comb begin
    desc_we = '0;
    start   = '0;
    if (cfg_we && sel == 2'd0 && cfg_addr[2:0] == 3'd4 && 32'(cfg_addr[9:5]) < NC)
      desc_we[cfg_addr[9:5]] = 1'b1;
    if (cfg_we && sel == 2'd1 && 32'(cfg_addr[4:0]) < NC)
      start[cfg_addr[4:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stage <= '0;
    else if (cfg_we && sel == 2'd0) begin
      case (cfg_addr[2:0])
        3'd0: stage.base    <= cfg_wdata[MADDR_W-1:0];
        3'd1: stage.blk_len <= cfg_wdata[15:0];
        3'd2: stage.nblk    <= cfg_wdata[15:0];
        3'd3: stage.stride  <= cfg_wdata[MADDR_W-1:0];
        default: ;
      endcase
    end
  end

  // ---------------- channels and links ----------------
  logic               m_req    [NC];
  logic               m_we     [NC];
  logic [MADDR_W-1:0] m_addr   [NC];
  word_t              m_wdata  [NC];
  logic               m_gnt    [NC];
  logic               m_rvalid [NC];
  word_t              m_rdata;
  logic [NC-1:0]      ch_busy, ch_done;

  logic [NL-1:0] sup_pend, sup_ready, sup_full;
  word_t         sup_word [NL];
  word_t         sup_rx   [NL];
  logic [NL-1:0] sup_release;

  for (genvar l = 0; l < NL; l++) begin : g_link
    logic  s_valid, s_ready, r_valid, r_ready;
    word_t s_data, r_data;

    scu_dma #(.SEND(1'b1)) u_snd (
      .clk, .rst_n,
      .desc_we(desc_we[l]), .desc_idx(cfg_addr[4:3]), .desc_wdata,
      .start(start[l]), .start_idx(cfg_wdata[1:0]),
      .busy(ch_busy[l]), .done(ch_done[l]),
      .m_req(m_req[l]), .m_we(m_we[l]), .m_addr(m_addr[l]), .m_wdata(m_wdata[l]),
      .m_gnt(m_gnt[l]), .m_rvalid(m_rvalid[l]), .m_rdata,
      .out_valid(s_valid), .out_data(s_data), .out_ready(s_ready),
      .in_valid(1'b0), .in_data('0), .in_ready()
    );

    scu_dma #(.SEND(1'b0)) u_rcv (
      .clk, .rst_n,
      .desc_we(desc_we[NL+l]), .desc_idx(cfg_addr[4:3]), .desc_wdata,
      .start(start[NL+l]), .start_idx(cfg_wdata[1:0]),
      .busy(ch_busy[NL+l]), .done(ch_done[NL+l]),
      .m_req(m_req[NL+l]), .m_we(m_we[NL+l]), .m_addr(m_addr[NL+l]), .m_wdata(m_wdata[NL+l]),
      .m_gnt(m_gnt[NL+l]), .m_rvalid(m_rvalid[NL+l]), .m_rdata,
      .out_valid(), .out_data(), .out_ready(1'b0),
      .in_valid(r_valid), .in_data(r_data), .in_ready(r_ready)
    );

    scu_link u_link (
      .clk, .rst_n,
      .tx_byte(tx_byte[l]), .tx_take(tx_take[l]),
      .rx_byte(rx_byte[l]), .rx_valid(rx_valid[l]),
      .snd_valid(s_valid), .snd_data(s_data), .snd_ready(s_ready),
      .rcv_valid(r_valid), .rcv_data(r_data), .rcv_ready(r_ready),
      .sup_tx_valid(sup_pend[l]), .sup_tx_data(sup_word[l]), .sup_tx_ready(sup_ready[l]),
      .sup_rx_full(sup_full[l]), .sup_rx_data(sup_rx[l]), .sup_rx_release(sup_release[l]),
      .tx_busy(link_busy[l]), .ev_retry(ev_retry[l]), .ev_nack(ev_nack[l]),
      .hdr_fixed(ev_hdr_fixed[l])
    );
  end

  // ---------------- supervisor registers ----------------
  always_comb begin
    sup_release = '0;
    if (cfg_we && sel == 2'd2 && cfg_addr[4] && 32'(cfg_addr[3:0]) < NL)
      sup_release[cfg_addr[3:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sup_pend <= '0;
      for (int l = 0; l < NL; l++) sup_word[l] <= '0;
    end else begin
      sup_pend <= sup_pend & ~sup_ready;
      if (cfg_we && sel == 2'd2 && !cfg_addr[4] && 32'(cfg_addr[3:0]) < NL
          && !sup_pend[cfg_addr[3:0]]) begin
        sup_pend[cfg_addr[3:0]] <= 1'b1;
        sup_word[cfg_addr[3:0]] <= cfg_wdata;
      end
    end
  end

  assign irq_sup  = sup_full;
  assign irq_done = ch_done;

  always_comb begin
    cfg_rdata = '0;
    case (sel)
      2'd1: if (32'(cfg_addr[4:0]) < NC)
              cfg_rdata = {62'b0, ch_done[cfg_addr[4:0]], ch_busy[cfg_addr[4:0]]};
      2'd2: if (32'(cfg_addr[3:0]) < NL) begin
              if (!cfg_addr[4]) cfg_rdata = sup_rx[cfg_addr[3:0]];
              else cfg_rdata = {62'b0, sup_pend[cfg_addr[3:0]], sup_full[cfg_addr[3:0]]};
            end
      default: ;
    endcase
  end

  // ---------------- memory port arbitration ----------------
  localparam int unsigned QW = $clog2(RDQ);
  logic [CW-1:0] rr, win;
  logic          any;
  logic [CW:0]   q_chan [RDQ];   // {half, channel}
  logic [QW-1:0] q_wr, q_rd;
  logic [QW:0]   q_cnt;
  logic          q_full;

  assign q_full = (q_cnt == (QW+1)'(RDQ));

  always_comb begin
    any = 1'b0;
    win = rr;
    for (int k = NC - 1; k >= 0; k--) begin
      int c;
      c = (int'(rr) + k) % NC;
      if (m_req[c]) begin any = 1'b1; win = CW'(c); end
    end
  end

  assign p_req   = any && !(q_full && !m_we[win]);
  assign p_we    = m_we[win];
  assign p_addr  = m_addr[win][MADDR_W-1:1];
  assign p_wdata = {m_wdata[win], m_wdata[win]};
  assign p_be    = m_addr[win][0] ? 16'hFF00 : 16'h00FF;

  always_comb begin
    for (int c = 0; c < NC; c++) begin
      m_gnt[c]    = p_gnt && p_req && (CW'(c) == win);
      m_rvalid[c] = p_rvalid && (CW'(c) == q_chan[q_rd][CW-1:0]);
    end
  end
  assign m_rdata = q_chan[q_rd][CW] ? p_rdata[127:64] : p_rdata[63:0];

  logic push, pop;
  assign push = p_req && p_gnt && !p_we;
  assign pop  = p_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr    <= '0;
      q_wr  <= '0;
      q_rd  <= '0;
      q_cnt <= '0;
      for (int i = 0; i < RDQ; i++) q_chan[i] <= '0;
    end else begin
      if (p_req && p_gnt) rr <= (32'(win) == NC - 1) ? '0 : win + CW'(1);
      if (push) begin
        q_chan[q_wr] <= {m_addr[win][0], win};
        q_wr <= (32'(q_wr) == RDQ - 1) ? '0 : q_wr + QW'(1);
      end
      if (pop) q_rd <= (32'(q_rd) == RDQ - 1) ? '0 : q_rd + QW'(1);
      q_cnt <= q_cnt + (QW+1)'(push) - (QW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) p_rvalid |-> q_cnt != 0);

endmodule
