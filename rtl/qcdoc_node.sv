// qcdoc_node: the in-house logic of one QCDOC processing node.
//
// A QCDOC node is a single chip: a PowerPC 440 core with a 64-bit floating
// point unit, 4 MByte of embedded DRAM, a serial communications unit (SCU)
// with 12 bidirectional nearest-neighbour links, a DDR SDRAM controller and
// an Ethernet controller, joined by the 128-bit processor local bus (PLB).
// Most of those are library macros; the parts the QCDOC designers built
// themselves are the EDRAM controller and the SCU, and this module holds them:
//
//   - edram_ctrl: row buffers and prefetch between the 1024-bit EDRAM bus and
//     the core's 128-bit line-read path, SEC-DED error correction on the EDRAM
//     bus, plus a PLB-side port.
//   - scu: 12 links (scu_link) with 24 DMA channels (scu_dma) and supervisor
//     registers.
//
// The SCU's memory port is wired straight to the EDRAM controller's PLB-side
// port, as a PLB with a single master would connect them (the PLB, its
// arbiter and the other masters are library parts and are not modelled).
// Everything else that would attach is a port of this module: the core's
// read/write ports (for the 440 core), the EDRAM macro port, the byte-wide
// ports of the serial macros (HSSL), the SCU register port (reached through
// the DCR ring on the chip) and the interrupt lines.
//
// Everything runs on one clock. The serial macros pace each link with
// tx_take / rx_valid strobes (one byte per strobe; at 500 MHz core clock and
// 62.5 MHz byte rate, one strobe every 8 cycles).
module qcdoc_node
  import qcdoc_pkg::*;
#(
  parameter int unsigned ROWS = 32768,          // 4 MByte of 1024-bit rows
  parameter int unsigned NL   = NLINK,          // 12 links
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // processor core port to the EDRAM controller
  input  logic                 c_rreq,
  input  logic [RW+1:0]        c_raddr,
  output logic                 c_rgnt,
  output logic                 c_rvalid,
  output logic [BEAT_W-1:0]    c_rdata,
  output logic                 c_rlast,
  input  logic                 c_wreq,
  input  logic [RW+2:0]        c_waddr,
  input  logic [BEAT_W-1:0]    c_wdata,
  input  logic [BEAT_W/8-1:0]  c_wbe,
  output logic                 c_wgnt,
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
  // serial macros
  output logic [7:0]           tx_byte  [NL],
  input  logic                 tx_take  [NL],
  input  logic [7:0]           rx_byte  [NL],
  input  logic                 rx_valid [NL],
  // SCU registers and interrupts
  input  logic                 cfg_we,
  input  logic [11:0]          cfg_addr,
  input  logic [63:0]          cfg_wdata,
  output logic [63:0]          cfg_rdata,
  output logic [NL-1:0]        irq_sup,
  output logic [2*NL-1:0]      irq_done,
  // monitoring
  output logic [NL-1:0]        ev_retry,
  output logic [NL-1:0]        ev_nack,
  output logic [NL-1:0]        ev_hdr_fixed,
  output logic                 ev_hit,
  output logic                 ev_miss,
  output logic                 ev_prefetch,
  output logic                 ev_ecc_fix,
  output logic                 ev_ecc_err
);

  // SCU -> EDRAM controller (single-master PLB)
  logic                p_req, p_we, p_gnt, p_rvalid;
  logic [RW+2:0]       p_addr;
  logic [MADDR_W-2:0]  scu_addr;
  logic [BEAT_W-1:0]   p_wdata, p_rdata;
  logic [BEAT_W/8-1:0] p_be;
  logic [NL-1:0]       link_busy;

  scu #(.NL(NL)) u_scu (
    .clk, .rst_n,
    .tx_byte, .tx_take, .rx_byte, .rx_valid,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .irq_sup, .irq_done,
    .p_req, .p_we, .p_addr(scu_addr), .p_wdata, .p_be, .p_gnt, .p_rvalid, .p_rdata,
    .ev_retry, .ev_nack, .ev_hdr_fixed, .link_busy
  );

  // the SCU addresses the full 4 MByte; a smaller EDRAM uses the low bits
  assign p_addr = scu_addr[RW+2:0];

  edram_ctrl #(.ROWS(ROWS)) u_edc (
    .clk, .rst_n,
    .c_rreq, .c_raddr, .c_rgnt, .c_rvalid, .c_rdata, .c_rlast,
    .c_wreq, .c_waddr, .c_wdata, .c_wbe, .c_wgnt,
    .p_req, .p_we, .p_addr, .p_wdata, .p_be, .p_gnt, .p_rvalid, .p_rdata,
    .e_req, .e_we, .e_row, .e_wdata, .e_wbe, .e_gnt, .e_rvalid, .e_rdata,
    .e_wcheck, .e_rcheck,
    .ev_hit, .ev_miss, .ev_prefetch, .ev_ecc_fix, .ev_ecc_err
  );

endmodule
