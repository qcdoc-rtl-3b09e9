// qcdoc_pkg: types, sizes and helper functions shared by the QCDOC node RTL.
//
// The serial communications unit (SCU) moves 64-bit words between nearest
// neighbours. On the byte stream between two SCUs everything is sent in
// 16-bit symbols (two bytes, low byte first). A frame starts with a header
// symbol: an 8-bit header protected by a Hamming(12,8) single-error-correcting
// code, so that a single bit error in the 8 identifying bits is corrected.
// A data frame then carries the word in four symbols and a last symbol with
// one even-parity bit per 32-bit half, so that a single bit error anywhere in
// a 32-bit half is detected. Ack frames are the header symbol alone. The all
// zero symbol is idle.
//
// Taken from the paper: 64-bit transfer size, 8 identifying bits that are
// corrected, single-bit error detection within 32 bits, ack / ack-with-error,
// 4 receive buffers of which the fourth is the supervisor buffer, 12 links
// (24 send/receive wires), 24 DMA channels, 1024-bit EDRAM bus, 256-bit lines,
// 128-bit beats, 4 MByte EDRAM, extra EDRAM bus bits for error correction
// and detection. The symbol layout, the header fields, the Hamming code, the
// parity scheme and the EDRAM SEC-DED code (8 check bits per 64-bit word) are
// this design's own choices.
package qcdoc_pkg;

  // ---------------- communications ----------------
  localparam int unsigned WORD_W   = 64;  // basic transfer size (paper)
  localparam int unsigned NBUF     = 4;   // receive buffers per link (paper)
  localparam int unsigned NDATABUF = 3;   // of which used for DMA data (paper)
  localparam int unsigned SUP_BUF  = 3;   // index of the supervisor buffer
  localparam int unsigned NLINK    = 12;  // 24 wires = 12 send + 12 receive (paper)

  typedef logic [WORD_W-1:0] word_t;

  typedef enum logic [1:0] {
    FT_IDLE = 2'd0,
    FT_DATA = 2'd1,
    FT_ACK  = 2'd2,
    FT_NACK = 2'd3   // "acknowledgement with error"
  } ftype_e;

  typedef struct packed {
    ftype_e     ftype;
    logic [1:0] buf_idx;
    logic [3:0] rsvd;
  } hdr_t;

  // Hamming(12,8): codeword positions 1..12, check bits at 1,2,4,8,
  // data bits d[0..7] at positions 3,5,6,7,9,10,11,12.
  function automatic logic [3:0] hdr_check(input logic [7:0] d);
    logic [3:0] c;
    c[0] = d[0] ^ d[1] ^ d[3] ^ d[4] ^ d[6];
    c[1] = d[0] ^ d[2] ^ d[3] ^ d[5] ^ d[6];
    c[2] = d[1] ^ d[2] ^ d[3] ^ d[7];
    c[3] = d[4] ^ d[5] ^ d[6] ^ d[7];
    return c;
  endfunction

  // Header symbol for a header byte.
  function automatic logic [15:0] hdr_symbol(input hdr_t h);
    return {4'b0000, hdr_check(h), h};
  endfunction

  // Correct a received header symbol. ok = 0 when the syndrome points
  // outside the 12-bit codeword (more than one bit in error).
  function automatic logic [8:0] hdr_decode(input logic [15:0] s);
    logic [7:0] d;
    logic [3:0] syn;
    logic       ok;
    d   = s[7:0];
    syn = hdr_check(d) ^ s[11:8];
    ok  = 1'b1;
    case (syn)
      4'd3:  d[0] = ~d[0];
      4'd5:  d[1] = ~d[1];
      4'd6:  d[2] = ~d[2];
      4'd7:  d[3] = ~d[3];
      4'd9:  d[4] = ~d[4];
      4'd10: d[5] = ~d[5];
      4'd11: d[6] = ~d[6];
      4'd12: d[7] = ~d[7];
      4'd13, 4'd14, 4'd15: ok = 1'b0;
      default: ;  // 0: no error, 1/2/4/8: a check bit was hit
    endcase
    return {ok, d};
  endfunction

  function automatic logic [1:0] word_parity(input word_t w);
    return {^w[63:32], ^w[31:0]};
  endfunction

  // ---------------- SCU DMA ----------------
  localparam int unsigned NCHAN   = 2 * NLINK; // one DMA per wire (paper)
  localparam int unsigned NDESC   = 4;         // instructions per channel (assumed)
  localparam int unsigned MADDR_W = 19;        // 64-bit word address: 4 MB / 8 B

  // One block-strided move instruction.
  typedef struct packed {
    logic [MADDR_W-1:0] base;     // first word of first block
    logic [15:0]        blk_len;  // words per block (>= 1)
    logic [15:0]        nblk;     // number of blocks (>= 1)
    logic [MADDR_W-1:0] stride;   // words from one block start to the next
    logic [1:0]         next;     // chained instruction
    logic               last;     // end of chain
  } desc_t;

  // ---------------- EDRAM ----------------
  localparam int unsigned ROW_W  = 1024; // EDRAM bus (paper)
  localparam int unsigned LINE_W = 256;  // cache line (paper)
  localparam int unsigned BEAT_W = 128;  // core / PLB beat (paper)
  localparam int unsigned ECC_W  = 8;    // check bits per 64-bit word (assumed)
  localparam int unsigned CHK_W  = ROW_W / WORD_W * ECC_W;  // 128 per row

  // SEC-DED (72,64) code for the EDRAM words: a Hamming code over codeword
  // positions 1..71 with check bit i at position 2^i (i = 0..6) and the 64
  // data bits at the other positions in increasing order; check bit 7 makes
  // the parity of all 72 bits even.
  function automatic logic [6:0] ecc_syn(input word_t d);
    logic [6:0]  s;
    int unsigned k;
    s = '0;
    k = 0;
    for (int unsigned p = 1; p < 72; p++)
      if ((p & (p - 1)) != 0) begin
        if (d[k]) s ^= 7'(p);
        k++;
      end
    return s;
  endfunction

  function automatic logic [ECC_W-1:0] ecc_check(input word_t d);
    logic [6:0] c;
    c = ecc_syn(d);
    return {^d ^ ^c, c};
  endfunction

  typedef struct packed {
    logic  fixed;   // one bit was wrong and has been corrected
    logic  bad;     // two bits wrong: detected, not correctable
    word_t data;
  } ecc_res_t;

  function automatic ecc_res_t ecc_decode(input word_t d, input logic [ECC_W-1:0] c);
    ecc_res_t    r;
    logic [6:0]  s;
    logic        odd;
    int unsigned k;
    s   = ecc_syn(d) ^ c[6:0];
    odd = ^d ^ ^c;
    r.data  = d;
    r.fixed = 1'b0;
    r.bad   = 1'b0;
    if (odd) begin
      // single error: s is its position (0 means the overall parity bit)
      if (s > 7'd71) r.bad = 1'b1;
      else           r.fixed = 1'b1;
      k = 0;
      for (int unsigned p = 1; p < 72; p++)
        if ((p & (p - 1)) != 0) begin
          if (s == 7'(p)) r.data[k] = ~d[k];
          k++;
        end
    end else if (s != 7'd0) begin
      r.bad = 1'b1;
    end
    return r;
  endfunction

endpackage
