// edram_model: behavioural model of the embedded DRAM macro, for simulation
// only (the real macro is a library part whose timing is not published here).
//
// ROWS rows of 1024 bits. One access at a time: a request is granted when the
// macro is idle, after which it is busy for LAT cycles. A read returns the
// whole row with e_rvalid LAT cycles after the grant; a write stores the bytes
// whose enable bit is set. At time zero every 128-bit beat b of the memory
// holds init_beat(b), so that a testbench can predict what it reads, and
// every 64-bit word its SEC-DED check byte. Check byte k of a row belongs to
// data bits 64k+63:64k and is written when e_wbe[8k] is set.
//
// Fault injection for testbenches: while err_en is high, every read of row
// err_row returns its data XOR err_dmask and its check bits XOR err_cmask,
// as a row with broken cells would (the stored contents are not changed).
module edram_model
  import qcdoc_pkg::*;
#(
  parameter int unsigned ROWS = 32768,
  parameter int unsigned LAT  = 6,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               e_req,
  input  logic               e_we,
  input  logic [RW-1:0]      e_row,
  input  logic [ROW_W-1:0]   e_wdata,
  input  logic [ROW_W/8-1:0] e_wbe,
  output logic               e_gnt,
  output logic               e_rvalid,
  output logic [ROW_W-1:0]   e_rdata,
  input  logic [CHK_W-1:0]   e_wcheck,
  output logic [CHK_W-1:0]   e_rcheck,
  // fault injection
  input  logic               err_en,
  input  logic [RW-1:0]      err_row,
  input  logic [ROW_W-1:0]   err_dmask,
  input  logic [CHK_W-1:0]   err_cmask
);

  logic [ROW_W-1:0] mem [ROWS];
  logic [CHK_W-1:0] chk [ROWS];
  int unsigned      busy;
  logic             rd;
  logic [RW-1:0]    rd_row;

  // initial content of 128-bit beat number b
  function automatic logic [BEAT_W-1:0] init_beat(input int unsigned b);
    return {b ^ 32'hDEAD_0000, b * 32'd2654435761, ~b, b};
  endfunction

  initial begin
    for (int unsigned r = 0; r < ROWS; r++)
      for (int unsigned k = 0; k < ROW_W / BEAT_W; k++)
        mem[r][k*BEAT_W +: BEAT_W] = init_beat(r * (ROW_W / BEAT_W) + k);
    for (int unsigned r = 0; r < ROWS; r++)
      for (int unsigned k = 0; k < ROW_W / WORD_W; k++)
        chk[r][k*ECC_W +: ECC_W] = ecc_check(mem[r][k*WORD_W +: WORD_W]);
  end

  assign e_gnt = rst_n && (busy == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 0;
      rd       <= 1'b0;
      rd_row   <= '0;
      e_rvalid <= 1'b0;
      e_rdata  <= '0;
      e_rcheck <= '0;
    end else begin
      e_rvalid <= 1'b0;
      if (e_req && e_gnt) begin
        busy <= LAT;
        if (e_we) begin
          for (int i = 0; i < ROW_W / 8; i++)
            if (e_wbe[i]) mem[e_row][i*8 +: 8] <= e_wdata[i*8 +: 8];
          for (int k = 0; k < ROW_W / WORD_W; k++)
            if (e_wbe[k*8]) chk[e_row][k*ECC_W +: ECC_W] <= e_wcheck[k*ECC_W +: ECC_W];
        end else begin
          rd     <= 1'b1;
          rd_row <= e_row;
        end
      end else if (busy != 0) begin
        busy <= busy - 1;
        if (busy == 1 && rd) begin
          rd       <= 1'b0;
          e_rvalid <= 1'b1;
          e_rdata  <= mem[rd_row] ^ ((err_en && err_row == rd_row) ? err_dmask : '0);
          e_rcheck <= chk[rd_row] ^ ((err_en && err_row == rd_row) ? err_cmask : '0);
        end
      end
    end
  end

endmodule
