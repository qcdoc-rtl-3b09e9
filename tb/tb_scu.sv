// tb_scu: the whole SCU (12 links, 24 DMA channels) with its links looped
// back in pairs (link 2k sends to link 2k+1 and back, one register stage,
// one byte strobe every 8 cycles as at 500 MHz / 62.5 MHz) and a 128-bit
// memory model on its bus port (random grant, reads answered in order).
//
// Every link sends a strided region (3 blocks of 4 words, stride 16) through
// its send DMA; the partner's receive DMA stores it contiguously. Afterwards
// each received word must equal the memory word it was sent from, all 24
// done interrupts must be up, and every channel must have read or written
// its own number of words. A supervisor word then goes from link 4 to link 5
// through the register port: interrupt, data, release.
module tb_scu;
  import qcdoc_pkg::*;

  localparam int unsigned NL = NLINK;
  localparam int unsigned NW = 12;          // words per transfer

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [7:0]  tx_byte [NL], rx_byte [NL];
  logic        tx_take [NL], rx_valid [NL];
  logic        cfg_we;
  logic [11:0] cfg_addr;
  logic [63:0] cfg_wdata, cfg_rdata;
  logic [NL-1:0] irq_sup, ev_retry, ev_nack, ev_hdr_fixed, link_busy;
  logic [2*NL-1:0] irq_done;
  logic          p_req, p_we, p_gnt, p_rvalid;
  logic [MADDR_W-2:0] p_addr;
  logic [127:0]  p_wdata, p_rdata;
  logic [15:0]   p_be;

  scu dut (.*);

  // links: 2k <-> 2k+1, byte strobe every 8 cycles
  int strobe = 0;
  always_ff @(posedge clk) begin
    strobe <= (strobe == 7) ? 0 : strobe + 1;
    for (int l = 0; l < NL; l++) begin
      rx_byte[l ^ 1]  <= tx_byte[l];
      rx_valid[l ^ 1] <= tx_take[l] && rst_n;
    end
  end
  always_comb for (int l = 0; l < NL; l++) tx_take[l] = (strobe == 0);

  // memory model, 128-bit beats, initial content by formula
  function automatic logic [63:0] init64(input int unsigned w);
    return {w ^ 32'h5EED_0000, w * 32'd40503};
  endfunction
  logic [127:0] mem [int unsigned];
  function automatic logic [127:0] rd_beat(input int unsigned b);
    return mem.exists(b) ? mem[b] : {init64(2*b + 1), init64(2*b)};
  endfunction
  function automatic logic [63:0] rd_word(input int unsigned w);
    logic [127:0] b;
    b = rd_beat(w / 2);
    return (w % 2) ? b[127:64] : b[63:0];
  endfunction

  logic gnt_rand;
  logic [127:0] rq [$];
  int   rq_age [$];
  int   n_rd = 0, n_wr = 0;
  assign p_gnt = p_req && gnt_rand;
  always_ff @(posedge clk) begin
    gnt_rand <= $urandom_range(0, 3) != 0;
    p_rvalid <= 1'b0;
    if (p_req && p_gnt) begin
      if (p_we) begin
        logic [127:0] v;
        v = rd_beat(p_addr);
        for (int i = 0; i < 16; i++) if (p_be[i]) v[i*8 +: 8] = p_wdata[i*8 +: 8];
        mem[p_addr] = v;
        n_wr <= n_wr + 1;
      end else begin
        rq.push_back(rd_beat(p_addr));
        rq_age.push_back(0);
        n_rd <= n_rd + 1;
      end
    end
    foreach (rq_age[i]) rq_age[i]++;
    if (rq.size() > 0 && rq_age[0] >= 3) begin
      p_rvalid <= 1'b1;
      p_rdata  <= rq.pop_front();
      void'(rq_age.pop_front());
    end
  end

  task automatic cfg(input logic [11:0] a, input logic [63:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_chan(input int ch, input int base, input int blk, input int nblk, input int stride);
    cfg({2'd0, 5'(ch), 2'd0, 3'd0}, 64'(base));
    cfg({2'd0, 5'(ch), 2'd0, 3'd1}, 64'(blk));
    cfg({2'd0, 5'(ch), 2'd0, 3'd2}, 64'(nblk));
    cfg({2'd0, 5'(ch), 2'd0, 3'd3}, 64'(stride));
    cfg({2'd0, 5'(ch), 2'd0, 3'd4}, 64'b100);   // last, next = 0
  endtask

  function automatic int src_base(input int l); return 1000 * l + 8;    endfunction
  function automatic int dst_base(input int l); return 40000 + 100 * l; endfunction

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_wdata = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    for (int l = 0; l < NL; l++) begin
      load_chan(l, src_base(l), 4, 3, 16);                 // send from l
      load_chan(NL + (l ^ 1), dst_base(l), NW, 1, 0);      // receive on l^1
    end
    for (int c = 0; c < 2 * NL; c++) cfg({2'd1, 5'd0, 5'(c)}, 64'd0);
    cfg_addr = {2'd1, 5'd0, 5'd3};
    #1 check(cfg_rdata[0] == 1'b1, "channel status reads busy");

    wait (&irq_done);
    repeat (10) @(posedge clk);
    for (int l = 0; l < NL; l++)
      for (int i = 0; i < NW; i++) begin
        int sw;
        sw = src_base(l) + (i / 4) * 16 + (i % 4);
        check(rd_word(dst_base(l) + i) == init64(sw),
              $sformatf("link %0d word %0d: %h expected %h", l, i, rd_word(dst_base(l) + i), init64(sw)));
      end
    check(n_rd == NL * NW, $sformatf("memory reads: %0d", n_rd));
    check(n_wr == NL * NW, $sformatf("memory writes: %0d", n_wr));
    check(rd_word(dst_base(0) + NW) == init64(dst_base(0) + NW), "no write past the block");

    // supervisor word link 4 -> link 5
    cfg({2'd2, 5'd0, 1'b0, 4'd4}, 64'hCAFE_F00D_1234_5678);
    wait (irq_sup[5]);
    @(negedge clk);
    cfg_addr = {2'd2, 5'd0, 1'b0, 4'd5};
    #1 check(cfg_rdata == 64'hCAFE_F00D_1234_5678, "supervisor word arrives");
    check(irq_sup == 12'b0000_0010_0000, "only link 5 interrupts");
    cfg({2'd2, 5'd0, 1'b1, 4'd5}, 64'd0);
    check(!irq_sup[5], "release clears the interrupt");
    repeat (200) @(posedge clk);
    cfg_addr = {2'd2, 5'd0, 1'b1, 4'd4};
    #1 check(cfg_rdata[1] == 1'b0, "supervisor send register free again");
    check(link_busy == '0, "no unacknowledged words");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
