// tb_qcdoc_node: two complete nodes at full size (4 MByte EDRAM each, 12
// links), joined as a two-node torus in all six directions: link l of node A
// is wired to link l^1 of node B, so A's "+d" neighbour is B's "-d" one. Each
// node has the behavioural EDRAM macro model; the byte strobe of every link
// fires once every 8 cycles (500 MHz clock, 62.5 MHz byte rate).
//
// One complete operation, a nearest-neighbour exchange:
//   1. the core port of node A writes 32 beats of data into its EDRAM;
//   2. every send channel of both nodes gets a two-instruction chain
//      (2 blocks of 4 words with stride 8, then 8 contiguous words) and every
//      receive channel a contiguous 16-word destination; the receive channels
//      of node B are started late, so node A's senders stall on full receive
//      buffers; for a while single bit errors are put on the wires;
//   3. when all 48 done interrupts are up, node B's core port streams the
//      received region back and every beat is compared with what node A held;
//      node A's received region is checked the same way;
//      a single bit error is put on one EDRAM row of node B on the way;
//   4. a supervisor word goes from A to B with its interrupt and release;
//   5. node A's core writes part of one 64-bit word of a row that is in no
//      row buffer (read-modify-write) and reads the line back.
// Each mechanism (row-buffer hit, demand miss, prefetch, core stall on a miss,
// core write, bus-side DMA access, DMA chaining, sender stall on full receive
// buffers, NACK and retry, header correction, supervisor interrupt, EDRAM
// error correction, read-modify-write) is counted
// and must have happened at least once.
module tb_qcdoc_node;
  import qcdoc_pkg::*;

  localparam int unsigned NL   = NLINK;
  localparam int unsigned ROWS = 32768;
  localparam int unsigned RW   = 15;
  localparam int unsigned NW   = 16;       // words per link and direction

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

  // ---------------- two nodes ----------------

  logic c_rreq [2], c_rgnt [2], c_rvalid [2], c_rlast [2], c_wreq [2], c_wgnt [2];
  logic [RW+1:0]  c_raddr [2];
  logic [RW+2:0]  c_waddr [2];
  logic [127:0]   c_rdata [2], c_wdata [2];
  logic [15:0]    c_wbe [2];
  logic           e_req [2], e_we [2], e_gnt [2], e_rvalid [2];
  logic [RW-1:0]  e_row [2];
  logic [1023:0]  e_wdata [2], e_rdata [2];
  logic [127:0]   e_wbe [2], e_wcheck [2], e_rcheck [2], err_cmask [2];
  logic           err_en [2];
  logic [RW-1:0]  err_row [2];
  logic [1023:0]  err_dmask [2];
  logic           ev_ecc_fix [2], ev_ecc_err [2];
  logic [7:0]     tx_byte [2][NL], rx_byte [2][NL];
  logic           tx_take [2][NL], rx_valid [2][NL];
  logic           cfg_we [2];
  logic [11:0]    cfg_addr [2];
  logic [63:0]    cfg_wdata [2], cfg_rdata [2];
  logic [NL-1:0]  irq_sup [2], ev_retry [2], ev_nack [2], ev_hdr_fixed [2];
  logic [2*NL-1:0] irq_done [2];
  logic           ev_hit [2], ev_miss [2], ev_prefetch [2];

  for (genvar n = 0; n < 2; n++) begin : g_node
    qcdoc_node u_node (
      .clk, .rst_n,
      .c_rreq(c_rreq[n]), .c_raddr(c_raddr[n]), .c_rgnt(c_rgnt[n]), .c_rvalid(c_rvalid[n]),
      .c_rdata(c_rdata[n]), .c_rlast(c_rlast[n]),
      .c_wreq(c_wreq[n]), .c_waddr(c_waddr[n]), .c_wdata(c_wdata[n]), .c_wbe(c_wbe[n]), .c_wgnt(c_wgnt[n]),
      .e_req(e_req[n]), .e_we(e_we[n]), .e_row(e_row[n]), .e_wdata(e_wdata[n]), .e_wbe(e_wbe[n]),
      .e_gnt(e_gnt[n]), .e_rvalid(e_rvalid[n]), .e_rdata(e_rdata[n]),
      .e_wcheck(e_wcheck[n]), .e_rcheck(e_rcheck[n]),
      .tx_byte(tx_byte[n]), .tx_take(tx_take[n]), .rx_byte(rx_byte[n]), .rx_valid(rx_valid[n]),
      .cfg_we(cfg_we[n]), .cfg_addr(cfg_addr[n]), .cfg_wdata(cfg_wdata[n]), .cfg_rdata(cfg_rdata[n]),
      .irq_sup(irq_sup[n]), .irq_done(irq_done[n]),
      .ev_retry(ev_retry[n]), .ev_nack(ev_nack[n]), .ev_hdr_fixed(ev_hdr_fixed[n]),
      .ev_hit(ev_hit[n]), .ev_miss(ev_miss[n]), .ev_prefetch(ev_prefetch[n]),
      .ev_ecc_fix(ev_ecc_fix[n]), .ev_ecc_err(ev_ecc_err[n]));
    edram_model #(.ROWS(ROWS), .LAT(6)) u_mem (
      .clk, .rst_n, .e_req(e_req[n]), .e_we(e_we[n]), .e_row(e_row[n]), .e_wdata(e_wdata[n]),
      .e_wbe(e_wbe[n]), .e_gnt(e_gnt[n]), .e_rvalid(e_rvalid[n]), .e_rdata(e_rdata[n]),
      .e_wcheck(e_wcheck[n]), .e_rcheck(e_rcheck[n]),
      .err_en(err_en[n]), .err_row(err_row[n]), .err_dmask(err_dmask[n]), .err_cmask(err_cmask[n]));
  end

  // ---------------- wires between the nodes ----------------
  int strobe = 0;
  bit inject = 0;
  int cool = 0;
  always_comb for (int n = 0; n < 2; n++) for (int l = 0; l < NL; l++) tx_take[n][l] = (strobe == 0);
  always_ff @(posedge clk) begin
    int fl;
    logic [7:0] f;
    strobe <= (strobe == 7) ? 0 : strobe + 1;
    f  = '0;
    fl = -1;
    if (inject && strobe == 0) begin
      if (cool == 0 && $urandom_range(0, 19) == 0) begin
        fl = $urandom_range(0, NL - 1);
        f[$urandom_range(0, 7)] = 1'b1;
        cool <= 14;
      end else if (cool > 0) cool <= cool - 1;
    end
    for (int l = 0; l < NL; l++) begin
      rx_byte[1][l ^ 1]  <= tx_byte[0][l] ^ ((fl == l) ? f : 8'h00);
      rx_byte[0][l ^ 1]  <= tx_byte[1][l];
      rx_valid[1][l ^ 1] <= tx_take[0][l] && rst_n;
      rx_valid[0][l ^ 1] <= tx_take[1][l] && rst_n;
    end
  end

  // ---------------- expected memory contents ----------------
  function automatic logic [127:0] init_beat(input int unsigned b);
    return {b ^ 32'hDEAD_0000, b * 32'd2654435761, ~b, b};
  endfunction
  logic [127:0] written [int unsigned];          // node A core writes
  function automatic logic [63:0] a_word(input int unsigned w);
    logic [127:0] b;
    b = written.exists(w / 2) ? written[w / 2] : init_beat(w / 2);
    return (w % 2) ? b[127:64] : b[63:0];
  endfunction
  function automatic logic [63:0] b_word(input int unsigned w);
    logic [127:0] b;
    b = init_beat(w / 2);
    return (w % 2) ? b[127:64] : b[63:0];
  endfunction

  // word l-th source sequence: instr 0 = 2 blocks of 4 words, stride 8,
  // instr 1 = 8 contiguous words
  function automatic int src_word(input int l, input int i);
    int base0, base1;
    base0 = 4096 + 64 * l;
    base1 = 4096 + 64 * l + 32;
    return (i < 8) ? base0 + (i / 4) * 8 + (i % 4) : base1 + (i - 8);
  endfunction
  function automatic int dst_word(input int l); return 200000 + NW * l; endfunction

  // ---------------- mechanism counters ----------------
  int n_hit = 0, n_miss = 0, n_pf = 0, n_cstall = 0, n_cwr = 0, n_plb = 0, n_chain = 0;
  logic [1:0] prev_idx = '0;
  int n_fullstall = 0, n_retry = 0, n_nack = 0, n_fix = 0, n_sup = 0;
  int n_ecc_fix = 0, n_ecc_err = 0, n_rmw = 0;
  always_ff @(posedge clk) begin
    begin
      n_hit    <= n_hit + int'(ev_hit[0]) + int'(ev_hit[1]);
      n_miss   <= n_miss + int'(ev_miss[0]) + int'(ev_miss[1]);
      n_pf     <= n_pf + int'(ev_prefetch[0]) + int'(ev_prefetch[1]);
      n_cstall <= n_cstall + int'(c_rreq[0] && !c_rgnt[0]) + int'(c_rreq[1] && !c_rgnt[1]);
      n_cwr    <= n_cwr + int'(c_wreq[0] && c_wgnt[0]) + int'(c_wreq[1] && c_wgnt[1]);
      n_plb    <= n_plb + int'(g_node[0].u_node.p_gnt) + int'(g_node[1].u_node.p_gnt);
      n_retry  <= n_retry + $countones(ev_retry[0]) + $countones(ev_retry[1]);
      n_nack   <= n_nack + $countones(ev_nack[0]) + $countones(ev_nack[1]);
      n_fix    <= n_fix + $countones(ev_hdr_fixed[0]) + $countones(ev_hdr_fixed[1]);
      n_ecc_fix <= n_ecc_fix + int'(ev_ecc_fix[0]) + int'(ev_ecc_fix[1]);
      n_ecc_err <= n_ecc_err + int'(ev_ecc_err[0]) + int'(ev_ecc_err[1]);
      n_rmw    <= n_rmw + int'(e_req[0] && e_gnt[0] && g_node[0].u_node.u_edc.acc == g_node[0].u_node.u_edc.A_RMW)
                        + int'(e_req[1] && e_gnt[1] && g_node[1].u_node.u_edc.acc == g_node[1].u_node.u_edc.A_RMW);
    end
    // node A, link 0 sender: all three data buffers of the neighbour in use
    if (&g_node[0].u_node.u_scu.g_link[0].u_link.slot_busy[2:0]
        && g_node[0].u_node.u_scu.g_link[0].u_link.snd_valid)
      n_fullstall <= n_fullstall + 1;
    // chaining: send channel 0 of node A moves from instruction 0 to 1
    if (g_node[0].u_node.u_scu.g_link[0].u_snd.busy
        && g_node[0].u_node.u_scu.g_link[0].u_snd.cur_idx == 2'd1
        && g_node[0].u_node.u_scu.g_link[0].u_snd.off == 0
        && g_node[0].u_node.u_scu.g_link[0].u_snd.blk_cnt == 0
        && prev_idx == 2'd0)
      n_chain <= n_chain + 1;
    prev_idx <= g_node[0].u_node.u_scu.g_link[0].u_snd.cur_idx;
  end

  // ---------------- drivers ----------------
  task automatic cfg(input int n, input logic [11:0] a, input logic [63:0] d);
    @(negedge clk);
    cfg_we[n] = 1; cfg_addr[n] = a; cfg_wdata[n] = d;
    @(negedge clk);
    cfg_we[n] = 0;
  endtask

  task automatic instr(input int n, input int ch, input int idx, input int base,
                       input int blk, input int nblk, input int stride, input int nxt, input bit last);
    cfg(n, {2'd0, 5'(ch), 2'(idx), 3'd0}, 64'(base));
    cfg(n, {2'd0, 5'(ch), 2'(idx), 3'd1}, 64'(blk));
    cfg(n, {2'd0, 5'(ch), 2'(idx), 3'd2}, 64'(nblk));
    cfg(n, {2'd0, 5'(ch), 2'(idx), 3'd3}, 64'(stride));
    cfg(n, {2'd0, 5'(ch), 2'(idx), 3'd4}, {61'd0, last, 2'(nxt)});
  endtask

  task automatic core_write(input int n, input int beat, input logic [127:0] d,
                            input logic [15:0] be = '1);
    @(negedge clk);
    c_wreq[n] = 1; c_waddr[n] = (RW+3)'(beat); c_wdata[n] = d; c_wbe[n] = be;
    @(posedge clk iff c_wgnt[n]);
    @(negedge clk);
    c_wreq[n] = 0;
  endtask

  // read nlines lines starting at line l0 on node n, compare against exp[]
  logic [127:0] exp_q [2][$];
  int           bad_beats = 0, got_beats [2];
  task automatic core_stream(input int n, input int l0, input int nlines);
    for (int k = 0; k < nlines; k++) begin
      @(negedge clk);
      c_rreq[n] = 1; c_raddr[n] = (RW+2)'(l0 + k);
      @(posedge clk iff c_rgnt[n]);
    end
    @(negedge clk);
    c_rreq[n] = 0;
  endtask
  always_ff @(posedge clk) begin
    for (int n = 0; n < 2; n++)
      if (c_rvalid[n]) begin
        logic [127:0] e;
        e = exp_q[n].size() > 0 ? exp_q[n].pop_front() : ~c_rdata[n];
        check(c_rdata[n] == e, $sformatf("node %0d core beat: %h expected %h", n, c_rdata[n], e));
        got_beats[n] <= got_beats[n] + 1;
      end
  end

  initial begin
    int t0, t1;
    for (int n = 0; n < 2; n++) begin
      c_rreq[n] = 0; c_wreq[n] = 0; c_raddr[n] = '0; c_waddr[n] = '0; c_wdata[n] = '0; c_wbe[n] = '0;
      cfg_we[n] = 0; cfg_addr[n] = '0; cfg_wdata[n] = '0; got_beats[n] = 0;
      err_en[n] = 0; err_row[n] = '0; err_dmask[n] = '0; err_cmask[n] = '0;
    end
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // 1. node A core writes part of its send regions (word 4096.. = beat 2048..)
    for (int b = 0; b < 32; b++) begin
      logic [127:0] d;
      d = {$urandom, $urandom, $urandom, $urandom};
      written[2048 + b] = d;
      core_write(0, 2048 + b, d);
    end

    // 2. program both nodes: send on l, receive (from the neighbour's l^1) on NL+l
    for (int n = 0; n < 2; n++)
      for (int l = 0; l < NL; l++) begin
        instr(n, l, 0, 4096 + 64 * l, 4, 2, 8, 1, 1'b0);
        instr(n, l, 1, 4096 + 64 * l + 32, 8, 1, 0, 0, 1'b1);
        instr(n, NL + (l ^ 1), 2, dst_word(l), NW, 1, 0, 0, 1'b1);
      end
    inject = 1;
    for (int l = 0; l < NL; l++) begin
      cfg(0, {2'd1, 5'd0, 5'(l)}, 64'd0);            // A sends
      cfg(1, {2'd1, 5'd0, 5'(l)}, 64'd0);            // B sends
      cfg(0, {2'd1, 5'd0, 5'(NL + l)}, 64'd2);       // A receives
    end
    repeat (1500) @(posedge clk);                    // B's receivers start late
    for (int l = 0; l < NL; l++) cfg(1, {2'd1, 5'd0, 5'(NL + l)}, 64'd2);
    t0 = $time;
    wait (&irq_done[0] && &irq_done[1]);
    inject = 0;
    t1 = $time;
    $display("exchange finished %0d cycles after the last start", (t1 - t0) / 10);

    // 3. stream the received regions back through the core ports; one data
    //    bit of node B's first received row reads back flipped
    err_row[1] = RW'(dst_word(0) / 16);
    err_dmask[1][3*64 + 17] = 1'b1;
    err_en[1] = 1;
    for (int l = 0; l < NL; l++)
      for (int i = 0; i < NW; i += 2) begin
        exp_q[1].push_back({a_word(src_word(l, i + 1)), a_word(src_word(l, i))});
        exp_q[0].push_back({b_word(src_word(l, i + 1)), b_word(src_word(l, i))});
      end
    fork
      core_stream(1, dst_word(0) / 4, NL * NW / 4);
      core_stream(0, dst_word(0) / 4, NL * NW / 4);
    join
    repeat (10) @(posedge clk);
    check(got_beats[0] == NL * NW / 2 && got_beats[1] == NL * NW / 2, "all received beats read back");
    err_en[1] = 0;

    // 4. supervisor word A link 0 -> B link 1
    cfg(0, {2'd2, 5'd0, 1'b0, 4'd0}, 64'h0BAD_CAFE_0000_0001);
    wait (irq_sup[1][1]);
    n_sup++;
    @(negedge clk);
    cfg_addr[1] = {2'd2, 5'd0, 1'b0, 4'd1};
    #1 check(cfg_rdata[1] == 64'h0BAD_CAFE_0000_0001, "supervisor word A->B");
    cfg(1, {2'd2, 5'd0, 1'b1, 4'd1}, 64'd0);
    check(!irq_sup[1][1], "supervisor interrupt released");

    // 5. partial-word core write to an unbuffered row, then read the line
    begin
      logic [127:0] v;
      v = init_beat(60000);
      v[71:64] = 8'hA5;
      exp_q[0].push_back(v);
      exp_q[0].push_back(init_beat(60001));
      core_write(0, 60000, {56'd0, 8'hA5, 64'd0}, 16'h0100);
      core_stream(0, 30000, 1);
      repeat (20) @(posedge clk);
      check(got_beats[0] == NL * NW / 2 + 2, "partial write read back");
    end

    $display("hits=%0d misses=%0d prefetches=%0d core_stall_cycles=%0d core_writes=%0d bus_accesses=%0d",
             n_hit, n_miss, n_pf, n_cstall, n_cwr, n_plb);
    $display("chains=%0d full_buffer_stall_cycles=%0d nacks=%0d retries=%0d header_fixes=%0d supervisor=%0d",
             n_chain, n_fullstall, n_nack, n_retry, n_fix, n_sup);
    $display("edram_corrections=%0d edram_uncorrectable=%0d read_modify_writes=%0d", n_ecc_fix, n_ecc_err, n_rmw);
    check(n_hit > 0,       "row buffer hits happened");
    check(n_miss > 0,      "demand misses happened");
    check(n_pf > 0,        "prefetches happened");
    check(n_cstall > 0,    "core stalled on a miss");
    check(n_cwr == 33,     "core writes");
    check(n_plb == 4 * NL * NW, "every DMA word crossed the bus once");
    check(n_chain > 0,     "DMA chaining happened");
    check(n_fullstall > 0, "sender stalled on full receive buffers");
    check(n_nack > 0,      "NACKs happened");
    check(n_retry == n_nack, "one retry per NACK");
    check(n_fix > 0,       "header corrections happened");
    check(n_sup > 0,       "supervisor interrupt happened");
    check(n_ecc_fix > 0,   "EDRAM single bit error corrected");
    check(n_ecc_err == 0,  "no uncorrectable EDRAM error");
    check(n_rmw == 1,      "one read-modify-write");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
