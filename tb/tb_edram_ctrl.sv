// tb_edram_ctrl: the EDRAM controller (full 4 MByte size) on the behavioural
// EDRAM macro model.
//
// 1. A sequential stream of 256 cache lines: every beat is checked and the
//    stream must run at one 128-bit beat per cycle once the first row has
//    arrived (2 cycles per line, plus the first row access).
// 2. Random traffic confined to a few rows so that hits, misses, prefetches
//    and write merges into the row buffers all happen: core line reads, core
//    beat writes and PLB reads and writes with random byte enables, all at
//    once. A shadow copy in the testbench predicts every read. Random byte
//    enables make many writes cover only part of a 64-bit word, so the
//    read-modify-write path must be taken.
// 3. Error correction: the EDRAM model is told to flip bits on the way out of
//    one row. A single flipped data bit or check bit must be corrected on
//    core line reads, PLB reads and the read half of a read-modify-write;
//    two flipped bits in one word must be reported.
module tb_edram_ctrl;
  import qcdoc_pkg::*;

  localparam int unsigned ROWS = 32768;
  localparam int unsigned RW   = $clog2(ROWS);

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

  logic               c_rreq, c_rgnt, c_rvalid, c_rlast, c_wreq, c_wgnt;
  logic [RW+1:0]      c_raddr;
  logic [RW+2:0]      c_waddr, p_addr;
  logic [127:0]       c_rdata, c_wdata, p_wdata, p_rdata;
  logic [15:0]        c_wbe, p_be;
  logic               p_req, p_we, p_gnt, p_rvalid;
  logic               e_req, e_we, e_gnt, e_rvalid;
  logic [RW-1:0]      e_row;
  logic [1023:0]      e_wdata, e_rdata;
  logic [127:0]       e_wbe, e_wcheck, e_rcheck;
  logic               ev_hit, ev_miss, ev_prefetch, ev_ecc_fix, ev_ecc_err;
  logic               err_en;
  logic [RW-1:0]      err_row;
  logic [1023:0]      err_dmask;
  logic [127:0]       err_cmask;

  edram_ctrl dut (.*);
  edram_model #(.ROWS(ROWS), .LAT(6)) u_mem (
    .clk, .rst_n, .e_req, .e_we, .e_row, .e_wdata, .e_wbe, .e_gnt, .e_rvalid, .e_rdata,
    .e_wcheck, .e_rcheck, .err_en, .err_row, .err_dmask, .err_cmask);

  // reference: initial content formula and written beats
  function automatic logic [127:0] init_beat(input int unsigned b);
    return {b ^ 32'hDEAD_0000, b * 32'd2654435761, ~b, b};
  endfunction
  logic [127:0] shadow [int unsigned];
  function automatic logic [127:0] expect_beat(input int unsigned b);
    return shadow.exists(b) ? shadow[b] : init_beat(b);
  endfunction

  // drivers
  int unsigned rd_lines[$];        // lines still to request
  logic [127:0] exp_beats[$];      // expected core beats
  logic [127:0] exp_plb[$];        // expected PLB read data
  int n_hit = 0, n_miss = 0, n_pf = 0, n_beats = 0, n_merge = 0;
  int n_rmw = 0, n_fix = 0, n_err = 0;
  bit plb_unchecked = 0;     // PLB data known to be uncorrectable
  int first_beat = -1, last_beat = 0, cyc = 0;

  assign c_rreq  = rst_n && rd_lines.size() > 0;
  assign c_raddr = (RW+2)'(rd_lines.size() > 0 ? rd_lines[0] : 0);

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (c_rgnt) begin
      int unsigned l;
      l = rd_lines.pop_front();
      exp_beats.push_back(expect_beat(2*l));
      exp_beats.push_back(expect_beat(2*l + 1));
    end
    if (c_rvalid) begin
      logic [127:0] e;
      e = exp_beats.size() > 0 ? exp_beats.pop_front() : ~c_rdata;
      check(c_rdata == e, $sformatf("core beat %0d: %h, expected %h", n_beats, c_rdata, e));
      check(c_rlast == (exp_beats.size() % 2 == 0), "c_rlast on the second beat");
      n_beats <= n_beats + 1;
      if (first_beat < 0) first_beat <= cyc;
      last_beat <= cyc;
    end
    if (c_wreq && c_wgnt) begin
      logic [127:0] v;
      v = expect_beat(int'(c_waddr));
      for (int i = 0; i < 16; i++) if (c_wbe[i]) v[i*8 +: 8] = c_wdata[i*8 +: 8];
      shadow[int'(c_waddr)] = v;
    end
    if (p_req && p_gnt) begin
      if (p_we) begin
        logic [127:0] v;
        v = expect_beat(int'(p_addr));
        for (int i = 0; i < 16; i++) if (p_be[i]) v[i*8 +: 8] = p_wdata[i*8 +: 8];
        shadow[int'(p_addr)] = v;
      end else exp_plb.push_back(expect_beat(int'(p_addr)));
    end
    if (p_rvalid) begin
      logic [127:0] e;
      e = exp_plb.size() > 0 ? exp_plb.pop_front() : ~p_rdata;
      if (!plb_unchecked)
        check(p_rdata == e, $sformatf("PLB read: %h, expected %h", p_rdata, e));
    end
    n_hit  <= n_hit  + int'(ev_hit);
    n_miss <= n_miss + int'(ev_miss);
    n_pf   <= n_pf   + int'(ev_prefetch);
    n_fix  <= n_fix  + int'(ev_ecc_fix);
    n_err  <= n_err  + int'(ev_ecc_err);
    if (e_req && e_gnt && dut.acc == dut.A_RMW) n_rmw <= n_rmw + 1;
    if (e_req && e_we && e_gnt && ((dut.buf_vld[0] && dut.buf_row[0] == e_row) ||
                                   (dut.buf_vld[1] && dut.buf_row[1] == e_row)))
      n_merge <= n_merge + 1;
  end

  // random writers (phase 2)
  bit random_on = 0;
  int unsigned base_row = 100;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c_wreq <= 0; p_req <= 0;
    end else begin
      if (c_wreq && c_wgnt) c_wreq <= 0;
      else if (!c_wreq && random_on && $urandom_range(0, 9) == 0) begin
        c_wreq  <= 1;
        c_waddr <= (RW+3)'(base_row * 8 + $urandom_range(0, 31));
        c_wdata <= {$urandom, $urandom, $urandom, $urandom};
        c_wbe   <= 16'($urandom);
      end
      if (p_req && p_gnt) p_req <= 0;
      else if (!p_req && random_on && $urandom_range(0, 7) == 0) begin
        p_req   <= 1;
        p_we    <= $urandom_range(0, 1) == 1;
        p_addr  <= (RW+3)'(base_row * 8 + $urandom_range(0, 31));
        p_wdata <= {$urandom, $urandom, $urandom, $urandom};
        p_be    <= 16'($urandom);
      end
    end
  end

  task automatic plb_read(input int unsigned b);
    @(negedge clk);
    p_req = 1; p_we = 0; p_addr = (RW+3)'(b);
    @(posedge clk iff p_gnt);
    @(negedge clk) p_req = 0;
    wait (exp_plb.size() == 0);
  endtask

  task automatic core_write(input int unsigned b, input logic [127:0] d, input logic [15:0] be);
    @(negedge clk);
    c_wreq = 1; c_waddr = (RW+3)'(b); c_wdata = d; c_wbe = be;
    @(posedge clk iff c_wgnt);
    @(negedge clk) c_wreq = 0;
  endtask

  initial begin
    int t0, nl, f0, r0;
    err_en = 0; err_row = '0; err_dmask = '0; err_cmask = '0;
    c_wdata = '0; c_waddr = '0; c_wbe = '0; p_addr = '0; p_wdata = '0; p_be = '0; p_we = 0;
    #1 rst_n = 1'b0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // 1. sequential stream
    nl = 256;
    t0 = cyc;
    for (int l = 0; l < nl; l++) rd_lines.push_back(l + 40);
    wait (n_beats == 2 * nl);
    @(posedge clk);
    $display("stream: %0d lines, first beat after %0d cycles, beats %0d..%0d",
             nl, first_beat - t0, first_beat, last_beat);
    check(last_beat - first_beat + 1 == 2 * nl, $sformatf("stream gaps: %0d cycles for %0d beats",
          last_beat - first_beat + 1, 2 * nl));
    check(first_beat - t0 <= 12, "first row latency");
    check(n_miss == 1, $sformatf("one demand miss in a sequential stream, saw %0d", n_miss));

    // 2. random mixed traffic over 4 rows
    random_on = 1;
    for (int k = 0; k < 3000; k++) rd_lines.push_back(base_row * 4 + $urandom_range(0, 15));
    wait (rd_lines.size() == 0 && exp_beats.size() == 0);
    random_on = 0;
    repeat (50) @(posedge clk);
    check(exp_plb.size() == 0, "all PLB reads answered");
    $display("hits=%0d misses=%0d prefetches=%0d merges=%0d beats=%0d", n_hit, n_miss, n_pf, n_merge, n_beats);
    check(n_pf > 0, "prefetches happened");
    check(n_miss > 1, "misses happened");
    check(n_merge > 0, "writes merged into row buffers");
    check(n_rmw > 0, $sformatf("read-modify-writes happened: %0d", n_rmw));
    check(n_fix == 0 && n_err == 0, "no ECC events without faults");

    // 3a. one data bit flipped in word 5 of row 200: core line reads
    err_en = 1; err_row = RW'(200);
    err_dmask = '0; err_dmask[5*64 + 37] = 1'b1;
    f0 = n_fix;
    for (int l = 0; l < 4; l++) rd_lines.push_back(200 * 4 + l);
    wait (rd_lines.size() == 0 && exp_beats.size() == 0);
    repeat (20) @(posedge clk);
    check(n_fix > f0, "single data bit error corrected on a core read");
    // 3b. one check bit flipped in word 3: PLB read of beat 1 of row 200
    err_dmask = '0; err_cmask = '0; err_cmask[3*8 + 6] = 1'b1;
    f0 = n_fix;
    plb_read(200 * 8 + 1);
    check(n_fix > f0, "single check bit error seen on a PLB read");
    // 3c. partial write into row 300 whose old word has a flipped bit
    err_row = RW'(300); err_cmask = '0; err_dmask = '0; err_dmask[2*128 + 64 + 3] = 1'b1;
    r0 = n_rmw; f0 = n_fix;
    core_write(300 * 8 + 2, {4{32'h600D_F00D}}, 16'h0F00);
    check(n_rmw == r0 + 1, "partial write to an unbuffered row reads first");
    check(n_fix > f0, "error corrected on the read of a read-modify-write");
    err_en = 0;
    plb_read(300 * 8 + 2);
    // 3d. two bits of one word flipped: reported
    err_en = 1; err_row = RW'(400); err_cmask = '0;
    err_dmask = '0; err_dmask[9] = 1'b1; err_dmask[50] = 1'b1;
    f0 = n_err;
    plb_unchecked = 1;
    plb_read(400 * 8);
    plb_unchecked = 0;
    err_en = 0;
    check(n_err == f0 + 1, "double bit error reported");
    $display("ecc: fixed=%0d reported=%0d rmw=%0d", n_fix, n_err, n_rmw);

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
