// tb_scu_dma: a send channel and a receive channel of the SCU DMA, each on a
// small memory model in the testbench (random grant, reads answered in order
// three cycles after the grant).
//
// Both channels get the same chain of three block-strided instructions
// (0 -> 2 -> 1, the last one marked last). The testbench works out the word
// address sequence itself. The send channel must offer the memory words at
// those addresses, in that order; the receive channel must write a random word
// stream to exactly those addresses. busy/done and restart are checked too.
module tb_scu_dma;
  import qcdoc_pkg::*;

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

  // one memory model per channel
  function automatic word_t mem_init(input logic [MADDR_W-1:0] a);
    return {13'h1abc, a, 13'h0f0f, a};
  endfunction

  logic desc_we, start;
  logic [1:0] desc_idx, start_idx;
  desc_t desc_wdata;

  // send channel
  logic s_busy, s_done, s_req, s_we, s_gnt, s_rvalid, s_ov, s_or, s_ir_unused;
  logic [MADDR_W-1:0] s_addr;
  word_t s_wdata, s_rdata, s_od;
  scu_dma #(.SEND(1'b1)) u_snd (
    .clk, .rst_n, .desc_we, .desc_idx, .desc_wdata, .start, .start_idx,
    .busy(s_busy), .done(s_done),
    .m_req(s_req), .m_we(s_we), .m_addr(s_addr), .m_wdata(s_wdata), .m_gnt(s_gnt),
    .m_rvalid(s_rvalid), .m_rdata(s_rdata),
    .out_valid(s_ov), .out_data(s_od), .out_ready(s_or),
    .in_valid(1'b0), .in_data('0), .in_ready(s_ir_unused));

  // receive channel
  logic r_busy, r_done, r_req, r_we, r_gnt, r_rvalid_unused, r_iv, r_ir, r_ov_unused;
  logic [MADDR_W-1:0] r_addr;
  word_t r_wdata, r_id, r_od_unused;
  assign r_rvalid_unused = 1'b0;
  scu_dma #(.SEND(1'b0)) u_rcv (
    .clk, .rst_n, .desc_we, .desc_idx, .desc_wdata, .start, .start_idx,
    .busy(r_busy), .done(r_done),
    .m_req(r_req), .m_we(r_we), .m_addr(r_addr), .m_wdata(r_wdata), .m_gnt(r_gnt),
    .m_rvalid(r_rvalid_unused), .m_rdata('0),
    .out_valid(r_ov_unused), .out_data(r_od_unused), .out_ready(1'b0),
    .in_valid(r_iv), .in_data(r_id), .in_ready(r_ir));

  // memory for the send channel: grant at random, data 3 cycles later
  logic [MADDR_W-1:0] pipe_a [3];
  logic [2:0]         pipe_v;
  assign s_gnt = s_req && gnt_rand;
  logic gnt_rand;
  always_ff @(posedge clk) begin
    gnt_rand <= $urandom_range(0, 2) != 0;
    pipe_v   <= {pipe_v[1:0], s_gnt && !s_we};
    pipe_a[0] <= s_addr;
    pipe_a[1] <= pipe_a[0];
    pipe_a[2] <= pipe_a[1];
  end
  assign s_rvalid = pipe_v[2];
  assign s_rdata  = mem_init(pipe_a[2]);

  // memory for the receive channel
  assign r_gnt = r_req && gnt_rand;

  // expected address sequence
  desc_t prog [NDESC];
  logic [MADDR_W-1:0] exp_addr[$];
  task automatic expand(input int first);
    int d;
    d = first;
    forever begin
      for (int b = 0; b < prog[d].nblk; b++)
        for (int w = 0; w < prog[d].blk_len; w++)
          exp_addr.push_back(prog[d].base + MADDR_W'(b) * prog[d].stride + MADDR_W'(w));
      if (prog[d].last) break;
      d = prog[d].next;
    end
  endtask

  logic [MADDR_W-1:0] snd_exp[$], rcv_exp[$];
  word_t              rcv_words[$];
  int n_out = 0, n_wr = 0;
  bit sink_on = 0;

  always_ff @(posedge clk) begin
    s_or <= sink_on && ($urandom_range(0, 3) != 0);
    if (s_ov && s_or) begin
      word_t e;
      e = snd_exp.size() > 0 ? mem_init(snd_exp.pop_front()) : ~s_od;
      check(s_od == e, $sformatf("send word %0d: %h expected %h", n_out, s_od, e));
      n_out <= n_out + 1;
    end
    if (r_req && r_gnt) begin
      logic [MADDR_W-1:0] ea;
      word_t ew;
      ea = rcv_exp.size() > 0 ? rcv_exp.pop_front() : ~r_addr;
      ew = rcv_words.size() > 0 ? rcv_words.pop_front() : ~r_wdata;
      check(r_we, "receive channel writes");
      check(r_addr == ea && r_wdata == ew,
            $sformatf("receive write %0d: %h@%h expected %h@%h", n_wr, r_wdata, r_addr, ew, ea));
      n_wr <= n_wr + 1;
    end
  end

  // word source for the receive channel
  int to_feed = 0;
  word_t feed_q[$];
  assign r_iv = to_feed > 0;
  always_ff @(posedge clk) begin
    if (r_iv && r_ir) begin
      rcv_words.push_back(r_id);
      to_feed <= to_feed - 1;
      r_id <= {$urandom, $urandom};
    end
  end

  task automatic load(input int idx, input desc_t d);
    @(negedge clk);
    desc_we = 1; desc_idx = 2'(idx); desc_wdata = d;
    prog[idx] = d;
    @(negedge clk);
    desc_we = 0;
  endtask

  initial begin
    int total;
    desc_we = 0; start = 0; desc_idx = 0; start_idx = 0; desc_wdata = '0;
    r_id = 64'h1111_2222_3333_4444;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    load(0, '{base: 19'd100,  blk_len: 16'd4, nblk: 16'd3, stride: 19'd10,   next: 2'd2, last: 1'b0});
    load(2, '{base: 19'd5000, blk_len: 16'd1, nblk: 16'd5, stride: 19'd1024, next: 2'd1, last: 1'b0});
    load(1, '{base: 19'd7,    blk_len: 16'd9, nblk: 16'd1, stride: 19'd0,    next: 2'd3, last: 1'b1});
    load(3, '{base: 19'd9999, blk_len: 16'd9, nblk: 16'd9, stride: 19'd9,    next: 2'd0, last: 1'b1});
    expand(0);
    total = exp_addr.size();
    check(total == 12 + 5 + 9, "testbench expansion");
    foreach (exp_addr[i]) begin snd_exp.push_back(exp_addr[i]); rcv_exp.push_back(exp_addr[i]); end

    @(negedge clk);
    start = 1; start_idx = 0;
    @(negedge clk);
    start = 0;
    check(s_busy && r_busy && !s_done && !r_done, "busy after start");
    sink_on = 1;
    to_feed = total + 5;   // more than the chain takes
    wait (s_done && r_done);
    repeat (20) @(posedge clk);
    check(n_out == total, $sformatf("send words: %0d of %0d", n_out, total));
    check(n_wr == total, $sformatf("receive writes: %0d of %0d", n_wr, total));
    check(!s_busy && !r_busy, "idle when done");
    check(!r_ir, "receive channel takes no word after its chain");

    // restart at instruction 1 alone
    exp_addr.delete();
    expand(1);
    foreach (exp_addr[i]) begin snd_exp.push_back(exp_addr[i]); rcv_exp.push_back(exp_addr[i]); end
    rcv_words.delete();
    n_out = 0; n_wr = 0;
    @(negedge clk);
    to_feed = 0;
    start = 1; start_idx = 1;
    @(negedge clk);
    start = 0;
    to_feed = 9;
    wait (s_done && r_done);
    repeat (20) @(posedge clk);
    check(n_out == 9 && n_wr == 9, "restart at instruction 1");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
