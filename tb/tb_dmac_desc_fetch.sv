// tb_dmac_desc_fetch -- self-checking test of the request logic.
// Descriptor chains are written into a behavioural memory (5 cycles latency)
// by backdoor and launched one after another: a contiguous chain (all
// prefetches hit), a scattered chain (every prefetch misses), a mixed chain
// and single-descriptor chains. The AR channel is throttled at random and the
// descriptor sink applies random back-pressure. Checked: every descriptor
// arrives once, in chain order, with all fields; the hit/miss counts match the
// layout; no more descriptors are fetched than there are free in-flight places
// (a random consumer retires them); every mispredicted 'next' is on AR in
// the cycle it arrives (unless a held speculative request occupies AR or no
// in-flight place is free); the logic ends idle.
//
// A second phase retires handed-over descriptors slowly, so that the
// in-flight limit rather than the slot count bounds prefetching.
// Hit/miss handling and same-cycle reissue are the behaviour the DMAC is
// specified to have; the credit rule checked here is this design's own.
module tb_dmac_desc_fetch;
  import dmac_pkg::*;
  localparam int unsigned NUM_SPEC = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic chain_valid, chain_ready;
  addr_t chain_addr;
  mst_ax_t ar;
  logic ar_valid, ar_ready, r_ready;
  logic desc_valid, desc_ready;
  fetched_desc_t desc;
  logic busy, hit, miss, sissue;
  mst_req_t mreq;
  mst_rsp_t mrsp;
  logic gate;

  dmac_desc_fetch #(.NUM_SPEC(NUM_SPEC)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .chain_valid_i(chain_valid), .chain_ready_o(chain_ready), .chain_addr_i(chain_addr),
    .ar_o(ar), .ar_valid_o(ar_valid), .ar_ready_i(ar_ready),
    .r_i(mrsp.r), .r_valid_i(mrsp.r_valid), .r_ready_o(r_ready),
    .desc_valid_o(desc_valid), .desc_ready_i(desc_ready), .desc_o(desc),
    .inflight_i(3'(inflight)), .busy_o(busy), .spec_hit_o(hit), .spec_miss_o(miss), .spec_issue_o(sissue));

  always_comb begin
    mreq = '0;
    mreq.ar       = ar;
    mreq.ar_valid = ar_valid && gate;
    mreq.r_ready  = r_ready;
  end
  assign ar_ready = mrsp.ar_ready && gate;

  axi_mem_model #(.req_t(mst_req_t), .rsp_t(mst_rsp_t), .IDW(MST_ID_W), .LATENCY(5)) i_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // expected descriptor stream
  fetched_desc_t exp_q[$];
  int n_hit = 0, n_miss = 0, n_spec = 0, n_reissue_ok = 0, n_reissue = 0;

  function automatic fetched_desc_t write_desc(addr_t a, addr_t nxt);
    fetched_desc_t f;
    logic [31:0] len, cfg;
    len = $urandom; cfg = $urandom;
    f.desc_addr   = a;
    f.irq         = cfg[0];
    f.xfer.length = len;
    f.xfer.opts   = cfg[31:1];
    f.xfer.src    = {$urandom, $urandom};
    f.xfer.dst    = {$urandom, $urandom};
    i_mem.poke64(a,      {cfg, len});
    i_mem.poke64(a + 8,  nxt);
    i_mem.poke64(a + 16, f.xfer.src);
    i_mem.poke64(a + 24, f.xfer.dst);
    return f;
  endfunction

  // builds a chain from a list of addresses; returns expected hits
  function automatic int build_chain(addr_t addrs[$]);
    int hits = 0;
    for (int i = 0; i < addrs.size(); i++) begin
      addr_t nxt;
      nxt = (i + 1 < addrs.size()) ? addrs[i+1] : END_OF_CHAIN;
      exp_q.push_back(write_desc(addrs[i], nxt));
      if (i + 1 < addrs.size() && addrs[i+1] == addrs[i] + 32) hits++;
    end
    return hits;
  endfunction

  // launches: driven at the falling edge, handshake at the next rising edge
  addr_t launch_q[$];
  initial begin
    chain_valid = 0;
    chain_addr  = '0;
    forever begin
      @(negedge clk);
      if (chain_valid && chain_ready_at_pos) chain_valid = 0;
      if (!chain_valid && launch_q.size() != 0) begin
        chain_valid = 1;
        chain_addr  = launch_q.pop_front();
      end
    end
  end
  logic chain_ready_at_pos;
  always_ff @(posedge clk) chain_ready_at_pos <= chain_ready;

  // sink and scoreboard
  int got = 0, inflight = 0, max_inflight = 0;
  bit slow = 0;
  int p1_hits = 0;
  always_ff @(posedge clk) begin
    desc_ready <= ($urandom_range(0, 3) != 0);
    gate       <= ($urandom_range(0, 4) != 0);
    if (rst_n) begin
      // descriptors handed over stay "in flight" until retired at random
      if (slow) inflight <= inflight + int'(desc_valid && desc_ready) - int'(inflight > 0 && $urandom_range(0, 9) == 0);
      else      inflight <= 0;
      if (inflight > max_inflight) max_inflight <= inflight;
      if (desc_valid && desc_ready) begin
        fetched_desc_t e;
        got++;
        check(inflight < 4, "a fetched descriptor never exceeds the in-flight places");
        if (exp_q.size() == 0) check(0, "unexpected descriptor");
        else begin
          e = exp_q.pop_front();
          check(desc == e, $sformatf("descriptor %0d: got addr %h len %h, exp addr %h len %h",
                got, desc.desc_addr, desc.xfer.length, e.desc_addr, e.xfer.length));
        end
      end
      if (hit) n_hit++;
      if (miss) n_miss++;
      if (sissue) n_spec++;
      // zero-latency reissue on a mispredicted next field
      if (dut.is_miss && !dut.hold_q && dut.credit_miss) begin
        n_reissue++;
        if (ar_valid && ar.addr == mrsp.r.data) n_reissue_ok++;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_t c1[$], c2[$], c3[$], c4[$];
    int eh = 0, total;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // contiguous chain of 12
    for (int i = 0; i < 12; i++) c1.push_back(64'h1_0000 + 64'(32 * i));
    // scattered chain of 10
    for (int i = 0; i < 10; i++) c2.push_back(64'h2_0000 + 64'(i * 4096 + 32 * $urandom_range(1, 60)));
    // mixed: runs of contiguous descriptors with jumps
    for (int i = 0; i < 16; i++) c3.push_back(64'h8_0000 + 64'((i / 4) * 8192 + (i % 4) * 32));
    eh += build_chain(c1);
    eh += build_chain(c2);
    eh += build_chain(c3);
    // three single-descriptor chains
    for (int i = 0; i < 3; i++) begin
      c4.delete();
      c4.push_back(64'h40_0000 + 64'(i) * 64'h1000);
      void'(build_chain(c4));
    end
    total = exp_q.size();
    @(negedge clk);
    launch_q.push_back(c1[0]);
    launch_q.push_back(c2[0]);
    launch_q.push_back(c3[0]);
    for (int i = 0; i < 3; i++) launch_q.push_back(64'h40_0000 + 64'(i) * 64'h1000);
    while (got < total) @(posedge clk);
    repeat (100) @(posedge clk);
    check(exp_q.size() == 0, "all descriptors delivered");
    // phase 2: the consumer retires slowly, the in-flight places run out
    begin
      addr_t c5[$];
      p1_hits = n_hit;
      for (int i = 0; i < 16; i++) c5.push_back(64'h60_0000 + 64'(32 * i));
      void'(build_chain(c5));
      total = total + 16;
      slow = 1;
      launch_q.push_back(c5[0]);
      while (got < total) @(posedge clk);
      repeat (100) @(posedge clk);
      slow = 0;
    end
    check(got == total, $sformatf("descriptor count %0d vs %0d", got, total));
    check(p1_hits == eh, $sformatf("speculation hits %0d, expected %0d", p1_hits, eh));
    check(n_hit > p1_hits, "speculation hits with few in-flight places");
    check(n_miss > 0, "mispredictions happened");
    check(n_spec >= n_hit, "speculative reads issued");
    check(n_reissue > 0 && n_reissue_ok == n_reissue,
          $sformatf("zero-latency reissue %0d of %0d", n_reissue_ok, n_reissue));
    check(!busy, "idle at the end");
    check(max_inflight == 4, $sformatf("in-flight places all used (max %0d)", max_inflight));
    check(launch_q.size() == 0 && !chain_valid, "all chains taken");
    $display("hits=%0d misses=%0d spec_issued=%0d reissues=%0d", n_hit, n_miss, n_spec, n_reissue);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
