// tb_dmac_top -- end-to-end test of the DMAC at its default parameters.
//
// System: dmac_top (frontend + round-robin arbiter), the behavioural backend
// on arbiter port 0, and one AXI memory (13 cycles latency, like the DDR3
// set-up) behind the arbiter. Random descriptor chains are written into the
// memory by backdoor, with a mix of contiguous runs (prefetch hits) and jumps
// (mispredictions), random bus-aligned lengths and random IRQ flags, and
// launched through the register port in bursts larger than the launch queue.
// A second phase repeats this with an ideal (1-cycle) memory for the i-rf and
// rf-rb latencies. Checked: every destination holds the source bytes, every
// descriptor is marked with all ones, IRQ count, transfers done in order.
// Each mechanism of the design is counted and must occur at least once:
// prefetch hit, misprediction with same-cycle reissue, slots discarded at
// chain end, held speculative request, launch queue full, in-flight limit
// (a read held back for want of a free place),
// arbiter contention, IRQ.
//
// The end-to-end set-up (two manager ports through a round-robin arbiter into
// one latency-configurable memory, chains written by backdoor, launches
// through the register port) mirrors the evaluation set-up of the DMAC; the
// chain layouts and lengths are random choices of this testbench.
module tb_dmac_top;
  import dmac_pkg::*;
  import dmac_system_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (completed %0d of %0d and %0d of %0d)", n_done[0], descs[0].size(), n_done[1], descs[1].size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- one system per memory latency ----------------
  logic     rst_n = 0;
  reg_req_t rreq [2];
  reg_rsp_t rrsp [2];
  logic     irq  [2];
  int       n_irq [2];
  int       n_done [2];

  for (genvar s = 0; s < 2; s++) begin : g_sys
    localparam int unsigned LAT = (s == 0) ? 13 : 1;
    logic     be_valid, be_ready, done_valid, done_ready, hit, miss, sissue;
    be_req_t  be_req;
    mst_req_t be_axi_req;
    mst_rsp_t be_axi_rsp;
    slv_req_t axi_req;
    slv_rsp_t axi_rsp;

    dmac_top dut (
      .clk_i(clk), .rst_ni(rst_n), .reg_req_i(rreq[s]), .reg_rsp_o(rrsp[s]),
      .be_req_valid_o(be_valid), .be_req_ready_i(be_ready), .be_req_o(be_req),
      .be_done_valid_i(done_valid), .be_done_ready_o(done_ready),
      .be_axi_req_i(be_axi_req), .be_axi_rsp_o(be_axi_rsp),
      .axi_req_o(axi_req), .axi_rsp_i(axi_rsp),
      .irq_o(irq[s]), .spec_hit_o(hit), .spec_miss_o(miss), .spec_issue_o(sissue));

    dma_backend_model i_be (
      .clk_i(clk), .rst_ni(rst_n),
      .req_valid_i(be_valid), .req_ready_o(be_ready), .req_i(be_req),
      .done_valid_o(done_valid), .done_ready_i(done_ready),
      .axi_req_o(be_axi_req), .axi_rsp_i(be_axi_rsp));

    axi_mem_model #(.LATENCY(LAT), .MAX_OUT(8)) i_mem (
      .clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .rsp_o(axi_rsp));

    // mechanism counters
    logic hold_d = 1'b0;
    int c_hit = 0, c_miss = 0, c_eoc_discard = 0, c_hold = 0, c_inflight = 0, c_contend = 0;
    always_ff @(posedge clk) begin
      if (rst_n) begin
        if (hit) c_hit++;
        if (miss) c_miss++;
        if (dut.i_frontend.i_fetch.is_eoc && dut.i_frontend.i_fetch.n_spec_q != 0) c_eoc_discard++;
        if (dut.i_frontend.i_fetch.hold_q && !hold_d) c_hold++;
        hold_d <= dut.i_frontend.i_fetch.hold_q;
        if (!dut.i_frontend.i_fetch.credit && (dut.i_frontend.i_fetch.spec_ok ||
            (dut.i_frontend.i_fetch.nxt_valid_q && !dut.i_frontend.i_fetch.nxt_issued_q))) c_inflight++;
        if (be_axi_req.ar_valid && dut.mux_req[1].ar_valid) c_contend++;
        if (irq[s]) n_irq[s]++;
        if (done_valid && done_ready) n_done[s]++;
      end
    end
  end

  // ---------------- register port helpers ----------------
  task automatic reg_write(int s, logic [7:0] a, data_t d, output int waited);
    waited = 0;
    rreq[s] = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d, wstrb: '1};
    #1;
    while (!rrsp[s].ready) begin
      waited++;
      @(posedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    rreq[s] = '0;
  endtask

  // ---------------- scenario ----------------
  typedef struct { addr_t a; addr_t src; addr_t dst; int len; bit irq; } d_t;
  d_t descs [2][$];
  int flagged [2];

  function automatic void poke(int s, addr_t a, data_t d);
    if (s == 0) g_sys[0].i_mem.poke64(a, d);
    else        g_sys[1].i_mem.poke64(a, d);
  endfunction
  function automatic data_t peek(int s, addr_t a);
    if (s == 0) return g_sys[0].i_mem.peek64(a);
    return g_sys[1].i_mem.peek64(a);
  endfunction

  // builds n_chains chains; returns their head addresses
  function automatic void build(int s, int n_chains, int max_len_words, ref addr_t heads[$]);
    addr_t next_free, dst_free;
    next_free = 64'h0100_0000;
    dst_free  = 64'h4000_0000;
    for (int k = 0; k < n_chains; k++) begin
      addr_t addrs[$];
      int n;
      n = $urandom_range(1, 10);
      for (int i = 0; i < n; i++) begin
        addrs.push_back(next_free);
        // mostly contiguous, sometimes a jump
        next_free += ($urandom_range(0, 3) == 0) ? 64'h1000 + 64'(32 * $urandom_range(1, 50)) : 64'd32;
      end
      next_free += 64'h10000;  // a gap so the next chain's head is never prefetched
      for (int i = 0; i < n; i++) begin
        d_t d;
        logic [31:0] cfg;
        d.a   = addrs[i];
        d.len = 8 * $urandom_range(1, max_len_words);
        d.src = 64'h2000_0000 + 64'(8 * $urandom_range(0, 1 << 20));
        d.dst = dst_free;
        dst_free += 64'(d.len) + 64'h100;
        cfg = 32'($urandom) & ~32'h1;
        d.irq = ($urandom_range(0, 2) == 0);
        cfg[0] = d.irq;
        if (d.irq) flagged[s]++;
        poke(s, d.a,      {cfg, 32'(d.len)});
        poke(s, d.a + 8,  (i + 1 < n) ? addrs[i+1] : END_OF_CHAIN);
        poke(s, d.a + 16, d.src);
        poke(s, d.a + 24, d.dst);
        descs[s].push_back(d);
      end
      heads.push_back(addrs[0]);
    end
  endfunction

  int launch_stall [2];

  task automatic run_system(int s, int n_chains, int max_len_words);
    addr_t heads[$];
    int w;
    build(s, n_chains, max_len_words, heads);
    foreach (heads[k]) begin
      reg_write(s, REG_DESC_ADDR, heads[k], w);
      if (w > 0) launch_stall[s]++;
    end
    while (n_done[s] < descs[s].size()) @(posedge clk);
    repeat (200) @(posedge clk);
  endtask

  task automatic verify(int s);
    int bad = 0;
    foreach (descs[s][i]) begin
      d_t d;
      d = descs[s][i];
      check(peek(s, d.a) == '1, $sformatf("sys %0d descriptor %0d marked", s, i));
      for (int b = 0; b < d.len / 8; b++)
        if (peek(s, d.dst + 64'(8 * b)) != mem_pattern(d.src + 64'(8 * b))) bad++;
      check(bad == 0, $sformatf("sys %0d transfer %0d data (%0d bad words)", s, i, bad));
      bad = 0;
    end
    check(n_irq[s] == flagged[s], $sformatf("sys %0d irq %0d vs %0d", s, n_irq[s], flagged[s]));
    check(n_done[s] == descs[s].size(), "all transfers completed");
  endtask

  // i-rf and rf-rb on the ideal-memory system
  longint cyc = 0;
  longint t_launch = -1, t_rf = -1, t_rb = -1;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rreq[1].valid && rrsp[1].ready && t_launch < 0) t_launch <= cyc;
    if (t_launch >= 0 && t_rf < 0 && g_sys[1].axi_req.ar_valid && g_sys[1].axi_rsp.ar_ready &&
        g_sys[1].axi_req.ar.id[SLV_ID_W-1]) t_rf <= cyc;
    if (t_rf >= 0 && t_rb < 0 && g_sys[1].axi_req.ar_valid && g_sys[1].axi_rsp.ar_ready &&
        !g_sys[1].axi_req.ar.id[SLV_ID_W-1]) t_rb <= cyc;
  end

  initial begin
    rreq[0] = '0; rreq[1] = '0;
    n_irq = '{0, 0}; n_done = '{0, 0}; flagged = '{0, 0}; launch_stall = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      run_system(0, 12, 64);
      run_system(1, 12, 32);
    join
    verify(0);
    verify(1);
    $display("i-rf = %0d cycles, rf-rb = %0d cycles (ideal memory)", t_rf - t_launch, t_rb - t_rf);
    check(t_rf - t_launch <= 3, "i-rf latency at most 3 cycles");
    check(t_rb - t_rf <= 8, "rf-rb latency at most 8 cycles with ideal memory");
    $display("sys0 (13 cyc): hits=%0d misses=%0d eoc-discards=%0d holds=%0d inflight-full=%0d contention=%0d irq=%0d launch-stalls=%0d",
             g_sys[0].c_hit, g_sys[0].c_miss, g_sys[0].c_eoc_discard, g_sys[0].c_hold,
             g_sys[0].c_inflight, g_sys[0].c_contend, n_irq[0], launch_stall[0]);
    $display("sys1 (1 cyc):  hits=%0d misses=%0d eoc-discards=%0d holds=%0d inflight-full=%0d contention=%0d irq=%0d launch-stalls=%0d",
             g_sys[1].c_hit, g_sys[1].c_miss, g_sys[1].c_eoc_discard, g_sys[1].c_hold,
             g_sys[1].c_inflight, g_sys[1].c_contend, n_irq[1], launch_stall[1]);
    check(g_sys[0].c_hit + g_sys[1].c_hit > 0, "mechanism: prefetch hit");
    check(g_sys[0].c_miss + g_sys[1].c_miss > 0, "mechanism: misprediction reissue");
    check(g_sys[0].c_eoc_discard + g_sys[1].c_eoc_discard > 0, "mechanism: slots discarded at chain end");
    check(g_sys[0].c_hold + g_sys[1].c_hold > 0, "mechanism: held speculative request");
    check(launch_stall[0] + launch_stall[1] > 0, "mechanism: launch queue full");
    check(g_sys[0].c_inflight + g_sys[1].c_inflight > 0, "mechanism: in-flight limit");
    check(g_sys[0].c_contend + g_sys[1].c_contend > 0, "mechanism: arbiter contention");
    check(n_irq[0] + n_irq[1] > 0, "mechanism: interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
