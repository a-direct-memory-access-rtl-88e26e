// tb_dmac_frontend -- self-checking test of the whole frontend.
// Chains of descriptors (contiguous and scattered) are written into a
// 4-cycle-latency memory and launched through the register port, more at once
// than the launch queue holds. A stub backend accepts the transfer requests
// with random delay and completes them in order after a random time. Checked:
// the backend receives exactly the transfers of the chains in order; each
// descriptor's first 8 bytes are all ones afterwards and its other fields are
// untouched; the IRQ count equals the number of IRQ-flagged descriptors; the
// launch write stalls while the queue is full; STATUS reads busy and then idle.
//
// The checked behaviour (chain following, completion marks, queued launches)
// is the frontend's specified function; the stub backend's timing is random.
module tb_dmac_frontend;
  import dmac_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  reg_req_t rreq;
  reg_rsp_t rrsp;
  mst_req_t mreq;
  mst_rsp_t mrsp;
  logic be_valid, be_ready, done_valid, done_ready, irq, hit, miss, sissue;
  be_req_t be_req;

  dmac_frontend dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(rreq), .reg_rsp_o(rrsp),
    .axi_req_o(mreq), .axi_rsp_i(mrsp),
    .be_req_valid_o(be_valid), .be_req_ready_i(be_ready), .be_req_o(be_req),
    .be_done_valid_i(done_valid), .be_done_ready_o(done_ready),
    .irq_o(irq), .spec_hit_o(hit), .spec_miss_o(miss), .spec_issue_o(sissue));

  axi_mem_model #(.req_t(mst_req_t), .rsp_t(mst_rsp_t), .IDW(MST_ID_W), .LATENCY(4)) i_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  typedef struct { addr_t a; be_req_t x; bit irq; addr_t nxt; } d_t;
  d_t all_q[$];
  be_req_t exp_q[$];
  int flagged = 0;

  function automatic void add_chain(addr_t addrs[$]);
    for (int i = 0; i < addrs.size(); i++) begin
      d_t d;
      logic [31:0] cfg;
      cfg = $urandom;
      d.a = addrs[i];
      d.nxt = (i + 1 < addrs.size()) ? addrs[i+1] : END_OF_CHAIN;
      d.x.length = 32'($urandom_range(1, 4096));
      d.x.opts   = cfg[31:1];
      d.x.src    = {$urandom, $urandom};
      d.x.dst    = {$urandom, $urandom};
      d.irq      = cfg[0];
      if (d.irq) flagged++;
      i_mem.poke64(d.a,      {cfg, d.x.length});
      i_mem.poke64(d.a + 8,  d.nxt);
      i_mem.poke64(d.a + 16, d.x.src);
      i_mem.poke64(d.a + 24, d.x.dst);
      all_q.push_back(d);
      exp_q.push_back(d.x);
    end
  endfunction

  // stub backend
  int pend = 0, n_req = 0, n_done = 0, n_irq = 0;
  logic go_req, go_done;
  assign be_ready   = go_req;
  assign done_valid = go_done && (pend > 0);
  always_ff @(posedge clk) begin
    go_req  <= ($urandom_range(0, 2) != 0);
    go_done <= ($urandom_range(0, 5) == 0);
    if (rst_n) begin
      if (be_valid && be_ready) begin
        n_req <= n_req + 1;
        if (exp_q.size() == 0) check(0, "unexpected transfer");
        else begin
          be_req_t e;
          e = exp_q.pop_front();
          check(be_req == e, $sformatf("transfer %0d src %h vs %h", n_req, be_req.src, e.src));
        end
      end
      pend <= pend + int'(be_valid && be_ready) - int'(done_valid && done_ready);
      if (done_valid && done_ready) n_done <= n_done + 1;
      if (irq) n_irq <= n_irq + 1;
    end
  end

  task automatic reg_write(logic [7:0] a, data_t d, output int waited);
    waited = 0;
    rreq = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d, wstrb: '1};
    #1;
    while (!rrsp.ready) begin
      waited++;
      @(posedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    rreq = '0;
  endtask
  task automatic reg_read(logic [7:0] a, output data_t d);
    rreq = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0, wstrb: '0};
    #1;
    d = rrsp.rdata;
    @(posedge clk);
    #1;
    rreq = '0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_t heads[$];
    addr_t c[$];
    int total, w, max_wait = 0;
    data_t st;
    rreq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 8 chains: even ones contiguous, odd ones scattered, lengths 1..9
    for (int k = 0; k < 8; k++) begin
      int n;
      n = 1 + (k * 3) % 9;
      c.delete();
      for (int i = 0; i < n; i++)
        c.push_back((k % 2 == 0) ? 64'h10_0000 + 64'(k) * 64'h1000 + 64'(32 * i)
                                 : 64'h20_0000 + 64'(k) * 64'h1_0000 + 64'(i) * 64'h240);
      add_chain(c);
      heads.push_back(c[0]);
    end
    total = all_q.size();
    @(negedge clk);
    foreach (heads[k]) begin
      reg_write(REG_DESC_ADDR, heads[k], w);
      if (w > max_wait) max_wait = w;
    end
    reg_read(REG_STATUS, st);
    check(st[0] == 1'b1, "busy while chains run");
    while (n_done < total) @(posedge clk);
    repeat (50) @(posedge clk);
    reg_read(REG_STATUS, st);
    check(st[0] == 1'b0, "idle at the end");
    check(n_req == total && exp_q.size() == 0, $sformatf("transfers %0d of %0d", n_req, total));
    check(max_wait > 0, "launch write stalled on a full queue");
    check(n_irq == flagged, $sformatf("irq %0d vs %0d", n_irq, flagged));
    foreach (all_q[i]) begin
      check(i_mem.peek64(all_q[i].a) == '1, $sformatf("descriptor %0d marked", i));
      check(i_mem.peek64(all_q[i].a + 8) == all_q[i].nxt && i_mem.peek64(all_q[i].a + 16) == all_q[i].x.src,
            "other fields untouched");
    end
    $display("descriptors=%0d irqs=%0d max launch stall=%0d", total, n_irq, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
