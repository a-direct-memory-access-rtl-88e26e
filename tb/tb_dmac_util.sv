// tb_dmac_util -- steady-state bus utilisation sweep of the DMAC in three
// configurations: the default (4 descriptors in flight, prefetching 4),
// prefetching off (NUM_SPEC = 0, otherwise the same) and scaled up
// (NUM_INFLIGHT = NUM_SPEC = 24).
//
// Nine complete systems run side by side: each configuration with a
// memory latency of 1 cycle (SRAM-like), 13 cycles (DDR3-like) and 100 cycles
// (deep network-on-chip). Each system is dmac_top, the behavioural backend
// on arbiter port 0 and one AXI memory behind the arbiter.
//
// Sweep 1, on every system: for each bus-aligned transfer size n = 8, 16, ...,
// 8192 bytes one chain of equally sized transfers is built with all
// descriptors back to back in memory (every prefetch hits) and launched.
// Sweep 2, on the 13-cycle system with prefetching: 64-byte and 256-byte transfers with a
// prefetch hit rate of 0, 25, 50, 75 and 100 % (a miss is a 'next' pointer that
// jumps elsewhere).
//
// Utilisation is the number of payload read beats the backend receives per
// cycle, measured over the middle half of each chain (from the completion of
// its first quarter to that of its third quarter) to leave out start-up and
// drain. Every transfer shares the single memory port with its 32-byte
// descriptor, so no point can exceed n / (n + 32).
//
// Checked for every point: all transfers completed, each destination holds the
// source data, each descriptor is marked with all ones, and the measured
// utilisation does not exceed n / (n + 32) (plus 1 % for the finite window).
// Checked against the expected behaviour: without prefetching and with the
// 1-cycle memory every size reaches at least 99 % of n / (n + 32); with
// prefetching and the 1-cycle memory every size reaches at least 97 % of
// n / (n + 40), i.e. at most one idle cycle per
// transfer beyond its four descriptor beats (the idle cycle comes from the
// in-flight limit, which counts a descriptor until its completion write is
// acknowledged); with every memory 8 KiB transfers reach at least 90 %; with
// the 13-cycle memory and 64-byte transfers, a 100 % hit rate is not slower
// than a 0 % hit rate. A table of all points is printed.
//
// Memory latencies, transfer sizes, hit rates and the n / (n + 32) bound are
// the evaluation points used for the DMAC; the measurement window and the
// backend model's queue depth (MAX_JOBS = 4) are this testbench's choices.
module tb_dmac_util;
  import dmac_pkg::*;
  import dmac_system_tb_pkg::*;

  localparam int NSYS = 9;   // 0..2 default, 3..5 prefetching off, 6..8 scaled
  localparam int NSIZES = 11;
  localparam int LAT_DRAIN = 250;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic     rst_n = 0;
  reg_req_t rreq [NSYS];
  reg_rsp_t rrsp [NSYS];
  int       n_done [NSYS];
  longint   cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  for (genvar s = 0; s < NSYS; s++) begin : g_sys
    localparam int unsigned LAT = (s % 3 == 0) ? 1 : (s % 3 == 1) ? 13 : 100;
    localparam int unsigned NSPEC = (s < 3) ? 4 : (s < 6) ? 0 : 24;
    localparam int unsigned NINF  = (s < 6) ? 4 : 24;
    localparam int unsigned JOBS  = (s < 6) ? 4 : 16;
    logic     be_valid, be_ready, done_valid, done_ready, hit, miss, sissue, irq;
    be_req_t  be_req;
    mst_req_t be_axi_req;
    mst_rsp_t be_axi_rsp;
    slv_req_t axi_req;
    slv_rsp_t axi_rsp;

    dmac_top #(.NUM_INFLIGHT(NINF), .NUM_SPEC(NSPEC)) dut (
      .clk_i(clk), .rst_ni(rst_n), .reg_req_i(rreq[s]), .reg_rsp_o(rrsp[s]),
      .be_req_valid_o(be_valid), .be_req_ready_i(be_ready), .be_req_o(be_req),
      .be_done_valid_i(done_valid), .be_done_ready_o(done_ready),
      .be_axi_req_i(be_axi_req), .be_axi_rsp_o(be_axi_rsp),
      .axi_req_o(axi_req), .axi_rsp_i(axi_rsp),
      .irq_o(irq), .spec_hit_o(hit), .spec_miss_o(miss), .spec_issue_o(sissue));

    dma_backend_model #(.MAX_JOBS(JOBS)) i_be (
      .clk_i(clk), .rst_ni(rst_n),
      .req_valid_i(be_valid), .req_ready_o(be_ready), .req_i(be_req),
      .done_valid_o(done_valid), .done_ready_i(done_ready),
      .axi_req_o(be_axi_req), .axi_rsp_i(be_axi_rsp));

    axi_mem_model #(.LATENCY(LAT), .MAX_OUT(64)) i_mem (
      .clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .rsp_o(axi_rsp));

    int c_hit = 0, c_miss = 0;
    always_ff @(posedge clk) begin
      if (rst_n) begin
        if (hit) c_hit++;
        if (miss) c_miss++;
        if (done_valid && done_ready) n_done[s]++;
      end
    end
  end

  function automatic void poke(int s, addr_t a, data_t d);
    case (s)
      0: g_sys[0].i_mem.poke64(a, d);
      1: g_sys[1].i_mem.poke64(a, d);
      2: g_sys[2].i_mem.poke64(a, d);
      3: g_sys[3].i_mem.poke64(a, d);
      4: g_sys[4].i_mem.poke64(a, d);
      5: g_sys[5].i_mem.poke64(a, d);
      6: g_sys[6].i_mem.poke64(a, d);
      7: g_sys[7].i_mem.poke64(a, d);
      default: g_sys[8].i_mem.poke64(a, d);
    endcase
  endfunction
  function automatic data_t peek(int s, addr_t a);
    case (s)
      0: return g_sys[0].i_mem.peek64(a);
      1: return g_sys[1].i_mem.peek64(a);
      2: return g_sys[2].i_mem.peek64(a);
      3: return g_sys[3].i_mem.peek64(a);
      4: return g_sys[4].i_mem.peek64(a);
      5: return g_sys[5].i_mem.peek64(a);
      6: return g_sys[6].i_mem.peek64(a);
      7: return g_sys[7].i_mem.peek64(a);
      default: return g_sys[8].i_mem.peek64(a);
    endcase
  endfunction
  function automatic longint r_beats(int s);
    case (s)
      0: return longint'(g_sys[0].i_be.r_beats);
      1: return longint'(g_sys[1].i_be.r_beats);
      2: return longint'(g_sys[2].i_be.r_beats);
      3: return longint'(g_sys[3].i_be.r_beats);
      4: return longint'(g_sys[4].i_be.r_beats);
      5: return longint'(g_sys[5].i_be.r_beats);
      6: return longint'(g_sys[6].i_be.r_beats);
      7: return longint'(g_sys[7].i_be.r_beats);
      default: return longint'(g_sys[8].i_be.r_beats);
    endcase
  endfunction
  function automatic int hits(int s);
    case (s)
      0: return g_sys[0].c_hit;
      1: return g_sys[1].c_hit;
      2: return g_sys[2].c_hit;
      3: return g_sys[3].c_hit;
      4: return g_sys[4].c_hit;
      5: return g_sys[5].c_hit;
      6: return g_sys[6].c_hit;
      7: return g_sys[7].c_hit;
      default: return g_sys[8].c_hit;
    endcase
  endfunction

  // driven away from the clock edge so the request is seen exactly once
  task automatic reg_write(int s, logic [7:0] a, data_t d);
    @(negedge clk);
    rreq[s] = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d, wstrb: '1};
    #1;
    while (!rrsp[s].ready) begin
      @(posedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    rreq[s] = '0;
  endtask

  typedef struct { addr_t a; addr_t src; addr_t dst; } d_t;
  addr_t desc_free [NSYS];
  addr_t dst_free  [NSYS];
  real   util_tab [NSYS][NSIZES];
  real   hit_tab  [2][5];

  // one chain of n_desc transfers of n bytes; a descriptor's 'next' is the
  // following 32-byte slot unless a miss is drawn (hit_pct); returns the
  // utilisation over the middle half of the chain
  task automatic run_point(int s, int n, int n_desc, int hit_pct, output real u, output int n_hits);
    d_t     d[$];
    addr_t  a, src;
    int     base, q1, q3, bad, h0;
    longint c1, c3, b1, b3;
    a   = desc_free[s];
    src = 64'h2000_0000 + 64'(8 * $urandom_range(0, 1 << 16));
    for (int i = 0; i < n_desc; i++) begin
      d_t e;
      e.a = a;
      e.src = src + 64'(n * i);
      e.dst = dst_free[s];
      dst_free[s] += 64'(n) + 64'h40;
      d.push_back(e);
      if ($urandom_range(0, 99) < hit_pct) a += 64'd32;
      else a += 64'h1000 + 64'(32 * $urandom_range(1, 40));
    end
    desc_free[s] = a + 64'h10000;
    for (int i = 0; i < n_desc; i++) begin
      poke(s, d[i].a,      {32'h0, 32'(n)});
      poke(s, d[i].a + 8,  (i + 1 < n_desc) ? d[i+1].a : END_OF_CHAIN);
      poke(s, d[i].a + 16, d[i].src);
      poke(s, d[i].a + 24, d[i].dst);
    end
    base = n_done[s];
    h0   = hits(s);
    q1   = base + n_desc / 4;
    q3   = base + (3 * n_desc) / 4;
    reg_write(s, REG_DESC_ADDR, d[0].a);
    while (n_done[s] < q1) @(posedge clk);
    c1 = cyc; b1 = r_beats(s);
    while (n_done[s] < q3) @(posedge clk);
    c3 = cyc; b3 = r_beats(s);
    while (n_done[s] < base + n_desc) @(posedge clk);
    repeat (LAT_DRAIN) @(posedge clk);
    u = real'(b3 - b1) / real'(c3 - c1);
    n_hits = hits(s) - h0;
    // data and completion marks
    bad = 0;
    foreach (d[i]) begin
      if (peek(s, d[i].a) != '1) bad++;
      for (int w = 0; w < n / 8; w++)
        if (peek(s, d[i].dst + 64'(8 * w)) != mem_pattern(d[i].src + 64'(8 * w))) bad++;
    end
    check(bad == 0, $sformatf("sys %0d n=%0d: %0d wrong words or marks", s, n, bad));
    check(u <= real'(n) / real'(n + 32) + 0.01,
          $sformatf("sys %0d n=%0d: utilisation %f above n/(n+32)", s, n, u));
  endtask
  task automatic sweep_sizes(int s);
    int n, n_desc, nh;
    real u;
    for (int k = 0; k < NSIZES; k++) begin
      n = 8 << k;
      n_desc = 16384 / n;
      if (n_desc < 64) n_desc = 64;
      if (n_desc > 256) n_desc = 256;
      run_point(s, n, n_desc, 100, u, nh);
      util_tab[s][k] = u;
    end
  endtask

  task automatic sweep_hits();
    int nh;
    real u;
    for (int j = 0; j < 2; j++)
      for (int h = 0; h < 5; h++) begin
        run_point(1, (j == 0) ? 64 : 256, 128, 25 * h, u, nh);
        hit_tab[j][h] = u;
      end
  endtask

  initial begin
    for (int s = 0; s < NSYS; s++) begin
      rreq[s] = '0;
      n_done[s] = 0;
      desc_free[s] = 64'h0100_0000;
      dst_free[s]  = 64'h4000_0000;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      sweep_sizes(0);
      begin
        sweep_sizes(1);
        sweep_hits();
      end
      sweep_sizes(2);
      sweep_sizes(3);
      sweep_sizes(4);
      sweep_sizes(5);
      sweep_sizes(6);
      sweep_sizes(7);
      sweep_sizes(8);
    join

    $display("steady-state utilisation; 4/4 (default) | 4/0 (prefetching off) | 24/24 (scaled)");
    $display("size[B]  ideal   lat=1   lat=13  lat=100 |  lat=1   lat=13  lat=100 |  lat=1   lat=13  lat=100");
    for (int k = 0; k < NSIZES; k++)
      $display("%6d  %6.3f  %6.3f  %6.3f  %6.3f | %6.3f  %6.3f  %6.3f | %6.3f  %6.3f  %6.3f", 8 << k,
               real'(8 << k) / real'((8 << k) + 32),
               util_tab[0][k], util_tab[1][k], util_tab[2][k], util_tab[3][k], util_tab[4][k], util_tab[5][k],
               util_tab[6][k], util_tab[7][k], util_tab[8][k]);
    $display("lat=13, hit rate:   0%%     25%%    50%%    75%%   100%%");
    for (int j = 0; j < 2; j++)
      $display("  n=%0d B:     %6.3f %6.3f %6.3f %6.3f %6.3f", (j == 0) ? 64 : 256,
               hit_tab[j][0], hit_tab[j][1], hit_tab[j][2], hit_tab[j][3], hit_tab[j][4]);

    for (int k = 0; k < NSIZES; k++) begin
      real bound;
      bound = real'(8 << k) / real'((8 << k) + 40);
      check(util_tab[0][k] >= 0.97 * bound,
            $sformatf("1-cycle memory, n=%0d: %f below 97%% of %f", 8 << k, util_tab[0][k], bound));
    end
    for (int k = 0; k < NSIZES; k++) begin
      real ideal;
      ideal = real'(8 << k) / real'((8 << k) + 32);
      check(util_tab[3][k] >= 0.99 * ideal,
            $sformatf("no prefetching, 1-cycle memory, n=%0d: %f below 99%% of %f", 8 << k, util_tab[3][k], ideal));
    end
    check(hits(3) + hits(4) + hits(5) == 0, "no prefetch hits with prefetching off");
    for (int k = 3; k < NSIZES; k++) begin
      real ideal;
      ideal = real'(8 << k) / real'((8 << k) + 32);
      check(util_tab[7][k] >= 0.95 * ideal,
            $sformatf("scaled, 13-cycle memory, n=%0d: %f below 95%% of %f", 8 << k, util_tab[7][k], ideal));
      if (k >= 5)
        check(util_tab[8][k] >= 0.95 * ideal,
              $sformatf("scaled, 100-cycle memory, n=%0d: %f below 95%% of %f", 8 << k, util_tab[8][k], ideal));
    end
    for (int s = 0; s < NSYS; s++)
      check(util_tab[s][NSIZES-1] >= 0.9, $sformatf("sys %0d, 8 KiB: utilisation %f", s, util_tab[s][NSIZES-1]));
    check(hit_tab[0][4] >= hit_tab[0][0], "prefetch hits do not slow down 64-byte transfers");
    check(hits(1) > 0, "prefetch hits seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
