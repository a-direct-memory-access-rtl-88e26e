// tb_axi_rr_arbiter -- self-checking test of the round-robin AXI multiplexer.
// Two random managers issue read bursts (from a read-only region whose content
// is a known function of the address) and write bursts (each to its own
// region) through the arbiter into a 2-cycle-latency memory. Checked: read
// data, IDs and last flags come back to the right manager in order; written
// data lands where it was sent; a manager that keeps waiting is never skipped
// twice (fairness); both managers get grants; the port ID bit is prepended.
//
// Fair round-robin arbitration is what the DMAC's two manager ports require;
// the stimulus and the fairness criterion are this testbench's.
module tb_axi_rr_arbiter;
  import dmac_pkg::*;
  localparam int unsigned NRD = 60, NWR = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mst_req_t mreq [2];
  mst_rsp_t mrsp [2];
  slv_req_t sreq;
  slv_rsp_t srsp;

  axi_rr_arbiter dut (.clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_rsp_o(mrsp),
                      .slv_req_o(sreq), .slv_rsp_i(srsp));
  axi_mem_model #(.LATENCY(2)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(sreq), .rsp_o(srsp));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  function automatic data_t pattern(addr_t a);
    return {a[31:0] ^ 32'h5a5a_0f0f, ~a[31:0]};
  endfunction
  function automatic data_t wdata(int p, addr_t a);
    return {32'(p) ^ 32'hcafe_0000, a[31:0]};
  endfunction

  typedef struct { addr_t addr; int len; logic [MST_ID_W-1:0] id; } rd_t;
  rd_t rexp [2][$];
  rd_t wjob [2][$];
  int n_ar [2], n_rdone [2], r_beat [2], n_aw [2], n_wdone [2], w_beat [2];
  longint cyc;
  longint wait_since [2], last_grant [2];
  int unfair = 0, both_wait = 0;

  // random managers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 2; p++) begin
        mreq[p] <= '0;
        n_ar[p] <= 0; n_rdone[p] <= 0; r_beat[p] <= 0; n_aw[p] <= 0; n_wdone[p] <= 0; w_beat[p] <= 0;
        wait_since[p] <= -1; last_grant[p] <= -1;
      end
      cyc <= 0;
    end else begin
      cyc <= cyc + 1;
      for (int p = 0; p < 2; p++) begin
        // AR
        if (mreq[p].ar_valid && mrsp[p].ar_ready) begin
          rexp[p].push_back('{addr: mreq[p].ar.addr, len: int'(mreq[p].ar.len), id: mreq[p].ar.id});
          n_ar[p] <= n_ar[p] + 1;
          mreq[p].ar_valid <= 1'b0;
          last_grant[p] <= cyc;
          // fairness: the other port was already waiting at our previous grant
          if (wait_since[1-p] >= 0 && last_grant[p] >= 0 && wait_since[1-p] <= last_grant[p]) unfair++;
          if (mreq[1-p].ar_valid) both_wait++;
          wait_since[p] <= -1;
        end
        // a new request may follow an accepted one back to back
        if ((!mreq[p].ar_valid || mrsp[p].ar_ready) &&
            n_ar[p] + int'(mreq[p].ar_valid) < NRD && $urandom_range(0, 3) != 0) begin
          mreq[p].ar_valid   <= 1'b1;
          mreq[p].ar.id      <= MST_ID_W'($urandom);
          mreq[p].ar.addr    <= 64'h10_0000 + 64'($urandom_range(0, 1000)) * 8;
          mreq[p].ar.len     <= 8'($urandom_range(0, 7));
          mreq[p].ar.size    <= 3'd3;
          mreq[p].ar.burst   <= BURST_INCR;
          wait_since[p]      <= cyc + 1;
        end
        // R
        mreq[p].r_ready <= ($urandom_range(0, 3) != 0);
        if (mrsp[p].r_valid && mreq[p].r_ready) begin
          rd_t e;
          if (rexp[p].size() == 0) check(0, "unexpected R");
          else begin
            e = rexp[p][0];
            check(mrsp[p].r.id == e.id, "R id");
            check(mrsp[p].r.data == pattern(e.addr + 64'(8 * r_beat[p])), $sformatf("R data port %0d", p));
            check(mrsp[p].r.last == (r_beat[p] == e.len), "R last");
            if (r_beat[p] == e.len) begin
              void'(rexp[p].pop_front());
              r_beat[p] <= 0;
              n_rdone[p] <= n_rdone[p] + 1;
            end else r_beat[p] <= r_beat[p] + 1;
          end
        end
        // AW
        if (mreq[p].aw_valid && mrsp[p].aw_ready) begin
          wjob[p].push_back('{addr: mreq[p].aw.addr, len: int'(mreq[p].aw.len), id: mreq[p].aw.id});
          n_aw[p] <= n_aw[p] + 1;
          mreq[p].aw_valid <= 1'b0;
        end else if (!mreq[p].aw_valid && n_aw[p] < NWR && $urandom_range(0, 2) == 0) begin
          mreq[p].aw_valid <= 1'b1;
          mreq[p].aw.id    <= MST_ID_W'(p);
          mreq[p].aw.addr  <= 64'h40_0000 + 64'(p) * 64'h10_0000 + 64'(n_aw[p]) * 64'h40;
          mreq[p].aw.len   <= 8'($urandom_range(0, 3));
          mreq[p].aw.size  <= 3'd3;
          mreq[p].aw.burst <= BURST_INCR;
        end
        // W (after own AW)
        if (mreq[p].w_valid && mrsp[p].w_ready) begin
          if (mreq[p].w.last) begin
            void'(wjob[p].pop_front());
            w_beat[p] <= 0;
          end else w_beat[p] <= w_beat[p] + 1;
          mreq[p].w_valid <= 1'b0;
        end else if (!mreq[p].w_valid && wjob[p].size() != 0 && $urandom_range(0, 1) == 0) begin
          mreq[p].w_valid <= 1'b1;
          mreq[p].w.data  <= wdata(p, wjob[p][0].addr + 64'(8 * w_beat[p]));
          mreq[p].w.strb  <= '1;
          mreq[p].w.last  <= (w_beat[p] == wjob[p][0].len);
        end
        mreq[p].b_ready <= 1'b1;
        if (mrsp[p].b_valid && mreq[p].b_ready) begin
          check(mrsp[p].b.id == MST_ID_W'(p), "B routed to its manager");
          n_wdone[p] <= n_wdone[p] + 1;
        end
      end
      if (sreq.ar_valid) check(sreq.ar.id[SLV_ID_W-1] == dut.ar_sel, "port bit prepended");
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!(n_rdone[0] == NRD && n_rdone[1] == NRD && n_wdone[0] == NWR && n_wdone[1] == NWR)) @(posedge clk);
    // written data
    for (int p = 0; p < 2; p++)
      for (int j = 0; j < NWR; j++) begin
        addr_t a;
        a = 64'h40_0000 + 64'(p) * 64'h10_0000 + 64'(j) * 64'h40;
        check(i_mem.peek64(a) == wdata(p, a), $sformatf("write data port %0d burst %0d", p, j));
      end
    check(unfair == 0, $sformatf("round-robin fairness violations: %0d", unfair));
    check(both_wait > 5, $sformatf("contention seen %0d times", both_wait));
    $display("contended grants=%0d", both_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
