// tb_dmac_feedback -- self-checking test of the completion write-back.
// Records descriptors with random IRQ flags, completes them at random times
// and lets a 3-cycle-latency memory answer the writes. Checked: no write
// before its completion, one write per completion to the right address, the
// first 8 bytes become all ones and the neighbouring word is untouched, one IRQ
// pulse per flagged descriptor and none before its write response, the
// in-flight limit back-pressures recording, and the logic ends idle.
//
// The all-ones mark and the optional interrupt are the specified behaviour;
// the pulse timing after B is this design's own and is checked as such.
module tb_dmac_feedback;
  import dmac_pkg::*;
  localparam int unsigned NI = 4;
  localparam int unsigned N  = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rec_valid, rec_ready, rec_irq, done_valid, done_ready, irq, busy;
  addr_t rec_addr;
  mst_req_t mreq;
  mst_rsp_t mrsp;

  dmac_feedback #(.NUM_INFLIGHT(NI)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .rec_valid_i(rec_valid), .rec_ready_o(rec_ready), .rec_addr_i(rec_addr), .rec_irq_i(rec_irq),
    .be_done_valid_i(done_valid), .be_done_ready_o(done_ready),
    .aw_o(mreq.aw), .aw_valid_o(mreq.aw_valid), .aw_ready_i(mrsp.aw_ready),
    .w_o(mreq.w), .w_valid_o(mreq.w_valid), .w_ready_i(mrsp.w_ready),
    .b_i(mrsp.b), .b_valid_i(mrsp.b_valid), .b_ready_o(mreq.b_ready),
    .irq_o(irq), .busy_o(busy));
  assign mreq.ar = '0;
  assign mreq.ar_valid = 1'b0;
  assign mreq.r_ready = 1'b1;

  axi_mem_model #(.req_t(mst_req_t), .rsp_t(mst_rsp_t), .IDW(MST_ID_W), .LATENCY(3)) i_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  addr_t addrs[N];
  bit    irqs[N];
  int n_rec = 0, n_done = 0, n_aw = 0, n_b = 0, n_irq = 0, exp_irq_b = 0, n_full = 0;

  // recording side
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (rec_valid && rec_ready) n_rec <= n_rec + 1;
      if (rec_valid && !rec_ready) begin
        n_full <= n_full + 1;
        check(n_rec - n_b == NI, "back-pressure only when NUM_INFLIGHT are pending");
      end
      if (done_valid && done_ready) n_done <= n_done + 1;
      if (mreq.aw_valid && mrsp.aw_ready) begin
        check(n_aw < n_done, "write only after completion");
        check(mreq.aw.addr == addrs[n_aw] && mreq.aw.len == 0, $sformatf("write address %0d", n_aw));
        n_aw <= n_aw + 1;
      end
      if (mreq.w_valid && mrsp.w_ready)
        check(mreq.w.data == '1 && mreq.w.strb == '1 && mreq.w.last, "all-ones single beat");
      if (mrsp.b_valid && mreq.b_ready) begin
        if (irqs[n_b]) exp_irq_b <= exp_irq_b + 1;
        n_b <= n_b + 1;
      end
      if (irq) begin
        n_irq <= n_irq + 1;
        check(n_irq < exp_irq_b, "IRQ only after the flagged write response");
      end
    end
  end
  assign rec_valid = rst_n && (n_rec < N) && rec_go;
  assign rec_addr  = addrs[n_rec % N];
  assign rec_irq   = irqs[n_rec % N];
  assign done_valid = rst_n && (n_done < n_rec) && done_go;
  logic rec_go, done_go;
  always_ff @(posedge clk) begin
    rec_go  <= ($urandom_range(0, 2) != 0);
    done_go <= ($urandom_range(0, 4) == 0) || (n_rec >= N);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int flagged = 0;
    for (int i = 0; i < N; i++) begin
      addrs[i] = 64'h3000 + 64'(i) * 64'h60;
      irqs[i]  = ($urandom_range(0, 2) == 0);
      if (irqs[i]) flagged++;
      i_mem.poke64(addrs[i], 64'h0123_4567_89ab_cdef);
      i_mem.poke64(addrs[i] + 8, 64'h1111_2222_3333_4444 + 64'(i));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n_b < N) @(posedge clk);
    repeat (10) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      check(i_mem.peek64(addrs[i]) == '1, $sformatf("descriptor %0d marked done", i));
      check(i_mem.peek64(addrs[i] + 8) == 64'h1111_2222_3333_4444 + 64'(i), "next field untouched");
    end
    check(n_aw == N && n_b == N, "one write per descriptor");
    check(n_irq == flagged, $sformatf("irq count %0d vs %0d", n_irq, flagged));
    check(n_full > 0, "in-flight limit reached at least once");
    check(!busy, "idle at the end");
    $display("irqs=%0d back-pressure cycles=%0d", n_irq, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
