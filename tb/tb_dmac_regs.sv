// tb_dmac_regs -- self-checking test of the launch register and its queue.
// Writes more chain addresses than the queue holds and checks that the extra
// write is held until the consumer takes an entry, that addresses come out in
// order, that STATUS reports busy/full/count, and that bad offsets error.
//
// The queued launch register is specified for the DMAC; the offsets, the
// STATUS layout and stall-on-full are this design's own and checked as such.
module tb_dmac_regs;
  import dmac_pkg::*;
  localparam int unsigned DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  reg_req_t req;
  reg_rsp_t rsp;
  logic chain_valid, chain_ready, busy;
  addr_t chain_addr;
  int checks = 0, failures = 0;

  dmac_regs #(.QUEUE_DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .chain_valid_o(chain_valid), .chain_ready_i(chain_ready), .chain_addr_o(chain_addr),
    .busy_i(busy));

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // write; returns number of cycles waited for ready
  task automatic reg_write(logic [7:0] a, data_t d, output int waited);
    waited = 0;
    req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d, wstrb: '1};
    #1;
    while (!rsp.ready) begin
      waited++;
      @(posedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    req = '0;
    @(negedge clk);
  endtask

  task automatic reg_read(logic [7:0] a, output data_t d, output logic err);
    req = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0, wstrb: '0};
    #1;
    d = rsp.rdata;
    err = rsp.error;
    @(posedge clk);
    #1;
    req = '0;
    @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t d;
    logic err;
    int w;
    req = '0; chain_ready = 0; busy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    reg_read(REG_STATUS, d, err);
    check(d[0] == 0 && d[1] == 0 && d[15:8] == 0 && !err, "idle status");
    check(!chain_valid, "queue empty after reset");
    // fill the queue
    for (int i = 0; i < DEPTH; i++) begin
      reg_write(REG_DESC_ADDR, 64'h1000 + 64'(i) * 64'h40, w);
      check(w == 0, "write into non-full queue accepted at once");
    end
    check(chain_valid && chain_addr == 64'h1000, "first queued address at head");
    reg_read(REG_STATUS, d, err);
    check(d[0] == 1 && d[1] == 1 && d[15:8] == 8'(DEPTH), $sformatf("full status %h", d));
    // one more write is held until an entry leaves
    fork
      reg_write(REG_DESC_ADDR, 64'h9000, w);
      begin
        repeat (5) @(negedge clk);
        chain_ready = 1;
        @(negedge clk);
        chain_ready = 0;
      end
    join
    check(w >= 4, $sformatf("write stalled while queue full (waited %0d)", w));
    // drain and check order
    for (int i = 1; i <= DEPTH; i++) begin
      addr_t exp;
      exp = (i < DEPTH) ? 64'h1000 + 64'(i) * 64'h40 : 64'h9000;
      check(chain_valid && chain_addr == exp, $sformatf("order %0d: %h vs %h", i, chain_addr, exp));
      chain_ready = 1;
      @(negedge clk);
      chain_ready = 0;
    end
    check(!chain_valid, "queue empty after drain");
    busy = 1;
    reg_read(REG_STATUS, d, err);
    check(d[0] == 1 && d[15:8] == 0, "busy from frontend");
    busy = 0;
    reg_read(8'h10, d, err);
    check(err, "bad read offset errors");
    reg_write(8'h18, 64'h1, w);
    check(!chain_valid, "bad write offset does not launch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
