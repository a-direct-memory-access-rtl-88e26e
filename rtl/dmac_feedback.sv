// dmac_feedback -- feedback logic of the DMAC frontend: completion write-back
// and interrupt.
//
// Every descriptor handed to the backend is also recorded here (its address
// and IRQ flag) in a ring of NUM_INFLIGHT entries; when the ring is full the
// request logic must wait, so NUM_INFLIGHT bounds the descriptors in flight
// between fetch and completion. The backend completes transfers in the order
// it received them; each completion (be_done_valid_i) marks the oldest pending
// entry done. For every done entry the logic writes all ones over the first 8
// bytes of the descriptor (a single-beat AXI write, full strobe), which is how
// software sees that the transfer finished. When the write response arrives
// and the descriptor's IRQ bit was set, irq_o pulses for one cycle.
//
// Four pointers walk the ring: wr (recorded), done (completed by the backend),
// aw and w (write address and write data sent; the two channels advance
// independently) and b (write response received, entry freed). So several
// write-backs may be outstanding at once.
//
// Timing: a completion in cycle t can put AW and W on the bus in cycle t+1.
// irq_o is high in the cycle after the B handshake. Write errors are ignored.
//
// The overwrite with all ones and the optional interrupt follow the paper; the
// ring, the pulse-shaped IRQ and raising it after the write response (so the
// mark is in memory before software is interrupted) are this design's choices.
module dmac_feedback
  import dmac_pkg::*;
#(
  parameter int unsigned NUM_INFLIGHT = 4
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  // descriptors entering the backend queue
  input  logic    rec_valid_i,
  output logic    rec_ready_o,
  input  addr_t   rec_addr_i,
  input  logic    rec_irq_i,
  // backend completion, in order
  input  logic    be_done_valid_i,
  output logic    be_done_ready_o,
  // AXI write channels (frontend manager port)
  output mst_ax_t aw_o,
  output logic    aw_valid_o,
  input  logic    aw_ready_i,
  output axi_w_t  w_o,
  output logic    w_valid_o,
  input  logic    w_ready_i,
  input  mst_b_t  b_i,
  input  logic    b_valid_i,
  output logic    b_ready_o,
  // interrupt and status
  output logic    irq_o,
  output logic    busy_o,
  output logic [$clog2(NUM_INFLIGHT+1)-1:0] count_o   // recorded, not yet written back
);
  localparam int unsigned IW = (NUM_INFLIGHT > 1) ? $clog2(NUM_INFLIGHT) : 1;
  localparam int unsigned PW = IW + 1;  // index plus one wrap bit
  typedef logic [PW-1:0] ptr_t;

  typedef struct packed {
    addr_t addr;
    logic  irq;
  } entry_t;

  entry_t ring_q [NUM_INFLIGHT];
  ptr_t   wr_q, done_q, aw_q, w_q, b_q;

  function automatic ptr_t inc(ptr_t p);
    ptr_t n;
    n = p;
    if (p[IW-1:0] == IW'(NUM_INFLIGHT - 1)) begin
      n[IW-1:0] = '0;
      n[PW-1]   = ~p[PW-1];
    end else begin
      n[IW-1:0] = p[IW-1:0] + 1'b1;
    end
    return n;
  endfunction

  function automatic logic [IW-1:0] idx(ptr_t p);
    return p[IW-1:0];
  endfunction

  logic full;
  assign full = (idx(wr_q) == idx(b_q)) && (wr_q[PW-1] != b_q[PW-1]);

  assign rec_ready_o     = !full;
  assign be_done_ready_o = (done_q != wr_q);

  assign aw_valid_o = (aw_q != done_q);
  assign aw_o.id    = '0;
  assign aw_o.addr  = ring_q[idx(aw_q)].addr;
  assign aw_o.len   = 8'd0;
  assign aw_o.size  = 3'($clog2(AXI_STRB_W));
  assign aw_o.burst = BURST_INCR;

  assign w_valid_o = (w_q != done_q);
  assign w_o.data  = DONE_MARK;
  assign w_o.strb  = '1;
  assign w_o.last  = 1'b1;

  // B may only come back for an entry whose AW and W were both sent
  assign b_ready_o = (b_q != aw_q) && (b_q != w_q);

  assign busy_o = (b_q != wr_q);
  // occupancy: index difference, plus NUM_INFLIGHT when the wrap bits differ
  always_comb begin
    if (wr_q[PW-1] == b_q[PW-1]) count_o = $bits(count_o)'(idx(wr_q) - idx(b_q));
    else count_o = $bits(count_o)'(NUM_INFLIGHT) - $bits(count_o)'(idx(b_q)) + $bits(count_o)'(idx(wr_q));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_q   <= '0;
      done_q <= '0;
      aw_q   <= '0;
      w_q    <= '0;
      b_q    <= '0;
      irq_o  <= 1'b0;
    end else begin
      irq_o <= 1'b0;
      if (rec_valid_i && rec_ready_o)         wr_q   <= inc(wr_q);
      if (be_done_valid_i && be_done_ready_o) done_q <= inc(done_q);
      if (aw_valid_o && aw_ready_i)           aw_q   <= inc(aw_q);
      if (w_valid_o && w_ready_i)             w_q    <= inc(w_q);
      if (b_valid_i && b_ready_o) begin
        b_q   <= inc(b_q);
        irq_o <= ring_q[idx(b_q)].irq;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (rec_valid_i && rec_ready_o) ring_q[idx(wr_q)] <= '{addr: rec_addr_i, irq: rec_irq_i};
  end

  a_done_in_range: assert property (@(posedge clk_i) disable iff (!rst_ni)
      be_done_valid_i |-> be_done_ready_o);
  a_aw_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
      aw_valid_o && !aw_ready_i |=> aw_valid_o && $stable(aw_o));
endmodule
