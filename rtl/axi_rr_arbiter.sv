// axi_rr_arbiter -- fair round-robin AXI4 multiplexer, 2 managers to 1 port.
//
// Joins the DMA backend's and the DMA frontend's manager ports onto the single
// AXI port that goes to the memory system. Port 0 and port 1 are equal: AW and
// AR are each granted round-robin, the priority passing to the other port after
// every accepted request. A request that has been offered downstream but not
// yet accepted keeps its grant (AXI does not allow it to change). The index of
// the granting port is prepended to the ID, so R and B are routed back by the
// top ID bit without any state. W beats are routed in AW order: each accepted
// AW pushes its port index into a FIFO of W_FIFO_DEPTH entries, which steers W
// until the beat with last set. AW is held while that FIFO is full.
//
// The arbitration adds no cycle: grant, ID prefix and routing are
// combinational. That the two manager ports meet in a fair round-robin
// arbiter is the paper's; the ID-prefix routing, the W-order FIFO and its depth
// are this design's choices.
//
// The Verilator linter reports a circular combinational path through ar_sel when the
// frontend is attached. It is not a real loop: the frontend's ar_valid depends
// on its R beat (zero-latency reissue), and ar_ready depends on ar_valid, but
// ar_valid never depends on ar_ready. The tool sees one loop only because the
// response bundle is a single struct variable.
module axi_rr_arbiter
  import dmac_pkg::*;
#(
  parameter int unsigned W_FIFO_DEPTH = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mst_req_t mst_req_i [2],
  output mst_rsp_t mst_rsp_o [2],
  output slv_req_t slv_req_o,
  input  slv_rsp_t slv_rsp_i
);
  // ---------------- round-robin grant, AW and AR ----------------
  logic aw_prio_q, aw_lock_q, aw_lock_sel_q, aw_sel;
  logic ar_prio_q, ar_lock_q, ar_lock_sel_q, ar_sel;
  logic [1:0] aw_req, ar_req;

  function automatic logic rr_pick(logic [1:0] req, logic prio);
    if (req[prio]) return prio;
    if (req[!prio]) return !prio;
    return prio;
  endfunction

  assign aw_req = {mst_req_i[1].aw_valid, mst_req_i[0].aw_valid};
  assign ar_req = {mst_req_i[1].ar_valid, mst_req_i[0].ar_valid};
  assign aw_sel = aw_lock_q ? aw_lock_sel_q : rr_pick(aw_req, aw_prio_q);
  assign ar_sel = ar_lock_q ? ar_lock_sel_q : rr_pick(ar_req, ar_prio_q);

  // ---------------- W order FIFO ----------------
  logic wq_space, wq_out_valid, wq_sel;
  logic [$clog2(W_FIFO_DEPTH+1)-1:0] wq_count;
  logic aw_hs, ar_hs, w_hs;
  // space is judged from the count alone, not from a same-cycle pop, which
  // keeps AW independent of W
  assign wq_space = (wq_count < $bits(wq_count)'(W_FIFO_DEPTH));

  dmac_fifo #(.T(logic), .DEPTH(W_FIFO_DEPTH)) i_w_order (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .in_valid_i (aw_hs),
    .in_ready_o (),
    .in_data_i  (aw_sel),
    .out_valid_o(wq_out_valid),
    .out_ready_i(w_hs && slv_req_o.w.last),
    .out_data_o (wq_sel),
    .count_o    (wq_count)
  );

  logic r_sel, b_sel;
  assign r_sel = slv_rsp_i.r.id[SLV_ID_W-1];
  assign b_sel = slv_rsp_i.b.id[SLV_ID_W-1];

  always_comb begin
    slv_req_o = '0;
    for (int i = 0; i < 2; i++) mst_rsp_o[i] = '0;

    // AW
    slv_req_o.aw.id    = {aw_sel, mst_req_i[aw_sel].aw.id};
    slv_req_o.aw.addr  = mst_req_i[aw_sel].aw.addr;
    slv_req_o.aw.len   = mst_req_i[aw_sel].aw.len;
    slv_req_o.aw.size  = mst_req_i[aw_sel].aw.size;
    slv_req_o.aw.burst = mst_req_i[aw_sel].aw.burst;
    slv_req_o.aw_valid = mst_req_i[aw_sel].aw_valid && wq_space;
    mst_rsp_o[aw_sel].aw_ready = slv_rsp_i.aw_ready && wq_space;

    // W
    slv_req_o.w       = mst_req_i[wq_sel].w;
    slv_req_o.w_valid = wq_out_valid && mst_req_i[wq_sel].w_valid;
    if (wq_out_valid) mst_rsp_o[wq_sel].w_ready = slv_rsp_i.w_ready;

    // B
    mst_rsp_o[b_sel].b.id    = slv_rsp_i.b.id[MST_ID_W-1:0];
    mst_rsp_o[b_sel].b.resp  = slv_rsp_i.b.resp;
    mst_rsp_o[b_sel].b_valid = slv_rsp_i.b_valid;
    slv_req_o.b_ready        = mst_req_i[b_sel].b_ready;

    // AR
    slv_req_o.ar.id    = {ar_sel, mst_req_i[ar_sel].ar.id};
    slv_req_o.ar.addr  = mst_req_i[ar_sel].ar.addr;
    slv_req_o.ar.len   = mst_req_i[ar_sel].ar.len;
    slv_req_o.ar.size  = mst_req_i[ar_sel].ar.size;
    slv_req_o.ar.burst = mst_req_i[ar_sel].ar.burst;
    slv_req_o.ar_valid = mst_req_i[ar_sel].ar_valid;
    mst_rsp_o[ar_sel].ar_ready = slv_rsp_i.ar_ready;

    // R
    mst_rsp_o[r_sel].r.id    = slv_rsp_i.r.id[MST_ID_W-1:0];
    mst_rsp_o[r_sel].r.data  = slv_rsp_i.r.data;
    mst_rsp_o[r_sel].r.resp  = slv_rsp_i.r.resp;
    mst_rsp_o[r_sel].r.last  = slv_rsp_i.r.last;
    mst_rsp_o[r_sel].r_valid = slv_rsp_i.r_valid;
    slv_req_o.r_ready        = mst_req_i[r_sel].r_ready;
  end

  assign aw_hs = slv_req_o.aw_valid && slv_rsp_i.aw_ready;
  assign ar_hs = slv_req_o.ar_valid && slv_rsp_i.ar_ready;
  assign w_hs  = slv_req_o.w_valid && slv_rsp_i.w_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_prio_q <= 1'b0; aw_lock_q <= 1'b0; aw_lock_sel_q <= 1'b0;
      ar_prio_q <= 1'b0; ar_lock_q <= 1'b0; ar_lock_sel_q <= 1'b0;
    end else begin
      if (aw_hs) begin
        aw_prio_q <= !aw_sel;
        aw_lock_q <= 1'b0;
      end else if (slv_req_o.aw_valid) begin
        aw_lock_q     <= 1'b1;
        aw_lock_sel_q <= aw_sel;
      end
      if (ar_hs) begin
        ar_prio_q <= !ar_sel;
        ar_lock_q <= 1'b0;
      end else if (slv_req_o.ar_valid) begin
        ar_lock_q     <= 1'b1;
        ar_lock_sel_q <= ar_sel;
      end
    end
  end

  a_aw_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
      slv_req_o.aw_valid && !slv_rsp_i.aw_ready |=> slv_req_o.aw_valid && $stable(slv_req_o.aw));
  a_ar_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
      slv_req_o.ar_valid && !slv_rsp_i.ar_ready |=> slv_req_o.ar_valid && $stable(slv_req_o.ar));
endmodule
