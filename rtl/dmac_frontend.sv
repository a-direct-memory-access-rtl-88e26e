// dmac_frontend -- descriptor-based programming interface of the DMAC.
//
// The frontend turns chains of 32-byte descriptors in shared memory into
// linear transfer requests for a DMA backend and reports their completion:
//
//   register bus --> dmac_regs (launch queue) --> dmac_desc_fetch (AXI AR/R,
//   speculative prefetch) --+--> backend request queue --> be_req_*
//                           +--> dmac_feedback (completion ring) <-- be_done_*
//                                    |--> AXI AW/W/B (all-ones mark)
//                                    |--> irq_o
//
// Descriptor reads and completion writes share one AXI4 manager port: reads
// come from the request logic, writes from the feedback logic. A fetched
// descriptor is handed to the backend queue and recorded in the feedback ring
// in the same cycle; it waits if either is full. The backend queue and the ring
// both have NUM_INFLIGHT entries, the number of descriptors in flight (the
// request logic reserves a place before it reads a descriptor, counting the
// ring's occupancy, so neither ever refuses a fetched descriptor);
// NUM_SPEC is the number of speculative prefetch slots (0 turns prefetching
// off). The defaults, 4 and 4, are the paper's 'speculation' configuration.
//
// be_req_o: one linear transfer per valid/ready handshake. be_done_*: one
// handshake per completed transfer, in request order.
//
// The structure (registers, request logic, queue to the backend, feedback
// logic, one AXI port) follows the paper; the queue depths beyond
// NUM_INFLIGHT and the port conventions are this design's choices.
module dmac_frontend
  import dmac_pkg::*;
#(
  parameter int unsigned NUM_INFLIGHT = 4,
  parameter int unsigned NUM_SPEC     = 4,
  parameter int unsigned CSR_DEPTH    = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // configuration port
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  // AXI manager port for descriptors and completion marks
  output mst_req_t axi_req_o,
  input  mst_rsp_t axi_rsp_i,
  // backend
  output logic     be_req_valid_o,
  input  logic     be_req_ready_i,
  output be_req_t  be_req_o,
  input  logic     be_done_valid_i,
  output logic     be_done_ready_o,
  // interrupt
  output logic     irq_o,
  // statistics
  output logic     spec_hit_o,
  output logic     spec_miss_o,
  output logic     spec_issue_o
);
  logic  chain_valid, chain_ready;
  addr_t chain_addr;
  logic  fetch_busy, fb_busy, beq_busy;

  dmac_regs #(.QUEUE_DEPTH(CSR_DEPTH)) i_regs (
    .clk_i, .rst_ni,
    .reg_req_i, .reg_rsp_o,
    .chain_valid_o(chain_valid),
    .chain_ready_i(chain_ready),
    .chain_addr_o (chain_addr),
    .busy_i       (fetch_busy || fb_busy || beq_busy)
  );

  logic          desc_valid, desc_ready;
  fetched_desc_t desc;

  logic [$clog2(NUM_INFLIGHT+1)-1:0] fb_count;

  dmac_desc_fetch #(.NUM_SPEC(NUM_SPEC), .NUM_INFLIGHT(NUM_INFLIGHT)) i_fetch (
    .clk_i, .rst_ni,
    .chain_valid_i(chain_valid),
    .chain_ready_o(chain_ready),
    .chain_addr_i (chain_addr),
    .ar_o         (axi_req_o.ar),
    .ar_valid_o   (axi_req_o.ar_valid),
    .ar_ready_i   (axi_rsp_i.ar_ready),
    .r_i          (axi_rsp_i.r),
    .r_valid_i    (axi_rsp_i.r_valid),
    .r_ready_o    (axi_req_o.r_ready),
    .desc_valid_o (desc_valid),
    .desc_ready_i (desc_ready),
    .desc_o       (desc),
    .inflight_i   (fb_count),
    .busy_o       (fetch_busy),
    .spec_hit_o, .spec_miss_o, .spec_issue_o
  );

  logic beq_in_ready, rec_ready;
  logic [$clog2(NUM_INFLIGHT+1)-1:0] beq_count;
  assign desc_ready = beq_in_ready && rec_ready;
  assign beq_busy   = (beq_count != '0);

  dmac_fifo #(.T(be_req_t), .DEPTH(NUM_INFLIGHT)) i_be_queue (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .in_valid_i (desc_valid && rec_ready),
    .in_ready_o (beq_in_ready),
    .in_data_i  (desc.xfer),
    .out_valid_o(be_req_valid_o),
    .out_ready_i(be_req_ready_i),
    .out_data_o (be_req_o),
    .count_o    (beq_count)
  );

  dmac_feedback #(.NUM_INFLIGHT(NUM_INFLIGHT)) i_feedback (
    .clk_i, .rst_ni,
    .rec_valid_i    (desc_valid && beq_in_ready),
    .rec_ready_o    (rec_ready),
    .rec_addr_i     (desc.desc_addr),
    .rec_irq_i      (desc.irq),
    .be_done_valid_i,
    .be_done_ready_o,
    .aw_o           (axi_req_o.aw),
    .aw_valid_o     (axi_req_o.aw_valid),
    .aw_ready_i     (axi_rsp_i.aw_ready),
    .w_o            (axi_req_o.w),
    .w_valid_o      (axi_req_o.w_valid),
    .w_ready_i      (axi_rsp_i.w_ready),
    .b_i            (axi_rsp_i.b),
    .b_valid_i      (axi_rsp_i.b_valid),
    .b_ready_o      (axi_req_o.b_ready),
    .irq_o,
    .busy_o         (fb_busy),
    .count_o        (fb_count)
  );
endmodule
