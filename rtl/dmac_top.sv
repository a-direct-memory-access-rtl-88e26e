// dmac_top -- the DMAC as it sits in a 64-bit AXI4 system: DMA frontend plus
// the round-robin arbiter that joins its manager port with the backend's.
//
// The DMA backend (the AXI engine that moves the payload) is not part of this
// RTL; its two interfaces are ports of this module: be_req_*/be_done_* carry
// linear transfers to it and completions back, be_axi_* is the backend's own
// AXI manager port, which enters the arbiter on port 0. The frontend's port
// (descriptor reads, completion writes) is arbiter port 1. The merged port
// axi_req_o/axi_rsp_i carries one extra ID bit (1 = frontend).
//
// Configuration port: reg_req_i/reg_rsp_o (see dmac_regs). irq_o: one-cycle
// pulse per completed descriptor whose config bit 0 is set.
//
// Defaults: NUM_INFLIGHT = 4 descriptors in flight and NUM_SPEC = 4 prefetch
// slots, the paper's 'speculation' configuration; 64-bit address and data.
module dmac_top
  import dmac_pkg::*;
#(
  parameter int unsigned NUM_INFLIGHT = 4,
  parameter int unsigned NUM_SPEC     = 4,
  parameter int unsigned CSR_DEPTH    = 4,
  parameter int unsigned W_FIFO_DEPTH = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // configuration port
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  // backend transfer interface
  output logic     be_req_valid_o,
  input  logic     be_req_ready_i,
  output be_req_t  be_req_o,
  input  logic     be_done_valid_i,
  output logic     be_done_ready_o,
  // backend AXI manager port (into the arbiter)
  input  mst_req_t be_axi_req_i,
  output mst_rsp_t be_axi_rsp_o,
  // merged AXI manager port to the memory system
  output slv_req_t axi_req_o,
  input  slv_rsp_t axi_rsp_i,
  // interrupt to the platform interrupt controller
  output logic     irq_o,
  // statistics
  output logic     spec_hit_o,
  output logic     spec_miss_o,
  output logic     spec_issue_o
);
  mst_req_t mux_req [2];
  mst_rsp_t mux_rsp [2];

  assign mux_req[0]   = be_axi_req_i;
  assign be_axi_rsp_o = mux_rsp[0];

  dmac_frontend #(
    .NUM_INFLIGHT(NUM_INFLIGHT),
    .NUM_SPEC    (NUM_SPEC),
    .CSR_DEPTH   (CSR_DEPTH)
  ) i_frontend (
    .clk_i, .rst_ni,
    .reg_req_i, .reg_rsp_o,
    .axi_req_o(mux_req[1]),
    .axi_rsp_i(mux_rsp[1]),
    .be_req_valid_o, .be_req_ready_i, .be_req_o,
    .be_done_valid_i, .be_done_ready_o,
    .irq_o,
    .spec_hit_o, .spec_miss_o, .spec_issue_o
  );

  axi_rr_arbiter #(.W_FIFO_DEPTH(W_FIFO_DEPTH)) i_rr (
    .clk_i, .rst_ni,
    .mst_req_i(mux_req),
    .mst_rsp_o(mux_rsp),
    .slv_req_o(axi_req_o),
    .slv_rsp_i(axi_rsp_i)
  );
endmodule
