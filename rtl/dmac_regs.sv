// dmac_regs -- configuration registers of the DMAC frontend.
//
// The frontend is programmed through one memory-mapped register: writing the
// address of the first descriptor of a chain to DESC_ADDR (offset 0x00) launches
// that chain. Launch requests are queued in a FIFO of QUEUE_DEPTH entries so
// that software can hand over several chains without waiting; the request logic
// takes them out one at a time. A write while the queue is full is held (ready
// stays low) until an entry frees up, so no launch is ever lost.
//
// STATUS (offset 0x08, read-only):
//   bit 0      busy: a chain is queued or the frontend still has work in flight
//   bit 1      launch queue full
//   bits 15:8  number of queued (not yet started) chains
// Reads of DESC_ADDR return 0. Any other offset answers with error = 1.
//
// Timing: a write handshake in cycle t makes the chain visible at chain_valid_o
// in cycle t+1. Reads answer in the handshake cycle.
//
// The queued CSR follows the paper; the register map, the status register and
// the stall-on-full behaviour are this design's choices.
module dmac_regs
  import dmac_pkg::*;
#(
  parameter int unsigned QUEUE_DEPTH = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     chain_valid_o,
  input  logic     chain_ready_i,
  output addr_t    chain_addr_o,
  input  logic     busy_i
);
  localparam int unsigned CW = $clog2(QUEUE_DEPTH+1);

  logic          q_in_valid, q_in_ready;
  logic [CW-1:0] q_count;

  dmac_fifo #(.T(addr_t), .DEPTH(QUEUE_DEPTH)) i_queue (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .in_valid_i (q_in_valid),
    .in_ready_o (q_in_ready),
    .in_data_i  (reg_req_i.wdata),
    .out_valid_o(chain_valid_o),
    .out_ready_i(chain_ready_i),
    .out_data_o (chain_addr_o),
    .count_o    (q_count)
  );

  logic is_launch;
  assign is_launch  = reg_req_i.valid && reg_req_i.write && (reg_req_i.addr == REG_DESC_ADDR);
  assign q_in_valid = is_launch;

  always_comb begin
    reg_rsp_o = '0;
    if (reg_req_i.valid) begin
      if (reg_req_i.write) begin
        if (reg_req_i.addr == REG_DESC_ADDR) reg_rsp_o.ready = q_in_ready;
        else begin
          reg_rsp_o.ready = 1'b1;
          reg_rsp_o.error = 1'b1;
        end
      end else begin
        reg_rsp_o.ready = 1'b1;
        unique case (reg_req_i.addr)
          REG_DESC_ADDR: reg_rsp_o.rdata = '0;
          REG_STATUS: begin
            reg_rsp_o.rdata[0]    = busy_i || chain_valid_o;
            reg_rsp_o.rdata[1]    = (q_count == CW'(QUEUE_DEPTH));
            reg_rsp_o.rdata[15:8] = 8'(q_count);
          end
          default: reg_rsp_o.error = 1'b1;
        endcase
      end
    end
  end
endmodule
