// dmac_fifo -- synchronous valid/ready FIFO used for the queues of the DMAC.
//
// DEPTH entries of type T held in a register array. Push when in_valid &
// in_ready, pop when out_valid & out_ready; both may happen in one cycle, also
// when full (the pop frees the slot in the same cycle). No fall-through: data
// pushed in cycle t is visible at the output in cycle t+1. Output data is
// registered array content, so it is stable while out_valid is held.
// A FIFO with a valid/ready interface on both sides is this design's choice for
// the queues the frontend needs; the paper only says they exist.
module dmac_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic flush_i,
  input  logic in_valid_i,
  output logic in_ready_o,
  input  T     in_data_i,
  output logic out_valid_o,
  input  logic out_ready_i,
  output T     out_data_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  typedef logic [$clog2(DEPTH+1)-1:0] cnt_t;

  T            mem_q [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  cnt_t        cnt_q;

  logic push, pop;
  assign out_valid_o = (cnt_q != '0);
  assign in_ready_o  = (cnt_q < cnt_t'(DEPTH)) || out_ready_i;
  assign push        = in_valid_i && in_ready_o;
  assign pop         = out_valid_o && out_ready_i;
  assign out_data_o  = mem_q[rd_q];
  assign count_o     = cnt_q;

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else if (flush_i) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      cnt_q <= cnt_q + cnt_t'(push) - cnt_t'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= in_data_i;
  end

  initial assert (DEPTH >= 1) else $error("dmac_fifo: DEPTH must be at least 1");

  // Count never exceeds depth
  a_bounds: assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= cnt_t'(DEPTH));
endmodule
