// axi_mem_model -- behavioural AXI4 memory with configurable latency, for
// testbenches only.
//
// Stands for the "latency" stage plus "ideal memory" of the evaluation set-up:
// a read burst accepted in cycle t returns its first beat no earlier than
// cycle t + LATENCY, then one beat per cycle; a write burst gets its B response
// LATENCY cycles after its last W beat. Reads are served strictly in order of
// acceptance (legal for AXI, every ID sees its own order), writes likewise.
// Storage is a sparse array of 64-bit words; unwritten words read as a
// pattern derived from the address. Tasks poke64/peek64 give backdoor access.
// Counts r_beats/w_beats for utilisation measurements. All outputs are
// driven from flip-flops.
//
// The latency-configurable memory stands in for the evaluation memory system
// described for the DMAC; in-order answers, the sparse store and the address
// pattern are this model's choices.
module axi_mem_model
  import dmac_pkg::*;
#(
  parameter type         req_t   = slv_req_t,
  parameter type         rsp_t   = slv_rsp_t,
  parameter int unsigned IDW     = SLV_ID_W,
  parameter int unsigned LATENCY = 1,
  parameter int unsigned MAX_OUT = 64   // outstanding bursts per direction
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  req_t req_i,
  output rsp_t rsp_o
);
  typedef struct {
    logic [IDW-1:0] id;
    addr_t          addr;
    int unsigned    len;
    longint unsigned t;
  } burst_t;

  data_t mem [addr_t];
  burst_t ar_q[$], aw_q[$];
  burst_t b_q[$];
  int unsigned r_beat, w_beat;
  longint unsigned cyc;
  longint unsigned r_beats, w_beats;

  function automatic data_t peek64(addr_t a);
    addr_t k = a >> 3;
    if (mem.exists(k)) return mem[k];
    return {a[31:0] ^ 32'h5a5a_0f0f, ~a[31:0]};
  endfunction

  function automatic void poke64(addr_t a, data_t d);
    mem[a >> 3] = d;
  endfunction

  // Outputs are registered: after the handshakes of a clock edge have been
  // processed, the next cycle's outputs are computed from the new state.
  function automatic rsp_t next_rsp(longint unsigned now, int unsigned rb);
    rsp_t r;
    r = '0;
    r.ar_ready = (ar_q.size() < MAX_OUT);
    r.aw_ready = (aw_q.size() < MAX_OUT);
    if (ar_q.size() != 0 && now >= ar_q[0].t + 64'(LATENCY)) begin
      r.r_valid = 1'b1;
      r.r.id    = ar_q[0].id;
      r.r.data  = peek64(ar_q[0].addr + addr_t'(8 * rb));
      r.r.last  = (rb == ar_q[0].len);
    end
    r.w_ready = (aw_q.size() != 0);
    if (b_q.size() != 0 && now >= b_q[0].t + 64'(LATENCY)) begin
      r.b_valid = 1'b1;
      r.b.id    = b_q[0].id;
    end
    return r;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ar_q.delete(); aw_q.delete(); b_q.delete();
      r_beat <= 0; w_beat <= 0; cyc <= 0; r_beats <= 0; w_beats <= 0;
      rsp_o <= '0;
    end else begin
      int unsigned rb, wb;
      rb = r_beat;
      wb = w_beat;
      if (rsp_o.r_valid && req_i.r_ready) begin
        r_beats <= r_beats + 1;
        if (rsp_o.r.last) begin
          void'(ar_q.pop_front());
          rb = 0;
        end else rb++;
      end
      if (rsp_o.w_ready && req_i.w_valid) begin
        data_t old, nw;
        addr_t a;
        a   = aw_q[0].addr + addr_t'(8 * wb);
        old = peek64(a);
        for (int b = 0; b < 8; b++) nw[8*b +: 8] = req_i.w.strb[b] ? req_i.w.data[8*b +: 8] : old[8*b +: 8];
        poke64(a, nw);
        w_beats <= w_beats + 1;
        if (req_i.w.last) begin
          burst_t bb;
          bb = aw_q.pop_front();
          bb.t = cyc;
          b_q.push_back(bb);
          wb = 0;
        end else wb++;
      end
      if (rsp_o.b_valid && req_i.b_ready) void'(b_q.pop_front());
      if (req_i.ar_valid && rsp_o.ar_ready)
        ar_q.push_back('{id: req_i.ar.id, addr: req_i.ar.addr, len: int'(req_i.ar.len), t: cyc});
      if (req_i.aw_valid && rsp_o.aw_ready)
        aw_q.push_back('{id: req_i.aw.id, addr: req_i.aw.addr, len: int'(req_i.aw.len), t: cyc});
      r_beat <= rb;
      w_beat <= wb;
      cyc    <= cyc + 1;
      rsp_o  <= next_rsp(cyc + 1, rb);
    end
  end
endmodule
