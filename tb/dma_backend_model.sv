// dma_backend_model -- behavioural stand-in for the DMA backend, for
// testbenches only.
//
// Executes linear transfers given on be_req_*: reads length bytes from src and
// writes them to dst over its own AXI4 manager port, then signals completion on
// be_done_* in request order. Transfers are split into INCR bursts of at most
// 256 beats that do not cross 4 KiB. Reads of later transfers may overlap the
// writes of earlier ones; read data is buffered without limit. Source,
// destination and length must be multiples of 8 bytes (bus-aligned transfers).
// Keeps counts of payload beats (r_beats, w_beats) for utilisation. All
// outputs are driven from flip-flops.
//
// The backend is an existing engine outside this design; this model only
// reproduces its job interface. Burst splitting, MAX_JOBS and in-order
// completion are this model's choices.
module dma_backend_model
  import dmac_pkg::*;
#(
  parameter int unsigned MAX_JOBS = 2
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  be_req_t  req_i,
  output logic     done_valid_o,
  input  logic     done_ready_i,
  output mst_req_t axi_req_o,
  input  mst_rsp_t axi_rsp_i
);
  typedef struct {
    addr_t       addr;
    int unsigned beats;
    bit          last_of_job;
  } bst_t;

  bst_t ar_q[$], aw_q[$], w_q[$], b_q[$];
  data_t data_q[$];
  int unsigned jobs_open;   // accepted, not yet completed
  int unsigned done_cnt;    // completions not yet handed out
  int unsigned w_beat;
  longint unsigned r_beats, w_beats;


  // Outputs are registered: computed from the state after each clock edge.
  function automatic mst_req_t next_req(int unsigned wbeat);
    mst_req_t q;
    q = '0;
    q.r_ready = 1'b1;
    q.b_ready = 1'b1;
    if (ar_q.size() != 0) begin
      q.ar_valid = 1'b1;
      q.ar.addr  = ar_q[0].addr;
      q.ar.len   = 8'(ar_q[0].beats - 1);
      q.ar.size  = 3'd3;
      q.ar.burst = BURST_INCR;
    end
    if (aw_q.size() != 0) begin
      q.aw_valid = 1'b1;
      q.aw.addr  = aw_q[0].addr;
      q.aw.len   = 8'(aw_q[0].beats - 1);
      q.aw.size  = 3'd3;
      q.aw.burst = BURST_INCR;
    end
    if (w_q.size() != 0 && data_q.size() != 0) begin
      q.w_valid = 1'b1;
      q.w.data  = data_q[0];
      q.w.strb  = '1;
      q.w.last  = (wbeat == w_q[0].beats - 1);
    end
    return q;
  endfunction

  function automatic void split(addr_t a, int unsigned bytes, ref bst_t q[$], input bit mark_last);
    while (bytes != 0) begin
      int unsigned to_4k, n;
      to_4k = (4096 - int'(a[11:0])) / 8;
      n = bytes / 8;
      if (n > 256) n = 256;
      if (n > to_4k) n = to_4k;
      q.push_back('{addr: a, beats: n, last_of_job: mark_last && (bytes == 8 * n)});
      a = a + addr_t'(8 * n);
      bytes = bytes - 8 * n;
    end
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ar_q.delete(); aw_q.delete(); w_q.delete(); b_q.delete(); data_q.delete();
      jobs_open <= 0; done_cnt <= 0; w_beat <= 0; r_beats <= 0; w_beats <= 0;
      axi_req_o <= '0; req_ready_o <= 1'b0; done_valid_o <= 1'b0;
    end else begin
      int unsigned jo, dc, wb;
      wb = w_beat;
      jo = jobs_open;
      dc = done_cnt;
      if (req_valid_i && req_ready_o) begin
        if (req_i.length[2:0] != 0 || req_i.src[2:0] != 0 || req_i.dst[2:0] != 0)
          $fatal(1, "dma_backend_model: transfer not 8-byte aligned (len %h src %h dst %h)",
                 req_i.length, req_i.src, req_i.dst);
        jo++;
        if (req_i.length == 0) dc++;
        else begin
          split(req_i.src, req_i.length, ar_q, 1'b0);
          split(req_i.dst, req_i.length, aw_q, 1'b1);
        end
      end
      if (axi_req_o.ar_valid && axi_rsp_i.ar_ready) void'(ar_q.pop_front());
      if (axi_req_o.aw_valid && axi_rsp_i.aw_ready) begin
        w_q.push_back(aw_q[0]);
        b_q.push_back(aw_q[0]);
        void'(aw_q.pop_front());
      end
      if (axi_rsp_i.r_valid) begin
        data_q.push_back(axi_rsp_i.r.data);
        r_beats <= r_beats + 1;
      end
      if (axi_req_o.w_valid && axi_rsp_i.w_ready) begin
        void'(data_q.pop_front());
        w_beats <= w_beats + 1;
        if (axi_req_o.w.last) begin
          void'(w_q.pop_front());
          wb = 0;
        end else wb++;
      end
      if (axi_rsp_i.b_valid) begin
        if (b_q[0].last_of_job) dc++;
        void'(b_q.pop_front());
      end
      if (done_valid_o && done_ready_i) begin
        dc--;
        jo--;
      end
      jobs_open    <= jo;
      done_cnt     <= dc;
      w_beat       <= wb;
      axi_req_o    <= next_req(wb);
      req_ready_o  <= (jo < MAX_JOBS);
      done_valid_o <= (dc != 0);
    end
  end
endmodule
