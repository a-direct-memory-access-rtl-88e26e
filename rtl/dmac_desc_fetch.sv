// dmac_desc_fetch -- request logic of the DMAC frontend: descriptor fetching,
// chain following and speculative prefetching.
//
// A chain is launched by an address from the register queue. The request logic
// reads the 32-byte descriptor there with one 4-beat INCR burst on the AXI read
// channel, and then keeps following the 'next' pointers until it reads the
// end-of-chain value (all ones). Each descriptor, once all four beats are in,
// leaves on the desc_* port together with its own address and its IRQ flag.
//
// Speculative prefetching (NUM_SPEC > 0). After the committed request for a
// descriptor at address A has been issued, the logic guesses that the chain is
// laid out contiguously and issues up to NUM_SPEC further reads at A+32, A+64,
// ... Those requests occupy "speculation slots". Because every slot holds the
// address of the previous one plus 32, a slot count is all the state needed.
// When the 'next' field (beat 1) of the descriptor being received arrives:
//   * next == address of the oldest slot: hit. The slot is committed, that
//     read becomes the expected next descriptor, one slot is freed.
//   * next == all ones: the chain ends; all slots are discarded.
//   * otherwise: miss. All slots are discarded and the read for 'next' is put
//     on the AR channel in this same cycle (combinationally from the R beat),
//     so a miss costs no more latency than having prefetching switched off.
// Discarded reads are still in flight; their responses are counted in
// drop_q and consumed (r_ready high) without effect. AXI returns reads of one
// ID in order, so the response stream is always: rest of the current
// descriptor, then drop_q discarded descriptors, then the committed one, then
// the slots.
// With NUM_SPEC = 0 every 'next' is a miss and is issued in the cycle it arrives.
//
// A new chain from the queue is taken once the current chain's end has been
// seen, even while the last descriptor's remaining beats or discarded reads are
// still arriving.
//
// A speculative read that AR does not accept at once is held unchanged until
// it is, and is turned into a discarded read if the slots are flushed meanwhile.
//
// Read credits: a descriptor read (committed or speculative) is only issued
// while the descriptors already reserved (reads in flight that will be used,
// plus inflight_i handed over but not completed) are fewer than NUM_INFLIGHT.
// So the last beat of a descriptor never waits and R is never held low, which
// keeps the backend's payload reads behind it flowing. A miss reissue counts
// the slots it frees in the same cycle; without a free place it is issued as
// soon as one frees up.
//
// Interface timing: chain_* and desc_* are valid/ready handshakes. desc_valid_o
// is driven combinationally by the last R beat (r_ready then follows
// desc_ready_i). AR uses ID 0, len = 3, size = 8 bytes. Descriptors are assumed
// to be 32-byte aligned so that no burst crosses a 4 KiB boundary. Read
// response errors are not reported (not described for the frontend).
//
// Prefetching, slot discard on a miss and zero-latency reissue follow the
// paper; the slot counter representation, the drop counter and the alignment
// rule are this design's choices.
module dmac_desc_fetch
  import dmac_pkg::*;
#(
  parameter int unsigned NUM_SPEC     = 4,
  parameter int unsigned NUM_INFLIGHT = 4
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // chain launches from the register queue
  input  logic          chain_valid_i,
  output logic          chain_ready_o,
  input  addr_t         chain_addr_i,
  // AXI read address / read data (frontend manager port)
  output mst_ax_t       ar_o,
  output logic          ar_valid_o,
  input  logic          ar_ready_i,
  input  mst_r_t        r_i,
  input  logic          r_valid_i,
  output logic          r_ready_o,
  // fetched descriptors
  output logic          desc_valid_o,
  input  logic          desc_ready_i,
  output fetched_desc_t desc_o,
  // status and statistics
  // descriptors already handed over and not yet completed
  input  logic [$clog2(NUM_INFLIGHT+1)-1:0] inflight_i,
  output logic          busy_o,
  output logic          spec_hit_o,    // a slot was committed this cycle
  output logic          spec_miss_o,   // a mispredicted 'next' was reissued this cycle
  output logic          spec_issue_o   // a speculative read was issued this cycle
);
  localparam int unsigned SW = $clog2(NUM_SPEC + 1) > 0 ? $clog2(NUM_SPEC + 1) : 1;
  localparam int unsigned DW = $clog2(2 * NUM_SPEC + 2);
  localparam int unsigned BW = $clog2(DESC_BEATS);
  localparam addr_t       DESC_STRIDE = addr_t'(DESC_BYTES);

  typedef logic [SW-1:0] slot_cnt_t;
  typedef logic [DW-1:0] drop_cnt_t;

  // committed descriptor whose response is expected next (after drops)
  logic      nxt_valid_q, nxt_issued_q;
  addr_t     nxt_addr_q;
  // descriptor currently being received
  addr_t     cur_addr_q;
  logic      cur_next_known_q;
  logic [31:0] cur_len_q, cur_cfg_q;
  addr_t     cur_src_q;
  // response bookkeeping
  logic [BW-1:0] beat_q;
  logic      beat_drop_q;
  drop_cnt_t drop_q;
  slot_cnt_t n_spec_q;

  // held speculative request (see below)
  logic  hold_q, hold_stale_q;
  addr_t hold_addr_q;

  // ---------------- response side ----------------
  logic r_hs, this_drop, this_cur;
  assign this_drop = (beat_q == '0) ? (drop_q != '0) : beat_drop_q;
  assign this_cur  = !this_drop;

  logic last_beat, next_beat;
  assign last_beat = (beat_q == BW'(DESC_BEATS - 1));
  assign next_beat = (beat_q == BW'(1));

  // r_ready: drops and beats 0..2 always accepted, last beat needs the sink
  assign r_ready_o = this_drop || !last_beat || desc_ready_i;
  assign r_hs      = r_valid_i && r_ready_o;

  assign desc_valid_o             = r_valid_i && this_cur && last_beat;
  assign desc_o.desc_addr         = cur_addr_q;
  assign desc_o.irq               = cur_cfg_q[CFG_IRQ_BIT];
  assign desc_o.xfer.length       = cur_len_q;
  assign desc_o.xfer.opts         = cur_cfg_q[31:1];
  assign desc_o.xfer.src          = cur_src_q;
  assign desc_o.xfer.dst          = r_i.data;

  // decision on the 'next' field
  addr_t rx_next, spec_base, slot0_addr;
  logic  decide, is_eoc, is_hit, is_miss;
  assign rx_next    = r_i.data;
  assign decide     = r_hs && this_cur && next_beat;
  assign slot0_addr = cur_addr_q + DESC_STRIDE;
  assign is_eoc     = decide && (rx_next == END_OF_CHAIN);
  assign is_hit     = decide && !is_eoc && (n_spec_q != '0) && (rx_next == slot0_addr);
  assign is_miss    = decide && !is_eoc && !is_hit;

  // ---------------- request side ----------------
  logic cur_live;     // current descriptor's chain continues, next unknown yet
  assign cur_live = (beat_q != '0) && !beat_drop_q && !cur_next_known_q;

  assign chain_ready_o = !nxt_valid_q && !cur_live;
  logic chain_start;
  assign chain_start = chain_valid_i && chain_ready_o;

  // base of the speculation slots: the most recent committed address
  assign spec_base = nxt_valid_q ? nxt_addr_q : cur_addr_q;
  logic spec_ok;
  assign spec_ok = (NUM_SPEC != 0) && (n_spec_q < slot_cnt_t'(NUM_SPEC)) &&
                   (nxt_valid_q ? nxt_issued_q : cur_live) && !decide;

  // A speculative request that was not accepted is held unchanged on AR
  // (AXI forbids withdrawing a valid request). If the slots were discarded in
  // the meantime, the held request is stale and its response will be dropped.

  // Read credits. Every descriptor read that is not going to be discarded
  // reserves one of the NUM_INFLIGHT places before it is issued, so a fetched
  // descriptor always finds room and R never has to wait for the backend
  // (waiting would block payload reads queued behind it in an in-order memory).
  localparam int unsigned RW = $clog2(NUM_INFLIGHT + NUM_SPEC + 4);
  typedef logic [RW-1:0] res_t;
  res_t resv, resv_miss;
  logic credit, credit_miss;
  assign resv = res_t'(nxt_valid_q && nxt_issued_q) + res_t'(n_spec_q) +
                res_t'(hold_q && !hold_stale_q) + res_t'((beat_q != '0) && !beat_drop_q) +
                res_t'(inflight_i);
  // on a miss the slots are freed in the same cycle
  assign resv_miss   = resv - res_t'(n_spec_q);
  assign credit      = (resv < res_t'(NUM_INFLIGHT));
  assign credit_miss = (resv_miss < res_t'(NUM_INFLIGHT));

  typedef enum logic [2:0] {AR_NONE, AR_HOLD, AR_RETRY, AR_MISS, AR_SPEC} ar_src_e;
  ar_src_e ar_src;
  addr_t   ar_addr;
  always_comb begin
    ar_src  = AR_NONE;
    ar_addr = '0;
    if (hold_q) begin
      ar_src  = AR_HOLD;
      ar_addr = hold_addr_q;
    end else if (nxt_valid_q && !nxt_issued_q && credit) begin
      ar_src  = AR_RETRY;
      ar_addr = nxt_addr_q;
    end else if (is_miss && credit_miss) begin
      ar_src  = AR_MISS;
      ar_addr = rx_next;
    end else if (spec_ok && credit) begin
      ar_src  = AR_SPEC;
      ar_addr = spec_base + DESC_STRIDE * (addr_t'(n_spec_q) + addr_t'(1));
    end
  end

  assign ar_valid_o = (ar_src != AR_NONE);
  assign ar_o.id    = '0;
  assign ar_o.addr  = ar_addr;
  assign ar_o.len   = 8'(DESC_BEATS - 1);
  assign ar_o.size  = 3'($clog2(AXI_STRB_W));
  assign ar_o.burst = BURST_INCR;

  logic ar_hs, spec_hs, spec_dead;
  assign ar_hs     = ar_valid_o && ar_ready_i;
  assign spec_hs   = ar_hs && (ar_src == AR_SPEC || ar_src == AR_HOLD);
  // a speculative read accepted after (or in the cycle of) a slot discard
  assign spec_dead = (ar_src == AR_HOLD && hold_stale_q) || is_eoc || is_miss;

  assign spec_hit_o   = is_hit;
  assign spec_miss_o  = is_miss && (n_spec_q != '0);
  assign spec_issue_o = spec_hs;

  assign busy_o = nxt_valid_q || hold_q || (beat_q != '0) || (drop_q != '0) || (n_spec_q != '0);

  // ---------------- state update ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      nxt_valid_q      <= 1'b0;
      nxt_issued_q     <= 1'b0;
      nxt_addr_q       <= '0;
      cur_addr_q       <= '0;
      cur_next_known_q <= 1'b0;
      cur_len_q        <= '0;
      cur_cfg_q        <= '0;
      cur_src_q        <= '0;
      beat_q           <= '0;
      beat_drop_q      <= 1'b0;
      drop_q           <= '0;
      n_spec_q         <= '0;
      hold_q           <= 1'b0;
      hold_stale_q     <= 1'b0;
      hold_addr_q      <= '0;
    end else begin
      // ---- held speculative request ----
      if (ar_src == AR_SPEC && !ar_ready_i) begin
        hold_q       <= 1'b1;
        hold_addr_q  <= ar_addr;
        hold_stale_q <= 1'b0;
      end else if (ar_src == AR_HOLD && ar_ready_i) begin
        hold_q       <= 1'b0;
        hold_stale_q <= 1'b0;
      end else if (hold_q && (is_eoc || is_miss)) begin
        hold_stale_q <= 1'b1;
      end

      // ---- response handling ----
      if (r_hs) begin
        beat_q <= last_beat ? '0 : beat_q + 1'b1;
        if (beat_q == '0) beat_drop_q <= this_drop;
        if (this_drop) begin
          if (last_beat) drop_q <= drop_q - 1'b1;
        end else begin
          unique case (beat_q)
            BW'(0): begin
              cur_addr_q       <= nxt_addr_q;
              cur_next_known_q <= 1'b0;
              cur_len_q        <= r_i.data[31:0];
              cur_cfg_q        <= r_i.data[63:32];
            end
            BW'(1): begin
              cur_next_known_q <= 1'b1;
            end
            BW'(2): cur_src_q <= r_i.data;
            default: ;
          endcase
        end
      end

      // ---- committed request bookkeeping ----
      // the committed descriptor's data starts arriving: it becomes current
      if (r_hs && this_cur && beat_q == '0) begin
        nxt_valid_q <= 1'b0;
      end
      if (is_hit) begin
        nxt_valid_q  <= 1'b1;
        nxt_issued_q <= 1'b1;
        nxt_addr_q   <= slot0_addr;
      end else if (is_miss) begin
        nxt_valid_q  <= 1'b1;
        nxt_issued_q <= ar_hs && (ar_src == AR_MISS);
        nxt_addr_q   <= rx_next;
      end else if (chain_start) begin
        nxt_valid_q  <= 1'b1;
        nxt_issued_q <= 1'b0;
        nxt_addr_q   <= chain_addr_i;
      end else if (ar_hs && ar_src == AR_RETRY) begin
        nxt_issued_q <= 1'b1;
      end

      // ---- speculation slots and drop counter ----
      begin
        slot_cnt_t ns;
        drop_cnt_t nd;
        ns = n_spec_q;
        nd = drop_q;
        if (r_hs && this_drop && last_beat) nd = nd - 1'b1;
        if (is_hit) ns = ns - 1'b1;
        if (is_eoc || is_miss) begin
          nd = nd + drop_cnt_t'(ns);
          ns = '0;
        end
        if (spec_hs) begin
          if (spec_dead) nd = nd + 1'b1;
          else           ns = ns + 1'b1;
        end
        n_spec_q <= ns;
        drop_q   <= nd;
      end
    end
  end

  // ---------------- protocol checks ----------------
  // a request on AR, once offered, stays unchanged until accepted
  logic    ar_wait_q;
  mst_ax_t ar_prev_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ar_wait_q <= 1'b0;
      ar_prev_q <= '0;
    end else begin
      ar_wait_q <= ar_valid_o && !ar_ready_i;
      ar_prev_q <= ar_o;
      a_ar_stable: assert (!ar_wait_q || (ar_valid_o && ar_o == ar_prev_q))
        else $error("AR request changed before it was accepted");
    end
  end
  a_r_last: assert property (@(posedge clk_i) disable iff (!rst_ni)
      r_valid_i && r_ready_o |-> (r_i.last == last_beat));
  a_cur_known: assert property (@(posedge clk_i) disable iff (!rst_ni)
      r_valid_i && this_cur && beat_q == '0 |-> nxt_valid_q && nxt_issued_q);
  a_drop_bound: assert property (@(posedge clk_i) disable iff (!rst_ni)
      drop_q <= drop_cnt_t'(2 * NUM_SPEC + 1));
endmodule
