// delay_queues: load-balanced forward-index checking. Candidate records of up
// to NACT activated clusters wait in NACT separate queues (one cluster per
// queue). Each cycle the head of every queue whose target rank is idle is
// dispatched, so records of a later cluster can be checked while an earlier
// cluster still waits for a busy rank: out-of-order F-Idx checking.
//
// A queue is allocated to a cluster at its first record, closed by the
// record (or marker) flagged last, and freed only when it is empty and all
// records it dispatched have returned a score (done_valid/done_tag). With
// NACT = 1 this is the strict cluster-by-cluster order with its barrier; the
// paper's chosen configuration activates 5 clusters. Queue depth, the fixed
// rank-priority and the rotating queue priority are this design's choices.
//
// Interface: in_* is a valid/ready stream (in_is_rec = 0 carries only the
// cluster-end flag). dispatch_valid[r] pulses for one cycle with
// dispatch_cand[r] when rank r (global index dimm*RK + rank) is given a
// record; rank_ready[r] must be high in that cycle. stall_cycles counts cycles
// in which an input waited because no queue could take it.
//
// The concurrent assertion in this module is disabled while rst_n is low;
// that use of the asynchronous reset inside a synchronous property is
// intended and is what a lint tool reports as a mixed sync/async net.
module delay_queues
  import spanns_pkg::*;
#(
  parameter int unsigned NACT  = N_ACT,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned NFD   = N_FD,
  parameter int unsigned RK    = RANKS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic flush,
  input  logic  in_valid,
  output logic  in_ready,
  input  cand_t in_cand,
  input  logic  in_is_rec,
  input  logic  in_last,
  input  logic  [NFD*RK-1:0]        rank_ready,
  output logic  [NFD*RK-1:0]        dispatch_valid,
  output cand_t [NFD*RK-1:0]        dispatch_cand,
  output logic  [NFD*RK-1:0][$clog2(NACT+1)-1:0] dispatch_tag,
  input  logic  done_valid,
  input  logic  [$clog2(NACT+1)-1:0] done_tag,
  output logic  empty,
  output logic  [31:0] stall_cycles,
  output logic  [31:0] ooo_dispatches
);
  localparam int unsigned NR  = NFD * RK;
  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned TW  = $clog2(NACT+1);
  localparam int unsigned SW  = $clog2(NACT) > 0 ? $clog2(NACT) : 1;
  localparam int unsigned OW  = 16;

  typedef enum logic [1:0] {S_FREE, S_FILL, S_CLOSED} slot_st_e;

  slot_st_e [NACT-1:0]              st_q;
  cand_t    [NACT-1:0][DEPTH-1:0]   mem_q;
  logic     [NACT-1:0][AW:0]        wp_q, rp_q;
  logic     [NACT-1:0][OW-1:0]      outst_q;
  logic     [NACT-1:0][31:0]        age_q;      // allocation order, for counting out-of-order issue
  logic     [31:0]                  age_ctr_q;
  logic     [SW-1:0]                rr_q;

  // ---- input side -------------------------------------------------------------
  logic          have_fill, have_free;
  logic [SW-1:0] fill_s, free_s, tgt_s;
  logic          tgt_full;

  always_comb begin
    have_fill = 1'b0; fill_s = '0;
    have_free = 1'b0; free_s = '0;
    for (int s = int'(NACT) - 1; s >= 0; s--) begin
      if (st_q[s] == S_FILL) begin have_fill = 1'b1; fill_s = SW'(s); end
      if (st_q[s] == S_FREE) begin have_free = 1'b1; free_s = SW'(s); end
    end
    tgt_s    = have_fill ? fill_s : free_s;
    tgt_full = (wp_q[tgt_s] - rp_q[tgt_s]) == (AW+1)'(DEPTH);
    in_ready = (have_fill || have_free) && !(in_is_rec && tgt_full);
  end

  // ---- dispatch side -------------------------------------------------------------
  logic [NACT-1:0] head_ok, deq;
  logic [NR-1:0]   claimed;
  logic [$clog2(NR)-1:0] tr;
  logic            any_older;

  always_comb begin
    claimed        = '0;
    deq            = '0;
    dispatch_valid = '0;
    dispatch_cand  = '0;
    dispatch_tag   = '0;
    for (int s = 0; s < int'(NACT); s++)
      head_ok[s] = (st_q[s] != S_FREE) && (wp_q[s] != rp_q[s]);
    for (int j = 0; j < int'(NACT); j++) begin
      int s;
      s  = (int'(rr_q) + j) % int'(NACT);
      tr = $clog2(NR)'(int'(mem_q[s][rp_q[s][AW-1:0]].dimm) * int'(RK)
                       + int'(mem_q[s][rp_q[s][AW-1:0]].rank));
      if (head_ok[s] && rank_ready[tr] && !claimed[tr]) begin
        claimed[tr]        = 1'b1;
        deq[s]             = 1'b1;
        dispatch_valid[tr] = 1'b1;
        dispatch_cand[tr]  = mem_q[s][rp_q[s][AW-1:0]];
        dispatch_tag[tr]   = TW'(s);
      end
    end
  end

  // a dispatch from a queue while an older activated queue still holds records
  always_comb begin
    any_older = 1'b0;
    for (int s = 0; s < int'(NACT); s++)
      for (int o = 0; o < int'(NACT); o++)
        if (deq[s] && head_ok[o] && !deq[o] && age_q[o] < age_q[s]) any_older = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= '{default: S_FREE};
      wp_q   <= '0;
      rp_q   <= '0;
      outst_q <= '0;
      age_q  <= '0;
      age_ctr_q <= '0;
      rr_q   <= '0;
      stall_cycles   <= '0;
      ooo_dispatches <= '0;
    end else if (flush) begin
      st_q   <= '{default: S_FREE};
      wp_q   <= '0;
      rp_q   <= '0;
      outst_q <= '0;
    end else begin
      if (in_valid && !in_ready) stall_cycles <= stall_cycles + 1;
      if (any_older) ooo_dispatches <= ooo_dispatches + 1;
      rr_q <= (int'(rr_q) == int'(NACT) - 1) ? '0 : rr_q + 1'b1;
      for (int s = 0; s < int'(NACT); s++) begin
        logic [OW-1:0] o_n;
        o_n = outst_q[s];
        if (deq[s]) begin
          rp_q[s] <= rp_q[s] + 1'b1;
          o_n = o_n + 1'b1;
        end
        if (done_valid && int'(done_tag) == s) o_n = o_n - 1'b1;
        outst_q[s] <= o_n;
        if (st_q[s] == S_CLOSED && wp_q[s] == rp_q[s] && !deq[s] && o_n == '0) begin
          st_q[s] <= S_FREE;
          wp_q[s] <= '0;
          rp_q[s] <= '0;
        end
      end
      if (in_valid && in_ready) begin
        if (in_is_rec) wp_q[tgt_s] <= wp_q[tgt_s] + 1'b1;
        if (!have_fill) begin
          age_q[tgt_s] <= age_ctr_q;
          age_ctr_q    <= age_ctr_q + 1;
        end
        st_q[tgt_s] <= in_last ? S_CLOSED : S_FILL;
      end
    end
  end

  // queue storage, no reset
  always_ff @(posedge clk) begin
    if (in_valid && in_ready && in_is_rec)
      mem_q[tgt_s][wp_q[tgt_s][AW-1:0]] <= in_cand;
  end

  always_comb begin
    empty = 1'b1;
    for (int s = 0; s < int'(NACT); s++)
      if (st_q[s] != S_FREE) empty = 1'b0;
  end

  // a queue never underflows its outstanding count
  property p_no_underflow;
    @(posedge clk) disable iff (!rst_n)
      done_valid |-> outst_q[done_tag[SW-1:0]] != '0 || deq[done_tag[SW-1:0]];
  endproperty
  a_no_underflow: assert property (p_no_underflow);
endmodule
