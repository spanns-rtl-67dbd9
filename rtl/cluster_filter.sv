// cluster_filter: the "Filter" of the Type-2 controller. It has two jobs.
//
// 1. Cluster filtering (combinational): a cluster whose silhouette score is
//    below beta times the current k-th best inner product of the top-K queue
//    is discarded. Until the queue holds K results every cluster passes. A
//    cluster with an empty pointer list never passes. beta is unsigned Q8.8
//    (this design's choice; the paper gives no format).
//
// 2. Record dedup: every candidate pointer coming back from an L2Inv DIMM is
//    looked up in (and added to) the Bloom-filter visited list. A record seen
//    before in this query is dropped, so only unique records reach the F-Idx
//    DIMMs. A dropped pointer that closes its cluster still leaves as a
//    marker (out_is_rec = 0) so the delay queues see the cluster end.
//
// Timing of the record path: a one-entry pipeline register with valid/ready
// handshakes on both sides; a candidate accepted in cycle t is offered at
// t+1, when the visited-list answer for it arrives.
module cluster_filter
  import spanns_pkg::*;
#(
  parameter int unsigned BETA_FRAC = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic flush,
  // cluster path
  input  logic [15:0]               beta,
  input  logic signed [SCORE_W-1:0] sil_score,
  input  logic [PLEN_W-1:0]         sil_len,
  input  logic                      kth_valid,
  input  logic signed [SCORE_W-1:0] kth_score,
  output logic                      pass,
  // record path
  input  logic  in_valid,
  output logic  in_ready,
  input  cand_t in_cand,
  input  logic  in_last,
  output logic  bf_req,
  output logic [ID_W-1:0] bf_key,
  input  logic  bf_resp_valid,
  input  logic  bf_resp_visited,
  output logic  out_valid,
  input  logic  out_ready,
  output cand_t out_cand,
  output logic  out_is_rec,
  output logic  out_last
);
  // ---- cluster threshold ------------------------------------------------------
  logic signed [SCORE_W+17:0] lhs, rhs;
  always_comb begin
    lhs  = (SCORE_W+18)'(sil_score) <<< BETA_FRAC;
    rhs  = (SCORE_W+18)'(kth_score) * $signed({2'b00, beta});
    pass = (sil_len != '0) && (!kth_valid || lhs >= rhs);
  end

  // ---- record dedup ----------------------------------------------------------------
  logic  s_valid, s_last, vis_q;
  cand_t s_cand;
  logic  visited_now;

  assign in_ready   = !s_valid || out_ready;
  assign bf_req     = in_valid && in_ready;
  assign bf_key     = in_cand.id;
  assign visited_now = bf_resp_valid ? bf_resp_visited : vis_q;
  assign out_valid  = s_valid;
  assign out_cand   = s_cand;
  assign out_last   = s_last;
  assign out_is_rec = !visited_now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_last  <= 1'b0;
      s_cand  <= '0;
      vis_q   <= 1'b0;
    end else if (flush) begin
      s_valid <= 1'b0;
    end else begin
      if (bf_resp_valid) vis_q <= bf_resp_visited;
      if (in_valid && in_ready) begin
        s_valid <= 1'b1;
        s_cand  <= in_cand;
        s_last  <= in_last;
      end else if (out_ready) begin
        s_valid <= 1'b0;
      end
    end
  end
endmodule
