// fidx_dimm: the near-memory logic of one F-Idx (forward index) DIMM. Every
// rank has its own compute unit (comparator array, filter, results buffer)
// and its own distance calculator, so all ranks check records concurrently.
// Finished scores leave through a round-robin arbiter, one per cycle, toward
// the Type-2 controller's top-K queue.
//
// The paper places the compute units at rank level and the distance
// calculators on the DIMM; one calculator per rank and the round-robin score
// arbiter are this design's choices.
//
// Interface: q_load/q_* broadcast the quantized query; cand_* is one
// valid/ready candidate port per rank; mem_* one read port per rank;
// score_* (valid/ready) the arbitrated results with the delay-queue tag.
module fidx_dimm
  import spanns_pkg::*;
#(
  parameter int unsigned RK = RANKS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                          q_load,
  input  logic [QMAX-1:0][COL_W-1:0]    q_cols,
  input  logic [QMAX-1:0][VAL_W-1:0]    q_vals,
  input  logic [QIDX_W-1:0]             q_nnz,
  input  logic  [RK-1:0]                cand_valid,
  output logic  [RK-1:0]                cand_ready,
  input  cand_t [RK-1:0]                cand,
  input  logic  [RK-1:0][TAG_W-1:0]     cand_tag,
  output logic  [RK-1:0]                mem_req_valid,
  input  logic  [RK-1:0]                mem_req_ready,
  output logic  [RK-1:0][ADDR_W-1:0]    mem_req_addr,
  output logic  [RK-1:0][LEN_W-1:0]     mem_req_len,
  input  logic  [RK-1:0]                mem_rsp_valid,
  input  logic  [RK-1:0][BEAT_W-1:0]    mem_rsp_data,
  output logic                          score_valid,
  input  logic                          score_ready,
  output scored_t                       score,
  output logic  [TAG_W-1:0]             score_tag,
  output logic  [RK-1:0]                rank_busy
);
  logic      [RK-1:0] rb_valid, rb_ready, cu_busy;
  rb_entry_t [RK-1:0] rb_entry;
  logic      [RK-1:0] d_valid, d_ready;
  logic signed [RK-1:0][SCORE_W-1:0] d_dist;
  logic      [RK-1:0][ID_W-1:0]  d_id;
  logic      [RK-1:0][TAG_W-1:0] d_tag;

  for (genvar r = 0; r < int'(RK); r++) begin : g_rank
    fidx_rank_cu u_cu (
      .clk, .rst_n, .q_load, .q_cols, .q_vals, .q_nnz,
      .cand_valid(cand_valid[r]), .cand_ready(cand_ready[r]), .cand(cand[r]), .cand_tag(cand_tag[r]),
      .mem_req_valid(mem_req_valid[r]), .mem_req_ready(mem_req_ready[r]),
      .mem_req_addr(mem_req_addr[r]), .mem_req_len(mem_req_len[r]),
      .mem_rsp_valid(mem_rsp_valid[r]), .mem_rsp_data(mem_rsp_data[r]),
      .res_valid(rb_valid[r]), .res_ready(rb_ready[r]), .res_entry(rb_entry[r]),
      .busy(cu_busy[r]));
    fidx_dist_calc u_dist (
      .clk, .rst_n, .q_load, .q_vals, .q_nnz,
      .in_valid(rb_valid[r]), .in_ready(rb_ready[r]), .in_entry(rb_entry[r]),
      .out_valid(d_valid[r]), .out_ready(d_ready[r]),
      .out_dist(d_dist[r]), .out_id(d_id[r]), .out_tag(d_tag[r]));
    assign rank_busy[r] = cu_busy[r] || !rb_ready[r] || d_valid[r];
  end

  // round-robin score arbiter
  logic [$clog2(RK)-1:0] rr_q, sel;
  logic                  found;
  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int k = 0; k < int'(RK); k++) begin
      int r;
      r = (int'(rr_q) + k) % int'(RK);
      if (!found && d_valid[r]) begin
        found = 1'b1;
        sel   = $clog2(RK)'(r);
      end
    end
    score_valid = found;
    score.score = d_dist[sel];
    score.id    = d_id[sel];
    score_tag   = d_tag[sel];
  end

  always_comb begin
    d_ready      = '0;
    d_ready[sel] = found && score_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_q <= '0;
    else if (score_valid && score_ready)
      rr_q <= (int'(sel) == int'(RK) - 1) ? '0 : sel + 1'b1;
  end
endmodule
