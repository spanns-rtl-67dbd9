// topk_queue: configurable top-K priority queue of the Type-2 controller.
//
// Each lane is a chain of K registers kept in descending score order, entry 0
// being the best ("Top-1") and entry K-1 the K-th best ("Top-K"). An incoming
// (score, id) is compared with every entry at once; each entry then keeps its
// value, takes the new item, or takes its better neighbour's value, so an
// insert costs one cycle whatever K is. The entry pushed out of the tail of
// lane 0 is offered to lane 1 when cfg_merge is set, so the two lanes act as
// one sorted queue of 2K (the paper's "merged" top-nK); with cfg_merge clear
// lane 1 takes its own input in1 and the lanes are independent. The lane
// structure, the per-entry comparator and the cfg multiplexer follow the
// paper's drawing; K = 10, two lanes, and ties keeping the older entry first
// are this design's choices.
//
// kth_valid/kth_score give the worst score of the active result set (lane 0
// alone, or lanes 0+1 when merged) once that set is full; the controller uses
// it for the silhouette threshold. clear empties all lanes.
//
// Timing: an insert in cycle t is visible in the outputs from t+1.
module topk_queue
  import spanns_pkg::*;
#(
  parameter int unsigned K  = TOPK,
  parameter int unsigned NL = LANES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             cfg_merge,
  input  logic             in0_valid,
  input  scored_t          in0,
  input  logic             in1_valid,
  input  scored_t          in1,
  output scored_t [NL-1:0][K-1:0] entries,
  output logic    [NL-1:0][K-1:0] entry_valid,
  output logic             kth_valid,
  output logic signed [SCORE_W-1:0] kth_score
);
  scored_t [NL-1:0][K-1:0] ent_q, ent_d;
  logic    [NL-1:0][K-1:0] vld_q, vld_d;
  logic    [NL-1:0]        lin_valid;   // lane input
  scored_t [NL-1:0]        lin;
  logic    [NL-1:0]        spill_valid; // entry pushed out of the lane tail
  scored_t [NL-1:0]        spill;
  logic    [K-1:0]         gt;          // new item beats entry k

  always_comb begin
    ent_d = ent_q;
    vld_d = vld_q;
    spill_valid = '0;
    spill = '0;
    for (int l = 0; l < int'(NL); l++) begin
      // lane input multiplexer ("cfg")
      if (l == 0) begin
        lin_valid[l] = in0_valid;
        lin[l]       = in0;
      end else if (cfg_merge) begin
        lin_valid[l] = spill_valid[l-1];
        lin[l]       = spill[l-1];
      end else begin
        lin_valid[l] = (l == 1) ? in1_valid : 1'b0;
        lin[l]       = in1;
      end
      for (int k = 0; k < int'(K); k++)
        gt[k] = !vld_q[l][k] || (lin[l].score > ent_q[l][k].score);
      if (lin_valid[l]) begin
        spill_valid[l] = vld_q[l][K-1] && gt[K-1];
        spill[l]       = ent_q[l][K-1];
        if (!vld_q[l][K-1] || gt[K-1]) begin
          for (int k = 0; k < int'(K); k++) begin
            if (gt[k]) begin
              if (k == 0 || !gt[k-1]) begin
                ent_d[l][k] = lin[l];          // insertion point
                vld_d[l][k] = 1'b1;
              end else begin
                ent_d[l][k] = ent_q[l][k-1];   // shift down
                vld_d[l][k] = vld_q[l][k-1];
              end
            end
          end
        end else begin
          spill_valid[l] = 1'b1;               // not good enough: passes on
          spill[l]       = lin[l];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ent_q <= '0;
      vld_q <= '0;
    end else if (clear) begin
      vld_q <= '0;
    end else begin
      ent_q <= ent_d;
      vld_q <= vld_d;
    end
  end

  always_comb begin
    entries     = ent_q;
    entry_valid = vld_q;
    if (cfg_merge && NL > 1) begin
      kth_valid = vld_q[NL-1][K-1];
      kth_score = ent_q[NL-1][K-1].score;
    end else begin
      kth_valid = vld_q[0][K-1];
      kth_score = ent_q[0][K-1].score;
    end
  end
endmodule
