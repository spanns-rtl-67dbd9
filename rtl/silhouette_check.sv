// silhouette_check: the silhouette-check logic of the Type-2 controller.
//  - Quantization: when a query is loaded, its QMAX floating-point values go
//    through QMAX quantizers in parallel and the 16-bit fixed-point query is
//    held in registers for the whole query (also broadcast to the F-Idx DIMMs).
//  - SpMV: each silhouette beat read from an L2Inv DIMM is one Ellpack row;
//    its inner product with the quantized query is the cluster's distance
//    ("Dist."), produced one cycle later together with the cluster's
//    pointer-list address and length taken from the same beat.
//  - Bloom-filter visited list: answers whether a record id was seen before
//    in this query ("Visit Status"), inserting it at the same time.
// The three parts and their connections follow the paper's figure; holding
// the quantized query in registers is this design's choice.
//
// Timing: q_load in cycle t, query registers valid from t+1 (bloom filter
// cleared at the same time). sil_valid in t -> dist_valid in t+1.
// vis_req in t -> vis_resp_valid in t+1.
module silhouette_check
  import spanns_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic                           q_load,
  input  logic [QMAX-1:0][COL_W-1:0]     q_cols_in,
  input  logic [QMAX-1:0][31:0]          q_vals_fp32,
  input  logic [QIDX_W-1:0]              q_nnz_in,
  output logic [QMAX-1:0][COL_W-1:0]     q_cols,
  output logic [QMAX-1:0][VAL_W-1:0]     q_vals,
  output logic [QIDX_W-1:0]              q_nnz,
  input  logic                           sil_valid,
  input  logic [BEAT_W-1:0]              sil_beat,
  output logic                           dist_valid,
  output logic signed [SCORE_W-1:0]      dot,
  output logic [ADDR_W-1:0]              dist_ptr,
  output logic [PLEN_W-1:0]              dist_len,
  input  logic                           vis_req,
  input  logic [ID_W-1:0]                vis_key,
  output logic                           vis_resp_valid,
  output logic                           vis_resp_visited
);
  logic [QMAX-1:0][VAL_W-1:0] qfx;

  for (genvar i = 0; i < int'(QMAX); i++) begin : g_quant
    quantizer #(.OUT_W(VAL_W), .FRAC(FRAC)) u_q (.in_fp32(q_vals_fp32[i]), .out_fx(qfx[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cols <= '0;
      q_vals <= '0;
      q_nnz  <= '0;
    end else if (q_load) begin
      q_cols <= q_cols_in;
      q_vals <= qfx;
      q_nnz  <= q_nnz_in;
    end
  end

  // unpack the Ellpack row of a silhouette beat
  logic [ELL_W-1:0][COL_W-1:0] row_cols;
  logic [ELL_W-1:0][VAL_W-1:0] row_vals;
  always_comb begin
    for (int e = 0; e < int'(ELL_W); e++) begin
      row_cols[e] = sil_beat[e*PAIR_W + VAL_W +: COL_W];
      row_vals[e] = sil_beat[e*PAIR_W +: VAL_W];
    end
  end

  spmv_unit #(.QN(QMAX), .EW(ELL_W), .TAGW(ADDR_W + PLEN_W)) u_spmv (
    .clk, .rst_n,
    .q_cols, .q_vals, .q_nnz,
    .row_valid(sil_valid),
    .row_tag({sil_beat[SIL_PTR_LSB +: ADDR_W], sil_beat[SIL_LEN_LSB +: PLEN_W]}),
    .row_cols, .row_vals,
    .dist_valid, .dist_tag({dist_ptr, dist_len}), .dot);

  bloom_filter #(.BITS(4096), .KEY_W(ID_W)) u_visited (
    .clk, .rst_n, .clear(q_load),
    .req_valid(vis_req), .key(vis_key),
    .resp_valid(vis_resp_valid), .resp_visited(vis_resp_visited));
endmodule
