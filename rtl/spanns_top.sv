// spanns_top: the SpANNS near-memory accelerator for sparse-vector approximate
// nearest-neighbour search, as a CXL Type-2 device: the Type-2 controller,
// N_L2 L2Inv DIMMs holding the level-2 (clustered) inverted index and
// N_FD F-Idx DIMMs holding the forward index, each F-Idx DIMM with one
// compute unit and one distance calculator per rank.
//
// With the paper's 8 channels and its 1 : 3 ratio of L2Inv to F-Idx DIMMs,
// and one DIMM per channel (this design's reading), there are 2 L2Inv DIMMs
// and 6 F-Idx DIMMs of 8 ranks each, i.e. 48 rank compute units.
//
// Not included: the CXL protocol IP and the Flex Bus PHY (the host side is
// plain ports: level-1 index and lookup-table loading, query in, result
// out) and the DRAM dies themselves (every rank is a read port here:
// valid/ready request of `len` 64-byte beats at a beat address, beats
// returned in order without backpressure).
//
// A query: assert q_valid with the query's columns, single-precision values
// (sorted by descending value), n_probe, beta (Q8.8) and the merge flag; when
// res_done rises, res_entries/res_valid hold the top-K (or top-2K merged)
// records in descending score order.
module spanns_top
  import spanns_pkg::*;
#(
  parameter int unsigned NL2      = N_L2,
  parameter int unsigned NFD      = N_FD,
  parameter int unsigned RK       = RANKS,
  parameter int unsigned NACT     = N_ACT,
  parameter int unsigned DQ_DEPTH = 64,
  parameter int unsigned LUT_AW   = 12,
  parameter int unsigned GRP_SHIFT = 12
) (
  input  logic clk,
  input  logic rst_n,
  // host: index loading
  input  logic                        l1_we,
  input  logic [L1_AW-1:0]            l1_wdim,
  input  l1_entry_t                   l1_wentry,
  input  logic                        lut_we,
  input  logic [LUT_AW-1:0]           lut_waddr,
  input  logic [31:0]                 lut_wdata,
  // host: query and result
  input  logic                        q_valid,
  output logic                        q_ready,
  input  logic [QMAX-1:0][COL_W-1:0]  q_cols,
  input  logic [QMAX-1:0][31:0]       q_vals_fp32,
  input  logic [QIDX_W-1:0]           q_nnz,
  input  logic [QIDX_W-1:0]           q_nprobe,
  input  logic [15:0]                 q_beta,
  input  logic                        q_merge,
  output logic                        res_done,
  output scored_t [LANES-1:0][TOPK-1:0] res_entries,
  output logic    [LANES-1:0][TOPK-1:0] res_valid,
  output logic [31:0]                 cnt_clusters_checked,
  output logic [31:0]                 cnt_clusters_pruned,
  output logic [31:0]                 cnt_records_dup,
  output logic [31:0]                 cnt_records_scored,
  output logic [31:0]                 cnt_dq_stall,
  output logic [31:0]                 cnt_dq_ooo,
  output logic [31:0]                 cnt_dims_probed,
  output logic [31:0]                 cnt_cycles,
  output logic [NFD*RK-1:0]           rank_busy,
  // L2Inv DIMM ranks
  output logic [NL2-1:0]              l2m_req_valid,
  input  logic [NL2-1:0]              l2m_req_ready,
  output logic [NL2-1:0][ADDR_W-1:0]  l2m_req_addr,
  output logic [NL2-1:0][LEN_W-1:0]   l2m_req_len,
  input  logic [NL2-1:0]              l2m_rsp_valid,
  input  logic [NL2-1:0][BEAT_W-1:0]  l2m_rsp_data,
  // F-Idx DIMM ranks, index dimm*RK + rank
  output logic [NFD*RK-1:0]              fm_req_valid,
  input  logic [NFD*RK-1:0]              fm_req_ready,
  output logic [NFD*RK-1:0][ADDR_W-1:0]  fm_req_addr,
  output logic [NFD*RK-1:0][LEN_W-1:0]   fm_req_len,
  input  logic [NFD*RK-1:0]              fm_rsp_valid,
  input  logic [NFD*RK-1:0][BEAT_W-1:0]  fm_rsp_data
);
  localparam int unsigned NR = NFD * RK;

  logic                        fq_load;
  logic [QMAX-1:0][COL_W-1:0]  fq_cols;
  logic [QMAX-1:0][VAL_W-1:0]  fq_vals;
  logic [QIDX_W-1:0]           fq_nnz;

  logic [NL2-1:0]              sil_req_valid, sil_req_ready, sil_rsp_valid;
  logic [ADDR_W-1:0]           sil_req_addr;
  logic [LEN_W-1:0]            sil_req_len;
  logic [NL2-1:0][BEAT_W-1:0]  sil_rsp_data;
  logic [NL2-1:0]              cl_valid, cl_ready;
  logic [ADDR_W-1:0]           cl_ptr;
  logic [PLEN_W-1:0]           cl_len;
  logic  [NL2-1:0]             cand_valid, cand_ready, cand_last, l2_busy;
  cand_t [NL2-1:0]             cand;

  logic  [NR-1:0]              rank_ready, disp_valid;
  cand_t [NR-1:0]              disp_cand;
  logic  [NR-1:0][TAG_W-1:0]   disp_tag;
  logic    [NFD-1:0]           score_valid, score_ready;
  scored_t [NFD-1:0]           score;
  logic    [NFD-1:0][TAG_W-1:0] score_tag;

  type2_controller #(.NL2(NL2), .NFD(NFD), .RK(RK), .NACT(NACT), .DQ_DEPTH(DQ_DEPTH)) u_ctrl (
    .clk, .rst_n, .l1_we, .l1_wdim, .l1_wentry,
    .q_valid, .q_ready, .q_cols, .q_vals_fp32, .q_nnz, .q_nprobe, .q_beta, .q_merge,
    .res_done, .res_entries, .res_valid,
    .fq_load, .fq_cols, .fq_vals, .fq_nnz,
    .sil_req_valid, .sil_req_ready, .sil_req_addr, .sil_req_len, .sil_rsp_valid, .sil_rsp_data,
    .cl_valid, .cl_ready, .cl_ptr, .cl_len,
    .cand_valid, .cand_ready, .cand, .cand_last, .l2_busy,
    .rank_ready, .disp_valid, .disp_cand, .disp_tag,
    .score_valid, .score_ready, .score, .score_tag,
    .cnt_clusters_checked, .cnt_clusters_pruned, .cnt_records_dup, .cnt_records_scored,
    .cnt_dq_stall, .cnt_dq_ooo, .cnt_dims_probed, .cnt_cycles);

  for (genvar d = 0; d < int'(NL2); d++) begin : g_l2
    l2inv_dimm #(.LUT_AW(LUT_AW), .GRP_SHIFT(GRP_SHIFT)) u_l2 (
      .clk, .rst_n, .lut_we, .lut_waddr, .lut_wdata,
      .sil_req_valid(sil_req_valid[d]), .sil_req_ready(sil_req_ready[d]),
      .sil_req_addr, .sil_req_len,
      .sil_rsp_valid(sil_rsp_valid[d]), .sil_rsp_data(sil_rsp_data[d]),
      .cl_valid(cl_valid[d]), .cl_ready(cl_ready[d]), .cl_ptr, .cl_len,
      .cand_valid(cand_valid[d]), .cand_ready(cand_ready[d]), .cand(cand[d]),
      .cand_last(cand_last[d]), .busy(l2_busy[d]),
      .mem_req_valid(l2m_req_valid[d]), .mem_req_ready(l2m_req_ready[d]),
      .mem_req_addr(l2m_req_addr[d]), .mem_req_len(l2m_req_len[d]),
      .mem_rsp_valid(l2m_rsp_valid[d]), .mem_rsp_data(l2m_rsp_data[d]));
  end

  for (genvar d = 0; d < int'(NFD); d++) begin : g_fd
    fidx_dimm #(.RK(RK)) u_fd (
      .clk, .rst_n, .q_load(fq_load), .q_cols(fq_cols), .q_vals(fq_vals), .q_nnz(fq_nnz),
      .cand_valid(disp_valid[d*RK +: RK]), .cand_ready(rank_ready[d*RK +: RK]),
      .cand(disp_cand[d*RK +: RK]), .cand_tag(disp_tag[d*RK +: RK]),
      .mem_req_valid(fm_req_valid[d*RK +: RK]), .mem_req_ready(fm_req_ready[d*RK +: RK]),
      .mem_req_addr(fm_req_addr[d*RK +: RK]), .mem_req_len(fm_req_len[d*RK +: RK]),
      .mem_rsp_valid(fm_rsp_valid[d*RK +: RK]), .mem_rsp_data(fm_rsp_data[d*RK +: RK]),
      .score_valid(score_valid[d]), .score_ready(score_ready[d]), .score(score[d]),
      .score_tag(score_tag[d]), .rank_busy(rank_busy[d*RK +: RK]));
  end
endmodule
