// l2inv_dimm: near-memory logic of one L2Inv DIMM. The DIMM's ranks hold the
// level-2 inverted index: for each dimension, one silhouette beat per cluster
// stored contiguously (Ellpack row plus the cluster's pointer-list address and
// length), followed somewhere by the clusters' record-pointer lists.
//
// Two clients share the DIMM's read port: the Type-2 controller streaming a
// dimension's silhouettes (sil_*), and the F-Index address generator reading
// pointer lists of the clusters that passed (cl_* in, cand_* out). The port
// serves one request at a time and routes the returned beats to its owner;
// silhouette reads win when both wait. Those policies are this design's own;
// the paper describes the DIMM's contents and its address generator.
//
// Timing: sil_req_* and mem_req_* are valid/ready; a request's beats come
// back on mem_rsp_* in order, with no backpressure, and are passed on to
// sil_rsp_* the same cycle.
module l2inv_dimm
  import spanns_pkg::*;
#(
  parameter int unsigned LUT_AW    = 12,
  parameter int unsigned GRP_SHIFT = 12
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                 lut_we,
  input  logic [LUT_AW-1:0]    lut_waddr,
  input  logic [31:0]          lut_wdata,
  // silhouette reads from the controller
  input  logic                 sil_req_valid,
  output logic                 sil_req_ready,
  input  logic [ADDR_W-1:0]    sil_req_addr,
  input  logic [LEN_W-1:0]     sil_req_len,
  output logic                 sil_rsp_valid,
  output logic [BEAT_W-1:0]    sil_rsp_data,
  // clusters that passed, and their translated candidates
  input  logic                 cl_valid,
  output logic                 cl_ready,
  input  logic [ADDR_W-1:0]    cl_ptr,
  input  logic [PLEN_W-1:0]    cl_len,
  output logic                 cand_valid,
  input  logic                 cand_ready,
  output cand_t                cand,
  output logic                 cand_last,
  output logic                 busy,
  // DRAM rank read port
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic [ADDR_W-1:0]    mem_req_addr,
  output logic [LEN_W-1:0]     mem_req_len,
  input  logic                 mem_rsp_valid,
  input  logic [BEAT_W-1:0]    mem_rsp_data
);
  logic              g_req_valid, g_req_ready, g_rsp_valid;
  logic [ADDR_W-1:0] g_req_addr;
  logic [LEN_W-1:0]  g_req_len;
  logic              g_busy;

  faddr_gen #(.LUT_AW(LUT_AW), .GRP_SHIFT(GRP_SHIFT)) u_gen (
    .clk, .rst_n, .lut_we, .lut_waddr, .lut_wdata,
    .cl_valid, .cl_ready, .cl_ptr, .cl_len,
    .mem_req_valid(g_req_valid), .mem_req_ready(g_req_ready),
    .mem_req_addr(g_req_addr), .mem_req_len(g_req_len),
    .mem_rsp_valid(g_rsp_valid), .mem_rsp_data,
    .out_valid(cand_valid), .out_ready(cand_ready), .out_cand(cand), .out_last(cand_last),
    .busy(g_busy));

  // one outstanding request; owner 0 = silhouettes, 1 = address generator
  logic             out_q, owner_q;
  logic [LEN_W-1:0] left_q;
  logic             pick_sil;

  always_comb begin
    pick_sil      = sil_req_valid;
    mem_req_valid = !out_q && (sil_req_valid || g_req_valid);
    mem_req_addr  = pick_sil ? sil_req_addr : g_req_addr;
    mem_req_len   = pick_sil ? sil_req_len  : g_req_len;
    sil_req_ready = !out_q && mem_req_ready && pick_sil;
    g_req_ready   = !out_q && mem_req_ready && !pick_sil;
    sil_rsp_valid = out_q && !owner_q && mem_rsp_valid;
    sil_rsp_data  = mem_rsp_data;
    g_rsp_valid   = out_q &&  owner_q && mem_rsp_valid;
    busy          = out_q || g_busy || cl_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_q   <= 1'b0;
      owner_q <= 1'b0;
      left_q  <= '0;
    end else if (!out_q) begin
      if (mem_req_valid && mem_req_ready) begin
        out_q   <= (mem_req_len != '0);
        owner_q <= !pick_sil;
        left_q  <= mem_req_len;
      end
    end else if (mem_rsp_valid) begin
      left_q <= left_q - 1'b1;
      if (left_q == LEN_W'(1)) out_q <= 1'b0;
    end
  end
endmodule
