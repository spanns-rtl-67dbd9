// faddr_gen: the F-Index address generator inside an L2Inv DIMM. For every
// cluster that passed the silhouette filter it reads the cluster's list of
// record pointers (16 record ids per 64-byte beat) from the DIMM's ranks and
// translates each id, through a lookup table, to where the record lives: the
// F-Idx DIMM, the rank and the beat address of its 8 KB bin. The translated
// pointers go out one per cycle, the last one of a cluster flagged.
//
// The paper says only that the generator is made of lookup tables and
// forwards the candidates of relevant clusters. The table layout is this
// design's: entry [id >> GRP_SHIFT] = {dimm, rank, base bin}, and the bin is
// base + id[GRP_SHIFT-1:0]; the bin's beat address is bin * BIN_BEATS.
// The list is read one beat at a time.
//
// Interface: cl_* (valid/ready) takes {list address, list length}; mem_req_*
// (valid/ready) and mem_rsp_* are the read port; out_* (valid/ready) gives
// the candidates; lut_we/lut_waddr/lut_wdata load the table.
module faddr_gen
  import spanns_pkg::*;
#(
  parameter int unsigned LUT_AW    = 12,
  parameter int unsigned GRP_SHIFT = 12
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                 lut_we,
  input  logic [LUT_AW-1:0]    lut_waddr,
  input  logic [31:0]          lut_wdata,   // {dimm[31:29], rank[28:26], base_bin[25:0]}
  input  logic                 cl_valid,
  output logic                 cl_ready,
  input  logic [ADDR_W-1:0]    cl_ptr,
  input  logic [PLEN_W-1:0]    cl_len,
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic [ADDR_W-1:0]    mem_req_addr,
  output logic [LEN_W-1:0]     mem_req_len,
  input  logic                 mem_rsp_valid,
  input  logic [BEAT_W-1:0]    mem_rsp_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output cand_t                out_cand,
  output logic                 out_last,
  output logic                 busy
);
  typedef enum logic [1:0] {G_IDLE, G_REQ, G_WAIT, G_EMIT} g_st_e;

  g_st_e               st_q;
  logic [31:0]         lut [2**LUT_AW];
  logic [ADDR_W-1:0]   addr_q;
  logic [PLEN_W-1:0]   left_q;          // pointers still to emit
  logic [BEAT_W-1:0]   beat_q;
  logic [$clog2(IDS_PER_BEAT)-1:0] idx_q;

  logic [ID_W-1:0]     cur_id;
  logic [31:0]         lut_e;

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_waddr] <= lut_wdata;
  end

  always_comb begin
    cur_id = pid(beat_q, int'(idx_q));
    lut_e  = lut[cur_id[GRP_SHIFT +: LUT_AW]];
    out_cand.id   = cur_id;
    out_cand.dimm = lut_e[31:29];
    out_cand.rank = lut_e[28:26];
    out_cand.addr = ADDR_W'((32'(lut_e[25:0]) + 32'(cur_id[GRP_SHIFT-1:0])) * BIN_BEATS);
    out_valid     = (st_q == G_EMIT);
    out_last      = (left_q == PLEN_W'(1));
    cl_ready      = (st_q == G_IDLE);
    mem_req_valid = (st_q == G_REQ);
    mem_req_addr  = addr_q;
    mem_req_len   = LEN_W'(1);
    busy          = (st_q != G_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= G_IDLE;
      addr_q <= '0;
      left_q <= '0;
      idx_q  <= '0;
      beat_q <= '0;
    end else begin
      unique case (st_q)
        G_IDLE: if (cl_valid && cl_len != '0) begin
          addr_q <= cl_ptr;
          left_q <= cl_len;
          st_q   <= G_REQ;
        end
        G_REQ: if (mem_req_ready) st_q <= G_WAIT;
        G_WAIT: if (mem_rsp_valid) begin
          beat_q <= mem_rsp_data;
          idx_q  <= '0;
          addr_q <= addr_q + 1'b1;
          st_q   <= G_EMIT;
        end
        G_EMIT: if (out_ready) begin
          left_q <= left_q - 1'b1;
          idx_q  <= idx_q + 1'b1;
          if (left_q == PLEN_W'(1))                   st_q <= G_IDLE;
          else if (int'(idx_q) == IDS_PER_BEAT - 1)   st_q <= G_REQ;
        end
        default: st_q <= G_IDLE;
      endcase
    end
  end
endmodule
