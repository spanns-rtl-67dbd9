// type2_controller: the logic added to the CXL Type-2 device controller. It
// runs one query at a time through the hybrid inverted index:
//   1. load the query (sorted by value on the host), quantize it, clear the
//      visited list and the top-K queue, and broadcast the quantized query to
//      the F-Idx DIMMs;
//   2. for each of the first n_probe query dimensions (early termination),
//      read the level-1 entry of that dimension from the on-chip L1 buffer;
//   3. stream the dimension's silhouettes from the L2Inv DIMM that holds it
//      (dimension mod N_L2) through the SpMV unit;
//   4. keep the clusters whose silhouette score reaches beta x the current
//      k-th best score, and send them to that L2Inv DIMM's address generator;
//   5. take the translated record pointers coming back, drop records already
//      visited in this query, and hand the rest to the delay queues, which
//      spread them over the F-Idx ranks out of order;
//   6. collect the ranks' inner products into the top-K queue;
//   7. when nothing is left in flight, raise res_done with the result.
// Steps, thresholds and blocks follow the paper. Processing one dimension at
// a time, the cluster FIFO between silhouette check and address generators,
// and the arbitration between DIMMs are this design's choices.
//
// Interface: host ports (L1 loading, query in, result out) are plain signals;
// sil_*, cl_*, cand_* connect to the N_L2 L2Inv DIMMs, disp_*/rank_ready to
// the F-Idx ranks and score_* to the F-Idx DIMMs. Counters report how often
// each mechanism acted during the current query.
//
// The concurrent assertion in this module is disabled while rst_n is low;
// that use of the asynchronous reset inside a synchronous property is
// intended and is what a lint tool reports as a mixed sync/async net.
module type2_controller
  import spanns_pkg::*;
#(
  parameter int unsigned NL2   = N_L2,
  parameter int unsigned NFD   = N_FD,
  parameter int unsigned RK    = RANKS,
  parameter int unsigned NACT  = N_ACT,
  parameter int unsigned DQ_DEPTH = 64
) (
  input  logic clk,
  input  logic rst_n,
  // host: level-1 index loading
  input  logic                        l1_we,
  input  logic [L1_AW-1:0]            l1_wdim,
  input  l1_entry_t                   l1_wentry,
  // host: query
  input  logic                        q_valid,
  output logic                        q_ready,
  input  logic [QMAX-1:0][COL_W-1:0]  q_cols,
  input  logic [QMAX-1:0][31:0]       q_vals_fp32,
  input  logic [QIDX_W-1:0]           q_nnz,
  input  logic [QIDX_W-1:0]           q_nprobe,
  input  logic [15:0]                 q_beta,
  input  logic                        q_merge,
  // host: result
  output logic                        res_done,
  output scored_t [LANES-1:0][TOPK-1:0] res_entries,
  output logic    [LANES-1:0][TOPK-1:0] res_valid,
  // broadcast of the quantized query to the F-Idx DIMMs
  output logic                        fq_load,
  output logic [QMAX-1:0][COL_W-1:0]  fq_cols,
  output logic [QMAX-1:0][VAL_W-1:0]  fq_vals,
  output logic [QIDX_W-1:0]           fq_nnz,
  // L2Inv DIMMs
  output logic [NL2-1:0]              sil_req_valid,
  input  logic [NL2-1:0]              sil_req_ready,
  output logic [ADDR_W-1:0]           sil_req_addr,
  output logic [LEN_W-1:0]            sil_req_len,
  input  logic [NL2-1:0]              sil_rsp_valid,
  input  logic [NL2-1:0][BEAT_W-1:0]  sil_rsp_data,
  output logic [NL2-1:0]              cl_valid,
  input  logic [NL2-1:0]              cl_ready,
  output logic [ADDR_W-1:0]           cl_ptr,
  output logic [PLEN_W-1:0]           cl_len,
  input  logic  [NL2-1:0]             cand_valid,
  output logic  [NL2-1:0]             cand_ready,
  input  cand_t [NL2-1:0]             cand,
  input  logic  [NL2-1:0]             cand_last,
  input  logic  [NL2-1:0]             l2_busy,
  // F-Idx ranks
  input  logic  [NFD*RK-1:0]          rank_ready,
  output logic  [NFD*RK-1:0]          disp_valid,
  output cand_t [NFD*RK-1:0]          disp_cand,
  output logic  [NFD*RK-1:0][TAG_W-1:0] disp_tag,
  input  logic    [NFD-1:0]           score_valid,
  output logic    [NFD-1:0]           score_ready,
  input  scored_t [NFD-1:0]           score,
  input  logic    [NFD-1:0][TAG_W-1:0] score_tag,
  // per-query counters (cnt_dq_stall and cnt_dq_ooo count since reset)
  output logic [31:0]                 cnt_clusters_checked,
  output logic [31:0]                 cnt_clusters_pruned,
  output logic [31:0]                 cnt_records_dup,
  output logic [31:0]                 cnt_records_scored,
  output logic [31:0]                 cnt_dq_stall,
  output logic [31:0]                 cnt_dq_ooo,
  output logic [31:0]                 cnt_dims_probed,
  output logic [31:0]                 cnt_cycles
);
  localparam int unsigned L2W = $clog2(NL2) > 0 ? $clog2(NL2) : 1;
  localparam int unsigned CFD = 256;        // cluster FIFO depth (> max clusters per dimension)
  localparam int unsigned CAW = $clog2(CFD);

  typedef enum logic [3:0] {T_IDLE, T_LOADQ, T_DIM, T_L1WAIT, T_SILREQ, T_SILRX, T_SILLAST, T_DRAIN, T_DONE} t_st_e;
  t_st_e st_q;

  logic [QIDX_W-1:0] di_q, nprobe_q;
  logic [15:0]       beta_q;
  logic              merge_q;
  l1_entry_t         ent_q;
  logic [L2W-1:0]    l2sel_q;
  logic [NCL_W-1:0]  silleft_q;

  // ---- silhouette check --------------------------------------------------------------
  logic                      q_load;
  logic [QMAX-1:0][COL_W-1:0] qc;
  logic [QMAX-1:0][VAL_W-1:0] qv;
  logic [QIDX_W-1:0]         qn;
  logic                      sil_in_valid;
  logic [BEAT_W-1:0]         sil_in_beat;
  logic                      d_valid;
  logic signed [SCORE_W-1:0] d_dist;
  logic [ADDR_W-1:0]         d_ptr;
  logic [PLEN_W-1:0]         d_len;
  logic                      vis_req, vis_rv, vis_rvis;
  logic [ID_W-1:0]           vis_key;

  assign q_ready = (st_q == T_IDLE) || (st_q == T_DONE);
  assign q_load  = q_ready && q_valid;

  always_comb begin
    sil_in_valid = (st_q == T_SILRX) && sil_rsp_valid[l2sel_q];
    sil_in_beat  = sil_rsp_data[l2sel_q];
  end

  silhouette_check u_sil (
    .clk, .rst_n, .q_load, .q_cols_in(q_cols), .q_vals_fp32, .q_nnz_in(q_nnz),
    .q_cols(qc), .q_vals(qv), .q_nnz(qn),
    .sil_valid(sil_in_valid), .sil_beat(sil_in_beat),
    .dist_valid(d_valid), .dot(d_dist), .dist_ptr(d_ptr), .dist_len(d_len),
    .vis_req, .vis_key, .vis_resp_valid(vis_rv), .vis_resp_visited(vis_rvis));

  assign fq_load = (st_q == T_LOADQ);
  assign fq_cols = qc;
  assign fq_vals = qv;
  assign fq_nnz  = qn;

  // ---- level-1 index -------------------------------------------------------------------
  logic      l1_rd_en, l1_rv;
  l1_entry_t l1_re;
  assign l1_rd_en = (st_q == T_DIM) && (di_q < nprobe_q) && (di_q < qn);

  l1inv_buffer u_l1 (
    .clk, .rst_n, .wr_en(l1_we), .wr_dim(l1_wdim), .wr_entry(l1_wentry),
    .rd_en(l1_rd_en), .rd_dim(qc[di_q[$clog2(QMAX)-1:0]][L1_AW-1:0]),
    .rd_valid(l1_rv), .rd_entry(l1_re));

  // ---- top-K queue and filter ------------------------------------------------------
  logic    tk_in_valid, kth_valid;
  scored_t tk_in;
  logic signed [SCORE_W-1:0] kth_score;
  logic    pass;

  topk_queue u_topk (
    .clk, .rst_n, .clear(q_load), .cfg_merge(merge_q),
    .in0_valid(tk_in_valid), .in0(tk_in), .in1_valid(1'b0), .in1('0),
    .entries(res_entries), .entry_valid(res_valid),
    .kth_valid, .kth_score);

  logic  f_in_valid, f_in_ready, f_in_last, f_out_valid, f_out_ready, f_out_is_rec, f_out_last;
  cand_t f_in_cand, f_out_cand;

  cluster_filter u_filter (
    .clk, .rst_n, .flush(q_load),
    .beta(beta_q), .sil_score(d_dist), .sil_len(d_len), .kth_valid, .kth_score, .pass,
    .in_valid(f_in_valid), .in_ready(f_in_ready), .in_cand(f_in_cand), .in_last(f_in_last),
    .bf_req(vis_req), .bf_key(vis_key), .bf_resp_valid(vis_rv), .bf_resp_visited(vis_rvis),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_cand(f_out_cand),
    .out_is_rec(f_out_is_rec), .out_last(f_out_last));

  // ---- cluster FIFO: passed clusters waiting for their L2Inv address generator -----
  typedef struct packed {
    logic [L2W-1:0]    dimm;
    logic [ADDR_W-1:0] ptr;
    logic [PLEN_W-1:0] len;
  } cl_t;
  cl_t          cf_q [CFD];
  logic [CAW:0] cf_wp_q, cf_rp_q, cf_cnt;
  logic         cf_push, cf_pop;
  cl_t          cf_head;

  assign cf_cnt  = cf_wp_q - cf_rp_q;
  assign cf_head = cf_q[cf_rp_q[CAW-1:0]];
  assign cf_push = d_valid && pass;
  always_comb begin
    cl_valid = '0;
    if (cf_cnt != '0) cl_valid[cf_head.dimm] = 1'b1;
    cl_ptr = cf_head.ptr;
    cl_len = cf_head.len;
    cf_pop = (cf_cnt != '0) && cl_ready[cf_head.dimm];
  end

  // ---- candidates from the L2Inv DIMMs into the filter ----------------------------
  logic [L2W-1:0] csel;
  logic           cfound;
  logic [L2W-1:0] crr_q;
  always_comb begin
    cfound = 1'b0;
    csel   = '0;
    for (int k = 0; k < int'(NL2); k++) begin
      int d;
      d = (int'(crr_q) + k) % int'(NL2);
      if (!cfound && cand_valid[d]) begin
        cfound = 1'b1;
        csel   = L2W'(d);
      end
    end
    f_in_valid = cfound;
    f_in_cand  = cand[csel];
    f_in_last  = cand_last[csel];
    cand_ready = '0;
    cand_ready[csel] = cfound && f_in_ready;
  end

  // ---- delay queues ------------------------------------------------------------------
  logic dq_empty, done_valid;
  logic [TAG_W-1:0] done_tag;
  logic [31:0] dq_stall, dq_ooo;

  delay_queues #(.NACT(NACT), .DEPTH(DQ_DEPTH), .NFD(NFD), .RK(RK)) u_dq (
    .clk, .rst_n, .flush(q_load),
    .in_valid(f_out_valid), .in_ready(f_out_ready), .in_cand(f_out_cand),
    .in_is_rec(f_out_is_rec), .in_last(f_out_last),
    .rank_ready, .dispatch_valid(disp_valid), .dispatch_cand(disp_cand), .dispatch_tag(disp_tag),
    .done_valid, .done_tag, .empty(dq_empty),
    .stall_cycles(dq_stall), .ooo_dispatches(dq_ooo));

  // ---- scores from the F-Idx DIMMs into the top-K queue ----------------------------
  logic [$clog2(NFD)-1:0] ssel, srr_q;
  logic                   sfound;
  always_comb begin
    sfound = 1'b0;
    ssel   = '0;
    for (int k = 0; k < int'(NFD); k++) begin
      int d;
      d = (int'(srr_q) + k) % int'(NFD);
      if (!sfound && score_valid[d]) begin
        sfound = 1'b1;
        ssel   = $clog2(NFD)'(d);
      end
    end
    score_ready       = '0;
    score_ready[ssel] = sfound;
    tk_in_valid       = sfound;
    tk_in             = score[ssel];
    done_valid        = sfound;
    done_tag          = score_tag[ssel];
  end

  // ---- control -------------------------------------------------------------------------
  logic idle_all, cf_room;
  // room for every cluster of the current dimension in the cluster FIFO
  assign cf_room = 32'(CFD) - 32'(cf_cnt) >= 32'(ent_q.ncl);
  assign idle_all = (cf_cnt == '0) && (l2_busy == '0) && (cand_valid == '0)
                 && !f_out_valid && dq_empty && (st_q == T_DRAIN);

  always_comb begin
    sil_req_valid = '0;
    if (st_q == T_SILREQ && cf_room) sil_req_valid[l2sel_q] = 1'b1;
    sil_req_addr = ADDR_W'(ent_q.l2_base);
    sil_req_len  = LEN_W'(ent_q.ncl);
  end

  assign res_done = (st_q == T_DONE);

  // cluster FIFO storage, no reset
  always_ff @(posedge clk) begin
    if (cf_push) cf_q[cf_wp_q[CAW-1:0]] <= '{dimm: l2sel_q, ptr: d_ptr, len: d_len};
  end

  // a silhouette beat is never dropped
  a_sil_fifo_room: assert property (@(posedge clk) disable iff (!rst_n)
    cf_push |-> cf_cnt != (CAW+1)'(CFD) || cf_pop);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= T_IDLE;
      di_q      <= '0;
      nprobe_q  <= '0;
      beta_q    <= '0;
      merge_q   <= 1'b0;
      ent_q     <= '0;
      l2sel_q   <= '0;
      silleft_q <= '0;
      cf_wp_q   <= '0;
      cf_rp_q   <= '0;
      crr_q     <= '0;
      srr_q     <= '0;
      cnt_clusters_checked <= '0;
      cnt_clusters_pruned  <= '0;
      cnt_records_dup      <= '0;
      cnt_records_scored   <= '0;
      cnt_dims_probed      <= '0;
      cnt_cycles           <= '0;
    end else begin
      if (cf_push) cf_wp_q <= cf_wp_q + 1'b1;
      if (cf_pop) cf_rp_q <= cf_rp_q + 1'b1;
      if (cfound && f_in_ready) crr_q <= (int'(csel) == int'(NL2) - 1) ? '0 : csel + 1'b1;
      if (sfound) srr_q <= (int'(ssel) == int'(NFD) - 1) ? '0 : ssel + 1'b1;
      if (d_valid) begin
        cnt_clusters_checked <= cnt_clusters_checked + 1;
        if (!pass) cnt_clusters_pruned <= cnt_clusters_pruned + 1;
      end
      if (f_out_valid && f_out_ready && !f_out_is_rec) cnt_records_dup <= cnt_records_dup + 1;
      if (sfound) cnt_records_scored <= cnt_records_scored + 1;
      if (st_q != T_IDLE && st_q != T_DONE) cnt_cycles <= cnt_cycles + 1;

      unique case (st_q)
        T_IDLE, T_DONE: if (q_valid) begin
          nprobe_q <= q_nprobe;
          beta_q   <= q_beta;
          merge_q  <= q_merge;
          di_q     <= '0;
          cnt_clusters_checked <= '0;
          cnt_clusters_pruned  <= '0;
          cnt_records_dup      <= '0;
          cnt_records_scored   <= '0;
          cnt_dims_probed      <= '0;
          cnt_cycles           <= '0;
          st_q     <= T_LOADQ;
        end
        T_LOADQ: st_q <= T_DIM;
        T_DIM: begin
          if (l1_rd_en) begin
            l2sel_q <= L2W'(int'(qc[di_q[$clog2(QMAX)-1:0]]) % int'(NL2));
            cnt_dims_probed <= cnt_dims_probed + 1;
            st_q <= T_L1WAIT;
          end else begin
            st_q <= T_DRAIN;
          end
        end
        T_L1WAIT: if (l1_rv) begin
          ent_q <= l1_re;
          if (l1_re.ncl == '0) begin
            di_q <= di_q + 1'b1;
            st_q <= T_DIM;
          end else begin
            st_q <= T_SILREQ;
          end
        end
        T_SILREQ: begin
          if (cf_room && sil_req_ready[l2sel_q]) begin
            silleft_q <= ent_q.ncl;
            st_q      <= T_SILRX;
          end
        end
        T_SILRX: if (sil_in_valid) begin
          silleft_q <= silleft_q - 1'b1;
          if (silleft_q == NCL_W'(1)) st_q <= T_SILLAST;
        end
        T_SILLAST: begin
          di_q <= di_q + 1'b1;
          st_q <= T_DIM;
        end
        T_DRAIN: if (idle_all) st_q <= T_DONE;
        default: st_q <= T_IDLE;
      endcase
    end
  end

  assign cnt_dq_stall = dq_stall;
  assign cnt_dq_ooo   = dq_ooo;
endmodule
