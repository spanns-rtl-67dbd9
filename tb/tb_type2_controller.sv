// tb_type2_controller: the Type-2 controller checked with real neighbours at
// a small size: one L2Inv DIMM block and two F-Idx DIMM blocks of two ranks,
// wired as in the top level, with DRAM models behind them. The testbench
// builds a synthetic sparse data set and its hybrid index (level-1 entries,
// clustered level-2 lists with silhouettes, pointer lists, forward-index
// bins, lookup table) and runs three queries:
//   Q1  beta = 0, first 5 of 20 query dimensions: no cluster is pruned, so the
//       result must be the exact top-K of the records in those dimensions
//       (checked when no record was lost to a Bloom-filter false positive).
//   Q2  beta = 1.0, merged top-2K, all 20 dimensions: clusters get pruned;
//       the result must be the exact top-2K of the records actually scored
//       and every reported score must be the record's true inner product.
//   Q3  strict threshold with independent lanes and 12 dimensions.
// Every mechanism of the controller (pruning, duplicate dropping, delay-queue
// stall, out-of-order dispatch, record-driven mode, merged queue, early
// termination) must occur at least once.
module tb_type2_controller;
  import spanns_pkg::*;
  localparam int NL2_T = 1, NFD_T = 2, RK_T = 2, NR = NFD_T * RK_T;
  localparam int NREC = 300, NDIM = 48, CLSZ = 6, QN = 20;

  logic clk = 0, rst_n = 0;
  logic l1_we = 0; logic [L1_AW-1:0] l1_wdim; l1_entry_t l1_wentry;
  logic lut_we = 0; logic [11:0] lut_waddr; logic [31:0] lut_wdata;
  logic q_valid = 0, q_ready, q_merge = 0, res_done;
  logic [QMAX-1:0][COL_W-1:0] q_cols;
  logic [QMAX-1:0][31:0] q_vals_fp32;
  logic [QIDX_W-1:0] q_nnz, q_nprobe;
  logic [15:0] q_beta;
  scored_t [LANES-1:0][TOPK-1:0] res_entries;
  logic [LANES-1:0][TOPK-1:0] res_valid;
  logic [31:0] cnt_clusters_checked, cnt_clusters_pruned, cnt_records_dup, cnt_records_scored,
               cnt_dq_stall, cnt_dq_ooo, cnt_dims_probed, cnt_cycles;
  logic [NR-1:0] rank_busy;
  logic [NL2_T-1:0] l2m_req_valid, l2m_req_ready, l2m_rsp_valid;
  logic [NL2_T-1:0][ADDR_W-1:0] l2m_req_addr;
  logic [NL2_T-1:0][LEN_W-1:0] l2m_req_len;
  logic [NL2_T-1:0][BEAT_W-1:0] l2m_rsp_data;
  logic [NR-1:0] fm_req_valid, fm_req_ready, fm_rsp_valid;
  logic [NR-1:0][ADDR_W-1:0] fm_req_addr;
  logic [NR-1:0][LEN_W-1:0] fm_req_len;
  logic [NR-1:0][BEAT_W-1:0] fm_rsp_data;

  always #5 clk = ~clk;

  logic                        fq_load;
  logic [QMAX-1:0][COL_W-1:0]  fq_cols;
  logic [QMAX-1:0][VAL_W-1:0]  fq_vals;
  logic [QIDX_W-1:0]           fq_nnz;
  logic [NL2_T-1:0]            sil_req_valid, sil_req_ready, sil_rsp_valid;
  logic [ADDR_W-1:0]           sil_req_addr;
  logic [LEN_W-1:0]            sil_req_len;
  logic [NL2_T-1:0][BEAT_W-1:0] sil_rsp_data;
  logic [NL2_T-1:0]            cl_valid, cl_ready;
  logic [ADDR_W-1:0]           cl_ptr;
  logic [PLEN_W-1:0]           cl_len;
  logic  [NL2_T-1:0]           cand_valid, cand_ready, cand_last, l2_busy;
  cand_t [NL2_T-1:0]           cand;
  logic  [NR-1:0]              rank_ready, disp_valid;
  cand_t [NR-1:0]              disp_cand;
  logic  [NR-1:0][TAG_W-1:0]   disp_tag;
  logic    [NFD_T-1:0]         score_valid, score_ready;
  scored_t [NFD_T-1:0]         score;
  logic    [NFD_T-1:0][TAG_W-1:0] score_tag;

  type2_controller #(.NL2(NL2_T), .NFD(NFD_T), .RK(RK_T)) dut (
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

  for (genvar d = 0; d < NL2_T; d++) begin : g_l2
    l2inv_dimm u_l2 (
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

  for (genvar d = 0; d < NFD_T; d++) begin : g_fd
    fidx_dimm #(.RK(RK_T)) u_fd (
      .clk, .rst_n, .q_load(fq_load), .q_cols(fq_cols), .q_vals(fq_vals), .q_nnz(fq_nnz),
      .cand_valid(disp_valid[d*RK_T +: RK_T]), .cand_ready(rank_ready[d*RK_T +: RK_T]),
      .cand(disp_cand[d*RK_T +: RK_T]), .cand_tag(disp_tag[d*RK_T +: RK_T]),
      .mem_req_valid(fm_req_valid[d*RK_T +: RK_T]), .mem_req_ready(fm_req_ready[d*RK_T +: RK_T]),
      .mem_req_addr(fm_req_addr[d*RK_T +: RK_T]), .mem_req_len(fm_req_len[d*RK_T +: RK_T]),
      .mem_rsp_valid(fm_rsp_valid[d*RK_T +: RK_T]), .mem_rsp_data(fm_rsp_data[d*RK_T +: RK_T]),
      .score_valid(score_valid[d]), .score_ready(score_ready[d]), .score(score[d]),
      .score_tag(score_tag[d]), .rank_busy(rank_busy[d*RK_T +: RK_T]));
  end

  dram_model #(.NP(NL2_T), .LAT(20)) u_l2m (.clk, .rst_n, .req_valid(l2m_req_valid), .req_ready(l2m_req_ready),
    .req_addr(l2m_req_addr), .req_len(l2m_req_len), .rsp_valid(l2m_rsp_valid), .rsp_data(l2m_rsp_data));
  dram_model #(.NP(NR), .LAT(20)) u_fm (.clk, .rst_n, .req_valid(fm_req_valid), .req_ready(fm_req_ready),
    .req_addr(fm_req_addr), .req_len(fm_req_len), .rsp_valid(fm_rsp_valid), .rsp_data(fm_rsp_data));

  int checks = 0, failures = 0;
  int n_prune = 0, n_dup = 0, n_stall = 0, n_ooo = 0, n_swap = 0, n_merge = 0, n_early = 0, n_fp = 0;

  // ---- synthetic data set --------------------------------------------------------
  int dims [NDIM];                         // dimension numbers used
  int rn [NREC];                           // non-zeros per record
  int rc [NREC][64];                       // dimension index (into dims) per non-zero
  int rv [NREC][64];                       // value per non-zero
  int rec_id [NREC];
  int qdim [QN]; int qval8 [QN];           // query: dims index and value in eighths
  int recs_of_dim [NDIM][$];

  // Records are placed unevenly: two thirds of them land on the first four
  // ranks, so those ranks become hot spots and the delay queues must hold
  // their candidates back while other ranks get served.
  int rec_port [NREC]; int rec_bin [NREC]; int port_fill [NR]; int id2r [int];
  function automatic int id_of(int r);
    rec_port[r] = (r % 3 == 0) ? r % NR : r % 4;
    rec_bin[r]  = port_fill[rec_port[r]]++;
    id2r[(rec_port[r] << 12) | rec_bin[r]] = r;
    return (rec_port[r] << 12) | rec_bin[r];
  endfunction

  function automatic logic [31:0] fp_of_eighths(int k);
    int e; logic [22:0] m;
    e = 0;
    while ((k >> e) > 1) e++;
    m = 23'((k - (1 << e)) << (23 - e));
    return {1'b0, 8'(127 + e - 3), m};
  endfunction

  function automatic longint true_dot(int r);
    longint s = 0;
    for (int i = 0; i < QN; i++)
      for (int j = 0; j < rn[r]; j++)
        if (rc[r][j] == qdim[i]) s += longint'(qval8[i] * 128) * longint'(rv[r][j]);
    return s;
  endfunction

  task automatic build_and_load();
    int l2_next [NL2_T];
    for (int d = 0; d < NDIM; d++) dims[d] = (d * 631 + 17) % 30522;
    for (int p = 0; p < NL2_T; p++) l2_next[p] = 16;
    for (int p = 0; p < NR; p++) port_fill[p] = 0;
    // records
    for (int r = 0; r < NREC; r++) begin
      bit used [NDIM];
      rec_id[r] = id_of(r);
      rn[r] = (r % 5 == 0) ? 2 + $urandom % 10 : 20 + $urandom % 24;
      for (int d = 0; d < NDIM; d++) used[d] = 0;
      for (int j = 0; j < rn[r]; j++) begin
        int d;
        do d = $urandom % NDIM; while (used[d]);
        used[d] = 1;
        rc[r][j] = d; rv[r][j] = 1 + $urandom % 2000;
        recs_of_dim[d].push_back(r);
      end
    end
    // forward index bins and lookup table
    for (int g = 0; g < NR; g++) begin
      lut_we = 1; lut_waddr = 12'(g); lut_wdata = {3'(g / RK_T), 3'(g % RK_T), 26'd0};
      @(negedge clk);
    end
    lut_we = 0;
    for (int r = 0; r < NREC; r++) begin
      logic [BEAT_W-1:0] b; int base, port;
      port = rec_port[r]; base = rec_bin[r] * BIN_BEATS;
      b = '0; b[15:0] = 16'(rn[r]); b[47:16] = 32'(rec_id[r]);
      u_fm.write_beat(port, 32'(base), b);
      for (int bb = 0; bb < (rn[r] + 15) / 16; bb++) begin
        b = '0;
        for (int j = 0; j < 16; j++) if (bb*16 + j < rn[r]) b[j*32 +: 32] = 32'(dims[rc[r][bb*16 + j]]);
        u_fm.write_beat(port, 32'(base + 1 + bb), b);
      end
      for (int bb = 0; bb < (rn[r] + 31) / 32; bb++) begin
        b = '0;
        for (int j = 0; j < 32; j++) if (bb*32 + j < rn[r]) b[j*16 +: 16] = 16'(rv[r][bb*32 + j]);
        u_fm.write_beat(port, 32'(base + 1 + (rn[r] + 15) / 16 + bb), b);
      end
    end
    // level-2 lists: records of a dimension sorted by their value there,
    // cut into clusters of CLSZ; silhouette = per-dimension max over the
    // cluster, largest ELL_W entries kept
    for (int d = 0; d < NDIM; d++) begin
      int lst [$]; int ncl, port, sbase;
      lst = recs_of_dim[d];
      ncl = (lst.size() + CLSZ - 1) / CLSZ;
      port = dims[d] % NL2_T;
      sbase = l2_next[port];
      l2_next[port] += ncl;
      for (int c = 0; c < ncl; c++) begin
        int mx [NDIM]; logic [BEAT_W-1:0] b; int pbase, n;
        for (int k = 0; k < NDIM; k++) mx[k] = 0;
        n = 0;
        pbase = l2_next[port];
        b = '0;
        for (int k = c * CLSZ; k < lst.size() && k < (c + 1) * CLSZ; k++) begin
          int r; r = lst[k];
          for (int j = 0; j < rn[r]; j++) if (rv[r][j] > mx[rc[r][j]]) mx[rc[r][j]] = rv[r][j];
          b[n*32 +: 32] = 32'(rec_id[r]);
          n++;
        end
        u_l2m.write_beat(port, 32'(pbase), b);
        l2_next[port] += 1;
        b = '0;
        for (int e = 0; e < int'(ELL_W); e++) begin
          int best; best = -1;
          for (int k = 0; k < NDIM; k++) if (mx[k] > 0 && (best < 0 || mx[k] > mx[best])) best = k;
          if (best >= 0) begin
            b[e*PAIR_W + VAL_W +: COL_W] = 32'(dims[best]);
            b[e*PAIR_W +: VAL_W] = 16'(mx[best]);
            mx[best] = 0;
          end else begin
            b[e*PAIR_W + VAL_W +: COL_W] = 32'hFFFF_FFFF;
          end
        end
        b[SIL_PTR_LSB +: ADDR_W] = 32'(pbase);
        b[SIL_LEN_LSB +: PLEN_W] = 16'(n);
        u_l2m.write_beat(port, 32'(sbase + c), b);
      end
      l1_we = 1; l1_wdim = L1_AW'(dims[d]);
      l1_wentry.ncl = NCL_W'(ncl); l1_wentry.l2_base = L2BASE_W'(sbase);
      @(negedge clk);
    end
    l1_we = 0;
  endtask

  // records scored during the current query, seen at the top-K queue input
  longint scored [int];
  always @(posedge clk)
    if (dut.tk_in_valid) scored[int'(dut.tk_in.id)] = true_dot_by_id(int'(dut.tk_in.id));

  function automatic longint true_dot_by_id(int id);
    if (!id2r.exists(id)) return -1;
    return true_dot(id2r[id]);
  endfunction

  function automatic longint sc(int l, int k);
    scored_t e; logic signed [SCORE_W-1:0] v;
    e = res_entries[l][k]; v = e.score;
    return longint'(v);
  endfunction

  function automatic void sort_desc(ref longint q [$]);
    for (int i = 1; i < q.size(); i++)
      for (int j = i; j > 0 && q[j] > q[j-1]; j--) begin
        longint t; t = q[j]; q[j] = q[j-1]; q[j-1] = t;
      end
  endfunction

  task automatic run_query(int nprobe, int beta, bit merge, bit exact);
    longint ref_all [$], ref_sc [$], got [$];
    bit in_cand [int];
    int nres;
    scored.delete();
    for (int i = 0; i < QMAX; i++) begin q_cols[i] = '0; q_vals_fp32[i] = '0; end
    for (int i = 0; i < QN; i++) begin
      q_cols[i] = 32'(dims[qdim[i]]); q_vals_fp32[i] = fp_of_eighths(qval8[i]);
    end
    q_nnz = QIDX_W'(QN); q_nprobe = QIDX_W'(nprobe); q_beta = 16'(beta); q_merge = merge;
    q_valid = 1;
    @(posedge clk); while (!q_ready) @(posedge clk);
    @(negedge clk); q_valid = 0;
    @(negedge clk);
    while (!res_done) begin
      @(negedge clk);
      if (cnt_cycles % 2000 == 0) $display("INFO cycle %0d state %0d scored %0d", cnt_cycles, dut.st_q, cnt_records_scored);
    end
    nres = merge ? 2 * TOPK : TOPK;
    // reference over candidate records of the probed dimensions
    for (int i = 0; i < nprobe && i < QN; i++)
      foreach (recs_of_dim[qdim[i]][k]) in_cand[recs_of_dim[qdim[i]][k]] = 1;
    foreach (in_cand[r]) begin
      ref_all.push_back(true_dot(r));
      if (!scored.exists(rec_id[r]) && exact) n_fp++;
      if (rn[r] < QN && scored.exists(rec_id[r])) n_swap++;
    end
    foreach (scored[id]) ref_sc.push_back(scored[id]);
    sort_desc(ref_all); sort_desc(ref_sc);
    for (int k = 0; k < nres; k++) begin
      int l, e; l = k / TOPK; e = k % TOPK;
      checks++;
      if (k < ref_sc.size()) begin
        if (!res_valid[l][e] || sc(l, e) != ref_sc[k] || sc(l, e) != true_dot_by_id(int'(res_entries[l][e].id))) begin
          failures++; $display("FAIL result %0d: got %0d exp %0d", k, sc(l, e), ref_sc[k]);
        end
      end else if (res_valid[l][e]) begin failures++; $display("FAIL result %0d should be empty", k); end
    end
    if (exact && n_fp == 0) begin
      for (int k = 0; k < nres && k < ref_all.size(); k++) begin
        checks++;
        if (sc(k / TOPK, k % TOPK) != ref_all[k]) begin failures++; $display("FAIL exact top-K %0d", k); end
      end
    end
    $display("INFO query nprobe=%0d beta=%0d merge=%0d: %0d cycles, %0d clusters checked, %0d pruned, %0d records scored, %0d duplicates dropped, candidates %0d",
             nprobe, beta, merge, cnt_cycles, cnt_clusters_checked, cnt_clusters_pruned, cnt_records_scored, cnt_records_dup, in_cand.size());
    n_prune += cnt_clusters_pruned; n_dup += cnt_records_dup;
    if (merge) n_merge++;
    if (nprobe < QN) n_early++;
  endtask

  int busy_sum = 0, busy_cyc = 0;
  always @(posedge clk) if (dut.st_q != 0) begin busy_sum += $countones(rank_busy); busy_cyc++; end

  initial begin
    l1_wdim = 0; l1_wentry = '0; lut_waddr = 0; lut_wdata = 0;
    q_cols = '0; q_vals_fp32 = '0; q_nnz = 0; q_nprobe = 0; q_beta = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    $display("INFO loading index");
    build_and_load();
    $display("INFO index loaded at %0t", $time);
    // query: QN distinct dimensions, values sorted descending (host side)
    begin
      bit used [NDIM];
      for (int d = 0; d < NDIM; d++) used[d] = 0;
      for (int i = 0; i < QN; i++) begin
        int d;
        do d = $urandom % NDIM; while (used[d]);
        used[d] = 1; qdim[i] = d; qval8[i] = 64 - i * 3;
      end
    end
    run_query(5, 0, 0, 1);
    run_query(QN, 256, 1, 0);
    run_query(12, 320, 0, 0);
    n_stall = cnt_dq_stall; n_ooo = cnt_dq_ooo;
    $display("INFO mechanisms: pruned %0d, duplicates %0d, dq stalls %0d, out-of-order %0d, record-driven %0d, merged %0d, early-terminated %0d, bloom losses %0d",
             n_prune, n_dup, n_stall, n_ooo, n_swap, n_merge, n_early, n_fp);
    $display("INFO mean busy F-Idx ranks %0d/%0d", busy_cyc ? busy_sum / busy_cyc : 0, NR);
    checks += 7;
    if (n_prune == 0) begin failures++; $display("FAIL no cluster pruned"); end
    if (n_dup == 0)   begin failures++; $display("FAIL no duplicate dropped"); end
    if (n_stall == 0) begin failures++; $display("FAIL delay queues never stalled"); end
    if (n_ooo == 0)   begin failures++; $display("FAIL no out-of-order dispatch"); end
    if (n_swap == 0)  begin failures++; $display("FAIL record-driven mode never used"); end
    if (n_merge == 0) begin failures++; $display("FAIL merged queue never used"); end
    if (n_early == 0) begin failures++; $display("FAIL no early termination"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
