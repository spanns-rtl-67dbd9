// fidx_rank_cu: the rank-level compute unit of an F-Idx DIMM ("data compact").
// Given a candidate pointer, it reads the record from its 8 KB bin and reduces
// it to what the inner product needs:
//   (1) the comparator array matches the query's column indices (rows) against
//       the 16 record column indices of each 64-byte column beat (columns),
//       giving a query hit per row and a record hit per column;
//   (2) the filter picks the matched values out of the record's value beats.
// Hit mask and matched values go to a small results buffer that decouples the
// DRAM reads from the distance calculator.
//
// Dynamic mode (from the paper): if the record has fewer non-zeros than the
// query, the mask is built over the record (record hits) and the matching
// query values are fetched instead, so the MAC takes ||r||_0 rather than
// ||q||_0 cycles.
//
// Record layout in its bin (this design's choice): beat 0 holds nnz[15:0];
// then ceil(nnz/16) beats of 32-bit columns; then ceil(nnz/32) beats of
// 16-bit values. The record is read as a one-beat header request followed by
// one request for the rest. Query columns are assumed distinct, record
// columns likewise.
//
// Interface: q_load loads the query (while idle); cand_* (valid/ready) gives
// a record pointer and its delay-queue tag; mem_* is the rank's read port
// (valid/ready request, in-order beats without backpressure); res_* (valid/
// ready) hands results-buffer entries to the distance calculator.
// Timing: one 64-byte beat is consumed per cycle once data returns.
module fidx_rank_cu
  import spanns_pkg::*;
#(
  parameter int unsigned RB_DEPTH = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                           q_load,
  input  logic [QMAX-1:0][COL_W-1:0]     q_cols,
  input  logic [QMAX-1:0][VAL_W-1:0]     q_vals,
  input  logic [QIDX_W-1:0]              q_nnz,
  input  logic                           cand_valid,
  output logic                           cand_ready,
  input  cand_t                          cand,
  input  logic [TAG_W-1:0]               cand_tag,
  output logic                           mem_req_valid,
  input  logic                           mem_req_ready,
  output logic [ADDR_W-1:0]              mem_req_addr,
  output logic [LEN_W-1:0]               mem_req_len,
  input  logic                           mem_rsp_valid,
  input  logic [BEAT_W-1:0]              mem_rsp_data,
  output logic                           res_valid,
  input  logic                           res_ready,
  output rb_entry_t                      res_entry,
  output logic                           busy
);
  localparam int unsigned CPB = COLS_PER_BEAT;
  localparam int unsigned VPB = VALS_PER_BEAT;

  typedef enum logic [2:0] {C_IDLE, C_HREQ, C_HWAIT, C_BREQ, C_COLS, C_VALS, C_PUSH} c_st_e;
  c_st_e st_q;

  logic [QMAX-1:0][COL_W-1:0] qcol_q;
  logic [QMAX-1:0][VAL_W-1:0] qval_q;
  logic [QIDX_W-1:0]          qnnz_q;

  logic [ADDR_W-1:0]  addr_q;
  logic [ID_W-1:0]    id_q;
  logic [TAG_W-1:0]   tag_q;
  logic [RNNZ_W-1:0]  rnnz_q;
  logic               swap_q;
  logic [7:0]         cbeats_q, vbeats_q, bcnt_q;
  logic [QMAX-1:0]    hit_q;
  logic [QMAX-1:0][RNNZ_W-1:0] qpos_q;     // record position matched by query row
  logic [QMAX-1:0][VAL_W-1:0]  prim_q, sec_q;

  // ---- results buffer -------------------------------------------------------------
  rb_entry_t rb_q [RB_DEPTH];
  logic [$clog2(RB_DEPTH):0] rb_wp_q, rb_rp_q;
  logic rb_full, rb_push;
  rb_entry_t rb_in;

  assign rb_full   = (rb_wp_q - rb_rp_q) == ($clog2(RB_DEPTH)+1)'(RB_DEPTH);
  assign res_valid = rb_wp_q != rb_rp_q;
  assign res_entry = rb_q[rb_rp_q[$clog2(RB_DEPTH)-1:0]];

  // ---- comparator array ----------------------------------------------------------
  logic [QMAX-1:0][CPB-1:0] eq;
  logic [QMAX-1:0]          row_hit;       // Query Hit
  logic [QMAX-1:0][3:0]     row_col;       // column of the hit in this beat
  logic [CPB-1:0]           col_hit;       // Record Hit
  logic [CPB-1:0][$clog2(QMAX)-1:0] col_row;

  always_comb begin
    row_hit = '0; row_col = '0; col_hit = '0; col_row = '0;
    for (int i = 0; i < int'(QMAX); i++) begin
      for (int j = 0; j < int'(CPB); j++) begin
        eq[i][j] = (i < int'(qnnz_q))
                && (int'(bcnt_q) * int'(CPB) + j < int'(rnnz_q))
                && (qcol_q[i] == mem_rsp_data[j*COL_W +: COL_W]);
        if (eq[i][j]) begin
          row_hit[i] = 1'b1;
          row_col[i] = 4'(j);
          col_hit[j] = 1'b1;
          col_row[j] = $clog2(QMAX)'(i);
        end
      end
    end
  end

  logic [RNNZ_W-1:0] hdr_nnz;
  assign hdr_nnz = mem_rsp_data[RNNZ_W-1:0];

  always_comb begin
    cand_ready    = (st_q == C_IDLE) && !rb_full && !q_load;
    mem_req_valid = (st_q == C_HREQ) || (st_q == C_BREQ);
    mem_req_addr  = (st_q == C_HREQ) ? addr_q : addr_q + 1'b1;
    mem_req_len   = (st_q == C_HREQ) ? LEN_W'(1) : LEN_W'(cbeats_q + vbeats_q);
    busy          = (st_q != C_IDLE) || res_valid;
    rb_push       = (st_q == C_PUSH) && !rb_full;
    rb_in.swap    = swap_q;
    rb_in.len     = swap_q ? QIDX_W'(rnnz_q) : qnnz_q;
    rb_in.hit     = hit_q;
    rb_in.prim    = prim_q;
    rb_in.sec     = sec_q;
    rb_in.id      = id_q;
    rb_in.tag     = tag_q;
  end

  // results buffer storage, no reset
  always_ff @(posedge clk) begin
    if (rb_push) rb_q[rb_wp_q[$clog2(RB_DEPTH)-1:0]] <= rb_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= C_IDLE;
      qcol_q  <= '0;
      qval_q  <= '0;
      qnnz_q  <= '0;
      addr_q  <= '0;
      id_q    <= '0;
      tag_q   <= '0;
      rnnz_q  <= '0;
      swap_q  <= 1'b0;
      cbeats_q <= '0;
      vbeats_q <= '0;
      bcnt_q  <= '0;
      hit_q   <= '0;
      qpos_q  <= '0;
      prim_q  <= '0;
      sec_q   <= '0;
      rb_wp_q <= '0;
      rb_rp_q <= '0;
    end else begin
      if (res_valid && res_ready) rb_rp_q <= rb_rp_q + 1'b1;
      if (rb_push) rb_wp_q <= rb_wp_q + 1'b1;
      unique case (st_q)
        C_IDLE: begin
          if (q_load) begin
            qcol_q <= q_cols;
            qval_q <= q_vals;
            qnnz_q <= q_nnz;
          end else if (cand_valid && cand_ready) begin
            addr_q <= cand.addr;
            id_q   <= cand.id;
            tag_q  <= cand_tag;
            st_q   <= C_HREQ;
          end
        end
        C_HREQ: if (mem_req_ready) st_q <= C_HWAIT;
        C_HWAIT: if (mem_rsp_valid) begin
          rnnz_q   <= hdr_nnz;
          swap_q   <= (32'(hdr_nnz) < 32'(qnnz_q));
          cbeats_q <= 8'((32'(hdr_nnz) + CPB - 1) / CPB);
          vbeats_q <= 8'((32'(hdr_nnz) + VPB - 1) / VPB);
          bcnt_q   <= '0;
          hit_q    <= '0;
          prim_q   <= '0;
          sec_q    <= '0;
          st_q     <= (hdr_nnz == '0) ? C_PUSH : C_BREQ;
        end
        C_BREQ: if (mem_req_ready) st_q <= C_COLS;
        C_COLS: if (mem_rsp_valid) begin
          // (1) comparator array on one column beat
          if (!swap_q) begin
            for (int i = 0; i < int'(QMAX); i++)
              if (row_hit[i]) begin
                hit_q[i]  <= 1'b1;
                qpos_q[i] <= RNNZ_W'(int'(bcnt_q) * int'(CPB) + int'(row_col[i]));
              end
          end else begin
            for (int p = 0; p < int'(QMAX); p++)
              if (p / int'(CPB) == int'(bcnt_q) && col_hit[p % CPB]) begin
                hit_q[p] <= 1'b1;
                sec_q[p] <= qval_q[col_row[p % CPB]];
              end
          end
          if (bcnt_q == cbeats_q - 1'b1) begin
            bcnt_q <= '0;
            st_q   <= C_VALS;
          end else begin
            bcnt_q <= bcnt_q + 1'b1;
          end
        end
        C_VALS: if (mem_rsp_valid) begin
          // (2) filter: extract the values of the matched positions
          if (!swap_q) begin
            for (int i = 0; i < int'(QMAX); i++)
              if (hit_q[i] && int'(qpos_q[i]) / int'(VPB) == int'(bcnt_q))
                sec_q[i] <= mem_rsp_data[(int'(qpos_q[i]) % VPB) * VAL_W +: VAL_W];
          end else begin
            for (int p = 0; p < int'(QMAX); p++)
              if (p / int'(VPB) == int'(bcnt_q))
                prim_q[p] <= mem_rsp_data[(p % VPB) * VAL_W +: VAL_W];
          end
          if (bcnt_q == vbeats_q - 1'b1) st_q <= C_PUSH;
          else                           bcnt_q <= bcnt_q + 1'b1;
        end
        C_PUSH: if (!rb_full) st_q <= C_IDLE;
        default: st_q <= C_IDLE;
      endcase
    end
  end
endmodule
