// tb_fidx_dimm: one F-Idx DIMM with all its ranks. Each rank gets its own
// stream of random sparse records (laid out in their bins in a per-rank DRAM
// model) and all ranks are fed at the same time. Every score leaving the
// DIMM's arbiter is compared with the inner product of the record and the
// query computed directly in the testbench, and must carry the tag of its
// candidate. Each record must come back exactly once, every rank must
// deliver, and back-pressure on the score port (random score_ready) must lose
// nothing. The rank-busy flags must be seen high on several ranks at once.
module tb_fidx_dimm;
  import spanns_pkg::*;
  localparam int RK_T = RANKS, NPER = 12, NREC = RK_T * NPER;
  logic clk = 0, rst_n = 0, q_load = 0;
  logic [QMAX-1:0][COL_W-1:0] q_cols;
  logic [QMAX-1:0][VAL_W-1:0] q_vals;
  logic [QIDX_W-1:0] q_nnz;
  logic  [RK_T-1:0] cand_valid, cand_ready;
  cand_t [RK_T-1:0] cand;
  logic  [RK_T-1:0][TAG_W-1:0] cand_tag;
  logic  [RK_T-1:0] mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic  [RK_T-1:0][ADDR_W-1:0] mem_req_addr;
  logic  [RK_T-1:0][LEN_W-1:0] mem_req_len;
  logic  [RK_T-1:0][BEAT_W-1:0] mem_rsp_data;
  logic score_valid, score_ready;
  scored_t score;
  logic [TAG_W-1:0] score_tag;
  logic [RK_T-1:0] rank_busy;
  int checks = 0, failures = 0, got = 0, max_busy = 0;
  longint ref_dot [NREC];
  int seen [NREC];
  int per_rank [RK_T];

  always #5 clk = ~clk;

  fidx_dimm dut (.*);
  dram_model #(.NP(RK_T), .LAT(12)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .req_len(mem_req_len),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  // record r lives in rank r % RK_T, bin r / RK_T
  task automatic build_record(int r);
    int n, port;
    logic [31:0] cols [$];
    logic [15:0] vals [$];
    logic [BEAT_W-1:0] b;
    logic [31:0] base;
    port = r % RK_T; base = 32'((r / RK_T) * BIN_BEATS);
    n = (r % 3 == 0) ? 1 + ($urandom % 15) : ($urandom % 150);
    for (int c = 0; c < 400 && cols.size() < n; c++)
      if ($urandom % 2) cols.push_back(32'(c * 2));
    n = cols.size();
    for (int i = 0; i < n; i++) vals.push_back(16'($urandom));
    b = '0; b[15:0] = 16'(n); b[47:16] = 32'(r);
    u_mem.write_beat(port, base, b);
    for (int bb = 0; bb < (n + 15) / 16; bb++) begin
      b = '0;
      for (int j = 0; j < 16; j++) if (bb*16 + j < n) b[j*32 +: 32] = cols[bb*16 + j];
      u_mem.write_beat(port, base + 1 + bb, b);
    end
    for (int bb = 0; bb < (n + 31) / 32; bb++) begin
      b = '0;
      for (int j = 0; j < 32; j++) if (bb*32 + j < n) b[j*16 +: 16] = vals[bb*32 + j];
      u_mem.write_beat(port, base + 1 + (n + 15) / 16 + bb, b);
    end
    ref_dot[r] = 0;
    for (int i = 0; i < int'(q_nnz); i++)
      for (int j = 0; j < n; j++)
        if (q_cols[i] == cols[j]) ref_dot[r] += longint'($signed(q_vals[i])) * longint'($signed(vals[j]));
  endtask

  always @(posedge clk) if (rst_n) begin
    score_ready <= ($urandom % 4 != 0);
    if ($countones(rank_busy) > max_busy) max_busy = $countones(rank_busy);
    if (score_valid && score_ready) begin
      int r; logic signed [SCORE_W-1:0] s; longint sl;
      r = int'(score.id); s = score.score; sl = longint'(s);
      checks += 2;
      if (r >= NREC) begin failures++; $display("FAIL unknown id %0d", r); end
      else begin
        if (sl != ref_dot[r]) begin failures++; $display("FAIL rec %0d score %0d exp %0d", r, sl, ref_dot[r]); end
        if (score_tag != TAG_W'(r % N_ACT)) begin failures++; $display("FAIL rec %0d tag", r); end
        seen[r]++; per_rank[r % RK_T]++;
      end
      got++;
    end
  end

  task automatic feed(int rk);
    for (int k = 0; k < NPER; k++) begin
      int r; r = k * RK_T + rk;
      cand_valid[rk] = 1; cand[rk].id = 32'(r); cand[rk].rank = 3'(rk);
      cand[rk].addr = 32'(k * BIN_BEATS); cand_tag[rk] = TAG_W'(r % N_ACT);
      @(posedge clk); while (!cand_ready[rk]) @(posedge clk);
      @(negedge clk); cand_valid[rk] = 0;
    end
  endtask

  initial begin
    cand_valid = '0; cand = '0; cand_tag = '0; q_cols = '0; q_vals = '0; score_ready = 0;
    q_nnz = QIDX_W'(30);
    for (int i = 0; i < QMAX; i++) begin q_cols[i] = 32'(i * 7); q_vals[i] = 16'($urandom); end
    for (int r = 0; r < NREC; r++) seen[r] = 0;
    for (int k = 0; k < RK_T; k++) per_rank[k] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < NREC; r++) build_record(r);
    @(negedge clk); q_load = 1; @(negedge clk); q_load = 0;
    for (int k = 0; k < RK_T; k++) begin
      automatic int kk = k;
      fork feed(kk); join_none
    end
    wait fork;
    while (got < NREC) @(negedge clk);
    repeat (50) @(negedge clk);
    for (int r = 0; r < NREC; r++) begin
      checks++;
      if (seen[r] != 1) begin failures++; $display("FAIL rec %0d seen %0d times", r, seen[r]); end
    end
    for (int k = 0; k < RK_T; k++) begin
      checks++;
      if (per_rank[k] != NPER) begin failures++; $display("FAIL rank %0d delivered %0d", k, per_rank[k]); end
    end
    checks++;
    if (max_busy < 2) begin failures++; $display("FAIL ranks never busy together"); end
    $display("INFO %0d scores, up to %0d ranks busy at once", got, max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
