// tb_fidx_rank_cu: random sparse records (0..200 non-zeros, columns drawn
// from a small range so they overlap the query) are laid out in their bins in
// a DRAM model. For each record the results-buffer entry is turned back into
// an inner product the way the distance calculator would, and compared with
// the inner product computed directly from the record and the query; the
// mode bit must be record-driven exactly when the record has fewer non-zeros
// than the query, and the entry length must be the smaller non-zero count.
module tb_fidx_rank_cu;
  import spanns_pkg::*;
  logic clk = 0, rst_n = 0, q_load = 0;
  logic [QMAX-1:0][COL_W-1:0] q_cols;
  logic [QMAX-1:0][VAL_W-1:0] q_vals;
  logic [QIDX_W-1:0] q_nnz;
  logic cand_valid = 0, cand_ready;
  cand_t cand;
  logic [TAG_W-1:0] cand_tag;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [LEN_W-1:0] mem_req_len;
  logic [BEAT_W-1:0] mem_rsp_data;
  logic res_valid, res_ready, busy;
  rb_entry_t res_entry;
  int checks = 0, failures = 0, nswap = 0, nnorm = 0;
  localparam int NREC = 60;
  longint ref_dot [NREC];
  int     rnnz [NREC];

  always #5 clk = ~clk;

  fidx_rank_cu dut (.*);
  dram_model #(.NP(1), .LAT(8)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .req_len(mem_req_len),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  task automatic build_record(int r);
    int n;
    logic [31:0] cols [$];
    logic [15:0] vals [$];
    logic [BEAT_W-1:0] b;
    logic [31:0] base;
    n = (r % 4 == 0) ? ($urandom % 12) : ($urandom % 200);
    rnnz[r] = n;
    base = 32'(r * BIN_BEATS);
    for (int c = 0; c < 400 && cols.size() < n; c++)
      if ($urandom % 2) cols.push_back(32'(c * 3));
    n = cols.size(); rnnz[r] = n;
    for (int i = 0; i < n; i++) vals.push_back(16'($urandom));
    b = '0; b[15:0] = 16'(n); b[47:16] = 32'(r);
    u_mem.write_beat(0, base, b);
    for (int bb = 0; bb < (n + 15) / 16; bb++) begin
      b = '0;
      for (int j = 0; j < 16; j++) if (bb*16 + j < n) b[j*32 +: 32] = cols[bb*16 + j];
      u_mem.write_beat(0, base + 1 + bb, b);
    end
    for (int bb = 0; bb < (n + 31) / 32; bb++) begin
      b = '0;
      for (int j = 0; j < 32; j++) if (bb*32 + j < n) b[j*16 +: 16] = vals[bb*32 + j];
      u_mem.write_beat(0, base + 1 + (n + 15) / 16 + bb, b);
    end
    ref_dot[r] = 0;
    for (int i = 0; i < int'(q_nnz); i++)
      for (int j = 0; j < n; j++)
        if (q_cols[i] == cols[j]) ref_dot[r] += longint'($signed(q_vals[i])) * longint'($signed(vals[j]));
  endtask

  function automatic longint entry_dot(rb_entry_t e);
    longint s = 0;
    for (int i = 0; i < int'(e.len); i++)
      if (e.hit[i]) s += longint'($signed(e.swap ? e.prim[i] : q_vals[i])) * longint'($signed(e.sec[i]));
    return s;
  endfunction

  int got = 0;
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    int r; longint d; int expl; bit exps;
    r = int'(res_entry.id);
    d = entry_dot(res_entry);
    exps = rnnz[r] < int'(q_nnz);
    expl = exps ? rnnz[r] : int'(q_nnz);
    checks += 3;
    if (d != ref_dot[r]) begin failures++; $display("FAIL rec %0d dot %0d exp %0d (nnz %0d)", r, d, ref_dot[r], rnnz[r]); end
    if (res_entry.swap != exps) begin failures++; $display("FAIL rec %0d mode", r); end
    if (int'(res_entry.len) != expl) begin failures++; $display("FAIL rec %0d len", r); end
    if (res_entry.tag != TAG_W'(r % 5)) begin failures++; $display("FAIL tag"); end
    if (exps) nswap++; else nnorm++;
    got++;
  end

  initial begin
    res_ready = 1; cand = '0; cand_tag = '0; q_cols = '0; q_vals = '0;
    q_nnz = QIDX_W'(40);
    for (int i = 0; i < QMAX; i++) begin q_cols[i] = 32'(i * 5); q_vals[i] = 16'($urandom); end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < NREC; r++) build_record(r);
    @(negedge clk); q_load = 1; @(negedge clk); q_load = 0;
    for (int r = 0; r < NREC; r++) begin
      res_ready = (r % 7 != 3);
      cand_valid = 1; cand.id = 32'(r); cand.addr = 32'(r * BIN_BEATS); cand_tag = TAG_W'(r % 5);
      @(posedge clk); while (!cand_ready) @(posedge clk);
      @(negedge clk); cand_valid = 0;
      res_ready = 1;
    end
    while (got < NREC) @(negedge clk);
    checks++;
    if (nswap == 0 || nnorm == 0) begin failures++; $display("FAIL a mode never used"); end
    $display("INFO record-driven %0d query-driven %0d", nswap, nnorm);
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
