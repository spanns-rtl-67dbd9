// tb_silhouette_check: loads a floating-point query, checks that the
// quantized query registers hold value * 1024 (values chosen exactly
// representable), streams silhouette beats and checks each distance against
// the inner product of the quantized query with the beat's Ellpack row, the
// pointer-list address and length carried alongside, and checks the visited
// list (first lookup new, second lookup visited, cleared by a new query).
module tb_silhouette_check;
  import spanns_pkg::*;
  logic clk = 0, rst_n = 0, q_load = 0;
  logic [QMAX-1:0][COL_W-1:0] q_cols_in, q_cols;
  logic [QMAX-1:0][31:0] q_vals_fp32;
  logic [QIDX_W-1:0] q_nnz_in, q_nnz;
  logic [QMAX-1:0][VAL_W-1:0] q_vals;
  logic sil_valid = 0, dist_valid, vis_req = 0, vis_resp_valid, vis_resp_visited;
  logic [BEAT_W-1:0] sil_beat;
  logic signed [SCORE_W-1:0] dot;
  logic [ADDR_W-1:0] dist_ptr;
  logic [PLEN_W-1:0] dist_len;
  logic [ID_W-1:0] vis_key;
  int checks = 0, failures = 0;
  int qv [QMAX];

  always #5 clk = ~clk;
  silhouette_check dut (.clk, .rst_n, .q_load, .q_cols_in, .q_vals_fp32, .q_nnz_in,
    .q_cols, .q_vals, .q_nnz, .sil_valid, .sil_beat, .dist_valid, .dot, .dist_ptr, .dist_len,
    .vis_req, .vis_key, .vis_resp_valid, .vis_resp_visited);

  // k/8 for k = 1..64 as binary32
  function automatic logic [31:0] fp_of_eighths(int k);
    int e; logic [22:0] m; int v;
    v = k; e = 0;
    while ((v >> e) > 1) e++;
    m = 23'((v - (1 << e)) << (23 - e));
    return {1'b0, 8'(127 + e - 3), m};
  endfunction

  initial begin
    q_cols_in = '0; q_vals_fp32 = '0; q_nnz_in = 0; sil_beat = '0; vis_key = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < QMAX; i++) begin
      q_cols_in[i] = 32'(i * 11 + 2);
      qv[i] = 1 + $urandom % 64;
      q_vals_fp32[i] = fp_of_eighths(qv[i]);
    end
    q_nnz_in = QIDX_W'(30);
    q_load = 1; @(negedge clk); q_load = 0;
    for (int i = 0; i < 30; i++) begin
      checks++;
      if (int'($signed(q_vals[i])) != qv[i] * 128) begin failures++; $display("FAIL quantized %0d: %0d", i, q_vals[i]); end
    end
    for (int r = 0; r < 100; r++) begin
      longint e; int sv;
      e = 0;
      sil_beat = '0;
      for (int k = 0; k < int'(ELL_W); k++) begin
        int qi;
        qi = $urandom % 40;                          // some beyond nnz: must not count
        sv = int'($urandom % 2000) - 1000;
        sil_beat[k*PAIR_W + VAL_W +: COL_W] = 32'(qi * 11 + 2);
        sil_beat[k*PAIR_W +: VAL_W] = 16'(sv);
        if (qi < 30) e += longint'(qv[qi] * 128) * longint'(sv);
      end
      sil_beat[SIL_PTR_LSB +: ADDR_W] = 32'(r * 3);
      sil_beat[SIL_LEN_LSB +: PLEN_W] = 16'(r);
      sil_valid = 1;
      @(negedge clk);
      sil_valid = 0;
      checks++;
      if (!dist_valid || longint'(dot) != e || dist_ptr != 32'(r * 3) || dist_len != 16'(r)) begin
        failures++; $display("FAIL row %0d dot %0d exp %0d", r, dot, e);
      end
    end
    for (int pass = 0; pass < 2; pass++)
      for (int k = 0; k < 20; k++) begin
        vis_req = 1; vis_key = 32'(k * 1000003);
        @(negedge clk); vis_req = 0;
        checks++;
        if (!vis_resp_valid || vis_resp_visited != (pass == 1)) begin failures++; $display("FAIL visited pass %0d", pass); end
      end
    q_load = 1; @(negedge clk); q_load = 0;
    vis_req = 1; vis_key = 32'(5 * 1000003); @(negedge clk); vis_req = 0;
    checks++;
    if (vis_resp_visited) begin failures++; $display("FAIL visited list not cleared by a new query"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
