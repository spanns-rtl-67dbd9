// tb_cluster_filter: (1) threshold: random silhouette scores, k-th best
// scores and beta values; pass must equal "queue not full, or score*256 >=
// beta*kth", and never for an empty list. (2) dedup: a stream of candidate
// ids with repeats, answered by a reference visited set one cycle later, with
// random output backpressure; every candidate must come out once, in order,
// marked as a record exactly when its id was new, with its last flag kept.
module tb_cluster_filter;
  import spanns_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0;
  logic [15:0] beta;
  logic signed [SCORE_W-1:0] sil_score, kth_score;
  logic [PLEN_W-1:0] sil_len;
  logic kth_valid, pass;
  logic in_valid = 0, in_ready, in_last = 0, bf_req, bf_resp_valid = 0, bf_resp_visited = 0;
  cand_t in_cand, out_cand;
  logic [ID_W-1:0] bf_key;
  logic out_valid, out_ready, out_is_rec, out_last;
  int checks = 0, failures = 0, drops = 0;
  bit seen [int];
  int expid [$]; bit exprec [$]; bit explast [$];

  always #5 clk = ~clk;
  cluster_filter dut (.*);

  // reference visited list
  always @(posedge clk) begin
    bf_resp_valid <= bf_req;
    if (bf_req) begin
      bf_resp_visited <= seen.exists(int'(bf_key));
      seen[int'(bf_key)] = 1;
    end
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expid.size() == 0) begin failures++; $display("FAIL extra output"); end
    else begin
      int i; bit r, l;
      i = expid.pop_front(); r = exprec.pop_front(); l = explast.pop_front();
      if (int'(out_cand.id) != i || out_is_rec != r || out_last != l) begin
        failures++; $display("FAIL out id %0d/%0d rec %0d/%0d", out_cand.id, i, out_is_rec, r);
      end
      if (!out_is_rec) drops++;
    end
  end

  initial begin
    bit ref_seen [int];
    in_cand = '0; beta = 0; sil_score = 0; kth_score = 0; sil_len = 1; kth_valid = 0; out_ready = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      longint s, k; bit exp_p;
      s = longint'($urandom % 100000) - 20000; k = longint'($urandom % 100000);
      beta = 16'($urandom % 1024); kth_valid = ($urandom % 4 != 0); sil_len = PLEN_W'($urandom % 8);
      sil_score = SCORE_W'(s); kth_score = SCORE_W'(k);
      #1;
      exp_p = (sil_len != 0) && (!kth_valid || s * 256 >= longint'(beta) * k);
      checks++;
      if (pass != exp_p) begin failures++; $display("FAIL pass s=%0d k=%0d beta=%0d", s, k, beta); end
    end
    for (int i = 0; i < 400; i++) begin
      int id;
      @(negedge clk);
      out_ready = ($urandom % 3 != 0);
      id = $urandom % 150;
      in_valid = 1; in_cand.id = 32'(id); in_last = ($urandom % 5 == 0);
      #1;
      while (!in_ready) begin @(negedge clk); out_ready = ($urandom % 3 != 0); #1; end
      expid.push_back(id); exprec.push_back(!ref_seen.exists(id)); explast.push_back(in_last);
      ref_seen[id] = 1;
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (expid.size() != 0 || drops == 0) begin failures++; $display("FAIL left %0d drops %0d", expid.size(), drops); end
    $display("INFO duplicates dropped %0d", drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
