// tb_topk_queue: streams of random (score, id) pairs, one per cycle, into
// lane 0 (and a second stream into lane 1 in independent mode). After each
// stream the lanes must hold exactly the K (or, merged, 2K) best items in
// descending order, and kth_score must be the worst of the active set.
module tb_topk_queue;
  import spanns_pkg::*;
  localparam int K = TOPK;
  logic clk = 0, rst_n = 0, clear = 0, cfg_merge = 0, in0_valid = 0, in1_valid = 0;
  scored_t in0, in1;
  scored_t [LANES-1:0][K-1:0] entries;
  logic [LANES-1:0][K-1:0] entry_valid;
  logic kth_valid;
  logic signed [SCORE_W-1:0] kth_score;
  int checks = 0, failures = 0;
  longint s0 [$], s1 [$];

  always #5 clk = ~clk;
  topk_queue #(.K(K), .NL(LANES)) dut (.*);

  function automatic longint sc(int l, int k);
    scored_t e;
    logic signed [SCORE_W-1:0] v;
    e = entries[l][k];
    v = e.score;
    return longint'(v);
  endfunction

  function automatic void sort_desc(ref longint q [$]);
    for (int i = 1; i < q.size(); i++)
      for (int j = i; j > 0 && q[j] > q[j-1]; j--) begin
        longint t; t = q[j]; q[j] = q[j-1]; q[j-1] = t;
      end
  endfunction

  task automatic check_lane(int l, longint ref_s [$], int off, int n);
    for (int k = 0; k < K; k++) begin
      checks++;
      if (off + k < n) begin
        if (!entry_valid[l][k] || sc(l, k) != ref_s[off + k]) begin
          failures++; $display("FAIL lane %0d entry %0d got %0d exp %0d", l, k, sc(l, k), ref_s[off+k]);
        end
      end else if (entry_valid[l][k]) begin
        failures++; $display("FAIL lane %0d entry %0d should be empty", l, k);
      end
    end
  endtask

  task automatic run(bit merge, int n);
    longint r0 [$], r1 [$];
    int v;
    @(negedge clk); clear = 1; cfg_merge = merge; @(negedge clk); clear = 0;
    s0.delete(); s1.delete();
    for (int i = 0; i < n; i++) begin
      in0_valid = 1; v = int'($urandom % 2000) - 1000; in0.score = SCORE_W'(v); in0.id = 32'(i);
      in1_valid = !merge; in1.score = SCORE_W'($urandom % 5000); in1.id = 32'(i + 1000);
      s0.push_back(longint'(in0.score)); s1.push_back(longint'(in1.score));
      @(negedge clk);
    end
    in0_valid = 0; in1_valid = 0;
    @(negedge clk);
    r0 = s0; sort_desc(r0); r1 = s1; sort_desc(r1);
    check_lane(0, r0, 0, n);
    if (merge) check_lane(1, r0, K, n);
    else       check_lane(1, r1, 0, n);
    checks++;
    if (merge ? (n >= 2*K) : (n >= K)) begin
      if (!kth_valid || longint'(kth_score) != (merge ? r0[2*K-1] : r0[K-1])) begin
        failures++; $display("FAIL kth %0d", kth_score);
      end
    end else if (kth_valid) begin failures++; $display("FAIL kth valid too early"); end
    // ids must belong to their scores
    for (int k = 0; k < K; k++) if (entry_valid[0][k]) begin
      checks++;
      if (sc(0, k) != s0[entries[0][k].id]) begin failures++; $display("FAIL id/score mismatch"); end
    end
  endtask

  initial begin
    in0 = '0; in1 = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(0, 5); run(0, 100); run(1, 15); run(1, 300); run(0, 1); run(1, 40);
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
