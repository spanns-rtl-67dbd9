// tb_fidx_dist_calc: random results-buffer entries in both modes. The inner
// product is recomputed from the entry (query-driven: query value x matched
// value where the mask is set; record-driven: record value x matched query
// value) and the result must appear exactly len cycles after the entry is
// taken. Several records in a row check that the rotating query register is
// back in place for each record.
module tb_fidx_dist_calc;
  import spanns_pkg::*;
  logic clk = 0, rst_n = 0, q_load = 0, in_valid = 0, out_ready = 1;
  logic [QMAX-1:0][VAL_W-1:0] q_vals;
  logic [QIDX_W-1:0] q_nnz;
  logic in_ready, out_valid;
  rb_entry_t in_entry;
  logic signed [SCORE_W-1:0] out_dist;
  logic [ID_W-1:0] out_id;
  logic [TAG_W-1:0] out_tag;
  int checks = 0, failures = 0, nswap = 0;

  always #5 clk = ~clk;
  fidx_dist_calc dut (.*);

  initial begin
    q_vals = '0; q_nnz = 0; in_entry = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int q = 0; q < 10; q++) begin
      q_nnz = QIDX_W'(1 + $urandom % QMAX);
      for (int i = 0; i < QMAX; i++) q_vals[i] = 16'($urandom);
      @(negedge clk); q_load = 1; @(negedge clk); q_load = 0;
      for (int r = 0; r < 20; r++) begin
        longint exp_d;
        int t0, lat;
        exp_d = 0;
        in_entry = '0;
        in_entry.swap = ($urandom % 3 == 0);
        in_entry.len  = in_entry.swap ? QIDX_W'($urandom % int'(q_nnz)) : q_nnz;
        in_entry.id   = 32'(q * 100 + r);
        in_entry.tag  = TAG_W'(r % 5);
        for (int i = 0; i < QMAX; i++) begin
          in_entry.hit[i]  = $urandom % 2;
          in_entry.prim[i] = 16'($urandom);
          in_entry.sec[i]  = 16'($urandom);
        end
        for (int i = 0; i < int'(in_entry.len); i++)
          if (in_entry.hit[i])
            exp_d += longint'($signed(in_entry.swap ? in_entry.prim[i] : q_vals[i])) * longint'($signed(in_entry.sec[i]));
        if (in_entry.swap) nswap++;
        while (!in_ready) @(negedge clk);
        in_valid = 1;
        @(posedge clk); t0 = $time;
        @(negedge clk); in_valid = 0;
        while (!out_valid) @(negedge clk);
        lat = ($time - t0 - 5) / 10;
        checks += 3;
        if (out_dist != SCORE_W'(exp_d)) begin failures++; $display("FAIL dist %0d exp %0d", out_dist, exp_d); end
        if (out_id != in_entry.id || out_tag != in_entry.tag) begin failures++; $display("FAIL id/tag"); end
        if (lat != int'(in_entry.len)) begin failures++; $display("FAIL latency %0d for len %0d", lat, in_entry.len); end
        @(negedge clk);
      end
    end
    $display("INFO record-driven entries %0d", nswap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
