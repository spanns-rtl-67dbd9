// tb_spmv_unit: random quantized queries (up to 64 distinct columns) against
// random Ellpack rows whose columns partly hit the query; the inner product
// is recomputed in the testbench and must appear exactly one cycle after the
// row, with its tag, at a rate of one row per cycle.
module tb_spmv_unit;
  import spanns_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [QMAX-1:0][COL_W-1:0] q_cols;
  logic [QMAX-1:0][VAL_W-1:0] q_vals;
  logic [QIDX_W-1:0] q_nnz;
  logic row_valid;
  logic [15:0] row_tag;
  logic [ELL_W-1:0][COL_W-1:0] row_cols;
  logic [ELL_W-1:0][VAL_W-1:0] row_vals;
  logic dist_valid;
  logic [15:0] dist_tag;
  logic signed [SCORE_W-1:0] dot;
  int checks = 0, failures = 0;
  longint expq [$];
  int tagq [$];

  always #5 clk = ~clk;

  spmv_unit #(.QN(QMAX), .EW(ELL_W), .TAGW(16)) dut (
    .clk, .rst_n, .q_cols, .q_vals, .q_nnz, .row_valid, .row_tag, .row_cols, .row_vals,
    .dist_valid, .dist_tag, .dot);

  function automatic longint ref_dot();
    longint s = 0;
    for (int e = 0; e < int'(ELL_W); e++)
      for (int i = 0; i < int'(q_nnz); i++)
        if (q_cols[i] == row_cols[e]) s += longint'($signed(q_vals[i])) * longint'($signed(row_vals[e]));
    return s;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (dist_valid) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        longint e; int tg;
        e = expq.pop_front(); tg = tagq.pop_front();
        if (longint'(dot) != e || int'(dist_tag) != tg) begin
          failures++; $display("FAIL dot=%0d exp=%0d tag=%0d/%0d", dot, e, dist_tag, tg);
        end
      end
    end
  end

  initial begin
    row_valid = 0; row_tag = 0; row_cols = '0; row_vals = '0; q_cols = '0; q_vals = '0; q_nnz = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int q = 0; q < 20; q++) begin
      q_nnz = QIDX_W'(1 + $urandom % QMAX);
      for (int i = 0; i < QMAX; i++) begin
        q_cols[i] = 32'(i * 37 + q * 3 + 1);
        q_vals[i] = 16'($urandom);
      end
      for (int r = 0; r < 50; r++) begin
        @(negedge clk);
        for (int e = 0; e < int'(ELL_W); e++) begin
          row_cols[e] = ($urandom % 2) ? q_cols[$urandom % QMAX] : 32'(100000 + $urandom % 1000);
          row_vals[e] = 16'($urandom);
        end
        row_valid = 1; row_tag = 16'(q * 64 + r);
        expq.push_back(ref_dot()); tagq.push_back(int'(row_tag));
      end
      @(negedge clk); row_valid = 0;
      @(negedge clk);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d rows without output", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
