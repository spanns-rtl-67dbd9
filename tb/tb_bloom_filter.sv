// tb_bloom_filter: inserts 300 random keys; each re-lookup must report
// "visited" (no false negatives), fresh keys must mostly report "not visited"
// (false-positive rate below 5 %), the answer must come one cycle after the
// request, and clear must empty the list.
module tb_bloom_filter;
  logic clk = 0, rst_n = 0, clear = 0, req_valid = 0;
  logic [31:0] key;
  logic resp_valid, resp_visited;
  int checks = 0, failures = 0, fp = 0;
  logic [31:0] keys [300];

  always #5 clk = ~clk;

  bloom_filter #(.BITS(4096), .KEY_W(32)) dut (.*);

  task automatic lookup(logic [31:0] k, output logic vis);
    @(negedge clk);
    req_valid = 1; key = k;
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!resp_valid) begin failures++; $display("FAIL no response one cycle later"); end
    vis = resp_visited;
  endtask

  initial begin
    logic v;
    key = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) keys[i] = $urandom;
    for (int i = 0; i < 300; i++) lookup(keys[i], v);
    for (int i = 0; i < 300; i++) begin
      lookup(keys[i], v);
      checks++;
      if (!v) begin failures++; $display("FAIL false negative for %h", keys[i]); end
    end
    for (int i = 0; i < 300; i++) begin
      lookup(32'h8000_0000 ^ (i * 7919), v);
      if (v) fp++;
    end
    checks++;
    if (fp > 15) begin failures++; $display("FAIL false positives %0d/300", fp); end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < 50; i++) begin
      lookup(keys[i], v);
      checks++;
      if (v) begin failures++; $display("FAIL visited after clear"); end
    end
    $display("false positives %0d/300", fp);
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
