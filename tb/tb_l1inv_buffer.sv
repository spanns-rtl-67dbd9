// tb_l1inv_buffer: writes entries at random dimensions across the whole
// 256K range (first and last included), reads them back and checks data and
// the one-cycle read latency; a rewritten entry must return its new value.
module tb_l1inv_buffer;
  import spanns_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, rd_valid;
  logic [L1_AW-1:0] wr_dim, rd_dim;
  l1_entry_t wr_entry, rd_entry;
  int checks = 0, failures = 0;
  logic [L1_AW-1:0] dims [200];
  l1_entry_t vals [200];

  always #5 clk = ~clk;
  l1inv_buffer dut (.*);

  initial begin
    wr_dim = 0; rd_dim = 0; wr_entry = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      dims[i] = (i == 0) ? '0 : (i == 1) ? '1 : L1_AW'(i * 1297 + 5);
      vals[i] = l1_entry_t'($urandom);
      wr_en = 1; wr_dim = dims[i]; wr_entry = vals[i];
      @(negedge clk);
    end
    wr_en = 0;
    vals[7] = l1_entry_t'(32'hDEAD_BEEF);
    wr_en = 1; wr_dim = dims[7]; wr_entry = vals[7]; @(negedge clk); wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      rd_en = 1; rd_dim = dims[i];
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (!rd_valid || rd_entry != vals[i]) begin failures++; $display("FAIL dim %0d", dims[i]); end
    end
    checks++;
    @(negedge clk);
    if (rd_valid) begin failures++; $display("FAIL rd_valid without read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
