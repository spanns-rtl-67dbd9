// tb_l2inv_dimm: silhouette reads (1..12 beats) and passed clusters are
// issued at the same time; the silhouette beats must come back in order with
// the stored contents, and the address generator must emit every record id of
// every cluster, in order, with the last one flagged, even though both share
// one read port.
module tb_l2inv_dimm;
  import spanns_pkg::*;
  logic clk = 0, rst_n = 0, lut_we = 0;
  logic [11:0] lut_waddr;
  logic [31:0] lut_wdata;
  logic sil_req_valid = 0, sil_req_ready, sil_rsp_valid;
  logic [ADDR_W-1:0] sil_req_addr;
  logic [LEN_W-1:0] sil_req_len;
  logic [BEAT_W-1:0] sil_rsp_data;
  logic cl_valid = 0, cl_ready, cand_valid, cand_ready, cand_last, busy;
  logic [ADDR_W-1:0] cl_ptr;
  logic [PLEN_W-1:0] cl_len;
  cand_t cand;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [LEN_W-1:0] mem_req_len;
  logic [BEAT_W-1:0] mem_rsp_data;
  int checks = 0, failures = 0;
  logic [BEAT_W-1:0] exps [$];
  int expid [$]; bit explast [$];
  bit sil_done = 0, cl_done = 0;

  always #5 clk = ~clk;
  l2inv_dimm dut (.*);
  dram_model #(.NP(1), .LAT(10)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .req_len(mem_req_len),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  assign cand_ready = 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (sil_rsp_valid) begin
      checks++;
      if (exps.size() == 0 || sil_rsp_data != exps.pop_front()) begin failures++; $display("FAIL silhouette beat"); end
    end
    if (cand_valid) begin
      int id; bit l;
      checks++;
      id = expid.pop_front(); l = explast.pop_front();
      if (int'(cand.id) != id || cand_last != l) begin failures++; $display("FAIL cand %0d/%0d", cand.id, id); end
    end
  end

  initial begin
    lut_waddr = 0; lut_wdata = 0; sil_req_addr = 0; sil_req_len = 0; cl_ptr = 0; cl_len = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 200; a++) u_mem.write_beat(0, 32'(a), {16{$urandom}});
    for (int c = 0; c < 20; c++) begin
      logic [BEAT_W-1:0] b; int n;
      n = 1 + $urandom % 30;
      for (int bb = 0; bb < (n + 15) / 16; bb++) begin
        b = '0;
        for (int j = 0; j < 16; j++) if (bb*16 + j < n) begin
          b[j*32 +: 32] = 32'(c * 100 + bb*16 + j);
          expid.push_back(c * 100 + bb*16 + j); explast.push_back(bb*16 + j == n - 1);
        end
        u_mem.write_beat(0, 32'(1000 + c * 4 + bb), b);
      end
    end
    fork
      for (int s = 0; s < 15; s++) begin
        int a, n;
        a = $urandom % 180; n = 1 + $urandom % 12;
        for (int k = 0; k < n; k++) exps.push_back(u_mem.read_beat(0, 32'(a + k)));
        sil_req_valid = 1; sil_req_addr = 32'(a); sil_req_len = 8'(n);
        @(posedge clk); while (!sil_req_ready) @(posedge clk);
        @(negedge clk); sil_req_valid = 0;
        repeat ($urandom % 20) @(negedge clk);
      end
      for (int c = 0; c < 20; c++) begin
        cl_valid = 1; cl_ptr = 32'(1000 + c * 4);
        // length = number of ids stored for this cluster
        begin
          int n; n = 0;
          for (int k = 0; k < expid.size(); k++) if (expid[k] / 100 == c) n++;
          cl_len = PLEN_W'(n);
        end
        @(posedge clk); while (!cl_ready) @(posedge clk);
        @(negedge clk); cl_valid = 0;
      end
    join
    while (busy || exps.size() > 0 || expid.size() > 0) @(negedge clk);
    checks++;
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
