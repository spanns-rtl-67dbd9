// tb_faddr_gen: loads a random lookup table, stores pointer lists of 1..40
// record ids in a DRAM model and sends the clusters in; every id must come
// out in list order, translated to the table's DIMM/rank and to bin address
// (base + low id bits) * 128, with the last id of each cluster flagged, under
// random output backpressure. A zero-length cluster must produce nothing.
module tb_faddr_gen;
  import spanns_pkg::*;
  localparam int LAW = 6, GS = 4;
  logic clk = 0, rst_n = 0, lut_we = 0;
  logic [LAW-1:0] lut_waddr;
  logic [31:0] lut_wdata;
  logic cl_valid = 0, cl_ready;
  logic [ADDR_W-1:0] cl_ptr;
  logic [PLEN_W-1:0] cl_len;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [LEN_W-1:0] mem_req_len;
  logic [BEAT_W-1:0] mem_rsp_data;
  logic out_valid, out_ready, out_last, busy;
  cand_t out_cand;
  int checks = 0, failures = 0;
  logic [31:0] lut_m [2**LAW];
  int expid [$]; bit explast [$];

  always #5 clk = ~clk;
  faddr_gen #(.LUT_AW(LAW), .GRP_SHIFT(GS)) dut (.*);
  dram_model #(.NP(1), .LAT(6)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .req_len(mem_req_len),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always @(posedge clk) out_ready <= ($urandom % 4 != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int id; bit l; logic [31:0] e;
    checks++;
    id = expid.pop_front(); l = explast.pop_front();
    e = lut_m[id >> GS];
    if (int'(out_cand.id) != id || out_last != l || out_cand.dimm != e[31:29] || out_cand.rank != e[28:26]
        || out_cand.addr != (e[25:0] + 32'(id % (1 << GS))) * BIN_BEATS) begin
      failures++; $display("FAIL id %0d/%0d", out_cand.id, id);
    end
  end

  initial begin
    int base;
    lut_waddr = 0; lut_wdata = 0; cl_ptr = 0; cl_len = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 2**LAW; i++) begin
      lut_m[i] = $urandom; lut_m[i][25:20] = '0;
      lut_we = 1; lut_waddr = LAW'(i); lut_wdata = lut_m[i]; @(negedge clk);
    end
    lut_we = 0;
    base = 100;
    for (int c = 0; c < 30; c++) begin
      int n; logic [BEAT_W-1:0] b;
      n = (c == 5) ? 0 : 1 + $urandom % 40;
      for (int bb = 0; bb < (n + 15) / 16; bb++) begin
        b = '0;
        for (int j = 0; j < 16; j++) if (bb*16 + j < n) begin
          int id;
          id = $urandom % (1 << (LAW + GS));
          b[j*32 +: 32] = 32'(id);
          expid.push_back(id); explast.push_back(bb*16 + j == n - 1);
        end
        u_mem.write_beat(0, 32'(base + bb), b);
      end
      cl_valid = 1; cl_ptr = 32'(base); cl_len = PLEN_W'(n);
      @(posedge clk); while (!cl_ready) @(posedge clk);
      @(negedge clk); cl_valid = 0;
      base += 10;
    end
    while (busy || expid.size() > 0) @(negedge clk);
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
