// tb_delay_queues: 60 clusters of 0..20 records (plus some marker-only
// cluster ends) targeted at random ranks of 2 DIMMs x 4 ranks, with ranks
// staying busy a random time and completions returned one per cycle. Every
// record must be dispatched exactly once, to its own rank, only while that
// rank is ready; at most NACT clusters may be open at once; records must be
// issued out of cluster order at some point, and the input must stall at some
// point (more clusters than queues).
module tb_delay_queues;
  import spanns_pkg::*;
  localparam int NFD_T = 2, RK_T = 4, NR = NFD_T * RK_T, NA = 5;
  logic clk = 0, rst_n = 0, flush = 0;
  logic in_valid = 0, in_ready, in_is_rec = 1, in_last = 0;
  cand_t in_cand;
  logic [NR-1:0] rank_ready, dispatch_valid;
  cand_t [NR-1:0] dispatch_cand;
  logic [NR-1:0][$clog2(NA+1)-1:0] dispatch_tag;
  logic done_valid;
  logic [$clog2(NA+1)-1:0] done_tag;
  logic empty;
  logic [31:0] stall_cycles, ooo_dispatches;
  int checks = 0, failures = 0, sent = 0, disp = 0;
  int busy_c [NR];
  int pend_tag [$];
  int seen [int];

  always #5 clk = ~clk;
  delay_queues #(.NACT(NA), .DEPTH(16), .NFD(NFD_T), .RK(RK_T)) dut (.*);

  always_comb for (int r = 0; r < NR; r++) rank_ready[r] = (busy_c[r] == 0);

  // ranks and completions
  int rank_tag [NR];
  always @(posedge clk) if (rst_n) begin
    done_valid <= 1'b0;
    if (pend_tag.size() > 0 && $urandom % 2) begin
      done_valid <= 1'b1;
      done_tag   <= ($clog2(NA+1))'(pend_tag.pop_front());
    end
    for (int r = 0; r < NR; r++) begin
      if (busy_c[r] > 0) begin
        busy_c[r] = busy_c[r] - 1;
        if (busy_c[r] == 0) pend_tag.push_back(rank_tag[r]);
      end
    end
    for (int r = 0; r < NR; r++) if (dispatch_valid[r]) begin
      int id;
      checks++;
      id = int'(dispatch_cand[r].id);
      if (!rank_ready[r] || int'(dispatch_cand[r].dimm) * RK_T + int'(dispatch_cand[r].rank) != r
          || seen.exists(id) || int'(dispatch_tag[r]) >= NA) begin
        failures++; $display("FAIL dispatch id %0d rank %0d", id, r);
      end
      seen[id] = int'(dispatch_tag[r]);
      busy_c[r] = 3 + $urandom % 28;
      rank_tag[r] = int'(dispatch_tag[r]);
      disp++;
    end
  end

  initial begin
    in_cand = '0; done_valid = 0; done_tag = 0;
    for (int r = 0; r < NR; r++) begin busy_c[r] = 0; rank_tag[r] = -1; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 60; c++) begin
      int n;
      n = $urandom % 21;
      for (int i = 0; i <= n; i++) begin
        in_valid = 1;
        in_is_rec = (i < n);
        in_last = (i == n);
        in_cand.id = 32'(sent);
        in_cand.dimm = FD_W'($urandom % NFD_T); in_cand.rank = RK_W'($urandom % RK_T);
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        if (in_is_rec) sent++;
      end
    end
    in_valid = 0;
    while (!empty || pend_tag.size() > 0) @(negedge clk);
    checks += 3;
    if (disp != sent) begin failures++; $display("FAIL dispatched %0d of %0d", disp, sent); end
    if (ooo_dispatches == 0) begin failures++; $display("FAIL never out of order"); end
    if (stall_cycles == 0) begin failures++; $display("FAIL never stalled"); end
    $display("INFO records %0d out-of-order issues %0d stall cycles %0d", sent, ooo_dispatches, stall_cycles);
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
