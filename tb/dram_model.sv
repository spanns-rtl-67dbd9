// dram_model: behavioural stand-in for the DRAM ranks behind NP read ports
// (not synthesizable). Each port takes one request at a time (req_ready is low
// while it is busy), waits LAT cycles, then returns `len` consecutive 64-byte
// beats, one per cycle. Contents live in one sparse array keyed by
// {port, beat address}; the testbench fills it with write_beat() before use.
// Unwritten beats read as zero.
module dram_model #(
  parameter int unsigned NP  = 1,
  parameter int unsigned LAT = 20
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NP-1:0]          req_valid,
  output logic [NP-1:0]          req_ready,
  input  logic [NP-1:0][31:0]    req_addr,
  input  logic [NP-1:0][7:0]     req_len,
  output logic [NP-1:0]          rsp_valid,
  output logic [NP-1:0][511:0]   rsp_data
);
  logic [511:0] mem [longint];
  logic [NP-1:0]        busy;
  int unsigned          wait_c [NP];
  logic [31:0]          addr   [NP];
  int unsigned          left   [NP];
  longint unsigned      reads;

  function automatic void write_beat(int unsigned port, logic [31:0] a, logic [511:0] d);
    mem[{32'(port), a}] = d;
  endfunction

  function automatic logic [511:0] read_beat(int unsigned port, logic [31:0] a);
    longint k;
    k = {32'(port), a};
    if (mem.exists(k)) return mem[k];
    return '0;
  endfunction

  assign req_ready = ~busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= '0;
      rsp_valid <= '0;
      rsp_data  <= '0;
      reads     <= 0;
      for (int p = 0; p < int'(NP); p++) begin
        wait_c[p] <= 0; addr[p] <= '0; left[p] <= 0;
      end
    end else begin
      for (int p = 0; p < int'(NP); p++) begin
        rsp_valid[p] <= 1'b0;
        if (!busy[p]) begin
          if (req_valid[p] && req_len[p] != 0) begin
            busy[p]   <= 1'b1;
            wait_c[p] <= LAT;
            addr[p]   <= req_addr[p];
            left[p]   <= req_len[p];
            reads     <= reads + 1;
          end
        end else if (wait_c[p] != 0) begin
          wait_c[p] <= wait_c[p] - 1;
        end else begin
          rsp_valid[p] <= 1'b1;
          rsp_data[p]  <= read_beat(p, addr[p]);
          addr[p]      <= addr[p] + 1;
          left[p]      <= left[p] - 1;
          if (left[p] == 1) busy[p] <= 1'b0;
        end
      end
    end
  end
endmodule
