// bloom_filter: the visited list of the silhouette-check logic. A key (a
// record identifier) is tested and inserted in one request; the answer says
// whether the key was, probably, seen before in the current query. False
// positives are possible, false negatives are not.
//
// Following the paper, the index hashes use only XOR, shift and add. The
// bit-array size, the number of hashes (two: Thomas Wang's 32-bit mix and a
// Jenkins-style shift/add/xor mix) and the one-cycle clear are this design's
// own choices.
//
// Timing: req_valid with key in cycle t; resp_valid and resp_visited in cycle
// t+1, and the key's bits are set from then on. clear empties the array in one
// cycle and takes precedence over a request in the same cycle.
module bloom_filter #(
  parameter int unsigned BITS  = 4096,
  parameter int unsigned KEY_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             req_valid,
  input  logic [KEY_W-1:0] key,
  output logic             resp_valid,
  output logic             resp_visited
);
  localparam int unsigned AW = $clog2(BITS);

  function automatic logic [31:0] hash_wang(input logic [31:0] k);
    logic [31:0] h;
    h = (k ^ 32'd61) ^ (k >> 16);
    h = h + (h << 3);
    h = h ^ (h >> 4);
    h = h + (h << 15);     // Wang uses a multiply by 0x27d4eb2d; shift-add instead
    h = h ^ (h >> 15);
    return h;
  endfunction

  function automatic logic [31:0] hash_jenkins(input logic [31:0] k);
    logic [31:0] h;
    h = k + (k << 12);
    h = h ^ (h >> 22);
    h = h + (h << 4);
    h = h ^ (h >> 9);
    h = h + (h << 10);
    h = h ^ (h >> 2);
    h = h + (h << 7);
    h = h ^ (h >> 12);
    return h;
  endfunction

  logic [BITS-1:0] bits_q;
  logic [AW-1:0]   i0, i1;

  always_comb begin
    i0 = hash_wang(32'(key))[AW-1:0];
    i1 = hash_jenkins(32'(key))[AW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits_q       <= '0;
      resp_valid   <= 1'b0;
      resp_visited <= 1'b0;
    end else if (clear) begin
      bits_q       <= '0;
      resp_valid   <= 1'b0;
      resp_visited <= 1'b0;
    end else begin
      resp_valid <= req_valid;
      if (req_valid) begin
        resp_visited <= bits_q[i0] & bits_q[i1];
        bits_q[i0]   <= 1'b1;
        bits_q[i1]   <= 1'b1;
      end
    end
  end
endmodule
