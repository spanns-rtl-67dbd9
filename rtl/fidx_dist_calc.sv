// fidx_dist_calc: the distance-calculation module of an F-Idx DIMM. It turns a
// results-buffer entry into the record's inner product with the query by a
// multiply-accumulate over the hit mask, one position per cycle: where the
// mask bit is 0 a zero is selected instead of the value, so only shared
// non-zero dimensions contribute.
//
// Query-driven mode (the normal case): the first operand comes from the
// Query.val register, which rotates within its first nnz_q entries so it is
// back in place after the nnz_q cycles a record takes ("completes in ||q||_0
// cycles" in the paper). Record-driven mode (||r||_0 < ||q||_0): the first
// operand is the record's own values from the entry, and the record takes
// ||r||_0 cycles. This structure follows the paper's figure; the handshakes
// are this design's.
//
// Timing: q_load (while idle) loads the query values. An entry accepted in
// cycle t (in_valid && in_ready) with len = L gives out_valid from cycle
// t + L (t + 1 when L = 0) until out_ready.
module fidx_dist_calc
  import spanns_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic                          q_load,
  input  logic [QMAX-1:0][VAL_W-1:0]      q_vals,
  input  logic [$clog2(QMAX+1)-1:0]       q_nnz,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  rb_entry_t                     in_entry,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic signed [SCORE_W-1:0]     out_dist,
  output logic [ID_W-1:0]               out_id,
  output logic [TAG_W-1:0]              out_tag
);
  typedef enum logic [1:0] {D_IDLE, D_MAC, D_OUT} d_st_e;
  d_st_e st_q;

  logic [QMAX-1:0][VAL_W-1:0] qrot_q;      // Query.val, rotating
  logic [$clog2(QMAX+1)-1:0]  qnnz_q;
  logic [QMAX-1:0]            hit_q;       // Hit Mask
  logic [QMAX-1:0][VAL_W-1:0] prim_q;      // record values (record-driven)
  logic [QMAX-1:0][VAL_W-1:0] sec_q;       // Record.val (query-driven) / query values
  logic                     swap_q;
  logic [$clog2(QMAX+1)-1:0]  cnt_q;
  logic signed [SCORE_W-1:0] acc_q;

  logic signed [VAL_W-1:0]   opa;
  logic signed [2*VAL_W-1:0] prod;

  always_comb begin
    opa  = hit_q[0] ? $signed(swap_q ? prim_q[0] : qrot_q[0]) : '0;
    prod = opa * $signed(sec_q[0]);
  end

  assign in_ready  = (st_q == D_IDLE) && !q_load;
  assign out_valid = (st_q == D_OUT);
  assign out_dist  = acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= D_IDLE;
      qrot_q <= '0;
      qnnz_q <= '0;
      hit_q  <= '0;
      prim_q <= '0;
      sec_q  <= '0;
      swap_q <= 1'b0;
      cnt_q  <= '0;
      acc_q  <= '0;
      out_id <= '0;
      out_tag <= '0;
    end else begin
      unique case (st_q)
        D_IDLE: begin
          if (q_load) begin
            qrot_q <= q_vals;
            qnnz_q <= q_nnz;
          end else if (in_valid) begin
            hit_q  <= in_entry.hit;
            prim_q <= in_entry.prim;
            sec_q  <= in_entry.sec;
            swap_q <= in_entry.swap;
            cnt_q  <= in_entry.len;
            out_id <= in_entry.id;
            out_tag <= in_entry.tag;
            acc_q  <= '0;
            st_q   <= (in_entry.len == '0) ? D_OUT : D_MAC;
          end
        end
        D_MAC: begin
          acc_q  <= acc_q + SCORE_W'(prod);
          hit_q  <= hit_q >> 1;
          prim_q <= prim_q >> VAL_W;
          sec_q  <= sec_q >> VAL_W;
          if (!swap_q) begin
            for (int i = 0; i < int'(QMAX); i++) begin
              if (i + 1 < int'(qnnz_q)) qrot_q[i] <= qrot_q[i+1];
              else if (i + 1 == int'(qnnz_q)) qrot_q[i] <= qrot_q[0];
            end
          end
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q == 1) st_q <= D_OUT;
        end
        D_OUT: if (out_ready) st_q <= D_IDLE;
        default: st_q <= D_IDLE;
      endcase
    end
  end
endmodule
