// spmv_unit: sparse matrix x sparse vector unit of the silhouette check. Each
// cycle it takes one Ellpack row of the silhouette matrix (ELL_W column/value
// pairs; padding pairs carry value 0) and produces that row's inner product
// with the quantized query.
//
// The paper builds this unit after an external Ellpack SpMV design that it
// does not describe; this is the simplest unit with the same function: every
// row column is matched against all query columns at once (a small CAM), the
// matched query value is multiplied with the row value and an adder tree sums
// the ELL_W products. Query columns are assumed distinct.
//
// Timing: row_valid/row_tag in cycle t, dist_valid/dot/dist_tag in t+1.
// One row per cycle, fully pipelined.
module spmv_unit
  import spanns_pkg::*;
#(
  parameter int unsigned QN   = QMAX,
  parameter int unsigned EW   = ELL_W,
  parameter int unsigned TAGW = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // quantized query, held stable during a query
  input  logic [QN-1:0][COL_W-1:0]  q_cols,
  input  logic [QN-1:0][VAL_W-1:0] q_vals,
  input  logic [$clog2(QN+1)-1:0]   q_nnz,
  // one silhouette row
  input  logic                      row_valid,
  input  logic [TAGW-1:0]          row_tag,
  input  logic [EW-1:0][COL_W-1:0]  row_cols,
  input  logic [EW-1:0][VAL_W-1:0] row_vals,
  output logic                      dist_valid,
  output logic [TAGW-1:0]          dist_tag,
  output logic signed [SCORE_W-1:0] dot
);
  logic signed [SCORE_W-1:0] sum;
  logic signed [VAL_W-1:0]   qv;
  logic signed [2*VAL_W-1:0] prod;

  always_comb begin
    sum = '0;
    for (int e = 0; e < int'(EW); e++) begin
      qv = '0;
      for (int i = 0; i < int'(QN); i++)
        if (i < int'(q_nnz) && q_cols[i] == row_cols[e]) qv = $signed(q_vals[i]);
      prod = qv * $signed(row_vals[e]);
      sum  = sum + SCORE_W'(prod);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dist_valid <= 1'b0;
      dist_tag   <= '0;
      dot       <= '0;
    end else begin
      dist_valid <= row_valid;
      if (row_valid) begin
        dist_tag <= row_tag;
        dot     <= sum;
      end
    end
  end
endmodule
