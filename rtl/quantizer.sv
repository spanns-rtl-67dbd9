// quantizer: converts one IEEE-754 single-precision query value into a
// 16-bit signed fixed-point number with FRAC fraction bits.
//
// The paper quantizes the query to 16-bit fixed point before the silhouette
// check; the input format (binary32), the number of fraction bits and the
// rounding (truncation toward zero, saturation at the 16-bit range) are this
// design's own choices. Zero and subnormal inputs give 0; infinities and NaN
// saturate with their sign.
//
// Interface: in_fp32 -> out_fx, purely combinational (no clock).
module quantizer #(
  parameter int unsigned OUT_W = 16,
  parameter int unsigned FRAC  = 10
) (
  input  logic [31:0]             in_fp32,
  output logic signed [OUT_W-1:0] out_fx
);
  localparam int unsigned WIDE = 24 + OUT_W + 1;
  localparam logic [WIDE-1:0] MAXMAG = WIDE'((1 << (OUT_W - 1)) - 1);

  logic        sign;
  logic [7:0]  expo;
  logic [23:0] mant;
  logic [WIDE-1:0] mag;
  int          sh;

  always_comb begin
    sign = in_fp32[31];
    expo = in_fp32[30:23];
    mant = {1'b1, in_fp32[22:0]};
    // value * 2^FRAC = mant * 2^(expo - 127 - 23 + FRAC)
    sh   = int'(expo) - 150 + int'(FRAC);
    mag  = '0;
    if (expo == 8'd0) begin
      mag = '0;
    end else if (expo == 8'hFF || sh >= int'(OUT_W)) begin
      mag = MAXMAG + 1'b1;               // forces saturation below
    end else if (sh >= 0) begin
      mag = WIDE'(mant) << sh;
    end else if (sh > -24) begin
      mag = WIDE'(mant >> (-sh));
    end else begin
      mag = '0;
    end
    if (sign) begin
      if (mag > MAXMAG + 1'b1) out_fx = {1'b1, {(OUT_W-1){1'b0}}};
      else                     out_fx = OUT_W'(-$signed({1'b0, mag}));
    end else begin
      if (mag > MAXMAG)        out_fx = {1'b0, {(OUT_W-1){1'b1}}};
      else                     out_fx = OUT_W'(mag);
    end
  end
endmodule
