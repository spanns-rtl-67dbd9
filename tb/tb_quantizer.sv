// tb_quantizer: checks the fp32 -> Q5.10 conversion against a reference
// computed with real arithmetic: fixed values (exact, fractional, tiny, zero,
// saturating both ways, infinity) and 2000 random normal numbers.
module tb_quantizer;
  logic [31:0] in_fp32;
  logic signed [15:0] out_fx;
  int checks = 0, failures = 0;

  quantizer #(.OUT_W(16), .FRAC(10)) dut (.in_fp32, .out_fx);

  function automatic int ref_q(logic [31:0] b);
    real v, m;
    int e;
    longint t;
    e = int'(b[30:23]);
    if (e == 0) return 0;
    if (e == 255) return b[31] ? -32768 : 32767;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    v = m * (2.0 ** (e - 127)) * 1024.0;
    if (v >= 40000.0) t = 40000; else t = longint'($floor(v));
    if (b[31]) t = -t;
    if (t > 32767) t = 32767;
    if (t < -32768) t = -32768;
    return int'(t);
  endfunction

  task automatic check(logic [31:0] b, int exp);
    in_fp32 = b;
    #1;
    checks++;
    if (int'(out_fx) != exp) begin
      failures++;
      $display("FAIL in=%h got=%0d exp=%0d", b, out_fx, exp);
    end
  endtask

  initial begin
    check(32'h3F800000, 1024);     // 1.0
    check(32'h3F000000, 512);      // 0.5
    check(32'hC0100000, -2304);    // -2.25
    check(32'h40490FD0, 3216);     // 3.14159 truncated
    check(32'h42C80000, 32767);    // 100 saturates
    check(32'hC2C80000, -32768);   // -100 saturates
    check(32'h3A03126F, 0);        // 0.0005 below resolution
    check(32'h00000000, 0);
    check(32'h7F800000, 32767);    // +inf
    check(32'h3A800000, 1);        // 2^-10, one LSB
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] b;
      b = {1'($urandom), 8'(110 + ($urandom % 30)), 23'($urandom)};
      check(b, ref_q(b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
