// tb_fma_unit: self-checking test of fma_unit at the default 8-bit width and
// at 5, 16 and 32 bits (the other FMA widths evaluated for the design; the
// 32-bit case uses operands of up to 24 bits). Each
// width runs random dot products of up to 196 terms with bias preload,
// ties-away rounding cases, positive and negative saturation, the enable
// and reset; results are compared with integer reference arithmetic.
module tb_fma_unit;
  logic clk = 0;
  always #5 clk = ~clk;

  int c8, f8, s8, t8, c5, f5, s5, t5, c16, f16, s16, t16, c32, f32, s32, t32;
  logic d8, d5, d16, d32;
  int checks, failures;

  fma_unit_checker #(.DW(8),  .IBITS(3), .MAX_IN(196), .NVEC(60)) u8  (.clk, .checks(c8),  .failures(f8),  .n_sat(s8),  .n_tie(t8),  .done(d8));
  fma_unit_checker #(.DW(5),  .IBITS(3), .MAX_IN(196), .NVEC(30)) u5  (.clk, .checks(c5),  .failures(f5),  .n_sat(s5),  .n_tie(t5),  .done(d5));
  fma_unit_checker #(.DW(16), .IBITS(3), .MAX_IN(196), .NVEC(30)) u16 (.clk, .checks(c16), .failures(f16), .n_sat(s16), .n_tie(t16), .done(d16));

  // 32-bit words: 24-bit operands keep the reference sum within 64 bits.
  fma_unit_checker #(.DW(32), .IBITS(3), .MAX_IN(196), .NVEC(30), .OPBITS(24)) u32 (.clk, .checks(c32), .failures(f32), .n_sat(s32), .n_tie(t32), .done(d32));

  initial begin
    checks = 0; failures = 0;
    repeat (2) @(posedge clk);
    wait (d8 && d5 && d16 && d32);
    checks   = c8 + c5 + c16 + c32;
    failures = f8 + f5 + f16 + f32;
    // Both directed ties and both saturation cases must have happened.
    checks++; if (t8 < 2 || s8 < 2) begin failures++; $display("FAIL 8-bit corner cases not reached"); end
    $display("8-bit: %0d checks, %0d saturated, %0d ties", c8, s8, t8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
