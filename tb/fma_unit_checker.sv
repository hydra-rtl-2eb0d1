// fma_unit_checker: drives one fma_unit of width DW through NVEC random
// dot products (random length 1..MAX_IN) plus directed rounding and
// saturation cases, and compares y and sat with a reference computed
// here from integer arithmetic. It reports its counts on checks/failures
// and raises done when finished. Used by tb_fma_unit for several widths.
module fma_unit_checker #(
  parameter int unsigned DW     = 8,
  parameter int unsigned IBITS  = 3,
  parameter int unsigned MAX_IN = 196,
  parameter int unsigned NVEC   = 40,
  // Operand bits used by the random and full-scale cases; below DW keeps
  // the 64-bit reference sum exact for wide words.
  parameter int unsigned OPBITS = DW
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   n_sat,
  output int   n_tie,
  output logic done
);
  localparam int unsigned FRAC = DW - IBITS;

  logic rst, en, load_bias, preload, acc_en, sat;
  logic signed [DW-1:0] x, w, b, y;

  fma_unit #(.DW(DW), .IBITS(IBITS), .MAX_IN(MAX_IN)) dut (
    .clk, .rst, .en, .load_bias, .preload, .acc_en, .x, .w, .b, .y, .sat);

  longint xs [MAX_IN];
  longint ws [MAX_IN];

  function automatic longint rand_word(int unsigned bits);
    longint v;
    v = {$urandom, $urandom};
    v = v & ((longint'(1) << bits) - 1);
    if (v >= (longint'(1) << (bits-1))) v -= (longint'(1) << bits);
    return v;
  endfunction

  // Round A / 2^FRAC to nearest, ties away from zero, then saturate.
  function automatic void ref_out(input longint a, output longint r, output bit s);
    longint q, rem, half, mx, mn;
    q    = a / (longint'(1) << FRAC);
    rem  = a % (longint'(1) << FRAC);
    half = longint'(1) << (FRAC-1);
    if (rem < 0) rem = -rem;
    if (rem >= half) q = (a < 0) ? q - 1 : q + 1;
    mx = (longint'(1) << (DW-1)) - 1;
    mn = -(longint'(1) << (DW-1));
    s = 1'b0;
    if (q > mx) begin q = mx; s = 1'b1; end
    if (q < mn) begin q = mn; s = 1'b1; end
    r = q;
  endfunction

  task automatic run(input int n, input longint bias, input int wbits, input int xbits);
    longint acc, r;
    bit     s;
    for (int i = 0; i < n; i++) begin
      xs[i] = rand_word(xbits);
      ws[i] = rand_word(wbits);
    end
    run_given(n, bias);
  endtask

  task automatic run_given(input int n, input longint bias);
    longint acc, r;
    bit     s;
    @(negedge clk);
    b = DW'(bias); load_bias = 1;
    @(negedge clk);
    load_bias = 0; preload = 1; w = DW'(ws[0]);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      preload = 0; acc_en = 1;
      x = DW'(xs[i]);
      w = (i+1 < n) ? DW'(ws[i+1]) : '0;
    end
    @(negedge clk);
    acc_en = 0;
    acc = bias <<< FRAC;
    for (int i = 0; i < n; i++) acc += xs[i] * ws[i];
    ref_out(acc, r, s);
    checks++;
    if (longint'(y) != r || sat != s) begin
      failures++;
      $display("FAIL DW=%0d n=%0d acc=%0d y=%0d exp=%0d sat=%0b exp=%0b",
               DW, n, acc, y, r, sat, s);
    end
    if (s) n_sat++;
    if ((acc % (longint'(1) << FRAC)) == (longint'(1) << (FRAC-1)) ||
        (acc % (longint'(1) << FRAC)) == -(longint'(1) << (FRAC-1))) n_tie++;
  endtask

  initial begin
    checks = 0; failures = 0; n_sat = 0; n_tie = 0; done = 0;
    rst = 1; en = 1; load_bias = 0; preload = 0; acc_en = 0;
    x = '0; w = '0; b = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    // Directed: +0.5 LSB and -0.5 LSB ties round away from zero.
    xs[0] = 1; ws[0] = longint'(1) << (FRAC-1);  run_given(1, 0);
    xs[0] = -1; ws[0] = longint'(1) << (FRAC-1); run_given(1, 0);
    // Bias only (one product of zero).
    xs[0] = 0; ws[0] = 5; run_given(1, 3);
    // Full-length, full-scale: saturates positive and negative.
    for (int i = 0; i < MAX_IN; i++) begin
      xs[i] = (longint'(1) << (OPBITS-1)) - 1; ws[i] = xs[i];
    end
    run_given(MAX_IN, 0);
    for (int i = 0; i < MAX_IN; i++) ws[i] = -xs[i];
    run_given(MAX_IN, 0);
    // Disabled unit keeps its result.
    begin
      logic signed [DW-1:0] held;
      held = y;
      en = 0;
      xs[0] = 3; ws[0] = 3;
      @(negedge clk); load_bias = 1; b = 1;
      @(negedge clk); load_bias = 0; preload = 1; w = 3;
      @(negedge clk); preload = 0; acc_en = 1; x = 3;
      @(negedge clk); acc_en = 0;
      checks++;
      if (y !== held) begin failures++; $display("FAIL DW=%0d enable gating", DW); end
      en = 1;
    end
    // Random dot products with small and full-range operands.
    for (int v = 0; v < NVEC; v++) begin
      int n;
      n = 1 + ($urandom % MAX_IN);
      if (v % 2 == 0) run(n, rand_word(OPBITS), OPBITS, OPBITS);
      else            run(n, rand_word(OPBITS-2), OPBITS-3, OPBITS-1);
    end
    // Reset clears the accumulator.
    @(negedge clk); rst = 1; @(negedge clk); rst = 0;
    checks++;
    if (y != 0) begin failures++; $display("FAIL DW=%0d reset", DW); end
    done = 1;
  end
endmodule
