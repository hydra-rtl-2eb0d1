// tb_fma_array: self-checking test of the 64-FMA array at its default size.
// Runs random layers (random input count, random number of enabled FMAs)
// with one broadcast input per cycle and a different weight per FMA, and
// checks every enabled FMA's rounded result against integer reference
// arithmetic, that disabled FMAs keep their previous result, and sat_any.
module tb_fma_array;
  localparam int NF = 64, MI = 196;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_gated = 0, n_sat = 0;

  logic rst, load_bias, preload, acc_en, sat_any;
  logic [NF-1:0] en;
  logic signed [7:0] x;
  logic signed [7:0] w [NF];
  logic signed [7:0] b [NF];
  logic signed [7:0] y [NF];
  logic signed [7:0] prev [NF];

  int xs [MI];
  int ws [NF][MI];
  int bs [NF];

  fma_array #(.DW(8), .IBITS(3), .MAX_IN(MI), .MAX_FMA(NF)) dut (
    .clk, .rst, .en, .load_bias, .preload, .acc_en, .x, .w, .b, .y, .sat_any);

  function automatic int ref_y(input longint a, output bit s);
    longint q, rem;
    q = a / 32; rem = a % 32;
    if (rem < 0) rem = -rem;
    if (rem >= 16) q = (a < 0) ? q - 1 : q + 1;
    s = 0;
    if (q > 127)  begin q = 127;  s = 1; end
    if (q < -128) begin q = -128; s = 1; end
    return int'(q);
  endfunction

  initial begin
    rst = 1; en = '0; load_bias = 0; preload = 0; acc_en = 0; x = 0;
    foreach (w[j]) begin w[j] = 0; b[j] = 0; end
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 12; t++) begin
      int n, m, scale;
      bit any_sat;
      n = (t == 0) ? MI : 1 + ($urandom % MI);
      m = (t == 0) ? NF : 1 + ($urandom % NF);
      scale = (t % 3 == 2) ? 256 : 16;        // every third layer saturates
      foreach (prev[j]) prev[j] = y[j];
      for (int i = 0; i < n; i++) xs[i] = int'($urandom % 64) - 16;
      for (int j = 0; j < NF; j++) begin
        bs[j] = int'($urandom % 64) - 32;
        for (int i = 0; i < n; i++) ws[j][i] = int'($urandom % scale) - scale/2;
      end
      for (int j = 0; j < NF; j++) en[j] = (j < m);
      @(negedge clk);
      load_bias = 1;
      foreach (b[j]) b[j] = 8'(bs[j]);
      @(negedge clk);
      load_bias = 0; preload = 1;
      foreach (w[j]) w[j] = 8'(ws[j][0]);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        preload = 0; acc_en = 1;
        x = 8'(xs[i]);
        foreach (w[j]) w[j] = (i+1 < n) ? 8'(ws[j][i+1]) : 8'sd0;
      end
      @(negedge clk);
      acc_en = 0;
      any_sat = 0;
      for (int j = 0; j < NF; j++) begin
        longint acc;
        bit s;
        int r;
        acc = longint'(bs[j]) * 32;
        for (int i = 0; i < n; i++) acc += longint'(xs[i]) * longint'(ws[j][i]);
        r = ref_y(acc, s);
        checks++;
        if (j < m) begin
          any_sat |= s;
          if (int'(y[j]) != r) begin failures++; $display("FAIL t=%0d fma %0d: %0d exp %0d", t, j, y[j], r); end
        end else begin
          n_gated++;
          if (y[j] != prev[j]) begin failures++; $display("FAIL t=%0d disabled fma %0d changed", t, j); end
        end
      end
      checks++;
      if (sat_any != any_sat) begin failures++; $display("FAIL t=%0d sat_any=%0b exp %0b", t, sat_any, any_sat); end
      if (any_sat) n_sat++;
    end
    checks++; if (n_gated == 0 || n_sat == 0) begin failures++; $display("FAIL gating/saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
