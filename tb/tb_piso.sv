// tb_piso: self-checking test of the PISO at its default size (64 words).
// Loads random words with random valid counts, shifts them out and checks
// the serial order (word 0 first), count, the stop at count 0, load
// priority over shift and reset.
module tb_piso;
  localparam int N = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, load, shift;
  logic [6:0] n_load, count;
  logic signed [7:0] pin [N];
  logic signed [7:0] sout;
  logic signed [7:0] ref_w [N];

  piso #(.DW(8), .N(N)) dut (.clk, .rst, .load, .n_load, .shift, .pin, .sout, .count);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    rst = 1; load = 0; shift = 0; n_load = 0;
    foreach (pin[i]) pin[i] = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    chk(count == 0 && sout == 0, "reset");
    for (int t = 0; t < 20; t++) begin
      int n;
      n = (t == 0) ? N : 1 + ($urandom % N);
      foreach (pin[i]) begin pin[i] = 8'($urandom); ref_w[i] = pin[i]; end
      n_load = 7'(n); load = 1;
      @(negedge clk);
      load = 0;
      chk(count == 7'(n), $sformatf("count after load %0d", n));
      foreach (pin[i]) pin[i] = 8'($urandom);   // must not matter now
      for (int k = 0; k < n; k++) begin
        chk(sout == ref_w[k], $sformatf("word %0d of %0d: %0d exp %0d", k, n, sout, ref_w[k]));
        shift = 1;
        @(negedge clk);
        shift = 0;
        chk(count == 7'(n-k-1), "count decrement");
      end
      // Extra shift at count 0 changes nothing.
      shift = 1; @(negedge clk); shift = 0;
      chk(count == 0, "stays at 0");
    end
    // Load has priority over shift.
    foreach (pin[i]) begin pin[i] = 8'(i + 1); end
    n_load = 7'd5; load = 1; shift = 1;
    @(negedge clk);
    load = 0; shift = 0;
    chk(count == 5 && sout == 8'sd1, "load priority");
    rst = 1; @(negedge clk); rst = 0;
    chk(count == 0 && sout == 0, "reset 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
