// tb_act_fn: self-checking test of the shared activation unit. Random words
// in ReLU and linear mode; checks the one-cycle registered latency of dout
// and out_valid, the ReLU clamp of negative words and that the output holds
// when in_valid is low.
module tb_act_fn;
  import hydra_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_clamped = 0;

  logic rst, in_valid, out_valid;
  logic signed [7:0] din, dout, exp_d;
  af_mode_e mode;

  act_fn #(.DW(8)) dut (.clk, .rst, .in_valid, .din, .mode, .out_valid, .dout);

  initial begin
    rst = 1; in_valid = 0; din = 0; mode = AF_RELU; exp_d = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    checks++; if (out_valid || dout != 0) begin failures++; $display("FAIL reset"); end
    for (int t = 0; t < 400; t++) begin
      in_valid = ($urandom % 4) != 0;
      din  = (t == 0) ? -8'sd128 : (t == 1) ? 8'sd127 : 8'($urandom);
      mode = af_mode_e'($urandom % 2);
      if (in_valid) exp_d = (mode == AF_RELU && din < 0) ? 8'sd0 : din;
      if (in_valid && mode == AF_RELU && din < 0) n_clamped++;
      @(negedge clk);
      checks++;
      if (out_valid != in_valid || dout != exp_d) begin
        failures++;
        $display("FAIL t=%0d mode=%0d din=%0d dout=%0d exp=%0d v=%0b", t, mode, din, dout, exp_d, out_valid);
      end
    end
    checks++; if (n_clamped == 0) begin failures++; $display("FAIL no ReLU clamp exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
