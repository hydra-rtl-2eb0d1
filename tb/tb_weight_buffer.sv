// tb_weight_buffer: self-checking test of the weight and bias banks at the
// default size (64 banks x 324 weights, 4 biases per bank). Writes every
// word with a value derived from bank and address, then reads every address
// and checks all 64 kernel outputs, all biases per layer, and that an
// address past the end reads 0.
module tb_weight_buffer;
  localparam int NB = 64, WD = 324, ML = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_we, b_we;
  logic [5:0] wr_bank;
  logic [8:0] wr_addr, rd_addr;
  logic [1:0] b_rd_layer;
  logic signed [7:0] wr_data;
  logic signed [7:0] kernel [NB];
  logic signed [7:0] bias [NB];
  int unsigned seed;

  weight_buffer #(.DW(8), .NBANK(NB), .WDEPTH(WD), .MAX_LAYERS(ML)) dut (
    .clk, .w_we, .b_we, .wr_bank, .wr_addr, .wr_data, .rd_addr, .b_rd_layer, .kernel, .bias);

  function automatic logic signed [7:0] wval(int b, int a);
    return 8'((b * 37 + a * 11 + int'(seed)) ^ (a >> 3));
  endfunction
  function automatic logic signed [7:0] bval(int b, int l);
    return 8'(b * 5 - l * 29 + int'(seed) * 3);
  endfunction

  initial begin
    w_we = 0; b_we = 0; wr_bank = 0; wr_addr = 0; wr_data = 0; rd_addr = 0; b_rd_layer = 0;
    for (int r = 0; r < 2; r++) begin
      seed = $urandom;
      for (int b = 0; b < NB; b++) begin
        for (int a = 0; a < WD; a++) begin
          @(negedge clk);
          w_we = 1; b_we = 0; wr_bank = 6'(b); wr_addr = 9'(a); wr_data = wval(b, a);
        end
        for (int l = 0; l < ML; l++) begin
          @(negedge clk);
          w_we = 0; b_we = 1; wr_bank = 6'(b); wr_addr = 9'(l); wr_data = bval(b, l);
        end
      end
      @(negedge clk); w_we = 0; b_we = 0;
      for (int a = 0; a < WD; a++) begin
        rd_addr = 9'(a); #1;
        for (int b = 0; b < NB; b++) begin
          checks++;
          if (kernel[b] != wval(b, a)) begin
            failures++;
            if (failures < 10) $display("FAIL bank %0d addr %0d: %0d exp %0d", b, a, kernel[b], wval(b, a));
          end
        end
      end
      for (int l = 0; l < ML; l++) begin
        b_rd_layer = 2'(l); #1;
        for (int b = 0; b < NB; b++) begin
          checks++;
          if (bias[b] != bval(b, l)) begin failures++; $display("FAIL bias %0d/%0d", b, l); end
        end
      end
      rd_addr = 9'(WD); #1;
      checks++; if (kernel[0] != 0) begin failures++; $display("FAIL out of range read"); end
    end
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
