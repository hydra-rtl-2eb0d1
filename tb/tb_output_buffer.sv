// tb_output_buffer: self-checking test of the output buffer at its default
// size (64 words). Serial writes in random order, then checks the parallel
// output and the addressed read (ANN_out), and that reset clears it.
module tb_output_buffer;
  localparam int D = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, we;
  logic [5:0] wr_addr, rd_addr;
  logic signed [7:0] wr_data, rd_data;
  logic signed [7:0] pout [D];
  logic signed [7:0] model [D];

  output_buffer #(.DW(8), .DEPTH(D)) dut (
    .clk, .rst, .we, .wr_addr, .wr_data, .pout, .rd_addr, .rd_data);

  task automatic check_all(input string tag);
    for (int i = 0; i < D; i++) begin
      rd_addr = 6'(i); #1;
      checks++;
      if (rd_data != model[i] || pout[i] != model[i]) begin
        failures++; $display("FAIL %s entry %0d: %0d/%0d exp %0d", tag, i, rd_data, pout[i], model[i]);
      end
    end
  endtask

  initial begin
    rst = 1; we = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    @(negedge clk); rst = 0;
    foreach (model[i]) model[i] = '0;
    check_all("reset");
    for (int r = 0; r < 4; r++) begin
      for (int k = 0; k < 100; k++) begin
        @(negedge clk);
        we = ($urandom % 3) != 0; wr_addr = 6'($urandom); wr_data = 8'($urandom);
        if (we) model[wr_addr] = wr_data;
      end
      @(negedge clk); we = 0;
      check_all("write");
    end
    rst = 1; @(negedge clk); rst = 0;
    foreach (model[i]) model[i] = '0;
    check_all("reset2");
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
