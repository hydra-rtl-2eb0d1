// tb_input_buffer: self-checking test of the input buffer at its default
// size (196 words, 64-word transfer). Host writes every entry and reads them
// back; a transfer replaces entries 0..63 in one cycle and leaves the rest;
// a transfer wins over a simultaneous host write.
module tb_input_buffer;
  localparam int D = 196, NX = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, xfer;
  logic [7:0] wr_addr, rd_addr;
  logic signed [7:0] wr_data, rd_data;
  logic signed [7:0] xfer_data [NX];
  logic signed [7:0] model [D];

  input_buffer #(.DW(8), .DEPTH(D), .NXFER(NX)) dut (
    .clk, .we, .wr_addr, .wr_data, .xfer, .xfer_data, .rd_addr, .rd_data);

  task automatic check_all(input string tag);
    for (int i = 0; i < D; i++) begin
      rd_addr = 8'(i); #1;
      checks++;
      if (rd_data != model[i]) begin
        failures++; $display("FAIL %s entry %0d: %0d exp %0d", tag, i, rd_data, model[i]);
      end
    end
  endtask

  initial begin
    we = 0; xfer = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    foreach (xfer_data[i]) xfer_data[i] = '0;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        we = 1; wr_addr = 8'(i); wr_data = 8'($urandom); model[i] = wr_data;
      end
      @(negedge clk); we = 0;
      check_all("host");
      @(negedge clk);
      foreach (xfer_data[i]) begin xfer_data[i] = 8'($urandom); model[i] = xfer_data[i]; end
      xfer = 1;
      we = 1; wr_addr = 8'd3; wr_data = 8'sd99;        // loses to the transfer
      @(negedge clk); xfer = 0; we = 0;
      check_all("xfer");
    end
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
