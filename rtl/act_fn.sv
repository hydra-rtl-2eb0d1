// act_fn: the one activation unit shared by all neurons of the reused
// layer.
//
// Takes one word per cycle from the PISO and registers the activated word,
// so the result appears one clock after din. mode selects, per layer, ReLU
// (negative words become 0) or linear (the word passes unchanged, used for
// the output layer's class scores). out_valid is in_valid delayed by the
// same register. Reset is synchronous and active high.
//
// Following the paper: a single reconfigurable activation function fed
// serially through the PISO, one cycle of latency. The paper does not say
// which functions it supports; ReLU and linear are this design's choice.
module act_fn
  import hydra_pkg::*;
#(
  parameter int unsigned DW = DEF_DW
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] din,
  input  af_mode_e             mode,
  output logic                 out_valid,
  output logic signed [DW-1:0] dout
);
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      dout      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (mode == AF_RELU && din[DW-1]) dout <= '0;
        else                              dout <= din;
      end
    end
  end
endmodule
