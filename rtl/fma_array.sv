// fma_array: the single physical layer that every network layer is mapped
// onto, a one-dimensional array of MAX_FMA fma_unit neurons.
//
// All FMAs receive the same feature word x in a cycle (a fully connected
// layer needs every input at every neuron) together with their own weight
// w[j] and bias b[j] from weight bank j. The load_bias/preload/acc_en strobes
// come from the layer sequencer and are shared; en[j] idles FMA j when the
// current layer has fewer neurons than MAX_FMA. y[j] is FMA j's rounded
// <8,5> result; sat_any flags that an enabled FMA saturated.
//
// Following the paper: 64 FMAs, a weight bank per FMA, unused FMAs idled.
// This design's own choice: the broadcast input and the enable used in
// place of power gating.
module fma_array #(
  parameter int unsigned DW      = hydra_pkg::DEF_DW,
  parameter int unsigned IBITS   = hydra_pkg::DEF_IBITS,
  parameter int unsigned MAX_IN  = hydra_pkg::DEF_MAX_IN,
  parameter int unsigned MAX_FMA = hydra_pkg::DEF_MAX_FMA
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [MAX_FMA-1:0]   en,
  input  logic                 load_bias,
  input  logic                 preload,
  input  logic                 acc_en,
  input  logic signed [DW-1:0] x,
  input  logic signed [DW-1:0] w [MAX_FMA],
  input  logic signed [DW-1:0] b [MAX_FMA],
  output logic signed [DW-1:0] y [MAX_FMA],
  output logic                 sat_any
);
  logic [MAX_FMA-1:0] sat;

  for (genvar j = 0; j < MAX_FMA; j++) begin : g_fma
    fma_unit #(.DW(DW), .IBITS(IBITS), .MAX_IN(MAX_IN)) u_fma (
      .clk, .rst,
      .en       (en[j]),
      .load_bias, .preload, .acc_en,
      .x,
      .w        (w[j]),
      .b        (b[j]),
      .y        (y[j]),
      .sat      (sat[j])
    );
  end

  assign sat_any = |(sat & en);
endmodule
