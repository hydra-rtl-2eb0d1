// fma_unit: one fused multiply-accumulate neuron of the reused layer.
//
// The bias is captured in a bias register (load_bias) and preloaded into
// the accumulator (preload), which saves the separate bias-add cycle. The
// same preload cycle captures the first weight in the weight register.
// Each acc_en cycle then adds x * weight_reg to the accumulator and loads
// the next weight, so the weight register is one pipeline stage ahead of
// the feature input, and n_in acc_en cycles compute bias + sum x[i]*w[i].
//
// The accumulator is ACC_W = 2*DW + clog2(MAX_IN) + 1 bits wide (the
// [2n+k:0] register of the paper's FMA drawing, k = log2 N overhead bits),
// so 196 products of two Q3.5 words cannot overflow. y is the accumulator
// resized to DW bits <DW,DW-IBITS>: rounded to nearest with ties away from
// zero (RNA), then saturated; sat flags a saturated result. y is
// combinational from the accumulator.
//
// en freezes every register (used to idle FMAs the current layer does not
// need). Reset is synchronous and active high. Following the paper: the
// weight and bias registers, bias preload, 2n+k accumulator, resize and
// RNA. This design's own choices: ties-away rounding before saturation,
// the strobe interface and the reset style.
module fma_unit #(
  parameter int unsigned DW     = hydra_pkg::DEF_DW,
  parameter int unsigned IBITS  = hydra_pkg::DEF_IBITS,
  parameter int unsigned MAX_IN = hydra_pkg::DEF_MAX_IN
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en,
  input  logic                 load_bias,
  input  logic                 preload,
  input  logic                 acc_en,
  input  logic signed [DW-1:0] x,
  input  logic signed [DW-1:0] w,
  input  logic signed [DW-1:0] b,
  output logic signed [DW-1:0] y,
  output logic                 sat
);
  localparam int unsigned FRAC  = DW - IBITS;
  localparam int unsigned ACC_W = 2*DW + $clog2(MAX_IN) + 1;

  logic signed [DW-1:0]    w_reg, b_reg;
  logic signed [ACC_W-1:0] acc;
  logic signed [2*DW-1:0]  prod;

  assign prod = x * w_reg;

  always_ff @(posedge clk) begin
    if (rst) begin
      w_reg <= '0;
      b_reg <= '0;
      acc   <= '0;
    end else if (en) begin
      if (load_bias) b_reg <= b;
      if (preload) begin
        acc   <= ACC_W'(b_reg) <<< FRAC;   // bias aligned to product scale
        w_reg <= w;
      end else if (acc_en) begin
        acc   <= acc + ACC_W'(prod);
        w_reg <= w;
      end
    end
  end

  // Resize: product scale has 2*FRAC fraction bits, output has FRAC.
  logic              neg;
  logic [ACC_W:0]    mag, rnd;
  localparam logic [ACC_W:0] MAX_NEG = (ACC_W+1)'(1) << (DW-1);
  localparam logic [ACC_W:0] MAX_POS = MAX_NEG - 1'b1;
  localparam logic [ACC_W:0] HALF    = (ACC_W+1)'(1) << (FRAC-1);

  always_comb begin
    neg = acc[ACC_W-1];
    mag = neg ? (ACC_W+1)'(-$signed({acc[ACC_W-1], acc}))
              : (ACC_W+1)'({1'b0, acc});
    rnd = (mag + HALF) >> FRAC;   // RNA on magnitude
    sat = 1'b0;
    if (!neg) begin
      if (rnd > MAX_POS) begin
        y   = {1'b0, {(DW-1){1'b1}}};
        sat = 1'b1;
      end else begin
        y = DW'(rnd);
      end
    end else begin
      if (rnd > MAX_NEG) begin
        y   = {1'b1, {(DW-1){1'b0}}};
        sat = 1'b1;
      end else begin
        y = DW'(-$signed(rnd));
      end
    end
  end
endmodule
