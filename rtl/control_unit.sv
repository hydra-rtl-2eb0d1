// control_unit: network-level controller that runs a whole DNN on the one
// reused layer.
//
// It holds the run-time layer configuration: the number of layers, the size
// list (entry l = inputs of layer l, entry l+1 = its neurons; reset value
// 196:64:32:32:10) and the activation of each layer (reset: ReLU for the
// hidden layers, linear for the output layer). The host writes it through
// cfg_we/cfg_sel/cfg_idx/cfg_data while the unit is idle. cfg_err flags a
// configuration the hardware cannot hold; ann_init is then ignored.
//
// On ann_init it runs layer 0, 1, ... : C_START pulses compute_init to the
// layer sequencer with the layer's n_in, n_out, weight base address,
// activation and FMA enable mask (FMA j enabled when j < n_out); C_WAIT waits
// for compute_done; C_XFER copies the output buffer into the input buffer
// (one cycle) and advances the weight base by n_in. After the last layer
// ann_done (ANNdone) rises and stays high until the next ann_init. busy is
// high from ann_init until ann_done. Reset is synchronous, active high.
//
// Following the paper: one controller that starts and finishes each layer,
// passes a layer's outputs on as the next layer's inputs, selects the layer's
// configuration and signals ANN done; a configurable network depth. This
// design's own choices: the register map, the error check and the weight
// address map.
module control_unit
  import hydra_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = DEF_MAX_LAYERS,
  parameter int unsigned MAX_FMA    = DEF_MAX_FMA,
  parameter int unsigned MAX_IN     = DEF_MAX_IN,
  parameter int unsigned WDEPTH     = DEF_WDEPTH,
  localparam int unsigned IW  = $clog2(MAX_IN+1),
  localparam int unsigned CW  = $clog2(MAX_FMA+1),
  localparam int unsigned AW  = $clog2(WDEPTH),
  localparam int unsigned LW  = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1,
  localparam int unsigned NLW = $clog2(MAX_LAYERS+1),
  localparam int unsigned XW  = $clog2(MAX_LAYERS+1)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               ann_init,
  input  logic               cfg_we,
  input  cfg_sel_e           cfg_sel,
  input  logic [XW-1:0]      cfg_idx,
  input  logic [7:0]         cfg_data,
  input  logic               layer_done,
  output logic               compute_init,
  output logic [LW-1:0]      layer,
  output logic [IW-1:0]      n_in,
  output logic [CW-1:0]      n_out,
  output logic [AW-1:0]      w_base,
  output af_mode_e           af_mode,
  output logic [MAX_FMA-1:0] fma_en,
  output logic               xfer,
  output logic               ann_done,
  output logic               busy,
  output logic               cfg_err
);
  ctrl_state_e     cstate;
  logic [NLW-1:0]  num_layers;
  logic [7:0]      sizes [MAX_LAYERS+1];
  af_mode_e        afm   [MAX_LAYERS];

  // Configuration registers.
  always_ff @(posedge clk) begin
    if (rst) begin
      num_layers <= NLW'(MAX_LAYERS);
      for (int i = 0; i <= MAX_LAYERS; i++)
        sizes[i] <= (i <= DEF_MAX_LAYERS) ? 8'(DEF_SIZES[i]) : 8'd0;
      for (int i = 0; i < MAX_LAYERS; i++)
        afm[i] <= (i == MAX_LAYERS-1) ? AF_LINEAR : AF_RELU;
    end else if (cfg_we && cstate == C_IDLE) begin
      unique case (cfg_sel)
        CFG_NUM_LAYERS: num_layers <= NLW'(cfg_data);
        CFG_SIZE:       if (32'(cfg_idx) <= MAX_LAYERS) sizes[cfg_idx] <= cfg_data;
        CFG_AF:         if (32'(cfg_idx) <  MAX_LAYERS) afm[LW'(cfg_idx)] <= af_mode_e'(cfg_data[0]);
        default: ;
      endcase
    end
  end

  // Configuration check: every layer must fit the array and the buffers,
  // and all weights must fit a bank.
  always_comb begin
    int unsigned total;
    total   = 0;
    cfg_err = (num_layers == '0) || (32'(num_layers) > MAX_LAYERS);
    for (int l = 0; l < MAX_LAYERS; l++) begin
      if (l < 32'(num_layers)) begin
        if (sizes[l] == 8'd0 || sizes[l+1] == 8'd0)  cfg_err = 1'b1;
        if (32'(sizes[l+1]) > MAX_FMA)                cfg_err = 1'b1;
        if (l == 0 && 32'(sizes[l]) > MAX_IN)         cfg_err = 1'b1;
        total += 32'(sizes[l]);
      end
    end
    if (total > WDEPTH) cfg_err = 1'b1;
  end

  // Layer sequencing.
  always_ff @(posedge clk) begin
    if (rst) begin
      cstate   <= C_IDLE;
      layer    <= '0;
      w_base   <= '0;
      ann_done <= 1'b0;
    end else begin
      unique case (cstate)
        C_IDLE: if (ann_init && !cfg_err) begin
          layer    <= '0;
          w_base   <= '0;
          ann_done <= 1'b0;
          cstate   <= C_START;
        end
        C_START: cstate <= C_WAIT;
        C_WAIT: if (layer_done) begin
          if (32'(layer) + 1 >= 32'(num_layers)) begin
            ann_done <= 1'b1;
            cstate   <= C_IDLE;
          end else begin
            cstate <= C_XFER;
          end
        end
        C_XFER: begin
          layer  <= layer + 1'b1;
          w_base <= w_base + AW'(n_in);
          cstate <= C_START;
        end
        default: cstate <= C_IDLE;
      endcase
    end
  end

  always_comb begin
    compute_init = (cstate == C_START);
    xfer         = (cstate == C_XFER);
    busy         = (cstate != C_IDLE);
    n_in         = IW'(sizes[XW'(layer)]);
    n_out        = CW'(sizes[XW'(layer) + XW'(1)]);
    af_mode      = afm[layer];
    for (int j = 0; j < MAX_FMA; j++) fma_en[j] = (j < 32'(n_out));
  end
endmodule
