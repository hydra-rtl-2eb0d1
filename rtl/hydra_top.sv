// hydra_top: HYDRA, a layer-multiplexed fully connected DNN accelerator.
//
// One physical layer of MAX_FMA fused multiply-accumulate units is reused
// for every layer of the network. Each layer: the input words are broadcast
// one per cycle from the input buffer to all FMAs, each FMA reading its own
// weight from its weight bank; after n_in cycles the FMA results are loaded
// into a PISO and fed, one per cycle, through the single shared activation
// unit into the output buffer. The output buffer is then copied into the
// input buffer and the control unit starts the next layer with that layer's
// size, weights and activation. After the last layer ann_done rises and the
// class scores are read through out_addr/ann_out.
//
// Interface
//   ann_init                 start a run (ignored while busy or cfg_err).
//   ld_we/ld_sel/ld_bank/ld_addr/ld_data
//                            host load, one word per cycle, only while not
//                            busy: LD_WEIGHT writes weight ld_addr of bank
//                            ld_bank, LD_BIAS the bias of layer ld_addr of
//                            bank ld_bank, LD_INPUT input word ld_addr.
//   cfg_we/cfg_sel/cfg_idx/cfg_data
//                            run-time layer configuration (control_unit).
//   out_addr -> ann_out      combinational read of the output buffer.
//   af_valid/af_out          the activation unit's serial output stream.
//   sat_flag                 an FMA result saturated since ann_init.
//   layer_state              state of the layer sequencer (observation).
// Timing: a layer with n_in inputs and n_out neurons takes n_in + n_out + 6
// cycles (start, initial, pre_FMA, n_in FMA, PISO load, n_out shifts, drain,
// AF), and one copy cycle separates layers; ann_done rises
// sum(n_in + n_out + 6) + (L - 1) clock edges after the edge that samples
// ann_init: 489 for the 196:64:32:32:10 network.
//
// The data path, buffers, FSM and single activation unit follow the paper's
// block diagram; the host ports, run-time configuration registers and the
// strictly sequential layer order are this design's choices.
module hydra_top
  import hydra_pkg::*;
#(
  parameter int unsigned DW         = DEF_DW,
  parameter int unsigned IBITS      = DEF_IBITS,
  parameter int unsigned MAX_FMA    = DEF_MAX_FMA,
  parameter int unsigned MAX_IN     = DEF_MAX_IN,
  parameter int unsigned MAX_LAYERS = DEF_MAX_LAYERS,
  parameter int unsigned WDEPTH     = DEF_WDEPTH,
  localparam int unsigned BW  = $clog2(MAX_FMA),
  localparam int unsigned AW  = $clog2(WDEPTH),
  localparam int unsigned XW  = $clog2(MAX_LAYERS+1)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 ann_init,
  input  logic                 ld_we,
  input  ld_sel_e              ld_sel,
  input  logic [BW-1:0]        ld_bank,
  input  logic [AW-1:0]        ld_addr,
  input  logic signed [DW-1:0] ld_data,
  input  logic                 cfg_we,
  input  cfg_sel_e             cfg_sel,
  input  logic [XW-1:0]        cfg_idx,
  input  logic [7:0]           cfg_data,
  input  logic [BW-1:0]        out_addr,
  output logic signed [DW-1:0] ann_out,
  output logic                 ann_done,
  output logic                 af_valid,
  output logic signed [DW-1:0] af_out,
  output logic                 busy,
  output logic                 cfg_err,
  output logic                 sat_flag,
  output fsm_state_e           layer_state
);
  localparam int unsigned IW = $clog2(MAX_IN+1);
  localparam int unsigned CW = $clog2(MAX_FMA+1);
  localparam int unsigned LW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1;
  localparam int unsigned IA = $clog2(MAX_IN);

  // Control unit <-> layer
  logic               compute_init, compute_done, xfer;
  logic [LW-1:0]      layer;
  logic [IW-1:0]      n_in, x_idx, w_idx;
  logic [CW-1:0]      n_out, piso_count, out_idx;
  logic [AW-1:0]      w_base;
  af_mode_e           af_mode;
  logic [MAX_FMA-1:0] fma_en;
  logic               load_bias, preload, acc_en, piso_load, piso_shift;

  // Data path
  logic signed [DW-1:0] kernel [MAX_FMA];
  logic signed [DW-1:0] bias   [MAX_FMA];
  logic signed [DW-1:0] fma_y  [MAX_FMA];
  logic signed [DW-1:0] obuf_p [MAX_FMA];
  logic signed [DW-1:0] x_word, piso_out;
  logic                 sat_any;

  control_unit #(
    .MAX_LAYERS(MAX_LAYERS), .MAX_FMA(MAX_FMA), .MAX_IN(MAX_IN), .WDEPTH(WDEPTH)
  ) u_ctrl (
    .clk, .rst, .ann_init,
    .cfg_we, .cfg_sel, .cfg_idx, .cfg_data,
    .layer_done (compute_done),
    .compute_init, .layer, .n_in, .n_out, .w_base, .af_mode, .fma_en,
    .xfer, .ann_done, .busy, .cfg_err
  );

  layer_fsm #(.MAX_IN(MAX_IN), .MAX_FMA(MAX_FMA)) u_fsm (
    .clk, .rst, .compute_init, .n_in, .n_out, .piso_count,
    .state (layer_state),
    .load_bias, .preload, .acc_en, .x_idx, .w_idx,
    .piso_load, .piso_shift, .out_idx, .compute_done
  );

  weight_buffer #(
    .DW(DW), .NBANK(MAX_FMA), .WDEPTH(WDEPTH), .MAX_LAYERS(MAX_LAYERS)
  ) u_wbuf (
    .clk,
    .w_we       (ld_we && ld_sel == LD_WEIGHT),
    .b_we       (ld_we && ld_sel == LD_BIAS),
    .wr_bank    (ld_bank),
    .wr_addr    (ld_addr),
    .wr_data    (ld_data),
    .rd_addr    (AW'(w_base + AW'(w_idx))),
    .b_rd_layer (layer),
    .kernel, .bias
  );

  input_buffer #(.DW(DW), .DEPTH(MAX_IN), .NXFER(MAX_FMA)) u_ibuf (
    .clk,
    .we        (ld_we && ld_sel == LD_INPUT),
    .wr_addr   (IA'(ld_addr)),
    .wr_data   (ld_data),
    .xfer,
    .xfer_data (obuf_p),
    .rd_addr   (IA'(x_idx)),
    .rd_data   (x_word)
  );

  fma_array #(.DW(DW), .IBITS(IBITS), .MAX_IN(MAX_IN), .MAX_FMA(MAX_FMA)) u_array (
    .clk, .rst,
    .en (fma_en),
    .load_bias, .preload, .acc_en,
    .x  (x_word),
    .w  (kernel),
    .b  (bias),
    .y  (fma_y),
    .sat_any
  );

  piso #(.DW(DW), .N(MAX_FMA)) u_piso (
    .clk, .rst,
    .load   (piso_load),
    .n_load (n_out),
    .shift  (piso_shift),
    .pin    (fma_y),
    .sout   (piso_out),
    .count  (piso_count)
  );

  act_fn #(.DW(DW)) u_af (
    .clk, .rst,
    .in_valid  (piso_shift),
    .din       (piso_out),
    .mode      (af_mode),
    .out_valid (af_valid),
    .dout      (af_out)
  );

  output_buffer #(.DW(DW), .DEPTH(MAX_FMA)) u_obuf (
    .clk, .rst,
    .we      (af_valid),
    .wr_addr (BW'(out_idx)),
    .wr_data (af_out),
    .pout    (obuf_p),
    .rd_addr (out_addr),
    .rd_data (ann_out)
  );

  // Sticky saturation flag, sampled when the PISO takes the FMA results.
  always_ff @(posedge clk) begin
    if (rst || (ann_init && !busy)) sat_flag <= 1'b0;
    else if (piso_load && sat_any)  sat_flag <= 1'b1;
  end

  // Host loads must not disturb a running network.
  a_no_load_busy: assert property (@(posedge clk) disable iff (rst)
                                   ld_we |-> !busy)
    else $error("host load while busy");
  a_no_cfg_busy: assert property (@(posedge clk) disable iff (rst)
                                  cfg_we |-> !busy)
    else $error("configuration write while busy");
endmodule
