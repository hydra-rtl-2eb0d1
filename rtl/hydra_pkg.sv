// hydra_pkg: types and constants shared by the HYDRA layer-multiplexed
// DNN accelerator.
//
// Data are signed fixed-point words: 8 bits with 3 integer bits (sign
// included) and 5 fraction bits, written <8,5> or Q3.5. The default network
// is the 196:64:32:32:10 fully connected classifier (four weight layers run
// one after another on one 64-FMA layer). The enum encodings, the
// configuration register map and the host load port are this design's own
// choices.
package hydra_pkg;

  // Default sizes: 8-bit FMA with 3 integer bits, 64 FMAs, 196 inputs,
  // four layers.
  localparam int unsigned DEF_DW         = 8;
  localparam int unsigned DEF_IBITS      = 3;
  localparam int unsigned DEF_MAX_FMA    = 64;
  localparam int unsigned DEF_MAX_IN     = 196;
  localparam int unsigned DEF_MAX_LAYERS = 4;
  // Weight words per bank: 196 + 64 + 32 + 32 (one neuron's weights for
  // every layer of the default network).
  localparam int unsigned DEF_WDEPTH     = 324;

  // Default layer size list 196:64:32:32:10 (entry l is layer l's input
  // count, entry l+1 its neuron count).
  localparam int unsigned DEF_SIZES [DEF_MAX_LAYERS+1] = '{196, 64, 32, 32, 10};

  // Activation applied by the single shared activation unit.
  typedef enum logic {
    AF_RELU   = 1'b0,
    AF_LINEAR = 1'b1
  } af_mode_e;

  // States of the per-layer sequencer.
  typedef enum logic [2:0] {
    S_IDLE    = 3'd0,
    S_INITIAL = 3'd1,
    S_PRE_FMA = 3'd2,
    S_FMA     = 3'd3,
    S_PISO    = 3'd4,
    S_AF      = 3'd5
  } fsm_state_e;

  // States of the network-level control unit.
  typedef enum logic [2:0] {
    C_IDLE  = 3'd0,
    C_START = 3'd1,
    C_WAIT  = 3'd2,
    C_XFER  = 3'd3
  } ctrl_state_e;

  // Host load port target.
  typedef enum logic [1:0] {
    LD_WEIGHT = 2'd0,
    LD_BIAS   = 2'd1,
    LD_INPUT  = 2'd2
  } ld_sel_e;

  // Configuration register select.
  typedef enum logic [1:0] {
    CFG_NUM_LAYERS = 2'd0,  // cfg_data = number of layers (1..MAX_LAYERS)
    CFG_SIZE       = 2'd1,  // size list entry cfg_idx (0..MAX_LAYERS)
    CFG_AF         = 2'd2   // cfg_data[0] = af_mode_e of layer cfg_idx
  } cfg_sel_e;

endpackage
