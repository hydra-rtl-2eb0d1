// layer_fsm: sequencer for one layer on the reused FMA array, PISO and
// activation unit.
//
// States, in order: idle -> initial -> pre_FMA -> FMA -> PISO -> AF -> idle.
//   idle     waits for compute_init (Computeinit).
//   initial  (1 cycle) load_bias: every FMA captures its bias; Index is set
//            to n_in, the number of accumulations.
//   pre_FMA  (1 cycle) preload: accumulators take the bias and the weight
//            registers take weight 0 (w_idx = 0).
//   FMA      (n_in cycles) acc_en: cycle i accumulates input x_idx = i with
//            the registered weight i and fetches weight w_idx = i+1.
//            Index counts down; at Index = 0 the layer goes to PISO.
//   PISO     first cycle piso_load captures all FMA results and count =
//            n_out; then one piso_shift per cycle sends word n_out-count to
//            the activation unit until count = 0.
//   AF       (1 cycle) the last activated word has been stored;
//            compute_done pulses and the sequencer returns to idle.
// out_idx is the neuron index of the word the activation unit presents in
// the same cycle (the shift index delayed by the activation register).
// Counting the first FMA cycle as cycle 1, the PISO loads in cycle n_in+1
// and the activation of neuron k is registered at the end of cycle
// n_in+2+k (cycle 198 for neuron 0 of a 196-input layer). A layer occupies
// n_in + n_out + 5 cycles from compute_init to compute_done.
// rst returns every state to idle (synchronous, active high).
//
// Following the paper: the six states, their order and the printed
// conditions Computeinit=1, Index=#accumulations, Index=0, count=0, rst=1,
// and the two-cycle PISO + AF latency. This design's own choices: what each
// state drives, and the unconditional pre_FMA->FMA and AF->idle steps.
module layer_fsm
  import hydra_pkg::*;
#(
  parameter int unsigned MAX_IN  = DEF_MAX_IN,
  parameter int unsigned MAX_FMA = DEF_MAX_FMA,
  localparam int unsigned IW = $clog2(MAX_IN+1),
  localparam int unsigned CW = $clog2(MAX_FMA+1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          compute_init,
  input  logic [IW-1:0] n_in,
  input  logic [CW-1:0] n_out,
  input  logic [CW-1:0] piso_count,
  output fsm_state_e    state,
  output logic          load_bias,
  output logic          preload,
  output logic          acc_en,
  output logic [IW-1:0] x_idx,
  output logic [IW-1:0] w_idx,
  output logic          piso_load,
  output logic          piso_shift,
  output logic [CW-1:0] out_idx,
  output logic          compute_done
);
  logic [IW-1:0] index;
  logic          loaded;

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      index   <= '0;
      loaded  <= 1'b0;
      out_idx <= '0;
    end else begin
      if (piso_shift) out_idx <= n_out - piso_count;
      unique case (state)
        S_IDLE: begin
          loaded <= 1'b0;
          if (compute_init) state <= S_INITIAL;
        end
        S_INITIAL: begin
          index <= n_in;                    // Index = #accumulations
          state <= S_PRE_FMA;
        end
        S_PRE_FMA: state <= S_FMA;
        S_FMA: begin
          index <= index - 1'b1;
          if (index == IW'(1)) state <= S_PISO;   // Index reaches 0
        end
        S_PISO: begin
          if (!loaded) loaded <= 1'b1;
          else if (piso_count == '0) state <= S_AF;
        end
        S_AF: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    load_bias    = (state == S_INITIAL);
    preload      = (state == S_PRE_FMA);
    acc_en       = (state == S_FMA);
    x_idx        = (state == S_FMA) ? IW'(n_in - index) : '0;
    w_idx        = (state == S_FMA) ? IW'(n_in - index + 1'b1) : '0;
    piso_load    = (state == S_PISO) && !loaded;
    piso_shift   = (state == S_PISO) && loaded && (piso_count != '0);
    compute_done = (state == S_AF);
  end

  // Computeinit is only meaningful while the layer is idle.
  a_init_idle: assert property (@(posedge clk) disable iff (rst)
                                compute_init |-> state == S_IDLE)
    else $error("compute_init while layer busy");
endmodule
