// tb_hydra_top: end-to-end test of the HYDRA accelerator with every
// parameter at its default (64 FMAs, 196 inputs, 4 layers, 324 weights per
// bank). The host port loads random weights, biases and a 196-word input;
// the network runs layer after layer on the one FMA array; every word of the
// serial activation stream and the ten ANN_out scores are compared with a
// fixed-point reference model computed here (Q3.5, bias preloaded,
// round-to-nearest ties away from zero, saturation, ReLU/linear).
//
// Runs: (1) the 196:64:32:32:10 network; (2) the same with large weights,
// which saturates; (3) a run-time reconfiguration to 150:48:24:6 with other
// activations; (4) an invalid configuration, which must be refused; (5) the
// default network again after reset. Checked timing: the first activated
// word of the first layer is registered at the end of FMA-relative cycle
// n_in+2 (198), and ann_done rises sum(n_in+n_out+6)+(L-1) edges after
// ann_init. Mechanisms counted and required at least once: layer reuse
// (several layers per run), output-to-input transfer, idle FMAs, ReLU clamp,
// linear layer, saturation, reconfiguration, refused configuration.
module tb_hydra_top;
  import hydra_pkg::*;
  localparam int NF = 64, MI = 196, ML = 4, WD = 324;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, ann_init, ld_we, cfg_we, ann_done, af_valid, busy, cfg_err, sat_flag;
  ld_sel_e ld_sel;
  logic [5:0] ld_bank, out_addr;
  logic [8:0] ld_addr;
  logic signed [7:0] ld_data, ann_out, af_out;
  cfg_sel_e cfg_sel;
  logic [2:0] cfg_idx;
  logic [7:0] cfg_data;
  fsm_state_e layer_state;

  hydra_top dut (
    .clk, .rst, .ann_init, .ld_we, .ld_sel, .ld_bank, .ld_addr, .ld_data,
    .cfg_we, .cfg_sel, .cfg_idx, .cfg_data, .out_addr, .ann_out, .ann_done,
    .af_valid, .af_out, .busy, .cfg_err, .sat_flag, .layer_state);

  // Test data and reference results.
  int wt [NF][WD];
  int bs [NF][ML];
  int xin [MI];
  int sizes [ML+1];
  af_mode_e afs [ML];
  int nl;
  int expv [ML][NF];          // expected activated outputs per layer
  bit exp_sat;

  // Mechanism counters.
  int m_layers, m_xfer, m_idle_fma, m_relu_clamp, m_linear, m_sat, m_reconf, m_refused;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  function automatic int rna_sat(input longint a, output bit s);
    longint q, rem;
    q = a / 32; rem = a % 32;
    if (rem < 0) rem = -rem;
    if (rem >= 16) q = (a < 0) ? q - 1 : q + 1;
    s = 0;
    if (q > 127)  begin q = 127;  s = 1; end
    if (q < -128) begin q = -128; s = 1; end
    return int'(q);
  endfunction

  task automatic model();
    int x [MI];
    int base;
    base = 0; exp_sat = 0;
    for (int i = 0; i < sizes[0]; i++) x[i] = xin[i];
    for (int l = 0; l < nl; l++) begin
      for (int j = 0; j < sizes[l+1]; j++) begin
        longint acc;
        bit s;
        int y;
        acc = longint'(bs[j][l]) * 32;
        for (int i = 0; i < sizes[l]; i++) acc += longint'(x[i]) * longint'(wt[j][base + i]);
        y = rna_sat(acc, s);
        exp_sat |= s;
        if (afs[l] == AF_RELU && y < 0) begin y = 0; m_relu_clamp++; end
        expv[l][j] = y;
      end
      if (afs[l] == AF_LINEAR) m_linear++;
      if (sizes[l+1] < NF) m_idle_fma++;
      for (int j = 0; j < sizes[l+1]; j++) x[j] = expv[l][j];
      base += sizes[l];
    end
  endtask

  task automatic load(input ld_sel_e s, input int bank, input int addr, input int d);
    @(negedge clk);
    ld_we = 1; ld_sel = s; ld_bank = 6'(bank); ld_addr = 9'(addr); ld_data = 8'(d);
  endtask

  task automatic load_all(input int wrange, input int xrange);
    for (int j = 0; j < NF; j++) begin
      for (int a = 0; a < WD; a++) begin
        wt[j][a] = int'($urandom % wrange) - wrange/2;
        load(LD_WEIGHT, j, a, wt[j][a]);
      end
      for (int l = 0; l < ML; l++) begin
        bs[j][l] = int'($urandom % 32) - 16;
        load(LD_BIAS, j, l, bs[j][l]);
      end
    end
    for (int i = 0; i < MI; i++) begin
      xin[i] = int'($urandom % xrange);
      load(LD_INPUT, 0, i, xin[i]);
    end
    @(negedge clk);
    ld_we = 0;
  endtask

  task automatic cfg(input cfg_sel_e s, input int idx, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_idx = 3'(idx); cfg_data = 8'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic run(input string tag);
    int l, k, cyc, fma_cyc, first_af, exp_cyc, n_done_layers;
    fsm_state_e prev;
    model();
    exp_cyc = 0;
    for (int i = 0; i < nl; i++) exp_cyc += sizes[i] + sizes[i+1] + 6;
    exp_cyc += nl - 1;
    @(negedge clk);
    ann_init = 1;
    @(negedge clk);
    ann_init = 0;
    l = 0; k = 0; cyc = 1; fma_cyc = 0; first_af = -1; n_done_layers = 0; prev = layer_state;
    while (!ann_done && cyc < 5000) begin
      if (l == 0 && (layer_state == S_FMA || fma_cyc > 0)) fma_cyc++;
      if (af_valid) begin
        if (first_af < 0) first_af = fma_cyc;
        if (l < nl) chk(int'(af_out) == expv[l][k],
                        $sformatf("%s layer %0d word %0d: %0d exp %0d", tag, l, k, af_out, expv[l][k]));
        k++;
        if (k == sizes[l+1]) begin k = 0; l++; end
      end
      if (layer_state == S_AF) n_done_layers++;
      prev = layer_state;
      @(negedge clk);
      cyc++;
    end
    chk(l == nl && k == 0, $sformatf("%s streamed %0d layers", tag, l));
    // ann_done was set by the edge ending cycle cyc-1.
    chk(cyc - 1 == exp_cyc, $sformatf("%s ann_init to ann_done %0d edges exp %0d", tag, cyc - 1, exp_cyc));
    // af_valid is seen in the cycle after the AF register captured the word.
    chk(first_af - 1 == sizes[0] + 2, $sformatf("%s first activation in FMA cycle %0d exp %0d", tag, first_af - 1, sizes[0] + 2));
    for (int j = 0; j < sizes[nl]; j++) begin
      out_addr = 6'(j); #1;
      chk(int'(ann_out) == expv[nl-1][j], $sformatf("%s ANN_out[%0d] = %0d exp %0d", tag, j, ann_out, expv[nl-1][j]));
    end
    chk(sat_flag == exp_sat, $sformatf("%s sat_flag %0b exp %0b", tag, sat_flag, exp_sat));
    chk(!busy, "idle after run");
    if (sat_flag) m_sat++;
    m_layers += n_done_layers;
    m_xfer   += n_done_layers - 1;
    @(negedge clk);
  endtask

  initial begin
    rst = 1; ann_init = 0; ld_we = 0; ld_sel = LD_WEIGHT; ld_bank = 0; ld_addr = 0; ld_data = 0;
    cfg_we = 0; cfg_sel = CFG_NUM_LAYERS; cfg_idx = 0; cfg_data = 0; out_addr = 0;
    m_layers = 0; m_xfer = 0; m_idle_fma = 0; m_relu_clamp = 0; m_linear = 0; m_sat = 0;
    m_reconf = 0; m_refused = 0;
    sizes = '{196, 64, 32, 32, 10};
    afs = '{AF_RELU, AF_RELU, AF_RELU, AF_LINEAR};
    nl = 4;
    repeat (3) @(negedge clk);
    rst = 0;
    chk(!cfg_err, "reset configuration valid");

    // (1) The paper's network with moderate weights.
    load_all(12, 32);
    run("run1");
    // (2) Large weights: saturation.
    load_all(256, 128);
    run("run2");
    // (3) Reconfigure at run time to 150:48:24:6.
    load_all(16, 32);
    sizes = '{150, 48, 24, 6, 0};
    afs = '{AF_RELU, AF_LINEAR, AF_RELU, AF_LINEAR};
    nl = 3;
    cfg(CFG_NUM_LAYERS, 0, 3);
    for (int i = 0; i < 4; i++) cfg(CFG_SIZE, i, sizes[i]);
    for (int i = 0; i < 3; i++) cfg(CFG_AF, i, int'(afs[i]));
    chk(!cfg_err, "reconfiguration valid");
    m_reconf++;
    run("run3");
    // (4) Invalid configuration is refused.
    cfg(CFG_SIZE, 2, 70);
    chk(cfg_err, "cfg_err on 70 neurons");
    @(negedge clk); ann_init = 1; @(negedge clk); ann_init = 0;
    repeat (3) @(negedge clk);
    chk(!busy && layer_state == S_IDLE, "invalid configuration not run");
    if (cfg_err && !busy) m_refused++;
    // (5) Reset restores 196:64:32:32:10.
    rst = 1; @(negedge clk); rst = 0;
    sizes = '{196, 64, 32, 32, 10};
    afs = '{AF_RELU, AF_RELU, AF_RELU, AF_LINEAR};
    nl = 4;
    load_all(12, 32);
    run("run5");

    $display("mechanisms: layers=%0d transfers=%0d idle_fma_layers=%0d relu_clamps=%0d linear_layers=%0d saturated_runs=%0d reconfigurations=%0d refused=%0d",
             m_layers, m_xfer, m_idle_fma, m_relu_clamp, m_linear, m_sat, m_reconf, m_refused);
    chk(m_layers >= 2 * 4, "layer reuse happened");
    chk(m_xfer > 0, "transfer happened");
    chk(m_idle_fma > 0, "idle FMAs happened");
    chk(m_relu_clamp > 0, "ReLU clamp happened");
    chk(m_linear > 0, "linear layer happened");
    chk(m_sat > 0, "saturation happened");
    chk(m_reconf > 0, "reconfiguration happened");
    chk(m_refused > 0, "refused configuration happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
