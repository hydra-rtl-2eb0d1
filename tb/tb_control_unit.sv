// tb_control_unit: self-checking test of the network controller at its
// default limits. A layer responder here answers each compute_init with
// compute_done a size-dependent number of cycles later. Checks the reset
// configuration 196:64:32:32:10, the layer order with n_in, n_out, weight
// base, activation and FMA enable mask per layer, one transfer between
// layers, ANN done and busy, a run-time reconfiguration to another
// network, and that an invalid configuration raises cfg_err and is not run.
module tb_control_unit;
  import hydra_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, ann_init, cfg_we, layer_done, compute_init, xfer, ann_done, busy, cfg_err;
  cfg_sel_e cfg_sel;
  logic [2:0] cfg_idx;
  logic [7:0] cfg_data;
  logic [1:0] layer;
  logic [7:0] n_in;
  logic [6:0] n_out;
  logic [8:0] w_base;
  af_mode_e af_mode;
  logic [63:0] fma_en;

  control_unit #(.MAX_LAYERS(4), .MAX_FMA(64), .MAX_IN(196), .WDEPTH(324)) dut (
    .clk, .rst, .ann_init, .cfg_we, .cfg_sel, .cfg_idx, .cfg_data, .layer_done,
    .compute_init, .layer, .n_in, .n_out, .w_base, .af_mode, .fma_en, .xfer,
    .ann_done, .busy, .cfg_err);

  // Layer responder: compute_done n_in+n_out+5 cycles after compute_init.
  int remaining = -1;
  always_ff @(posedge clk) begin
    if (compute_init) remaining <= int'(n_in) + int'(n_out) + 4;
    else if (remaining > 0) remaining <= remaining - 1;
    else remaining <= -1;
  end
  assign layer_done = (remaining == 0);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic cfg(input cfg_sel_e s, input int idx, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_idx = 3'(idx); cfg_data = 8'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Run the network and compare the per-layer outputs with the expected list.
  task automatic run(input int nl, input int sz [5], input af_mode_e afs [4]);
    int l, base, n_x, cyc, exp_cyc;
    l = 0; base = 0; n_x = 0; cyc = 0; exp_cyc = 0;
    for (int k = 0; k < nl; k++) exp_cyc += sz[k] + sz[k+1] + 6;
    // ann_done rises sum(n_in+n_out+6) + (nl-1) edges after ann_init is
    // sampled and is first seen in the cycle after that.
    exp_cyc += nl;
    @(negedge clk);
    ann_init = 1;
    @(negedge clk);
    ann_init = 0;
    chk(busy && !ann_done, "busy after ann_init");
    cyc = 1;
    while (!ann_done && cyc < 2000) begin
      if (compute_init) begin
        chk(32'(layer) == l, $sformatf("layer %0d exp %0d", layer, l));
        chk(int'(n_in) == sz[l] && int'(n_out) == sz[l+1], $sformatf("layer %0d size %0d:%0d", l, n_in, n_out));
        chk(int'(w_base) == base, $sformatf("layer %0d w_base %0d exp %0d", l, w_base, base));
        chk(af_mode == afs[l], $sformatf("layer %0d af", l));
        chk(fma_en == (64'(1) << sz[l+1]) - 64'(1) || (sz[l+1] == 64 && fma_en == '1), "fma_en mask");
        base += sz[l];
        l++;
      end
      if (xfer) n_x++;
      @(negedge clk);
      cyc++;
    end
    chk(l == nl, $sformatf("layers run %0d exp %0d", l, nl));
    chk(n_x == nl - 1, $sformatf("transfers %0d exp %0d", n_x, nl - 1));
    chk(ann_done && !busy, "ann_done and idle");
    chk(cyc == exp_cyc, $sformatf("ann_init to ann_done %0d cycles exp %0d", cyc, exp_cyc));
    repeat (3) @(negedge clk);
    chk(ann_done, "ann_done holds");
  endtask

  initial begin
    int sz0 [5] = '{196, 64, 32, 32, 10};
    af_mode_e af0 [4] = '{AF_RELU, AF_RELU, AF_RELU, AF_LINEAR};
    int sz1 [5] = '{100, 40, 20, 7, 0};
    af_mode_e af1 [4] = '{AF_RELU, AF_LINEAR, AF_RELU, AF_LINEAR};
    rst = 1; ann_init = 0; cfg_we = 0; cfg_sel = CFG_NUM_LAYERS; cfg_idx = 0; cfg_data = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    chk(!cfg_err && !busy && !ann_done, "reset state");
    run(4, sz0, af0);
    run(4, sz0, af0);
    // Run-time reconfiguration: 100:40:20:7, three layers.
    cfg(CFG_NUM_LAYERS, 0, 3);
    for (int i = 0; i < 4; i++) cfg(CFG_SIZE, i, sz1[i]);
    for (int i = 0; i < 3; i++) cfg(CFG_AF, i, int'(af1[i]));
    chk(!cfg_err, "valid reconfiguration");
    run(3, sz1, af1);
    // Invalid: 65 neurons.
    cfg(CFG_SIZE, 1, 65);
    chk(cfg_err, "cfg_err on 65 neurons");
    @(negedge clk); ann_init = 1; @(negedge clk); ann_init = 0;
    chk(!busy, "invalid configuration not started");
    cfg(CFG_SIZE, 1, 40);
    chk(!cfg_err, "cfg_err clears");
    // Invalid: first layer wider than the input buffer.
    cfg(CFG_SIZE, 0, 197);
    chk(cfg_err, "cfg_err on 197 inputs");
    cfg(CFG_SIZE, 0, 100);
    // Invalid: zero layers.
    cfg(CFG_NUM_LAYERS, 0, 0);
    chk(cfg_err, "cfg_err on zero layers");
    // Reset restores the paper's configuration.
    rst = 1; @(negedge clk); rst = 0;
    run(4, sz0, af0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
