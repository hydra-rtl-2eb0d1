// tb_mnist_workload: the 196:64:32:32:10 MNIST-sized workload on the
// default hydra_top, run as a classifier would use it. The weights and
// biases are loaded once; then NIMG input images of 196 pixels (about one
// pixel in five set to 31/32, the rest 0, standing in for the strokes of a
// 14x14 digit; the weights are random, not trained) are written and
// classified one after another without reloading the weights. For every image the ten ANN_out scores
// and the predicted class (argmax of the scores, the class a softmax would
// pick) are compared with a fixed-point reference model computed here, and
// each inference must take 489 cycles from ann_init to ann_done.
module tb_mnist_workload;
  import hydra_pkg::*;
  localparam int NF = 64, MI = 196, ML = 4, WD = 324, NIMG = 20;
  localparam int SZ [5] = '{196, 64, 32, 32, 10};

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

  int wt [NF][WD];
  int bs [NF][ML];
  int xin [MI];
  int scores [10];
  int class_hist [10];

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  function automatic int rna_sat(input longint a);
    longint q, rem;
    q = a / 32; rem = a % 32;
    if (rem < 0) rem = -rem;
    if (rem >= 16) q = (a < 0) ? q - 1 : q + 1;
    if (q > 127)  q = 127;
    if (q < -128) q = -128;
    return int'(q);
  endfunction

  task automatic model();
    int x [MI];
    int y [NF];
    int base;
    base = 0;
    for (int i = 0; i < MI; i++) x[i] = xin[i];
    for (int l = 0; l < ML; l++) begin
      for (int j = 0; j < SZ[l+1]; j++) begin
        longint acc;
        acc = longint'(bs[j][l]) * 32;
        for (int i = 0; i < SZ[l]; i++) acc += longint'(x[i]) * longint'(wt[j][base + i]);
        y[j] = rna_sat(acc);
        if (l < ML - 1 && y[j] < 0) y[j] = 0;      // ReLU on hidden layers
      end
      for (int j = 0; j < SZ[l+1]; j++) x[j] = y[j];
      base += SZ[l];
    end
    for (int j = 0; j < 10; j++) scores[j] = x[j];
  endtask

  function automatic int argmax(input int v [10]);
    int m;
    m = 0;
    for (int j = 1; j < 10; j++) if (v[j] > v[m]) m = j;
    return m;
  endfunction

  task automatic load(input ld_sel_e s, input int bank, input int addr, input int d);
    @(negedge clk);
    ld_we = 1; ld_sel = s; ld_bank = 6'(bank); ld_addr = 9'(addr); ld_data = 8'(d);
  endtask

  initial begin
    rst = 1; ann_init = 0; ld_we = 0; ld_sel = LD_WEIGHT; ld_bank = 0; ld_addr = 0; ld_data = 0;
    cfg_we = 0; cfg_sel = CFG_NUM_LAYERS; cfg_idx = 0; cfg_data = 0; out_addr = 0;
    foreach (class_hist[i]) class_hist[i] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    // Weights once: uniform in [-0.5, 0.5), biases in [-1/16, 1/16).
    for (int j = 0; j < NF; j++) begin
      for (int a = 0; a < WD; a++) begin
        wt[j][a] = int'($urandom % 32) - 16;
        load(LD_WEIGHT, j, a, wt[j][a]);
      end
      for (int l = 0; l < ML; l++) begin
        bs[j][l] = int'($urandom % 4) - 2;
        load(LD_BIAS, j, l, bs[j][l]);
      end
    end
    for (int img = 0; img < NIMG; img++) begin
      int cyc, got [10];
      for (int i = 0; i < MI; i++) begin
        xin[i] = ($urandom % 5 == 0) ? 31 : 0;   // sparse binary strokes
        load(LD_INPUT, 0, i, xin[i]);
      end
      @(negedge clk);
      ld_we = 0;
      model();
      ann_init = 1;
      @(negedge clk);
      ann_init = 0;
      cyc = 1;
      while (!ann_done && cyc < 2000) begin @(negedge clk); cyc++; end
      chk(cyc - 1 == 489, $sformatf("image %0d: %0d cycles exp 489", img, cyc - 1));
      for (int j = 0; j < 10; j++) begin
        out_addr = 6'(j); #1;
        got[j] = int'(ann_out);
        chk(got[j] == scores[j], $sformatf("image %0d score %0d: %0d exp %0d", img, j, got[j], scores[j]));
      end
      chk(argmax(got) == argmax(scores), $sformatf("image %0d class %0d exp %0d", img, argmax(got), argmax(scores)));
      class_hist[argmax(got)]++;
      @(negedge clk);
    end
    $display("classes predicted: %p", class_hist);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
