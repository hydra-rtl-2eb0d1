// tb_layer_fsm: self-checking test of the per-layer sequencer at its default
// limits. A PISO counter is modelled here. For random layer sizes it checks
// the state order idle, initial, pre_FMA, FMA, PISO, AF, idle; one load_bias
// and one preload cycle; n_in acc_en cycles with x_idx = 0..n_in-1 and
// w_idx one ahead; the PISO load in cycle n_in+1 after the first FMA cycle;
// n_out shifts with the right out_idx; compute_done n_in+n_out+5 cycles after
// compute_init; and that reset in mid-layer returns to idle.
module tb_layer_fsm;
  import hydra_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, compute_init;
  logic [7:0] n_in, x_idx, w_idx;
  logic [6:0] n_out, piso_count, out_idx;
  fsm_state_e state;
  logic load_bias, preload, acc_en, piso_load, piso_shift, compute_done;

  layer_fsm #(.MAX_IN(196), .MAX_FMA(64)) dut (
    .clk, .rst, .compute_init, .n_in, .n_out, .piso_count, .state,
    .load_bias, .preload, .acc_en, .x_idx, .w_idx, .piso_load, .piso_shift,
    .out_idx, .compute_done);

  // PISO count model.
  always_ff @(posedge clk) begin
    if (rst) piso_count <= '0;
    else if (piso_load) piso_count <= n_out;
    else if (piso_shift && piso_count != 0) piso_count <= piso_count - 1'b1;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run_layer(input int ni, input int no);
    int cyc, n_acc, n_lb, n_pl, n_sh, first_fma, load_cyc, done_cyc, n_pisol;
    fsm_state_e prev;
    n_in = 8'(ni); n_out = 7'(no);
    @(negedge clk);
    compute_init = 1;
    @(negedge clk);
    compute_init = 0;
    cyc = 1; n_acc = 0; n_lb = 0; n_pl = 0; n_sh = 0; first_fma = -1; load_cyc = -1;
    done_cyc = -1; n_pisol = 0; prev = S_IDLE;
    chk(state == S_INITIAL, "idle -> initial on compute_init");
    while (done_cyc < 0 && cyc < 1000) begin
      // Allowed order of states.
      if (state != prev)
        chk((prev == S_IDLE && state == S_INITIAL) || (prev == S_INITIAL && state == S_PRE_FMA) ||
            (prev == S_PRE_FMA && state == S_FMA) || (prev == S_FMA && state == S_PISO) ||
            (prev == S_PISO && state == S_AF), $sformatf("transition %s -> %s", prev.name(), state.name()));
      prev = state;
      if (load_bias) begin n_lb++; chk(state == S_INITIAL, "load_bias in initial"); end
      if (preload) begin n_pl++; chk(w_idx == 0, "w_idx 0 in pre_FMA"); end
      if (acc_en) begin
        if (first_fma < 0) first_fma = cyc;
        chk(x_idx == 8'(n_acc) && w_idx == 8'(n_acc + 1), $sformatf("index %0d: x %0d w %0d", n_acc, x_idx, w_idx));
        n_acc++;
      end
      if (piso_load) begin load_cyc = cyc; n_pisol++; end
      if (piso_shift) n_sh++;
      if (compute_done) done_cyc = cyc;
      // out_idx is the shift index one cycle late.
      @(negedge clk);
      if (n_sh > 0 && state inside {S_PISO, S_AF} && !piso_load)
        chk(out_idx == 7'(n_sh - 1), $sformatf("out_idx %0d exp %0d", out_idx, n_sh - 1));
      cyc++;
    end
    chk(n_lb == 1 && n_pl == 1, "one load_bias and one preload");
    chk(n_acc == ni, $sformatf("acc cycles %0d exp %0d", n_acc, ni));
    chk(n_pisol == 1 && load_cyc - first_fma + 1 == ni + 1, $sformatf("PISO load in FMA-relative cycle %0d exp %0d", load_cyc - first_fma + 1, ni + 1));
    chk(n_sh == no, $sformatf("shifts %0d exp %0d", n_sh, no));
    chk(done_cyc == ni + no + 5, $sformatf("compute_done at %0d exp %0d", done_cyc, ni + no + 5));
    chk(state == S_IDLE, "back to idle");
  endtask

  initial begin
    rst = 1; compute_init = 0; n_in = 0; n_out = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    run_layer(196, 64);
    run_layer(64, 32);
    run_layer(32, 32);
    run_layer(32, 10);
    run_layer(1, 1);
    for (int t = 0; t < 10; t++) run_layer(1 + ($urandom % 196), 1 + ($urandom % 64));
    // Reset in the middle of FMA, then of PISO.
    n_in = 8'd50; n_out = 7'd20;
    @(negedge clk); compute_init = 1; @(negedge clk); compute_init = 0;
    repeat (20) @(negedge clk);
    chk(state == S_FMA, "in FMA");
    rst = 1; @(negedge clk); rst = 0;
    chk(state == S_IDLE, "rst=1 from FMA");
    @(negedge clk); compute_init = 1; @(negedge clk); compute_init = 0;
    repeat (60) @(negedge clk);
    chk(state == S_PISO, "in PISO");
    rst = 1; @(negedge clk); rst = 0;
    chk(state == S_IDLE, "rst=1 from PISO");
    run_layer(20, 5);
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
