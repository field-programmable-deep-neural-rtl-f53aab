// tb_fc_node: checks one fully connected node through forward, backward and
// update, with a reference model in the same Q16.16 arithmetic.
//
// A hidden node (400 inputs, 10 next-layer nodes, ReLU) gets random weights,
// transposed weights and bias. Then:
//   - F: the 400 activations arrive as tagged frames, two per cycle, in a
//     random order, mixed with invalid frames and frames whose tag is out of
//     range; z must equal bias + sum w[i] * a[i] and a = ReLU(z);
//   - B: the 10 deltas arrive as tagged frames; delta must equal
//     (sum wt[j] * d[j]) * g'(z);
//   - U: the activations pass again; every w[i] must become
//     w[i] - lr * delta * a[i]; u_local must update the bias and every
//     transposed weight wt[j] - lr * d[j] * a.
// An output node (25 inputs) must form delta = a - label.
// The tag-paired sums follow the concept; the bias, the transposed copy and
// delta = a - label are this design's own.
module tb_fc_node;
  import fpdnn_pkg::*;

  localparam int NI = 400, NN = 10, NO_IN = 25;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  sfe_state_e      state = SFE_IDLE;
  fx_t             lr = fx_t'(3277);   // 0.05
  logic            we_w = 0, we_b = 0, we_t = 0;
  logic [ID_W-1:0] cidx = 0;
  fx_t             cdata = 0;
  logic            clr_f = 0, fin_f = 0, clr_b = 0, fin_b = 0, u_local = 0;
  fx_t             label = 0;
  frame_t          fa = FRAME_IDLE, fb = FRAME_IDLE, ba = FRAME_IDLE, bb = FRAME_IDLE;
  fx_t             z, a, delta, bias;
  fx_t             w_o [NI];
  fx_t             wt_o [NN];

  fc_node #(.N_IN(NI), .N_NEXT(NN), .IS_OUT(1'b0)) dut (
    .clk(clk), .rst_n(rst_n), .act(ACT_RELU), .state(state), .lr(lr),
    .cfg_we_w(we_w), .cfg_we_b(we_b), .cfg_we_t(we_t), .cfg_idx(cidx), .cfg_data(cdata),
    .clr_f(clr_f), .fin_f(fin_f), .clr_b(clr_b), .fin_b(fin_b), .u_local(u_local), .label(label),
    .fa(fa), .fb(fb), .ba(ba), .bb(bb),
    .z_o(z), .a_o(a), .delta_o(delta), .w_o(w_o), .wt_o(wt_o), .bias_o(bias)
  );

  // output node sharing the control signals
  logic   o_we_w = 0, o_we_b = 0;
  fx_t    o_z, o_a, o_delta, o_bias;
  fx_t    o_w [NO_IN];
  fx_t    o_wt [1];
  fc_node #(.N_IN(NO_IN), .N_NEXT(1), .IS_OUT(1'b1)) dut_out (
    .clk(clk), .rst_n(rst_n), .act(ACT_LINEAR), .state(state), .lr(lr),
    .cfg_we_w(o_we_w), .cfg_we_b(o_we_b), .cfg_we_t(1'b0), .cfg_idx(cidx), .cfg_data(cdata),
    .clr_f(clr_f), .fin_f(fin_f), .clr_b(clr_b), .fin_b(fin_b), .u_local(1'b0), .label(label),
    .fa(fa), .fb(fb), .ba(FRAME_IDLE), .bb(FRAME_IDLE),
    .z_o(o_z), .a_o(o_a), .delta_o(o_delta), .w_o(o_w), .wt_o(o_wt), .bias_o(o_bias)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic fx_t rnd(int span);
    return fx_t'(int'($urandom_range(2 * span)) - span);
  endfunction

  function automatic frame_t mk(int src, fx_t v, bit valid);
    frame_t f;
    f.data = v;
    f.info = '{src: ID_W'(src), dst: '0};
    f.ctrl = '{valid: valid, state: SFE_F, pruned: 1'b0};
    return f;
  endfunction

  fx_t w [NI], wt [NN], b, x [NI], d [NN], ow [NO_IN], ob;
  int  order [NI];

  task automatic pulse(ref logic s);
    s = 1; @(posedge clk); #1; s = 0;
  endtask

  // stream the activations two per cycle in a random order, with bubbles
  task automatic stream_x();
    int k = 0;
    while (k < NI) begin
      fa = mk(order[k], x[order[k]], 1'b1); k++;
      if (k < NI && $urandom_range(3) != 0) begin fb = mk(order[k], x[order[k]], 1'b1); k++; end
      else fb = mk(NI + 5, fx_t'(99999), 1'b1);                       // out of range
      @(posedge clk); #1;
      fa = mk($urandom_range(NI - 1), fx_t'(77777), 1'b0);          // invalid
      fb = FRAME_IDLE;
      if ($urandom_range(1)) begin @(posedge clk); #1; end
    end
    fa = FRAME_IDLE; fb = FRAME_IDLE;
  endtask

  initial begin
    fx_t ez, ea, acc, ed, oz;
    int bad;
    for (int i = 0; i < NI; i++) begin
      w[i] = rnd(3000); x[i] = fx_t'($urandom_range(65536)); order[i] = i;
    end
    for (int j = 0; j < NN; j++) begin wt[j] = rnd(30000); d[j] = rnd(30000); end
    b = fx_t'(20000);
    for (int i = 0; i < NO_IN; i++) ow[i] = rnd(3000);
    ob = rnd(3000);
    order.shuffle();
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NI; i++) begin
      we_w = 1; cidx = ID_W'(i); cdata = w[i]; o_we_w = (i < NO_IN);
      @(posedge clk); #1;
    end
    we_w = 0; o_we_w = 0;
    for (int i = 0; i < NO_IN; i++) ow[i] = w[i];
    for (int j = 0; j < NN; j++) begin
      we_t = 1; cidx = ID_W'(j); cdata = wt[j];
      @(posedge clk); #1;
    end
    we_t = 0;
    we_b = 1; o_we_b = 1; cdata = b;
    @(posedge clk); #1;
    we_b = 0; o_we_b = 0;
    ob = b;

    // F
    state = SFE_F;
    pulse(clr_f);
    stream_x();
    pulse(fin_f);
    ez = b;
    for (int i = 0; i < NI; i++) ez += fx_mul(w[i], x[i]);
    ea = (ez < 0) ? fx_t'(0) : ez;
    oz = ob;
    for (int i = 0; i < NO_IN; i++) oz += fx_mul(ow[i], x[i]);
    check(z == ez, $sformatf("hidden z %0d expected %0d", z, ez));
    check(a == ea, "hidden a = ReLU(z)");
    check(o_z == oz && o_a == oz, $sformatf("output z %0d expected %0d", o_z, oz));

    // B
    state = SFE_B;
    label = fx_t'(40000);
    pulse(clr_b);
    for (int j = 0; j < NN; j += 2) begin
      ba = mk(j, d[j], 1'b1); bb = mk(j + 1, d[j + 1], 1'b1);
      @(posedge clk); #1;
    end
    ba = FRAME_IDLE; bb = FRAME_IDLE;
    pulse(fin_b);
    acc = '0;
    for (int j = 0; j < NN; j++) acc += fx_mul(wt[j], d[j]);
    ed = (ez <= 0) ? fx_t'(0) : acc;
    check(delta == ed, $sformatf("hidden delta %0d expected %0d", delta, ed));
    check(o_delta == oz - label, "output delta = a - label");

    // U
    state = SFE_U;
    order.shuffle();
    stream_x();
    pulse(u_local);
    state = SFE_IDLE;
    bad = 0;
    for (int i = 0; i < NI; i++) if (w_o[i] != w[i] - fx_mul(lr, fx_mul(ed, x[i]))) bad++;
    check(bad == 0, $sformatf("%0d weights wrongly updated", bad));
    check(bias == b - fx_mul(lr, ed), "bias update");
    bad = 0;
    for (int j = 0; j < NN; j++) if (wt_o[j] != wt[j] - fx_mul(lr, fx_mul(d[j], ea))) bad++;
    check(bad == 0, $sformatf("%0d transposed weights wrongly updated", bad));
    check(ed != 0 && ea != 0, "test exercised a live node");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
