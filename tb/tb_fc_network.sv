// tb_fc_network: end-to-end test of the 400-25-10 fully connected network on
// the systolic transport (fc_network with its fc_layer / fc_node /
// systolic_emitter / systolic_dest_chain).
//
// Random weights, biases, pixels and a one-hot label are generated with
// $urandom. A reference model in the testbench computes, in the same Q16.16
// arithmetic, the forward pass, the deltas and the updated weights. The test
//   1. runs an inference and compares the 10 outputs; F must take 231 pulses;
//   2. runs a training step (F, B, U), compares every weight and bias after
//      the update, and checks 231 / 18 / 213 pulses and the F->B->U order;
//   3. checks that the hidden nodes' transposed weight copies still equal the
//      output layer's weights;
//   4. runs an inference with hidden node 3 pruned and compares;
//   5. trains a few more steps and checks that the squared error falls.
// The layer sizes and 231 / 18 / 213 pulses are the concept's worked
// example; the learning rate, loss and bias are this design's own.
module tb_fc_network;
  import fpdnn_pkg::*;

  localparam int NI = 400, NH = 25, NO = 10;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            cfg_we = 0, cfg_layer = 0, cfg_bias = 0;
  logic [ID_W-1:0] cfg_node = 0, cfg_idx = 0;
  fx_t             cfg_data = 0;
  logic            rd_layer = 0;
  logic [ID_W-1:0] rd_node = 0, rd_idx = 0;
  fx_t             rd_w;
  fx_t             pixels [NI];
  fx_t             labels [NO];
  logic            hid_pruned [NH];
  logic            start_infer = 0, start_train = 0;
  logic            busy, done;
  sfe_state_e      state;
  fx_t             h [NO];
  logic [15:0]     pf, pb, pu;
  fx_t             lr = fx_t'(655);   // 0.01

  fc_network #(.N_IN(NI), .N_HID(NH), .N_OUT(NO)) dut (
    .clk(clk), .rst_n(rst_n), .act_hid(ACT_RELU), .act_out(ACT_LINEAR), .lr(lr),
    .cfg_we(cfg_we), .cfg_layer(cfg_layer), .cfg_bias(cfg_bias), .cfg_node(cfg_node),
    .cfg_idx(cfg_idx), .cfg_data(cfg_data), .rd_layer(rd_layer), .rd_node(rd_node),
    .rd_idx(rd_idx), .rd_w(rd_w), .pixels(pixels), .labels(labels),
    .hid_pruned(hid_pruned), .start_infer(start_infer), .start_train(start_train),
    .busy_o(busy), .done_o(done), .state_o(state), .h_o(h),
    .pulses_f_o(pf), .pulses_b_o(pb), .pulses_u_o(pu)
  );

  // reference model state
  fx_t w1 [NH][NI];
  fx_t b1 [NH];
  fx_t w2 [NO][NH];
  fx_t b2 [NO];
  fx_t z1 [NH], a1 [NH], z2 [NO], d2 [NO], d1 [NH];

  int checks = 0, failures = 0;
  int n_f = 0, n_b = 0, n_u = 0;
  sfe_state_e prev_state = SFE_IDLE;
  int order_err = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic fx_t rnd(int span);
    return fx_t'(int'($urandom_range(2 * span)) - span);
  endfunction

  task automatic ref_forward(bit prune3);
    for (int n = 0; n < NH; n++) begin
      z1[n] = b1[n];
      for (int i = 0; i < NI; i++) z1[n] += fx_mul(w1[n][i], pixels[i]);
      a1[n] = (z1[n] < 0) ? '0 : z1[n];
      if (prune3 && n == 3) a1[n] = '0;
    end
    for (int o = 0; o < NO; o++) begin
      z2[o] = b2[o];
      for (int n = 0; n < NH; n++) z2[o] += fx_mul(w2[o][n], a1[n]);
    end
  endtask

  task automatic ref_train();
    fx_t acc;
    ref_forward(1'b0);
    for (int o = 0; o < NO; o++) d2[o] = z2[o] - labels[o];
    for (int n = 0; n < NH; n++) begin
      acc = '0;
      for (int o = 0; o < NO; o++) acc += fx_mul(w2[o][n], d2[o]);
      d1[n] = (z1[n] <= 0) ? '0 : acc;
    end
    for (int n = 0; n < NH; n++) begin
      for (int i = 0; i < NI; i++) w1[n][i] -= fx_mul(lr, fx_mul(d1[n], pixels[i]));
      b1[n] -= fx_mul(lr, d1[n]);
    end
    for (int o = 0; o < NO; o++) begin
      for (int n = 0; n < NH; n++) w2[o][n] -= fx_mul(lr, fx_mul(d2[o], a1[n]));
      b2[o] -= fx_mul(lr, d2[o]);
    end
  endtask

  task automatic cfg_write(bit layer, bit bias, int node, int idx, fx_t v);
    cfg_we = 1; cfg_layer = layer; cfg_bias = bias;
    cfg_node = ID_W'(node); cfg_idx = ID_W'(idx); cfg_data = v;
    @(posedge clk);
    #1 cfg_we = 0;
  endtask

  task automatic run(bit train);
    if (train) start_train = 1; else start_infer = 1;
    @(posedge clk);
    #1 start_train = 0; start_infer = 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    #1;
  endtask

  function automatic longint sq_err();
    longint e = 0;
    for (int o = 0; o < NO; o++) e += longint'(h[o] - labels[o]) * longint'(h[o] - labels[o]);
    return e;
  endfunction

  // count state changes and check the F -> B -> U order
  always @(posedge clk) if (rst_n) begin
    if (state != prev_state) begin
      if (state == SFE_F) n_f++;
      if (state == SFE_B) begin n_b++; if (prev_state != SFE_F) order_err++; end
      if (state == SFE_U) begin n_u++; if (prev_state != SFE_B) order_err++; end
    end
    prev_state <= state;
  end

  initial begin
    longint e0, e1;
    int bad;
    for (int n = 0; n < NH; n++) hid_pruned[n] = 1'b0;
    for (int i = 0; i < NI; i++) pixels[i] = fx_t'($urandom_range(65536));
    for (int o = 0; o < NO; o++) labels[o] = (o == 7) ? FX_ONE : '0;
    for (int n = 0; n < NH; n++) begin
      b1[n] = rnd(3000);
      for (int i = 0; i < NI; i++) w1[n][i] = rnd(600);
    end
    for (int o = 0; o < NO; o++) begin
      b2[o] = rnd(3000);
      for (int n = 0; n < NH; n++) w2[o][n] = rnd(3000);
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    #1;
    for (int n = 0; n < NH; n++) begin
      cfg_write(0, 1, n, 0, b1[n]);
      for (int i = 0; i < NI; i++) cfg_write(0, 0, n, i, w1[n][i]);
    end
    for (int o = 0; o < NO; o++) begin
      cfg_write(1, 1, o, 0, b2[o]);
      for (int n = 0; n < NH; n++) cfg_write(1, 0, o, n, w2[o][n]);
    end

    // 1. inference
    run(1'b0);
    ref_forward(1'b0);
    for (int o = 0; o < NO; o++) check(h[o] == z2[o], $sformatf("infer h[%0d] %0d != %0d", o, h[o], z2[o]));
    check(pf == 231, $sformatf("F pulses %0d, expected 231", pf));

    // 2. one training step
    run(1'b1);
    ref_train();
    check(pf == 231, $sformatf("train F pulses %0d, expected 231", pf));
    check(pb == 18,  $sformatf("B pulses %0d, expected 18", pb));
    check(pu == 213, $sformatf("U pulses %0d, expected 213", pu));
    check(order_err == 0 && n_b == 1 && n_u == 1, "F->B->U order");
    bad = 0;
    rd_layer = 0;
    for (int n = 0; n < NH; n++) for (int i = 0; i <= NI; i++) begin
      rd_node = ID_W'(n); rd_idx = ID_W'(i); #1;
      if (rd_w != ((i == NI) ? b1[n] : w1[n][i])) bad++;
    end
    check(bad == 0, $sformatf("%0d hidden weights differ after update", bad));
    bad = 0;
    rd_layer = 1;
    for (int o = 0; o < NO; o++) for (int n = 0; n <= NH; n++) begin
      rd_node = ID_W'(o); rd_idx = ID_W'(n); #1;
      if (rd_w != ((n == NH) ? b2[o] : w2[o][n])) bad++;
    end
    check(bad == 0, $sformatf("%0d output weights differ after update", bad));

    // 3. transposed copies
    bad = 0;
    for (int o = 0; o < NO; o++) for (int n = 0; n < NH; n++)
      if (dut.u_hid.wt_o[n][o] != dut.u_out.w_o[o][n]) bad++;
    check(bad == 0, $sformatf("%0d transposed weights out of step", bad));

    // 4. pruned hidden node
    hid_pruned[3] = 1'b1;
    run(1'b0);
    ref_forward(1'b1);
    for (int o = 0; o < NO; o++) check(h[o] == z2[o], $sformatf("pruned h[%0d] %0d != %0d", o, h[o], z2[o]));
    hid_pruned[3] = 1'b0;

    // 5. learning: the error falls over a few steps
    run(1'b0);
    e0 = sq_err();
    repeat (4) run(1'b1);
    run(1'b0);
    e1 = sq_err();
    check(e1 < e0, $sformatf("squared error did not fall: %0d -> %0d", e0, e1));
    check(n_f >= 8 && n_b == 5 && n_u == 5, $sformatf("state visits F=%0d B=%0d U=%0d", n_f, n_b, n_u));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
