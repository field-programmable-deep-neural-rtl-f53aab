// tb_tensor_element: checks the 5x5x1 multiply-accumulate element.
//
// Random weights are written; random windows are then streamed one per cycle
// (with gaps). Each result must equal the sum of the 25 products computed in
// the testbench and appear exactly one cycle after its window; the window and
// tag must reappear on the systolic output one cycle later. A zero-padded 3x3
// filter is checked, and in max-pool mode the result must be the largest
// window value under a non-zero weight.
// The element's function follows the concept; the 1-cycle latency and the
// max-pool rule checked here are this design's own.
module tb_tensor_element;
  import fpdnn_pkg::*;

  localparam int K = 5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       cfg_we = 0;
  logic [4:0] cfg_idx = 0;
  fx_t        cfg_w = 0;
  tensor_op_e op = TOP_MAC;
  logic       win_valid = 0;
  fx_t        win [K*K];
  info_t      tag = '0;
  logic       wv_o, rv_o;
  fx_t        win_o [K*K];
  info_t      wt_o, rt_o;
  fx_t        res_o;

  tensor_element #(.K(K)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_idx(cfg_idx), .cfg_w(cfg_w), .op(op),
    .win_valid_i(win_valid), .win_i(win), .win_tag_i(tag),
    .win_valid_o(wv_o), .win_o(win_o), .win_tag_o(wt_o),
    .res_valid_o(rv_o), .res_o(res_o), .res_tag_o(rt_o)
  );

  fx_t w [K*K];
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_weights();
    for (int i = 0; i < K*K; i++) begin
      cfg_we = 1; cfg_idx = 5'(i); cfg_w = w[i];
      @(posedge clk); #1;
    end
    cfg_we = 0;
  endtask

  task automatic one_window(int id, bit expect_max);
    fx_t exp_v, mx;
    bit any;
    for (int i = 0; i < K*K; i++) win[i] = fx_t'(int'($urandom_range(200000)) - 100000);
    exp_v = '0; mx = '0; any = 0;
    for (int i = 0; i < K*K; i++) begin
      exp_v += fx_mul(win[i], w[i]);
      if (w[i] != 0 && (!any || win[i] > mx)) begin mx = win[i]; any = 1; end
    end
    tag = '{src: ID_W'(id), dst: ID_W'(id + 1000)};
    win_valid = 1;
    @(posedge clk); #1;
    win_valid = 0;
    check(rv_o && wv_o, $sformatf("window %0d: valid not one cycle later", id));
    check(res_o == (expect_max ? mx : exp_v), $sformatf("window %0d: result %0d expected %0d", id, res_o, expect_max ? mx : exp_v));
    check(rt_o == tag && wt_o == tag, $sformatf("window %0d: tag", id));
    begin
      int bad = 0;
      for (int i = 0; i < K*K; i++) if (win_o[i] != win[i]) bad++;
      check(bad == 0, $sformatf("window %0d: systolic pass-through", id));
    end
    if ($urandom_range(1)) begin
      @(posedge clk); #1;
      check(!rv_o && !wv_o, "valid dropped after gap");
    end
  endtask

  initial begin
    for (int i = 0; i < K*K; i++) win[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < K*K; i++) w[i] = fx_t'(int'($urandom_range(131072)) - 65536);
    load_weights();
    for (int n = 0; n < 20; n++) one_window(n, 1'b0);
    // 3x3 filter as a zero-padded 5x5
    for (int i = 0; i < K*K; i++) begin
      automatic int r = i / K, c = i % K;
      w[i] = (r >= 1 && r <= 3 && c >= 1 && c <= 3) ? fx_t'(int'($urandom_range(131072)) - 65536) : '0;
    end
    load_weights();
    for (int n = 20; n < 30; n++) one_window(n, 1'b0);
    // max-pool: 2x2 mask
    for (int i = 0; i < K*K; i++) w[i] = (i == 0 || i == 1 || i == 5 || i == 6) ? FX_ONE : '0;
    load_weights();
    op = TOP_MAX;
    for (int n = 30; n < 40; n++) one_window(n, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
