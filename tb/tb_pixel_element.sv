// tb_pixel_element: checks one pixel element.
//
// Random pre-activations are written under ReLU and linear non-linearities
// and the stored z and a compared with g(z); back-propagated sums must give
// acc * g'(z); shifting must replace a; during validation (cnt_en) writes
// with |a| <= threshold must be counted, and once the count reaches the limit
// the element must read zero and report pruned, until prune_clr.
// Storing z, a and delta follows the concept; the pruning counter rule is
// this design's own.
module tb_pixel_element;
  import fpdnn_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  act_e        act = ACT_RELU;
  logic        wr_valid = 0, bp_valid = 0, shift_en = 0, cnt_en = 0, prune_clr = 0;
  fx_t         wr_z = 0, bp_acc = 0, shift_i = 0, prune_thr = 0;
  logic [15:0] prune_limit = 0;
  fx_t         a_o, z_o, delta_o;
  logic        pruned_o;
  logic [15:0] zc;

  pixel_element #(.CNT_W(16)) dut (
    .clk(clk), .rst_n(rst_n), .act(act), .wr_valid(wr_valid), .wr_z(wr_z),
    .bp_valid(bp_valid), .bp_acc(bp_acc), .shift_en(shift_en), .shift_i(shift_i),
    .cnt_en(cnt_en), .prune_thr(prune_thr), .prune_limit(prune_limit), .prune_clr(prune_clr),
    .a_o(a_o), .z_o(z_o), .delta_o(delta_o), .pruned_o(pruned_o), .zero_cnt_o(zc)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(fx_t z);
    wr_z = z; wr_valid = 1;
    @(posedge clk); #1;
    wr_valid = 0;
  endtask

  initial begin
    int near;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(a_o == 0 && z_o == 0 && !pruned_o && zc == 0, "reset state");
    for (int n = 0; n < 40; n++) begin
      automatic fx_t z = fx_t'(int'($urandom_range(400000)) - 200000);
      automatic fx_t acc = fx_t'(int'($urandom_range(400000)) - 200000);
      act = (n % 2) ? ACT_LINEAR : ACT_RELU;
      wr(z);
      check(z_o == z, "z stored");
      check(a_o == ((act == ACT_RELU && z < 0) ? fx_t'(0) : z), $sformatf("a for z=%0d act=%0d", z, act));
      bp_acc = acc; bp_valid = 1;
      @(posedge clk); #1;
      bp_valid = 0;
      check(delta_o == ((act == ACT_RELU && z <= 0) ? fx_t'(0) : acc), "delta = acc * g'(z)");
    end
    // shift
    shift_i = fx_t'(12345); shift_en = 1;
    @(posedge clk); #1;
    shift_en = 0;
    check(a_o == fx_t'(12345), "shift replaces a");
    // pruning count
    act = ACT_RELU;
    prune_thr = fx_t'(1000);
    prune_limit = 16'd5;
    cnt_en = 1;
    near = 0;
    for (int n = 0; n < 12 && near < 5; n++) begin
      automatic fx_t z = (n % 3 == 0) ? fx_t'(50000) : fx_t'(int'($urandom_range(1800)) - 900);
      if (((z < 0) ? fx_t'(0) : z) <= 1000) near++;
      wr(z);
      check(zc == 16'(near), $sformatf("zero count %0d expected %0d", zc, near));
    end
    @(posedge clk); #1;
    check(pruned_o, "pruned after limit reached");
    wr(fx_t'(70000));
    check(a_o == 0, "pruned element reads zero");
    bp_acc = fx_t'(999); bp_valid = 1;
    @(posedge clk); #1;
    bp_valid = 0;
    check(delta_o == 0, "pruned element back-propagates zero");
    prune_clr = 1;
    @(posedge clk); #1;
    prune_clr = 0;
    cnt_en = 0;
    check(!pruned_o && zc == 0, "prune_clr");
    wr(fx_t'(70000));
    check(a_o == fx_t'(70000), "unpruned element works again");
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
