// tb_systolic_transfer: checks the layer-to-layer systolic transport
// (systolic_emitter feeding systolic_dest_chain) for the two transfers of the
// 400-25-10 network: 400 -> 25 and 25 -> 10 nodes.
//
// For each pair the testbench loads distinct values, starts the emitter and,
// every cycle, records which source frames each destination node sees. It
// checks that every node sees every source frame exactly once with the right
// data and tag, and that the transfer occupies exactly
// ceil(N_src/2) + ceil(N_dst/2) cycles (213 and 18 pulses).
// The pulse counts 213 and 18 are the concept's numbers for these layer
// sizes; the lane and tag layout are this design's own.
module tb_systolic_transfer;
  import fpdnn_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  logic go = 1'b0;

  for (genvar g = 0; g < 2; g++) begin : g_pair
    localparam int unsigned NS = (g == 0) ? 400 : 25;
    localparam int unsigned ND = (g == 0) ? 25 : 10;

    fx_t    ld [NS];
    logic   pr [NS];
    frame_t a, b;
    logic   busy, active;
    frame_t la [ND];
    frame_t lb [ND];
    logic   load = 1'b0, start = 1'b0;
    int     seen [ND][NS];
    int     bad_data = 0;
    int     pulses = 0;

    for (genvar i = 0; i < NS; i++) begin : g_ld
      assign ld[i] = fx_t'(i * 3 + 7 + g);
      assign pr[i] = 1'b0;
    end

    systolic_emitter #(.N(NS)) u_em (
      .clk(clk), .rst_n(rst_n), .load(load), .ld_data(ld), .ld_pruned(pr),
      .state(SFE_F), .start(start), .a_o(a), .b_o(b), .busy_o(busy)
    );
    systolic_dest_chain #(.N(ND)) u_dc (
      .clk(clk), .rst_n(rst_n), .a_i(a), .b_i(b),
      .lane_a_o(la), .lane_b_o(lb), .active_o(active)
    );

    always @(posedge clk) begin
      if (rst_n && (busy || active)) pulses++;
      if (rst_n) for (int p = 0; p < ND; p++) begin
        if (la[p].ctrl.valid) begin
          seen[p][la[p].info.src]++;
          if (la[p].data != fx_t'(la[p].info.src * 3 + 7 + g)) bad_data++;
        end
        if (lb[p].ctrl.valid) begin
          seen[p][lb[p].info.src]++;
          if (lb[p].data != fx_t'(lb[p].info.src * 3 + 7 + g)) bad_data++;
        end
      end
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int p = 0; p < 25; p++) for (int i = 0; i < 400; i++) g_pair[0].seen[p][i] = 0;
    for (int p = 0; p < 10; p++) for (int i = 0; i < 25; i++)  g_pair[1].seen[p][i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    g_pair[0].load <= 1'b1; g_pair[1].load <= 1'b1;
    @(posedge clk);
    g_pair[0].load <= 1'b0; g_pair[1].load <= 1'b0;
    g_pair[0].start <= 1'b1; g_pair[1].start <= 1'b1;
    @(posedge clk);
    g_pair[0].start <= 1'b0; g_pair[1].start <= 1'b0;
    repeat (260) @(posedge clk);
    begin
      int bad0 = 0, bad1 = 0;
      for (int p = 0; p < 25; p++) for (int i = 0; i < 400; i++) if (g_pair[0].seen[p][i] != 1) bad0++;
      for (int p = 0; p < 10; p++) for (int i = 0; i < 25; i++)  if (g_pair[1].seen[p][i] != 1) bad1++;
      check(bad0 == 0, $sformatf("400->25: %0d (node,source) pairs not seen exactly once", bad0));
      check(bad1 == 0, $sformatf("25->10: %0d (node,source) pairs not seen exactly once", bad1));
    end
    check(g_pair[0].bad_data == 0, "400->25 data/tag mismatch");
    check(g_pair[1].bad_data == 0, "25->10 data/tag mismatch");
    check(g_pair[0].pulses == 213, $sformatf("400->25 took %0d pulses, expected 200+13", g_pair[0].pulses));
    check(g_pair[1].pulses == 18,  $sformatf("25->10 took %0d pulses, expected 13+5", g_pair[1].pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
