// tb_enhancement_matrix_unit: checks the enhancement matrix unit at its
// default size (90 pixel rows of 64 maps).
//
// The testbench models the pixel rows as shift registers closed through the
// unit. Pixels are grouped nine to a mask group. It checks:
//   - an enhancement pass: the row contents return in order after the sum
//     phase, the coefficients equal the softmax of the group sums of
//     magnitudes (computed here with the same exp approximation, and also
//     compared with the real exponential to within 7 %), every coefficient
//     is at most 1 and they add up to 1, every activation is multiplied by
//     its group's coefficient, and the pass takes 2*NMAP + NPIX + 6 cycles;
//   - a feedback pass: coefficients and activations multiplied element-wise
//     by the fed-back coefficients, in NMAP + 3 cycles;
//   - dropout with p = 1/2: every activation is either zero or scaled by
//     coefficient * 2, and the dropped fraction is near one half.
// Softmax over mask groups, dropout inside the unit and feedback follow the
// concept; the exp approximation, LFSR dropout and cycle counts are this
// design's own.
module tb_enhancement_matrix_unit;
  import fpdnn_pkg::*;

  localparam int NPIX = 90, NMAP = 64, GW = 7;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start = 0, op_fb = 0, mag_sel = 1, drop_en = 0;
  logic [15:0]   drop_thr = 0;
  fx_t           keep_scale = FX_ONE;
  logic [GW-1:0] grp [NPIX];
  fx_t           fb [NPIX];
  logic          shift_en;
  fx_t           tail [NPIX];
  fx_t           head [NPIX];
  fx_t           coef [NPIX];
  logic          busy, done;

  enhancement_matrix_unit #(.NPIX(NPIX), .NMAP(NMAP)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .op_feedback(op_fb), .mag_sel(mag_sel),
    .drop_en(drop_en), .drop_thr(drop_thr), .keep_scale(keep_scale), .grp_i(grp),
    .fb_coef_i(fb), .shift_en_o(shift_en), .row_tail_i(tail), .row_head_o(head),
    .coef_o(coef), .busy_o(busy), .done_o(done)
  );

  // pixel rows
  fx_t rows [NPIX][NMAP];
  always_comb for (int p = 0; p < NPIX; p++) tail[p] = rows[p][NMAP-1];
  always @(posedge clk) if (shift_en) begin
    for (int p = 0; p < NPIX; p++) begin
      for (int m = NMAP - 1; m > 0; m--) rows[p][m] <= rows[p][m-1];
      rows[p][0] <= head[p];
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  localparam fx_t LOG2E = fx_t'(94548);
  function automatic fx_t exp_neg(fx_t x);
    fx_t t, f, m;
    int ip;
    t  = fx_mul(-x, LOG2E);
    ip = int'(t >>> FRAC_W);
    f  = t & 32'h0000_FFFF;
    m  = FX_ONE - (f >>> 1);
    return (ip >= 31) ? '0 : (m >>> ip);
  endfunction

  task automatic run_op(bit fbk, output int cycles);
    op_fb = fbk; start = 1;
    @(posedge clk); #1;
    start = 0;
    cycles = 1;
    while (!done) begin @(posedge clk); #1; cycles++; end
  endtask

  fx_t orig [NPIX][NMAP];
  fx_t ecoef [NPIX];

  initial begin
    int cyc;
    fx_t gs [NPIX];
    fx_t ex [NPIX];
    fx_t gmax, esum, recip, csum;
    int drops, total;
    for (int p = 0; p < NPIX; p++) begin
      grp[p] = GW'(p / 9);
      fb[p] = '0;
      for (int m = 0; m < NMAP; m++) rows[p][m] = fx_t'(int'($urandom_range(3000)) - 500);
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    orig = rows;

    // ---- enhancement pass
    for (int g = 0; g < NPIX; g++) gs[g] = '0;
    for (int p = 0; p < NPIX; p++) for (int m = 0; m < NMAP; m++) gs[p / 9] += fx_abs(orig[p][m]);
    gmax = '0;
    for (int g = 0; g < 10; g++) if (gs[g] > gmax) gmax = gs[g];
    esum = '0;
    for (int g = 0; g < NPIX; g++) begin
      ex[g] = (g < 10) ? exp_neg(gs[g] - gmax) : '0;
      esum += ex[g];
      if (g < 10) begin
        automatic real r = $exp(real'(gs[g] - gmax) / 65536.0) * 65536.0;
        check(real'(ex[g]) > r * 0.93 - 2 && real'(ex[g]) < r * 1.07 + 2, $sformatf("exp approx g=%0d %0d vs %f", g, ex[g], r));
      end
    end
    recip = fx_t'((64'd1 << 32) / 64'(esum));
    for (int g = 0; g < NPIX; g++) ecoef[g] = fx_mul(ex[g], recip);
    run_op(1'b0, cyc);
    check(cyc == 2 * NMAP + NPIX + 6, $sformatf("enhance took %0d cycles", cyc));
    csum = '0;
    for (int g = 0; g < NPIX; g++) begin
      check(coef[g] == ecoef[g], $sformatf("coef[%0d] %0d expected %0d", g, coef[g], ecoef[g]));
      check(coef[g] <= FX_ONE, "coefficient above 1");
      csum += coef[g];
    end
    check(csum > FX_ONE - 64 && csum <= FX_ONE, $sformatf("coefficients add up to %0d", csum));
    begin
      int bad = 0;
      for (int p = 0; p < NPIX; p++) for (int m = 0; m < NMAP; m++)
        if (rows[p][m] != fx_mul(orig[p][m], ecoef[p / 9])) bad++;
      check(bad == 0, $sformatf("%0d activations not enhanced", bad));
    end

    // ---- feedback pass
    orig = rows;
    for (int g = 0; g < NPIX; g++) fb[g] = fx_t'($urandom_range(65536));
    run_op(1'b1, cyc);
    check(cyc == NMAP + 3, $sformatf("feedback took %0d cycles", cyc));
    for (int g = 0; g < 10; g++)
      check(coef[g] == fx_mul(ecoef[g], fb[g]), $sformatf("fed-back coef[%0d]", g));
    begin
      int bad = 0;
      for (int p = 0; p < NPIX; p++) for (int m = 0; m < NMAP; m++)
        if (rows[p][m] != fx_mul(orig[p][m], fb[p / 9])) bad++;
      check(bad == 0, $sformatf("%0d activations not reinforced", bad));
    end

    // ---- dropout merged with enhancement (p = 1/2, keep scale 2)
    for (int p = 0; p < NPIX; p++) for (int m = 0; m < NMAP; m++)
      rows[p][m] = fx_t'(int'($urandom_range(3000)) + 1);
    orig = rows;
    drop_en = 1; drop_thr = 16'h8000; keep_scale = fx_t'(2 * 65536);
    run_op(1'b0, cyc);
    drops = 0; total = 0;
    begin
      int bad = 0;
      for (int p = 0; p < NPIX; p++) for (int m = 0; m < NMAP; m++) begin
        total++;
        if (rows[p][m] == 0) drops++;
        else if (rows[p][m] != fx_mul(orig[p][m], fx_mul(coef[p / 9], keep_scale))) bad++;
      end
      check(bad == 0, $sformatf("%0d kept activations wrongly scaled", bad));
    end
    check(drops > total * 35 / 100 && drops < total * 65 / 100, $sformatf("dropped %0d of %0d", drops, total));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
