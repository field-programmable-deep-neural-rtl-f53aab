// tb_pixel_array_field: checks the pixel array field at its default size
// (90 pixels x 64 maps, with its enhancement matrix unit).
//
// The checks:
//   - tag routing: random results presented on the column inputs land in
//     the element named by (tag destination - pix_base, column), one cycle
//     later (each written element and as many random others are
//     read back), with the ReLU applied; a tag outside the window is ignored;
//   - source select: with src_sel set, the adjacent tile's inputs are taken
//     and the own inputs ignored;
//   - back-propagation write: delta = acc * g'(z) in the addressed element
//     only;
//   - an enhancement pass over the field (pixels in two mask groups): the
//     coefficients add up to 1 and every sampled activation equals its old
//     value times its group's coefficient;
//   - pruning: with a limit of 1 an element that receives a near-zero value
//     during validation reads as pruned and then reads zero, its neighbour
//     does not.
// Tag routing and the unit at the row ends follow the concept; pix_base,
// src_sel and the read port are this design's own.
module tb_pixel_array_field;
  import fpdnn_pkg::*;

  localparam int NPIX = 90, NMAP = 64, PW = 7, MW = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  act_e            act = ACT_RELU;
  logic [ID_W-1:0] pix_base = 16'd200;
  logic            src_sel = 0;
  logic [PW-1:0]   grp [NPIX];
  fx_t             prune_thr = 0;
  logic [15:0]     prune_limit = 0;
  logic            prune_clr = 0, cnt_en = 0;
  logic            cv [NMAP], av [NMAP];
  fx_t             cs [NMAP], as_ [NMAP];
  info_t           ct [NMAP], at [NMAP];
  logic            bp_valid = 0;
  logic [PW-1:0]   bp_pix = 0;
  logic [MW-1:0]   bp_map = 0;
  fx_t             bp_acc = 0;
  logic            emu_start = 0, emu_fb = 0, drop_en = 0;
  fx_t             fb [NPIX];
  fx_t             coef [NPIX];
  logic            ebusy, edone;
  logic [PW-1:0]   rd_pix = 0;
  logic [MW-1:0]   rd_map = 0;
  fx_t             rd_a, rd_z, rd_d;
  logic            rd_pr;
  logic [15:0]     rd_zc;

  pixel_array_field #(.NPIX(NPIX), .NMAP(NMAP), .CNT_W(16)) dut (
    .clk(clk), .rst_n(rst_n), .act(act), .pix_base(pix_base), .src_sel(src_sel), .grp_i(grp),
    .prune_thr(prune_thr), .prune_limit(prune_limit), .prune_clr(prune_clr), .cnt_en(cnt_en),
    .col_valid_i(cv), .col_sum_i(cs), .col_tag_i(ct),
    .alt_valid_i(av), .alt_sum_i(as_), .alt_tag_i(at),
    .bp_valid(bp_valid), .bp_pix(bp_pix), .bp_map(bp_map), .bp_acc(bp_acc),
    .emu_start(emu_start), .emu_feedback(emu_fb), .emu_mag_sel(1'b1), .drop_en(drop_en),
    .drop_thr(16'h0), .keep_scale(FX_ONE), .fb_coef_i(fb), .coef_o(coef),
    .emu_busy_o(ebusy), .emu_done_o(edone),
    .rd_pix(rd_pix), .rd_map(rd_map), .rd_a(rd_a), .rd_z(rd_z), .rd_delta(rd_d),
    .rd_pruned(rd_pr), .rd_zero_cnt(rd_zc)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  fx_t model_z [NPIX][NMAP];

  task automatic rd(int p, int m);
    rd_pix = PW'(p); rd_map = MW'(m); #1;
  endtask

  task automatic idle_inputs();
    for (int m = 0; m < NMAP; m++) begin
      cv[m] = 0; av[m] = 0; cs[m] = '0; as_[m] = '0; ct[m] = '0; at[m] = '0;
    end
  endtask

  // one cycle of writes: each map gets a result for a random pixel
  task automatic write_cycle(bit alt, bit out_of_window);
    int pix [NMAP];
    idle_inputs();
    src_sel = alt;
    for (int m = 0; m < NMAP; m++) begin
      automatic fx_t v = fx_t'(int'($urandom_range(200000)) - 60000);
      pix[m] = $urandom_range(NPIX - 1);
      if (alt) begin
        av[m] = 1; as_[m] = v; at[m] = '{src: ID_W'(m), dst: pix_base + ID_W'(pix[m])};
        cv[m] = 1; cs[m] = 32'h7777; ct[m] = '{src: ID_W'(m), dst: pix_base + ID_W'((pix[m] + 1) % NPIX)};
      end else begin
        cv[m] = 1; cs[m] = v;
        ct[m] = '{src: ID_W'(m), dst: out_of_window ? pix_base + ID_W'(NPIX + pix[m]) : pix_base + ID_W'(pix[m])};
      end
    end
    @(posedge clk); #1;
    for (int m = 0; m < NMAP; m++) begin
      automatic fx_t v = alt ? as_[m] : cs[m];
      if (!out_of_window) model_z[pix[m]][m] = v;
    end
    idle_inputs();
    begin
      int bad = 0;
      // every written element, and as many random others
      for (int k = 0; k < 2 * NMAP; k++) begin
        automatic int m = (k < NMAP) ? k : $urandom_range(NMAP - 1);
        automatic int p = (k < NMAP) ? pix[m] : $urandom_range(NPIX - 1);
        rd(p, m);
        if (rd_z != model_z[p][m] || rd_a != ((model_z[p][m] < 0) ? fx_t'(0) : model_z[p][m])) bad++;
      end
      check(bad == 0, $sformatf("%0d elements wrong after write (alt=%0d oow=%0d)", bad, alt, out_of_window));
    end
  endtask

  initial begin
    localparam int NS = 4 * NPIX;
    fx_t a_old [NS];
    int sp [NS], sm [NS];
    fx_t csum;
    int cyc;
    idle_inputs();
    for (int p = 0; p < NPIX; p++) begin
      grp[p] = PW'(p % 2);
      fb[p] = FX_ONE;
      for (int m = 0; m < NMAP; m++) model_z[p][m] = '0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // tag routing, window and source select
    for (int n = 0; n < 6; n++) write_cycle(1'b0, 1'b0);
    write_cycle(1'b0, 1'b1);
    for (int n = 0; n < 4; n++) write_cycle(1'b1, 1'b0);
    src_sel = 0;

    // back-propagation writes
    for (int n = 0; n < 20; n++) begin
      automatic int p = $urandom_range(NPIX - 1), m = $urandom_range(NMAP - 1);
      automatic fx_t acc = fx_t'(int'($urandom_range(100000)) - 50000);
      bp_valid = 1; bp_pix = PW'(p); bp_map = MW'(m); bp_acc = acc;
      @(posedge clk); #1;
      bp_valid = 0;
      rd(p, m);
      check(rd_d == ((model_z[p][m] <= 0) ? fx_t'(0) : acc), $sformatf("bp delta at (%0d,%0d)", p, m));
    end

    // enhancement pass over the whole field
    // a sample of the elements: every pixel at four random maps
    for (int k = 0; k < NS; k++) begin
      sp[k] = k % NPIX; sm[k] = $urandom_range(NMAP - 1);
      rd(sp[k], sm[k]); a_old[k] = rd_a;
    end
    emu_start = 1;
    @(posedge clk); #1;
    emu_start = 0;
    cyc = 1;
    while (!edone && cyc < 1000) begin @(posedge clk); #1; cyc++; end
    check(cyc == 2 * NMAP + NPIX + 6, $sformatf("enhancement took %0d cycles", cyc));
    csum = coef[0] + coef[1];
    check(csum > FX_ONE - 8 && csum <= FX_ONE, $sformatf("coefficients add up to %0d", csum));
    begin
      int bad = 0;
      for (int k = 0; k < NS; k++) begin
        rd(sp[k], sm[k]);
        if (rd_a != fx_mul(a_old[k], coef[sp[k] % 2])) bad++;
      end
      check(bad == 0, $sformatf("%0d activations not enhanced", bad));
    end

    // pruning during validation
    prune_thr = fx_t'(100); prune_limit = 16'd1; cnt_en = 1;
    idle_inputs();
    cv[5] = 1; cs[5] = fx_t'(20); ct[5] = '{src: 16'd5, dst: pix_base + 16'd7};
    cv[6] = 1; cs[6] = fx_t'(90000); ct[6] = '{src: 16'd6, dst: pix_base + 16'd7};
    @(posedge clk); #1;
    idle_inputs();
    @(posedge clk); #1;
    rd(7, 5);
    check(rd_pr && rd_zc == 1, "near-zero element pruned");
    cv[5] = 1; cs[5] = fx_t'(50000); ct[5] = '{src: 16'd5, dst: pix_base + 16'd7};
    @(posedge clk); #1;
    idle_inputs();
    rd(7, 5);
    check(rd_a == 0, "pruned element reads zero");
    rd(7, 6);
    check(!rd_pr && rd_a == fx_t'(90000), "active element kept");
    prune_clr = 1;
    @(posedge clk); #1;
    prune_clr = 0; cnt_en = 0;
    rd(7, 5);
    check(!rd_pr, "prune cleared");

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
