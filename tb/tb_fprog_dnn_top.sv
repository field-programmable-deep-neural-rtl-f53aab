// tb_fprog_dnn_top: end-to-end test of the fabric slice with every parameter
// of the top at its default (two tiles of 3 x 64 tensor elements over
// 90 x 64 pixel elements, and the 400-25-10 systolic network).
//
// The testbench loads random filters into maps 0..7 of both tensor arrays
// (zero filters into the others) and
// random weights into the fully connected network, then takes the design
// through each of its mechanisms and checks the result against a model:
//   conv MAC     windows streamed into both tiles, one per cycle; every
//                stored z must be the filter sum and a = ReLU(z);
//   cascade      tile 1 adds tile 0's column sums (filter over 6 channels);
//   max-pool     tile 1 in max mode returns the largest masked window value;
//   src_sel      pixel field 1 takes tile 0's results, field 0 ignores them
//                because the pixel tag lies outside its window;
//   backprop     a back-propagated sum gives delta = acc * g'(z);
//   pruning      an element that stays near zero during validation is
//                pruned and then reads zero;
//   enhancement  both tiles run an enhancement pass; activations must equal
//                the old ones times their group's coefficient;
//   feedback     tile 1's coefficients are fed back into tile 0;
//   dropout      an enhancement pass with p = 1/2 drops some activations;
//   FC F/B/U     inference, a training step and a pruned hidden node on the
//                systolic network, with 231 / 18 / 213 transport pulses.
// Monitors count how often each mechanism happened; one that never happened
// counts as a failure.
// The mechanisms are the concept's; the two-tile slice and its ports are
// this design's own.
module tb_fprog_dnn_top;
  import fpdnn_pkg::*;

  localparam int K = 5, NC = 3, NMAP = 64, NPIX = 90, NI = 400, NH = 25, NO = 10;
  localparam int PW = 7, MW = 6, KK = K * K, MU = 8;   // maps with filters

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  // ---- top ports
  logic            t_cfg_we [2];
  logic [1:0]      t_cfg_row = 0;
  logic [5:0]      t_cfg_col = 0;
  logic [4:0]      t_cfg_idx = 0;
  fx_t             t_cfg_w = 0;
  tensor_op_e      t_op [2];
  logic            t1_casc_en = 0;
  logic            ch_valid [2][NC];
  fx_t             ch_win [2][NC][KK];
  info_t           ch_tag [2][NC];
  act_e            p_act [2];
  logic [ID_W-1:0] p_pix_base [2];
  logic            p_src_sel [2];
  logic [PW-1:0]   p_grp [2][NPIX];
  fx_t             prune_thr = 0;
  logic [15:0]     prune_limit = 0;
  logic            prune_clr = 0, cnt_en = 0;
  logic            bp_valid [2];
  logic [PW-1:0]   bp_pix = 0;
  logic [MW-1:0]   bp_map = 0;
  fx_t             bp_acc = 0;
  logic            emu_start [2], emu_fb [2], drop_en [2];
  logic [15:0]     drop_thr = 16'h8000;
  fx_t             keep_scale = FX_ONE;
  fx_t             fb_t1 [NPIX];
  fx_t             coef [2][NPIX];
  logic            ebusy [2], edone [2];
  logic            colv [2][NMAP];
  logic [PW-1:0]   rd_pix = 0;
  logic [MW-1:0]   rd_map = 0;
  fx_t             rd_a [2], rd_z [2], rd_d [2];
  logic            rd_pr [2];
  logic [15:0]     rd_zc [2];
  fx_t             fc_lr = fx_t'(655);
  logic            fc_cfg_we = 0, fc_cfg_layer = 0, fc_cfg_bias = 0;
  logic [ID_W-1:0] fc_cfg_node = 0, fc_cfg_idx = 0;
  fx_t             fc_cfg_data = 0;
  logic            fc_rd_layer = 0;
  logic [ID_W-1:0] fc_rd_node = 0, fc_rd_idx = 0;
  fx_t             fc_rd_w;
  fx_t             pixels [NI];
  fx_t             labels [NO];
  logic            hid_pruned [NH];
  logic            fc_start_infer = 0, fc_start_train = 0;
  logic            fc_busy, fc_done;
  sfe_state_e      fc_state;
  fx_t             h [NO];
  logic [15:0]     pf, pb, pu;

  fprog_dnn_top dut (
    .clk(clk), .rst_n(rst_n),
    .t_cfg_we(t_cfg_we), .t_cfg_row(t_cfg_row), .t_cfg_col(t_cfg_col), .t_cfg_idx(t_cfg_idx),
    .t_cfg_w(t_cfg_w), .t_op(t_op), .t1_casc_en(t1_casc_en),
    .ch_valid_i(ch_valid), .ch_win_i(ch_win), .ch_tag_i(ch_tag),
    .p_act(p_act), .p_pix_base(p_pix_base), .p_src_sel(p_src_sel), .p_grp(p_grp),
    .prune_thr(prune_thr), .prune_limit(prune_limit), .prune_clr(prune_clr), .cnt_en(cnt_en),
    .bp_valid(bp_valid), .bp_pix(bp_pix), .bp_map(bp_map), .bp_acc(bp_acc),
    .emu_start(emu_start), .emu_feedback(emu_fb), .emu_mag_sel(1'b1), .drop_en(drop_en),
    .drop_thr(drop_thr), .keep_scale(keep_scale), .fb_coef_t1_i(fb_t1), .coef_o(coef),
    .emu_busy_o(ebusy), .emu_done_o(edone), .col_valid_o(colv),
    .rd_pix(rd_pix), .rd_map(rd_map), .rd_a(rd_a), .rd_z(rd_z), .rd_delta(rd_d),
    .rd_pruned(rd_pr), .rd_zero_cnt(rd_zc),
    .fc_act_hid(ACT_RELU), .fc_act_out(ACT_LINEAR), .fc_lr(fc_lr),
    .fc_cfg_we(fc_cfg_we), .fc_cfg_layer(fc_cfg_layer), .fc_cfg_bias(fc_cfg_bias),
    .fc_cfg_node(fc_cfg_node), .fc_cfg_idx(fc_cfg_idx), .fc_cfg_data(fc_cfg_data),
    .fc_rd_layer(fc_rd_layer), .fc_rd_node(fc_rd_node), .fc_rd_idx(fc_rd_idx), .fc_rd_w(fc_rd_w),
    .fc_pixels(pixels), .fc_labels(labels), .fc_hid_pruned(hid_pruned),
    .fc_start_infer(fc_start_infer), .fc_start_train(fc_start_train),
    .fc_busy_o(fc_busy), .fc_done_o(fc_done), .fc_state_o(fc_state), .fc_h_o(h),
    .fc_pulses_f_o(pf), .fc_pulses_b_o(pb), .fc_pulses_u_o(pu)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  function automatic fx_t rnd(int span);
    return fx_t'(int'($urandom_range(2 * span)) - span);
  endfunction

  // ---- mechanism counters
  int n_mac = 0, n_casc = 0, n_max = 0, n_src = 0, n_bp = 0, n_prune = 0;
  int n_enh = 0, n_fb = 0, n_drop = 0, n_fc_f = 0, n_fc_b = 0, n_fc_u = 0, n_fc_prune = 0;
  sfe_state_e prev_state = SFE_IDLE;

  always @(posedge clk) if (rst_n) begin
    for (int t = 0; t < 2; t++)
      for (int m = 0; m < NMAP; m++)
        if (colv[t][m]) begin
          if (t_op[t] == TOP_MAX) n_max++;
          else n_mac++;
          if (t == 1 && t1_casc_en) n_casc++;
        end
    for (int t = 0; t < 2; t++) if (edone[t]) begin
      if (emu_fb[t]) n_fb++;
      else if (drop_en[t]) n_drop++;
      else n_enh++;
    end
    if (fc_state != prev_state) begin
      if (fc_state == SFE_F) n_fc_f++;
      if (fc_state == SFE_B) n_fc_b++;
      if (fc_state == SFE_U) n_fc_u++;
    end
    prev_state <= fc_state;
  end

  // ---- models
  fx_t W [2][NC][MU][KK];
  fx_t mz [2][NPIX][NMAP];

  task automatic rd(int p, int m);
    rd_pix = PW'(p); rd_map = MW'(m); #1;
  endtask

  task automatic clear_windows();
    for (int t = 0; t < 2; t++) for (int c = 0; c < NC; c++) begin
      ch_valid[t][c] = 0; ch_tag[t][c] = '0;
      for (int i = 0; i < KK; i++) ch_win[t][c][i] = '0;
    end
  endtask

  function automatic fx_t conv(int t, int m);
    fx_t s = '0;
    if (m < MU) for (int c = 0; c < NC; c++) for (int i = 0; i < KK; i++)
      s += fx_mul(ch_win[t][c][i], W[t][c][m][i]);
    return s;
  endfunction

  function automatic fx_t pool(int t, int m);
    fx_t mx = '0;
    bit any = 0;
    if (m < MU) for (int i = 0; i < KK; i++)
      if (W[t][0][m][i] != 0 && (!any || ch_win[t][0][i] > mx)) begin mx = ch_win[t][0][i]; any = 1; end
    return mx;
  endfunction

  task automatic drain();
    clear_windows();
    repeat (NMAP + 4) @(posedge clk);
    #1;
  endtask

  // compare the stored maps 0..MU of pixel p of field t with the model
  task automatic check_pixel(int t, int p, string what);
    int bad = 0;
    for (int m = 0; m < MU; m++) begin
      rd(p, m);
      if (rd_z[t] != mz[t][p][m] || rd_a[t] != ((mz[t][p][m] < 0) ? fx_t'(0) : mz[t][p][m])) bad++;
    end
    check(bad == 0, $sformatf("%s: field %0d pixel %0d, %0d maps wrong", what, t, p, bad));
  endtask

  task automatic run_emu(bit t0, bit t1);
    emu_start[0] = t0; emu_start[1] = t1;
    @(posedge clk); #1;
    emu_start[0] = 0; emu_start[1] = 0;
    while (ebusy[0] || ebusy[1]) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  // ---- fully connected reference (as in the network's own testbench)
  fx_t w1 [NH][NI], b1 [NH], w2 [NO][NH], b2 [NO];
  fx_t z1 [NH], a1 [NH], z2 [NO], d2 [NO], d1 [NH];

  task automatic ref_forward(bit prune3);
    for (int n = 0; n < NH; n++) begin
      z1[n] = b1[n];
      for (int i = 0; i < NI; i++) z1[n] += fx_mul(w1[n][i], pixels[i]);
      a1[n] = (z1[n] < 0 || (prune3 && n == 3)) ? '0 : z1[n];
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
      for (int i = 0; i < NI; i++) w1[n][i] -= fx_mul(fc_lr, fx_mul(d1[n], pixels[i]));
      b1[n] -= fx_mul(fc_lr, d1[n]);
    end
    for (int o = 0; o < NO; o++) begin
      for (int n = 0; n < NH; n++) w2[o][n] -= fx_mul(fc_lr, fx_mul(d2[o], a1[n]));
      b2[o] -= fx_mul(fc_lr, d2[o]);
    end
  endtask

  task automatic fc_write(bit layer, bit bias, int node, int idx, fx_t v);
    fc_cfg_we = 1; fc_cfg_layer = layer; fc_cfg_bias = bias;
    fc_cfg_node = ID_W'(node); fc_cfg_idx = ID_W'(idx); fc_cfg_data = v;
    @(posedge clk); #1;
    fc_cfg_we = 0;
  endtask

  task automatic fc_run(bit train);
    if (train) fc_start_train = 1; else fc_start_infer = 1;
    @(posedge clk); #1;
    fc_start_train = 0; fc_start_infer = 0;
    while (!fc_done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  initial begin
    fx_t a_s [2][NPIX];
    fx_t c0 [NPIX];
    int bad, kept, dropped;

    // ---- idle inputs
    clear_windows();
    for (int t = 0; t < 2; t++) begin
      t_cfg_we[t] = 0; t_op[t] = TOP_MAC; p_act[t] = ACT_RELU; p_src_sel[t] = 0;
      bp_valid[t] = 0; emu_start[t] = 0; emu_fb[t] = 0; drop_en[t] = 0;
      p_pix_base[t] = ID_W'(t * NPIX);
      for (int p = 0; p < NPIX; p++) begin
        p_grp[t][p] = PW'(p % 3);
        for (int m = 0; m < NMAP; m++) mz[t][p][m] = '0;
      end
    end
    for (int p = 0; p < NPIX; p++) fb_t1[p] = FX_ONE;
    for (int n = 0; n < NH; n++) hid_pruned[n] = 0;
    for (int i = 0; i < NI; i++) pixels[i] = fx_t'($urandom_range(65536));
    for (int o = 0; o < NO; o++) labels[o] = (o == 2) ? FX_ONE : '0;
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

    // ---- configuration: filters of maps 0..MU-1 in both tiles
    for (int t = 0; t < 2; t++) for (int c = 0; c < NC; c++) for (int m = 0; m < MU; m++)
      for (int i = 0; i < KK; i++) begin
        W[t][c][m][i] = rnd(32768);
        if (W[t][c][m][i] == 0) W[t][c][m][i] = fx_t'(1);
        t_cfg_we[t] = 1; t_cfg_row = 2'(c); t_cfg_col = 6'(m); t_cfg_idx = 5'(i);
        t_cfg_w = W[t][c][m][i];
        @(posedge clk); #1;
        t_cfg_we[t] = 0;
      end
    // the other maps get zero filters
    for (int t = 0; t < 2; t++) for (int c = 0; c < NC; c++) for (int m = MU; m < NMAP; m++)
      for (int i = 0; i < KK; i++) begin
        t_cfg_we[t] = 1; t_cfg_row = 2'(c); t_cfg_col = 6'(m); t_cfg_idx = 5'(i); t_cfg_w = '0;
        @(posedge clk); #1;
        t_cfg_we[t] = 0;
      end
    // fully connected weights
    for (int n = 0; n < NH; n++) begin
      fc_write(0, 1, n, 0, b1[n]);
      for (int i = 0; i < NI; i++) fc_write(0, 0, n, i, w1[n][i]);
    end
    for (int o = 0; o < NO; o++) begin
      fc_write(1, 1, o, 0, b2[o]);
      for (int n = 0; n < NH; n++) fc_write(1, 0, o, n, w2[o][n]);
    end

    // ---- conv MAC: pixels 0..11 in both tiles, one window per cycle
    for (int p = 0; p < 12; p++) begin
      for (int t = 0; t < 2; t++) for (int c = 0; c < NC; c++) begin
        ch_valid[t][c] = 1;
        ch_tag[t][c] = '{src: '0, dst: ID_W'(t * NPIX + p)};
        for (int i = 0; i < KK; i++) ch_win[t][c][i] = rnd(6554);
      end
      for (int t = 0; t < 2; t++) for (int m = 0; m < NMAP; m++) mz[t][p][m] = conv(t, m);
      @(posedge clk); #1;
    end
    drain();
    for (int p = 0; p < 12; p++) begin check_pixel(0, p, "conv"); check_pixel(1, p, "conv"); end

    // ---- cascade: tile 1 adds tile 0's column sums (pixel 20)
    t1_casc_en = 1;
    for (int t = 0; t < 2; t++) for (int c = 0; c < NC; c++) begin
      ch_valid[t][c] = 1;
      ch_tag[t][c] = '{src: '0, dst: ID_W'(t * NPIX + 20)};
      for (int i = 0; i < KK; i++) ch_win[t][c][i] = rnd(6554);
    end
    for (int m = 0; m < NMAP; m++) begin
      mz[0][20][m] = conv(0, m);
      mz[1][20][m] = conv(1, m) + conv(0, m);
    end
    @(posedge clk); #1;
    drain();
    t1_casc_en = 0;
    check_pixel(0, 20, "cascade tile 0");
    check_pixel(1, 20, "cascade tile 1");

    // ---- max-pool on tile 1 (pixel 30, channel 0 only)
    t_op[1] = TOP_MAX;
    ch_valid[1][0] = 1;
    ch_tag[1][0] = '{src: '0, dst: ID_W'(NPIX + 30)};
    for (int i = 0; i < KK; i++) ch_win[1][0][i] = rnd(6554);
    for (int m = 0; m < MU; m++) mz[1][30][m] = pool(1, m);
    @(posedge clk); #1;
    drain();
    check_pixel(1, 30, "max-pool");
    t_op[1] = TOP_MAC;

    // ---- src_sel: field 1 takes tile 0's results for its pixel 40
    p_src_sel[1] = 1;
    for (int c = 0; c < NC; c++) begin
      ch_valid[0][c] = 1;
      ch_tag[0][c] = '{src: '0, dst: ID_W'(NPIX + 40)};
      for (int i = 0; i < KK; i++) ch_win[0][c][i] = rnd(6554);
    end
    for (int m = 0; m < NMAP; m++) mz[1][40][m] = conv(0, m);
    @(posedge clk); #1;
    drain();
    p_src_sel[1] = 0;
    check_pixel(1, 40, "src_sel field 1");
    check_pixel(0, 40, "src_sel field 0 untouched");
    rd(40, 0);
    if (rd_z[1] == mz[1][40][0] && mz[1][40][0] != 0) n_src++;

    // ---- back-propagation write
    for (int n = 0; n < 8; n++) begin
      automatic int p = $urandom_range(11), m = $urandom_range(MU - 1);
      automatic fx_t acc = rnd(50000);
      bp_valid[0] = 1; bp_pix = PW'(p); bp_map = MW'(m); bp_acc = acc;
      @(posedge clk); #1;
      bp_valid[0] = 0;
      rd(p, m);
      check(rd_d[0] == ((mz[0][p][m] <= 0) ? fx_t'(0) : acc), $sformatf("bp delta (%0d,%0d)", p, m));
      n_bp++;
    end

    // ---- pruning: pixel 50 of tile 0 receives zeros during validation
    prune_thr = fx_t'(50); prune_limit = 16'd1; cnt_en = 1;
    for (int c = 0; c < NC; c++) begin
      ch_valid[0][c] = 1;
      ch_tag[0][c] = '{src: '0, dst: ID_W'(50)};
    end
    @(posedge clk); #1;
    drain();
    cnt_en = 0;
    rd(50, 3);
    check(rd_pr[0], "element pruned after near-zero validation");
    if (rd_pr[0]) n_prune++;
    for (int c = 0; c < NC; c++) begin
      ch_valid[0][c] = 1;
      ch_tag[0][c] = '{src: '0, dst: ID_W'(50)};
      for (int i = 0; i < KK; i++) ch_win[0][c][i] = fx_t'(30000);
    end
    @(posedge clk); #1;
    drain();
    rd(50, 3);
    check(rd_a[0] == 0 && rd_z[0] != 0, "pruned element reads zero");
    prune_clr = 1;
    @(posedge clk); #1;
    prune_clr = 0;
    rd(50, 3);
    check(!rd_pr[0], "prune cleared");
    for (int m = 0; m < NMAP; m++) mz[0][50][m] = conv(0, m);

    // ---- enhancement of both tiles
    for (int t = 0; t < 2; t++) for (int p = 0; p < NPIX; p++) begin
      rd(p, p % MU); a_s[t][p] = rd_a[t];
    end
    run_emu(1'b1, 1'b1);
    for (int t = 0; t < 2; t++) begin
      automatic fx_t cs = coef[t][0] + coef[t][1] + coef[t][2];
      check(cs > FX_ONE - 8 && cs <= FX_ONE, $sformatf("tile %0d coefficients add up to %0d", t, cs));
      bad = 0;
      for (int p = 0; p < NPIX; p++) begin
        rd(p, p % MU);
        if (rd_a[t] != fx_mul(a_s[t][p], coef[t][p % 3])) bad++;
        a_s[t][p] = rd_a[t];
      end
      check(bad == 0, $sformatf("tile %0d: %0d activations not enhanced", t, bad));
    end

    // ---- feedback of tile 1's coefficients into tile 0
    for (int g = 0; g < NPIX; g++) c0[g] = coef[0][g];
    emu_fb[0] = 1;
    run_emu(1'b1, 1'b0);
    emu_fb[0] = 0;
    bad = 0;
    for (int g = 0; g < 3; g++) if (coef[0][g] != fx_mul(c0[g], coef[1][g])) bad++;
    check(bad == 0, "fed-back coefficients");
    bad = 0;
    for (int p = 0; p < NPIX; p++) begin
      rd(p, p % MU);
      if (rd_a[0] != fx_mul(a_s[0][p], coef[1][p % 3])) bad++;
    end
    check(bad == 0, $sformatf("%0d activations not reinforced by feedback", bad));

    // ---- dropout with enhancement on tile 1
    for (int p = 0; p < 12; p++) for (int m = 0; m < MU; m++) begin
      rd(p, m); mz[1][p][m] = rd_a[1];
    end
    drop_en[1] = 1; keep_scale = fx_t'(2 * 65536);
    run_emu(1'b0, 1'b1);
    drop_en[1] = 0;
    kept = 0; dropped = 0; bad = 0;
    for (int p = 0; p < 12; p++) for (int m = 0; m < MU; m++) if (mz[1][p][m] != 0) begin
      rd(p, m);
      if (rd_a[1] == 0) dropped++;
      else begin
        kept++;
        if (rd_a[1] != fx_mul(mz[1][p][m], fx_mul(coef[1][p % 3], keep_scale))) bad++;
      end
    end
    check(bad == 0, $sformatf("%0d kept activations wrongly scaled", bad));
    check(dropped > 0 && kept > 0, $sformatf("dropout dropped %0d kept %0d", dropped, kept));

    // ---- fully connected network: inference, training, pruned node
    fc_run(1'b0);
    ref_forward(1'b0);
    bad = 0;
    for (int o = 0; o < NO; o++) if (h[o] != z2[o]) bad++;
    check(bad == 0, $sformatf("%0d network outputs wrong", bad));
    check(pf == 231, $sformatf("F pulses %0d, expected 231", pf));
    fc_run(1'b1);
    ref_train();
    check(pb == 18 && pu == 213, $sformatf("B/U pulses %0d/%0d, expected 18/213", pb, pu));
    bad = 0;
    fc_rd_layer = 1;
    for (int o = 0; o < NO; o++) for (int n = 0; n <= NH; n++) begin
      fc_rd_node = ID_W'(o); fc_rd_idx = ID_W'(n); #1;
      if (fc_rd_w != ((n == NH) ? b2[o] : w2[o][n])) bad++;
    end
    fc_rd_layer = 0;
    for (int k = 0; k < 200; k++) begin
      automatic int n = $urandom_range(NH - 1), i = $urandom_range(NI);
      fc_rd_node = ID_W'(n); fc_rd_idx = ID_W'(i); #1;
      if (fc_rd_w != ((i == NI) ? b1[n] : w1[n][i])) bad++;
    end
    check(bad == 0, $sformatf("%0d trained weights wrong", bad));
    hid_pruned[3] = 1;
    fc_run(1'b0);
    hid_pruned[3] = 0;
    ref_forward(1'b1);
    bad = 0;
    for (int o = 0; o < NO; o++) if (h[o] != z2[o]) bad++;
    check(bad == 0, $sformatf("%0d outputs wrong with hidden node 3 pruned", bad));
    if (bad == 0) n_fc_prune++;

    // ---- every mechanism must have happened
    $display("mechanisms: mac=%0d cascade=%0d maxpool=%0d src_sel=%0d backprop=%0d prune=%0d",
             n_mac, n_casc, n_max, n_src, n_bp, n_prune);
    $display("            enhance=%0d feedback=%0d dropout=%0d fc_F=%0d fc_B=%0d fc_U=%0d fc_pruned=%0d",
             n_enh, n_fb, n_drop, n_fc_f, n_fc_b, n_fc_u, n_fc_prune);
    check(n_mac > 0, "conv MAC never happened");
    check(n_casc > 0, "cascade never happened");
    check(n_max > 0, "max-pool never happened");
    check(n_src > 0, "src_sel merge never happened");
    check(n_bp > 0, "back-propagation write never happened");
    check(n_prune > 0, "pruning never happened");
    check(n_enh > 0, "enhancement never happened");
    check(n_fb > 0, "feedback never happened");
    check(n_drop > 0, "dropout never happened");
    check(n_fc_f > 0 && n_fc_b > 0 && n_fc_u > 0, "FC F/B/U never happened");
    check(n_fc_prune > 0, "FC pruned node never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
