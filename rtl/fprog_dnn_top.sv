// fprog_dnn_top: a slice of the field-programmable DNN fabric.
//
// Two tiles, each a tensor array field above a pixel array field, carry two
// convolution layers: tile 0 is convolution layer [l], tile 1 a deeper layer
// [k]. Each tile's enhancement matrix unit can enhance its layer's
// activations; the coefficients of tile 1 are fed back to tile 0 (the
// reinforcement feedback connection), where an EMU_FEEDBACK pass multiplies
// them into tile 0's coefficients and activations. The tiles are also joined
// the two ways in which fields merge into one worker: tile 1's tensor array
// can add tile 0's column sums (a filter with more than NC channels), and
// either pixel array can take the results of the other tile's tensor array
// (a worker with more than NPIX pixels).
//
// Beside the tiles, fc_network holds a fully connected 400-25-10 network
// trained on the systolic, tagged layer-to-layer transport.
//
// What the control processor would do - load weights, assign identities,
// groups and pixel windows, start passes - arrives here as plain
// configuration and control ports, and the input windows of the tensor
// arrays come from ports, since the interconnect that would assemble them is
// not part of this slice. Port arrays indexed [2] are per tile.
//
// Timing: see tensor_array_field (window to column result: m + 2 cycles for
// map m), pixel_array_field (one cycle to store), enhancement_matrix_unit and
// fc_network.
// The tiles, the two ways of merging fields, the feedback connection and the
// systolic network follow the concept; the two-tile size of the slice and the
// port layout are this design's choice.
module fprog_dnn_top
  import fpdnn_pkg::*;
#(
  parameter int unsigned K     = 5,
  parameter int unsigned NC    = 3,
  parameter int unsigned NMAP  = 64,
  parameter int unsigned NPIX  = 90,
  parameter int unsigned N_IN  = 400,
  parameter int unsigned N_HID = 25,
  parameter int unsigned N_OUT = 10,
  localparam int unsigned PW   = (NPIX > 1) ? $clog2(NPIX) : 1,
  localparam int unsigned MW   = (NMAP > 1) ? $clog2(NMAP) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // ---- tensor array fields
  input  logic             t_cfg_we   [2],
  input  logic [$clog2(NC)-1:0]   t_cfg_row,
  input  logic [$clog2(NMAP)-1:0] t_cfg_col,
  input  logic [$clog2(K*K)-1:0]  t_cfg_idx,
  input  fx_t              t_cfg_w,
  input  tensor_op_e       t_op       [2],
  input  logic             t1_casc_en,
  input  logic             ch_valid_i [2][NC],
  input  fx_t              ch_win_i   [2][NC][K*K],
  input  info_t            ch_tag_i   [2][NC],
  // ---- pixel array fields
  input  act_e             p_act      [2],
  input  logic [ID_W-1:0]  p_pix_base [2],
  input  logic             p_src_sel  [2],
  input  logic [PW-1:0]    p_grp      [2][NPIX],
  input  fx_t              prune_thr,
  input  logic [15:0]      prune_limit,
  input  logic             prune_clr,
  input  logic             cnt_en,
  input  logic             bp_valid   [2],
  input  logic [PW-1:0]    bp_pix,
  input  logic [MW-1:0]    bp_map,
  input  fx_t              bp_acc,
  input  logic             emu_start  [2],
  input  logic             emu_feedback [2],
  input  logic             emu_mag_sel,
  input  logic             drop_en    [2],
  input  logic [15:0]      drop_thr,
  input  fx_t              keep_scale,
  input  fx_t              fb_coef_t1_i [NPIX],
  output fx_t              coef_o     [2][NPIX],
  output logic             emu_busy_o [2],
  output logic             emu_done_o [2],
  output logic             col_valid_o [2][NMAP],
  input  logic [PW-1:0]    rd_pix,
  input  logic [MW-1:0]    rd_map,
  output fx_t              rd_a       [2],
  output fx_t              rd_z       [2],
  output fx_t              rd_delta   [2],
  output logic             rd_pruned  [2],
  output logic [15:0]      rd_zero_cnt [2],
  // ---- fully connected systolic network
  input  act_e             fc_act_hid,
  input  act_e             fc_act_out,
  input  fx_t              fc_lr,
  input  logic             fc_cfg_we,
  input  logic             fc_cfg_layer,
  input  logic             fc_cfg_bias,
  input  logic [ID_W-1:0]  fc_cfg_node,
  input  logic [ID_W-1:0]  fc_cfg_idx,
  input  fx_t              fc_cfg_data,
  input  logic             fc_rd_layer,
  input  logic [ID_W-1:0]  fc_rd_node,
  input  logic [ID_W-1:0]  fc_rd_idx,
  output fx_t              fc_rd_w,
  input  fx_t              fc_pixels [N_IN],
  input  fx_t              fc_labels [N_OUT],
  input  logic             fc_hid_pruned [N_HID],
  input  logic             fc_start_infer,
  input  logic             fc_start_train,
  output logic             fc_busy_o,
  output logic             fc_done_o,
  output sfe_state_e       fc_state_o,
  output fx_t              fc_h_o [N_OUT],
  output logic [15:0]      fc_pulses_f_o,
  output logic [15:0]      fc_pulses_b_o,
  output logic [15:0]      fc_pulses_u_o
);

  fx_t   partial [2][NMAP];
  fx_t   casc    [2][NMAP];
  logic  cv      [2][NMAP];
  fx_t   cs      [2][NMAP];
  info_t ct      [2][NMAP];
  fx_t   fb      [2][NPIX];

  always_comb begin
    for (int m = 0; m < NMAP; m++) begin
      casc[0][m] = '0;
      casc[1][m] = partial[0][m];
    end
    fb[0] = coef_o[1];
    fb[1] = fb_coef_t1_i;
  end

  assign col_valid_o = cv;

  for (genvar t = 0; t < 2; t++) begin : g_tile
    tensor_array_field #(.K(K), .NC(NC), .NMAP(NMAP)) u_tensor (
      .clk          (clk),
      .rst_n        (rst_n),
      .cfg_we       (t_cfg_we[t]),
      .cfg_row      (t_cfg_row),
      .cfg_col      (t_cfg_col),
      .cfg_idx      (t_cfg_idx),
      .cfg_w        (t_cfg_w),
      .op           (t_op[t]),
      .casc_en      ((t == 1) ? t1_casc_en : 1'b0),
      .ch_valid_i   (ch_valid_i[t]),
      .ch_win_i     (ch_win_i[t]),
      .ch_tag_i     (ch_tag_i[t]),
      .casc_i       (casc[t]),
      .col_partial_o(partial[t]),
      .col_valid_o  (cv[t]),
      .col_sum_o    (cs[t]),
      .col_tag_o    (ct[t])
    );

    pixel_array_field #(.NPIX(NPIX), .NMAP(NMAP), .CNT_W(16)) u_pixel (
      .clk         (clk),
      .rst_n       (rst_n),
      .act         (p_act[t]),
      .pix_base    (p_pix_base[t]),
      .src_sel     (p_src_sel[t]),
      .grp_i       (p_grp[t]),
      .prune_thr   (prune_thr),
      .prune_limit (prune_limit),
      .prune_clr   (prune_clr),
      .cnt_en      (cnt_en),
      .col_valid_i (cv[t]),
      .col_sum_i   (cs[t]),
      .col_tag_i   (ct[t]),
      .alt_valid_i (cv[1-t]),
      .alt_sum_i   (cs[1-t]),
      .alt_tag_i   (ct[1-t]),
      .bp_valid    (bp_valid[t]),
      .bp_pix      (bp_pix),
      .bp_map      (bp_map),
      .bp_acc      (bp_acc),
      .emu_start   (emu_start[t]),
      .emu_feedback(emu_feedback[t]),
      .emu_mag_sel (emu_mag_sel),
      .drop_en     (drop_en[t]),
      .drop_thr    (drop_thr),
      .keep_scale  (keep_scale),
      .fb_coef_i   (fb[t]),
      .coef_o      (coef_o[t]),
      .emu_busy_o  (emu_busy_o[t]),
      .emu_done_o  (emu_done_o[t]),
      .rd_pix      (rd_pix),
      .rd_map      (rd_map),
      .rd_a        (rd_a[t]),
      .rd_z        (rd_z[t]),
      .rd_delta    (rd_delta[t]),
      .rd_pruned   (rd_pruned[t]),
      .rd_zero_cnt (rd_zero_cnt[t])
    );
  end

  fc_network #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT)) u_fc (
    .clk(clk), .rst_n(rst_n), .act_hid(fc_act_hid), .act_out(fc_act_out), .lr(fc_lr),
    .cfg_we(fc_cfg_we), .cfg_layer(fc_cfg_layer), .cfg_bias(fc_cfg_bias),
    .cfg_node(fc_cfg_node), .cfg_idx(fc_cfg_idx), .cfg_data(fc_cfg_data),
    .rd_layer(fc_rd_layer), .rd_node(fc_rd_node), .rd_idx(fc_rd_idx), .rd_w(fc_rd_w),
    .pixels(fc_pixels), .labels(fc_labels), .hid_pruned(fc_hid_pruned),
    .start_infer(fc_start_infer), .start_train(fc_start_train),
    .busy_o(fc_busy_o), .done_o(fc_done_o), .state_o(fc_state_o), .h_o(fc_h_o),
    .pulses_f_o(fc_pulses_f_o), .pulses_b_o(fc_pulses_b_o), .pulses_u_o(fc_pulses_u_o)
  );

endmodule
