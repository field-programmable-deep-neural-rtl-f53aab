// pixel_array_field: NPIX pixels x NMAP maps of pixel elements plus the
// enhancement matrix unit at the end of the pixel rows.
//
// Row p holds one pixel: its NMAP results through the stack of output maps.
// Column m receives the tagged results of tensor array column m; the tag's
// destination (info.dst) names the pixel, and the field takes a result only if
// that pixel lies in its window [pix_base, pix_base + NPIX). The data is
// written to the element, which applies the programmable non-linearity. This
// tag decoding is what lets one field serve a worker with fewer pixels than
// NPIX and lets two fields serve a worker with more: with src_sel set the
// field takes its results from the adjacent tile's tensor array (alt_*)
// instead of its own, so a tensor array can fill the pixels of two fields.
//
// The rows are shift registers closed through the enhancement matrix unit
// (see enhancement_matrix_unit): emu_start runs an enhancement or a feedback
// pass over the whole field. Back-propagated sums are written to one element
// at a time (bp_*), and any element can be read (rd_*, combinational).
//
// Timing: a result presented in cycle t is readable from cycle t+1. Writes
// must not be presented while emu_busy_o is high. The arrangement and tagged
// routing follow the accelerator; the window/base scheme and the ports are
// this design's choice.
module pixel_array_field
  import fpdnn_pkg::*;
#(
  parameter int unsigned NPIX  = 90,
  parameter int unsigned NMAP  = 64,
  parameter int unsigned CNT_W = 16,
  localparam int unsigned PW   = (NPIX > 1) ? $clog2(NPIX) : 1,
  localparam int unsigned MW   = (NMAP > 1) ? $clog2(NMAP) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration
  input  act_e             act,
  input  logic [ID_W-1:0]  pix_base,
  input  logic             src_sel,
  input  logic [PW-1:0]    grp_i [NPIX],
  input  fx_t              prune_thr,
  input  logic [CNT_W-1:0] prune_limit,
  input  logic             prune_clr,
  input  logic             cnt_en,
  // results from the own tensor array and from the adjacent one
  input  logic             col_valid_i [NMAP],
  input  fx_t              col_sum_i   [NMAP],
  input  info_t            col_tag_i   [NMAP],
  input  logic             alt_valid_i [NMAP],
  input  fx_t              alt_sum_i   [NMAP],
  input  info_t            alt_tag_i   [NMAP],
  // back-propagation write
  input  logic             bp_valid,
  input  logic [PW-1:0]    bp_pix,
  input  logic [MW-1:0]    bp_map,
  input  fx_t              bp_acc,
  // enhancement matrix unit control
  input  logic             emu_start,
  input  logic             emu_feedback,
  input  logic             emu_mag_sel,
  input  logic             drop_en,
  input  logic [15:0]      drop_thr,
  input  fx_t              keep_scale,
  input  fx_t              fb_coef_i [NPIX],
  output fx_t              coef_o    [NPIX],
  output logic             emu_busy_o,
  output logic             emu_done_o,
  // read port
  input  logic [PW-1:0]    rd_pix,
  input  logic [MW-1:0]    rd_map,
  output fx_t              rd_a,
  output fx_t              rd_z,
  output fx_t              rd_delta,
  output logic             rd_pruned,
  output logic [CNT_W-1:0] rd_zero_cnt
);

  logic  in_valid [NMAP];
  fx_t   in_sum   [NMAP];
  info_t in_tag   [NMAP];

  always_comb begin
    for (int m = 0; m < NMAP; m++) begin
      in_valid[m] = src_sel ? alt_valid_i[m] : col_valid_i[m];
      in_sum[m]   = src_sel ? alt_sum_i[m]   : col_sum_i[m];
      in_tag[m]   = src_sel ? alt_tag_i[m]   : col_tag_i[m];
    end
  end

  fx_t              a_q   [NPIX][NMAP];
  fx_t              z_q   [NPIX][NMAP];
  fx_t              d_q   [NPIX][NMAP];
  logic             pr_q  [NPIX][NMAP];
  logic [CNT_W-1:0] zc_q  [NPIX][NMAP];
  fx_t              head  [NPIX];
  fx_t              tail  [NPIX];
  logic             shift_en;

  for (genvar p = 0; p < NPIX; p++) begin : g_pix
    assign tail[p] = a_q[p][NMAP-1];
    for (genvar m = 0; m < NMAP; m++) begin : g_map
      logic [ID_W-1:0] rel;
      assign rel = in_tag[m].dst - pix_base;
      pixel_element #(.CNT_W(CNT_W)) u_pe (
        .clk        (clk),
        .rst_n      (rst_n),
        .act        (act),
        .wr_valid   (in_valid[m] && rel == ID_W'(p)),
        .wr_z       (in_sum[m]),
        .bp_valid   (bp_valid && bp_pix == PW'(p) && bp_map == MW'(m)),
        .bp_acc     (bp_acc),
        .shift_en   (shift_en),
        .shift_i    ((m == 0) ? head[p] : a_q[p][(m == 0) ? 0 : m-1]),
        .cnt_en     (cnt_en),
        .prune_thr  (prune_thr),
        .prune_limit(prune_limit),
        .prune_clr  (prune_clr),
        .a_o        (a_q[p][m]),
        .z_o        (z_q[p][m]),
        .delta_o    (d_q[p][m]),
        .pruned_o   (pr_q[p][m]),
        .zero_cnt_o (zc_q[p][m])
      );
    end
  end

  enhancement_matrix_unit #(.NPIX(NPIX), .NMAP(NMAP)) u_emu (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (emu_start),
    .op_feedback(emu_feedback),
    .mag_sel    (emu_mag_sel),
    .drop_en    (drop_en),
    .drop_thr   (drop_thr),
    .keep_scale (keep_scale),
    .grp_i      (grp_i),
    .fb_coef_i  (fb_coef_i),
    .shift_en_o (shift_en),
    .row_tail_i (tail),
    .row_head_o (head),
    .coef_o     (coef_o),
    .busy_o     (emu_busy_o),
    .done_o     (emu_done_o)
  );

  assign rd_a        = a_q[rd_pix][rd_map];
  assign rd_z        = z_q[rd_pix][rd_map];
  assign rd_delta    = d_q[rd_pix][rd_map];
  assign rd_pruned   = pr_q[rd_pix][rd_map];
  assign rd_zero_cnt = zc_q[rd_pix][rd_map];

endmodule
