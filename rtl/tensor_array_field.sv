// tensor_array_field: an NC x NMAP array of KxKx1 tensor elements.
//
// Row c receives input channel c; column m holds the filter (kernel) that
// produces output map m, one KxK slice per channel. A window entering row c
// moves systolically along the row, one element per cycle, so element (c,m)
// sees it m cycles after element (c,0). The results of the elements of one
// column (same map, different channels) are added; the column sum is the
// convolution result for one map at the pixel named in the window's tag, and
// it is sent, still tagged, towards the pixel array field.
//
// Merging fields: a worker whose filters have more channels than NC uses two
// fields. The combinational column sums of one field (col_partial_o) feed
// casc_i of the next; with casc_en set the next field adds them into its own
// column sums. Both fields must be fed in the same cycle.
//
// Interface and timing: all rows are fed together (ch_valid_i, ch_win_i,
// ch_tag_i). A window set presented in cycle t produces col_valid_o[m],
// col_sum_o[m] and col_tag_o[m] in cycle t+m+2. col_tag_o carries the pixel
// identity of the window (info.dst) and the map index (info.src).
// Weights are written through cfg_we/cfg_row/cfg_col/cfg_idx/cfg_w.
// Array arrangement, systolic row flow, column addition and cascading follow
// the accelerator's description; the cycle timing and port layout are this
// design's choice.
module tensor_array_field
  import fpdnn_pkg::*;
#(
  parameter int unsigned K    = 5,
  parameter int unsigned NC   = 3,
  parameter int unsigned NMAP = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  logic [$clog2(NC)-1:0]      cfg_row,
  input  logic [$clog2(NMAP)-1:0]    cfg_col,
  input  logic [$clog2(K*K)-1:0]     cfg_idx,
  input  fx_t                        cfg_w,
  input  tensor_op_e                 op,
  input  logic                       casc_en,
  // channel inputs
  input  logic                       ch_valid_i [NC],
  input  fx_t                        ch_win_i   [NC][K*K],
  input  info_t                      ch_tag_i   [NC],
  // cascade from / to an adjacent field
  input  fx_t                        casc_i        [NMAP],
  output fx_t                        col_partial_o [NMAP],
  // tagged column results towards the pixel array field
  output logic                       col_valid_o [NMAP],
  output fx_t                        col_sum_o   [NMAP],
  output info_t                      col_tag_o   [NMAP]
);

  logic  wv  [NC][NMAP+1];
  fx_t   win [NC][NMAP+1][K*K];
  info_t wt  [NC][NMAP+1];
  logic  rv  [NC][NMAP];
  fx_t   rs  [NC][NMAP];
  info_t rt  [NC][NMAP];

  for (genvar c = 0; c < NC; c++) begin : g_row
    assign wv[c][0]  = ch_valid_i[c];
    assign win[c][0] = ch_win_i[c];
    assign wt[c][0]  = ch_tag_i[c];
    for (genvar m = 0; m < NMAP; m++) begin : g_col
      tensor_element #(.K(K)) u_te (
        .clk        (clk),
        .rst_n      (rst_n),
        .cfg_we     (cfg_we && cfg_row == c && cfg_col == m),
        .cfg_idx    (cfg_idx),
        .cfg_w      (cfg_w),
        .op         (op),
        .win_valid_i(wv[c][m]),
        .win_i      (win[c][m]),
        .win_tag_i  (wt[c][m]),
        .win_valid_o(wv[c][m+1]),
        .win_o      (win[c][m+1]),
        .win_tag_o  (wt[c][m+1]),
        .res_valid_o(rv[c][m]),
        .res_o      (rs[c][m]),
        .res_tag_o  (rt[c][m])
      );
    end
  end

  for (genvar m = 0; m < NMAP; m++) begin : g_sum
    logic  any_v;
    info_t tag_c;
    always_comb begin
      col_partial_o[m] = '0;
      any_v = 1'b0;
      tag_c = '0;
      for (int c = 0; c < NC; c++) begin
        if (rv[c][m]) begin
          col_partial_o[m] = col_partial_o[m] + rs[c][m];
          if (!any_v) tag_c = rt[c][m];
          any_v = 1'b1;
        end
      end
    end

    always_ff @(posedge clk) begin
      if (!rst_n) col_valid_o[m] <= 1'b0;
      else        col_valid_o[m] <= any_v;
    end

    always_ff @(posedge clk) begin
      if (any_v) begin
        col_sum_o[m]      <= col_partial_o[m] + (casc_en ? casc_i[m] : '0);
        col_tag_o[m].dst  <= tag_c.dst;
        col_tag_o[m].src  <= ID_W'(m);
      end
    end
  end

endmodule
