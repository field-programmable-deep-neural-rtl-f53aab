// tensor_element: one KxKx1 (5x5x1 by default) multiply-accumulate element
// of a tensor array field.
//
// The element holds the KxK weights of one channel of one filter. Each valid
// input window (KxK values of one input channel, flattened row-major) is
// multiplied element-wise with the weights and the K*K products are summed in
// one adder tree: the result is the filter's contribution from this channel
// at one output pixel. 3x3 and 1x1 filters are run as zero-padded 5x5
// filters, as in the accelerator this design follows. In max-pool mode
// (op = TOP_MAX) the element instead returns the largest window value whose
// weight is non-zero, so the weights act as a pooling mask: max-pool is built
// as a special case of a convolution element. The max-pool rule is this
// design's own; the source only says that max-pool layers are special cases
// of convolution layers.
//
// Systolic row: the window is also registered and passed on (win_o) to the
// next element in the same row (next map / filter), one element per cycle.
//
// Interface and timing: weights are written one at a time through cfg_we /
// cfg_idx / cfg_w. A window presented with win_valid_i in cycle t gives
// res_valid_o / res_o / res_tag_o in cycle t+1, and win_valid_o / win_o /
// win_tag_o in cycle t+1. Synchronous active-low reset clears the valid flags;
// the weight registers are not reset (they are configuration).
module tensor_element
  import fpdnn_pkg::*;
#(
  parameter int unsigned K = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration
  input  logic                    cfg_we,
  input  logic [$clog2(K*K)-1:0]  cfg_idx,
  input  fx_t                     cfg_w,
  input  tensor_op_e              op,
  // systolic window input
  input  logic                    win_valid_i,
  input  fx_t                     win_i [K*K],
  input  info_t                   win_tag_i,
  // systolic window output to the next element in the row
  output logic                    win_valid_o,
  output fx_t                     win_o [K*K],
  output info_t                   win_tag_o,
  // result towards the column adder
  output logic                    res_valid_o,
  output fx_t                     res_o,
  output info_t                   res_tag_o
);

  fx_t w [K*K];

  always_ff @(posedge clk) begin
    if (cfg_we) w[cfg_idx] <= cfg_w;
  end

  fx_t sum_c;
  fx_t max_c;
  logic any_c;

  always_comb begin
    sum_c = '0;
    max_c = '0;
    any_c = 1'b0;
    for (int i = 0; i < K*K; i++) begin
      sum_c = sum_c + fx_mul(win_i[i], w[i]);
      if (w[i] != '0 && (!any_c || win_i[i] > max_c)) begin
        max_c = win_i[i];
        any_c = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      res_valid_o <= 1'b0;
      win_valid_o <= 1'b0;
    end else begin
      res_valid_o <= win_valid_i;
      win_valid_o <= win_valid_i;
    end
  end

  always_ff @(posedge clk) begin
    if (win_valid_i) begin
      res_o     <= (op == TOP_MAX) ? max_c : sum_c;
      res_tag_o <= win_tag_i;
      win_o     <= win_i;
      win_tag_o <= win_tag_i;
    end
  end

endmodule
