// pixel_element: one 1x1x1 element of a pixel array field.
//
// It holds one entry of a "pixel" (the column of results through the stack
// of output maps at one image position): the pre-activation sum z written by
// the tensor array, the activation a = g(z) of the programmable
// non-linearity, and the back-propagated delta = acc * g'(z). These are the
// forward and backward local data the pixel array stores.
//
// Pruning: while cnt_en is high (validation), each write whose activation has
// magnitude at most prune_thr increments a counter. Once the counter reaches
// a non-zero prune_limit the element is pruned: its activation reads zero from
// then on and pruned_o is set, to be carried in the tag of its output. Counting
// outputs near zero follows the accelerator; the limit rule is this design's
// choice. prune_clr clears the counter and the pruned state.
//
// Shift chain: with shift_en, a is replaced by shift_i and the old a leaves on
// a_o; chained pixel elements form the row shift register through which the
// enhancement matrix unit reads and rewrites the activations.
//
// Timing: every update (wr_valid, bp_valid, shift_en) takes effect at the
// next clock edge; wr_valid has priority over shift_en. Synchronous
// active-low reset clears all stored values.
module pixel_element
  import fpdnn_pkg::*;
#(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  act_e             act,
  // forward write from the tensor array
  input  logic             wr_valid,
  input  fx_t              wr_z,
  // backward write: accumulated weighted sum of deltas from the next layer
  input  logic             bp_valid,
  input  fx_t              bp_acc,
  // row shift chain
  input  logic             shift_en,
  input  fx_t              shift_i,
  // pruning
  input  logic             cnt_en,
  input  fx_t              prune_thr,
  input  logic [CNT_W-1:0] prune_limit,
  input  logic             prune_clr,
  output fx_t              a_o,
  output fx_t              z_o,
  output fx_t              delta_o,
  output logic             pruned_o,
  output logic [CNT_W-1:0] zero_cnt_o
);

  fx_t a_n;
  assign a_n = act_apply(act, wr_z);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_o        <= '0;
      z_o        <= '0;
      delta_o    <= '0;
      pruned_o   <= 1'b0;
      zero_cnt_o <= '0;
    end else begin
      if (wr_valid) begin
        z_o <= wr_z;
        a_o <= pruned_o ? '0 : a_n;
      end else if (shift_en) begin
        a_o <= pruned_o ? '0 : shift_i;
      end
      if (bp_valid) delta_o <= pruned_o ? '0 : act_grad(act, z_o, bp_acc);
      if (prune_clr) begin
        zero_cnt_o <= '0;
        pruned_o   <= 1'b0;
      end else begin
        if (wr_valid && cnt_en && fx_abs(a_n) <= prune_thr && zero_cnt_o != '1)
          zero_cnt_o <= zero_cnt_o + 1'b1;
        if (prune_limit != '0 && zero_cnt_o >= prune_limit)
          pruned_o <= 1'b1;
      end
    end
  end

endmodule
