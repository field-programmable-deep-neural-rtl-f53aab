// fc_node: one node of a systolically connected fully connected layer.
//
// Forward (F): the node starts from its bias and, for each tagged frame that
// passes its destination element (up to two per pulse, lanes a and b), pairs
// the activation with the weight chosen by the frame's source tag:
// z += w[src] * a_src. Because the tag, not the arrival order, selects the
// weight, the order in which the systolic transport delivers the activations
// does not matter. fin_f then latches a = g(z).
//
// Backward (B): an output node forms delta = a - y from its label (fin_b).
// A hidden node receives the deltas of the next layer as tagged frames,
// pairs each with the weight of its connection to that node, kept in a local
// transposed copy wt[], and accumulates acc += wt[src] * delta_src; fin_b
// forms delta = acc * g'(z). The received deltas are recorded for the update.
//
// Update (U): for each activation frame passing again, w[src] -= lr * delta *
// a_src (and the bias -= lr * delta at u_local). u_local also updates the
// transposed copy, wt[j] -= lr * delta_next[j] * a, with the same operand
// order as the owner of the weight, so both copies stay equal.
//
// Timing: every control pulse and lane frame acts at the next clock edge.
// The tag-paired weighted sum follows the accelerator; the bias, the
// transposed weight copy and the loss derivative a - y are this design's
// choices.
module fc_node
  import fpdnn_pkg::*;
#(
  parameter int unsigned N_IN   = 400,
  parameter int unsigned N_NEXT = 1,
  parameter bit          IS_OUT = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  act_e       act,
  input  sfe_state_e state,
  input  fx_t        lr,
  // configuration
  input  logic       cfg_we_w,
  input  logic       cfg_we_b,
  input  logic       cfg_we_t,
  input  logic [ID_W-1:0] cfg_idx,
  input  fx_t        cfg_data,
  // control pulses
  input  logic       clr_f,
  input  logic       fin_f,
  input  logic       clr_b,
  input  logic       fin_b,
  input  logic       u_local,
  input  fx_t        label,
  // frames at this node's destination elements
  input  frame_t     fa,
  input  frame_t     fb,
  input  frame_t     ba,
  input  frame_t     bb,
  output fx_t        z_o,
  output fx_t        a_o,
  output fx_t        delta_o,
  output fx_t        w_o  [N_IN],
  output fx_t        wt_o [N_NEXT],
  output fx_t        bias_o
);

  fx_t w  [N_IN];
  fx_t wt [N_NEXT];
  fx_t dn [N_NEXT];
  fx_t bias, z, a, acc, delta;

  assign w_o     = w;
  assign wt_o    = wt;
  assign bias_o  = bias;
  assign z_o     = z;
  assign a_o     = a;
  assign delta_o = delta;

  function automatic fx_t upd(fx_t wv, fx_t d, fx_t x, fx_t rate);
    return wv - fx_mul(rate, fx_mul(d, x));
  endfunction

  logic fa_ok, fb_ok, ba_ok, bb_ok;
  assign fa_ok = fa.ctrl.valid && 32'(fa.info.src) < N_IN;
  assign fb_ok = fb.ctrl.valid && 32'(fb.info.src) < N_IN;
  assign ba_ok = ba.ctrl.valid && 32'(ba.info.src) < N_NEXT;
  assign bb_ok = bb.ctrl.valid && 32'(bb.info.src) < N_NEXT;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      z     <= '0;
      a     <= '0;
      acc   <= '0;
      delta <= '0;
      bias  <= '0;
      for (int i = 0; i < N_IN; i++)   w[i]  <= '0;
      for (int j = 0; j < N_NEXT; j++) begin
        wt[j] <= '0;
        dn[j] <= '0;
      end
    end else begin
      if (cfg_we_w) w[cfg_idx]  <= cfg_data;
      if (cfg_we_t) wt[cfg_idx] <= cfg_data;
      if (cfg_we_b) bias        <= cfg_data;

      unique case (state)
        SFE_F: begin
          if (clr_f)      z <= bias;
          else if (fin_f) a <= act_apply(act, z);
          else            z <= z + (fa_ok ? fx_mul(w[fa.info.src], fa.data) : '0)
                                 + (fb_ok ? fx_mul(w[fb.info.src], fb.data) : '0);
        end
        SFE_B: begin
          if (clr_b) acc <= '0;
          else if (fin_b) delta <= IS_OUT ? (a - label) : act_grad(act, z, acc);
          else begin
            acc <= acc + (ba_ok ? fx_mul(wt[ba.info.src], ba.data) : '0)
                       + (bb_ok ? fx_mul(wt[bb.info.src], bb.data) : '0);
            if (ba_ok) dn[ba.info.src] <= ba.data;
            if (bb_ok) dn[bb.info.src] <= bb.data;
          end
        end
        SFE_U: begin
          if (u_local) begin
            bias <= bias - fx_mul(lr, delta);
            for (int j = 0; j < N_NEXT; j++) wt[j] <= upd(wt[j], dn[j], a, lr);
          end else begin
            if (fa_ok) w[fa.info.src] <= upd(w[fa.info.src], delta, fa.data, lr);
            if (fb_ok) w[fb.info.src] <= upd(w[fb.info.src], delta, fb.data, lr);
          end
        end
        default: ;
      endcase
    end
  end

endmodule
