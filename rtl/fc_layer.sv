// fc_layer: a column of N triplets - destination element, node, source
// element - forming one fully connected layer on the systolic transport.
//
// fwd_a_i/fwd_b_i come from the previous layer's emitter and run down this
// layer's forward destination chain; bwd_a_i/bwd_b_i come from the next
// layer's emitter during back-propagation (the flow reversed) and run down a
// second destination chain. The layer's own emitter sends either its
// activations (em_sel_delta = 0) or its deltas (em_sel_delta = 1) to its
// neighbours. All node control pulses (clr_f, fin_f, clr_b, fin_b, u_local)
// are broadcast to every node; fc_network sequences them.
//
// Timing: see systolic_emitter and systolic_dest_chain; fwd_active_o and
// bwd_active_o report frames still in flight so the sequencer can tell when a
// transfer has been latched by every node.
// The column of destination element, node and source element follows the
// concept; broadcasting the control pulses and sharing one emitter for
// activations and deltas are this design's choices.
module fc_layer
  import fpdnn_pkg::*;
#(
  parameter int unsigned N_IN   = 400,
  parameter int unsigned N      = 25,
  parameter int unsigned N_NEXT = 10,
  parameter bit          IS_OUT = 1'b0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  act_e            act,
  input  sfe_state_e      state,
  input  fx_t             lr,
  input  logic            cfg_we_w,
  input  logic            cfg_we_b,
  input  logic            cfg_we_t,
  input  logic [ID_W-1:0] cfg_node,
  input  logic [ID_W-1:0] cfg_idx,
  input  fx_t             cfg_data,
  input  logic            clr_f,
  input  logic            fin_f,
  input  logic            clr_b,
  input  logic            fin_b,
  input  logic            u_local,
  input  fx_t             label [N],
  input  frame_t          fwd_a_i,
  input  frame_t          fwd_b_i,
  input  frame_t          bwd_a_i,
  input  frame_t          bwd_b_i,
  input  logic            em_load,
  input  logic            em_sel_delta,
  input  logic            em_start,
  input  logic            pruned_i [N],
  output frame_t          em_a_o,
  output frame_t          em_b_o,
  output logic            em_busy_o,
  output logic            fwd_active_o,
  output logic            bwd_active_o,
  output fx_t             a_o     [N],
  output fx_t             delta_o [N],
  output fx_t             w_o     [N][N_IN],
  output fx_t             wt_o    [N][N_NEXT],
  output fx_t             bias_o  [N]
);

  frame_t fla [N];
  frame_t flb [N];
  frame_t bla [N];
  frame_t blb [N];
  fx_t    z   [N];
  fx_t    em_data [N];

  systolic_dest_chain #(.N(N)) u_fwd (
    .clk(clk), .rst_n(rst_n), .a_i(fwd_a_i), .b_i(fwd_b_i),
    .lane_a_o(fla), .lane_b_o(flb), .active_o(fwd_active_o)
  );

  systolic_dest_chain #(.N(N)) u_bwd (
    .clk(clk), .rst_n(rst_n), .a_i(bwd_a_i), .b_i(bwd_b_i),
    .lane_a_o(bla), .lane_b_o(blb), .active_o(bwd_active_o)
  );

  for (genvar n = 0; n < N; n++) begin : g_node
    fc_node #(.N_IN(N_IN), .N_NEXT(N_NEXT), .IS_OUT(IS_OUT)) u_node (
      .clk     (clk),
      .rst_n   (rst_n),
      .act     (act),
      .state   (state),
      .lr      (lr),
      .cfg_we_w(cfg_we_w && cfg_node == ID_W'(n)),
      .cfg_we_b(cfg_we_b && cfg_node == ID_W'(n)),
      .cfg_we_t(cfg_we_t && cfg_node == ID_W'(n)),
      .cfg_idx (cfg_idx),
      .cfg_data(cfg_data),
      .clr_f   (clr_f),
      .fin_f   (fin_f),
      .clr_b   (clr_b),
      .fin_b   (fin_b),
      .u_local (u_local),
      .label   (label[n]),
      .fa      (fla[n]),
      .fb      (flb[n]),
      .ba      (bla[n]),
      .bb      (blb[n]),
      .z_o     (z[n]),
      .a_o     (a_o[n]),
      .delta_o (delta_o[n]),
      .w_o     (w_o[n]),
      .wt_o    (wt_o[n]),
      .bias_o  (bias_o[n])
    );
    assign em_data[n] = em_sel_delta ? delta_o[n] : a_o[n];
  end

  systolic_emitter #(.N(N)) u_em (
    .clk(clk), .rst_n(rst_n), .load(em_load), .ld_data(em_data),
    .ld_pruned(pruned_i), .state(state), .start(em_start),
    .a_o(em_a_o), .b_o(em_b_o), .busy_o(em_busy_o)
  );

endmodule
