// fc_network: a two-layer fully connected network (N_IN inputs, N_HID hidden
// nodes, N_OUT outputs; 400-25-10 by default, the handwritten-digit network)
// trained on the systolic transport, with its F / B / U sequencer.
//
// The sequencer walks the network through the three training states of the
// "SFE cycle state": Forward, Backpropagation and Update of weights.
//   F  The input pixels are latched into the input emitter and sent to the
//      hidden layer; when every hidden node has latched every input, the hidden
//      activations are latched and sent on to the output layer.
//   B  The output nodes form delta = h - y; the deltas are sent back over the
//      reversed transport to the hidden layer, whose nodes accumulate the
//      weighted sum and form their own deltas.
//   U  The input pixels and the hidden activations are sent again, at the
//      same time, and every node updates the weights of the frames it sees.
// An inference (start_infer) runs F only; start_train runs F, B and U.
//
// A layer-to-layer transfer from N_src to N_dst nodes takes
// ceil(N_src/2) + ceil(N_dst/2) systolic pulses. pulses_f/b/u_o count the
// pulses in which frames were in flight in each state: 231, 18 and 213 for the
// 400-25-10 network. Between transfers the sequencer spends two or three
// control cycles latching and starting the next emitter; these are not
// systolic pulses and are not counted.
//
// Configuration: cfg_we with cfg_layer (0 = hidden, 1 = output), cfg_bias,
// cfg_node and cfg_idx writes a weight w[node][idx] or a bias. A write to the
// output layer also writes the transposed copy held by hidden node idx. The
// read port rd_* returns a weight combinationally. Hidden nodes flagged in
// hid_pruned send zero activations tagged as pruned.
// The F, B, U order and the transfer lengths follow the concept's worked
// example; the sequencer states, the configuration and read ports and the
// transposed-copy write are this design's choices.
module fc_network
  import fpdnn_pkg::*;
#(
  parameter int unsigned N_IN  = 400,
  parameter int unsigned N_HID = 25,
  parameter int unsigned N_OUT = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  act_e            act_hid,
  input  act_e            act_out,
  input  fx_t             lr,
  input  logic            cfg_we,
  input  logic            cfg_layer,
  input  logic            cfg_bias,
  input  logic [ID_W-1:0] cfg_node,
  input  logic [ID_W-1:0] cfg_idx,
  input  fx_t             cfg_data,
  input  logic            rd_layer,
  input  logic [ID_W-1:0] rd_node,
  input  logic [ID_W-1:0] rd_idx,
  output fx_t             rd_w,
  input  fx_t             pixels [N_IN],
  input  fx_t             labels [N_OUT],
  input  logic            hid_pruned [N_HID],
  input  logic            start_infer,
  input  logic            start_train,
  output logic            busy_o,
  output logic            done_o,
  output sfe_state_e      state_o,
  output fx_t             h_o [N_OUT],
  output logic [15:0]     pulses_f_o,
  output logic [15:0]     pulses_b_o,
  output logic [15:0]     pulses_u_o
);

  typedef enum logic [3:0] {
    Q_IDLE, Q_F_CLR, Q_F_GO, Q_F_W1, Q_F_HLOAD, Q_F_HGO, Q_F_W2,
    Q_B_0, Q_B_LOAD, Q_B_GO, Q_B_W, Q_U_0, Q_U_GO, Q_U_W, Q_DONE
  } seq_e;

  seq_e q;
  logic train;

  // ---------------- datapath ----------------
  frame_t in_a, in_b, hid_a, hid_b, out_a, out_b;
  logic   in_busy, hid_em_busy, out_em_busy;
  logic   hid_fwd_act, hid_bwd_act, out_fwd_act, out_bwd_act;
  logic   in_pruned [N_IN];
  logic   out_pruned [N_OUT];
  fx_t    hid_lbl [N_HID];
  fx_t    hid_a_v [N_HID];
  fx_t    hid_d_v [N_HID];
  fx_t    out_d_v [N_OUT];
  fx_t    hid_w [N_HID][N_IN];
  fx_t    hid_wt [N_HID][N_OUT];
  fx_t    hid_bias [N_HID];
  fx_t    out_w [N_OUT][N_HID];
  fx_t    out_wt [N_OUT][1];
  fx_t    out_bias [N_OUT];

  always_comb begin
    for (int i = 0; i < N_IN; i++)  in_pruned[i]  = 1'b0;
    for (int i = 0; i < N_OUT; i++) out_pruned[i] = 1'b0;
    for (int i = 0; i < N_HID; i++) hid_lbl[i]    = '0;
  end

  // control decode
  logic in_load, in_start;
  logic h_clr_f, h_fin_f, h_clr_b, h_fin_b, h_u, h_em_load, h_em_start;
  logic o_clr_f, o_fin_f, o_fin_b, o_u, o_em_load, o_em_start;
  logic f_act, b_act, u_act;

  assign f_act = (q == Q_F_W1) ? (in_busy || hid_fwd_act)
                               : (hid_em_busy || out_fwd_act);
  assign b_act = out_em_busy || hid_bwd_act;
  assign u_act = in_busy || hid_em_busy || hid_fwd_act || out_fwd_act;

  assign in_load    = (q == Q_F_CLR) || (q == Q_U_0);
  assign in_start   = (q == Q_F_GO)  || (q == Q_U_GO);
  assign h_clr_f    = (q == Q_F_CLR);
  assign o_clr_f    = (q == Q_F_CLR);
  assign h_fin_f    = (q == Q_F_W1) && !f_act;
  assign h_em_load  = (q == Q_F_HLOAD) || (q == Q_U_0);
  assign h_em_start = (q == Q_F_HGO)   || (q == Q_U_GO);
  assign o_fin_f    = (q == Q_F_W2) && !f_act;
  assign o_fin_b    = (q == Q_B_0);
  assign h_clr_b    = (q == Q_B_0);
  assign o_em_load  = (q == Q_B_LOAD);
  assign o_em_start = (q == Q_B_GO);
  assign h_fin_b    = (q == Q_B_W) && !b_act;
  assign h_u        = (q == Q_U_0);
  assign o_u        = (q == Q_U_0);

  always_comb begin
    unique case (q)
      Q_F_CLR, Q_F_GO, Q_F_W1, Q_F_HLOAD, Q_F_HGO, Q_F_W2: state_o = SFE_F;
      Q_B_0, Q_B_LOAD, Q_B_GO, Q_B_W:                     state_o = SFE_B;
      Q_U_0, Q_U_GO, Q_U_W:                               state_o = SFE_U;
      default:                                            state_o = SFE_IDLE;
    endcase
  end

  systolic_emitter #(.N(N_IN)) u_in (
    .clk(clk), .rst_n(rst_n), .load(in_load), .ld_data(pixels),
    .ld_pruned(in_pruned), .state(state_o), .start(in_start),
    .a_o(in_a), .b_o(in_b), .busy_o(in_busy)
  );

  fc_layer #(.N_IN(N_IN), .N(N_HID), .N_NEXT(N_OUT), .IS_OUT(1'b0)) u_hid (
    .clk(clk), .rst_n(rst_n), .act(act_hid), .state(state_o), .lr(lr),
    .cfg_we_w(cfg_we && !cfg_layer && !cfg_bias),
    .cfg_we_b(cfg_we && !cfg_layer && cfg_bias),
    .cfg_we_t(cfg_we && cfg_layer && !cfg_bias),
    .cfg_node(cfg_layer ? cfg_idx : cfg_node),
    .cfg_idx (cfg_layer ? cfg_node : cfg_idx),
    .cfg_data(cfg_data),
    .clr_f(h_clr_f), .fin_f(h_fin_f), .clr_b(h_clr_b), .fin_b(h_fin_b),
    .u_local(h_u), .label(hid_lbl),
    .fwd_a_i(in_a), .fwd_b_i(in_b), .bwd_a_i(out_a), .bwd_b_i(out_b),
    .em_load(h_em_load), .em_sel_delta(1'b0), .em_start(h_em_start),
    .pruned_i(hid_pruned),
    .em_a_o(hid_a), .em_b_o(hid_b), .em_busy_o(hid_em_busy),
    .fwd_active_o(hid_fwd_act), .bwd_active_o(hid_bwd_act),
    .a_o(hid_a_v), .delta_o(hid_d_v), .w_o(hid_w), .wt_o(hid_wt), .bias_o(hid_bias)
  );

  fc_layer #(.N_IN(N_HID), .N(N_OUT), .N_NEXT(1), .IS_OUT(1'b1)) u_out (
    .clk(clk), .rst_n(rst_n), .act(act_out), .state(state_o), .lr(lr),
    .cfg_we_w(cfg_we && cfg_layer && !cfg_bias),
    .cfg_we_b(cfg_we && cfg_layer && cfg_bias),
    .cfg_we_t(1'b0),
    .cfg_node(cfg_node), .cfg_idx(cfg_idx), .cfg_data(cfg_data),
    .clr_f(o_clr_f), .fin_f(o_fin_f), .clr_b(1'b0), .fin_b(o_fin_b),
    .u_local(o_u), .label(labels),
    .fwd_a_i(hid_a), .fwd_b_i(hid_b), .bwd_a_i(FRAME_IDLE), .bwd_b_i(FRAME_IDLE),
    .em_load(o_em_load), .em_sel_delta(1'b1), .em_start(o_em_start),
    .pruned_i(out_pruned),
    .em_a_o(out_a), .em_b_o(out_b), .em_busy_o(out_em_busy),
    .fwd_active_o(out_fwd_act), .bwd_active_o(out_bwd_act),
    .a_o(h_o), .delta_o(out_d_v), .w_o(out_w), .wt_o(out_wt), .bias_o(out_bias)
  );

  // weight read port
  always_comb begin
    rd_w = '0;
    if (!rd_layer) begin
      if (32'(rd_node) < N_HID) rd_w = (32'(rd_idx) < N_IN) ? hid_w[rd_node][rd_idx] : hid_bias[rd_node];
    end else begin
      if (32'(rd_node) < N_OUT) rd_w = (32'(rd_idx) < N_HID) ? out_w[rd_node][rd_idx] : out_bias[rd_node];
    end
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q          <= Q_IDLE;
      train      <= 1'b0;
      done_o     <= 1'b0;
      pulses_f_o <= '0;
      pulses_b_o <= '0;
      pulses_u_o <= '0;
    end else begin
      done_o <= 1'b0;
      unique case (q)
        Q_IDLE: if (start_infer || start_train) begin
          train      <= start_train;
          pulses_f_o <= '0;
          pulses_b_o <= '0;
          pulses_u_o <= '0;
          q          <= Q_F_CLR;
        end
        Q_F_CLR:   q <= Q_F_GO;
        Q_F_GO:    q <= Q_F_W1;
        Q_F_W1:    if (f_act) pulses_f_o <= pulses_f_o + 1'b1; else q <= Q_F_HLOAD;
        Q_F_HLOAD: q <= Q_F_HGO;
        Q_F_HGO:   q <= Q_F_W2;
        Q_F_W2:    if (f_act) pulses_f_o <= pulses_f_o + 1'b1;
                   else q <= train ? Q_B_0 : Q_DONE;
        Q_B_0:     q <= Q_B_LOAD;
        Q_B_LOAD:  q <= Q_B_GO;
        Q_B_GO:    q <= Q_B_W;
        Q_B_W:     if (b_act) pulses_b_o <= pulses_b_o + 1'b1; else q <= Q_U_0;
        Q_U_0:     q <= Q_U_GO;
        Q_U_GO:    q <= Q_U_W;
        Q_U_W:     if (u_act) pulses_u_o <= pulses_u_o + 1'b1; else q <= Q_DONE;
        Q_DONE: begin
          done_o <= 1'b1;
          q      <= Q_IDLE;
        end
        default:   q <= Q_IDLE;
      endcase
    end
  end

  assign busy_o = (q != Q_IDLE);

  // the sequencer never starts an emitter that is still sending
  a_in_idle: assert property (@(posedge clk) disable iff (!rst_n) in_start |-> !in_busy);
  a_h_idle:  assert property (@(posedge clk) disable iff (!rst_n) h_em_start |-> !hid_em_busy);

endmodule
