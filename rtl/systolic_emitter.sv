// systolic_emitter: the source systolic elements s_1..s_N of one layer.
//
// The layer's N outputs (activations in the forward pass, deltas in the
// backward pass) are latched with load, each as a tagged frame whose
// information part names the producing node (info.src = index). After start
// the column is split in two halves at a cross-over point: the upper half
// (indices 0..H-1, H = ceil(N/2)) shifts down towards the cross-over and the
// lower half (H..N-1) shifts up towards it, so two frames leave per systolic
// pulse, a_o from the upper half (H-1, H-2, ... 0) and b_o from the lower half
// (H, H+1, ... N-1). All N frames leave in H pulses.
//
// Timing: start in cycle t; frames are on a_o/b_o in cycles t+1 .. t+H and
// busy_o is high in exactly those cycles. An odd N leaves b_o invalid in the
// last pulse. The half split and cross-over follow the accelerator's systolic
// transport; emission order and tag layout are this design's choice.
module systolic_emitter
  import fpdnn_pkg::*;
#(
  parameter int unsigned N = 25
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  fx_t        ld_data [N],
  input  logic       ld_pruned [N],
  input  sfe_state_e state,
  input  logic       start,
  output frame_t     a_o,
  output frame_t     b_o,
  output logic       busy_o
);

  localparam int unsigned H = (N + 1) / 2;

  frame_t s [N];
  logic [$clog2(H+1)-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_o <= 1'b0;
      cnt    <= '0;
      for (int i = 0; i < N; i++) s[i] <= FRAME_IDLE;
    end else if (load) begin
      for (int i = 0; i < N; i++) begin
        s[i].data        <= ld_pruned[i] ? '0 : ld_data[i];
        s[i].info.src    <= ID_W'(i);
        s[i].info.dst    <= '0;
        s[i].ctrl.valid  <= 1'b1;
        s[i].ctrl.state  <= state;
        s[i].ctrl.pruned <= ld_pruned[i];
      end
    end else if (start && !busy_o) begin
      busy_o <= 1'b1;
      cnt    <= '0;
    end else if (busy_o) begin
      for (int i = 1; i < H; i++) s[i] <= s[i-1];
      s[0] <= FRAME_IDLE;
      for (int i = H; i + 1 < N; i++) s[i] <= s[i+1];
      if (N > H) s[N-1] <= FRAME_IDLE;
      cnt <= cnt + 1'b1;
      if (cnt == ($bits(cnt))'(H - 1)) busy_o <= 1'b0;
    end
  end

  always_comb begin
    a_o = busy_o ? s[H-1] : FRAME_IDLE;
    b_o = (busy_o && N > H) ? s[(N > H) ? H : 0] : FRAME_IDLE;
  end

endmodule
