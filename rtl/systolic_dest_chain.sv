// systolic_dest_chain: the destination systolic elements d_1..d_N of one
// layer.
//
// The two frames that leave the previous layer's emitter in each pulse cross
// over into the middle of this layer's column and travel from there both up
// (towards d_1) and down (towards d_N), one element per pulse, on two lanes
// each way. Position p holds the pair of frames (lane_a_o[p], lane_b_o[p])
// that node p sees in the current cycle; every node sees every frame exactly
// once. The upward lanes start at position MU = ceil(N/2)-1 and the downward
// lanes at MD = MU+1, so the farthest node is ceil(N/2)-1 hops away.
//
// Timing: a frame on a_i/b_i in cycle t is at the entry positions in cycle
// t+1 and k hops further in cycle t+1+k. With the emitter's H pulses, the
// last frame reaches the last node H + ceil(N/2) cycles after start: the
// ceil(N_src/2) + ceil(N_dst/2) systolic pulses of a layer-to-layer
// transfer. active_o is high while any frame is in the chain.
// The bidirectional propagation from the middle of the chain and the pulse
// count follow the concept's worked example; the lane registers and the
// active_o flag are this design's choice.
module systolic_dest_chain
  import fpdnn_pkg::*;
#(
  parameter int unsigned N = 25
) (
  input  logic   clk,
  input  logic   rst_n,
  input  frame_t a_i,
  input  frame_t b_i,
  output frame_t lane_a_o [N],
  output frame_t lane_b_o [N],
  output logic   active_o
);

  localparam int unsigned MD = (N + 1) / 2;
  localparam int unsigned MU = MD - 1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < N; p++) begin
        lane_a_o[p] <= FRAME_IDLE;
        lane_b_o[p] <= FRAME_IDLE;
      end
    end else begin
      for (int p = 0; p < N; p++) begin
        if (p == MU || p == MD) begin
          lane_a_o[p] <= a_i;
          lane_b_o[p] <= b_i;
        end else if (p < MU) begin
          lane_a_o[p] <= lane_a_o[p+1];
          lane_b_o[p] <= lane_b_o[p+1];
        end else begin
          lane_a_o[p] <= lane_a_o[p-1];
          lane_b_o[p] <= lane_b_o[p-1];
        end
      end
    end
  end

  always_comb begin
    active_o = 1'b0;
    for (int p = 0; p < N; p++)
      if (lane_a_o[p].ctrl.valid || lane_b_o[p].ctrl.valid) active_o = 1'b1;
  end

endmodule
