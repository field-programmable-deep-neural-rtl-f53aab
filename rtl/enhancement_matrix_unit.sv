// enhancement_matrix_unit: map-coincidence enhancement, dropout and
// reinforcement feedback for one pixel array field.
//
// The pixel array field holds NPIX pixels, each a row of NMAP activations
// (one per output map). The unit sits at the end of the rows: each row is a
// shift register whose last element feeds the unit (row_tail_i) and whose
// first element is written back from it (row_head_o). Shifting NMAP times
// passes every activation through the unit once and leaves the rows in their
// original order.
//
// op = EMU_ENHANCE, started with start:
//   SUM    NMAP shifts; for each pixel the unit adds up its activations, or
//          their magnitudes when mag_sel is set; the data is returned as is.
//   GROUP  NPIX cycles; pixel p's sum is added to the coefficient of its mask
//          group grp_i[p]. A group is the fxf mask volume (1x1, 3x3, 5x5 or
//          7x7 pixels, with stride f so volumes do not overlap) through all
//          maps; the assignment of pixels to groups is configuration, worked
//          out from the layer geometry by whoever programs the field.
//   SOFTMAX 4 cycles; the group sums are "softmaxed": c_g = exp(s_g - max) /
//          sum_h exp(s_h - max), so every coefficient is at most 1 and they
//          add up to 1. exp() is 2^(x*log2 e) with the fractional power of two
//          approximated linearly (2^-f ~ 1 - f/2), and one divider forms the
//          reciprocal of the sum.
//   APPLY  NMAP shifts; every activation of pixel p is multiplied by the
//          coefficient of its group. With drop_en, each activation is also
//          dropped (set to zero) with probability drop_thr/65536, and a kept
//          one is multiplied by keep_scale = 1/(1-p): dropout merged with the
//          enhancement.
// op = EMU_FEEDBACK: the coefficients are multiplied element-wise by the
//   coefficients fb_coef_i fed back from the unit of a deeper layer (same
//   width and height, so the same grouping), and the stored activations, which
//   already carry the old coefficients, are multiplied by fb_coef_i (APPLY).
//   This is the single-iteration reinforcement feedback.
//
// coef_o holds the coefficients of the last operation, for feeding back to the
// unit of an earlier layer. Enhanced cycle counts: EMU_ENHANCE takes
// 2*NMAP + NPIX + 6 cycles from start to done_o, EMU_FEEDBACK NMAP + 3.
// The operations follow the accelerator's description of the unit; the
// group configuration, the exp approximation, the per-row random generators
// (16-bit LFSRs) and the cycle schedule are this design's own choices.
module enhancement_matrix_unit
  import fpdnn_pkg::*;
#(
  parameter int unsigned NPIX = 90,
  parameter int unsigned NMAP = 64,
  localparam int unsigned GW  = (NPIX > 1) ? $clog2(NPIX) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          op_feedback,    // 0: EMU_ENHANCE, 1: EMU_FEEDBACK
  input  logic          mag_sel,
  input  logic          drop_en,
  input  logic [15:0]   drop_thr,
  input  fx_t           keep_scale,
  input  logic [GW-1:0] grp_i   [NPIX],
  input  fx_t           fb_coef_i [NPIX],
  // row shift interface
  output logic          shift_en_o,
  input  fx_t           row_tail_i [NPIX],
  output fx_t           row_head_o [NPIX],
  // status and coefficients
  output fx_t           coef_o [NPIX],
  output logic          busy_o,
  output logic          done_o
);

  localparam fx_t LOG2E = fx_t'($rtoi(1.4426950408889634 * (2.0 ** FRAC_W)));  // log2(e)

  typedef enum logic [3:0] {
    S_IDLE, S_SUM, S_GROUP, S_MAX, S_EXP, S_DIV, S_NORM, S_FB, S_APPLY, S_DONE
  } st_e;

  st_e st;
  logic [$clog2(NMAP+1)-1:0] scnt;
  logic [GW-1:0]             pcnt;
  fx_t  rowsum [NPIX];
  fx_t  gsum   [NPIX];
  logic gused  [NPIX];
  fx_t  ex     [NPIX];
  fx_t  scale  [NPIX];
  fx_t  gmax, esum, recip;
  logic [15:0] lfsr [NPIX];

  function automatic fx_t exp_neg(fx_t x);   // x <= 0
    fx_t t, f, m;
    int unsigned ip;
    t  = fx_mul(-x, LOG2E);
    ip = int'(t >>> FRAC_W);
    f  = t & ((fx_t'(1) <<< FRAC_W) - 1);
    m  = FX_ONE - (f >>> 1);
    return (ip >= DATA_W - 1) ? '0 : (m >>> ip);
  endfunction

  // combinational maximum and exponentials of the used groups
  fx_t  gmax_c;
  fx_t  ex_c [NPIX];
  fx_t  esum_c;
  always_comb begin
    gmax_c = '0;
    for (int g = 0; g < NPIX; g++)
      if (gused[g] && gsum[g] > gmax_c) gmax_c = gsum[g];
    esum_c = '0;
    for (int g = 0; g < NPIX; g++) begin
      ex_c[g] = gused[g] ? exp_neg(gsum[g] - gmax) : '0;
      esum_c  = esum_c + ex_c[g];
    end
  end

  assign shift_en_o = (st == S_SUM) || (st == S_APPLY);
  assign busy_o     = (st != S_IDLE);

  // data returned into the rows
  fx_t eff_scale [NPIX];
  always_comb begin
    for (int p = 0; p < NPIX; p++) begin
      eff_scale[p] = drop_en ? fx_mul(scale[grp_i[p]], keep_scale) : scale[grp_i[p]];
      if (st == S_APPLY) begin
        if (drop_en && lfsr[p] < drop_thr) row_head_o[p] = '0;
        else                               row_head_o[p] = fx_mul(row_tail_i[p], eff_scale[p]);
      end else begin
        row_head_o[p] = row_tail_i[p];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      scnt   <= '0;
      pcnt   <= '0;
      done_o <= 1'b0;
      gmax   <= '0;
      esum   <= '0;
      recip  <= '0;
      for (int p = 0; p < NPIX; p++) begin
        rowsum[p] <= '0;
        gsum[p]   <= '0;
        gused[p]  <= 1'b0;
        ex[p]     <= '0;
        scale[p]  <= '0;
        coef_o[p] <= '0;
        lfsr[p]   <= 16'(p + 1) ^ 16'hACE1;
      end
    end else begin
      done_o <= 1'b0;
      // per-row Galois LFSRs, x^16 + x^14 + x^13 + x^11 + 1
      if (st == S_APPLY)
        for (int p = 0; p < NPIX; p++)
          lfsr[p] <= (lfsr[p] >> 1) ^ (lfsr[p][0] ? 16'hB400 : 16'h0000);
      unique case (st)
        S_IDLE: if (start) begin
          scnt <= '0;
          pcnt <= '0;
          if (op_feedback) begin
            st <= S_FB;
          end else begin
            st <= S_SUM;
            for (int p = 0; p < NPIX; p++) begin
              rowsum[p] <= '0;
              gsum[p]   <= '0;
              gused[p]  <= 1'b0;
            end
          end
        end
        S_SUM: begin
          for (int p = 0; p < NPIX; p++)
            rowsum[p] <= rowsum[p] + (mag_sel ? fx_abs(row_tail_i[p]) : row_tail_i[p]);
          scnt <= scnt + 1'b1;
          if (scnt == NMAP - 1) st <= S_GROUP;
        end
        S_GROUP: begin
          gsum[grp_i[pcnt]]  <= gsum[grp_i[pcnt]] + rowsum[pcnt];
          gused[grp_i[pcnt]] <= 1'b1;
          pcnt <= pcnt + 1'b1;
          if (pcnt == GW'(NPIX - 1)) st <= S_MAX;
        end
        S_MAX: begin
          gmax <= gmax_c;
          st   <= S_EXP;
        end
        S_EXP: begin
          for (int g = 0; g < NPIX; g++) ex[g] <= ex_c[g];
          esum <= esum_c;
          st   <= S_DIV;
        end
        S_DIV: begin
          recip <= fx_t'(((2*DATA_W)'(1) << (2*FRAC_W)) / (2*DATA_W)'(esum));
          st    <= S_NORM;
        end
        S_NORM: begin
          for (int g = 0; g < NPIX; g++) begin
            coef_o[g] <= fx_mul(ex[g], recip);
            scale[g]  <= fx_mul(ex[g], recip);
          end
          scnt <= '0;
          st   <= S_APPLY;
        end
        S_FB: begin
          for (int g = 0; g < NPIX; g++) begin
            coef_o[g] <= fx_mul(coef_o[g], fb_coef_i[g]);
            scale[g]  <= fb_coef_i[g];
          end
          scnt <= '0;
          st   <= S_APPLY;
        end
        S_APPLY: begin
          scnt <= scnt + 1'b1;
          if (scnt == NMAP - 1) st <= S_DONE;
        end
        S_DONE: begin
          done_o <= 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
