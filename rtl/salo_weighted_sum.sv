// salo_weighted_sum: weighted sum module of one PE row.
//
// When a window is split into tiles, a query's output is produced tile by
// tile. Each tile t gives an output vector o_t normalised by its own weight
// W_t (its sum of exponentials). Merging a new tile (weight W1) into the
// result so far (weight W2) gives
//   o = W1/(W1+W2) * o_new + W2/(W1+W2) * o_prev,  W = W1 + W2,
// which equals the softmax over the union of the tiles. This equation, the
// collection of W1 at stage 3 and the "two multipliers and an adder per row"
// follow the paper. The reciprocal of W1+W2 (salo_recip), the formats and
// the special cases are this design's choices:
//   first    : no previous result, o = o_new, W = W1
//   !row_en or W1 == 0 : the tile contributes nothing, o = o_prev, W = W2
//
// Timing: w_vld (one cycle, the row sum leaving the row in stage 3) starts
// the reciprocal; the two normalised weights are ready (busy low) 20 cycles
// later, before stage 5 output starts. In stage 5 each o_vld cycle takes one
// element of the row output (19 fraction bits: P * v) and the matching
// element of the previous output, and emits the merged element (16 bits, 8
// fraction bits) one cycle later with y_vld.
module salo_weighted_sum
  import salo_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  first,
  input  logic  row_en,
  input  acc_t  w_new,
  input  logic  w_vld,
  input  wgt_t  w_prev,
  output wgt_t  w_out,
  output logic  busy,
  input  acc_t  o_new,
  input  logic  o_vld,
  input  out_t  o_prev,
  output out_t  y,
  output logic  y_vld
);

  localparam int ONE    = 1 << P_FRAC;
  localparam int O_SH   = P_FRAC + DATA_FRAC - OUT_FRAC;   // 11

  wgt_t  w1_q, w2_q, wt_q;
  logic  keep_q, fresh_q, pend_q;
  logic [P_FRAC:0] a1_q, a2_q;

  mant_t r_mant;
  sh_t   r_lead;
  logic  r_busy, r_done, r_zero;

  wgt_t  wt_c;
  logic  [WGT_W:0] wsum;
  always_comb begin
    wsum = {1'b0, w_prev} + {{(WGT_W-ACC_W+1){1'b0}}, w_new};
    if (first)       wt_c = wgt_t'(unsigned'(w_new));
    else if (wsum[WGT_W]) wt_c = '1;
    else             wt_c = wsum[WGT_W-1:0];
  end

  salo_recip #(.IN_W(WGT_W)) u_recip (
    .clk, .rst_n,
    .start (w_vld),
    .x     (wt_c),
    .busy  (r_busy),
    .done  (r_done),
    .mant  (r_mant),
    .lead  (r_lead),
    .zero  (r_zero)
  );

  // normalised weights: W * mant >> (lead + 16 - P_FRAC)
  logic [WGT_W+MANT_W-1:0] p1, p2;
  logic [P_FRAC:0]         a1_c, a2_c;
  always_comb begin
    p1 = ({{MANT_W{1'b0}}, w1_q} * {{WGT_W{1'b0}}, r_mant}) >> (r_lead + sh_t'(MANT_W - P_FRAC));
    p2 = ({{MANT_W{1'b0}}, w2_q} * {{WGT_W{1'b0}}, r_mant}) >> (r_lead + sh_t'(MANT_W - P_FRAC));
    a1_c = (p1 > (WGT_W+MANT_W)'(ONE)) ? (P_FRAC+1)'(ONE) : p1[P_FRAC:0];
    a2_c = (p2 > (WGT_W+MANT_W)'(ONE)) ? (P_FRAC+1)'(ONE) : p2[P_FRAC:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w1_q <= '0; w2_q <= '0; wt_q <= '0;
      keep_q <= 1'b0; fresh_q <= 1'b0; pend_q <= 1'b0;
      a1_q <= '0; a2_q <= '0;
    end else if (w_vld) begin
      w1_q    <= wgt_t'(unsigned'(w_new));
      w2_q    <= first ? '0 : w_prev;
      wt_q    <= wt_c;
      keep_q  <= !row_en || (w_new == '0);
      fresh_q <= first;
      pend_q  <= 1'b1;
    end else if (r_done) begin
      pend_q <= 1'b0;
      if (keep_q) begin
        a1_q <= '0;
        a2_q <= fresh_q ? '0 : (P_FRAC+1)'(ONE);
      end else if (fresh_q || r_zero) begin
        a1_q <= (P_FRAC+1)'(ONE);
        a2_q <= '0;
      end else begin
        a1_q <= a1_c;
        a2_q <= a2_c;
      end
    end
  end

  assign busy  = pend_q || r_busy;
  assign w_out = keep_q ? (fresh_q ? '0 : w2_q) : wt_q;

  // stage 5: two multipliers and an adder per element
  out_t                 on16;
  logic signed [ACC_W-1:0] on_r;
  logic signed [OUT_W+P_FRAC+2:0] mix;
  always_comb begin
    on_r = (o_new + acc_t'(1 <<< (O_SH - 1))) >>> O_SH;
    if (on_r > acc_t'(32767))       on16 = 16'sh7fff;
    else if (on_r < -acc_t'(32768)) on16 = 16'sh8000;
    else                            on16 = out_t'(on_r);
    mix = $signed({1'b0, a1_q}) * on16 + $signed({1'b0, a2_q}) * o_prev
        + (OUT_W+P_FRAC+3)'(1 <<< (P_FRAC - 1));
    mix = mix >>> P_FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y     <= '0;
      y_vld <= 1'b0;
    end else begin
      y_vld <= o_vld;
      if (o_vld) begin
        if (mix > (OUT_W+P_FRAC+3)'(32767))       y <= 16'sh7fff;
        else if (mix < -(OUT_W+P_FRAC+3)'(32768)) y <= 16'sh8000;
        else                                       y <= out_t'(mix);
      end
    end
  end

endmodule
