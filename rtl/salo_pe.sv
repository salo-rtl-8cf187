// salo_pe: one processing element of the SALO spatial array.
//
// Every PE owns a single fixed-point multiply-accumulate unit, MAC = a*b + c,
// whose operands are selected by the stage the controller broadcasts, a
// barrel shifter behind the MAC and the accumulator register Reg_acc. The
// same PE is used in the PE array, the global PE row and the global PE column.
//
//   stage    a            b          c              shift        result to
//   ST_QK    k element    q element  Reg_acc        0            Reg_acc
//   ST_EXP   LUT slope    Frac       LUT icpt<<8    8 - int(S)   Reg_acc
//   ST_SUM   1            Reg_acc    sum_in         0            sum_out
//   ST_NORM  inv mantissa Reg_acc    0              inv shift    Reg_acc
//   ST_SV    v element    Reg_acc    sum_in         0            sum_out
//
// The operand table and the stage order follow the paper's PE figure and
// text; the number formats (see salo_pkg) and the clamping of scores to
// [-24, 8) before the exponent are this design's choices.
//
// Data paths, all registered (one cycle per hop):
//   q_in  -> q_out   horizontal, query elements (stage 1)
//   kv_in -> kv_out  diagonal, key (stage 1) or value (stage 5) elements, with
//                    kv_ok telling whether that key is inside the pattern
//   sum_in -> sum_out horizontal partial sums (stages 3 and 5)
// In ST_QK the PE accumulates whenever q_vld_in is high; the skew of the
// vector registers makes q_i[t] and k_j[t] arrive together. A PE whose key
// was not ok, or whose en input is low, produces an exponent of 0 and so
// drops out of the softmax. clr (one cycle) starts a new pass.
//
// The MAC is kept wide enough that no stage can overflow it; only the low
// 32 bits of its result are stored, so its top bits are unused by design.
module salo_pe
  import salo_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  stage_e stage,
  input  logic   clr,
  input  logic   en,
  // horizontal query path
  input  elem_t  q_in,
  input  logic   q_vld_in,
  output elem_t  q_out,
  output logic   q_vld_out,
  // diagonal key/value path
  input  elem_t  kv_in,
  input  logic   kv_vld_in,
  input  logic   kv_ok_in,
  output elem_t  kv_out,
  output logic   kv_vld_out,
  output logic   kv_ok_out,
  // horizontal partial-sum path
  input  acc_t   sum_in,
  input  logic   sum_vld_in,
  output acc_t   sum_out,
  output logic   sum_vld_out,
  // inverse of the row sum, broadcast by the row's Inv unit
  input  mant_t  inv_mant,
  input  sh_t    inv_sh,
  output acc_t   acc
);

  localparam int MAC_W = 56;

  logic                   ok_q;      // key of this PE is inside the pattern
  logic [SEG_BITS-1:0]    seg;
  logic [LUT_W-1:0]       lut_slope, lut_icpt;
  logic [SCORE_FRAC-1:0]  frac;
  logic signed [ACC_W-1:0] xint;
  logic                   exp_zero;
  logic [5:0]             exp_sh;

  logic signed [LUT_W:0]   mac_a;
  logic signed [ACC_W:0]   mac_b;
  logic signed [MAC_W-1:0] mac_c, mac_p, mac_s;
  logic [5:0]              sh;
  acc_t                    result;

  // Frac / integer part of the score, with clamping.
  always_comb begin
    xint     = acc >>> SCORE_FRAC;
    frac     = acc[SCORE_FRAC-1:0];
    exp_zero = 1'b0;
    if (xint > EXP_MAX_INT) begin
      xint = EXP_MAX_INT;
      frac = '1;
    end else if (xint < EXP_MIN_INT) begin
      exp_zero = 1'b1;
      xint     = EXP_MIN_INT;
    end
    seg    = frac[SCORE_FRAC-1 -: SEG_BITS];
    exp_sh = 6'(SCORE_FRAC - xint);
  end

  salo_exp_lut u_lut (.seg(seg), .slope(lut_slope), .icpt(lut_icpt));

  // Operand muxes of the MAC.
  always_comb begin
    mac_a = '0;
    mac_b = '0;
    mac_c = '0;
    sh    = '0;
    unique case (stage)
      ST_QK: begin
        mac_a = (LUT_W+1)'(kv_in);
        mac_b = (ACC_W+1)'(q_in);
        mac_c = MAC_W'(acc);
      end
      ST_EXP: begin
        mac_a = $signed({1'b0, lut_slope});
        mac_b = $signed({{(ACC_W+1-SCORE_FRAC){1'b0}}, frac});
        mac_c = $signed({{(MAC_W-LUT_W-SCORE_FRAC){1'b0}}, lut_icpt, {SCORE_FRAC{1'b0}}});
        sh    = exp_sh;
      end
      ST_SUM: begin
        mac_a = (LUT_W+1)'(1);
        mac_b = (ACC_W+1)'(acc);
        mac_c = MAC_W'(sum_in);
      end
      ST_NORM: begin
        mac_a = $signed({{(LUT_W+1-MANT_W){1'b0}}, inv_mant});
        mac_b = (ACC_W+1)'(acc);
        sh    = inv_sh;
      end
      ST_SV: begin
        mac_a = (LUT_W+1)'(kv_in);
        mac_b = (ACC_W+1)'(acc);
        mac_c = MAC_W'(sum_in);
      end
      default: ;
    endcase
    mac_p  = MAC_W'(mac_a) * MAC_W'(mac_b);
    mac_s  = (mac_p + mac_c) >>> sh;
    result = acc_t'(mac_s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc         <= '0;
      ok_q        <= 1'b0;
      q_out       <= '0;
      q_vld_out   <= 1'b0;
      kv_out      <= '0;
      kv_vld_out  <= 1'b0;
      kv_ok_out   <= 1'b0;
      sum_out     <= '0;
      sum_vld_out <= 1'b0;
    end else begin
      q_out      <= q_in;
      q_vld_out  <= q_vld_in;
      kv_out     <= kv_in;
      kv_vld_out <= kv_vld_in;
      kv_ok_out  <= kv_ok_in;
      sum_vld_out <= 1'b0;
      if (clr) begin
        acc  <= '0;
        ok_q <= 1'b0;
      end else begin
        unique case (stage)
          ST_QK: if (q_vld_in) begin
            acc  <= result;
            ok_q <= kv_ok_in;
          end
          ST_EXP:  acc <= (exp_zero || !ok_q || !en) ? '0 : result;
          ST_NORM: acc <= result;
          ST_SUM, ST_SV: if (sum_vld_in) begin
            sum_out     <= result;
            sum_vld_out <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

endmodule
