// salo_recip: sequential reciprocal unit (the "Inv" block at the end of a PE
// row, also used inside the weighted sum module).
//
// The paper computes one inverse per row, after the row sum leaves the
// rightmost PE, instead of a divider in every PE. How the inverse is computed
// is not given; this unit normalises the input and runs a restoring division:
//   x = m * 2^(lead-15), m in [2^15, 2^16)   (lead = position of leading one)
//   mant = min(floor(2^31 / m), 2^16 - 1)
// so that 1/x ~ mant * 2^-(lead+16), and y/x ~ (y * mant) >> (lead + 16).
// The relative error of mant is below 2^-15.
//
// Timing: start is a one-cycle pulse that samples x. One cycle normalises,
// then 17 cycles produce one quotient bit each; done pulses high in the 19th
// cycle after start, and mant/lead/zero hold until the next start. zero flags
// x == 0 (mant is then 0). A start while busy restarts the unit.
// The bits below the 16-bit mantissa of the normalised input and the
// spare top bits of the remainder and quotient registers are not needed
// by the result and stay unused.
module salo_recip
  import salo_pkg::*;
#(
  parameter int IN_W = ACC_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [IN_W-1:0] x,
  output logic            busy,
  output logic            done,
  output mant_t           mant,
  output sh_t             lead,
  output logic            zero
);

  localparam int QB = MANT_W + 1;             // quotient bits computed

  logic [IN_W-1:0]   x_q;
  logic [MANT_W-1:0] m_q;
  logic [MANT_W+1:0] rem_q;
  logic [QB-1:0]     quo_q;
  logic [4:0]        cnt_q;
  logic              norm_q;

  // leading-one detection and normalisation of the sampled input
  sh_t             lead_c;
  logic [IN_W-1:0] xn_c;
  always_comb begin
    lead_c = '0;
    for (int i = 0; i < IN_W; i++)
      if (x_q[i]) lead_c = sh_t'(i);
    xn_c = x_q << (IN_W - 1 - int'(lead_c));
  end

  logic [MANT_W+1:0] rem2, rem_n;
  logic [QB-1:0]     quo_n;
  always_comb begin
    rem2 = {rem_q[MANT_W:0], 1'b0};
    if (rem2 >= {2'b00, m_q} && !zero) begin
      rem_n = rem2 - {2'b00, m_q};
      quo_n = {quo_q[QB-2:0], 1'b1};
    end else begin
      rem_n = rem2;
      quo_n = {quo_q[QB-2:0], 1'b0};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q    <= '0;
      m_q    <= '0;
      rem_q  <= '0;
      quo_q  <= '0;
      cnt_q  <= '0;
      norm_q <= 1'b0;
      busy   <= 1'b0;
      done   <= 1'b0;
      mant   <= '0;
      lead   <= '0;
      zero   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        x_q    <= x;
        mant   <= '0;
        busy   <= 1'b1;
        norm_q <= 1'b1;
      end else if (norm_q) begin
        norm_q <= 1'b0;
        m_q    <= xn_c[IN_W-1 -: MANT_W];
        lead   <= lead_c;
        zero   <= (x_q == '0);
        rem_q  <= (MANT_W+2)'(1) << (MANT_W - 2);   // 2^31 >> 17
        quo_q  <= '0;
        cnt_q  <= 5'(QB);
      end else if (busy) begin
        rem_q <= rem_n;
        quo_q <= quo_n;
        cnt_q <= cnt_q - 5'd1;
        if (cnt_q == 5'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
          // saturate the quotient 2^16 (x a power of two) to the mantissa range
          mant <= quo_n[QB-1] ? '1 : quo_n[MANT_W-1:0];
        end
      end
    end
  end
endmodule
