// salo_exp_lut: the two lookup tables of a PE's piece-wise linear exponent.
//
// The fraction f in [0,1) of a score is split into 2^SEG_BITS equal segments.
// For segment s the tables hold the slope m_s and the y-intercept b_s of the
// chord of 2^x between x = s/8 and x = (s+1)/8, so that 2^f ~ m_s * f + b_s.
// Both are unsigned with EXP_FRAC = 16 fraction bits:
//   m_s = round(65536 * 8 * (2^((s+1)/8) - 2^(s/8)))
//   b_s = round(65536 * (2^(s/8) - m_s/65536 * s/8))
// Two tables (slope and intercept) and the use of the PE's MAC to evaluate the
// line follow the paper (after Softermax); eight segments and base 2 are this
// design's choices. Purely combinational.
module salo_exp_lut
  import salo_pkg::*;
(
  input  logic [SEG_BITS-1:0] seg,
  output logic [LUT_W-1:0]    slope,
  output logic [LUT_W-1:0]    icpt
);

  always_comb begin
    unique case (seg)
      3'd0: begin slope = 17'd47452; icpt = 17'd65536; end
      3'd1: begin slope = 17'd51747; icpt = 17'd64999; end
      3'd2: begin slope = 17'd56430; icpt = 17'd63828; end
      3'd3: begin slope = 17'd61538; icpt = 17'd61913; end
      3'd4: begin slope = 17'd67107; icpt = 17'd59128; end
      3'd5: begin slope = 17'd73181; icpt = 17'd55332; end
      3'd6: begin slope = 17'd79805; icpt = 17'd50365; end
      default: begin slope = 17'd87028; icpt = 17'd44044; end
    endcase
  end

endmodule
