// tb_salo_exp_lut: checks the slope/intercept tables of the piece-wise
// linear exponent. For every segment s and every 8-bit fraction f inside it,
// slope*f/256 + icpt (16 fraction bits) must lie within 0.1 % of 2^(f/256),
// and the line must pass within 2 LSB of 2^x at both segment ends.
module tb_salo_exp_lut;
  import salo_pkg::*;

  logic [SEG_BITS-1:0] seg;
  logic [LUT_W-1:0]    slope, icpt;
  int checks = 0, failures = 0;

  salo_exp_lut dut (.seg, .slope, .icpt);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real y, e, rel;
    for (int s = 0; s < 8; s++) begin
      seg = SEG_BITS'(s);
      #1;
      for (int f = 32*s; f <= 32*s + 32; f++) begin
        y   = (real'(slope) * real'(f) / 256.0 + real'(icpt)) / 65536.0;
        e   = 2.0 ** (real'(f) / 256.0);
        rel = (y - e) / e;
        if (rel < 0) rel = -rel;
        checks++;
        if (rel > 1.0e-3) begin
          failures++;
          $display("seg %0d f %0d: %f vs %f", s, f, y, e);
        end
        if (f == 32*s || f == 32*s + 32) begin
          checks++;
          if ((y - e) * 65536.0 > 2.0 || (e - y) * 65536.0 > 2.0) begin
            failures++;
            $display("seg %0d end f %0d: %f vs %f", s, f, y, e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
