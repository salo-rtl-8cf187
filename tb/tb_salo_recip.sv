// tb_salo_recip: random inputs of all magnitudes (and powers of two and 0)
// to the reciprocal unit; checks that mant * 2^-(lead+16) is within 2^-14
// (relative) of 1/x, that lead is the leading-one position, and that done
// comes exactly 19 cycles after start.
module tb_salo_recip;
  import salo_pkg::*;
  localparam int IN_W = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [IN_W-1:0] x = '0;
  logic busy, done, zero;
  mant_t mant;
  sh_t lead;
  int checks = 0, failures = 0;

  salo_recip #(.IN_W(IN_W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, b;
    real r, e, rel;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      b = n % IN_W;
      x = IN_W'({$urandom, $urandom});
      x = x >> (IN_W - 1 - b);
      x[b] = 1'b1;
      if (n % 17 == 0) x = IN_W'(1) << b;
      if (n == 5) x = '0;
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 19) begin failures++; $display("latency %0d", lat); end
      checks++;
      if (x == '0) begin
        if (!zero) failures++;
      end else begin
        r = real'(mant) / (2.0 ** (real'(lead) + 16.0));
        e = 1.0 / real'(x);
        rel = (r - e) / e;
        if (rel < 0) rel = -rel;
        if (rel > 1.0 / 16384.0 || int'(lead) != b || zero) begin
          failures++;
          $display("x=%0d: mant %0d lead %0d rel %e", x, mant, lead, rel);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
