// tb_salo_vec_reg: loads a vector register with SKEW = 3 and checks that,
// while run is high, element t appears exactly at tcnt = t + 3 with vld high,
// that vld is low outside that window and while run is low, and that the ok
// flag is stored with the vector.
module tb_salo_vec_reg;
  import salo_pkg::*;
  localparam int D = 8, SKEW = 3, TW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld = 0, ld_ok = 0, run = 0;
  logic [D*DATA_W-1:0] ld_data = '0;
  logic [TW-1:0] tcnt = '0;
  elem_t e;
  logic vld, ok;
  int checks = 0, failures = 0;
  int vec [D];

  salo_vec_reg #(.D(D), .SKEW(SKEW), .TW(TW)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      @(negedge clk);
      for (int t = 0; t < D; t++) begin
        vec[t] = int'($urandom_range(255)) - 128;
        ld_data[t*DATA_W +: DATA_W] = DATA_W'(vec[t]);
      end
      ld = 1; ld_ok = rep[0];
      @(negedge clk);
      ld = 0;
      checks++;
      if (ok !== rep[0]) failures++;
      for (int c = 0; c < D + SKEW + 4; c++) begin
        tcnt = TW'(c);
        run = (rep != 2);
        #1;
        checks++;
        if (run && c >= SKEW && c < SKEW + D) begin
          if (!vld || int'(e) != vec[c - SKEW]) begin
            failures++;
            $display("tcnt %0d: vld %0b e %0d expected %0d", c, vld, e, vec[c - SKEW]);
          end
        end else if (vld) begin
          failures++;
          $display("tcnt %0d: vld high outside the window", c);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
