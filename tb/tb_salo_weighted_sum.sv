// tb_salo_weighted_sum: random weights and vectors for one weighted sum
// module. Checks y = (a1*on + a2*o_prev) with a1 = W1/(W1+W2),
// a2 = W2/(W1+W2), on = o_new scaled from 19 to 8 fraction bits, within 2 LSB;
// the special cases first (y = on), W1 = 0 and row disabled (y = o_prev);
// the new weight W1+W2; and that busy is low 20 cycles after w_vld.
module tb_salo_weighted_sum;
  import salo_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic first = 0, row_en = 1, w_vld = 0, o_vld = 0;
  acc_t w_new = '0, o_new = '0;
  wgt_t w_prev = '0, w_out;
  out_t o_prev = '0, y;
  logic busy, y_vld;
  int checks = 0, failures = 0;

  salo_weighted_sum dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint w1, w2;
    int on, op, lat, mode;
    real a1, a2, ex, err;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      mode = n % 10;                 // 0: first, 1: W1 = 0, 2: row off, else merge
      w1 = (mode == 1) ? 0 : longint'($urandom_range(32'h3fffffff, 1));
      w2 = longint'({$urandom_range(255), $urandom}) + 1;
      first = (mode == 0);
      row_en = (mode != 2);
      @(negedge clk);
      w_new = acc_t'(w1); w_prev = wgt_t'(w2); w_vld = 1;
      @(negedge clk);
      w_vld = 0;
      lat = 1;
      while (busy) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 20) begin failures++; $display("busy for %0d cycles", lat); end
      if (mode == 0)      begin a1 = 1.0; a2 = 0.0; end
      else if (mode <= 2) begin a1 = 0.0; a2 = 1.0; end
      else begin
        a1 = real'(w1) / (real'(w1) + real'(w2));
        a2 = real'(w2) / (real'(w1) + real'(w2));
      end
      checks++;
      if (w_out != wgt_t'((mode == 0) ? w1 : (mode <= 2) ? w2 : w1 + w2)) begin
        failures++; $display("w_out %0d", w_out);
      end
      for (int t = 0; t < D; t++) begin
        on = int'($urandom_range(4000)) - 2000;          // 8 fraction bits
        op = int'($urandom_range(4000)) - 2000;
        o_new = acc_t'(on * 2048 + int'($urandom_range(2047)) - 1023);
        o_prev = out_t'(op);
        o_vld = 1;
        @(negedge clk);
        o_vld = 0;
        ex = a1 * real'(on) + a2 * real'(op);
        err = real'(y) - ex;
        if (err < 0) err = -err;
        checks++;
        if (!y_vld || err > 2.0) begin
          failures++;
          $display("mode %0d: y %0d expected %f", mode, y, ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
