// tb_salo_pe: drives one PE through the five stages and checks each result
// against arithmetic done here:
//   stage 1  Reg_acc = sum_t q[t]*k[t]; q and k/v leave one cycle later
//   stage 2  Reg_acc ~ 2^S with 16 fraction bits (within 0.2 %), 0 for a key
//            that is not ok, for en low or for a score below -24
//   stage 3  sum_out = sum_in + Reg_acc, one cycle later
//   stage 4  Reg_acc = (Reg_acc * mant) >> sh
//   stage 5  sum_out = sum_in + v * Reg_acc
module tb_salo_pe;
  import salo_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  stage_e stage = ST_IDLE;
  logic clr = 0, en = 1;
  elem_t q_in = '0, kv_in = '0, q_out, kv_out;
  logic q_vld_in = 0, kv_vld_in = 0, kv_ok_in = 0, q_vld_out, kv_vld_out, kv_ok_out;
  acc_t sum_in = '0, sum_out, acc;
  logic sum_vld_in = 0, sum_vld_out;
  mant_t inv_mant = '0;
  sh_t inv_sh = '0;
  int checks = 0, failures = 0;

  salo_pe dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int qv[D], kv[D], dot, vv, si;
    longint e, m, p;
    real ex, got;
    bit ok_key, en_pe;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      ok_key = (n % 5 != 3);
      en_pe  = (n % 7 != 4);
      en     = en_pe;
      @(negedge clk);
      clr = 1; @(negedge clk); clr = 0;
      // stage 1
      stage = ST_QK;
      dot = 0;
      for (int t = 0; t < D; t++) begin
        qv[t] = int'($urandom_range(40)) - 20;
        kv[t] = int'($urandom_range(40)) - 20;
        if (n % 11 == 10) begin qv[t] = 100; kv[t] = -100; end   // very negative score
        dot += qv[t] * kv[t];
        q_in = elem_t'(qv[t]); kv_in = elem_t'(kv[t]);
        q_vld_in = 1; kv_vld_in = 1; kv_ok_in = ok_key;
        @(negedge clk);
        chk(q_out == elem_t'(qv[t]) && q_vld_out && kv_out == elem_t'(kv[t]) && kv_vld_out
            && kv_ok_out == ok_key, "pass-through");
      end
      q_vld_in = 0; kv_vld_in = 0;
      @(negedge clk);
      chk(acc == acc_t'(dot), $sformatf("dot %0d vs %0d", acc, dot));
      // stage 2
      stage = ST_EXP;
      @(negedge clk);
      stage = ST_IDLE;
      ex = 2.0 ** (real'(dot) / 256.0) * 65536.0;
      if (dot >= 8 * 256) ex = 2.0 ** 8.0 * 65536.0;
      got = real'(acc);
      if (!ok_key || !en_pe || dot < -24 * 256)
        chk(acc == '0, "masked exponent");
      else
        chk(got <= ex * 1.002 + 2.0 && got >= ex * 0.998 - 2.0,
            $sformatf("exp(%0d): %f vs %f", dot, got, ex));
      e = longint'(acc);
      // stage 3
      stage = ST_SUM;
      si = int'($urandom_range(100000));
      sum_in = acc_t'(si); sum_vld_in = 1;
      @(negedge clk);
      sum_vld_in = 0;
      chk(sum_vld_out && sum_out == acc_t'(longint'(si) + e), "row sum");
      @(negedge clk);
      chk(!sum_vld_out, "sum valid drops");
      // stage 4
      stage = ST_NORM;
      m = longint'($urandom_range(65535, 32768));
      inv_mant = mant_t'(m);
      inv_sh = sh_t'($urandom_range(30, 10));
      p = (e * m) >>> inv_sh;
      @(negedge clk);
      stage = ST_IDLE;
      chk(acc == acc_t'(p), "normalise");
      // stage 5
      stage = ST_SV;
      for (int t = 0; t < 4; t++) begin
        vv = int'($urandom_range(255)) - 128;
        si = int'($urandom_range(2000000)) - 1000000;
        kv_in = elem_t'(vv); kv_vld_in = 1;
        sum_in = acc_t'(si); sum_vld_in = 1;
        @(negedge clk);
        chk(sum_vld_out && sum_out == acc_t'(longint'(si) + longint'(vv) * p), "weighted v");
      end
      kv_vld_in = 0; sum_vld_in = 0;
      stage = ST_IDLE;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
