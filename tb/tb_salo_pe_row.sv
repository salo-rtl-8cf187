// tb_salo_pe_row: one row of N = 5 PEs with D = 8. Each PE gets its own key
// and value, aligned with the query as it moves right (PE c sees element t
// at cycle t + c). After the five stages the row output must equal
// sum_c P_c * v_c[t] with P_c = 2^(q.k_c) / sum, computed here in floating
// point; masked PEs (en low or key not ok) must drop out. Also checks the
// row sum W, that the output leaves N cycles after injection and that the
// inverse is ready 19 cycles after the row sum.
module tb_salo_pe_row;
  import salo_pkg::*;
  localparam int N = 5, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  stage_e stage = ST_IDLE;
  logic clr = 0;
  logic [N-1:0] en = '1;
  elem_t q_in = '0;
  logic q_vld_in = 0;
  elem_t kv_in [N]; logic kv_vld_in [N]; logic kv_ok_in [N];
  elem_t kv_out [N]; logic kv_vld_out [N]; logic kv_ok_out [N];
  logic sum_inject = 0;
  acc_t rsum, o;
  logic rsum_vld, o_vld, inv_busy, inv_done;
  acc_t acc [N];
  int checks = 0, failures = 0;

  salo_pe_row #(.N(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int qv [D], kv [N][D], vv [N][D];
  bit okk [N];
  real p [N], w, ref_o [D];

  task automatic drive(int cyc, bit use_v);
    q_vld_in = !use_v && cyc >= 0 && cyc < D;
    q_in = q_vld_in ? elem_t'(qv[cyc]) : '0;
    for (int c = 0; c < N; c++) begin
      int idx;
      idx = cyc - c;
      kv_vld_in[c] = idx >= 0 && idx < D;
      kv_in[c] = kv_vld_in[c] ? elem_t'(use_v ? vv[c][idx] : kv[c][idx]) : '0;
      kv_ok_in[c] = okk[c];
    end
  endtask

  initial begin
    real got, err;
    int lat;
    drive(-100, 0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      for (int t = 0; t < D; t++) qv[t] = int'($urandom_range(40)) - 20;
      en = (round < 5) ? '1 : N'($urandom);
      w = 0.0;
      for (int c = 0; c < N; c++) begin
        int s;
        s = 0;
        okk[c] = (round < 5) || ($urandom_range(3) != 0);
        for (int t = 0; t < D; t++) begin
          kv[c][t] = int'($urandom_range(40)) - 20;
          vv[c][t] = int'($urandom_range(255)) - 128;
          s += qv[t] * kv[c][t];
        end
        p[c] = (okk[c] && en[c]) ? 2.0 ** (real'(s) / 256.0) : 0.0;
        w += p[c];
      end
      for (int t = 0; t < D; t++) begin
        ref_o[t] = 0.0;
        for (int c = 0; c < N; c++) if (w > 0.0) ref_o[t] += p[c] / w * real'(vv[c][t]);
      end
      @(negedge clk);
      clr = 1; @(negedge clk); clr = 0;
      stage = ST_QK;
      for (int cyc = 0; cyc < D + N; cyc++) begin drive(cyc, 0); @(negedge clk); end
      drive(-100, 0);
      stage = ST_EXP; @(negedge clk);
      stage = ST_SUM;
      for (int cyc = 0; cyc <= N; cyc++) begin
        sum_inject = (cyc == 0);
        #1;
        checks++;
        if (rsum_vld != (cyc == N)) begin failures++; $display("rsum_vld at %0d", cyc); end
        if (cyc == N) begin
          got = real'(rsum) / 65536.0;
          err = got - w; if (err < 0) err = -err;
          checks++;
          if (err > 0.003 * w + 0.001) begin failures++; $display("W %f vs %f", got, w); end
        end
        @(negedge clk);
      end
      sum_inject = 0;
      stage = ST_IDLE;
      lat = 1;
      while (!inv_done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 19) begin failures++; $display("inverse after %0d cycles", lat); end
      stage = ST_NORM; @(negedge clk);
      stage = ST_SV;
      for (int cyc = 0; cyc < D + N + 1; cyc++) begin
        int t;
        drive(cyc, 1);
        sum_inject = cyc < D;
        #1;
        t = cyc - N;
        checks++;
        if (o_vld != (t >= 0 && t < D)) begin failures++; $display("o_vld at %0d", cyc); end
        if (t >= 0 && t < D) begin
          got = real'(o) / 32768.0;
          err = got - ref_o[t]; if (err < 0) err = -err;
          checks++;
          if (err > 0.4) begin failures++; $display("o[%0d] %f vs %f", t, got, ref_o[t]); end
        end
        @(negedge clk);
      end
      drive(-100, 0);
      sum_inject = 0;
      stage = ST_IDLE;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
