// tb_salo_array: a 3 x 3 spatial array (plus global column and row) with
// D = 6. The testbench feeds queries, keys and values with the skews of
// salo_array's header, runs the five stages, and checks every row output
// against a floating-point softmax computed here: array row r attends to the
// pass keys r .. r+C-1 (minus masked keys and disabled columns) plus the
// global key, the global row attends to pass keys R-1 .. R+C-2. It also
// checks the row sums (stage 3) and that outputs leave C+1 cycles after
// injection. Several rounds vary the masks and enables.
module tb_salo_array;
  import salo_pkg::*;
  localparam int R = 3, C = 3, D = 6, NK = R + C - 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  stage_e stage = ST_IDLE;
  logic clr = 0, gcol_en = 1, grow_en = 1;
  logic [C-1:0] col_en = '1;
  elem_t q_in [R]; logic q_vld [R];
  elem_t qg_in; logic qg_vld;
  elem_t kt_in [C]; logic kt_vld [C]; logic kt_ok [C];
  elem_t kl_in [R]; logic kl_vld [R]; logic kl_ok [R];
  elem_t kg_in; logic kg_vld, kg_ok;
  logic sum_inject = 0, sum_inject_g = 0;
  acc_t rsum [R+1]; logic rsum_vld [R+1];
  acc_t o [R+1]; logic o_vld [R+1];
  logic inv_busy [R+1]; logic inv_done [R+1];
  int checks = 0, failures = 0;

  salo_array #(.R(R), .C(C)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int qv [R+1][D];            // index R: global query
  int kv [NK+1][D];           // index NK: global key
  int vv [NK+1][D];
  bit kok [NK+1];
  real ref_o [R+1][D];
  real ref_w [R+1];

  task automatic reference();
    real p [NK+1];
    for (int r = 0; r <= R; r++) begin
      ref_w[r] = 0.0;
      for (int j = 0; j <= NK; j++) begin
        bit att;
        int s;
        if (r < R) att = (j == NK) ? (gcol_en && kok[j])
                                   : (j >= r && j <= r + C - 1 && kok[j] && col_en[C - 1 - (j - r)]);
        else       att = (j >= R - 1 && j <= R + C - 2 && kok[j] && grow_en);
        s = 0;
        for (int t = 0; t < D; t++) s += qv[r][t] * kv[j][t];
        p[j] = att ? 2.0 ** (real'(s) / 256.0) : 0.0;
        ref_w[r] += p[j];
      end
      for (int t = 0; t < D; t++) begin
        ref_o[r][t] = 0.0;
        if (ref_w[r] > 0.0)
          for (int j = 0; j <= NK; j++) ref_o[r][t] += p[j] / ref_w[r] * real'(vv[j][t]);
      end
    end
  endtask

  // drive one cycle of the K/V lanes (use_v selects values) and queries
  task automatic drive(int cyc, bit use_v, bit with_q);
    int idx;
    for (int r = 0; r < R; r++) begin
      idx = cyc;
      q_vld[r] = with_q && idx >= 0 && idx < D;
      q_in[r]  = q_vld[r] ? elem_t'(qv[r][idx]) : '0;
    end
    idx = cyc - 1;
    qg_vld = with_q && idx >= 0 && idx < D;
    qg_in  = qg_vld ? elem_t'(qv[R][idx]) : '0;
    for (int c = 0; c < C; c++) begin
      int j = C - 1 - c;
      idx = cyc - c;
      kt_vld[c] = idx >= 0 && idx < D;
      kt_in[c]  = kt_vld[c] ? elem_t'(use_v ? vv[j][idx] : kv[j][idx]) : '0;
      kt_ok[c]  = kok[j];
    end
    kl_vld[0] = 0; kl_in[0] = '0; kl_ok[0] = 0;
    for (int r = 1; r < R; r++) begin
      int j = C - 1 + r;
      idx = cyc;
      kl_vld[r] = idx >= 0 && idx < D;
      kl_in[r]  = kl_vld[r] ? elem_t'(use_v ? vv[j][idx] : kv[j][idx]) : '0;
      kl_ok[r]  = kok[j];
    end
    idx = cyc - C;
    kg_vld = idx >= 0 && idx < D;
    kg_in  = kg_vld ? elem_t'(use_v ? vv[NK][idx] : kv[NK][idx]) : '0;
    kg_ok  = kok[NK];
  endtask

  initial begin
    real err, got;
    drive(-100, 0, 0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 12; round++) begin
      for (int r = 0; r <= R; r++)
        for (int t = 0; t < D; t++) qv[r][t] = int'($urandom_range(40)) - 20;
      for (int j = 0; j <= NK; j++) begin
        for (int t = 0; t < D; t++) begin
          kv[j][t] = int'($urandom_range(40)) - 20;
          vv[j][t] = int'($urandom_range(255)) - 128;
        end
        kok[j] = (round < 4) || ($urandom_range(3) != 0);
      end
      col_en  = (round < 4) ? '1 : C'($urandom);
      gcol_en = (round % 3 != 2);
      grow_en = (round % 4 != 3);
      reference();
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      stage = ST_QK;
      for (int cyc = 0; cyc <= D + C; cyc++) begin drive(cyc, 0, 1); @(negedge clk); end
      drive(-100, 0, 0);
      stage = ST_EXP; @(negedge clk);
      stage = ST_SUM;
      for (int cyc = 0; cyc <= C + 1; cyc++) begin
        sum_inject = (cyc == 0); sum_inject_g = (cyc == 1);
        #1;
        if (cyc == C + 1) begin
          for (int r = 0; r <= R; r++) begin
            got = real'(rsum[r]) / 65536.0;
            err = got - ref_w[r]; if (err < 0) err = -err;
            checks++;
            if (!rsum_vld[r] || err > 0.003 * ref_w[r] + 0.001) begin
              failures++; $display("round %0d row %0d: W %f vs %f", round, r, got, ref_w[r]);
            end
          end
        end
        @(negedge clk);
      end
      sum_inject = 0; sum_inject_g = 0;
      stage = ST_IDLE;
      @(negedge clk);
      while (inv_busy[0]) @(negedge clk);
      stage = ST_NORM; @(negedge clk);
      stage = ST_SV;
      for (int cyc = 0; cyc <= D + C + 1; cyc++) begin
        drive(cyc, 1, 0);
        sum_inject   = (cyc < D);
        sum_inject_g = (cyc >= 1 && cyc <= D);
        #1;
        for (int r = 0; r <= R; r++) begin
          int t;
          t = cyc - (C + 1);
          if (t >= 0 && t < D) begin
            got = real'(o[r]) / 32768.0;
            err = got - ref_o[r][t]; if (err < 0) err = -err;
            checks++;
            if (!o_vld[r] || err > 0.5) begin
              failures++;
              $display("round %0d row %0d elem %0d: %f vs %f", round, r, t, got, ref_o[r][t]);
            end
          end else if (o_vld[r]) begin
            checks++; failures++; $display("output outside its cycle r%0d cyc %0d", r, cyc);
          end
        end
        @(negedge clk);
      end
      drive(-100, 0, 0);
      sum_inject = 0; sum_inject_g = 0;
      stage = ST_IDLE;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
