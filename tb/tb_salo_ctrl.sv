// tb_salo_ctrl: runs passes through the sequencer (R = 4, C = 3, D = 5) with
// the inverse units reported busy for a random number of cycles. Checks the
// stage order and lengths (QK D+C+1, EXP 1, SUM C+2, NORM 1, SV D+C+3), the
// clr pulse right before stage 1, the buffer addresses read in LOAD (queries
// q_base+r then the global query, keys k_base+p then the global key,
// outputs o_base+r then the global row), the partial-sum injections, the
// write-back addresses (row_cnt rows, the global row only if enabled), and
// that the controller waits in INV while a unit is busy.
module tb_salo_ctrl;
  import salo_pkg::*;
  localparam int R = 4, C = 3, D = 5, QAW = 6, KAW = 7, OAW = 6, TW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, grow_en = 0, inv_busy = 0, ws_busy = 0;
  logic [QAW-1:0] q_base = '0, qg_addr = '0;
  logic [KAW-1:0] k_base = '0, kg_addr = '0;
  logic [OAW-1:0] o_base = '0, og_addr = '0;
  logic [$clog2(R+1)-1:0] row_cnt = '0;
  stage_e stage;
  logic clr, run, ld_vld, q_rd, kv_rd, o_rd, sum_inject, sum_inject_g, wb_en, busy, done;
  logic [TW-1:0] tcnt, ld_idx, wb_idx;
  logic [QAW-1:0] q_rd_addr;
  logic [KAW-1:0] kv_rd_addr;
  logic [OAW-1:0] o_rd_addr, o_wr_addr;
  int checks = 0, failures = 0;

  salo_ctrl #(.R(R), .C(C), .D(D), .QAW(QAW), .KAW(KAW), .OAW(OAW), .TW(TW)) dut (.*);

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
    int n_qk, n_exp, n_sum, n_norm, n_sv, n_inj, n_injg, n_wait, hold, nq, nk, no, nwb, busy_for;
    stage_e prev, seen [$];
    bit clr_ok;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 8; pass++) begin
      q_base = QAW'($urandom); qg_addr = QAW'($urandom);
      k_base = KAW'($urandom); kg_addr = KAW'($urandom);
      o_base = OAW'($urandom); og_addr = OAW'($urandom);
      row_cnt = ($clog2(R+1))'($urandom_range(R, 1));
      grow_en = pass[0];
      busy_for = int'($urandom_range(25));
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      n_qk = 0; n_exp = 0; n_sum = 0; n_norm = 0; n_sv = 0; n_inj = 0; n_injg = 0;
      n_wait = 0; hold = 0; nq = 0; nk = 0; no = 0; nwb = 0; clr_ok = 0;
      seen.delete(); prev = ST_IDLE;
      while (!done) begin
        if (stage != prev && stage != ST_IDLE) seen.push_back(stage);
        prev = stage;
        // model the inverse units: busy for busy_for cycles after stage 3
        inv_busy = (hold > 0);
        if (stage == ST_SUM && int'(tcnt) == C + 1) hold = busy_for + 1;
        else if (hold > 0) hold--;
        #1;
        if (stage == ST_IDLE && busy && inv_busy) n_wait++;
        if (clr) begin
          chk(stage == ST_IDLE, "clr outside LOAD");
          clr_ok = 1;
        end
        if (stage == ST_QK && n_qk == 0) chk(clr_ok, "clr before stage 1");
        case (stage)
          ST_QK:   n_qk++;
          ST_EXP:  n_exp++;
          ST_SUM:  n_sum++;
          ST_NORM: begin n_norm++; chk(!inv_busy, "stage 4 while busy"); end
          ST_SV:   n_sv++;
          default: ;
        endcase
        if (sum_inject)   n_inj++;
        if (sum_inject_g) n_injg++;
        if (q_rd) begin
          chk(q_rd_addr == ((nq < R) ? QAW'(q_base + QAW'(nq)) : qg_addr), "query address");
          nq++;
        end
        if (kv_rd) begin
          chk(kv_rd_addr == ((nk < R + C - 1) ? KAW'(k_base + KAW'(nk)) : kg_addr), "key address");
          nk++;
        end
        if (o_rd) begin
          chk(o_rd_addr == ((no < R) ? OAW'(o_base + OAW'(no)) : og_addr), "output read address");
          no++;
        end
        if (ld_vld) chk(int'(ld_idx) < R + C, "load index");
        if (wb_en) begin
          chk((int'(wb_idx) < R) ? (o_wr_addr == OAW'(o_base + OAW'(wb_idx)) && wb_idx < TW'(row_cnt))
                                 : (o_wr_addr == og_addr && grow_en), "write-back");
          nwb++;
        end
        @(negedge clk);
      end
      chk(n_qk == D + C + 1 && n_exp == 1 && n_sum == C + 2 && n_norm == 1 && n_sv == D + C + 3,
          $sformatf("stage lengths %0d %0d %0d %0d %0d", n_qk, n_exp, n_sum, n_norm, n_sv));
      chk(seen.size() == 5 && seen[0] == ST_QK && seen[1] == ST_EXP && seen[2] == ST_SUM &&
          seen[3] == ST_NORM && seen[4] == ST_SV, "stage order");
      chk(n_inj == 1 + D && n_injg == 1 + D, "injections");
      chk(nq == R + 1 && nk == R + C && no == R + 1, "loads");
      chk(nwb == int'(row_cnt) + int'(grow_en), "write-back count");
      chk(n_wait >= busy_for, $sformatf("waited %0d of %0d busy cycles", n_wait, busy_for));
      @(negedge clk);
      chk(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
