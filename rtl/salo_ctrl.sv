// salo_ctrl: sequencer of one pass of the SALO spatial accelerator.
//
// A pass computes one tile: R consecutive queries (plus the global query)
// against the R+C-1 keys/values that the diagonal dataflow brings through the
// array (plus the global key). The controller walks the paper's five stages
// and wraps them between a load and a write-back phase of its own:
//
//   LOAD   read R+1 query vectors, R+C keys (and values, same address) and the
//          R+1 previous output vectors / weights into the vector registers;
//          one buffer word per cycle, ld_idx = word whose data arrives
//   QK     stage 1, tcnt = 0 .. D+C        (clr pulses in the cycle before)
//   EXP    stage 2, one cycle
//   SUM    stage 3, tcnt = 0 .. C+1; sum_inject at 0, sum_inject_g at 1
//   INV    wait until the row inverses and weighted-sum weights are ready
//   NORM   stage 4, one cycle
//   SV     stage 5, tcnt = 0 .. D+C+2; sum_inject for tcnt < D, the global
//          row one cycle later
//   WB     write row r (r < row_cnt) and the global row (if grow_en) back
//   done   one-cycle pulse; busy is high from start until then
//
// Stage order, contents and latencies follow the paper; the load/write-back
// phases, the one-word-per-cycle buffer ports and the stage lengths (derived
// from the array skew, see salo_array) are this design's choices.
module salo_ctrl
  import salo_pkg::*;
#(
  parameter int R   = 32,
  parameter int C   = 32,
  parameter int D   = 64,
  parameter int QAW = 8,
  parameter int KAW = 9,
  parameter int OAW = 8,
  parameter int TW  = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [QAW-1:0] q_base,
  input  logic [QAW-1:0] qg_addr,
  input  logic [KAW-1:0] k_base,
  input  logic [KAW-1:0] kg_addr,
  input  logic [OAW-1:0] o_base,
  input  logic [OAW-1:0] og_addr,
  input  logic [$clog2(R+1)-1:0] row_cnt,
  input  logic           grow_en,
  input  logic           inv_busy,
  input  logic           ws_busy,
  output stage_e         stage,
  output logic           clr,
  output logic           run,
  output logic [TW-1:0]  tcnt,
  output logic           ld_vld,
  output logic [TW-1:0]  ld_idx,
  output logic           q_rd,
  output logic [QAW-1:0] q_rd_addr,
  output logic           kv_rd,
  output logic [KAW-1:0] kv_rd_addr,
  output logic           o_rd,
  output logic [OAW-1:0] o_rd_addr,
  output logic           sum_inject,
  output logic           sum_inject_g,
  output logic           wb_en,
  output logic [TW-1:0]  wb_idx,
  output logic [OAW-1:0] o_wr_addr,
  output logic           busy,
  output logic           done
);

  typedef enum logic [3:0] {
    P_IDLE, P_LOAD, P_QK, P_EXP, P_SUM, P_INV, P_NORM, P_SV, P_WB, P_DONE
  } phase_e;

  localparam int NKV   = R + C;        // keys of the pass + the global key
  localparam int QK_N  = D + C + 1;
  localparam int SUM_N = C + 2;
  localparam int SV_N  = D + C + 3;

  phase_e ph;
  logic [TW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph  <= P_IDLE;
      cnt <= '0;
    end else begin
      cnt <= cnt + TW'(1);
      unique case (ph)
        P_IDLE: begin
          cnt <= '0;
          if (start) ph <= P_LOAD;
        end
        P_LOAD: if (int'(cnt) == NKV) begin ph <= P_QK;  cnt <= '0; end
        P_QK:   if (int'(cnt) == QK_N - 1) begin ph <= P_EXP; cnt <= '0; end
        P_EXP:  begin ph <= P_SUM; cnt <= '0; end
        P_SUM:  if (int'(cnt) == SUM_N - 1) begin ph <= P_INV; cnt <= '0; end
        P_INV:  if (!inv_busy && !ws_busy) begin ph <= P_NORM; cnt <= '0; end
        P_NORM: begin ph <= P_SV; cnt <= '0; end
        P_SV:   if (int'(cnt) == SV_N - 1) begin ph <= P_WB; cnt <= '0; end
        P_WB:   if (int'(cnt) == R) begin ph <= P_DONE; cnt <= '0; end
        P_DONE: begin ph <= P_IDLE; cnt <= '0; end
        default: ph <= P_IDLE;
      endcase
    end
  end

  always_comb begin
    unique case (ph)
      P_QK:    stage = ST_QK;
      P_EXP:   stage = ST_EXP;
      P_SUM:   stage = ST_SUM;
      P_NORM:  stage = ST_NORM;
      P_SV:    stage = ST_SV;
      default: stage = ST_IDLE;
    endcase
    tcnt = cnt;
    run  = (ph == P_QK) || (ph == P_SV);
    clr  = (ph == P_LOAD) && (int'(cnt) == NKV);

    // buffer reads in LOAD: word cnt requested, word cnt-1 arrives
    q_rd       = (ph == P_LOAD) && (int'(cnt) <= R);
    q_rd_addr  = (int'(cnt) < R) ? q_base + QAW'(cnt) : qg_addr;
    kv_rd      = (ph == P_LOAD) && (int'(cnt) < NKV);
    kv_rd_addr = (int'(cnt) < NKV - 1) ? k_base + KAW'(cnt) : kg_addr;
    o_rd       = (ph == P_LOAD) && (int'(cnt) <= R);
    o_rd_addr  = (int'(cnt) < R) ? o_base + OAW'(cnt) : og_addr;
    ld_vld     = (ph == P_LOAD) && (cnt != '0);
    ld_idx     = cnt - TW'(1);

    sum_inject   = ((ph == P_SUM) && (cnt == '0)) || ((ph == P_SV) && (int'(cnt) < D));
    sum_inject_g = ((ph == P_SUM) && (int'(cnt) == 1)) ||
                   ((ph == P_SV) && (cnt != '0) && (int'(cnt) <= D));

    wb_idx    = cnt;
    wb_en     = (ph == P_WB) &&
                ((int'(cnt) < R) ? (cnt < TW'(row_cnt)) : grow_en);
    o_wr_addr = (int'(cnt) < R) ? o_base + OAW'(cnt) : og_addr;

    busy = (ph != P_IDLE);
    done = (ph == P_DONE);
  end

endmodule
