// salo_pe_row: a row of N PEs chained left to right, with the row's Inv unit.
//
// The query enters at the leftmost PE and moves one PE per cycle to the right
// (stage 1). Each PE has its own key/value input (kv_in[c]) and output
// (kv_out[c]); salo_array wires these diagonally between rows. In stage 3 a
// partial sum starts at 0 in PE 0 when sum_inject is high, each PE adds its
// exponent, and when the sum leaves the last PE the Inv unit (salo_recip)
// computes its inverse and broadcasts it back to all PEs of the row for
// stage 4. The same sum is the row's weight W and is output as rsum. In
// stage 5 partial sums run along the same path and leave as the row output o,
// one vector element per cycle.
//
// Row structure, the single inverse per row and its broadcast follow the
// paper; the reciprocal algorithm and formats are this design's own (see
// salo_recip). For a probability P = E/sum in 15 fraction bits the PEs shift
// E*mant right by lead+1 (lead+16-15).
//
// Timing: a value injected at cycle t leaves the row (rsum/o) at t + N; the
// inverse is valid (inv_done) 19 cycles after rsum_vld.
module salo_pe_row
  import salo_pkg::*;
#(
  parameter int N = 33
) (
  input  logic   clk,
  input  logic   rst_n,
  input  stage_e stage,
  input  logic   clr,
  input  logic   [N-1:0] en,
  input  elem_t  q_in,
  input  logic   q_vld_in,
  input  elem_t  kv_in      [N],
  input  logic   kv_vld_in  [N],
  input  logic   kv_ok_in   [N],
  output elem_t  kv_out     [N],
  output logic   kv_vld_out [N],
  output logic   kv_ok_out  [N],
  input  logic   sum_inject,
  output acc_t   rsum,
  output logic   rsum_vld,
  output acc_t   o,
  output logic   o_vld,
  output logic   inv_busy,
  output logic   inv_done,
  output acc_t   acc        [N]
);

  elem_t q_c   [N+1];
  logic  qv_c  [N+1];
  acc_t  s_c   [N+1];
  logic  sv_c  [N+1];

  mant_t inv_mant;
  sh_t   inv_lead, inv_sh;
  logic  inv_zero;

  assign q_c[0]  = q_in;
  assign qv_c[0] = q_vld_in;
  assign s_c[0]  = '0;
  assign sv_c[0] = sum_inject;

  for (genvar c = 0; c < N; c++) begin : g_pe
    salo_pe u_pe (
      .clk, .rst_n, .stage, .clr,
      .en         (en[c]),
      .q_in       (q_c[c]),   .q_vld_in  (qv_c[c]),
      .q_out      (q_c[c+1]), .q_vld_out (qv_c[c+1]),
      .kv_in      (kv_in[c]), .kv_vld_in (kv_vld_in[c]), .kv_ok_in (kv_ok_in[c]),
      .kv_out     (kv_out[c]), .kv_vld_out (kv_vld_out[c]), .kv_ok_out (kv_ok_out[c]),
      .sum_in     (s_c[c]),   .sum_vld_in  (sv_c[c]),
      .sum_out    (s_c[c+1]), .sum_vld_out (sv_c[c+1]),
      .inv_mant, .inv_sh,
      .acc        (acc[c])
    );
  end

  assign rsum     = s_c[N];
  assign rsum_vld = sv_c[N] && (stage == ST_SUM);
  assign o        = s_c[N];
  assign o_vld    = sv_c[N] && (stage == ST_SV);

  // Inv: inverse of the row sum, broadcast back to the row
  salo_recip #(.IN_W(ACC_W)) u_inv (
    .clk, .rst_n,
    .start (rsum_vld),
    .x     (rsum),
    .busy  (inv_busy),
    .done  (inv_done),
    .mant  (inv_mant),
    .lead  (inv_lead),
    .zero  (inv_zero)
  );
  assign inv_sh = inv_lead + sh_t'(1);

  // the query leaving the last PE has no further use
  logic unused;
  assign unused = ^{q_c[N], qv_c[N], inv_zero};

endmodule
