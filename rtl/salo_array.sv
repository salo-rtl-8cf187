// salo_array: the spatial array of SALO - an R x C PE array, a global PE
// column and a global PE row, with diagonal key/value connections.
//
// Array row r (r = 0..R-1) is a salo_pe_row of C+1 PEs: C PEs of the PE
// array and, at its right end, the PE of the global PE column, which reuses
// the row's query as it leaves PE C-1. The global PE row is a salo_pe_row of
// C PEs placed under array columns 1..C (the last one under the global
// column); it reuses the keys/values leaving the last array row diagonally.
//
// Key/value wiring (paper Fig. 7): PE(r,c) takes its key from PE(r-1,c-1).
// Row 0 takes key c from k_top[c]; column 0 of row r >= 1 takes a new key
// from k_left[r-1]; the key in the rightmost array PE of a row is dropped.
// Hence PE(r,c) sees key number r + (C-1-c) of the pass, so row r covers C
// consecutive keys and row r+1 reuses C-1 of them (sliding window reuse).
// The global PE column gets the global key/value kg broadcast to all rows;
// global-row PE j (under column j+1) gets the key leaving PE(R-1, j).
//
// Input timing needed for q_r[t] and k[t] to meet: all queries start at
// cycle 0, k_top[c] at cycle c, k_left at cycle 0, the global query at cycle
// 1 and kg at cycle C (salo_vec_reg provides these skews). Values use the
// same ports and skews in stage 5, with sum_inject at cycle 0 for the array
// rows and sum_inject_g at cycle 1 for the global row. Row outputs (index R
// is the global row) leave C+1 cycles after injection.
//
// col_en[c] removes array column c from the softmax (window edges);
// gcol_en and grow_en enable the global column and row.
//
// The key, value and accumulator outputs of the global row's last PEs have
// nowhere to go (keys leave the array there) and are left unconnected.
module salo_array
  import salo_pkg::*;
#(
  parameter int R = 32,
  parameter int C = 32
) (
  input  logic   clk,
  input  logic   rst_n,
  input  stage_e stage,
  input  logic   clr,
  input  logic   [C-1:0] col_en,
  input  logic   gcol_en,
  input  logic   grow_en,
  // queries
  input  elem_t  q_in    [R],
  input  logic   q_vld   [R],
  input  elem_t  qg_in,
  input  logic   qg_vld,
  // keys / values
  input  elem_t  kt_in   [C],
  input  logic   kt_vld  [C],
  input  logic   kt_ok   [C],
  input  elem_t  kl_in   [R],     // index 0 unused
  input  logic   kl_vld  [R],
  input  logic   kl_ok   [R],
  input  elem_t  kg_in,
  input  logic   kg_vld,
  input  logic   kg_ok,
  // partial-sum injection
  input  logic   sum_inject,
  input  logic   sum_inject_g,
  // per-row results, index R = global PE row
  output acc_t   rsum     [R+1],
  output logic   rsum_vld [R+1],
  output acc_t   o        [R+1],
  output logic   o_vld    [R+1],
  output logic   inv_busy [R+1],
  output logic   inv_done [R+1]
);

  elem_t kv_o   [R][C+1];
  logic  kvv_o  [R][C+1];
  logic  kvk_o  [R][C+1];

  for (genvar r = 0; r < R; r++) begin : g_row
    elem_t kv_i  [C+1];
    logic  kvv_i [C+1];
    logic  kvk_i [C+1];
    acc_t  acc_unused [C+1];

    for (genvar c = 0; c < C; c++) begin : g_kv
      if (r == 0) begin : g_top
        assign kv_i[c]  = kt_in[c];
        assign kvv_i[c] = kt_vld[c];
        assign kvk_i[c] = kt_ok[c];
      end else if (c == 0) begin : g_left
        assign kv_i[c]  = kl_in[r];
        assign kvv_i[c] = kl_vld[r];
        assign kvk_i[c] = kl_ok[r];
      end else begin : g_diag
        assign kv_i[c]  = kv_o[r-1][c-1];
        assign kvv_i[c] = kvv_o[r-1][c-1];
        assign kvk_i[c] = kvk_o[r-1][c-1];
      end
    end
    // global PE column: broadcast global key/value
    assign kv_i[C]  = kg_in;
    assign kvv_i[C] = kg_vld;
    assign kvk_i[C] = kg_ok;

    salo_pe_row #(.N(C+1)) u_row (
      .clk, .rst_n, .stage, .clr,
      .en         ({gcol_en, col_en}),
      .q_in       (q_in[r]),
      .q_vld_in   (q_vld[r]),
      .kv_in      (kv_i),
      .kv_vld_in  (kvv_i),
      .kv_ok_in   (kvk_i),
      .kv_out     (kv_o[r]),
      .kv_vld_out (kvv_o[r]),
      .kv_ok_out  (kvk_o[r]),
      .sum_inject (sum_inject),
      .rsum       (rsum[r]),
      .rsum_vld   (rsum_vld[r]),
      .o          (o[r]),
      .o_vld      (o_vld[r]),
      .inv_busy   (inv_busy[r]),
      .inv_done   (inv_done[r]),
      .acc        (acc_unused)
    );
  end

  // global PE row
  elem_t g_kv_i  [C];
  logic  g_kvv_i [C];
  logic  g_kvk_i [C];
  elem_t g_kv_o  [C];
  logic  g_kvv_o [C];
  logic  g_kvk_o [C];
  acc_t  g_acc   [C];
  for (genvar j = 0; j < C; j++) begin : g_grow_kv
    assign g_kv_i[j]  = kv_o[R-1][j];
    assign g_kvv_i[j] = kvv_o[R-1][j];
    assign g_kvk_i[j] = kvk_o[R-1][j];
  end

  salo_pe_row #(.N(C)) u_grow (
    .clk, .rst_n, .stage, .clr,
    .en         ({C{grow_en}}),
    .q_in       (qg_in),
    .q_vld_in   (qg_vld),
    .kv_in      (g_kv_i),
    .kv_vld_in  (g_kvv_i),
    .kv_ok_in   (g_kvk_i),
    .kv_out     (g_kv_o),
    .kv_vld_out (g_kvv_o),
    .kv_ok_out  (g_kvk_o),
    .sum_inject (sum_inject_g),
    .rsum       (rsum[R]),
    .rsum_vld   (rsum_vld[R]),
    .o          (o[R]),
    .o_vld      (o_vld[R]),
    .inv_busy   (inv_busy[R]),
    .inv_done   (inv_done[R]),
    .acc        (g_acc)
  );

endmodule
