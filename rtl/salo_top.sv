// salo_top: the SALO spatial accelerator for hybrid sparse attention.
//
// SALO computes sliding-window attention with global tokens. An R x C PE
// array receives R queries horizontally and keys/values diagonally, so that
// row r attends to the C keys r..r+C-1 of the pass and consecutive rows
// reuse C-1 of them. A global PE column adds one global key to every row, a
// global PE row computes one global query against the keys that flow through
// the array. Each PE does the whole attention in place (q.k, exponent, row
// sum, normalisation, weighted sum of v); a weighted sum module per row
// merges the tile just computed with the result of earlier tiles of the same
// window. Sequence splitting, window splitting and reordering of dilated
// windows are done by the host, which loads the buffers and issues passes.
//
// Blocks: query/key/value/output buffers (salo_buffer, sizes of the paper's
// Table 1), edge vector registers (salo_vec_reg), the spatial array
// (salo_array), R+1 weighted sum modules (salo_weighted_sum) and the pass
// sequencer (salo_ctrl). The weights W of stored outputs live in a small
// extra buffer next to the output buffer (this design's choice).
//
// Host interface:
//   q/k/v_wr_*  write one D-element vector per cycle into a buffer (any time
//               the accelerator is idle)
//   o_rd_*      read a stored output vector (16-bit elements) and its weight;
//               synchronous, data valid the next cycle; idle only
//   start       with the pass descriptor, when busy is low:
//     q_base    query buffer address of array row 0 (rows use q_base+r)
//     qg_addr   query buffer address of the global query
//     k_base    key/value buffer address of pass key 0; pass key p sits in
//               PE(r,c) with p = r + C-1-c
//     kg_addr   key/value buffer address of the global key/value
//     o_base    output buffer address of row 0; og_addr for the global row
//     row_cnt   rows 0..row_cnt-1 are written back
//     col_en    array columns taking part (window edge of a split window)
//     kv_first, kv_last  pass keys p outside [kv_first, kv_last] are masked
//     kg_ok, gcol_en     global key valid / global PE column enabled
//     grow_en   global PE row enabled (and written back)
//     first, g_first     first tile of these rows / of the global row: the
//               previous output is ignored instead of merged
//   done        one-cycle pulse at the end of the pass
module salo_top
  import salo_pkg::*;
#(
  parameter int R      = 32,
  parameter int C      = 32,
  parameter int D      = 64,
  parameter int QDEPTH = 256,   // 16 KB of 64-byte query vectors
  parameter int KDEPTH = 512,   // 32 KB of 64-byte key vectors
  parameter int ODEPTH = 256,   // 32 KB of 128-byte output vectors
  parameter int QAW    = $clog2(QDEPTH),
  parameter int KAW    = $clog2(KDEPTH),
  parameter int OAW    = $clog2(ODEPTH),
  parameter int RCW    = $clog2(R+1),
  parameter int PW     = $clog2(R+C)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // buffer loading
  input  logic                  q_wr_en,
  input  logic [QAW-1:0]        q_wr_addr,
  input  logic [D*DATA_W-1:0]   q_wr_data,
  input  logic                  k_wr_en,
  input  logic [KAW-1:0]        k_wr_addr,
  input  logic [D*DATA_W-1:0]   k_wr_data,
  input  logic                  v_wr_en,
  input  logic [KAW-1:0]        v_wr_addr,
  input  logic [D*DATA_W-1:0]   v_wr_data,
  // output read-back
  input  logic                  o_rd_en,
  input  logic [OAW-1:0]        o_rd_addr,
  output logic [D*OUT_W-1:0]    o_rd_data,
  output wgt_t                  o_rd_w,
  // pass descriptor
  input  logic                  start,
  input  logic [QAW-1:0]        q_base,
  input  logic [QAW-1:0]        qg_addr,
  input  logic [KAW-1:0]        k_base,
  input  logic [KAW-1:0]        kg_addr,
  input  logic [OAW-1:0]        o_base,
  input  logic [OAW-1:0]        og_addr,
  input  logic [RCW-1:0]        row_cnt,
  input  logic [C-1:0]          col_en,
  input  logic [PW-1:0]         kv_first,
  input  logic [PW-1:0]         kv_last,
  input  logic                  kg_ok,
  input  logic                  gcol_en,
  input  logic                  grow_en,
  input  logic                  first,
  input  logic                  g_first,
  output logic                  busy,
  output logic                  done
);

  localparam int NKV = R + C;
  localparam int TW  = $clog2(D + C + R + 8) + 1;

  // ---------------------------------------------------------------- descriptor
  logic [QAW-1:0] d_q_base, d_qg_addr;
  logic [KAW-1:0] d_k_base, d_kg_addr;
  logic [OAW-1:0] d_o_base, d_og_addr;
  logic [RCW-1:0] d_row_cnt;
  logic [C-1:0]   d_col_en;
  logic [PW-1:0]  d_kv_first, d_kv_last;
  logic           d_kg_ok, d_gcol_en, d_grow_en, d_first, d_g_first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q_base <= '0; d_qg_addr <= '0; d_k_base <= '0; d_kg_addr <= '0;
      d_o_base <= '0; d_og_addr <= '0; d_row_cnt <= '0; d_col_en <= '0;
      d_kv_first <= '0; d_kv_last <= '0;
      d_kg_ok <= 1'b0; d_gcol_en <= 1'b0; d_grow_en <= 1'b0;
      d_first <= 1'b0; d_g_first <= 1'b0;
    end else if (start && !busy) begin
      d_q_base <= q_base; d_qg_addr <= qg_addr; d_k_base <= k_base; d_kg_addr <= kg_addr;
      d_o_base <= o_base; d_og_addr <= og_addr; d_row_cnt <= row_cnt; d_col_en <= col_en;
      d_kv_first <= kv_first; d_kv_last <= kv_last;
      d_kg_ok <= kg_ok; d_gcol_en <= gcol_en; d_grow_en <= grow_en;
      d_first <= first; d_g_first <= g_first;
    end
  end

  // ---------------------------------------------------------------- controller
  stage_e         stage;
  logic           clr, run, ld_vld, q_rd, kv_rd, o_rd_c;
  logic [TW-1:0]  tcnt, ld_idx, wb_idx;
  logic [QAW-1:0] q_rd_addr;
  logic [KAW-1:0] kv_rd_addr;
  logic [OAW-1:0] o_rd_addr_c, o_wr_addr;
  logic           sum_inject, sum_inject_g, wb_en;
  logic           inv_busy_any, ws_busy_any;

  salo_ctrl #(.R(R), .C(C), .D(D), .QAW(QAW), .KAW(KAW), .OAW(OAW), .TW(TW)) u_ctrl (
    .clk, .rst_n,
    .start      (start && !busy),
    .q_base     (d_q_base), .qg_addr (d_qg_addr),
    .k_base     (d_k_base), .kg_addr (d_kg_addr),
    .o_base     (d_o_base), .og_addr (d_og_addr),
    .row_cnt    (d_row_cnt),
    .grow_en    (d_grow_en),
    .inv_busy   (inv_busy_any),
    .ws_busy    (ws_busy_any),
    .stage, .clr, .run, .tcnt, .ld_vld, .ld_idx,
    .q_rd, .q_rd_addr, .kv_rd, .kv_rd_addr,
    .o_rd       (o_rd_c),   .o_rd_addr (o_rd_addr_c),
    .sum_inject, .sum_inject_g, .wb_en, .wb_idx, .o_wr_addr,
    .busy, .done
  );

  // ---------------------------------------------------------------- buffers
  logic [D*DATA_W-1:0] q_rdata, k_rdata, v_rdata;
  logic [D*OUT_W-1:0]  o_rdata, o_wdata;
  wgt_t                w_rdata, w_wdata;
  logic                o_rd_mux;
  logic [OAW-1:0]      o_rd_addr_mux;

  salo_buffer #(.W(D*DATA_W), .DEPTH(QDEPTH)) u_qbuf (
    .clk, .wr_en(q_wr_en && !busy), .wr_addr(q_wr_addr), .wr_data(q_wr_data),
    .rd_en(q_rd), .rd_addr(q_rd_addr), .rd_data(q_rdata));
  salo_buffer #(.W(D*DATA_W), .DEPTH(KDEPTH)) u_kbuf (
    .clk, .wr_en(k_wr_en && !busy), .wr_addr(k_wr_addr), .wr_data(k_wr_data),
    .rd_en(kv_rd), .rd_addr(kv_rd_addr), .rd_data(k_rdata));
  salo_buffer #(.W(D*DATA_W), .DEPTH(KDEPTH)) u_vbuf (
    .clk, .wr_en(v_wr_en && !busy), .wr_addr(v_wr_addr), .wr_data(v_wr_data),
    .rd_en(kv_rd), .rd_addr(kv_rd_addr), .rd_data(v_rdata));

  assign o_rd_mux      = busy ? o_rd_c : o_rd_en;
  assign o_rd_addr_mux = busy ? o_rd_addr_c : o_rd_addr;
  salo_buffer #(.W(D*OUT_W), .DEPTH(ODEPTH)) u_obuf (
    .clk, .wr_en(wb_en), .wr_addr(o_wr_addr), .wr_data(o_wdata),
    .rd_en(o_rd_mux), .rd_addr(o_rd_addr_mux), .rd_data(o_rdata));
  salo_buffer #(.W(WGT_W), .DEPTH(ODEPTH)) u_wbuf (
    .clk, .wr_en(wb_en), .wr_addr(o_wr_addr), .wr_data(w_wdata),
    .rd_en(o_rd_mux), .rd_addr(o_rd_addr_mux), .rd_data(w_rdata));
  assign o_rd_data = o_rdata;
  assign o_rd_w    = w_rdata;

  // ---------------------------------------------------------------- vector registers
  elem_t q_e [R];  logic q_v [R];
  elem_t kt_e[C];  logic kt_v[C];  logic kt_k[C];
  elem_t vt_e[C];  logic vt_v[C];  logic vt_k[C];
  elem_t kl_e[R];  logic kl_v[R];  logic kl_k[R];
  elem_t vl_e[R];  logic vl_v[R];  logic vl_k[R];
  elem_t qg_e, kg_e, vg_e;
  logic  qg_v, kg_v, vg_v, qg_k, kg_k, vg_k;
  logic  q_k_unused [R];

  function automatic logic p_ok(input int p, input logic [PW-1:0] lo, input logic [PW-1:0] hi);
    return (p >= int'(lo)) && (p <= int'(hi));
  endfunction

  for (genvar r = 0; r < R; r++) begin : g_q
    salo_vec_reg #(.D(D), .SKEW(0), .TW(TW)) u_q (
      .clk, .rst_n, .ld(ld_vld && int'(ld_idx) == r), .ld_data(q_rdata), .ld_ok(1'b1),
      .run(run && stage == ST_QK), .tcnt, .e(q_e[r]), .vld(q_v[r]), .ok(q_k_unused[r]));
  end
  salo_vec_reg #(.D(D), .SKEW(1), .TW(TW)) u_qg (
    .clk, .rst_n, .ld(ld_vld && int'(ld_idx) == R), .ld_data(q_rdata), .ld_ok(1'b1),
    .run(run && stage == ST_QK), .tcnt, .e(qg_e), .vld(qg_v), .ok(qg_k));

  // pass key p = ld_idx: p < C goes to top column C-1-p, p >= C to left row p-C+1
  for (genvar c = 0; c < C; c++) begin : g_kt
    localparam int P = C - 1 - c;
    salo_vec_reg #(.D(D), .SKEW(c), .TW(TW)) u_k (
      .clk, .rst_n, .ld(ld_vld && int'(ld_idx) == P), .ld_data(k_rdata),
      .ld_ok(p_ok(P, d_kv_first, d_kv_last)),
      .run(run && stage == ST_QK), .tcnt, .e(kt_e[c]), .vld(kt_v[c]), .ok(kt_k[c]));
    salo_vec_reg #(.D(D), .SKEW(c), .TW(TW)) u_v (
      .clk, .rst_n, .ld(ld_vld && int'(ld_idx) == P), .ld_data(v_rdata),
      .ld_ok(p_ok(P, d_kv_first, d_kv_last)),
      .run(run && stage == ST_SV), .tcnt, .e(vt_e[c]), .vld(vt_v[c]), .ok(vt_k[c]));
  end
  assign kl_e[0] = '0; assign kl_v[0] = 1'b0; assign kl_k[0] = 1'b0;
  assign vl_e[0] = '0; assign vl_v[0] = 1'b0; assign vl_k[0] = 1'b0;
  for (genvar r = 1; r < R; r++) begin : g_kl
    localparam int P = C - 1 + r;
    salo_vec_reg #(.D(D), .SKEW(0), .TW(TW)) u_k (
      .clk, .rst_n, .ld(ld_vld && int'(ld_idx) == P), .ld_data(k_rdata),
      .ld_ok(p_ok(P, d_kv_first, d_kv_last)),
      .run(run && stage == ST_QK), .tcnt, .e(kl_e[r]), .vld(kl_v[r]), .ok(kl_k[r]));
    salo_vec_reg #(.D(D), .SKEW(0), .TW(TW)) u_v (
      .clk, .rst_n, .ld(ld_vld && int'(ld_idx) == P), .ld_data(v_rdata),
      .ld_ok(p_ok(P, d_kv_first, d_kv_last)),
      .run(run && stage == ST_SV), .tcnt, .e(vl_e[r]), .vld(vl_v[r]), .ok(vl_k[r]));
  end
  salo_vec_reg #(.D(D), .SKEW(C), .TW(TW)) u_kg (
    .clk, .rst_n, .ld(ld_vld && int'(ld_idx) == NKV - 1), .ld_data(k_rdata), .ld_ok(d_kg_ok),
    .run(run && stage == ST_QK), .tcnt, .e(kg_e), .vld(kg_v), .ok(kg_k));
  salo_vec_reg #(.D(D), .SKEW(C), .TW(TW)) u_vg (
    .clk, .rst_n, .ld(ld_vld && int'(ld_idx) == NKV - 1), .ld_data(v_rdata), .ld_ok(d_kg_ok),
    .run(run && stage == ST_SV), .tcnt, .e(vg_e), .vld(vg_v), .ok(vg_k));

  // keys and values share the array's K/V ports (paper: v enters "from the
  // same port as the key vector")
  elem_t a_kt [C]; logic a_ktv [C]; logic a_ktk [C];
  elem_t a_kl [R]; logic a_klv [R]; logic a_klk [R];
  logic  sv;
  assign sv = (stage == ST_SV);
  for (genvar c = 0; c < C; c++) begin : g_ktm
    assign a_kt[c]  = sv ? vt_e[c] : kt_e[c];
    assign a_ktv[c] = sv ? vt_v[c] : kt_v[c];
    assign a_ktk[c] = sv ? vt_k[c] : kt_k[c];
  end
  for (genvar r = 0; r < R; r++) begin : g_klm
    assign a_kl[r]  = sv ? vl_e[r] : kl_e[r];
    assign a_klv[r] = sv ? vl_v[r] : kl_v[r];
    assign a_klk[r] = sv ? vl_k[r] : kl_k[r];
  end

  // ---------------------------------------------------------------- array
  acc_t rsum [R+1]; logic rsum_vld [R+1];
  acc_t o    [R+1]; logic o_vld    [R+1];
  logic inv_busy [R+1]; logic inv_done [R+1];

  salo_array #(.R(R), .C(C)) u_array (
    .clk, .rst_n, .stage, .clr,
    .col_en   (d_col_en),
    .gcol_en  (d_gcol_en),
    .grow_en  (d_grow_en),
    .q_in     (q_e),  .q_vld (q_v),
    .qg_in    (qg_e), .qg_vld (qg_v),
    .kt_in    (a_kt), .kt_vld (a_ktv), .kt_ok (a_ktk),
    .kl_in    (a_kl), .kl_vld (a_klv), .kl_ok (a_klk),
    .kg_in    (sv ? vg_e : kg_e), .kg_vld (sv ? vg_v : kg_v), .kg_ok (sv ? vg_k : kg_k),
    .sum_inject, .sum_inject_g,
    .rsum, .rsum_vld, .o, .o_vld, .inv_busy, .inv_done
  );

  // ---------------------------------------------------------------- weighted sum
  // Previous output vectors are held in out_q during the pass and updated in
  // place: element t is read at o_vld (tcnt = t+C+1) and rewritten at y_vld.
  out_t out_q  [R+1][D];
  wgt_t wprev_q[R+1];
  wgt_t w_out  [R+1];
  logic ws_busy[R+1];
  out_t y      [R+1];
  logic y_vld  [R+1];
  int   rd_el, wr_el;

  assign rd_el = int'(tcnt) - (C + 1);
  assign wr_el = int'(tcnt) - (C + 2);

  for (genvar r = 0; r <= R; r++) begin : g_ws
    logic row_en, first_r;
    out_t prev_el;
    assign row_en  = (r < R) ? (r < int'(d_row_cnt)) : d_grow_en;
    assign first_r = (r < R) ? d_first : d_g_first;
    assign prev_el = (rd_el >= 0 && rd_el < D) ? out_q[r][rd_el] : '0;

    salo_weighted_sum u_ws (
      .clk, .rst_n,
      .first  (first_r),
      .row_en (row_en),
      .w_new  (rsum[r]),
      .w_vld  (rsum_vld[r]),
      .w_prev (wprev_q[r]),
      .w_out  (w_out[r]),
      .busy   (ws_busy[r]),
      .o_new  (o[r]),
      .o_vld  (o_vld[r]),
      .o_prev (prev_el),
      .y      (y[r]),
      .y_vld  (y_vld[r])
    );

    always_ff @(posedge clk) begin
      if (ld_vld && int'(ld_idx) == r) begin
        for (int t = 0; t < D; t++) out_q[r][t] <= out_t'(o_rdata[t*OUT_W +: OUT_W]);
        wprev_q[r] <= w_rdata;
      end else if (y_vld[r] && wr_el >= 0 && wr_el < D) begin
        out_q[r][wr_el] <= y[r];
      end
    end
  end

  always_comb begin
    inv_busy_any = 1'b0;
    ws_busy_any  = 1'b0;
    for (int r = 0; r <= R; r++) begin
      inv_busy_any |= inv_busy[r];
      ws_busy_any  |= ws_busy[r];
    end
    o_wdata = '0;
    w_wdata = '0;
    for (int r = 0; r <= R; r++)
      if (int'(wb_idx) == r) begin
        for (int t = 0; t < D; t++) o_wdata[t*OUT_W +: OUT_W] = out_q[r][t];
        w_wdata = w_out[r];
      end
  end

  logic unused;
  always_comb begin
    unused = ^{qg_k, inv_done[0]};
    for (int r = 0; r < R; r++) unused ^= q_k_unused[r];
  end

endmodule
