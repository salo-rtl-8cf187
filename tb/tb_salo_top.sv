// tb_salo_top: end-to-end test of salo_top at a reduced array size (4 x 4, D = 8).
//
// The testbench plays the host and data scheduler: it fills the query, key
// and value buffers with random 8-bit vectors, splits a sliding-window
// attention with one global token into passes (sequence splitting into tiles
// of R queries, window splitting into tiles of C keys), runs them, and reads
// the outputs back. Every output element is compared with a floating-point
// model of the same attention (base-2 softmax over the window keys plus the
// global key; the global query attends to every key), computed here from the
// same integer inputs. The pass length is checked against the stage lengths
// of salo_ctrl. It counts how often each mechanism happened: window-split
// merges, sequence tiles, the global PE column and row, masked keys at the
// sequence ends, masked columns at a window edge and a partial row tile.
module tb_salo_top;
  import salo_pkg::*;

  localparam int R  = 4;
  localparam int C  = 4;
  localparam int D  = 8;
  localparam int QDEPTH = 32;
  localparam int KDEPTH = 64;
  localparam int ODEPTH = 32;
  localparam int N  = 18;        // sequence length
  localparam int WA = -4;       // window: query i attends keys i+WA .. i+WB
  localparam int WB = 5;
  localparam int KOFF = 16;   // key j is stored at address j + KOFF
  // A window that is a whole number of tiles never needs a column mask.
  localparam bit NEED_CMASK = ((WB - WA + 1) % C) != 0;
  localparam int QAW = $clog2(QDEPTH), KAW = $clog2(KDEPTH), OAW = $clog2(ODEPTH);
  localparam int RCW = $clog2(R+1), PW = $clog2(R+C);
  localparam int W   = WB - WA + 1;
  localparam int T   = (W + C - 1) / C;      // window tiles
  localparam int NT  = (N + R - 1) / R;      // sequence tiles
  localparam int GQ  = N;                     // addresses of the global token
  localparam int GK  = KDEPTH - 1;
  localparam real TOL = 0.02;
  localparam int QKR = 16;     // q and k elements are drawn from [-QKR, QKR)

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                q_wr_en = 0, k_wr_en = 0, v_wr_en = 0, o_rd_en = 0;
  logic [QAW-1:0]      q_wr_addr = '0;
  logic [KAW-1:0]      k_wr_addr = '0, v_wr_addr = '0;
  logic [D*DATA_W-1:0] q_wr_data = '0, k_wr_data = '0, v_wr_data = '0;
  logic [OAW-1:0]      o_rd_addr = '0;
  logic [D*OUT_W-1:0]  o_rd_data;
  wgt_t                o_rd_w;
  logic                start = 0;
  logic [QAW-1:0]      q_base = '0, qg_addr = '0;
  logic [KAW-1:0]      k_base = '0, kg_addr = '0;
  logic [OAW-1:0]      o_base = '0, og_addr = '0;
  logic [RCW-1:0]      row_cnt = '0;
  logic [C-1:0]        col_en = '0;
  logic [PW-1:0]       kv_first = '0, kv_last = '0;
  logic                kg_ok = 0, gcol_en = 0, grow_en = 0, first = 0, g_first = 0;
  logic                busy, done;

  salo_top #(.R(R), .C(C), .D(D), .QDEPTH(QDEPTH), .KDEPTH(KDEPTH), .ODEPTH(ODEPTH)) dut (.*);

  int checks = 0, failures = 0;
  real worst = 0.0;                 // largest output error seen
  int n_merge = 0, n_seqtile = 0, n_gcol = 0, n_grow = 0, n_kmask = 0, n_cmask = 0, n_partial = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int q [N+1][D];   // index N = global token
  int k [N+1][D];
  int v [N+1][D];
  real ref_o [N+1][D];

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  function automatic real dotq(int i, int j);
    int s = 0;
    for (int t = 0; t < D; t++) s += q[i][t] * k[j][t];
    return real'(s) / 256.0;
  endfunction

  task automatic reference();
    real p [N+1];
    real sum;
    for (int i = 0; i <= N; i++) begin
      sum = 0.0;
      for (int j = 0; j <= N; j++) begin
        bit att;
        if (i == N) att = (j < N);                        // global query: all keys
        else        att = (j == N) || (j - i >= WA && j - i <= WB && j >= 0 && j < N);
        p[j] = att ? 2.0 ** dotq(i, j) : 0.0;
        sum += p[j];
      end
      for (int t = 0; t < D; t++) begin
        ref_o[i][t] = 0.0;
        for (int j = 0; j <= N; j++) ref_o[i][t] += p[j] / sum * (real'(v[j][t]) / 16.0);
      end
    end
  endtask

  function automatic logic [D*DATA_W-1:0] pack(input int x [N+1][D], input int i);
    logic [D*DATA_W-1:0] w;
    for (int t = 0; t < D; t++) w[t*DATA_W +: DATA_W] = DATA_W'(x[i][t]);
    return w;
  endfunction

  task automatic load_buffers();
    for (int i = 0; i <= N; i++) begin
      @(negedge clk);
      q_wr_en = 1; q_wr_addr = QAW'((i == N) ? GQ : i); q_wr_data = pack(q, i);
      k_wr_en = 1; k_wr_addr = KAW'((i == N) ? GK : i + KOFF); k_wr_data = pack(k, i);
      v_wr_en = 1; v_wr_addr = KAW'((i == N) ? GK : i + KOFF); v_wr_data = pack(v, i);
    end
    @(negedge clk);
    q_wr_en = 0; k_wr_en = 0; v_wr_en = 0;
  endtask

  // expected pass length: LOAD R+C+1, QK D+C+1, EXP 1, SUM C+2, INV 20,
  // NORM 1, SV D+C+3, WB R+1, DONE 1, and the start cycle
  localparam int PASS_CYC = (R+C+1) + (D+C+1) + 1 + (C+2) + 20 + 1 + (D+C+3) + (R+1) + 1 + 1;

  bit gcovered [-2*(R+C+W) : N+2*(R+C+W)];
  bit gfirst_done;

  task automatic run_pass(int i0, int t, bit g_on);
    int kb, rows;
    longint c0;
    kb = i0 + WA + t * C;                    // key index of pass key 0
    rows = (N - i0 < R) ? N - i0 : R;
    @(negedge clk);
    q_base  = QAW'(i0);
    qg_addr = QAW'(GQ);
    k_base  = KAW'(kb + KOFF);
    kg_addr = KAW'(GK);
    o_base  = OAW'(i0);
    og_addr = OAW'(GQ);
    row_cnt = RCW'(rows);
    for (int c = 0; c < C; c++) col_en[c] = (WA + t*C + (C-1-c) <= WB);
    // pass keys p map to key index kb + p; mask those outside the sequence
    kv_first = PW'((kb < 0) ? -kb : 0);
    kv_last  = PW'((kb + R + C - 2 > N - 1) ? N - 1 - kb : R + C - 2);
    if (kb > N - 1 || kb + R + C - 2 < 0) begin   // no key of the pass is inside
      kv_first = PW'(R + C - 1);
      kv_last  = '0;
    end
    kg_ok   = 1;
    gcol_en = (t == 0);
    grow_en = g_on;
    first   = (t == 0);
    g_first = g_on && !gfirst_done;
    if (g_on) gfirst_done = 1;
    if (t > 0) n_merge++;
    if (t == 0) n_seqtile++;
    if (gcol_en) n_gcol++;
    if (g_on) n_grow++;
    if (kb < 0 || kb + R + C - 2 > N - 1) n_kmask++;
    if (col_en != '1) n_cmask++;
    if (rows < R) n_partial++;
    start = 1;
    c0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (cyc - c0 + 1 != longint'(PASS_CYC)) begin
      failures++;
      $display("pass (%0d,%0d): %0d cycles, expected %0d", i0, t, cyc - c0 + 1, PASS_CYC);
    end
  endtask

  task automatic check_row(int i, int addr);
    real got, err, maxerr;
    @(negedge clk);
    o_rd_en = 1; o_rd_addr = OAW'(addr);
    @(negedge clk);
    o_rd_en = 0;
    maxerr = 0.0;
    for (int t = 0; t < D; t++) begin
      got = real'($signed(o_rd_data[t*OUT_W +: OUT_W])) / 256.0;
      err = got - ref_o[i][t];
      if (err < 0) err = -err;
      if (err > maxerr) maxerr = err;
      checks++;
      if (err > TOL) begin
        failures++;
        if (failures < 20) $display("row %0d elem %0d: got %f expected %f", i, t, got, ref_o[i][t]);
      end
    end
    if (maxerr > TOL) $display("row %0d: largest error %f", i, maxerr);
    if (maxerr > worst) worst = maxerr;
  endtask

  initial begin
    for (int i = 0; i <= N; i++)
      for (int t = 0; t < D; t++) begin
        q[i][t] = rnd(-QKR, QKR - 1);
        k[i][t] = rnd(-QKR, QKR - 1);
        v[i][t] = rnd(-64, 63);
      end
    reference();
    gfirst_done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_buffers();
    // The global row sees pass keys R-1 .. R+C-2, i.e. key indices
    // kb+R-1 .. kb+R+C-2. Enable it in passes whose range is not yet covered.
    for (int i0 = 0; i0 < N; i0 += R)
      for (int t = 0; t < T; t++) begin
        int lo, hi;
        bit g_on;
        lo = i0 + WA + t*C + R - 1;
        hi = lo + C - 1;
        g_on = 1;
        for (int j = lo; j <= hi; j++) if (gcovered[j]) g_on = 0;
        if (g_on) for (int j = lo; j <= hi; j++) gcovered[j] = 1;
        run_pass(i0, t, g_on);
      end
    for (int j = 0; j < N; j++)
      if (!gcovered[j]) begin
        failures++;
        $display("schedule leaves key %0d out of the global row", j);
      end
    for (int i = 0; i < N; i++) check_row(i, i);
    check_row(N, GQ);
    $display("largest output error %f (tolerance %f)", worst, TOL);
    $display("mechanisms: merge=%0d seqtile=%0d gcol=%0d grow=%0d keymask=%0d colmask=%0d partial=%0d",
             n_merge, n_seqtile, n_gcol, n_grow, n_kmask, n_cmask, n_partial);
    checks += 7;
    if (n_merge == 0)   failures++;
    if (n_seqtile < 2)  failures++;
    if (n_gcol == 0)    failures++;
    if (n_grow == 0)    failures++;
    if (n_kmask == 0)   failures++;
    if (NEED_CMASK && n_cmask == 0) failures++;
    if (n_partial == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
