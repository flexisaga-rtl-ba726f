// tb_flexisaga: end-to-end self-checking test of the FlexiSAGA accelerator at its
// default size (8x8 PEs, 8 memory ports).
//
// For each of the seven dataflows it builds random weight and input tiles, encodes
// the weights in the format the dataflow expects (dense row-major, two-stage
// bitmap, or compressed sparse block built by greedy column merging), writes them
// into main memory through the host port, runs the accelerator and compares every
// output word with a reference product computed here. Integer and FP32 modes are
// both used (FP32 with small integer values, so the reference is exact).
// It also checks that a sparse tile with zero columns finishes in fewer cycles in
// sOS than in dOS, and counts the mechanisms the design has: wavefronts, skipped
// zero vectors, DecU zero answers, csOS input re-fetches, padding commands and
// memory-port contention; one that never happens counts as a failure.
module tb_flexisaga;
  import flexisaga_pkg::*;

  localparam int ROWS = 8, COLS = 8, NPORTS = 8, TMAX = 16;
  localparam int EBITS = TMAX * ROWS;
  localparam int NLU = ROWS + COLS - 1;
  localparam int NREQ = 2 * NLU;
  localparam addr_t WB = 16'h0000, XB = 16'h1000, YB = 16'h2000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  host_en = 1'b0, host_we = 1'b0;
  addr_t host_addr = '0;
  word_t host_wdata = '0, host_rdata;
  logic  start = 1'b0;
  dataflow_e cfg_df = DF_DOS;
  logic cfg_fp = 1'b0;
  logic [7:0] cfg_m = '0, cfg_k = '0, cfg_n = '0, cfg_csb_ncols = '0;
  addr_t cfg_ldw = '0, cfg_ldx = '0, cfg_ldy = '0;
  logic [TMAX-1:0] cfg_vbits = '0;
  logic [EBITS-1:0] cfg_ebits = '0;
  logic signed [7:0] cfg_csb_idx [TMAX][ROWS];
  logic busy, done, ev_wave, ev_skip, ev_refetch;
  logic [$clog2(NREQ+1)-1:0] n_zero;

  flexisaga dut (
    .clk, .rst_n, .host_en, .host_we, .host_addr, .host_wdata, .host_rdata,
    .start, .cfg_df, .cfg_fp, .cfg_m, .cfg_k, .cfg_n,
    .cfg_wbase(WB), .cfg_xbase(XB), .cfg_ybase(YB),
    .cfg_ldw, .cfg_ldx, .cfg_ldy, .cfg_vbits, .cfg_ebits, .cfg_csb_ncols, .cfg_csb_idx,
    .busy, .done, .ev_wave, .ev_skip, .ev_refetch, .n_zero
  );

  int checks = 0, failures = 0;
  int cnt_wave = 0, cnt_skip = 0, cnt_zero = 0, cnt_refetch = 0, cnt_contention = 0, cnt_pad = 0;
  int cnt_df [7];
  int cycle = 0;

  always @(posedge clk) begin
    int nv;
    cycle <= cycle + 1;
    if (ev_wave) cnt_wave++;
    if (ev_skip) cnt_skip++;
    if (ev_refetch) cnt_refetch++;
    cnt_zero += int'(n_zero);
    nv = 0;
    for (int i = 0; i < NREQ; i++) if (dut.req[i].valid && !(dut.req[i].sparse && !dut.req[i].we)) nv++;
    if (nv > NPORTS) cnt_contention++;
    for (int i = 0; i < NLU; i++) if (dut.lu_cmd[i].valid && dut.lu_cmd[i].zero) cnt_pad++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- helpers
  function automatic word_t i2f(input int x);
    int unsigned ax;
    int p;
    if (x == 0) return 32'h0;
    ax = (x < 0) ? -x : x;
    p = 0;
    for (int i = 0; i < 32; i++) if (ax[i]) p = i;
    return {x < 0 ? 1'b1 : 1'b0, 8'(127 + p), 23'((ax << (23 - p)) & 32'h7F_FFFF)};
  endfunction

  task automatic mem_wr(input addr_t a, input word_t d);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b1; host_addr = a; host_wdata = d;
    @(negedge clk);
    host_en = 1'b0; host_we = 1'b0;
  endtask

  task automatic mem_rd(input addr_t a, output word_t d);
    @(negedge clk);
    host_en = 1'b1; host_we = 1'b0; host_addr = a;
    @(negedge clk);
    host_en = 1'b0;
    d = host_rdata;
  endtask

  int W [16][16];
  int X [16][16];

  // run one tile; returns the cycle count
  task automatic run_tile(input dataflow_e df, input bit fpm, input int M, input int K, input int N,
                          output int cyc);
    int nz, rank, ncols, c0;
    bit used [16];
    bit occ [8];
    int ref_v;
    word_t got, expw;
    // clear Y (zero-row skipping leaves rows unwritten); dense flows get a marker
    // value instead, so a missing write is caught
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++)
      mem_wr(YB + addr_t'(m * N + n), (df == DF_SWS || df == DF_SIS) ? 32'h0 : 32'hDEAD_BEEF);
    // inputs, row-major K x N
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++)
      mem_wr(XB + addr_t'(k * N + n), fpm ? i2f(X[k][n]) : word_t'(X[k][n]));
    cfg_vbits = '0; cfg_ebits = '0; cfg_csb_ncols = '0;
    for (int j = 0; j < TMAX; j++) for (int r = 0; r < ROWS; r++) cfg_csb_idx[j][r] = -8'sd1;
    nz = 0;
    unique case (df)
      DF_DOS, DF_DWS, DF_DIS: begin
        for (int m = 0; m < M; m++) for (int k = 0; k < K; k++)
          mem_wr(WB + addr_t'(m * K + k), fpm ? i2f(W[m][k]) : word_t'(W[m][k]));
      end
      DF_SOS: begin  // column bit array + element bits per non-zero column
        rank = 0;
        for (int k = 0; k < K; k++) begin
          bit any = 0;
          for (int m = 0; m < M; m++) if (W[m][k] != 0) any = 1;
          cfg_vbits[k] = any;
          if (any) begin
            for (int m = 0; m < M; m++) if (W[m][k] != 0) begin
              cfg_ebits[rank * M + m] = 1'b1;
              mem_wr(WB + addr_t'(nz), fpm ? i2f(W[m][k]) : word_t'(W[m][k])); nz++;
            end
            rank++;
          end
        end
      end
      DF_SWS, DF_SIS: begin  // row bit array + element bits per non-zero row
        rank = 0;
        for (int m = 0; m < M; m++) begin
          bit any = 0;
          for (int k = 0; k < K; k++) if (W[m][k] != 0) any = 1;
          cfg_vbits[m] = any;
          if (any) begin
            for (int k = 0; k < K; k++) if (W[m][k] != 0) begin
              cfg_ebits[rank * K + k] = 1'b1;
              mem_wr(WB + addr_t'(nz), fpm ? i2f(W[m][k]) : word_t'(W[m][k])); nz++;
            end
            rank++;
          end
        end
      end
      DF_CSOS: begin  // greedy merge of columns with disjoint non-zero rows
        for (int k = 0; k < 16; k++) used[k] = 0;
        ncols = 0;
        for (int k = 0; k < K; k++) begin
          bit any = 0;
          for (int m = 0; m < M; m++) if (W[m][k] != 0) any = 1;
          if (!any || used[k]) continue;
          for (int m = 0; m < 8; m++) occ[m] = 0;
          for (int k2 = k; k2 < K; k2++) begin
            bit ok = 1, any2 = 0;
            if (used[k2]) continue;
            for (int m = 0; m < M; m++) if (W[m][k2] != 0) begin any2 = 1; if (occ[m]) ok = 0; end
            if (!any2 || !ok) continue;
            used[k2] = 1;
            for (int m = 0; m < M; m++) if (W[m][k2] != 0) begin occ[m] = 1; cfg_csb_idx[ncols][m] = 8'(k2); end
          end
          ncols++;
        end
        cfg_csb_ncols = 8'(ncols);
        for (int j = 0; j < ncols; j++) for (int m = 0; m < M; m++)
          if (cfg_csb_idx[j][m] >= 0) begin
            c0 = int'(cfg_csb_idx[j][m]);
            mem_wr(WB + addr_t'(nz), fpm ? i2f(W[m][c0]) : word_t'(W[m][c0])); nz++;
          end
      end
      default: ;
    endcase
    cfg_df = df; cfg_fp = fpm;
    cfg_m = 8'(M); cfg_k = 8'(K); cfg_n = 8'(N);
    cfg_ldw = addr_t'(K); cfg_ldx = addr_t'(N); cfg_ldy = addr_t'(N);
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    cnt_df[int'(df)]++;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      ref_v = 0;
      for (int k = 0; k < K; k++) ref_v += W[m][k] * X[k][n];
      expw = fpm ? i2f(ref_v) : word_t'(ref_v);
      mem_rd(YB + addr_t'(m * N + n), got);
      checks++;
      if (!(got == expw || (fpm && got[30:0] == 0 && expw[30:0] == 0))) begin
        failures++;
        if (failures < 20)
          $display("FAIL df=%s fp=%0d Y[%0d][%0d] got %h exp %h", df.name(), fpm, m, n, got, expw);
      end
    end
  endtask

  // random tile; zero columns / rows and zero elements with the given odds (percent)
  task automatic gen(input int M, input int K, input int N, input int p_col, input int p_row, input int p_el);
    bit zc [16];
    bit zr [16];
    for (int k = 0; k < 16; k++) zc[k] = ($urandom % 100) < p_col;
    for (int m = 0; m < 16; m++) zr[m] = ($urandom % 100) < p_row;
    for (int m = 0; m < 16; m++) for (int k = 0; k < 16; k++) begin
      W[m][k] = int'($urandom % 9) - 4;
      if (zc[k] || zr[m] || ($urandom % 100) < p_el || m >= M || k >= K) W[m][k] = 0;
    end
    for (int k = 0; k < 16; k++) for (int n = 0; n < 16; n++) X[k][n] = int'($urandom % 9) - 4;
  endtask

  initial begin
    int cyc, cyc_d, cyc_s, M, K, N;
    bit fpm;
    for (int i = 0; i < 7; i++) cnt_df[i] = 0;
    for (int j = 0; j < TMAX; j++) for (int r = 0; r < ROWS; r++) cfg_csb_idx[j][r] = -8'sd1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    for (int it = 0; it < 3; it++) begin
      fpm = (it == 1);
      // output stationary: M <= ROWS, N <= COLS, K streamed
      M = (it == 0) ? ROWS : 3 + it; N = (it == 0) ? COLS : 2 + it; K = (it == 0) ? 16 : 5 + 3 * it;
      gen(M, K, N, 40, 0, 30);
      run_tile(DF_DOS, fpm, M, K, N, cyc_d);
      run_tile(DF_SOS, fpm, M, K, N, cyc_s);
      checks++;
      if (!(cyc_s < cyc_d)) begin
        failures++; $display("FAIL sOS %0d cycles not below dOS %0d", cyc_s, cyc_d);
      end
      gen(M, K, N, 20, 0, 60);
      run_tile(DF_CSOS, fpm, M, K, N, cyc);
      // weight stationary: stationary rows (non-zero ones for sWS) <= ROWS, K <= COLS
      M = (it == 0) ? ROWS : 4 + it; K = (it == 0) ? COLS : 3 + it; N = (it == 0) ? 16 : 3 + 2 * it;
      gen(M, K, N, 0, 0, 20);
      run_tile(DF_DWS, fpm, M, K, N, cyc);
      gen(12, K, N, 0, 50, 30);
      begin
        int nzr;
        nzr = 0;
        for (int m = 0; m < 12; m++) begin
          bit any;
          any = 0;
          for (int k = 0; k < K; k++) if (W[m][k] != 0) any = 1;
          if (any) begin
            nzr++;
            if (nzr > ROWS) for (int k = 0; k < K; k++) W[m][k] = 0;
          end
        end
      end
      run_tile(DF_SWS, fpm, 12, K, N, cyc);
      // input stationary: K <= ROWS, N <= COLS, M streamed
      K = (it == 0) ? ROWS : 4 + it; N = (it == 0) ? COLS : 2 + 2 * it; M = (it == 0) ? 16 : 6 + it;
      gen(M, K, N, 0, 0, 20);
      run_tile(DF_DIS, fpm, M, K, N, cyc);
      gen(M, K, N, 0, 50, 30);
      run_tile(DF_SIS, fpm, M, K, N, cyc);
    end

    checks++;
    if (cnt_wave == 0)       begin failures++; $display("FAIL no wavefront"); end
    checks++;
    if (cnt_skip == 0)       begin failures++; $display("FAIL no zero vector skipped"); end
    checks++;
    if (cnt_zero == 0)       begin failures++; $display("FAIL DecU never answered zero"); end
    checks++;
    if (cnt_refetch == 0)    begin failures++; $display("FAIL csOS never re-fetched an input row"); end
    checks++;
    if (cnt_contention == 0) begin failures++; $display("FAIL memory ports never contended"); end
    checks++;
    if (cnt_pad == 0)        begin failures++; $display("FAIL no zero padding"); end
    for (int i = 0; i < 7; i++) begin
      checks++;
      if (cnt_df[i] == 0) begin failures++; $display("FAIL dataflow %0d never ran", i); end
    end
    $display("events: waves=%0d skips=%0d zero_answers=%0d refetches=%0d contention_cycles=%0d pads=%0d",
             cnt_wave, cnt_skip, cnt_zero, cnt_refetch, cnt_contention, cnt_pad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
