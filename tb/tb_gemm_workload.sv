// tb_gemm_workload: a pruned DNN operator run as a tiled GEMM on the default 8x8
// FlexiSAGA, the way the accelerator is used for CONV (after im2col) and FC
// layers. The weight matrix (16 x 32) is pruned with the structured scheme the
// design is meant for: column vectors of length 8 (the array height) or row
// vectors of length 8 are zeroed at about 70 % sparsity. The host splits the
// GEMM into array-sized tiles, runs every tile, and adds up the partial outputs of
// the K tiles. The summed result is compared with a full reference GEMM. The
// operator runs in dOS, sOS and csOS (column pruning) and in dIS and sIS (row
// pruning). The test checks that each sparse dataflow needs fewer cycles than its
// dense counterpart and prints the sparse-over-dense speedups. Sizes are chosen
// here to keep the simulation short. They are not the sizes of a real network layer.
module tb_gemm_workload;
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
  int Yacc [16][16];
  int m_off = 0, n_off = 0;

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
      Yacc[m_off + m][n_off + n] += int'(got);
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

  int WF [16][32];
  int XF [32][16];

  // run the whole operator with tiles of TM x TK x TN; returns total cycles
  task automatic run_gemm(input dataflow_e df, input int TM, input int TK, input int TN, output int total);
    int cyc;
    total = 0;
    for (int m = 0; m < 16; m++) for (int n = 0; n < 16; n++) Yacc[m][n] = 0;
    for (int m0 = 0; m0 < 16; m0 += TM)
      for (int n0 = 0; n0 < 12; n0 += TN)
        for (int k0 = 0; k0 < 32; k0 += TK) begin
          int tn;
          tn = (12 - n0 < TN) ? 12 - n0 : TN;
          for (int m = 0; m < 16; m++) for (int k = 0; k < 16; k++)
            W[m][k] = (m < TM && k < TK) ? WF[m0 + m][k0 + k] : 0;
          for (int k = 0; k < 16; k++) for (int n = 0; n < 16; n++)
            X[k][n] = (k < TK && n < tn) ? XF[k0 + k][n0 + n] : 0;
          m_off = m0; n_off = n0;
          run_tile(df, 1'b0, TM, TK, tn, cyc);
          total += cyc;
        end
    for (int m = 0; m < 16; m++) for (int n = 0; n < 12; n++) begin
      int r;
      r = 0;
      for (int k = 0; k < 32; k++) r += WF[m][k] * XF[k][n];
      checks++;
      if (Yacc[m][n] != r) begin
        failures++;
        if (failures < 20) $display("FAIL %s operator Y[%0d][%0d] = %0d exp %0d", df.name(), m, n, Yacc[m][n], r);
      end
    end
  endtask

  // structured pruning: zero whole column vectors (length 8) or row vectors (length 8)
  task automatic make_operator(input bit by_rows);
    int nzc;
    int rv;
    for (int m = 0; m < 16; m++)
      for (int k = 0; k < 32; k++)
        WF[m][k] = int'($urandom % 15) - 7;
    for (int k = 0; k < 32; k++)
      for (int n = 0; n < 16; n++)
        XF[k][n] = int'($urandom % 15) - 7;
    if (!by_rows) begin
      for (int mb = 0; mb < 16; mb += 8)
        for (int k = 0; k < 32; k++) begin
          rv = int'($urandom % 100);
          if (rv < 70) begin
            for (int m = mb; m < mb + 8; m++) WF[m][k] = 0;
          end
        end
    end else begin
      for (int m = 0; m < 16; m++)
        for (int kb = 0; kb < 32; kb += 8) begin
          rv = int'($urandom % 100);
          if (rv < 70) begin
            for (int k = kb; k < kb + 8; k++) WF[m][k] = 0;
          end
        end
    end
    // a few isolated zeros as well, as left by fine-tuning
    for (int i = 0; i < 20; i++) WF[$urandom % 16][$urandom % 32] = 0;
    nzc = 0;
    for (int m = 0; m < 16; m++)
      for (int k = 0; k < 32; k++)
        if (WF[m][k] != 0) nzc++;
    $display("operator weights: %0d of 512 non-zero", nzc);
    checks++;
    if (nzc == 0) begin failures++; $display("FAIL empty operator"); end
  endtask

  initial begin
    int c_dos, c_sos, c_csos, c_dis, c_sis;
    for (int i = 0; i < 7; i++) cnt_df[i] = 0;
    for (int j = 0; j < TMAX; j++) for (int r = 0; r < ROWS; r++) cfg_csb_idx[j][r] = -8'sd1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    make_operator(1'b0);
    run_gemm(DF_DOS, 8, 16, 8, c_dos);
    run_gemm(DF_SOS, 8, 16, 8, c_sos);
    run_gemm(DF_CSOS, 8, 16, 8, c_csos);
    make_operator(1'b1);
    run_gemm(DF_DIS, 16, 8, 8, c_dis);
    run_gemm(DF_SIS, 16, 8, 8, c_sis);
    $display("events: waves=%0d skips=%0d zero_answers=%0d", cnt_wave, cnt_skip, cnt_zero);
    $display("operator cycles: dOS=%0d sOS=%0d csOS=%0d dIS=%0d sIS=%0d", c_dos, c_sos, c_csos, c_dis, c_sis);
    $display("sparse-over-dense speedup: sOS %0.2f csOS %0.2f sIS %0.2f",
             real'(c_dos) / real'(c_sos), real'(c_dos) / real'(c_csos), real'(c_dis) / real'(c_sis));
    checks++;
    if (!(c_sos < c_dos)) begin failures++; $display("FAIL sOS not faster than dOS"); end
    checks++;
    if (!(c_csos < c_dos)) begin failures++; $display("FAIL csOS not faster than dOS"); end
    checks++;
    if (!(c_sis < c_dis)) begin failures++; $display("FAIL sIS not faster than dIS"); end
    checks++;
    if (cnt_skip == 0) begin failures++; $display("FAIL no zero vector skipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
