// tb_controller: self-checking test of the controller on a 3-row, 2-column array,
// the array size of the paper's worked examples, with behavioural load and store
// units that stay busy for a random 1-3 cycles. It replays the paper's sparse
// examples (sOS on a 3x4 weight tile with column bit array 1001, sWS on a 5x2
// tile with row bit array 10110, sIS on a 4x3 tile with row bit array 1001, csOS
// on the 3x4 tile whose CSB column-index array is 0 0 -1 | 3 1 3) and a dense dOS
// tile, and checks the command streams: the number of wavefronts and skipped
// vectors; that in wave cycle t exactly the PEs with row+column = t act; the
// load-unit addresses or sparse element positions; the order of input rows
// fetched by csOS and which PE rows compute; the element bit array handed to the
// DecU; and that every expected output word is stored exactly once.
module tb_controller;
  import flexisaga_pkg::*;

  localparam int ROWS = 3, COLS = 2, TMAX = 16;
  localparam int EBITS = TMAX * ROWS;
  localparam int NLU = ROWS + COLS - 1, NSU = NLU;
  localparam addr_t WB = 16'd100, XB = 16'd200, YB = 16'd300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  dataflow_e df = DF_DOS;
  logic [7:0] m = 0, k = 0, n = 0, ncols = 0;
  addr_t ldw = 0, ldx = 0, ldy = 0;
  logic [TMAX-1:0] vbits = 0;
  logic [EBITS-1:0] ebits = 0;
  logic signed [7:0] cidx [TMAX][ROWS];
  logic busy, done, fp, ev_wave, ev_skip, ev_refetch;
  pe_cmd_t pe_cmd [ROWS][COLS];
  lu_cmd_t lu_cmd [NLU];
  logic    lu_busy [NLU];
  su_cmd_t su_cmd [NSU];
  logic    su_busy [NSU];
  logic [EBITS-1:0] dec_ebits;
  addr_t dec_nz_base;

  controller #(.ROWS(ROWS), .COLS(COLS), .TMAX(TMAX)) dut (
    .clk, .rst_n, .start, .cfg_df(df), .cfg_fp(1'b0), .cfg_m(m), .cfg_k(k), .cfg_n(n),
    .cfg_wbase(WB), .cfg_xbase(XB), .cfg_ybase(YB), .cfg_ldw(ldw), .cfg_ldx(ldx), .cfg_ldy(ldy),
    .cfg_vbits(vbits), .cfg_ebits(ebits), .cfg_csb_ncols(ncols), .cfg_csb_idx(cidx),
    .busy, .done, .fp, .pe_cmd, .lu_cmd, .lu_busy, .su_cmd, .su_busy,
    .dec_ebits, .dec_nz_base, .ev_wave, .ev_skip, .ev_refetch);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural load/store units
  int lu_cnt [NLU], su_cnt [NSU];
  always_ff @(posedge clk) begin
    for (int i = 0; i < NLU; i++)
      if (lu_cmd[i].valid) lu_cnt[i] <= 1 + $urandom % 3; else if (lu_cnt[i] > 0) lu_cnt[i] <= lu_cnt[i] - 1;
    for (int i = 0; i < NSU; i++)
      if (su_cmd[i].valid) su_cnt[i] <= 1 + $urandom % 3; else if (su_cnt[i] > 0) su_cnt[i] <= su_cnt[i] - 1;
  end
  always_comb begin
    for (int i = 0; i < NLU; i++) lu_busy[i] = lu_cnt[i] > 0;
    for (int i = 0; i < NSU; i++) su_busy[i] = su_cnt[i] > 0;
  end

  // observation
  int waves, skips, refetches, wave_t, bad_diag;
  int stores [int];
  int lx_rows [$];        // input rows fetched (OS / csOS), from the address of column 0
  int lw_elems [$];       // sparse element positions requested by the left LUs
  int lw_addrs [$];       // dense weight addresses
  int mac_rows [$];       // csOS: rows that computed, one bitmask per wave
  int mac_mask;
  always @(posedge clk) begin
    if (ev_wave) waves++;
    if (ev_skip) skips++;
    if (ev_refetch) refetches++;
    if (dut.state.name() == "S_WAVE") begin
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
        logic act;
        act = pe_cmd[r][c].op != ALU_NOP || pe_cmd[r][c].cp_right || pe_cmd[r][c].cp_down;
        if (act != (r + c == wave_t) && !(df == DF_CSOS && pe_cmd[r][c].cp_down)) bad_diag++;
        if (pe_cmd[r][c].op == ALU_MAC && c == 0) mac_mask |= (1 << r);
      end
      wave_t++;
      if (wave_t == ROWS + COLS - 1) begin wave_t = 0; mac_rows.push_back(mac_mask); mac_mask = 0; end
    end
    for (int i = 0; i < ROWS; i++) if (lu_cmd[i].valid && lu_cmd[i].dst_idx == R_W && !lu_cmd[i].zero) begin
      if (lu_cmd[i].sparse) lw_elems.push_back(int'(lu_cmd[i].elem));
      else lw_addrs.push_back(int'(lu_cmd[i].addr));
    end
    if (lu_cmd[0].valid && lu_cmd[0].dst_idx == R_X && !lu_cmd[0].zero && (df == DF_CSOS || df == DF_DOS || df == DF_SOS))
      lx_rows.push_back((int'(lu_cmd[0].addr) - int'(XB)) / int'(ldx));
    for (int i = 0; i < NSU; i++) if (su_cmd[i].valid) begin
      if (stores.exists(int'(su_cmd[i].addr))) stores[int'(su_cmd[i].addr)]++;
      else stores[int'(su_cmd[i].addr)] = 1;
    end
  end

  task automatic run(input dataflow_e d);
    waves = 0; skips = 0; refetches = 0; wave_t = 0; bad_diag = 0; mac_mask = 0;
    stores.delete(); lx_rows.delete(); lw_elems.delete(); lw_addrs.delete(); mac_rows.delete();
    df = d;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    check(!busy, "idle after done");
    check(bad_diag == 0, $sformatf("%s wavefront diagonal violated %0d times", d.name(), bad_diag));
  endtask

  task automatic expect_stores(input int rows [$], input int cols);
    check(stores.size() == rows.size() * cols, $sformatf("%s stored %0d words, exp %0d", df.name(), stores.size(), rows.size() * cols));
    foreach (rows[i]) for (int j = 0; j < cols; j++) begin
      int a;
      a = int'(YB) + rows[i] * int'(ldy) + j;
      check(stores.exists(a) && stores[a] == 1, $sformatf("%s Y[%0d][%0d] stored once", df.name(), rows[i], j));
    end
  endtask

  initial begin
    for (int j = 0; j < TMAX; j++) for (int r = 0; r < ROWS; r++) cidx[j][r] = -8'sd1;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // dense OS, 3x3 weights, 3x2 inputs
    m = 3; k = 3; n = 2; ldw = 3; ldx = 2; ldy = 2;
    run(DF_DOS);
    check(waves == 3 && skips == 0, $sformatf("dOS waves %0d", waves));
    check(lx_rows.size() == 3 && lx_rows[0] == 0 && lx_rows[1] == 1 && lx_rows[2] == 2, "dOS input rows in order");
    check(lw_addrs.size() == 9, "dOS weight loads");
    for (int i = 0; i < 9 && i < lw_addrs.size(); i++)
      check(lw_addrs[i] == int'(WB) + (i % 3) * 3 + i / 3, $sformatf("dOS weight addr %0d", lw_addrs[i]));
    expect_stores({0, 1, 2}, 2);

    // sOS, paper example: weights a00b/c00d/000e, column bit array 1001
    m = 3; k = 4; n = 2; ldw = 0; ldx = 2; ldy = 2;
    vbits = 16'b1001; ebits = '0; ebits[5:0] = 6'b111011;
    run(DF_SOS);
    check(waves == 2 && skips == 2, $sformatf("sOS waves %0d skips %0d", waves, skips));
    check(lx_rows.size() == 2 && lx_rows[0] == 0 && lx_rows[1] == 3, "sOS fetches input rows 0 and 3");
    check(lw_elems.size() == 6, "sOS sparse weight reads");
    for (int i = 0; i < 6 && i < lw_elems.size(); i++) check(lw_elems[i] == i, "sOS element positions");
    expect_stores({0, 1, 2}, 2);

    // sWS, paper example: 5x2 weights, row bit array 10110 (rows 0, 2, 3)
    m = 5; k = 2; n = 2; ldx = 2; ldy = 2;
    vbits = 16'b01101; ebits = '0; ebits[5:0] = 6'b101111;
    run(DF_SWS);
    check(waves == 2, $sformatf("sWS waves %0d", waves));
    check(lw_elems.size() == 6, $sformatf("sWS stationary sparse reads %0d", lw_elems.size()));
    expect_stores({0, 2, 3}, 2);

    // sIS, paper example: 4x3 weights, row bit array 1001 (rows 0, 3)
    m = 4; k = 3; n = 2; ldx = 2; ldy = 2;
    vbits = 16'b1001; ebits = '0; ebits[5:0] = 6'b101111;
    run(DF_SIS);
    check(waves == 2 && skips == 2, $sformatf("sIS waves %0d skips %0d", waves, skips));
    check(lw_elems.size() == 6, "sIS sparse weight reads");
    for (int i = 0; i < 6 && i < lw_elems.size(); i++) check(lw_elems[i] == i, "sIS element positions");
    expect_stores({0, 3}, 2);

    // csOS, paper example: column-index array 0 0 -1 | 3 1 3
    m = 3; k = 4; n = 2; ldx = 2; ldy = 2; ncols = 2;
    cidx[0][0] = 0; cidx[0][1] = 0; cidx[0][2] = -1;
    cidx[1][0] = 3; cidx[1][1] = 1; cidx[1][2] = 3;
    run(DF_CSOS);
    check(dec_ebits[5:0] == 6'b111011 && dec_ebits[EBITS-1:6] == 0, $sformatf("csOS element bits %b", dec_ebits[5:0]));
    check(waves == 3 && refetches == 1, $sformatf("csOS waves %0d refetches %0d", waves, refetches));
    check(lx_rows.size() == 3 && lx_rows[0] == 0 && lx_rows[1] == 3 && lx_rows[2] == 1, "csOS input rows 0, 3, 1");
    check(mac_rows.size() == 3 && mac_rows[0] == 3'b011 && mac_rows[1] == 3'b101 && mac_rows[2] == 3'b010,
          "csOS computing rows per wave");
    check(lw_elems.size() == 6, "csOS weight reads");
    expect_stores({0, 1, 2}, 2);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
