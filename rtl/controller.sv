// controller: the programmable FlexiSAGA controller. It holds the schedule of one
// weight-tile x input-tile product, Y = W * X, and drives every PE, load unit (LU)
// and store unit (SU) cycle by cycle for the seven dataflows of the paper:
// dense output/weight/input stationary (dOS, dWS, dIS), their sparse variants on
// the two-stage bitmap format (sOS, sWS, sIS), and output stationary on the
// compressed sparse block format (csOS).
//
// Programming: the host sets the configuration inputs and pulses `start`; they
// are captured then. W is M x K, X is K x N, Y is M x N, all stored row-major
// at word addresses wbase/xbase/ybase with row pitches ldw/ldx/ldy. For the
// sparse bitmap dataflows, `vbits` is the first-stage bit array (one bit per
// column of W for sOS, per row of W for sWS and sIS) and `ebits` the element bit
// array (M bits per non-zero column, or K bits per non-zero row), and wbase points
// at the packed non-zero values. For csOS, `csb_ncols` merged columns are
// described by `csb_idx[j][r]`, the original column of the weight held by row r
// of merged column j, or -1 if that slot is empty. Rows of Y belonging to zero
// rows of W are not written (sWS, sIS): the host clears Y beforehand.
//
// Schedule. A tile is processed as a series of vectors; each vector is loaded by
// the LUs, then sent through the array as a diagonal wavefront of ROWS+COLS-1
// cycles in which PE(r,c) acts in wave cycle r+c, as in the paper's step
// diagrams (Figs. of sOS/sWS/sIS/csOS):
//  * OS: vector k = column k of W (left LUs) and row k of X (top LUs); each PE
//    multiply-accumulates into its own partial sum, passes the weight right and
//    the input down. sOS skips columns whose vbits bit is 0. At the end the
//    outputs are shifted out column by column to the right-hand SUs.
//  * WS: W is first shifted into the array from the left (PE(r,c) = W[r][c];
//    sWS loads only the non-zero rows); then for each column j of X the top LUs
//    load X[.][j], inputs move down, partial sums move right, and the right-hand
//    SUs store column j of Y.
//  * IS: X is first shifted in from the top (PE(r,c) = X[r][c]); then for each
//    row m of W (sIS: each non-zero row) the left LUs load W[m][.], weights move
//    right, partial sums move down and the bottom SUs store row m of Y.
//  * csOS: for merged column j the left LUs load the weights; the controller
//    keeps, per PE row, the column index of its weight and a 'finished' mark.
//    It fetches the input row wanted by the first unfinished row, sends it down
//    the array, and only rows whose column index matches multiply-accumulate;
//    they are marked finished. This repeats until every row is finished, then the
//    next merged column follows. Outputs leave as in OS.
// Loads and stores wait for all units to finish; waves do not overlap loads, as in
// the paper's diagrams. Smaller tiles than the array are padded with zeros by
// LU 'zero' commands. The per-cycle wavefront, the padding, the shift-in of
// stationary tiles, the shift-out of OS outputs and the configuration-register
// programming interface are this design's choices; the paper gives the
// dataflows only as step diagrams.
module controller
  import flexisaga_pkg::*;
#(
  parameter int unsigned ROWS  = 8,
  parameter int unsigned COLS  = 8,
  parameter int unsigned TMAX  = 16,                 // longest streamed tile dimension
  parameter int unsigned EBITS = TMAX * ((ROWS > COLS) ? ROWS : COLS),
  localparam int unsigned NLU  = ROWS + COLS - 1,
  localparam int unsigned NSU  = ROWS + COLS - 1
) (
  input  logic clk,
  input  logic rst_n,
  // programming interface
  input  logic             start,
  input  dataflow_e        cfg_df,
  input  logic             cfg_fp,
  input  logic [7:0]       cfg_m,
  input  logic [7:0]       cfg_k,
  input  logic [7:0]       cfg_n,
  input  addr_t            cfg_wbase,
  input  addr_t            cfg_xbase,
  input  addr_t            cfg_ybase,
  input  addr_t            cfg_ldw,
  input  addr_t            cfg_ldx,
  input  addr_t            cfg_ldy,
  input  logic [TMAX-1:0]  cfg_vbits,
  input  logic [EBITS-1:0] cfg_ebits,
  input  logic [7:0]       cfg_csb_ncols,
  input  logic signed [7:0] cfg_csb_idx [TMAX][ROWS],
  output logic             busy,
  output logic             done,
  // array control
  output logic             fp,
  output pe_cmd_t          pe_cmd [ROWS][COLS],
  output lu_cmd_t          lu_cmd [NLU],
  input  logic             lu_busy [NLU],
  output su_cmd_t          su_cmd [NSU],
  input  logic             su_busy [NSU],
  output logic [EBITS-1:0] dec_ebits,
  output addr_t            dec_nz_base,
  // events, one-cycle pulses
  output logic             ev_wave,     // a wavefront starts
  output logic             ev_skip,     // a zero vector of W is skipped
  output logic             ev_refetch   // csOS: an input row fetched for a not yet finished PE row
);

  typedef enum logic [4:0] {
    S_IDLE, S_CLEAR, S_STAT_SHIFT, S_STAT_ISSUE, S_STAT_WAIT,
    S_VEC, S_LW_ISSUE, S_LW_WAIT, S_CS_PICK, S_LX_ISSUE, S_LX_WAIT,
    S_WAVE, S_VST_ISSUE, S_VST_WAIT,
    S_OST_ISSUE, S_OST_WAIT, S_OST_SHIFT, S_DONE
  } state_e;

  state_e state;

  // captured configuration
  logic             cfg_fp_q;
  dataflow_e        df;
  logic [7:0]       m_q, k_q, n_q;
  addr_t            wbase, xbase, ybase, ldw, ldx, ldy;
  logic [TMAX-1:0]  vbits;
  logic [EBITS-1:0] ebits;
  logic [7:0]       ncols;
  logic signed [7:0] cidx [TMAX][ROWS];

  // progress
  logic [7:0] v;        // current vector (W column / X column / W row / merged column)
  logic [7:0] rank;     // rank of v among the non-zero vectors
  logic [7:0] s;        // step counter (stationary load, OS shift-out)
  logic [7:0] t;        // wave cycle
  logic [ROWS-1:0] fin; // csOS: PE row finished for the current merged column
  logic signed [7:0] kcs; // csOS: input row in flight
  logic            first_pick;

  logic is_os, is_ws, is_is, is_sparse, is_cs;
  assign is_os     = (df == DF_DOS) || (df == DF_SOS) || (df == DF_CSOS);
  assign is_ws     = (df == DF_DWS) || (df == DF_SWS);
  assign is_is     = (df == DF_DIS) || (df == DF_SIS);
  assign is_cs     = (df == DF_CSOS);
  assign is_sparse = (df == DF_SOS) || (df == DF_SWS) || (df == DF_SIS);

  // sWS: row of W held by PE row r (r-th set bit of vbits), and their count
  logic [7:0] rowmap [ROWS];
  logic [7:0] nrows;
  always_comb begin
    int unsigned cnt;
    cnt = 0;
    for (int r = 0; r < ROWS; r++) rowmap[r] = 8'(r);
    for (int i = 0; i < TMAX; i++) begin
      if (df == DF_SWS && vbits[i] && 8'(i) < m_q) begin
        if (cnt < ROWS) rowmap[cnt] = 8'(i);
        cnt = cnt + 1;
      end
    end
    nrows = (df == DF_SWS) ? 8'(cnt) : m_q;
  end

  // csOS: element bit array derived from the column-index array
  logic [EBITS-1:0] cs_ebits;
  always_comb begin
    cs_ebits = '0;
    for (int j = 0; j < TMAX; j++)
      for (int r = 0; r < ROWS; r++)
        if (8'(j) < ncols && 8'(r) < m_q && cidx[j][r] >= 0 && j * ROWS + r < EBITS)
          cs_ebits[32'(j) * 32'(m_q) + r] = 1'b1;
  end
  assign dec_ebits   = is_cs ? cs_ebits : ebits;
  assign dec_nz_base = wbase;
  assign fp          = cfg_fp_q;

  // csOS row match for the current input row
  logic [ROWS-1:0] match;
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      match[r] = (v < ncols) && (cidx[v[$clog2(TMAX)-1:0]][r] == kcs) && (8'(r) < m_q);
  end
  // first unfinished row
  logic [7:0] pick_row;
  logic       all_fin;
  always_comb begin
    pick_row = '0;
    all_fin  = 1'b1;
    for (int r = ROWS - 1; r >= 0; r--) if (!fin[r]) begin pick_row = 8'(r); all_fin = 1'b0; end
  end
  // rows that never need an input: empty slot or outside the tile
  logic [ROWS-1:0] empty_rows;
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      empty_rows[r] = (8'(r) >= m_q) || (cidx[v[$clog2(TMAX)-1:0]][r] < 0);
  end

  logic lu_idle, su_idle;
  always_comb begin
    lu_idle = 1'b1;
    su_idle = 1'b1;
    for (int i = 0; i < NLU; i++) if (lu_busy[i]) lu_idle = 1'b0;
    for (int i = 0; i < NSU; i++) if (su_busy[i]) su_idle = 1'b0;
  end

  // number of vectors in the streamed dimension
  logic [7:0] nvec;
  always_comb begin
    if (is_cs)      nvec = ncols;
    else if (is_os) nvec = k_q;
    else if (is_ws) nvec = n_q;
    else            nvec = m_q;
  end
  logic vec_skip;
  assign vec_skip = is_sparse && !is_ws && (v < 8'(TMAX)) && !vbits[v[$clog2(TMAX)-1:0]];

  // LU index of the top LU above column c (the corner LU serves column 0)
  function automatic int unsigned lu_top(input int unsigned c);
    return (c == 0) ? 0 : ROWS - 1 + c;
  endfunction
  // SU index of the bottom SU below column c (the corner SU serves the last column)
  function automatic int unsigned su_bot(input int unsigned c);
    return (c == COLS - 1) ? ROWS - 1 : ROWS + c;
  endfunction

  // ------------------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      df <= DF_DOS; cfg_fp_q <= 1'b0;
      m_q <= '0; k_q <= '0; n_q <= '0;
      wbase <= '0; xbase <= '0; ybase <= '0; ldw <= '0; ldx <= '0; ldy <= '0;
      vbits <= '0; ebits <= '0; ncols <= '0;
      for (int j = 0; j < TMAX; j++) for (int r = 0; r < ROWS; r++) cidx[j][r] <= -8'sd1;
      v <= '0; rank <= '0; s <= '0; t <= '0; fin <= '0; kcs <= '0; first_pick <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          df <= cfg_df; cfg_fp_q <= cfg_fp;
          m_q <= cfg_m; k_q <= cfg_k; n_q <= cfg_n;
          wbase <= cfg_wbase; xbase <= cfg_xbase; ybase <= cfg_ybase;
          ldw <= cfg_ldw; ldx <= cfg_ldx; ldy <= cfg_ldy;
          vbits <= cfg_vbits; ebits <= cfg_ebits; ncols <= cfg_csb_ncols;
          cidx <= cfg_csb_idx;
          v <= '0; rank <= '0; s <= '0; t <= '0;
          state <= S_CLEAR;
        end
        S_CLEAR: state <= (is_ws || is_is) ? S_STAT_SHIFT : S_VEC;
        S_STAT_SHIFT: state <= S_STAT_ISSUE;
        S_STAT_ISSUE: state <= S_STAT_WAIT;
        S_STAT_WAIT: if (lu_idle) begin
          if (32'(s) + 1 >= (is_ws ? COLS : ROWS)) begin
            s <= '0;
            state <= S_VEC;
          end else begin
            s <= s + 1'b1;
            state <= S_STAT_SHIFT;
          end
        end
        S_VEC: begin
          if (v >= nvec) begin
            s <= '0;
            state <= is_os ? S_OST_ISSUE : S_DONE;
          end else if (vec_skip) begin
            v <= v + 1'b1;
          end else if (is_ws) begin
            state <= S_LX_ISSUE;
          end else begin
            state <= S_LW_ISSUE;
          end
        end
        S_LW_ISSUE: state <= S_LW_WAIT;
        S_LW_WAIT: if (lu_idle) begin
          if (is_cs) begin
            fin        <= empty_rows;
            first_pick <= 1'b1;
            state      <= S_CS_PICK;
          end else begin
            state <= is_os ? S_LX_ISSUE : S_WAVE;
          end
        end
        S_CS_PICK: begin
          if (all_fin) begin
            v <= v + 1'b1;
            rank <= rank + 1'b1;
            state <= S_VEC;
          end else begin
            kcs <= cidx[v[$clog2(TMAX)-1:0]][pick_row[$clog2(ROWS > 1 ? ROWS : 2)-1:0]];
            state <= S_LX_ISSUE;
          end
        end
        S_LX_ISSUE: state <= S_LX_WAIT;
        S_LX_WAIT: if (lu_idle) begin
          t <= '0;
          state <= S_WAVE;
        end
        S_WAVE: begin
          if (32'(t) + 1 >= ROWS + COLS - 1) begin
            t <= '0;
            if (is_cs) begin
              fin        <= fin | match;
              first_pick <= 1'b0;
              state      <= S_CS_PICK;
            end else if (is_os) begin
              v <= v + 1'b1; rank <= rank + 1'b1;
              state <= S_VEC;
            end else begin
              state <= S_VST_ISSUE;
            end
          end else begin
            t <= t + 1'b1;
          end
        end
        S_VST_ISSUE: state <= S_VST_WAIT;
        S_VST_WAIT: if (su_idle) begin
          v <= v + 1'b1; rank <= rank + 1'b1;
          state <= S_VEC;
        end
        S_OST_ISSUE: state <= S_OST_WAIT;
        S_OST_WAIT: if (su_idle) state <= S_OST_SHIFT;
        S_OST_SHIFT: begin
          if (32'(s) + 1 >= COLS) state <= S_DONE;
          else s <= s + 1'b1;
          if (32'(s) + 1 < COLS) state <= S_OST_ISSUE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);
  assign ev_wave    = (state == S_LX_WAIT && lu_idle) || (state == S_LW_WAIT && lu_idle && is_is);
  assign ev_skip    = (state == S_VEC) && (v < nvec) && vec_skip;
  assign ev_refetch = (state == S_CS_PICK) && !all_fin && !first_pick;

  // ------------------------------------------------------------------ commands
  always_comb begin
    int unsigned sc;
    int unsigned col;
    int unsigned krow;
    sc   = 0;
    col  = 0;
    krow = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) pe_cmd[r][c] = '0;
    for (int i = 0; i < NLU; i++) lu_cmd[i] = '0;
    for (int i = 0; i < NSU; i++) su_cmd[i] = '0;

    unique case (state)
      S_CLEAR: begin
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            pe_cmd[r][c].op      = ALU_CLR;
            pe_cmd[r][c].dst     = DST_LOCAL;
            pe_cmd[r][c].dst_idx = R_P;
          end
      end
      S_STAT_SHIFT: begin
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            if (is_ws) begin pe_cmd[r][c].cp_right = 1'b1; pe_cmd[r][c].cpr_src = R_W; end
            else       begin pe_cmd[r][c].cp_down  = 1'b1; pe_cmd[r][c].cpd_src = R_X; end
          end
      end
      S_STAT_ISSUE: begin
        if (is_ws) begin
          col = COLS - 1 - 32'(s);
          for (int r = 0; r < ROWS; r++) begin
            lu_cmd[r].valid   = 1'b1;
            lu_cmd[r].dst_idx = R_W;
            if (col >= 32'(k_q) || 8'(r) >= nrows) lu_cmd[r].zero = 1'b1;
            else if (df == DF_SWS) begin
              lu_cmd[r].sparse = 1'b1;
              lu_cmd[r].elem   = 16'(r * 32'(k_q) + col);
            end else
              lu_cmd[r].addr = wbase + addr_t'(rowmap[r]) * ldw + addr_t'(col);
          end
        end else begin
          krow = ROWS - 1 - 32'(s);
          for (int c = 0; c < COLS; c++) begin
            lu_cmd[lu_top(c)].valid   = 1'b1;
            lu_cmd[lu_top(c)].dst_idx = R_X;
            if (krow >= 32'(k_q) || 8'(c) >= n_q) lu_cmd[lu_top(c)].zero = 1'b1;
            else lu_cmd[lu_top(c)].addr = xbase + addr_t'(krow) * ldx + addr_t'(c);
          end
        end
      end
      S_LW_ISSUE: begin
        for (int r = 0; r < ROWS; r++) begin
          lu_cmd[r].valid   = 1'b1;
          lu_cmd[r].dst_idx = R_W;
          if (is_is) begin
            // weight row v, element r of the K dimension
            if (8'(r) >= k_q) lu_cmd[r].zero = 1'b1;
            else if (df == DF_SIS) begin
              lu_cmd[r].sparse = 1'b1;
              lu_cmd[r].elem   = 16'(32'(rank) * 32'(k_q) + r);
            end else
              lu_cmd[r].addr = wbase + addr_t'(v) * ldw + addr_t'(r);
          end else begin
            // OS: weight column v, element r of the M dimension
            if (8'(r) >= m_q) lu_cmd[r].zero = 1'b1;
            else if (df == DF_SOS || df == DF_CSOS) begin
              lu_cmd[r].sparse = 1'b1;
              lu_cmd[r].elem   = 16'((df == DF_CSOS ? 32'(v) : 32'(rank)) * 32'(m_q) + r);
            end else
              lu_cmd[r].addr = wbase + addr_t'(r) * ldw + addr_t'(v);
          end
        end
      end
      S_LX_ISSUE: begin
        for (int c = 0; c < COLS; c++) begin
          lu_cmd[lu_top(c)].valid   = 1'b1;
          lu_cmd[lu_top(c)].dst_idx = R_X;
          if (is_ws) begin
            if (8'(c) >= k_q) lu_cmd[lu_top(c)].zero = 1'b1;
            else lu_cmd[lu_top(c)].addr = xbase + addr_t'(c) * ldx + addr_t'(v);
          end else begin
            if (8'(c) >= n_q) lu_cmd[lu_top(c)].zero = 1'b1;
            else lu_cmd[lu_top(c)].addr = xbase + (is_cs ? addr_t'(8'(kcs)) : addr_t'(v)) * ldx + addr_t'(c);
          end
        end
      end
      S_WAVE: begin
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            if (32'(t) == 32'(r + c)) begin
              pe_cmd[r][c].src_a = R_W;
              pe_cmd[r][c].src_b = R_X;
              if (is_os) begin
                pe_cmd[r][c].op       = (!is_cs || match[r]) ? ALU_MAC : ALU_NOP;
                pe_cmd[r][c].src_c    = R_P;
                pe_cmd[r][c].dst      = DST_LOCAL;
                pe_cmd[r][c].dst_idx  = R_P;
                pe_cmd[r][c].cp_right = 1'b1;
                pe_cmd[r][c].cpr_src  = R_W;
                pe_cmd[r][c].cp_down  = 1'b1;
                pe_cmd[r][c].cpd_src  = R_X;
              end else if (is_ws) begin
                pe_cmd[r][c].op      = (c == 0) ? ALU_MUL : ALU_MAC;
                pe_cmd[r][c].src_c   = R_PIN;
                pe_cmd[r][c].dst     = (c == COLS - 1) ? DST_LOCAL : DST_RIGHT;
                pe_cmd[r][c].dst_idx = (c == COLS - 1) ? R_P : R_PIN;
                pe_cmd[r][c].cp_down = 1'b1;
                pe_cmd[r][c].cpd_src = R_X;
              end else begin
                pe_cmd[r][c].op       = (r == 0) ? ALU_MUL : ALU_MAC;
                pe_cmd[r][c].src_c    = R_PIN;
                pe_cmd[r][c].dst      = (r == ROWS - 1) ? DST_LOCAL : DST_DOWN;
                pe_cmd[r][c].dst_idx  = (r == ROWS - 1) ? R_P : R_PIN;
                pe_cmd[r][c].cp_right = 1'b1;
                pe_cmd[r][c].cpr_src  = R_W;
              end
            end
      end
      S_VST_ISSUE: begin
        if (is_ws) begin
          for (int r = 0; r < ROWS; r++)
            if (8'(r) < nrows) begin
              su_cmd[r].valid   = 1'b1;
              su_cmd[r].src_idx = R_P;
              su_cmd[r].addr    = ybase + addr_t'(rowmap[r]) * ldy + addr_t'(v);
            end
        end else begin
          for (int c = 0; c < COLS; c++)
            if (8'(c) < n_q) begin
              su_cmd[su_bot(c)].valid   = 1'b1;
              su_cmd[su_bot(c)].src_idx = R_P;
              su_cmd[su_bot(c)].addr    = ybase + addr_t'(v) * ldy + addr_t'(c);
            end
        end
      end
      S_OST_ISSUE: begin
        sc = COLS - 1 - 32'(s);
        for (int r = 0; r < ROWS; r++)
          if (8'(r) < m_q && sc < 32'(n_q)) begin
            su_cmd[r].valid   = 1'b1;
            su_cmd[r].src_idx = R_P;
            su_cmd[r].addr    = ybase + addr_t'(r) * ldy + addr_t'(sc);
          end
      end
      S_OST_SHIFT: begin
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            pe_cmd[r][c].op      = ALU_MOV;
            pe_cmd[r][c].src_a   = R_P;
            pe_cmd[r][c].dst     = DST_RIGHT;
            pe_cmd[r][c].dst_idx = R_P;
          end
      end
      default: ;
    endcase
  end
endmodule
