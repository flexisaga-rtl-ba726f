// flexisaga: top level of the FlexiSAGA sparse/dense systolic-array GEMM
// accelerator together with its main memory.
//
// A ROWS x COLS grid of processing elements (pe) is fed by load units (load_unit)
// on the left column and top row and drained by store units (store_unit) on the
// right column and bottom row; the corner PEs share one LU and one SU, so there
// are ROWS+COLS-1 of each, as drawn in the paper's block diagram. Every PE writes
// into the register files of its right and lower neighbours. All LUs and SUs
// reach main memory (main_memory, NPORTS ports) through the decompression unit
// (decu), which arbitrates the ports and answers zero for weights that the sparse
// format marks as zero. The programmable controller (controller) sequences one
// tile product Y = W * X in one of seven dataflows; see controller.sv for the
// configuration and schedules.
//
// Usage: while `busy` is low the host owns memory port 0 (host_*; reads return
// one cycle later on host_rdata) and loads W, X (and clears Y for sWS/sIS). It
// then sets the cfg_* inputs and pulses `start`; `done` pulses when the last
// output word has been written. ev_* and n_zero report events for performance
// counting. Defaults: 8x8 PEs (one of the paper's evaluated sizes), eight 32-bit
// memory ports (the paper's memory setup); TMAX and MEM_DEPTH are this design's
// choices.
module flexisaga
  import flexisaga_pkg::*;
#(
  parameter int unsigned ROWS      = 8,
  parameter int unsigned COLS      = 8,
  parameter int unsigned NPORTS    = 8,
  parameter int unsigned TMAX      = 16,
  parameter int unsigned MEM_DEPTH = 16384,
  localparam int unsigned EBITS = TMAX * ((ROWS > COLS) ? ROWS : COLS),
  localparam int unsigned NLU   = ROWS + COLS - 1,
  localparam int unsigned NSU   = ROWS + COLS - 1,
  localparam int unsigned NREQ  = NLU + NSU
) (
  input  logic clk,
  input  logic rst_n,
  // host access to main memory (only while busy is low)
  input  logic  host_en,
  input  logic  host_we,
  input  addr_t host_addr,
  input  word_t host_wdata,
  output word_t host_rdata,
  // controller programming
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
  // events
  output logic             ev_wave,
  output logic             ev_skip,
  output logic             ev_refetch,
  output logic [$clog2(NREQ+1)-1:0] n_zero
);
  logic             fp;
  pe_cmd_t          pe_cmd  [ROWS][COLS];
  rf_wr_t           w_right [ROWS][COLS];
  rf_wr_t           w_down  [ROWS][COLS];
  word_t            pe_rd   [ROWS][COLS];
  ridx_t            pe_ridx [ROWS][COLS];
  lu_cmd_t          lu_cmd  [NLU];
  logic             lu_busy [NLU];
  rf_wr_t           lu_wr   [NLU];
  su_cmd_t          su_cmd  [NSU];
  logic             su_busy [NSU];
  ridx_t            su_ridx [NSU];
  word_t            su_rdat [NSU];
  mem_req_t         req     [NREQ];
  logic             gnt     [NREQ];
  logic             rsp_v   [NREQ];
  word_t            rsp_d   [NREQ];
  mem_port_t        dport   [NPORTS];
  mem_port_t        mport   [NPORTS];
  word_t            mrdata  [NPORTS];
  logic [EBITS-1:0] dec_ebits;
  addr_t            dec_nz_base;

  controller #(.ROWS(ROWS), .COLS(COLS), .TMAX(TMAX), .EBITS(EBITS)) u_ctrl (
    .clk, .rst_n, .start, .cfg_df, .cfg_fp, .cfg_m, .cfg_k, .cfg_n,
    .cfg_wbase, .cfg_xbase, .cfg_ybase, .cfg_ldw, .cfg_ldx, .cfg_ldy,
    .cfg_vbits, .cfg_ebits, .cfg_csb_ncols, .cfg_csb_idx,
    .busy, .done, .fp, .pe_cmd, .lu_cmd, .lu_busy, .su_cmd, .su_busy,
    .dec_ebits, .dec_nz_base, .ev_wave, .ev_skip, .ev_refetch
  );

  // PE grid
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      rf_wr_t in_l, in_t;
      if (c == 0) begin : g_l_lu
        assign in_l = lu_wr[r];
      end else begin : g_l_pe
        assign in_l = w_right[r][c-1];
      end
      if (r > 0) begin : g_t_pe
        assign in_t = w_down[r-1][c];
      end else if (c > 0) begin : g_t_lu
        assign in_t = lu_wr[ROWS-1+c];
      end else begin : g_t_none
        assign in_t = '0;  // the corner PE is fed by LU 0 through its left port
      end
      pe u_pe (
        .clk, .rst_n, .fp,
        .cmd       (pe_cmd[r][c]),
        .in_left   (in_l),
        .in_top    (in_t),
        .out_right (w_right[r][c]),
        .out_down  (w_down[r][c]),
        .rd_idx    (pe_ridx[r][c]),
        .rd_data   (pe_rd[r][c])
      );
    end
  end

  // store-unit read ports: right column SUs 0..ROWS-1, bottom SUs ROWS..NSU-1
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) pe_ridx[r][c] = R_P;
    for (int r = 0; r < ROWS; r++) begin
      pe_ridx[r][COLS-1] = su_ridx[r];
      su_rdat[r]         = pe_rd[r][COLS-1];
    end
    for (int c = 0; c < COLS - 1; c++) begin
      pe_ridx[ROWS-1][c] = su_ridx[ROWS+c];
      su_rdat[ROWS+c]    = pe_rd[ROWS-1][c];
    end
  end

  for (genvar i = 0; i < NLU; i++) begin : g_lu
    load_unit u_lu (
      .clk, .rst_n,
      .cmd       (lu_cmd[i]),
      .busy      (lu_busy[i]),
      .req       (req[i]),
      .gnt       (gnt[i]),
      .rsp_valid (rsp_v[i]),
      .rsp_data  (rsp_d[i]),
      .wr        (lu_wr[i])
    );
  end

  for (genvar i = 0; i < NSU; i++) begin : g_su
    store_unit u_su (
      .clk, .rst_n,
      .cmd     (su_cmd[i]),
      .busy    (su_busy[i]),
      .rd_idx  (su_ridx[i]),
      .rd_data (su_rdat[i]),
      .req     (req[NLU+i]),
      .gnt     (gnt[NLU+i])
    );
  end

  decu #(.NREQ(NREQ), .NPORTS(NPORTS), .EBITS(EBITS)) u_decu (
    .clk, .rst_n,
    .ebits     (dec_ebits),
    .nz_base   (dec_nz_base),
    .req       (req),
    .gnt       (gnt),
    .rsp_valid (rsp_v),
    .rsp_data  (rsp_d),
    .port      (dport),
    .rdata     (mrdata),
    .n_zero    (n_zero)
  );

  // the host shares port 0 while the accelerator is idle
  always_comb begin
    mport = dport;
    if (!busy) mport[0] = '{en: host_en, we: host_we, addr: host_addr, wdata: host_wdata};
  end
  assign host_rdata = mrdata[0];

  main_memory #(.NPORTS(NPORTS), .DEPTH(MEM_DEPTH)) u_mem (
    .clk,
    .port  (mport),
    .rdata (mrdata)
  );
endmodule
