// flexisaga_pkg: types and constants shared by the FlexiSAGA systolic-array GEMM
// accelerator. It defines the seven dataflows, the operations of a processing
// element (PE), the register-file slot convention used by the built-in schedules,
// the request/response records exchanged between the load/store units and the
// decompression unit (DecU), and the tile configuration written by the host.
//
// Following the paper: seven dataflows (dOS, dWS, dIS, sOS, sWS, sIS, csOS), a
// nine-entry PE register file, ALU operations move/multiply/add/multiply-accumulate,
// 32-bit data words. Design choices: the enum encodings, the register slots,
// the CLR operation (a move of the constant zero) and the record layouts.
package flexisaga_pkg;

  localparam int unsigned DW      = 32;  // data word width (paper: 32 bit)
  localparam int unsigned NREGS   = 9;   // PE register file entries (paper: nine)
  localparam int unsigned RIDX_W  = 4;   // register index width
  localparam int unsigned AW      = 16;  // word address width of main memory

  typedef logic [DW-1:0]     word_t;
  typedef logic [RIDX_W-1:0] ridx_t;
  typedef logic [AW-1:0]     addr_t;

  // Register slots used by the controller's schedules.
  localparam ridx_t R_W   = 4'd0;  // weight element
  localparam ridx_t R_X   = 4'd1;  // input element
  localparam ridx_t R_P   = 4'd2;  // local partial sum / output
  localparam ridx_t R_PIN = 4'd3;  // partial sum written by the left or upper neighbour

  typedef enum logic [2:0] {
    DF_DOS  = 3'd0,
    DF_DWS  = 3'd1,
    DF_DIS  = 3'd2,
    DF_SOS  = 3'd3,
    DF_SWS  = 3'd4,
    DF_SIS  = 3'd5,
    DF_CSOS = 3'd6
  } dataflow_e;

  typedef enum logic [2:0] {
    ALU_NOP = 3'd0,
    ALU_MOV = 3'd1,   // d = a
    ALU_ADD = 3'd2,   // d = a + b
    ALU_MUL = 3'd3,   // d = a * b
    ALU_MAC = 3'd4,   // d = a * b + c
    ALU_CLR = 3'd5    // d = 0
  } alu_op_e;

  typedef enum logic [1:0] {
    DST_LOCAL = 2'd0,
    DST_RIGHT = 2'd1,
    DST_DOWN  = 2'd2
  } dst_e;

  // One cycle of work for one PE: an ALU operation plus up to two register
  // copies into the right and lower neighbours.
  typedef struct packed {
    alu_op_e op;
    ridx_t   src_a;
    ridx_t   src_b;
    ridx_t   src_c;
    dst_e    dst;
    ridx_t   dst_idx;
    logic    cp_right;   // copy reg cpr_src into right neighbour reg cpr_src
    ridx_t   cpr_src;
    logic    cp_down;    // copy reg cpd_src into lower neighbour reg cpd_src
    ridx_t   cpd_src;
  } pe_cmd_t;

  // Register-file write arriving from a neighbour or a load unit.
  typedef struct packed {
    logic  en;
    ridx_t idx;
    word_t data;
  } rf_wr_t;

  // Request of a load or store unit to the DecU.
  typedef struct packed {
    logic  valid;
    logic  we;
    logic  sparse;   // weight read resolved through the sparse metadata
    addr_t addr;     // dense word address (ignored for sparse reads)
    logic [15:0] elem; // element position in the element bit array
    word_t wdata;
  } mem_req_t;

  // One memory port.
  typedef struct packed {
    logic  en;
    logic  we;
    addr_t addr;
    word_t wdata;
  } mem_port_t;

  // Command from the controller to a load unit.
  typedef struct packed {
    logic  valid;
    logic  zero;     // write zero without a memory access (padding)
    logic  sparse;
    addr_t addr;
    logic [15:0] elem;
    ridx_t dst_idx;
  } lu_cmd_t;

  // Command from the controller to a store unit.
  typedef struct packed {
    logic  valid;
    addr_t addr;
    ridx_t src_idx;  // PE register to store
  } su_cmd_t;

endpackage
