// load_unit: FlexiSAGA load unit (LU). One LU sits beside every PE of the left
// column and above every PE of the top row (the corner PE shares one LU, as in the
// paper's block diagram).
//
// The controller hands it one command at a time: read one word and write it into
// register `dst_idx` of the attached PE. The LU raises a request to the
// decompression unit (DecU) and holds it until granted; the DecU answers one cycle
// after the grant (unit-latency memory), and in that cycle the LU drives the PE
// register-file write port, so the value is in the PE at the following clock edge.
// A dense read carries a word address; a sparse weight read carries the element
// position in the tile's element bit array and the DecU finds the word (or
// answers zero). A `zero` command writes zero without any memory access; the
// controller uses it to pad tiles smaller than the array. `busy` is high from
// the accepted command until the write. The handshake and the padding command
// are choices of this design; the paper only says that an LU performs memory
// reads and writes the data into its PE.
module load_unit
  import flexisaga_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  lu_cmd_t  cmd,
  output logic     busy,
  output mem_req_t req,
  input  logic     gnt,
  input  logic     rsp_valid,
  input  word_t    rsp_data,
  output rf_wr_t   wr
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_ZERO} state_e;
  state_e  state;
  lu_cmd_t cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd.valid) begin
          cur   <= cmd;
          state <= cmd.zero ? S_ZERO : S_REQ;
        end
        S_REQ:  if (gnt) state <= S_WAIT;
        S_WAIT: if (rsp_valid) state <= S_IDLE;
        S_ZERO: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    req = '0;
    if (state == S_REQ) begin
      req.valid  = 1'b1;
      req.we     = 1'b0;
      req.sparse = cur.sparse;
      req.addr   = cur.addr;
      req.elem   = cur.elem;
    end
    wr = '0;
    if (state == S_WAIT && rsp_valid) wr = '{en: 1'b1, idx: cur.dst_idx, data: rsp_data};
    if (state == S_ZERO)              wr = '{en: 1'b1, idx: cur.dst_idx, data: '0};
  end

  assign busy = (state != S_IDLE);

  a_cmd_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    cmd.valid |-> state == S_IDLE);
  a_rsp_only_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> state == S_WAIT);
endmodule
