// store_unit: FlexiSAGA store unit (SU). One SU sits to the right of every PE of
// the right column and below every PE of the bottom row (the corner PE shares one
// SU, as in the paper's block diagram).
//
// On a command from the controller the SU reads register `src_idx` of its PE
// through the PE's read port in the same cycle and keeps the word, so the PE is
// free to change it from the next cycle on. It then raises a write request to the
// decompression unit (DecU) and holds it until granted; the write reaches memory
// in the grant cycle. `busy` is high from the accepted command until the grant.
// The handshake is a choice of this design; the paper only says that SUs read
// data from the PE register files and write them to memory through the DecU.
module store_unit
  import flexisaga_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  su_cmd_t  cmd,
  output logic     busy,
  output ridx_t    rd_idx,
  input  word_t    rd_data,
  output mem_req_t req,
  input  logic     gnt
);
  logic  pending;
  addr_t addr_q;
  word_t data_q;

  assign rd_idx = cmd.src_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= 1'b0;
      addr_q  <= '0;
      data_q  <= '0;
    end else if (!pending) begin
      if (cmd.valid) begin
        pending <= 1'b1;
        addr_q  <= cmd.addr;
        data_q  <= rd_data;
      end
    end else if (gnt) begin
      pending <= 1'b0;
    end
  end

  always_comb begin
    req = '0;
    if (pending) begin
      req.valid = 1'b1;
      req.we    = 1'b1;
      req.addr  = addr_q;
      req.wdata = data_q;
    end
  end

  assign busy = pending;

  a_cmd_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    cmd.valid |-> !pending);
  a_gnt_only_pending: assert property (@(posedge clk) disable iff (!rst_n)
    gnt |-> pending);
endmodule
