// pe: FlexiSAGA processing element.
//
// A PE holds a register file of NREGS (nine, as in the paper) data words and an
// ALU (pe_alu). Each cycle it executes the command `cmd` from the controller: an
// ALU operation whose result goes either into its own register file or, as the
// paper describes, into the register file of the right or lower neighbour; and,
// independently, copies of one register into the same slot of the right and/or
// lower neighbour (this is how weights move right and inputs move down through
// the array). The register file accepts in the same cycle one write from the left
// neighbour (or the load unit on the left edge), one from the upper neighbour (or
// load unit on the top edge) and one from its own ALU; if two target the same
// slot, the own ALU wins over the left write, which wins over the upper write
// (a design choice; the schedules never collide). Writes take effect at the next
// rising clock edge, so every value moves one PE per cycle. A second read port
// (rd_idx/rd_data) lets a store unit read the register file of an edge PE.
// Reset clears all registers, so unused PEs hold zeros.
module pe
  import flexisaga_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    fp,          // 1: FP32 arithmetic, 0: INT32
  input  pe_cmd_t cmd,
  input  rf_wr_t  in_left,     // write from left neighbour / load unit
  input  rf_wr_t  in_top,      // write from upper neighbour / load unit
  output rf_wr_t  out_right,   // write into right neighbour
  output rf_wr_t  out_down,    // write into lower neighbour
  input  ridx_t   rd_idx,      // store-unit read port
  output word_t   rd_data
);
  word_t rf [NREGS];
  word_t alu_y;
  logic  alu_wr;

  pe_alu u_alu (
    .op (cmd.op),
    .fp (fp),
    .a  (rf[cmd.src_a]),
    .b  (rf[cmd.src_b]),
    .c  (rf[cmd.src_c]),
    .y  (alu_y)
  );

  assign alu_wr = (cmd.op != ALU_NOP);

  always_comb begin
    out_right = '0;
    out_down  = '0;
    if (cmd.cp_right) out_right = '{en: 1'b1, idx: cmd.cpr_src, data: rf[cmd.cpr_src]};
    if (cmd.cp_down)  out_down  = '{en: 1'b1, idx: cmd.cpd_src, data: rf[cmd.cpd_src]};
    if (alu_wr && cmd.dst == DST_RIGHT) out_right = '{en: 1'b1, idx: cmd.dst_idx, data: alu_y};
    if (alu_wr && cmd.dst == DST_DOWN)  out_down  = '{en: 1'b1, idx: cmd.dst_idx, data: alu_y};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) rf[i] <= '0;
    end else begin
      if (in_top.en && 32'(in_top.idx) < NREGS)   rf[in_top.idx]  <= in_top.data;
      if (in_left.en && 32'(in_left.idx) < NREGS) rf[in_left.idx] <= in_left.data;
      if (alu_wr && cmd.dst == DST_LOCAL && 32'(cmd.dst_idx) < NREGS) rf[cmd.dst_idx] <= alu_y;
    end
  end

  assign rd_data = (32'(rd_idx) < NREGS) ? rf[rd_idx] : '0;

  // The ALU and a copy must not both use the same neighbour channel.
  a_right_channel: assert property (@(posedge clk) disable iff (!rst_n)
    !(cmd.cp_right && alu_wr && cmd.dst == DST_RIGHT));
  a_down_channel: assert property (@(posedge clk) disable iff (!rst_n)
    !(cmd.cp_down && alu_wr && cmd.dst == DST_DOWN));
endmodule
