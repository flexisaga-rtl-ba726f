// tb_pe: self-checking test of one processing element. Drives neighbour and
// load-unit writes, ALU commands with local and neighbour destinations and
// register copies, and checks the register file through the read port and the
// words sent to the right and lower neighbours, cycle by cycle.
module tb_pe;
  import flexisaga_pkg::*;

  logic clk = 0, rst_n = 0;
  always #50 clk = ~clk;
  logic    fp = 0;
  pe_cmd_t cmd = '0;
  rf_wr_t  in_left = '0, in_top = '0, out_right, out_down;
  ridx_t   rd_idx = '0;
  word_t   rd_data;
  int checks = 0, failures = 0;
  word_t model [NREGS];

  pe dut (.clk, .rst_n, .fp, .cmd, .in_left, .in_top, .out_right, .out_down, .rd_idx, .rd_data);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic check_rf(input string what);
    for (int i = 0; i < NREGS; i++) begin
      rd_idx = ridx_t'(i);
      #1;
      check(rd_data == model[i], $sformatf("%s reg %0d = %h exp %h", what, i, rd_data, model[i]));
    end
  endtask

  initial begin
    for (int i = 0; i < NREGS; i++) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_rf("after reset");
    // writes from left and top in the same cycle, to different slots
    @(negedge clk);
    in_left = '{en: 1, idx: R_W, data: 32'd7};
    in_top  = '{en: 1, idx: R_X, data: 32'd5};
    @(negedge clk);
    in_left = '0; in_top = '0;
    model[R_W] = 7; model[R_X] = 5;
    check_rf("neighbour writes");
    // MAC locally with copies right and down (output stationary step)
    for (int rep = 0; rep < 3; rep++) begin
      @(negedge clk);
      cmd = '{op: ALU_MAC, src_a: R_W, src_b: R_X, src_c: R_P, dst: DST_LOCAL, dst_idx: R_P,
              cp_right: 1, cpr_src: R_W, cp_down: 1, cpd_src: R_X};
      #1;
      check(out_right.en && out_right.idx == R_W && out_right.data == 7, "copy right");
      check(out_down.en && out_down.idx == R_X && out_down.data == 5, "copy down");
      @(negedge clk);
      cmd = '0;
      model[R_P] = model[R_P] + 35;
      check_rf("mac");
    end
    // ALU result into the right neighbour (weight stationary step), nothing local
    @(negedge clk);
    in_left = '{en: 1, idx: R_PIN, data: 32'd100};
    @(negedge clk);
    in_left = '0; model[R_PIN] = 100;
    cmd = '{op: ALU_MAC, src_a: R_W, src_b: R_X, src_c: R_PIN, dst: DST_RIGHT, dst_idx: R_PIN,
            cp_right: 0, cpr_src: '0, cp_down: 1, cpd_src: R_X};
    #1;
    check(out_right.en && out_right.idx == R_PIN && out_right.data == 135, "mac to right");
    check(out_down.en && out_down.data == 5, "input down");
    @(negedge clk);
    cmd = '0;
    check_rf("mac to right leaves rf");
    // multiply to the lower neighbour
    cmd = '{op: ALU_MUL, src_a: R_W, src_b: R_X, src_c: '0, dst: DST_DOWN, dst_idx: R_PIN,
            cp_right: 1, cpr_src: R_W, cp_down: 0, cpd_src: '0};
    #1;
    check(out_down.en && out_down.idx == R_PIN && out_down.data == 35, "mul down");
    check(out_right.en && out_right.data == 7, "weight right");
    @(negedge clk);
    // add and move into spare registers, FP mode add
    cmd = '{op: ALU_ADD, src_a: R_W, src_b: R_P, src_c: '0, dst: DST_LOCAL, dst_idx: 4'd8,
            cp_right: 0, cpr_src: '0, cp_down: 0, cpd_src: '0};
    @(negedge clk);
    model[8] = 7 + model[R_P];
    cmd = '{op: ALU_MOV, src_a: 4'd8, src_b: '0, src_c: '0, dst: DST_LOCAL, dst_idx: 4'd6,
            cp_right: 0, cpr_src: '0, cp_down: 0, cpd_src: '0};
    @(negedge clk);
    model[6] = model[8];
    cmd = '{op: ALU_CLR, src_a: '0, src_b: '0, src_c: '0, dst: DST_LOCAL, dst_idx: R_P,
            cp_right: 0, cpr_src: '0, cp_down: 0, cpd_src: '0};
    @(negedge clk);
    model[R_P] = 0;
    cmd = '0;
    check_rf("add/mov/clr");
    // FP multiply-accumulate: 1.5 * 2.0 + 0.5 = 3.5
    fp = 1;
    in_left = '{en: 1, idx: R_W, data: 32'h3FC0_0000};
    in_top  = '{en: 1, idx: R_X, data: 32'h4000_0000};
    @(negedge clk);
    in_left = '{en: 1, idx: R_P, data: 32'h3F00_0000};
    in_top = '0;
    @(negedge clk);
    in_left = '0;
    cmd = '{op: ALU_MAC, src_a: R_W, src_b: R_X, src_c: R_P, dst: DST_LOCAL, dst_idx: R_P,
            cp_right: 0, cpr_src: '0, cp_down: 0, cpd_src: '0};
    @(negedge clk);
    cmd = '0;
    rd_idx = R_P; #1;
    check(rd_data == 32'h4060_0000, $sformatf("fp mac %h", rd_data));
    // idle command changes nothing and sends nothing
    check(!out_right.en && !out_down.en, "idle outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
