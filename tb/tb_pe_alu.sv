// tb_pe_alu: self-checking test of the PE ALU. Integer operations are compared
// with SystemVerilog arithmetic. FP32 results are compared with a reference that
// widens the operands to double precision (exact), computes in double (exact for
// a product, and for a sum when the exponents are close, which the stimulus
// ensures), and rounds the double to binary32 to nearest-even with its own code.
module tb_pe_alu;
  import flexisaga_pkg::*;

  alu_op_e op;
  logic    fp;
  word_t   a, b, c, y;
  int checks = 0, failures = 0;

  pe_alu dut (.op, .fp, .a, .b, .c, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real f2r(input word_t f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic word_t r2f(input real r);
    logic [63:0] d;
    logic [23:0] m;
    int e;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    if (d[28] && (|d[27:0] || d[29])) m = m + 1;
    if (m[23]) begin m = 0; e++; end
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic word_t rnd_f();
    return {1'($urandom), 8'(120 + $urandom % 16), 23'($urandom)};
  endfunction

  task automatic chk(input word_t exp, input string what);
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s op=%s a=%h b=%h c=%h y=%h exp=%h", what, op.name(), a, b, c, y, exp);
    end
  endtask

  initial begin
    word_t p;
    // integer mode
    fp = 0;
    for (int i = 0; i < 200; i++) begin
      a = $urandom; b = $urandom; c = $urandom;
      op = ALU_MOV; chk(a, "int mov");
      op = ALU_ADD; chk(a + b, "int add");
      op = ALU_MUL; chk(a * b, "int mul");
      op = ALU_MAC; chk(a * b + c, "int mac");
      op = ALU_CLR; chk('0, "int clr");
    end
    // floating point, fixed cases
    fp = 1;
    a = 32'h4040_0000; b = 32'h4080_0000; c = 32'h3F80_0000;  // 3, 4, 1
    op = ALU_MUL; chk(32'h4140_0000, "3*4");
    op = ALU_MAC; chk(32'h4150_0000, "3*4+1");
    op = ALU_ADD; chk(32'h40E0_0000, "3+4");
    a = 32'h3F80_0000; b = 32'hBF80_0000;
    op = ALU_ADD; chk(32'h0000_0000, "1-1");
    a = 32'h7F80_0000; b = 32'h0000_0000;
    op = ALU_MUL; chk(32'h7FC0_0000, "inf*0");
    a = 32'h7F00_0000; b = 32'h4000_0000;
    op = ALU_MUL; chk(32'h7F80_0000, "overflow");
    a = 32'h3F80_0000; b = 32'h3380_0000;  // 1 + 2^-24: tie, rounds to even (1.0)
    op = ALU_ADD; chk(32'h3F80_0000, "tie even");
    a = 32'h3F80_0001; b = 32'h3380_0000;  // tie, rounds up to odd+1
    op = ALU_ADD; chk(32'h3F80_0002, "tie up");
    // floating point, random
    for (int i = 0; i < 2000; i++) begin
      a = rnd_f(); b = rnd_f(); c = rnd_f();
      op = ALU_MUL; chk(r2f(f2r(a) * f2r(b)), "fmul");
      op = ALU_ADD; chk(r2f(f2r(a) + f2r(b)), "fadd");
      p = r2f(f2r(a) * f2r(b));
      c = {1'($urandom), p[30:23] + 8'($urandom % 5) - 8'd2, 23'($urandom)};
      op = ALU_MAC; chk(r2f(f2r(p) + f2r(c)), "fmac");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
