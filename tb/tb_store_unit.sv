// tb_store_unit: self-checking test of the store unit. Checks that the PE
// register named by the command is read in the command cycle, that the word and
// address are held in a write request until a grant given after a random delay,
// even though the PE value changes meanwhile, and that busy drops after the grant.
module tb_store_unit;
  import flexisaga_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  su_cmd_t  cmd = '0;
  logic     busy, gnt = 0;
  ridx_t    rd_idx;
  word_t    rd_data = '0;
  mem_req_t req;
  int checks = 0, failures = 0;

  store_unit dut (.clk, .rst_n, .cmd, .busy, .rd_idx, .rd_data, .req, .gnt);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !req.valid, "idle after reset");
    for (int i = 0; i < 200; i++) begin
      su_cmd_t c;
      word_t v;
      int d;
      c.valid = 1; c.addr = addr_t'($urandom); c.src_idx = ridx_t'($urandom % NREGS);
      v = $urandom;
      cmd = c; rd_data = v;
      #1;
      check(rd_idx == c.src_idx, "register index");
      @(negedge clk);
      cmd = '0; rd_data = ~v;
      d = $urandom % 4;
      for (int k = 0; k <= d; k++) begin
        check(busy && req.valid && req.we && req.addr == c.addr && req.wdata == v, "write request held");
        if (k == d) gnt = 1;
        @(negedge clk);
        gnt = 0;
      end
      check(!busy && !req.valid, "idle after grant");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
