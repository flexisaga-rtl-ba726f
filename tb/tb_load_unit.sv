// tb_load_unit: self-checking test of the load unit. A model of the DecU side
// grants after a random delay and answers one cycle after the grant. Checks the
// request fields, that the answer is written into the commanded register in the
// answer cycle, that busy spans command to write, and the zero (padding) command,
// which must write zero in the next cycle without a request.
module tb_load_unit;
  import flexisaga_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  lu_cmd_t  cmd = '0;
  logic     busy, gnt = 0, rsp_valid = 0;
  word_t    rsp_data = '0;
  mem_req_t req;
  rf_wr_t   wr;
  int checks = 0, failures = 0;

  load_unit dut (.clk, .rst_n, .cmd, .busy, .req, .gnt, .rsp_valid, .rsp_data, .wr);

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
    check(!busy && !req.valid && !wr.en, "idle after reset");
    for (int i = 0; i < 200; i++) begin
      lu_cmd_t c;
      int d;
      word_t val;
      c = '0;
      c.valid = 1; c.zero = ($urandom % 4 == 0); c.sparse = 1'($urandom);
      c.addr = addr_t'($urandom); c.elem = 16'($urandom); c.dst_idx = ridx_t'($urandom % NREGS);
      cmd = c;
      @(negedge clk);
      cmd = '0;
      check(busy, "busy after command");
      if (c.zero) begin
        check(!req.valid, "no request for zero");
        check(wr.en && wr.idx == c.dst_idx && wr.data == 0, "zero write");
        @(negedge clk);
        check(!busy && !wr.en, "idle after zero write");
      end else begin
        d = $urandom % 4;
        for (int k = 0; k < d; k++) begin
          check(req.valid && !req.we && req.addr == c.addr && req.elem == c.elem && req.sparse == c.sparse,
                "request held");
          check(!wr.en, "no write while waiting");
          @(negedge clk);
        end
        check(req.valid, "request before grant");
        gnt = 1;
        @(negedge clk);
        gnt = 0;
        check(!req.valid && busy && !wr.en, "waiting for answer");
        val = $urandom;
        rsp_valid = 1; rsp_data = val;
        #1;
        check(wr.en && wr.idx == c.dst_idx && wr.data == val, "answer written");
        @(negedge clk);
        rsp_valid = 0;
        check(!busy && !wr.en, "idle after write");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
