// tb_main_memory: self-checking test of the multi-port main memory. Random
// reads and writes on all ports at once (distinct addresses for writes in one
// cycle) are checked against a shadow array; reads must return, one cycle after
// the request, the value written by earlier cycles.
module tb_main_memory;
  import flexisaga_pkg::*;

  localparam int NP = 8, D = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  mem_port_t port  [NP];
  word_t     rdata [NP];
  word_t     shadow [D];
  word_t     exp_q  [NP];
  logic      rd_q   [NP];
  int checks = 0, failures = 0;

  main_memory #(.NPORTS(NP), .DEPTH(D)) dut (.clk, .port, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NP; p++) begin port[p] = '0; rd_q[p] = 0; end
    // initialise every word
    for (int a = 0; a < D; a += NP) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        port[p] = '{en: 1, we: 1, addr: addr_t'(a + p), wdata: word_t'($urandom)};
        shadow[a + p] = port[p].wdata;
      end
    end
    @(negedge clk);
    for (int p = 0; p < NP; p++) port[p] = '0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      bit taken [D];
      for (int a = 0; a < D; a++) taken[a] = 0;
      @(negedge clk);
      // check reads issued in the previous cycle
      for (int p = 0; p < NP; p++) if (rd_q[p]) begin
        checks++;
        if (rdata[p] !== exp_q[p]) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d got %h exp %h", p, rdata[p], exp_q[p]);
        end
      end
      // apply writes of the previous cycle to the shadow
      for (int p = 0; p < NP; p++) if (port[p].en && port[p].we) shadow[port[p].addr] = port[p].wdata;
      for (int p = 0; p < NP; p++) begin
        int a;
        a = $urandom % D;
        port[p].en = ($urandom % 4) != 0;
        port[p].we = (($urandom % 2) == 0) && !taken[a];
        port[p].addr = addr_t'(a);
        port[p].wdata = $urandom;
        if (port[p].en && port[p].we) taken[a] = 1;
        rd_q[p] = port[p].en && !port[p].we;
        exp_q[p] = shadow[a];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
