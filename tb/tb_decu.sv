// tb_decu: self-checking test of the decompression unit with 6 requesters and 2
// memory ports. Requesters issue random dense reads, dense writes and sparse
// weight reads and hold them until granted; a unit-latency memory model sits on
// the ports. Checks: never more port accesses than ports; every granted read is
// answered in the next cycle with the memory word, or for a sparse read with
// the packed non-zero value at nz_base + (1s of ebits below elem), or zero when
// its ebits bit is 0 (without a memory access); writes reach memory; n_zero
// counts the zero answers; no requester waits longer than the round-robin bound.
module tb_decu;
  import flexisaga_pkg::*;

  localparam int NREQ = 6, NP = 2, EB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [EB-1:0] ebits;
  addr_t     nz_base = 16'd64;
  mem_req_t  req [NREQ];
  logic      gnt [NREQ], rsp_valid [NREQ];
  word_t     rsp_data [NREQ];
  mem_port_t port [NP];
  word_t     rdata [NP];
  logic [$clog2(NREQ+1)-1:0] n_zero;
  word_t     mem [256];
  int checks = 0, failures = 0;
  word_t exp_q [NREQ];
  logic  pend_q [NREQ];
  logic  gnt_q  [NREQ];
  int    wait_cnt [NREQ];
  int    zeros_seen = 0, zeros_exp = 0;

  decu #(.NREQ(NREQ), .NPORTS(NP), .EBITS(EB)) dut (
    .clk, .rst_n, .ebits, .nz_base, .req, .gnt, .rsp_valid, .rsp_data, .port, .rdata, .n_zero);

  // unit-latency memory model
  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) if (port[p].en) begin
      if (port[p].we) mem[port[p].addr[7:0]] <= port[p].wdata;
      else rdata[p] <= mem[port[p].addr[7:0]];
    end
  end

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

  function automatic int popc_below(input int e);
    int n = 0;
    for (int i = 0; i < e; i++) n += int'(ebits[i]);
    return n;
  endfunction

  initial begin
    for (int i = 0; i < 256; i++) mem[i] = word_t'(32'h1000 + i);
    for (int r = 0; r < NREQ; r++) begin req[r] = '0; pend_q[r] = 0; gnt_q[r] = 0; wait_cnt[r] = 0; end
    ebits = 16'b1011_0010_1100_1110;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int used;
      @(negedge clk);
      // answers to the grants of the previous cycle
      for (int r = 0; r < NREQ; r++) begin
        if (pend_q[r]) begin
          check(rsp_valid[r] && rsp_data[r] == exp_q[r],
                $sformatf("req %0d answer %h exp %h", r, rsp_data[r], exp_q[r]));
        end else check(!rsp_valid[r], "no stray answer");
        pend_q[r] = 0;
        if (gnt_q[r]) req[r] = '0;
      end
      // new random requests
      for (int r = 0; r < NREQ; r++) if (!req[r].valid && ($urandom % 3 != 0)) begin
        int kind;
        kind = $urandom % 3;
        req[r].valid = 1;
        req[r].we = (kind == 1);
        req[r].sparse = (kind == 2);
        req[r].addr = (kind == 1) ? addr_t'(128 + $urandom % 128) : addr_t'($urandom % 64);
        req[r].elem = 16'($urandom % EB);
        req[r].wdata = $urandom;
      end
      #1;
      // grants for the coming clock edge
      used = 0;
      for (int p = 0; p < NP; p++) if (port[p].en) used++;
      check(used <= NP, "port budget");
      zeros_seen += int'(n_zero);
      begin
        int needs_port;
        needs_port = 0;
        for (int r = 0; r < NREQ; r++) begin
          gnt_q[r] = gnt[r];
          if (gnt[r]) begin
            check(req[r].valid, "grant without request");
            if (req[r].sparse && !req[r].we) begin
              if (!ebits[req[r].elem[3:0]]) begin exp_q[r] = '0; zeros_exp++; end
              else begin exp_q[r] = mem[8'(nz_base) + 8'(popc_below(int'(req[r].elem[3:0])))]; needs_port++; end
            end else begin
              needs_port++;
              exp_q[r] = mem[req[r].addr[7:0]];
              if (req[r].we) begin
                bit found;
                found = 0;
                for (int p = 0; p < NP; p++)
                  if (port[p].en && port[p].we && port[p].addr == req[r].addr && port[p].wdata == req[r].wdata) found = 1;
                check(found, "write forwarded");
              end
            end
            pend_q[r] = !req[r].we;
            wait_cnt[r] = 0;
          end else if (req[r].valid) begin
            wait_cnt[r]++;
            check(wait_cnt[r] <= NREQ, "starvation");
          end
        end
        check(needs_port == used, "ports used by granted requests");
      end
    end
    checks++;
    if (zeros_seen != zeros_exp || zeros_exp == 0) begin
      failures++; $display("FAIL n_zero total %0d exp %0d", zeros_seen, zeros_exp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
