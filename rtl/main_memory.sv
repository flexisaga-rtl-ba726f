// main_memory: multi-ported main memory of the FlexiSAGA system.
//
// The paper evaluates FlexiSAGA with an SRAM model of unit read and write latency
// and eight 32-bit ports spread over several banks; this module gives that
// behaviour as a plain array with NPORTS independent ports. Each port performs
// one access per cycle: a write is visible from the next cycle on, a read
// returns its word in `rdata` one cycle after the request. If two ports write
// the same word in one cycle, the higher port number wins (the paper does not say;
// the accelerator never does this). Capacity (DEPTH words) is this design's
// choice: the paper gives none. Banking is not modelled: every port reaches every
// word, which is the conflict-free behaviour the paper's runtime model assumes.
module main_memory
  import flexisaga_pkg::*;
#(
  parameter int unsigned NPORTS = 8,
  parameter int unsigned DEPTH  = 16384
) (
  input  logic      clk,
  input  mem_port_t port  [NPORTS],
  output word_t     rdata [NPORTS]
);
  localparam int unsigned IW = $clog2(DEPTH);

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      if (port[p].en && port[p].we) mem[port[p].addr[IW-1:0]] <= port[p].wdata;
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      if (port[p].en && !port[p].we) rdata[p] <= mem[port[p].addr[IW-1:0]];
    end
  end
endmodule
