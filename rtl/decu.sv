// decu: FlexiSAGA decompression unit (DecU), the arbiter between the load/store
// units and the main-memory ports.
//
// Every cycle it scans the NREQ requesters in round-robin order, starting after
// the one granted last, and grants requests until all NPORTS memory ports are
// taken. A granted read is answered one cycle later (`rsp_valid`, `rsp_data`),
// which matches the unit-latency memory; a granted write reaches memory in the
// grant cycle. Dense requests are forwarded with their address unchanged.
// A sparse weight read (`sparse` = 1) names a position `elem` in the element bit
// array of the current weight tile (`ebits`, loaded by the controller). If the bit
// is 0 the weight is a zero of the sparse representation: the DecU grants the
// request without using a port and answers zero. Otherwise it computes the word
// address of the weight in the packed non-zero value array as
// `nz_base + (number of 1s in ebits below elem)`, a prefix count computed once
// per tile. The paper gives the DecU's role (arbiter, forwarding dense reads,
// emitting zeros for sparse ones); the round-robin policy, the grant/response
// handshake and the prefix-count addressing are this design's own. The same
// mechanism serves the CSB format: there, the controller derives `ebits` from
// the column-index array (an entry of -1 is a zero).
module decu
  import flexisaga_pkg::*;
#(
  parameter int unsigned NREQ   = 30,
  parameter int unsigned NPORTS = 8,
  parameter int unsigned EBITS  = 128
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic [EBITS-1:0] ebits,
  input  addr_t     nz_base,
  input  mem_req_t  req       [NREQ],
  output logic      gnt       [NREQ],
  output logic      rsp_valid [NREQ],
  output word_t     rsp_data  [NREQ],
  output mem_port_t port      [NPORTS],
  input  word_t     rdata     [NPORTS],
  output logic [$clog2(NREQ+1)-1:0] n_zero  // zero answers issued this cycle
);
  localparam int unsigned PW = (NPORTS > 1) ? $clog2(NPORTS) : 1;
  localparam int unsigned RW = (NREQ > 1) ? $clog2(NREQ) : 1;
  localparam int unsigned CW = $clog2(EBITS + 1);
  localparam int unsigned EW = (EBITS > 1) ? $clog2(EBITS) : 1;

  logic [CW-1:0] pre [EBITS];  // pre[e] = popcount(ebits[e-1:0])
  logic [RW-1:0] ptr;
  logic [RW-1:0] last_g;
  logic          any_g;

  logic          g_zero [NREQ];
  logic [PW-1:0] g_port [NREQ];

  logic          rv_q   [NREQ];
  logic          zero_q [NREQ];
  logic [PW-1:0] port_q [NREQ];

  always_comb begin
    pre[0] = '0;
    for (int e = 1; e < EBITS; e++) pre[e] = pre[e-1] + CW'(ebits[e-1]);
  end

  always_comb begin
    int unsigned used;
    int unsigned i;
    used   = 0;
    any_g  = 1'b0;
    last_g = ptr;
    n_zero = '0;
    for (int p = 0; p < NPORTS; p++) port[p] = '0;
    for (int r = 0; r < NREQ; r++) begin
      gnt[r]    = 1'b0;
      g_zero[r] = 1'b0;
      g_port[r] = '0;
    end
    for (int k = 0; k < NREQ; k++) begin
      i = (32'(ptr) + k) % NREQ;
      if (req[i].valid) begin
        if (req[i].sparse && !req[i].we &&
            (32'(req[i].elem) >= EBITS || !ebits[req[i].elem[EW-1:0]])) begin
          gnt[i]    = 1'b1;
          g_zero[i] = 1'b1;
          n_zero    = n_zero + 1'b1;
          any_g     = 1'b1;
          last_g    = RW'(i);
        end else if (used < NPORTS) begin
          gnt[i]         = 1'b1;
          g_port[i]      = PW'(used);
          port[used].en    = 1'b1;
          port[used].we    = req[i].we;
          port[used].wdata = req[i].wdata;
          port[used].addr  = (req[i].sparse && !req[i].we)
                             ? nz_base + addr_t'(pre[req[i].elem[EW-1:0]])
                             : req[i].addr;
          used   = used + 1;
          any_g  = 1'b1;
          last_g = RW'(i);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
      for (int r = 0; r < NREQ; r++) begin
        rv_q[r]   <= 1'b0;
        zero_q[r] <= 1'b0;
        port_q[r] <= '0;
      end
    end else begin
      if (any_g) ptr <= (32'(last_g) + 1 >= NREQ) ? '0 : last_g + 1'b1;
      for (int r = 0; r < NREQ; r++) begin
        rv_q[r]   <= gnt[r] && !req[r].we;
        zero_q[r] <= g_zero[r];
        port_q[r] <= g_port[r];
      end
    end
  end

  always_comb begin
    for (int r = 0; r < NREQ; r++) begin
      rsp_valid[r] = rv_q[r];
      rsp_data[r]  = zero_q[r] ? '0 : rdata[port_q[r]];
    end
  end
endmodule
