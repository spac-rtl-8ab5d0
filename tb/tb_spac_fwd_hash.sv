// tb_spac_fwd_hash: self-checking testbench of spac_fwd_hash.
//
// Phase A: one port at a time issues a request (random 48-bit addresses from
// a pool of 40); there are no bank conflicts, so each request must be
// accepted in the cycle it is presented and answered one cycle later.  The
// testbench keeps its own model of the banks, using the hash functions as
// specified (bank = XOR-fold of the address to 3 bits, row = XOR-fold of the
// address above bit 3 to 6 bits, newest learn overwrites the row), and checks
// every hit flag and port.
// Phase B: all ports request together, with destinations chosen in the same
// bank, so the per-bank arbiter must serialise them: every port must still get
// exactly one response, the conflict flag must be seen, and the lookups (whose
// destinations are not learnt in this phase) must match the model.
`timescale 1ns/1ps
module tb_spac_fwd_hash;
  import spac_pkg::*;
  localparam int N = 8, NB = 8, NR = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic  req_valid[N], req_ready[N], resp_valid[N], resp_hit[N], conflict[N];
  addr_t req_dst[N], req_src[N];
  port_t resp_port[N];

  spac_fwd_hash #(.N_PORTS(N), .N_BANKS(NB), .ROWS(NR)) dut (.*);

  function automatic int hb(input addr_t a);
    int h = 0;
    for (int k = 0; k < 48; k++) h ^= a[k] << (k % 3);
    return h;
  endfunction
  function automatic int hr(input addr_t a);
    int h = 0;
    for (int k = 3; k < 48; k++) h ^= a[k] << ((k - 3) % 6);
    return h;
  endfunction

  addr_t m_addr [NB][NR];
  bit    m_v    [NB][NR];
  int    m_port [NB][NR];
  addr_t pool [40];
  int hits = 0, conflicts = 0;

  function automatic void lookup_exp(input addr_t a, output bit h, output int p);
    h = m_v[hb(a)][hr(a)] && m_addr[hb(a)][hr(a)] == a;
    p = m_port[hb(a)][hr(a)];
  endfunction

  function automatic bit row_used(input addr_t a);
    for (int k = 0; k < 40; k++)
      if (hb(pool[k]) == hb(a) && hr(pool[k]) == hr(a)) return 1;
    return 0;
  endfunction

  always @(posedge clk) for (int i = 0; i < N; i++) if (conflict[i]) conflicts++;

  initial begin
    for (int b = 0; b < NB; b++) for (int r = 0; r < NR; r++) m_v[b][r] = 0;
    for (int k = 0; k < 40; k++) pool[k] = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
    for (int i = 0; i < N; i++) begin req_valid[i] = 0; req_dst[i] = '0; req_src[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // ---- phase A ----
    repeat (3000) begin
      int i; bit h; int p;
      i = $urandom_range(0, N - 1);
      req_valid[i] = 1;
      req_dst[i] = pool[$urandom_range(0, 39)];
      req_src[i] = pool[$urandom_range(0, 39)];
      @(negedge clk);
      check(req_ready[i], "accepted without conflict");
      lookup_exp(req_dst[i], h, p);
      @(posedge clk);
      #1;
      check(resp_valid[i], "response one cycle later");
      check(resp_hit[i] == h, "hit flag");
      if (h) begin check(int'(resp_port[i]) == p, "port"); hits++; end
      m_v[hb(req_src[i])][hr(req_src[i])] = 1;
      m_addr[hb(req_src[i])][hr(req_src[i])] = req_src[i];
      m_port[hb(req_src[i])][hr(req_src[i])] = i;
      req_valid[i] = 0;
    end
    check(hits > 500, "hits exercised");
    // ---- phase B: all ports, destinations in one bank ----
    repeat (50) begin
      bit eh [N]; int ep [N]; bit got [N]; bit acc [N]; int ngot; int cyc; int b0;
      b0 = -1;
      for (int i = 0; i < N; i++) begin
        addr_t d, sa;
        do d = pool[$urandom_range(0, 39)]; while (b0 >= 0 && hb(d) != b0);
        if (b0 < 0) b0 = hb(d);
        req_dst[i] = d;
        // source: a fresh address whose row no pool address uses, so the
        // learning of this phase cannot change any lookup result
        do sa = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF; while (row_used(sa));
        req_src[i] = sa;
        lookup_exp(d, eh[i], ep[i]);
        req_valid[i] = 1;
        got[i] = 0;
      end
      ngot = 0; cyc = 0;
      while (ngot < N && cyc < 100) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) acc[i] = req_valid[i] && req_ready[i];
        @(posedge clk);
        #1;
        cyc++;
        for (int i = 0; i < N; i++) begin
          check(resp_valid[i] == acc[i], "response after acceptance");
          if (acc[i]) begin
            check(!got[i], "single response per request");
            check(resp_hit[i] == eh[i], "hit under conflict");
            if (eh[i]) check(int'(resp_port[i]) == ep[i], "port under conflict");
            got[i] = 1; ngot++;
            req_valid[i] = 0;
          end
        end
      end
      check(ngot == N, "all conflicting requests served");
      check(cyc >= N, "same-bank lookups serialised");
    end
    check(conflicts > 0, "bank conflicts seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
