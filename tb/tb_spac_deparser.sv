// tb_spac_deparser: self-checking testbench of spac_deparser.
//
// Two deparsers, one with the Ethernet field layout and one with fields
// beyond the first flit (destination straddling flits 0 and 1, source in flit
// 1), receive random packets (1 to 4 flits) whose meta differs from the header
// bits, with random input gaps and random egress back-pressure.  For each
// output flit the testbench computes the expected data itself: the input flit
// with the meta fields written over the header bits at the configured
// offsets.  It also checks last/keep, that no flit is lost or duplicated, and
// that the buffer never holds more than BUF_DEPTH flits.
`timescale 1ns/1ps
module tb_spac_deparser;
  import spac_pkg::*;
  localparam int NPKT = 300;
  localparam int FD = 500, FS = 560;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic iv [2], ir [2], tl [2], tv [2], tr [2];
  word_t iw [2];
  logic [DATA_W-1:0] td [2];
  logic [KEEP_W-1:0] tk [2];

  spac_deparser u0 (.clk, .rst_n, .i_valid(iv[0]), .i_word(iw[0]), .i_ready(ir[0]),
    .m_tdata(td[0]), .m_tkeep(tk[0]), .m_tlast(tl[0]), .m_tvalid(tv[0]), .m_tready(tr[0]));
  spac_deparser #(.DST_OFF(FD), .SRC_OFF(FS), .FIELD_W(48)) u1 (.clk, .rst_n,
    .i_valid(iv[1]), .i_word(iw[1]), .i_ready(ir[1]),
    .m_tdata(td[1]), .m_tkeep(tk[1]), .m_tlast(tl[1]), .m_tvalid(tv[1]), .m_tready(tr[1]));

  word_t sent [2][$];
  int    pos  [2][$];   // flit index within its packet
  int    outn [2] = '{0, 0};
  int    inn  [2] = '{0, 0};

  function automatic logic [DATA_W-1:0] expect_data(input word_t w, input int k, input int dof, input int sof);
    logic [DATA_W-1:0] d;
    d = w.flit.data;
    for (int b = 0; b < 48; b++) begin
      if ((dof + b) / DATA_W == k) d[(dof + b) % DATA_W] = w.meta.dst[b];
      if ((sof + b) / DATA_W == k) d[(sof + b) % DATA_W] = w.meta.src[b];
    end
    return d;
  endfunction

  task automatic drive(input int u);
    for (int p = 0; p < NPKT; p++) begin
      int len; meta_t m;
      len = $urandom_range(1, 4);
      m = '0;
      m.dst = {$urandom, $urandom};
      m.src = {$urandom, $urandom};
      for (int k = 0; k < len; k++) begin
        word_t w;
        w.flit.data = {16{$urandom}};
        w.flit.keep = KEEP_W'({$urandom, $urandom});
        w.flit.last = (k == len - 1);
        w.meta = m;
        if ($urandom_range(0, 3) == 0) @(posedge clk);
        #1 iv[u] = 1; iw[u] = w;
        @(negedge clk);
        while (!ir[u]) @(negedge clk);
        sent[u].push_back(w); pos[u].push_back(k);
        @(posedge clk);
        #1 iv[u] = 0;
      end
    end
  endtask

  initial begin
    for (int u = 0; u < 2; u++) begin iv[u] = 0; iw[u] = '0; tr[u] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
  end
  bit dd [2] = '{0, 0};
  initial begin wait (rst_n); drive(0); dd[0] = 1; end
  initial begin wait (rst_n); drive(1); dd[1] = 1; end

  always @(posedge clk) for (int u = 0; u < 2; u++) tr[u] <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) for (int u = 0; u < 2; u++) begin
    if (iv[u] && ir[u]) inn[u]++;
    if (tv[u] && tr[u]) begin
      word_t w; int k;
      check(sent[u].size() > 0, "no spurious flit");
      if (sent[u].size() > 0) begin
        w = sent[u].pop_front(); k = pos[u].pop_front();
        check(td[u] == expect_data(w, k, (u == 0) ? 0 : FD, (u == 0) ? 48 : FS), "serialized data");
        check(tl[u] == w.flit.last && tk[u] == w.flit.keep, "last/keep");
      end
      outn[u]++;
    end
    check(inn[u] - outn[u] <= 4, "buffer depth");
  end

  initial begin
    wait (rst_n);
    repeat (100) @(posedge clk);
    wait (dd[0] && dd[1] && sent[0].size() == 0 && sent[1].size() == 0);
    repeat (10) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
