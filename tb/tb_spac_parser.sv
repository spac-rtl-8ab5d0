// tb_spac_parser: self-checking testbench of spac_parser.
//
// Two parsers get the same random packets (1 to 5 flits, random gaps on the
// input, random back-pressure on the output), each from its own driver:
// u_eth with the Ethernet layout (both fields in the first flit, direct path)
// and u_far with the destination straddling the first flit boundary and the
// source inside the second flit (buffered path).  The testbench keeps its own
// copy of every packet and checks each output flit, the sop flag and the
// extracted fields, which it computes from the stored packet bits.  It also
// checks that the direct path delivers a flit one cycle after accepting it.
`timescale 1ns/1ps
module tb_spac_parser;
  import spac_pkg::*;

  localparam int unsigned FAR_DST = 500;  // straddles flits 0 and 1
  localparam int unsigned FAR_SRC = 560;  // inside flit 1
  localparam int unsigned NPKT = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  logic [DATA_W-1:0] de, df;
  logic le, lf, vie, vif;
  logic rdy_e, rdy_f;
  flit_t fe, ff;
  meta_t me, mf;
  logic se, sf, ve, vf;
  logic re, rf;

  spac_parser u_eth (.clk, .rst_n, .s_tdata(de), .s_tkeep('1), .s_tlast(le), .s_tvalid(vie),
    .s_tready(rdy_e), .m_flit(fe), .m_meta(me), .m_sop(se), .m_valid(ve), .m_ready(re));
  spac_parser #(.PORT_ID(3), .DST_OFF(FAR_DST), .SRC_OFF(FAR_SRC), .FIELD_W(48)) u_far (
    .clk, .rst_n, .s_tdata(df), .s_tkeep('1), .s_tlast(lf), .s_tvalid(vif), .s_tready(rdy_f),
    .m_flit(ff), .m_meta(mf), .m_sop(sf), .m_valid(vf), .m_ready(rf));

  logic [DATA_W-1:0] pk   [NPKT][5];
  int unsigned       plen [NPKT];

  // Field of packet p at header bit offset off (zero past the packet end).
  function automatic logic [47:0] field(input int p, input int unsigned off);
    logic [47:0] v;
    for (int unsigned b = 0; b < 48; b++) begin
      int unsigned g;
      g = off + b;
      v[b] = (g / DATA_W < plen[p]) ? pk[p][g / DATA_W][g % DATA_W] : 1'b0;
    end
    return v;
  endfunction

  initial begin
    for (int p = 0; p < NPKT; p++) begin
      plen[p] = 1 + $urandom_range(0, 4);
      for (int k = 0; k < 5; k++)
        for (int w = 0; w < DATA_W / 32; w++) pk[p][k][w*32 +: 32] = $urandom;
    end
  end

  // Inputs change after the rising edge; a flit is taken at the rising edge
  // when ready was high at the falling edge before it.
  task automatic drive(ref logic [DATA_W-1:0] d, ref logic l, ref logic v, ref logic rdy);
    v = 0; d = '0; l = 0;
    wait (rst_n);
    for (int p = 0; p < NPKT; p++)
      for (int k = 0; k < int'(plen[p]); k++) begin
        if ($urandom_range(0, 3) == 0) @(posedge clk);  // random gap
        #1 v = 1; d = pk[p][k]; l = (k == int'(plen[p]) - 1);
        @(negedge clk);
        while (!rdy) @(negedge clk);
        @(posedge clk);
        #1 v = 0;
      end
  endtask

  initial begin
    re = 0; rf = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
  end
  initial drive(de, le, vie, rdy_e);
  initial drive(df, lf, vif, rdy_f);

  // random back-pressure on the outputs
  always @(posedge clk) begin
    re <= ($urandom_range(0, 3) != 0);
    rf <= ($urandom_range(0, 3) != 0);
  end

  int pe = 0, ke = 0, pf = 0, kf = 0;
  always @(posedge clk) if (rst_n) begin
    if (ve && re) begin
      check(fe.data == pk[pe][ke] && fe.last == (ke == int'(plen[pe]) - 1), "eth flit");
      check(se == (ke == 0), "eth sop");
      if (ke == 0) check(me.dst == field(pe, 0) && me.src == field(pe, 48) && me.in_port == 0, "eth meta");
      if (ke == int'(plen[pe]) - 1) begin pe++; ke = 0; end else ke++;
    end
    if (vf && rf) begin
      check(ff.data == pk[pf][kf] && ff.last == (kf == int'(plen[pf]) - 1), "far flit");
      check(sf == (kf == 0), "far sop");
      if (kf == 0) check(mf.dst == field(pf, FAR_DST) && mf.src == field(pf, FAR_SRC)
                         && mf.in_port == 3, "far meta");
      if (kf == int'(plen[pf]) - 1) begin pf++; kf = 0; end else kf++;
    end
  end

  // direct path latency: a flit accepted at an edge is on the output after it
  always @(posedge clk) if (rst_n && vie && rdy_e) begin
    logic [DATA_W-1:0] d;
    d = de;
    @(negedge clk);
    check(ve && fe.data == d, "eth latency 1 cycle");
  end

  initial begin
    wait (pe == NPKT && pf == NPKT);
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: pe=%0d pf=%0d", pe, pf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
