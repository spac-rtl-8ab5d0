// tb_spac_fwd_full_lut: self-checking testbench of spac_fwd_full_lut.
//
// All eight ports issue random requests (8-bit addresses) in random cycles.
// A reference table in the testbench is updated with every learn, in port
// order so that the highest port wins, after the lookups of the same cycle
// have been answered from the old contents.  Every response must arrive
// exactly one cycle after its request and match the reference (hit flag and,
// on a hit, the port).
`timescale 1ns/1ps
module tb_spac_fwd_full_lut;
  import spac_pkg::*;
  localparam int N = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic  req_valid[N], req_ready[N], resp_valid[N], resp_hit[N];
  addr_t req_dst[N], req_src[N];
  port_t resp_port[N];

  spac_fwd_full_lut #(.N_PORTS(N), .IDX_W(8)) dut (.*);

  int  ref_port [256];   // -1 = empty
  bit  exp_v [N];
  bit  exp_hit [N];
  int  exp_port [N];
  int  hits = 0;

  initial begin
    for (int a = 0; a < 256; a++) ref_port[a] = -1;
    for (int i = 0; i < N; i++) begin req_valid[i] = 0; req_dst[i] = '0; req_src[i] = '0; exp_v[i] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2000) begin
      for (int i = 0; i < N; i++) begin
        req_valid[i] = ($urandom_range(0, 2) == 0);
        req_dst[i]   = addr_t'($urandom_range(0, 63));
        req_src[i]   = addr_t'($urandom_range(0, 63));
      end
      @(negedge clk);
      for (int i = 0; i < N; i++) check(req_ready[i], "ready always high");
      @(posedge clk);
      #1;
      // responses to the requests of the previous edge
      for (int i = 0; i < N; i++) begin
        check(resp_valid[i] == req_valid[i], "response one cycle later");
        if (req_valid[i]) begin
          int e;
          e = ref_port[req_dst[i][7:0]];
          check(resp_hit[i] == (e >= 0), "hit flag");
          if (e >= 0) begin
            check(int'(resp_port[i]) == e, "port");
            hits++;
          end
        end
      end
      for (int i = 0; i < N; i++) if (req_valid[i]) ref_port[req_src[i][7:0]] = i;
    end
    check(hits > 100, "enough hits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
