// tb_spac_sched_rr: self-checking testbench of spac_sched_rr.
//
// Random request matrices and random free inputs/outputs are applied every
// cycle.  A reference model in the testbench keeps its own round counter and
// predicts the grant of every input (offer output (i + round) mod N, accept if
// requested and free).  The testbench checks the grants against the model,
// checks that the result is a valid matching, and checks that a single
// persistent request is granted within N cycles (the worst case).
`timescale 1ns/1ps
module tb_spac_sched_rr;
  import spac_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [N-1:0] req [N];
  logic [N-1:0] in_free, out_free;
  logic [N-1:0] gnt_valid;
  port_t gnt_out [N];
  spac_sched_rr #(.N_PORTS(N)) dut (.clk, .rst_n, .req, .in_free, .out_free, .gnt_valid, .gnt_out);

  int rnd = 0;
  task automatic model(input logic [N-1:0] rq [N], input logic [N-1:0] inf, input logic [N-1:0] outf,
                       output bit gv [N], output int go [N], input bit upd);
    for (int i = 0; i < N; i++) begin
      go[i] = (i + rnd) % N;
      gv[i] = inf[i] && outf[go[i]] && rq[i][go[i]];
    end
    if (upd) rnd = (rnd + 1) % N;
  endtask

  task automatic check_matching(input logic [N-1:0] gv, input port_t go [N]);
    logic [N-1:0] used;
    used = '0;
    for (int i = 0; i < N; i++) if (gv[i]) begin
      check(in_free[i] && out_free[go[i]] && req[i][go[i]], "grant only a free requested pair");
      check(!used[go[i]], "output granted once");
      used[go[i]] = 1'b1;
    end
  endtask

  int n_match = 0, extra = 0;
  initial begin
    for (int i = 0; i < N; i++) req[i] = '0;
    in_free = '0; out_free = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (4000) begin
      bit gv [N]; int go [N];
      for (int i = 0; i < N; i++) req[i] = N'($urandom) & N'($urandom);
      in_free  = N'($urandom) | N'($urandom);
      out_free = N'($urandom) | N'($urandom);
      #1;
      model(req, in_free, out_free, gv, go, 1'b1);
      for (int i = 0; i < N; i++) begin
        check(gnt_valid[i] == gv[i] && (!gv[i] || int'(gnt_out[i]) == go[i]), "grant");
        if (gv[i]) n_match++;
      end
      check_matching(gnt_valid, gnt_out);
      @(posedge clk);
      #1;
    end
    check(n_match > 1000, "matches made");
    // a single persistent request is served within N cycles
    for (int t = 0; t < 20; t++) begin
      int i, j, waited;
      i = $urandom_range(0, N - 1); j = $urandom_range(0, N - 1);
      for (int a = 0; a < N; a++) req[a] = '0;
      req[i][j] = 1'b1; in_free = '1; out_free = '1;
      waited = 0;
      #1;
      while (!gnt_valid[i] && waited < 2 * N) begin
        begin bit gv [N]; int go [N]; model(req, in_free, out_free, gv, go, 1'b1); end
        @(posedge clk); #1; waited++;
      end
      check(waited < N, "served within N cycles");
      begin bit gv [N]; int go [N]; model(req, in_free, out_free, gv, go, 1'b1); end
      @(posedge clk); #1;
    end
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
