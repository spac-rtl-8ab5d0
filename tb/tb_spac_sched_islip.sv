// tb_spac_sched_islip: self-checking testbench of spac_sched_islip.
//
// Random request matrices and random free inputs/outputs are applied every
// cycle to two schedulers, one with a single iteration and one with two.  A
// reference model in the testbench (request, grant from the grant pointer,
// accept from the accept pointer, pointers moved only by first-iteration
// accepts) predicts every grant of both; the testbench also checks that each
// result is a valid matching and that a second iteration adds n_match.
`timescale 1ns/1ps
module tb_spac_sched_islip;
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
  logic [N-1:0] gv1, gv2;
  port_t go1 [N], go2 [N];
  spac_sched_islip #(.N_PORTS(N), .ITERS(1)) dut (.clk, .rst_n, .req, .in_free, .out_free,
    .gnt_valid(gv1), .gnt_out(go1));
  spac_sched_islip #(.N_PORTS(N), .ITERS(2)) dut2 (.clk, .rst_n, .req, .in_free, .out_free,
    .gnt_valid(gv2), .gnt_out(go2));
  int gp2 [N] = '{default: 0}, ap2 [N] = '{default: 0};

  int gp [N] = '{default: 0}, ap [N] = '{default: 0};
  task automatic model(input logic [N-1:0] rq [N], input logic [N-1:0] inf, input logic [N-1:0] outf,
                       output bit gv [N], output int go [N], input bit upd, input int iters);
    bit iu [N], ou [N]; bit acc1 [N];
    for (int i = 0; i < N; i++) begin iu[i] = inf[i]; ou[i] = outf[i]; gv[i] = 0; go[i] = 0; acc1[i] = 0; end
    for (int it = 0; it < iters; it++) begin
      bit g [N][N];
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) g[i][j] = 0;
      for (int j = 0; j < N; j++) if (ou[j]) begin
        bit done; done = 0;
        for (int k = 0; k < N; k++) begin
          int i; i = (gp[j] + k) % N;
          if (!done && iu[i] && rq[i][j]) begin done = 1; g[i][j] = 1; end
        end
      end
      for (int i = 0; i < N; i++) if (iu[i]) begin
        bit done; done = 0;
        for (int k = 0; k < N; k++) begin
          int j; j = (ap[i] + k) % N;
          if (!done && g[i][j]) begin
            done = 1; gv[i] = 1; go[i] = j; iu[i] = 0; ou[j] = 0;
            if (it == 0) acc1[i] = 1;
          end
        end
      end
    end
    if (upd) for (int i = 0; i < N; i++) if (acc1[i]) begin
      ap[i] = (go[i] + 1) % N; gp[go[i]] = (i + 1) % N;
    end
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
      model(req, in_free, out_free, gv, go, 1'b1, 1);
      for (int i = 0; i < N; i++) begin
        check(gv1[i] == gv[i] && (!gv[i] || int'(go1[i]) == go[i]), "grant (1 iteration)");
        if (gv[i]) n_match++;
      end
      check_matching(gv1, go1);
      begin
        int sgp [N], sap [N]; int n1, n2;
        sgp = gp; sap = ap; gp = gp2; ap = ap2;
        model(req, in_free, out_free, gv, go, 1'b1, 2);
        gp2 = gp; ap2 = ap; gp = sgp; ap = sap;
        n1 = $countones(gv1); n2 = 0;
        for (int i = 0; i < N; i++) begin
          check(gv2[i] == gv[i] && (!gv[i] || int'(go2[i]) == go[i]), "grant (2 iterations)");
          if (gv[i]) n2++;
        end
        if (n2 > n1) extra++;
      end
      check_matching(gv2, go2);
      @(posedge clk);
      #1;
    end
    check(n_match > 1000, "matches made");
    check(extra > 0, "second iteration adds n_match");
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
