// tb_spac_sched_edrrm: self-checking testbench of spac_sched_edrrm.
//
// Random request matrices and random free inputs/outputs are applied every
// cycle.  A reference model in the testbench (each input requests one output
// from its request pointer, each output grants one input from its grant
// pointer, pointers move one past the partner on a grant) predicts every
// grant; the testbench also checks that the result is a valid matching.
`timescale 1ns/1ps
module tb_spac_sched_edrrm;
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
  spac_sched_edrrm #(.N_PORTS(N)) dut (.clk, .rst_n, .req, .in_free, .out_free, .gnt_valid, .gnt_out);

  int rp [N] = '{default: 0}, gp [N] = '{default: 0};
  task automatic model(input logic [N-1:0] rq [N], input logic [N-1:0] inf, input logic [N-1:0] outf,
                       output bit gv [N], output int go [N], input bit upd);
    bit rv [N]; int ro [N];
    for (int i = 0; i < N; i++) begin
      rv[i] = 0; ro[i] = 0; gv[i] = 0;
      if (inf[i]) for (int k = 0; k < N; k++) begin
        int j; j = (rp[i] + k) % N;
        if (!rv[i] && rq[i][j] && outf[j]) begin rv[i] = 1; ro[i] = j; end
      end
      go[i] = ro[i];
    end
    for (int j = 0; j < N; j++) begin
      bit done; done = 0;
      for (int k = 0; k < N; k++) begin
        int i; i = (gp[j] + k) % N;
        if (!done && rv[i] && ro[i] == j) begin done = 1; gv[i] = 1; end
      end
    end
    if (upd) for (int i = 0; i < N; i++) if (gv[i]) begin
      rp[i] = (go[i] + 1) % N; gp[go[i]] = (i + 1) % N;
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
