// tb_spac_crossbar: self-checking testbench of spac_crossbar.
//
// Runs the checked harness tb_spac_crossbar_run twice in parallel: once with
// connections released after every packet (iSLIP and RR) and once with
// exhaustive service (EDRRM), and requires that the exhaustive run actually
// kept connections across packets and the other did not.
`timescale 1ns/1ps
module tb_spac_crossbar;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c0, f0, h0, r0, c1, f1, h1, r1;
  bit d0, d1;
  int checks, failures;

  tb_spac_crossbar_run #(.EXH(1'b0)) run0 (.clk, .rst_n, .checks(c0), .failures(f0), .held(h0), .released(r0), .done(d0));
  tb_spac_crossbar_run #(.EXH(1'b1)) run1 (.clk, .rst_n, .checks(c1), .failures(f1), .held(h1), .released(r1), .done(d1));

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (d0 && d1);
    checks = c0 + c1 + 3;
    failures = f0 + f1 + int'(h0 != 0) + int'(h1 == 0) + int'(r0 == 0);
    $display("held: %0d / %0d, released: %0d / %0d", h0, h1, r0, r1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
endmodule
