// tb_spac_workloads: runs spac_switch in the configurations chosen for the
// five evaluated applications, each with its own packet size and traffic:
//   HFT        8 ports, direct-index table, N*N VOQs, round robin,
//              2-byte header + 24-byte payload, uniform random unicast;
//   RL         8 ports, direct-index table, N*N VOQs, EDRRM,
//              2-byte header + 1463-byte payload, gather/scatter rounds;
//   Datacenter 32 ports, multi-bank hash, shared VOQ, iSLIP,
//              4-byte header + 966-byte payload, uniform random unicast;
//   Industry   10 ports, direct-index table, shared VOQ, round robin,
//              2-byte header + 59-byte payload, uniform random unicast;
//   Underwater 8 ports, direct-index table, shared VOQ, round robin,
//              2-byte header + 2-byte payload, uniform random unicast.
// The flit width stays at the package's 512 bits for all of them.  Each run
// checks its own traffic (see tb_spac_wl_run); the counts are summed here.
`timescale 1ns/1ps
module tb_spac_workloads;
  import spac_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [4:0] done;

  tb_spac_wl_run #(.NAME("HFT"), .N(8), .FWD(FWD_FULL_LUT), .VOQ(VOQ_NXN), .SCHED(SCHED_RR),
                   .FIELD_W(8), .PKT_BYTES(26), .PATTERN(0), .NPKT(600))
    u_hft (.clk, .done(done[0]));
  tb_spac_wl_run #(.NAME("RL"), .N(8), .FWD(FWD_FULL_LUT), .VOQ(VOQ_NXN), .SCHED(SCHED_EDRRM),
                   .FIELD_W(8), .PKT_BYTES(1465), .PATTERN(1), .ROUNDS(4))
    u_rl (.clk, .done(done[1]));
  tb_spac_wl_run #(.NAME("Datacenter"), .N(32), .FWD(FWD_MULTI_HASH), .VOQ(VOQ_SHARED), .SCHED(SCHED_ISLIP),
                   .FIELD_W(16), .PKT_BYTES(970), .PATTERN(0), .NPKT(600))
    u_dc (.clk, .done(done[2]));
  tb_spac_wl_run #(.NAME("Industry"), .N(10), .FWD(FWD_FULL_LUT), .VOQ(VOQ_SHARED), .SCHED(SCHED_RR),
                   .FIELD_W(8), .PKT_BYTES(61), .PATTERN(0), .NPKT(600))
    u_ind (.clk, .done(done[3]));
  tb_spac_wl_run #(.NAME("Underwater"), .N(8), .FWD(FWD_FULL_LUT), .VOQ(VOQ_SHARED), .SCHED(SCHED_RR),
                   .FIELD_W(8), .PKT_BYTES(4), .PATTERN(0), .NPKT(600))
    u_uw (.clk, .done(done[4]));

  initial begin
    int checks, failures;
    wait (&done);
    checks   = u_hft.checks + u_rl.checks + u_dc.checks + u_ind.checks + u_uw.checks;
    failures = u_hft.failures + u_rl.failures + u_dc.failures + u_ind.failures + u_uw.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    $display("watchdog expired, done=%b", done);
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end
endmodule
