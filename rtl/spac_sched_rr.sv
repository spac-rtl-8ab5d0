// spac_sched_rr: Round-Robin scheduler of the SPAC switch.
//
// A cyclic priority rotation: in round r every free input i is offered output
// (i + r) mod N_PORTS, and the pair is accepted when input i has a packet for
// that output and the output is free.  The round advances every cycle, so a
// waiting input is offered each output within N_PORTS cycles (the worst case
// the paper gives).  The offer pattern is a permutation, so the matching is
// conflict-free without any arbitration logic, which keeps the path short.
//
// Interface: req[i][j] = input i holds a complete packet for output j;
// in_free/out_free = ports not currently connected in the crossbar.  Outputs
// gnt_valid[i]/gnt_out[i] are combinational and name the new connection for
// input i in this cycle.  The rotation pattern follows the paper's figure;
// advancing the round every cycle is this design's choice.
module spac_sched_rr
  import spac_pkg::*;
#(
  parameter int unsigned N_PORTS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_PORTS-1:0] req      [N_PORTS],
  input  logic [N_PORTS-1:0] in_free,
  input  logic [N_PORTS-1:0] out_free,
  output logic [N_PORTS-1:0] gnt_valid,
  output port_t              gnt_out  [N_PORTS]
);

  port_t round;

  always_comb begin
    for (int unsigned i = 0; i < N_PORTS; i++) begin
      int unsigned j;
      j = (i + int'(round)) % N_PORTS;
      gnt_out[i]   = port_t'(j);
      gnt_valid[i] = in_free[i] && out_free[j] && req[i][j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) round <= '0;
    else        round <= (round == port_t'(N_PORTS - 1)) ? '0 : round + 1'b1;
  end

endmodule
