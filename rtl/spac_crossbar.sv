// spac_crossbar: switching fabric and connection state of the SPAC switch.
//
// The scheduler proposes new input-to-output pairs each cycle; the crossbar
// records them (one register per input: connected flag and output number) and
// from the next cycle moves one flit per cycle per connection from the input's
// VOQ to the output, whenever the output is ready.  A connection lasts for one
// whole packet and is released after the flit with last set, so packets are
// never interleaved at an output.  With EXHAUSTIVE=1 (the EDRRM policy) the
// pair stays connected after a packet as long as the same VOQ holds another
// complete packet, i.e. the queue is served until it is empty.
//
// Interface: gnt_valid/gnt_out from the scheduler; in_free/out_free back to
// it.  Per input i: rd_sel[i] selects the VOQ, rd_word[i] is its head and
// rd_en[i] pops it; pkt_more[i][j] says queue j of input i holds at least two
// packets.  Per output j: o_valid/o_word/o_ready stream to the deparser; the
// output path is combinational from the VOQ head.  pkt_done[i] pulses when
// input i sends the last flit of a packet.  A released port is offered to the
// scheduler from the next cycle, so back-to-back packets of different pairs
// are separated by one idle cycle; that, and the fabric itself, are this
// design's choices where the paper only names a switching fabric.
module spac_crossbar
  import spac_pkg::*;
#(
  parameter int unsigned N_PORTS    = 8,
  parameter bit          EXHAUSTIVE = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_PORTS-1:0] gnt_valid,
  input  port_t              gnt_out  [N_PORTS],
  output logic [N_PORTS-1:0] in_free,
  output logic [N_PORTS-1:0] out_free,
  output logic [N_PORTS-1:0] rd_en,
  output port_t              rd_sel   [N_PORTS],
  input  word_t              rd_word  [N_PORTS],
  input  logic [N_PORTS-1:0] pkt_more [N_PORTS],
  output logic [N_PORTS-1:0] pkt_done,
  output logic [N_PORTS-1:0] o_valid,
  output word_t              o_word   [N_PORTS],
  input  logic [N_PORTS-1:0] o_ready
);

  logic [N_PORTS-1:0] conn_v;
  port_t              conn_o [N_PORTS];

  always_comb begin
    out_free = '1;
    o_valid  = '0;
    for (int unsigned j = 0; j < N_PORTS; j++) o_word[j] = '0;
    for (int unsigned i = 0; i < N_PORTS; i++) begin
      rd_sel[i] = conn_o[i];
      rd_en[i]  = conn_v[i] && o_ready[conn_o[i]];
      pkt_done[i] = rd_en[i] && rd_word[i].flit.last;
      if (conn_v[i]) begin
        out_free[conn_o[i]] = 1'b0;
        o_valid[conn_o[i]]  = 1'b1;
        o_word[conn_o[i]]   = rd_word[i];
      end
    end
    in_free = ~conn_v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conn_v <= '0;
      for (int unsigned i = 0; i < N_PORTS; i++) conn_o[i] <= '0;
    end else begin
      for (int unsigned i = 0; i < N_PORTS; i++) begin
        if (!conn_v[i] && gnt_valid[i]) begin
          conn_v[i] <= 1'b1;
          conn_o[i] <= gnt_out[i];
        end else if (pkt_done[i] && !(EXHAUSTIVE && pkt_more[i][conn_o[i]])) begin
          conn_v[i] <= 1'b0;
        end
      end
    end
  end

  // Each output is connected to at most one input.
  for (genvar i = 0; i < N_PORTS; i++) begin : g_chk
    for (genvar k = i + 1; k < N_PORTS; k++) begin : g_pair
      a_one_input_per_output: assert property (@(posedge clk) disable iff (!rst_n)
        !(conn_v[i] && conn_v[k] && conn_o[i] == conn_o[k]));
    end
  end

endmodule
