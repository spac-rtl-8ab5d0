// spac_sched_islip: iSLIP scheduler of the SPAC switch.
//
// Iterative three-phase matching with independent rotating pointers:
//   Request: every unmatched input requests every unmatched output for which
//            it holds a packet;
//   Grant:   every unmatched output grants the requesting input that comes
//            first at or after its grant pointer g[j];
//   Accept:  every input accepts the granting output that comes first at or
//            after its accept pointer a[i].
// ITERS iterations are unrolled in one combinational block.  Only accepts made
// in the first iteration move the pointers: g[j] to one past the accepted
// input and a[i] to one past the accepted output, which desynchronises the
// pointers and gives iSLIP its fairness.
//
// Interface as spac_sched_rr: req[i][j], in_free, out_free in; gnt_valid[i]
// and gnt_out[i] out, combinational, for the connections made this cycle.
// The three phases and the pointer rule follow the paper and the original
// iSLIP; the number of iterations per cycle is this design's choice.
module spac_sched_islip
  import spac_pkg::*;
#(
  parameter int unsigned N_PORTS = 8,
  parameter int unsigned ITERS   = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_PORTS-1:0] req      [N_PORTS],
  input  logic [N_PORTS-1:0] in_free,
  input  logic [N_PORTS-1:0] out_free,
  output logic [N_PORTS-1:0] gnt_valid,
  output port_t              gnt_out  [N_PORTS]
);

  port_t g_ptr [N_PORTS];  // grant pointers (outputs)
  port_t a_ptr [N_PORTS];  // accept pointers (inputs)

  logic [N_PORTS-1:0] acc_first;          // accepted in iteration 1
  port_t              acc_in_of [N_PORTS]; // output j: input it was matched to

  always_comb begin
    logic [N_PORTS-1:0]   in_un, out_un;
    logic [MAX_PORTS-1:0] vec;
    logic [PORT_W:0]      pick;
    logic [N_PORTS-1:0]   gnt_to_in [N_PORTS];  // gnt_to_in[i][j]: output j granted input i
    in_un     = in_free;
    out_un    = out_free;
    gnt_valid = '0;
    acc_first = '0;
    for (int unsigned i = 0; i < N_PORTS; i++) begin
      gnt_out[i]   = '0;
      acc_in_of[i] = '0;
      gnt_to_in[i] = '0;
    end
    for (int unsigned it = 0; it < ITERS; it++) begin
      for (int unsigned i = 0; i < N_PORTS; i++) gnt_to_in[i] = '0;
      // Request + Grant
      for (int unsigned j = 0; j < N_PORTS; j++) begin
        vec = '0;
        for (int unsigned i = 0; i < N_PORTS; i++)
          vec[i] = in_un[i] && out_un[j] && req[i][j];
        pick = rr_pick(vec, g_ptr[j], N_PORTS);
        if (pick[PORT_W]) gnt_to_in[pick[PORT_W-1:0]][j] = 1'b1;
      end
      // Accept
      for (int unsigned i = 0; i < N_PORTS; i++) begin
        vec = '0;
        vec[N_PORTS-1:0] = gnt_to_in[i];
        pick = rr_pick(vec, a_ptr[i], N_PORTS);
        if (pick[PORT_W]) begin
          gnt_valid[i] = 1'b1;
          gnt_out[i]   = pick[PORT_W-1:0];
          in_un[i]     = 1'b0;
          out_un[pick[PORT_W-1:0]] = 1'b0;
          if (it == 0) begin
            acc_first[i] = 1'b1;
            acc_in_of[pick[PORT_W-1:0]] = port_t'(i);
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < N_PORTS; k++) begin
        g_ptr[k] <= '0;
        a_ptr[k] <= '0;
      end
    end else begin
      for (int unsigned i = 0; i < N_PORTS; i++)
        if (acc_first[i]) begin
          a_ptr[i] <= port_t'((int'(gnt_out[i]) + 1) % N_PORTS);
          g_ptr[gnt_out[i]] <= port_t'((i + 1) % N_PORTS);
        end
    end
  end

endmodule
