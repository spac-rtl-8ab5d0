// spac_sched_edrrm: EDRRM (exhaustive dual round-robin matching) scheduler.
//
// Two phases instead of iSLIP's three:
//   Request: every free input sends a single request, to the first output at
//            or after its request pointer r[i] for which it holds a packet and
//            which is free;
//   Grant:   every free output grants the first requesting input at or after
//            its grant pointer g[j].
// A grant is final (no accept phase).  On a grant r[i] moves to one past the
// granted output and g[j] to one past the granted input; an input that was not
// granted keeps its pointer and asks the same output again.  The exhaustive
// part of EDRRM is applied where connections are held: the crossbar
// (spac_crossbar with EXHAUSTIVE=1) keeps a granted pair connected until its
// queue holds no more packets.
//
// Interface as spac_sched_rr.  Phases and exhaustive service follow the paper;
// the pointer rules are this design's reading of dual round-robin matching.
module spac_sched_edrrm
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

  port_t r_ptr [N_PORTS];  // request pointers (inputs)
  port_t g_ptr [N_PORTS];  // grant pointers (outputs)

  logic [N_PORTS-1:0] rq_valid;
  port_t              rq_out [N_PORTS];

  always_comb begin
    logic [MAX_PORTS-1:0] vec;
    logic [PORT_W:0]      pick;
    // Request: one output per input
    for (int unsigned i = 0; i < N_PORTS; i++) begin
      vec = '0;
      vec[N_PORTS-1:0] = req[i] & out_free;
      pick = rr_pick(vec, r_ptr[i], N_PORTS);
      rq_valid[i] = in_free[i] && pick[PORT_W];
      rq_out[i]   = pick[PORT_W-1:0];
    end
    // Grant: one input per output
    gnt_valid = '0;
    for (int unsigned i = 0; i < N_PORTS; i++) gnt_out[i] = rq_out[i];
    for (int unsigned j = 0; j < N_PORTS; j++) begin
      vec = '0;
      for (int unsigned i = 0; i < N_PORTS; i++)
        vec[i] = rq_valid[i] && (rq_out[i] == port_t'(j));
      pick = rr_pick(vec, g_ptr[j], N_PORTS);
      if (pick[PORT_W]) gnt_valid[pick[PORT_W-1:0]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < N_PORTS; k++) begin
        r_ptr[k] <= '0;
        g_ptr[k] <= '0;
      end
    end else begin
      for (int unsigned i = 0; i < N_PORTS; i++)
        if (gnt_valid[i]) begin
          r_ptr[i] <= port_t'((int'(gnt_out[i]) + 1) % N_PORTS);
          g_ptr[gnt_out[i]] <= port_t'((i + 1) % N_PORTS);
        end
    end
  end

endmodule
