// spac_ingress: forwarding stage between the parser and the VOQ buffer of one
// input port.
//
// For each packet the controller sends the parsed destination and source
// addresses to the forward table (which looks up the destination and learns
// the source), turns the answer into a destination mask and writes the
// packet's flits, each tagged with the packet's meta, into the port's VOQ
// buffer.  A known destination gives a one-hot mask; an unknown destination is
// broadcast to every port except the ingress port.  A packet is dropped whole
// when a queue it must enter has fewer than MAX_PKT_FLITS free words
// (checked before the first flit is written, so a queue never overflows) or
// when its destination sits on the ingress port itself (filtered).
//
// FSM: IDLE (request the table with the first flit waiting in the parser),
// WAIT (response), FWD (one flit per cycle into the VOQ) or DROP (consume the
// packet).  Per packet this adds two cycles before the first flit is written.
// The flit data and the table request addresses pass through without a
// register; only the control and the packet's meta are held here.
// The lookup/learn/broadcast behaviour follows the paper; the drop and filter
// rules are this design's choices.
module spac_ingress
  import spac_pkg::*;
#(
  parameter int unsigned N_PORTS = 8,
  parameter int unsigned PORT_ID = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the parser
  input  flit_t              p_flit,
  input  meta_t              p_meta,
  input  logic               p_sop,
  input  logic               p_valid,
  output logic               p_ready,
  // forward table
  output logic               ft_req_valid,
  output addr_t              ft_req_dst,
  output addr_t              ft_req_src,
  input  logic               ft_req_ready,
  input  logic               ft_resp_valid,
  input  logic               ft_resp_hit,
  input  port_t              ft_resp_port,
  // VOQ buffer
  output logic               wr_valid,
  output word_t              wr_word,
  output logic [N_PORTS-1:0] wr_mask,
  input  logic [N_PORTS-1:0] space_ok,
  // events
  output logic               ev_bcast,   // a packet was flooded (destination unknown)
  output logic               ev_drop,    // a packet was dropped for lack of space
  output logic               ev_filter   // a packet was filtered (destination on the ingress port)
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_FWD, S_DROP} state_e;
  state_e             state;
  meta_t              meta_q;
  logic [N_PORTS-1:0] mask_q;
  logic [N_PORTS-1:0] resp_mask;

  localparam logic [N_PORTS-1:0] SELF = N_PORTS'(1) << PORT_ID;

  always_comb begin
    resp_mask = ft_resp_hit ? (N_PORTS'(1) << ft_resp_port) : ~SELF;
    resp_mask = resp_mask & ~SELF;
  end

  assign ft_req_valid = (state == S_IDLE) && p_valid && p_sop;
  assign ft_req_dst   = p_meta.dst;
  assign ft_req_src   = p_meta.src;
  assign p_ready      = (state == S_FWD) || (state == S_DROP) || (state == S_IDLE && p_valid && !p_sop);
  assign wr_valid     = (state == S_FWD) && p_valid;
  assign wr_word      = '{flit: p_flit, meta: meta_q};
  assign wr_mask      = mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      meta_q    <= '0;
      mask_q    <= '0;
      ev_bcast  <= 1'b0;
      ev_drop   <= 1'b0;
      ev_filter <= 1'b0;
    end else begin
      ev_bcast  <= 1'b0;
      ev_drop   <= 1'b0;
      ev_filter <= 1'b0;
      unique case (state)
        S_IDLE: if (ft_req_valid && ft_req_ready) begin
          meta_q <= p_meta;
          state  <= S_WAIT;
        end
        S_WAIT: if (ft_resp_valid) begin
          mask_q <= resp_mask;
          if (resp_mask == '0) begin
            ev_filter <= 1'b1;
            state     <= S_DROP;
          end else if ((resp_mask & ~space_ok) != '0) begin
            ev_drop <= 1'b1;
            state   <= S_DROP;
          end else begin
            ev_bcast <= !ft_resp_hit;
            state    <= S_FWD;
          end
        end
        S_FWD, S_DROP: if (p_valid && p_flit.last) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
