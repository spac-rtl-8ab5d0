// spac_voq_nxn: N*N Data VOQ buffer of one input port.
//
// One input port owns N_PORTS data FIFOs, one per output port (virtual output
// queues), so a packet waiting for a busy output never blocks packets for
// other outputs (no head-of-line blocking).  A packet is written flit by flit
// together with a destination mask: a unicast packet goes to one queue, a
// broadcast packet is copied into every queue named by the mask in the same
// cycle.  The queues are separate arrays and are read and written in parallel.
//
// Write side: wr_valid/wr_word/wr_mask, one flit per cycle, never stalls;
// the ingress controller checks space_ok[j] (at least MAX_PKT_FLITS free words
// in queue j) before it starts a packet.  Read side: rd_sel names the output
// queue whose head appears combinationally on rd_word; rd_en pops it.
// pkt_avail[j] is set while queue j holds at least one complete packet (store
// and forward) and pkt_more[j] while it holds two or more (used for
// exhaustive service).  The structure follows the paper; the depth, the
// whole-packet admission check and store-and-forward are this design's choices.
module spac_voq_nxn
  import spac_pkg::*;
#(
  parameter int unsigned N_PORTS       = 8,
  parameter int unsigned DEPTH         = 64,  // flits per queue
  parameter int unsigned MAX_PKT_FLITS = 24   // 1518-byte frame on a 512-bit bus
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_valid,
  input  word_t              wr_word,
  input  logic [N_PORTS-1:0] wr_mask,
  output logic [N_PORTS-1:0] space_ok,
  output logic [N_PORTS-1:0] pkt_avail,
  output logic [N_PORTS-1:0] pkt_more,
  input  logic               rd_en,
  input  port_t              rd_sel,
  output word_t              rd_word
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  word_t          mem    [N_PORTS][DEPTH];
  logic [AW-1:0]  wptr   [N_PORTS];
  logic [AW-1:0]  rptr   [N_PORTS];
  logic [CW-1:0]  cnt    [N_PORTS];
  logic [CW-1:0]  pkts   [N_PORTS];

  always_comb begin
    for (int unsigned j = 0; j < N_PORTS; j++) begin
      space_ok[j]  = (CW'(DEPTH) - cnt[j]) >= CW'(MAX_PKT_FLITS);
      pkt_avail[j] = pkts[j] != '0;
      pkt_more[j]  = pkts[j] > CW'(1);
    end
    rd_word = mem[rd_sel][rptr[rd_sel]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned j = 0; j < N_PORTS; j++) begin
        wptr[j] <= '0;
        rptr[j] <= '0;
        cnt[j]  <= '0;
        pkts[j] <= '0;
      end
    end else begin
      for (int unsigned j = 0; j < N_PORTS; j++) begin
        logic wr_j, rd_j;
        wr_j = wr_valid && wr_mask[j];
        rd_j = rd_en && (rd_sel == port_t'(j));
        if (wr_j) begin
          mem[j][wptr[j]] <= wr_word;
          wptr[j] <= (wptr[j] == AW'(DEPTH - 1)) ? '0 : wptr[j] + 1'b1;
        end
        if (rd_j) rptr[j] <= (rptr[j] == AW'(DEPTH - 1)) ? '0 : rptr[j] + 1'b1;
        cnt[j]  <= cnt[j] + CW'(wr_j) - CW'(rd_j);
        pkts[j] <= pkts[j] + CW'(wr_j && wr_word.flit.last)
                           - CW'(rd_j && mem[j][rptr[j]].flit.last);
      end
    end
  end

  // A write never overflows a queue and a read never pops an empty one.
  for (genvar j = 0; j < N_PORTS; j++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      (wr_valid && wr_mask[j]) |-> (cnt[j] < CW'(DEPTH) || (rd_en && rd_sel == port_t'(j))));
    a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
      (rd_en && rd_sel == port_t'(j)) |-> cnt[j] != '0);
  end

endmodule
