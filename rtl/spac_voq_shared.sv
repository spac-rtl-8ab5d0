// spac_voq_shared: Shared VOQ buffer of one input port.
//
// Instead of one data FIFO per output, the input port has a single central
// data buffer of DEPTH words.  A free-space pointer queue supplies the address
// at which each arriving flit is stored; the flit is stored once, and its
// pointer is pushed into the pointer-based VOQ of every destination named by
// the write mask, so a broadcast costs one data word and several pointers.  A
// per-word bitmap records the destinations that have not yet read the word.
// When output j reads a word, bit j is cleared; when the bitmap becomes zero
// the pointer is returned to the free-space queue.
//
// The interface is identical to spac_voq_nxn so the two are interchangeable:
// wr_valid/wr_word/wr_mask (one flit per cycle, never stalls, mask not zero),
// space_ok (here the same for every output: at least MAX_PKT_FLITS free
// words), pkt_avail/pkt_more (complete packets per destination), and a
// combinational head read of queue rd_sel popped by rd_en.  The free-space
// queue, bitmap and pointer queues follow the paper's figure; the depth, the
// reset-time filling of the free queue and store-and-forward are this
// design's choices.
module spac_voq_shared
  import spac_pkg::*;
#(
  parameter int unsigned N_PORTS       = 8,
  parameter int unsigned DEPTH         = 256, // words in the shared data buffer
  parameter int unsigned MAX_PKT_FLITS = 24
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
  typedef logic [AW-1:0] ptr_t;

  // central data buffer and destination bitmap
  word_t              data   [DEPTH];
  logic [N_PORTS-1:0] bitmap [DEPTH];
  // free-space pointer queue
  ptr_t               free_q [DEPTH];
  ptr_t               free_rd, free_wr;
  logic [CW-1:0]      free_cnt;
  // pointer-based VOQs, one per destination port
  ptr_t               pq     [N_PORTS][DEPTH];
  ptr_t               pq_rd  [N_PORTS];
  ptr_t               pq_wr  [N_PORTS];
  logic [CW-1:0]      pkts   [N_PORTS];

  ptr_t               wr_ptr, rd_ptr;
  logic [N_PORTS-1:0] rd_bm_next;
  logic               rd_release;

  function automatic ptr_t inc(input ptr_t p);
    return (p == ptr_t'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    wr_ptr  = free_q[free_rd];
    rd_ptr  = pq[rd_sel][pq_rd[rd_sel]];
    rd_word = data[rd_ptr];
    rd_bm_next = bitmap[rd_ptr];
    rd_bm_next[rd_sel] = 1'b0;
    rd_release = rd_en && (rd_bm_next == '0);
    for (int unsigned j = 0; j < N_PORTS; j++) begin
      space_ok[j]  = free_cnt >= CW'(MAX_PKT_FLITS);
      pkt_avail[j] = pkts[j] != '0;
      pkt_more[j]  = pkts[j] > CW'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned a = 0; a < DEPTH; a++) begin
        free_q[a] <= ptr_t'(a);
        bitmap[a] <= '0;
      end
      free_rd  <= '0;
      free_wr  <= '0;
      free_cnt <= CW'(DEPTH);
      for (int unsigned j = 0; j < N_PORTS; j++) begin
        pq_rd[j] <= '0;
        pq_wr[j] <= '0;
        pkts[j]  <= '0;
      end
    end else begin
      // store: take a free pointer, write the word once, replicate the pointer
      if (wr_valid) begin
        data[wr_ptr]   <= wr_word;
        bitmap[wr_ptr] <= wr_mask;
        free_rd        <= inc(free_rd);
        for (int unsigned j = 0; j < N_PORTS; j++)
          if (wr_mask[j]) begin
            pq[j][pq_wr[j]] <= wr_ptr;
            pq_wr[j]        <= inc(pq_wr[j]);
          end
      end
      // read: pop the pointer, clear this destination's bit, free when done
      if (rd_en) begin
        pq_rd[rd_sel]  <= inc(pq_rd[rd_sel]);
        bitmap[rd_ptr] <= rd_bm_next;
      end
      if (rd_release) begin
        free_q[free_wr] <= rd_ptr;
        free_wr         <= inc(free_wr);
      end
      free_cnt <= free_cnt - CW'(wr_valid) + CW'(rd_release);
      for (int unsigned j = 0; j < N_PORTS; j++)
        pkts[j] <= pkts[j] + CW'(wr_valid && wr_mask[j] && wr_word.flit.last)
                           - CW'(rd_en && rd_sel == port_t'(j) && rd_word.flit.last);
    end
  end

  a_free_available: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid |-> (free_cnt != '0));
  a_mask_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid |-> (wr_mask != '0));

endmodule
