// spac_deparser: egress deparser of one switch port.
//
// The mirror image of spac_parser.  Flits leaving the crossbar enter a small
// buffer (BUF_DEPTH words) that decouples the fabric from the egress link; an
// FSM counts the flits of the current packet; and the serializer writes the
// MetaData fields back into the header bits at the same compile-time offsets
// the parser read them from (header bit b is bit b mod DATA_W of flit
// b / DATA_W), so any change a pipeline stage made to the meta appears in the
// packet.  With the meta unchanged the packet leaves bit-identical.
//
// Interface: i_valid/i_word/i_ready in (word = flit + meta, meta valid on
// every flit of a packet); egress AXI-Stream out.  Latency: a flit written
// into the buffer is visible on the output in the next cycle; one flit per
// cycle.  The buffer/FSM/serialize split follows the paper's figure; the
// buffer depth and the write-back of the meta are this design's choices.
module spac_deparser
  import spac_pkg::*;
#(
  parameter int unsigned DST_OFF   = 0,
  parameter int unsigned SRC_OFF   = 48,
  parameter int unsigned FIELD_W   = 48,
  parameter int unsigned BUF_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              i_valid,
  input  word_t             i_word,
  output logic              i_ready,
  output logic [DATA_W-1:0] m_tdata,
  output logic [KEEP_W-1:0] m_tkeep,
  output logic              m_tlast,
  output logic              m_tvalid,
  input  logic              m_tready
);

  localparam int unsigned HDR_BITS  = ((DST_OFF > SRC_OFF) ? DST_OFF : SRC_OFF) + FIELD_W;
  localparam int unsigned HDR_FLITS = (HDR_BITS + DATA_W - 1) / DATA_W;
  localparam int unsigned AW = (BUF_DEPTH > 1) ? $clog2(BUF_DEPTH) : 1;
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);
  localparam int unsigned FW = $clog2(HDR_FLITS + 1);

  // ---- buffering ----
  word_t         buf_mem [BUF_DEPTH];
  logic [AW-1:0] rd_p, wr_p;
  logic [CW-1:0] cnt;
  logic          push, pop;

  assign i_ready = cnt != CW'(BUF_DEPTH);
  assign push    = i_valid && i_ready;
  assign pop     = m_tvalid && m_tready;

  // ---- FSM: position of the head flit in its packet ----
  logic [FW-1:0] fidx;  // saturates at HDR_FLITS

  // ---- serializing ----
  word_t head;
  logic [HDR_FLITS*DATA_W-1:0] hdr_val, hdr_msk;

  always_comb begin
    head    = buf_mem[rd_p];
    hdr_val = '0;
    hdr_msk = '0;
    hdr_val[DST_OFF +: FIELD_W] = head.meta.dst[FIELD_W-1:0];
    hdr_msk[DST_OFF +: FIELD_W] = '1;
    hdr_val[SRC_OFF +: FIELD_W] = head.meta.src[FIELD_W-1:0];
    hdr_msk[SRC_OFF +: FIELD_W] = '1;
    m_tdata  = head.flit.data;
    for (int unsigned k = 0; k < HDR_FLITS; k++)
      if (fidx == FW'(k))
        m_tdata = (head.flit.data & ~hdr_msk[k*DATA_W +: DATA_W])
                | (hdr_val[k*DATA_W +: DATA_W] & hdr_msk[k*DATA_W +: DATA_W]);
    m_tkeep  = head.flit.keep;
    m_tlast  = head.flit.last;
    m_tvalid = cnt != '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_p <= '0;
      wr_p <= '0;
      cnt  <= '0;
      fidx <= '0;
    end else begin
      if (push) begin
        buf_mem[wr_p] <= i_word;
        wr_p <= (wr_p == AW'(BUF_DEPTH - 1)) ? '0 : wr_p + 1'b1;
      end
      if (pop) begin
        rd_p <= (rd_p == AW'(BUF_DEPTH - 1)) ? '0 : rd_p + 1'b1;
        if (head.flit.last)               fidx <= '0;
        else if (fidx != FW'(HDR_FLITS))  fidx <= fidx + 1'b1;
      end
      cnt <= cnt + CW'(push) - CW'(pop);
    end
  end

endmodule
