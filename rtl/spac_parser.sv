// spac_parser: protocol-aware ingress parser of one switch port.
//
// The parser takes a packet from the PHY as an AXI-Stream of DATA_W-bit flits
// and produces the switch's Meta+Data stream: the flits unchanged, plus a
// MetaData record (destination address, source address, ingress port) that is
// valid on the first flit (m_sop).  As in the paper, the protocol layout is
// fixed at elaboration time: the bit offsets of the routing fields are
// parameters, so intra-flit fields become hard-wired bit slices.  Header bit b
// is bit (b mod DATA_W) of flit (b / DATA_W).
//
// Only when a field lies beyond (or straddles) the first flit does the parser
// retain state: it then buffers the first HDR_FLITS flits, extracts the fields
// and replays the buffered flits (FSM states HDR, FLUSH, PASS).  When every
// field lies in the first flit (the Ethernet default: destination MAC at bit 0,
// source MAC at bit 48) the fields are sliced from the arriving flit and the
// parser is a single register stage that runs at one flit per cycle.
//
// Timing: one cycle of latency (output register) in the single-flit-header
// case; HDR_FLITS+1 cycles otherwise.  Fields that lie past the end of a short
// packet read as zero.  The field offsets and the buffer/FSM/deserialize split
// follow the paper's parser; the Ethernet offsets and the bit order are this
// design's choice.
module spac_parser
  import spac_pkg::*;
#(
  parameter int unsigned PORT_ID = 0,   // ingress port number placed in the meta
  parameter int unsigned DST_OFF = 0,   // bit offset of the destination address
  parameter int unsigned SRC_OFF = 48,  // bit offset of the source address
  parameter int unsigned FIELD_W = 48   // width of both address fields (<= ADDR_W)
) (
  input  logic              clk,
  input  logic              rst_n,
  // ingress AXI-Stream
  input  logic [DATA_W-1:0] s_tdata,
  input  logic [KEEP_W-1:0] s_tkeep,
  input  logic              s_tlast,
  input  logic              s_tvalid,
  output logic              s_tready,
  // Meta+Data stream
  output flit_t             m_flit,
  output meta_t             m_meta,
  output logic              m_sop,
  output logic              m_valid,
  input  logic              m_ready
);

  localparam int unsigned HDR_BITS  = ((DST_OFF > SRC_OFF) ? DST_OFF : SRC_OFF) + FIELD_W;
  localparam int unsigned HDR_FLITS = (HDR_BITS + DATA_W - 1) / DATA_W;
  localparam int unsigned CNT_W     = (HDR_FLITS > 1) ? $clog2(HDR_FLITS + 1) : 1;

  // Extract the two fields from a header vector.
  function automatic meta_t extract(input logic [HDR_FLITS*DATA_W-1:0] hdr);
    meta_t m;
    m         = '0;
    m.dst     = addr_t'(hdr[DST_OFF +: FIELD_W]);
    m.src     = addr_t'(hdr[SRC_OFF +: FIELD_W]);
    m.in_port = port_t'(PORT_ID);
    return m;
  endfunction

  logic out_load;  // output register takes a new flit this cycle
  assign out_load = !m_valid || m_ready;

  if (HDR_FLITS == 1) begin : g_direct
    // All fields in the first flit: hard-wired slicing, no state retention.
    logic in_pkt;  // a packet is in progress (next flit is not the first)
    assign s_tready = out_load;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        m_valid <= 1'b0;
        m_sop   <= 1'b0;
        m_flit  <= '0;
        m_meta  <= '0;
        in_pkt  <= 1'b0;
      end else if (out_load) begin
        m_valid <= s_tvalid;
        if (s_tvalid) begin
          m_flit <= '{data: s_tdata, keep: s_tkeep, last: s_tlast};
          m_sop  <= !in_pkt;
          if (!in_pkt) m_meta <= extract(s_tdata);
          in_pkt <= !s_tlast;
        end
      end
    end
  end else begin : g_buffered
    // Fields beyond the first flit: buffer the header flits, then replay them.
    typedef enum logic [1:0] {S_HDR, S_FLUSH, S_PASS} state_e;
    state_e state;
    flit_t  hbuf [HDR_FLITS];
    logic [CNT_W-1:0] n_buf;   // flits held in hbuf
    logic [CNT_W-1:0] rd_idx;  // next buffered flit to replay
    logic [HDR_FLITS*DATA_W-1:0] hdr_vec;

    always_comb begin
      hdr_vec = '0;
      for (int unsigned k = 0; k < HDR_FLITS; k++)
        if (k < n_buf) hdr_vec[k*DATA_W +: DATA_W] = hbuf[k].data;
    end

    assign s_tready = (state == S_HDR) || (state == S_PASS && out_load);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        state   <= S_HDR;
        n_buf   <= '0;
        rd_idx  <= '0;
        m_valid <= 1'b0;
        m_sop   <= 1'b0;
        m_flit  <= '0;
        m_meta  <= '0;
        for (int unsigned k = 0; k < HDR_FLITS; k++) hbuf[k] <= '0;
      end else begin
        if (m_valid && m_ready) m_valid <= 1'b0;
        unique case (state)
          S_HDR: if (s_tvalid) begin
            hbuf[n_buf] <= '{data: s_tdata, keep: s_tkeep, last: s_tlast};
            n_buf       <= n_buf + 1'b1;
            if (s_tlast || n_buf == CNT_W'(HDR_FLITS - 1)) begin
              state  <= S_FLUSH;
              rd_idx <= '0;
            end
          end
          S_FLUSH: begin
            if (out_load) begin
              if (rd_idx == '0) m_meta <= extract(hdr_vec);
              m_valid <= 1'b1;
              m_flit  <= hbuf[rd_idx];
              m_sop   <= (rd_idx == '0);
              rd_idx  <= rd_idx + 1'b1;
              if (rd_idx == n_buf - 1'b1) begin
                n_buf <= '0;
                state <= hbuf[rd_idx].last ? S_HDR : S_PASS;
              end
            end
          end
          S_PASS: if (out_load && s_tvalid) begin
            m_valid <= 1'b1;
            m_flit  <= '{data: s_tdata, keep: s_tkeep, last: s_tlast};
            m_sop   <= 1'b0;
            if (s_tlast) state <= S_HDR;
          end
          default: state <= S_HDR;
        endcase
      end
    end
  end

endmodule
