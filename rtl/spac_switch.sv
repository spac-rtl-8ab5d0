// spac_switch: the SPAC switch template, N_PORTS ports, one flit per port per
// cycle.
//
// Datapath of every port: PHY AXI-Stream -> parser (extracts the routing key)
// -> ingress stage with the shared forward table (lookup of the destination,
// learning of the source) -> VOQ buffer of the input port -> crossbar, driven
// by the scheduler -> deparser -> PHY AXI-Stream.  The three architecture
// policies of the template are parameters:
//   FWD_KIND   FWD_FULL_LUT (direct-mapped, short addresses) or
//              FWD_MULTI_HASH (banked hash table, long addresses);
//   VOQ_KIND   VOQ_NXN (one data FIFO per input/output pair) or
//              VOQ_SHARED (one data buffer per input, pointer queues, bitmap);
//   SCHED_KIND SCHED_RR, SCHED_ISLIP or SCHED_EDRRM (EDRRM also turns on
//              exhaustive service in the crossbar).
// The defaults are the general-purpose "SPAC Ethernet" point: 8 ports, 512-bit
// datapath, Ethernet addresses (destination MAC at header bit 0, source MAC at
// bit 48), multi-bank hash table, N*N VOQs and iSLIP.  A compressed protocol
// is selected by the field offsets and width (and FWD_FULL_LUT with
// LUT_IDX_W >= FIELD_W).
//
// Timing, uncontended: parser 1 cycle, forward table request and response 2,
// VOQ store-and-forward (the whole packet is buffered), scheduler grant 1
// cycle after the packet is complete, then 1 cycle to the deparser buffer and
// 1 to the egress port.  The ev_* outputs pulse once per event and per port,
// for statistics.  The custom-kernel injection point and the PHYs of the
// paper are not part of this module: the AXI-Stream ports are where PHYs
// connect.
module spac_switch
  import spac_pkg::*;
#(
  parameter int unsigned N_PORTS       = 8,
  parameter fwd_kind_e   FWD_KIND      = FWD_MULTI_HASH,
  parameter voq_kind_e   VOQ_KIND      = VOQ_NXN,
  parameter sched_kind_e SCHED_KIND    = SCHED_ISLIP,
  parameter int unsigned DST_OFF       = 0,
  parameter int unsigned SRC_OFF       = 48,
  parameter int unsigned FIELD_W       = 48,
  parameter int unsigned LUT_IDX_W     = 8,
  parameter int unsigned HASH_BANKS    = 8,
  parameter int unsigned HASH_ROWS     = 64,
  parameter int unsigned NXN_DEPTH     = 64,
  parameter int unsigned SHARED_DEPTH  = 256,
  parameter int unsigned MAX_PKT_FLITS = 24,
  parameter int unsigned ISLIP_ITERS   = 1,
  parameter int unsigned OUT_BUF_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  // ingress AXI-Stream, one per port
  input  logic [DATA_W-1:0]  s_axis_tdata  [N_PORTS],
  input  logic [KEEP_W-1:0]  s_axis_tkeep  [N_PORTS],
  input  logic [N_PORTS-1:0] s_axis_tlast,
  input  logic [N_PORTS-1:0] s_axis_tvalid,
  output logic [N_PORTS-1:0] s_axis_tready,
  // egress AXI-Stream, one per port
  output logic [DATA_W-1:0]  m_axis_tdata  [N_PORTS],
  output logic [KEEP_W-1:0]  m_axis_tkeep  [N_PORTS],
  output logic [N_PORTS-1:0] m_axis_tlast,
  output logic [N_PORTS-1:0] m_axis_tvalid,
  input  logic [N_PORTS-1:0] m_axis_tready,
  // event pulses (per input port unless noted)
  output logic [N_PORTS-1:0] ev_bcast,
  output logic [N_PORTS-1:0] ev_drop,
  output logic [N_PORTS-1:0] ev_filter,
  output logic [N_PORTS-1:0] ev_fwd_stall,   // forward-table request held (bank conflict)
  output logic [N_PORTS-1:0] ev_pkt_out      // per output port: a packet left the switch
);

  // parser -> ingress
  flit_t p_flit [N_PORTS];
  meta_t p_meta [N_PORTS];
  logic  p_sop  [N_PORTS];
  logic  p_valid[N_PORTS];
  logic  p_ready[N_PORTS];
  // ingress <-> forward table
  logic  ft_req_valid [N_PORTS];
  addr_t ft_req_dst   [N_PORTS];
  addr_t ft_req_src   [N_PORTS];
  logic  ft_req_ready [N_PORTS];
  logic  ft_resp_valid[N_PORTS];
  logic  ft_resp_hit  [N_PORTS];
  port_t ft_resp_port [N_PORTS];
  // ingress -> VOQ
  logic               wr_valid [N_PORTS];
  word_t              wr_word  [N_PORTS];
  logic [N_PORTS-1:0] wr_mask  [N_PORTS];
  logic [N_PORTS-1:0] space_ok [N_PORTS];
  // VOQ <-> crossbar / scheduler
  logic [N_PORTS-1:0] pkt_avail[N_PORTS];
  logic [N_PORTS-1:0] pkt_more [N_PORTS];
  logic [N_PORTS-1:0] rd_en;
  port_t              rd_sel  [N_PORTS];
  word_t              rd_word [N_PORTS];
  logic [N_PORTS-1:0] in_free, out_free, gnt_valid, pkt_done;
  port_t              gnt_out [N_PORTS];
  // crossbar -> deparser
  logic [N_PORTS-1:0] o_valid, o_ready;
  word_t              o_word [N_PORTS];

  for (genvar i = 0; i < N_PORTS; i++) begin : g_port
    spac_parser #(.PORT_ID(i), .DST_OFF(DST_OFF), .SRC_OFF(SRC_OFF), .FIELD_W(FIELD_W)) u_parser (
      .clk, .rst_n,
      .s_tdata(s_axis_tdata[i]), .s_tkeep(s_axis_tkeep[i]), .s_tlast(s_axis_tlast[i]),
      .s_tvalid(s_axis_tvalid[i]), .s_tready(s_axis_tready[i]),
      .m_flit(p_flit[i]), .m_meta(p_meta[i]), .m_sop(p_sop[i]),
      .m_valid(p_valid[i]), .m_ready(p_ready[i])
    );

    spac_ingress #(.N_PORTS(N_PORTS), .PORT_ID(i)) u_ingress (
      .clk, .rst_n,
      .p_flit(p_flit[i]), .p_meta(p_meta[i]), .p_sop(p_sop[i]),
      .p_valid(p_valid[i]), .p_ready(p_ready[i]),
      .ft_req_valid(ft_req_valid[i]), .ft_req_dst(ft_req_dst[i]), .ft_req_src(ft_req_src[i]),
      .ft_req_ready(ft_req_ready[i]), .ft_resp_valid(ft_resp_valid[i]),
      .ft_resp_hit(ft_resp_hit[i]), .ft_resp_port(ft_resp_port[i]),
      .wr_valid(wr_valid[i]), .wr_word(wr_word[i]), .wr_mask(wr_mask[i]), .space_ok(space_ok[i]),
      .ev_bcast(ev_bcast[i]), .ev_drop(ev_drop[i]), .ev_filter(ev_filter[i])
    );

    if (VOQ_KIND == VOQ_SHARED) begin : g_shared
      spac_voq_shared #(.N_PORTS(N_PORTS), .DEPTH(SHARED_DEPTH), .MAX_PKT_FLITS(MAX_PKT_FLITS)) u_voq (
        .clk, .rst_n,
        .wr_valid(wr_valid[i]), .wr_word(wr_word[i]), .wr_mask(wr_mask[i]), .space_ok(space_ok[i]),
        .pkt_avail(pkt_avail[i]), .pkt_more(pkt_more[i]),
        .rd_en(rd_en[i]), .rd_sel(rd_sel[i]), .rd_word(rd_word[i])
      );
    end else begin : g_nxn
      spac_voq_nxn #(.N_PORTS(N_PORTS), .DEPTH(NXN_DEPTH), .MAX_PKT_FLITS(MAX_PKT_FLITS)) u_voq (
        .clk, .rst_n,
        .wr_valid(wr_valid[i]), .wr_word(wr_word[i]), .wr_mask(wr_mask[i]), .space_ok(space_ok[i]),
        .pkt_avail(pkt_avail[i]), .pkt_more(pkt_more[i]),
        .rd_en(rd_en[i]), .rd_sel(rd_sel[i]), .rd_word(rd_word[i])
      );
    end

    spac_deparser #(.DST_OFF(DST_OFF), .SRC_OFF(SRC_OFF), .FIELD_W(FIELD_W),
                    .BUF_DEPTH(OUT_BUF_DEPTH)) u_deparser (
      .clk, .rst_n,
      .i_valid(o_valid[i]), .i_word(o_word[i]), .i_ready(o_ready[i]),
      .m_tdata(m_axis_tdata[i]), .m_tkeep(m_axis_tkeep[i]), .m_tlast(m_axis_tlast[i]),
      .m_tvalid(m_axis_tvalid[i]), .m_tready(m_axis_tready[i])
    );

    assign ev_pkt_out[i] = m_axis_tvalid[i] && m_axis_tready[i] && m_axis_tlast[i];
  end

  // ---- forward table ----
  if (FWD_KIND == FWD_FULL_LUT) begin : g_lut
    spac_fwd_full_lut #(.N_PORTS(N_PORTS), .IDX_W(LUT_IDX_W)) u_fwd (
      .clk, .rst_n,
      .req_valid(ft_req_valid), .req_dst(ft_req_dst), .req_src(ft_req_src), .req_ready(ft_req_ready),
      .resp_valid(ft_resp_valid), .resp_hit(ft_resp_hit), .resp_port(ft_resp_port)
    );
    assign ev_fwd_stall = '0;
  end else begin : g_hash
    logic conflict [N_PORTS];
    spac_fwd_hash #(.N_PORTS(N_PORTS), .N_BANKS(HASH_BANKS), .ROWS(HASH_ROWS)) u_fwd (
      .clk, .rst_n,
      .req_valid(ft_req_valid), .req_dst(ft_req_dst), .req_src(ft_req_src), .req_ready(ft_req_ready),
      .resp_valid(ft_resp_valid), .resp_hit(ft_resp_hit), .resp_port(ft_resp_port),
      .conflict(conflict)
    );
    for (genvar i = 0; i < N_PORTS; i++) begin : g_c
      assign ev_fwd_stall[i] = conflict[i];
    end
  end

  // ---- scheduler ----
  if (SCHED_KIND == SCHED_RR) begin : g_rr
    spac_sched_rr #(.N_PORTS(N_PORTS)) u_sched (
      .clk, .rst_n, .req(pkt_avail), .in_free, .out_free, .gnt_valid, .gnt_out);
  end else if (SCHED_KIND == SCHED_EDRRM) begin : g_edrrm
    spac_sched_edrrm #(.N_PORTS(N_PORTS)) u_sched (
      .clk, .rst_n, .req(pkt_avail), .in_free, .out_free, .gnt_valid, .gnt_out);
  end else begin : g_islip
    spac_sched_islip #(.N_PORTS(N_PORTS), .ITERS(ISLIP_ITERS)) u_sched (
      .clk, .rst_n, .req(pkt_avail), .in_free, .out_free, .gnt_valid, .gnt_out);
  end

  // ---- switching fabric ----
  spac_crossbar #(.N_PORTS(N_PORTS), .EXHAUSTIVE(SCHED_KIND == SCHED_EDRRM)) u_xbar (
    .clk, .rst_n,
    .gnt_valid, .gnt_out, .in_free, .out_free,
    .rd_en, .rd_sel, .rd_word, .pkt_more, .pkt_done,
    .o_valid, .o_word, .o_ready
  );

endmodule
