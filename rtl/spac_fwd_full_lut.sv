// spac_fwd_full_lut: Full Lookup Table variant of the SPAC forward table.
//
// A one-dimensional table indexed directly by the (short) address: entry a
// holds a valid bit and the port on which address a was last seen.  The table
// is fully partitioned (a register array), so all N_PORTS ports look up their
// destination and learn their source in the same cycle; req_ready is always
// high.  Because the address is the index, the "stored address" column of the
// paper's figure is implicit and not stored.
//
// Interface (per port i): a request carries dst and src; the response comes
// one cycle after the request with hit and the destination's port.  A learn
// and a lookup of the same entry in the same cycle see the old entry; when
// several ports learn the same address in one cycle the highest port wins.
// Only the low IDX_W address bits are used: this variant is for compressed
// protocols with short addresses, as the paper recommends.  Direct indexing
// and single-cycle multi-port access follow the paper; the 1-cycle registered
// response, the conflict rule and IDX_W are this design's choices.
module spac_fwd_full_lut
  import spac_pkg::*;
#(
  parameter int unsigned N_PORTS = 8,
  parameter int unsigned IDX_W   = 8   // address bits used as the table index
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid [N_PORTS],
  input  addr_t req_dst   [N_PORTS],
  input  addr_t req_src   [N_PORTS],
  output logic  req_ready [N_PORTS],
  output logic  resp_valid[N_PORTS],
  output logic  resp_hit  [N_PORTS],
  output port_t resp_port [N_PORTS]
);

  localparam int unsigned ENTRIES = 1 << IDX_W;

  logic  tbl_valid [ENTRIES];
  port_t tbl_port  [ENTRIES];

  for (genvar i = 0; i < N_PORTS; i++) begin : g_rdy
    assign req_ready[i] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned a = 0; a < ENTRIES; a++) begin
        tbl_valid[a] <= 1'b0;
        tbl_port[a]  <= '0;
      end
      for (int unsigned i = 0; i < N_PORTS; i++) begin
        resp_valid[i] <= 1'b0;
        resp_hit[i]   <= 1'b0;
        resp_port[i]  <= '0;
      end
    end else begin
      for (int unsigned i = 0; i < N_PORTS; i++) begin
        resp_valid[i] <= req_valid[i];
        if (req_valid[i]) begin
          // lookup (reads the table before this cycle's learning)
          resp_hit[i]  <= tbl_valid[req_dst[i][IDX_W-1:0]];
          resp_port[i] <= tbl_port[req_dst[i][IDX_W-1:0]];
          // learn the source address on every arrival
          tbl_valid[req_src[i][IDX_W-1:0]] <= 1'b1;
          tbl_port[req_src[i][IDX_W-1:0]]  <= port_t'(i);
        end
      end
    end
  end

endmodule
