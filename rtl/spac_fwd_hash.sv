// spac_fwd_hash: Multi-Bank Hash Table variant of the SPAC forward table.
//
// The table is N_BANKS banks of ROWS entries {valid, stored address, port}.
// Hash function 1 (XOR-fold of the address to BANK_W bits) picks the bank,
// hash function 2 (XOR-fold of the address shifted right by BANK_W, to ROW_W
// bits) picks the row; a lookup hits when the row is valid and its stored
// address equals the queried one.  Each bank serves one lookup and one learn
// per cycle.  When several ports address the same bank, a round-robin arbiter
// per bank (one for lookups, one for learns) grants one port; the others are
// held (req_ready low) and retry next cycle: this is the conflict resolution.
// A learn overwrites its row (the newest address wins).
//
// Interface (per port i): req_valid/req_ready handshake with dst and src held
// stable until accepted; the response arrives the cycle after acceptance.
// With no bank conflict a request is accepted in the cycle it is presented.
// conflict[i] flags a cycle in which port i was held by a bank conflict.
// Banks, two hash functions and the entry format follow the paper's figure;
// the hash functions, the bank and row counts, the arbiters and the
// replacement rule are this design's choices.
module spac_fwd_hash
  import spac_pkg::*;
#(
  parameter int unsigned N_PORTS = 8,
  parameter int unsigned N_BANKS = 8,   // power of two
  parameter int unsigned ROWS    = 64   // power of two
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid [N_PORTS],
  input  addr_t req_dst   [N_PORTS],
  input  addr_t req_src   [N_PORTS],
  output logic  req_ready [N_PORTS],
  output logic  resp_valid[N_PORTS],
  output logic  resp_hit  [N_PORTS],
  output port_t resp_port [N_PORTS],
  output logic  conflict  [N_PORTS]
);

  localparam int unsigned BANK_W = (N_BANKS > 1) ? $clog2(N_BANKS) : 1;
  localparam int unsigned ROW_W  = (ROWS > 1) ? $clog2(ROWS) : 1;

  typedef struct packed {
    logic  valid;
    addr_t addr;
    port_t port;
  } entry_t;

  // Hash function 1: bank index.
  function automatic logic [BANK_W-1:0] hash_bank(input addr_t a);
    logic [BANK_W-1:0] h;
    h = '0;
    for (int unsigned k = 0; k < ADDR_W; k++) h[k % BANK_W] ^= a[k];
    return h;
  endfunction

  // Hash function 2: row index inside the bank.
  function automatic logic [ROW_W-1:0] hash_row(input addr_t a);
    logic [ROW_W-1:0] h;
    h = '0;
    for (int unsigned k = BANK_W; k < ADDR_W; k++) h[(k - BANK_W) % ROW_W] ^= a[k];
    return h;
  endfunction

  entry_t mem [N_BANKS][ROWS];

  logic [N_PORTS-1:0] lk_done, ln_done;     // phases already served
  logic               hit_q  [N_PORTS];     // lookup result held while learning waits
  port_t              port_q [N_PORTS];
  port_t              lk_ptr [N_BANKS];     // round-robin pointers per bank
  port_t              ln_ptr [N_BANKS];

  logic [BANK_W-1:0] lk_bank [N_PORTS], ln_bank [N_PORTS];
  logic [ROW_W-1:0]  lk_row  [N_PORTS], ln_row  [N_PORTS];
  logic [N_PORTS-1:0] lk_gnt, ln_gnt;
  logic              lk_hit  [N_PORTS];
  port_t             lk_port [N_PORTS];

  always_comb begin
    logic [MAX_PORTS-1:0] lk_req, ln_req;
    logic [PORT_W:0]      pick;
    entry_t               e;
    lk_gnt = '0;
    ln_gnt = '0;
    for (int unsigned i = 0; i < N_PORTS; i++) begin
      lk_bank[i] = hash_bank(req_dst[i]);
      ln_bank[i] = hash_bank(req_src[i]);
      lk_row[i]  = hash_row(req_dst[i]);
      ln_row[i]  = hash_row(req_src[i]);
    end
    for (int unsigned b = 0; b < N_BANKS; b++) begin
      lk_req = '0;
      ln_req = '0;
      for (int unsigned i = 0; i < N_PORTS; i++) begin
        lk_req[i] = req_valid[i] && !lk_done[i] && (lk_bank[i] == BANK_W'(b));
        ln_req[i] = req_valid[i] && !ln_done[i] && (ln_bank[i] == BANK_W'(b));
      end
      pick = rr_pick(lk_req, lk_ptr[b], N_PORTS);
      if (pick[PORT_W]) lk_gnt[pick[PORT_W-1:0]] = 1'b1;
      pick = rr_pick(ln_req, ln_ptr[b], N_PORTS);
      if (pick[PORT_W]) ln_gnt[pick[PORT_W-1:0]] = 1'b1;
    end
    for (int unsigned i = 0; i < N_PORTS; i++) begin
      e          = mem[lk_bank[i]][lk_row[i]];
      lk_hit[i]  = e.valid && (e.addr == req_dst[i]);
      lk_port[i] = e.port;
      req_ready[i] = req_valid[i] && (lk_done[i] || lk_gnt[i]) && (ln_done[i] || ln_gnt[i]);
      conflict[i]  = req_valid[i] && !req_ready[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned b = 0; b < N_BANKS; b++) begin
        lk_ptr[b] <= '0;
        ln_ptr[b] <= '0;
        for (int unsigned r = 0; r < ROWS; r++) mem[b][r] <= '0;
      end
      lk_done <= '0;
      ln_done <= '0;
      for (int unsigned i = 0; i < N_PORTS; i++) begin
        hit_q[i]      <= 1'b0;
        port_q[i]     <= '0;
        resp_valid[i] <= 1'b0;
        resp_hit[i]   <= 1'b0;
        resp_port[i]  <= '0;
      end
    end else begin
      for (int unsigned i = 0; i < N_PORTS; i++) begin
        resp_valid[i] <= req_ready[i];
        if (lk_gnt[i]) begin
          hit_q[i]  <= lk_hit[i];
          port_q[i] <= lk_port[i];
          lk_ptr[lk_bank[i]] <= port_t'((i + 1) % N_PORTS);
        end
        if (ln_gnt[i]) begin
          mem[ln_bank[i]][ln_row[i]] <= '{valid: 1'b1, addr: req_src[i], port: port_t'(i)};
          ln_ptr[ln_bank[i]] <= port_t'((i + 1) % N_PORTS);
        end
        if (req_ready[i]) begin
          lk_done[i]   <= 1'b0;
          ln_done[i]   <= 1'b0;
          resp_hit[i]  <= lk_gnt[i] ? lk_hit[i]  : hit_q[i];
          resp_port[i] <= lk_gnt[i] ? lk_port[i] : port_q[i];
        end else begin
          if (lk_gnt[i]) lk_done[i] <= 1'b1;
          if (ln_gnt[i]) ln_done[i] <= 1'b1;
        end
      end
    end
  end

endmodule
