// spac_pkg: types and constants shared by every block of the SPAC switch.
//
// The switch moves packets as streams of DATA_W-bit flits (the paper's
// "SPAC Ethernet" configuration uses a 512-bit datapath) next to a MetaData
// side channel that carries the header fields the parser extracted (here the
// routing key: destination and source address) and the ingress port.
// Architecture policies of the paper (forward table, VOQ buffer, scheduler)
// are enums so that the top level can select the variant at elaboration time.
// The flit width is a package constant because the flit and meta structs
// are shared by all modules; the other sizes are module parameters.
package spac_pkg;

  // Datapath width of the switch (Table I, SPAC Ethernet: 512 bits).
  localparam int unsigned DATA_W = 512;
  localparam int unsigned KEEP_W = DATA_W / 8;
  // Widest address field the meta channel can hold (48-bit Ethernet MAC).
  localparam int unsigned ADDR_W = 48;
  // Port index width: up to 32 ports (the largest evaluated network has 32 nodes).
  localparam int unsigned PORT_W = 5;
  localparam int unsigned MAX_PORTS = 1 << PORT_W;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [PORT_W-1:0] port_t;

  // One AXI-Stream beat.
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [KEEP_W-1:0] keep;
    logic              last;
  } flit_t;

  // MetaData side channel (valid on the first flit of a packet).
  typedef struct packed {
    addr_t dst;      // routing key: destination address
    addr_t src;      // source address, learnt by the forward table
    port_t in_port;  // ingress port
  } meta_t;

  // One buffered word: flit plus the packet's meta.
  typedef struct packed {
    flit_t flit;
    meta_t meta;
  } word_t;

  // Architecture policies (Fig. 2: Forward Table, VOQ Buffer, Scheduler).
  typedef enum logic [1:0] {FWD_FULL_LUT = 2'd0, FWD_MULTI_HASH = 2'd1} fwd_kind_e;
  typedef enum logic [1:0] {VOQ_NXN = 2'd0, VOQ_SHARED = 2'd1} voq_kind_e;
  typedef enum logic [1:0] {SCHED_RR = 2'd0, SCHED_ISLIP = 2'd1, SCHED_EDRRM = 2'd2} sched_kind_e;

  // First set bit of req at or after position ptr (cyclic), n bits used.
  // Returns found flag in bit PORT_W and the index below it.
  function automatic logic [PORT_W:0] rr_pick(input logic [MAX_PORTS-1:0] req,
                                               input port_t ptr, input int unsigned n);
    logic [PORT_W:0] res;
    int unsigned idx;
    res = '0;
    for (int unsigned k = 0; k < MAX_PORTS; k++) begin
      if (k < n) begin
        idx = (int'(ptr) + k) % n;
        if (!res[PORT_W] && req[idx]) begin
          res[PORT_W]     = 1'b1;
          res[PORT_W-1:0] = port_t'(idx);
        end
      end
    end
    return res;
  endfunction

endpackage
