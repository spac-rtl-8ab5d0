// tb_spac_wl_run: one workload run on one spac_switch configuration, used by
// tb_spac_workloads.  The switch is built with the architecture the evaluated
// application selects (forward table, VOQ and scheduler kinds, port count,
// header layout) and driven with that application's packet sizes.
//
// Each host owns the address HOST0 + i.  Packets carry the destination and
// source addresses in the header fields, a packet id in bits 127:96 of the
// first flit and random data elsewhere; tkeep marks the real bytes of the
// last flit.  Phases:
//   1. each host floods one packet to an address nobody owns (learning);
//   2. PATTERN 0: uniform random unicast, NPKT packets;
//      PATTERN 1: gather/scatter as in a parameter-server step: hosts 1..N-1
//      each send ROUNDS packets to host 0, and host 0 sends ROUNDS packets to
//      every other host, all queued at once.
// Every output packet is compared word for word with what was sent, must
// reach an expected port once and keep the order of its (input, output)
// pair.  At the end all packets are delivered or dropped whole, and the drop
// count matches the switch's drop events.  Reported: mean and max latency
// (first flit in to first flit out, cycles), flits per cycle, and b2b, the
// packets that left an output right after a packet of the same input with no
// idle cycle between them (only exhaustive service produces this).
`timescale 1ns/1ps
module tb_spac_wl_run
  import spac_pkg::*;
#(
  parameter string       NAME       = "wl",
  parameter int unsigned N          = 8,
  parameter fwd_kind_e   FWD        = FWD_FULL_LUT,
  parameter voq_kind_e   VOQ        = VOQ_NXN,
  parameter sched_kind_e SCHED      = SCHED_RR,
  parameter int unsigned FIELD_W    = 8,      // address field width (bits)
  parameter int unsigned PKT_BYTES  = 26,     // header + payload bytes
  parameter int unsigned PATTERN    = 0,
  parameter int unsigned NPKT       = 400,
  parameter int unsigned ROUNDS     = 3
) (
  input  logic clk,
  output logic done
);
  localparam int unsigned SRC_OFF = FIELD_W;
  localparam int unsigned FLITS   = (PKT_BYTES + KEEP_W - 1) / KEEP_W;
  localparam int unsigned LASTB   = PKT_BYTES - (FLITS - 1) * KEEP_W;
  localparam logic [47:0] HOST0   = 48'h10;
  localparam logic [47:0] NOBODY  = 48'hC0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s: %s at %0t", NAME, what, $time); end
  endtask

  logic rst_n = 0;
  logic [DATA_W-1:0] s_axis_tdata [N], m_axis_tdata [N];
  logic [KEEP_W-1:0] s_axis_tkeep [N], m_axis_tkeep [N];
  logic [N-1:0] s_axis_tlast, s_axis_tvalid, s_axis_tready;
  logic [N-1:0] m_axis_tlast, m_axis_tvalid, m_axis_tready;
  logic [N-1:0] ev_bcast, ev_drop, ev_filter, ev_fwd_stall, ev_pkt_out;

  spac_switch #(
    .N_PORTS(N), .FWD_KIND(FWD), .VOQ_KIND(VOQ), .SCHED_KIND(SCHED),
    .DST_OFF(0), .SRC_OFF(SRC_OFF), .FIELD_W(FIELD_W)
  ) dut (.*);

  assign m_axis_tready = '1;

  function automatic logic [47:0] host(input int i);
    return HOST0 + 48'(i);
  endfunction

  localparam int MAXPKT = 1200;
  logic [DATA_W-1:0] pdata [MAXPKT][FLITS];
  int                psrc  [MAXPKT];
  longint            ptx   [MAXPKT];
  logic [N-1:0]      pmask [MAXPKT];
  logic [N-1:0]      pgot  [MAXPKT];
  int                npkt = 0;
  int                txq [N][$];
  int                last_id [N][N];
  longint            cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int make_pkt(input int src, input logic [47:0] dst, input logic [N-1:0] mask);
    int id;
    id = npkt++;
    psrc[id] = src; pmask[id] = mask; pgot[id] = '0;
    for (int k = 0; k < FLITS; k++)
      for (int w = 0; w < DATA_W / 32; w++) pdata[id][k][w*32 +: 32] = $urandom;
    pdata[id][0][FIELD_W-1:0]         = dst[FIELD_W-1:0];
    pdata[id][0][SRC_OFF +: FIELD_W]  = host(src)[FIELD_W-1:0];
    pdata[id][0][127:96]              = id;
    return id;
  endfunction

  for (genvar i = 0; i < N; i++) begin : g_drv
    initial begin
      s_axis_tvalid[i] = 0; s_axis_tlast[i] = 0; s_axis_tdata[i] = '0; s_axis_tkeep[i] = '0;
      wait (rst_n);
      forever begin
        if (txq[i].size() == 0) begin @(posedge clk); #1; end
        else begin
          int id;
          id = txq[i].pop_front();
          for (int k = 0; k < FLITS; k++) begin
            s_axis_tvalid[i] = 1; s_axis_tdata[i] = pdata[id][k];
            s_axis_tlast[i] = (k == FLITS - 1);
            s_axis_tkeep[i] = (k == FLITS - 1) ? KEEP_W'((65'(1) << LASTB) - 1) : '1;
            @(negedge clk);
            while (!s_axis_tready[i]) @(negedge clk);
            if (k == 0) ptx[id] = cyc;
            @(posedge clk);
            #1 s_axis_tvalid[i] = 0;
          end
        end
      end
    end
  end

  int delivered = 0, b2b = 0, out_flits = 0;
  longint lat_sum = 0, lat_max = 0;
  for (genvar j = 0; j < N; j++) begin : g_mon
    logic [DATA_W-1:0] rx [$];
    longint t_first;
    longint prev_end = -10;     // cycle of the previous packet's last flit
    int     prev_src = -1;
    always @(posedge clk) if (rst_n) begin
      if (m_axis_tvalid[j] && m_axis_tready[j]) begin
        out_flits++;
        if (rx.size() == 0) t_first = cyc;
        rx.push_back(m_axis_tdata[j]);
        check(m_axis_tkeep[j] == (m_axis_tlast[j] ? KEEP_W'((65'(1) << LASTB) - 1) : '1), "keep");
        if (m_axis_tlast[j]) begin
          int id; bit same;
          id = int'(rx[0][127:96]);
          if (id >= npkt) check(0, "unknown packet id");
          else begin
            same = (rx.size() == FLITS);
            for (int k = 0; k < rx.size() && same; k++) same = (rx[k] == pdata[id][k]);
            check(same, "packet content");
            check(pmask[id][j], "delivered to an expected port");
            check(!pgot[id][j], "delivered once");
            check(id > last_id[psrc[id]][j], "order per input/output pair");
            last_id[psrc[id]][j] = id;
            pgot[id][j] = 1'b1;
            delivered++;
            lat_sum += t_first - ptx[id];
            if (t_first - ptx[id] > lat_max) lat_max = t_first - ptx[id];
            if (t_first == prev_end + 1 && psrc[id] == prev_src) b2b++;
            prev_src = psrc[id];
          end
          prev_end = cyc;
          rx.delete();
        end
      end
    end
  end

  int n_bcast = 0, n_drop = 0, n_filter = 0, n_conflict = 0;
  always @(posedge clk) if (rst_n) begin
    n_bcast    += $countones(ev_bcast);
    n_drop     += $countones(ev_drop);
    n_filter   += $countones(ev_filter);
    n_conflict += $countones(ev_fwd_stall);
  end

  task automatic wait_idle(input int max_cycles);
    int c = 0, quiet = 0;
    while (quiet < 40 && c < max_cycles) begin
      bit busy;
      @(posedge clk);
      c++;
      busy = (s_axis_tvalid != '0) || (m_axis_tvalid != '0);
      for (int i = 0; i < N; i++) if (txq[i].size() > 0) busy = 1;
      quiet = busy ? 0 : quiet + 1;
    end
  endtask

  initial begin
    longint t0, t1;
    done = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) last_id[i][j] = -1;
    repeat (5) @(posedge clk);
    #1 rst_n = 1;
    repeat (5) @(posedge clk);

    for (int i = 0; i < N; i++) begin
      int id;
      id = make_pkt(i, NOBODY + 48'(i), ~(N'(1) << i));
      txq[i].push_back(id);
      wait_idle(5000);
    end
    check(n_bcast == N, "one flood per host while learning");

    t0 = cyc;
    out_flits = 0;
    if (PATTERN == 0) begin
      for (int n = 0; n < NPKT; n++) begin
        int s, d, id;
        s = $urandom_range(0, N - 1);
        do d = $urandom_range(0, N - 1); while (d == s);
        id = make_pkt(s, host(d), N'(1) << d);
        txq[s].push_back(id);
      end
    end else begin
      for (int r = 0; r < ROUNDS; r++)
        for (int i = 1; i < N; i++) begin
          int id;
          id = make_pkt(i, host(0), N'(1));
          txq[i].push_back(id);
          id = make_pkt(0, host(i), N'(1) << i);
          txq[0].push_back(id);
        end
    end
    wait_idle(400000);
    t1 = cyc - 40;

    begin
      int dropped = 0, partial = 0;
      for (int id = 0; id < npkt; id++) begin
        if (pgot[id] == pmask[id]) ;
        else if (pgot[id] == '0) dropped++;
        else partial++;
      end
      check(partial == 0, "no packet delivered to only part of its outputs");
      check(dropped == n_drop, "undelivered packets are exactly the dropped ones");
      check(n_filter == 0, "no own-port destinations in this traffic");
      check(delivered > 0, "traffic delivered");
      if (SCHED == SCHED_EDRRM && PATTERN == 1) check(b2b > 0, "exhaustive service sends packets back to back");
      if (SCHED != SCHED_EDRRM) check(b2b == 0, "non-exhaustive schedulers release after every packet");
      $display("%s: ports %0d flits/pkt %0d packets %0d delivered %0d dropped %0d bcast %0d conflicts %0d b2b %0d latency mean %0d.%0d max %0d cycles, %0d flits in %0d cycles",
               NAME, N, FLITS, npkt, delivered, n_drop, n_bcast, n_conflict, b2b,
               lat_sum / delivered, (lat_sum * 10 / delivered) % 10, lat_max, out_flits, t1 - t0);
    end
    done = 1;
  end
endmodule
