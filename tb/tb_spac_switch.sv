// tb_spac_switch: end-to-end testbench of spac_switch at its default
// parameters (8 ports, 512-bit flits, multi-bank hash table, N*N VOQs,
// iSLIP), i.e. the general-purpose Ethernet configuration.
//
// Every port has a host with its own MAC address.  Packets carry the
// destination MAC in header bits 47:0, the source MAC in bits 95:48, a packet
// id in bits 127:96 and random data elsewhere.  Each output packet is looked
// up by its id and compared word for word with what was sent; it must arrive
// at a port the testbench expects and only once, and the packets of each
// (input, output) pair must leave in the order they were sent.
//   1. single packet latency: one 1-flit packet to an unknown address;
//   2. learning: each host floods one packet, which must reach all 7 others;
//   3. filtering: packets addressed to the sender's own port;
//   4. random unicast traffic, lengths 1..24 flits, random egress stalls;
//   5. throughput: one port streams 24-flit packets to another;
//   6. incast: port 0 is blocked while all others send to it (VOQs fill,
//      packets are dropped, same-bank lookups conflict) and to port 1 (those
//      must still be delivered: no head-of-line blocking); then port 0 opens.
// At the end every packet was delivered to all its expected outputs or
// dropped whole, and the drop count equals the switch's drop events.  Each
// mechanism (flooding, filtering, drop, hash conflict, egress stall, ingress
// back-pressure, HoL bypass) is counted and must have occurred.
`timescale 1ns/1ps
module tb_spac_switch;
  import spac_pkg::*;
  localparam int N = 8;
  localparam int MAXF = 24;
  localparam logic [47:0] BASE = 48'h02_00_5E_10_00_00;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [DATA_W-1:0] s_axis_tdata [N], m_axis_tdata [N];
  logic [KEEP_W-1:0] s_axis_tkeep [N], m_axis_tkeep [N];
  logic [N-1:0] s_axis_tlast, s_axis_tvalid, s_axis_tready;
  logic [N-1:0] m_axis_tlast, m_axis_tvalid, m_axis_tready;
  logic [N-1:0] ev_bcast, ev_drop, ev_filter, ev_fwd_stall, ev_pkt_out;

  spac_switch dut (.*);

  function automatic logic [47:0] mac(input int i);
    return BASE | (48'(i) << 3);
  endfunction

  // ---------------- packet store ----------------
  localparam int MAXPKT = 4000;
  logic [DATA_W-1:0] pdata [MAXPKT][MAXF];
  int                plen  [MAXPKT];
  int                psrc  [MAXPKT];
  logic [N-1:0]      pmask [MAXPKT];   // expected outputs
  logic [N-1:0]      pgot  [MAXPKT];   // outputs that delivered it
  int                npkt = 0;
  int                txq [N][$];       // ids waiting to be sent per input
  int                last_id [N][N];   // last id delivered per (input, output)

  function automatic int make_pkt(input int src, input logic [47:0] dst, input int len,
                                  input logic [N-1:0] mask);
    int id;
    id = npkt++;
    plen[id] = len; psrc[id] = src; pmask[id] = mask; pgot[id] = '0;
    for (int k = 0; k < len; k++)
      for (int w = 0; w < DATA_W / 32; w++) pdata[id][k][w*32 +: 32] = $urandom;
    pdata[id][0][47:0]   = dst;
    pdata[id][0][95:48]  = mac(src);
    pdata[id][0][127:96] = id;
    return id;
  endfunction

  // ---------------- drivers ----------------
  int ingress_bp = 0;    // cycles a flit waited for s_axis_tready
  for (genvar i = 0; i < N; i++) begin : g_drv
    initial begin
      s_axis_tvalid[i] = 0; s_axis_tlast[i] = 0; s_axis_tdata[i] = '0; s_axis_tkeep[i] = '0;
      wait (rst_n);
      forever begin
        if (txq[i].size() == 0) begin @(posedge clk); #1; end
        else begin
          int id;
          id = txq[i].pop_front();
          for (int k = 0; k < plen[id]; k++) begin
            s_axis_tvalid[i] = 1; s_axis_tdata[i] = pdata[id][k];
            s_axis_tkeep[i] = '1; s_axis_tlast[i] = (k == plen[id] - 1);
            @(negedge clk);
            while (!s_axis_tready[i]) begin ingress_bp++; @(negedge clk); end
            @(posedge clk);
            #1 s_axis_tvalid[i] = 0;
          end
        end
      end
    end
  end

  // ---------------- monitors ----------------
  int stall_prob = 0;          // percent of cycles an egress port is not ready
  logic [N-1:0] block = '0;    // egress ports held not ready
  int egress_stall = 0, delivered = 0, hol_bypass = 0;
  int pend_to0 [N];            // packets of input i queued for blocked port 0
  always @(posedge clk)
    for (int j = 0; j < N; j++)
      m_axis_tready[j] <= !block[j] && ($urandom_range(0, 99) >= stall_prob);

  for (genvar j = 0; j < N; j++) begin : g_mon
    logic [DATA_W-1:0] rx [$];
    always @(posedge clk) if (rst_n) begin
      if (m_axis_tvalid[j] && !m_axis_tready[j]) egress_stall++;
      if (m_axis_tvalid[j] && m_axis_tready[j]) begin
        rx.push_back(m_axis_tdata[j]);
        check(m_axis_tkeep[j] == '1, "keep");
        if (m_axis_tlast[j]) begin
          int id; bit same;
          id = int'(rx[0][127:96]);
          if (id >= npkt) check(0, "unknown packet id");
          else begin
            same = (rx.size() == plen[id]);
            for (int k = 0; k < rx.size() && same; k++) same = (rx[k] == pdata[id][k]);
            check(same, "packet content");
            check(pmask[id][j], "delivered to an expected port");
            check(!pgot[id][j], "delivered once");
            check(id > last_id[psrc[id]][j], "order per input/output pair");
            last_id[psrc[id]][j] = id;
            pgot[id][j] = 1'b1;
            delivered++;
            if (block[0] && j == 1 && pend_to0[psrc[id]] > 0) hol_bypass++;
          end
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
    int c = 0;
    int quiet = 0;
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
    for (int i = 0; i < N; i++) begin
      pend_to0[i] = 0;
      for (int j = 0; j < N; j++) last_id[i][j] = -1;
    end
    repeat (5) @(posedge clk);
    #1 rst_n = 1;
    repeat (5) @(posedge clk);

    // 1. latency of a single 1-flit packet, no contention
    begin
      int id, t0, t1;
      id = make_pkt(0, 48'hFFFF_FFFF_FFFE, 1, 8'hFE);
      @(negedge clk);
      txq[0].push_back(id);
      @(posedge clk);
      t0 = $time;
      wait (m_axis_tvalid[1]);
      t1 = $time;
      $display("single-flit port-to-port latency: %0d cycles", (t1 - t0) / 10 + 1);
      check((t1 - t0) / 10 + 1 <= 10, "latency within the 10 cycles of 68.3 ns at 146 MHz");
      wait_idle(2000);
    end

    // 2. learning: every host floods once (destination unknown)
    for (int i = 1; i < N; i++) begin
      int id;
      id = make_pkt(i, 48'hFFFF_FFFF_FFF0 | 48'(i), $urandom_range(1, 4), ~(N'(1) << i));
      txq[i].push_back(id);
      wait_idle(2000);
    end

    // 3. filtering: destination on the sender's own port
    for (int i = 0; i < N; i += 3) begin
      int id;
      id = make_pkt(i, mac(i), 2, '0);
      txq[i].push_back(id);
    end
    wait_idle(2000);

    // 4. random unicast with egress stalls
    stall_prob = 30;
    for (int n = 0; n < 1500; n++) begin
      int s, d, id;
      s = $urandom_range(0, N - 1);
      do d = $urandom_range(0, N - 1); while (d == s);
      id = make_pkt(s, mac(d), $urandom_range(1, MAXF), N'(1) << d);
      txq[s].push_back(id);
    end
    wait_idle(200000);
    stall_prob = 0;

    // 5. throughput: port 2 streams 24-flit packets to port 3
    begin
      int t0, t1, id0, cnt;
      cnt = 40;
      id0 = npkt;
      for (int n = 0; n < cnt; n++) begin
        int id; id = make_pkt(2, mac(3), MAXF, N'(1) << 3);
        txq[2].push_back(id);
      end
      wait (pgot[id0][3] == 1'b1);
      t0 = $time;
      wait (pgot[id0 + cnt - 1][3] == 1'b1);
      t1 = $time;
      $display("stream throughput: %0d flits in %0d cycles", (cnt - 1) * MAXF, (t1 - t0) / 10);
      check((cnt - 1) * MAXF * 100 / ((t1 - t0) / 10) >= 85, "throughput >= 0.85 flit/cycle");
      wait_idle(20000);
    end

    // 6. incast into a blocked port 0, with traffic to port 1 alongside
    block[0] = 1'b1;
    for (int r = 0; r < 6; r++)
      for (int i = 1; i < N; i++) begin
        int id;
        id = make_pkt(i, mac(0), MAXF, N'(1) << 0);
        txq[i].push_back(id);
        pend_to0[i]++;
        if (i != 1) begin
          id = make_pkt(i, mac(1), $urandom_range(1, 8), N'(1) << 1);
          txq[i].push_back(id);
        end
      end
    repeat (3000) @(posedge clk);
    block[0] = 1'b0;
    for (int i = 0; i < N; i++) pend_to0[i] = 0;
    wait_idle(50000);
    repeat (50) @(posedge clk);

    // ---- final accounting ----
    begin
      int lost = 0, dropped = 0, partial = 0;
      for (int id = 0; id < npkt; id++) begin
        if (pgot[id] == pmask[id]) ;
        else if (pgot[id] == '0) dropped++;
        else partial++;
      end
      check(partial == 0, "no packet delivered to only part of its outputs");
      check(dropped == n_drop, "undelivered packets are exactly the dropped ones");
      $display("packets %0d delivered %0d dropped %0d bcast %0d filter %0d conflicts %0d egress-stall %0d ingress-bp %0d hol-bypass %0d",
               npkt, delivered, n_drop, n_bcast, n_filter, n_conflict, egress_stall, ingress_bp, hol_bypass);
      check(n_bcast == N, "flooding of unknown destinations");
      check(n_filter == 3, "filtering of own-port destinations");
      check(n_drop > 0, "drops on full VOQs");
      check(n_conflict > 0, "hash bank conflicts");
      check(egress_stall > 0, "egress stalls");
      check(ingress_bp > 0, "ingress back-pressure");
      check(hol_bypass > 0, "HoL bypass: port 1 served while port 0 blocked");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
