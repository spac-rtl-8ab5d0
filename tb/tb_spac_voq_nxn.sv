// tb_spac_voq_nxn: self-checking testbench of spac_voq_nxn.
//
// A writer offers random packets (1 to 4 flits) with random destination
// masks, a quarter of them broadcast to every port, and starts a packet only
// when space_ok allows it for every destination, as the ingress stage does.
// A reader picks a queue that pkt_avail reports and reads one whole packet,
// with random pauses.  The testbench keeps one reference queue per output and
// checks every word read (data, last, meta), the pkt_avail and pkt_more flags
// every cycle, and that space_ok turned off at least once (queues filled up)
// and that broadcast copies were read from several queues.
`timescale 1ns/1ps
module tb_spac_voq_nxn;
  import spac_pkg::*;
  localparam int N = 8, DEPTH = 16, MAXP = 4, NPKT = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic          wr_valid, rd_en;
  word_t         wr_word, rd_word;
  logic [N-1:0]  wr_mask, space_ok, pkt_avail, pkt_more;
  port_t         rd_sel;

  spac_voq_nxn #(.N_PORTS(N), .DEPTH(DEPTH), .MAX_PKT_FLITS(MAXP)) dut (.*);

  word_t q [N][$];     // reference queues
  int    pk [N];       // complete packets per queue
  int    full_seen = 0, bcast_reads = 0, written = 0, readp = 0;

  // writer state
  int w_left = 0; logic [N-1:0] w_mask; int w_id = 0;
  // reader state
  bit r_busy = 0; int r_q = 0;

  initial begin
    wr_valid = 0; rd_en = 0; wr_word = '0; wr_mask = '0; rd_sel = '0;
    for (int j = 0; j < N; j++) pk[j] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (readp < NPKT) begin
      @(negedge clk);
      // status flags against the model
      for (int j = 0; j < N; j++) begin
        check(pkt_avail[j] == (pk[j] > 0), "pkt_avail");
        check(pkt_more[j] == (pk[j] > 1), "pkt_more");
        check(space_ok[j] == (DEPTH - q[j].size() >= MAXP), "space_ok");
        if (!space_ok[j]) full_seen++;
      end
      // writer
      wr_valid = 0;
      if (w_left == 0 && written < NPKT && $urandom_range(0, 3) != 0) begin
        logic [N-1:0] m;
        m = ($urandom_range(0, 3) == 0) ? '1 : (N'(1) << $urandom_range(0, N - 1));
        if ((m & ~space_ok) == '0) begin
          w_mask = m; w_left = $urandom_range(1, MAXP); w_id++; written++;
        end
      end
      if (w_left > 0 && $urandom_range(0, 4) != 0) begin
        wr_valid = 1;
        wr_mask = w_mask;
        wr_word = '0;
        wr_word.flit.data = {16{$urandom}};
        wr_word.flit.keep = '1;
        wr_word.flit.last = (w_left == 1);
        wr_word.meta.src  = addr_t'(w_id);
        wr_word.meta.dst  = addr_t'(w_mask);
      end
      // reader
      rd_en = 0;
      if (!r_busy) begin
        int s;
        s = $urandom_range(0, N - 1);
        for (int k = 0; k < N; k++) if (!r_busy && pk[(s + k) % N] > 0) begin
          r_busy = 1; r_q = (s + k) % N;
        end
      end
      if (r_busy && $urandom_range(0, 3) != 0) begin
        rd_en = 1;
        rd_sel = port_t'(r_q);
        #1;
        check(q[r_q].size() > 0 && rd_word == q[r_q][0], "read word");
      end
      @(posedge clk);
      #1;
      // model update
      if (wr_valid) for (int j = 0; j < N; j++) if (wr_mask[j]) begin
        q[j].push_back(wr_word);
        if (wr_word.flit.last) pk[j]++;
      end
      if (wr_valid) w_left--;
      if (rd_en) begin
        word_t w;
        w = q[r_q].pop_front();
        if (w.flit.last) begin
          pk[r_q]--; r_busy = 0; readp++;
          if (w.meta.dst[N-1:0] == '1) bcast_reads++;
        end
      end
      rd_en = 0; wr_valid = 0;
    end
    check(full_seen > 0, "queues filled up (space_ok low)");
    check(bcast_reads > 20, "broadcast copies read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: read %0d", readp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
