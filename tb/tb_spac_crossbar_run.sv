// tb_spac_crossbar_run: one checked run of spac_crossbar (used twice by
// tb_spac_crossbar, with and without exhaustive service).
//
// The harness models the VOQs of every input as queues of words (random
// packets of 1 to 4 flits, refilled at random), answers rd_sel with the head
// word and pkt_more from the model, and acts as a random scheduler that only
// grants free, requested pairs.  It keeps its own copy of the connection
// state (a grant connects from the next cycle; a connection ends after the
// last flit of a packet unless EXH is set and the same queue still holds a
// packet afterwards) and checks o_valid, o_word, rd_en and pkt_done against it
// every cycle, under random output back-pressure.
`timescale 1ns/1ps
module tb_spac_crossbar_run
  import spac_pkg::*;
#(
  parameter bit EXH = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   held,      // connections kept by exhaustive service
  output int   released,  // connections released after a packet
  output bit   done
);
  localparam int N = 8;

  logic [N-1:0] gnt_valid, in_free, out_free, rd_en, pkt_done, o_valid, o_ready;
  port_t gnt_out [N], rd_sel [N];
  word_t rd_word [N], o_word [N];
  logic [N-1:0] pkt_more [N];

  spac_crossbar #(.N_PORTS(N), .EXHAUSTIVE(EXH)) dut (.*);

  word_t q  [N][N][$];
  int    pk [N][N];
  bit    cv [N];
  int    co [N];
  int    tag = 0, delivered = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s (EXH=%0d) at %0t", what, EXH, $time); end
  endtask

  task automatic add_packet(input int i, input int j);
    int len;
    len = $urandom_range(1, 4);
    for (int k = 0; k < len; k++) begin
      word_t w;
      w = '0;
      w.flit.data = {16{$urandom}};
      w.flit.last = (k == len - 1);
      w.meta.src  = addr_t'(tag++);
      w.meta.in_port = port_t'(i);
      q[i][j].push_back(w);
    end
    pk[i][j]++;
  endtask

  initial begin
    checks = 0; failures = 0; held = 0; released = 0; done = 0;
    gnt_valid = '0; o_ready = '0;
    for (int i = 0; i < N; i++) begin
      cv[i] = 0; co[i] = 0; gnt_out[i] = '0; pkt_more[i] = '0; rd_word[i] = '0;
      for (int j = 0; j < N; j++) pk[i][j] = 0;
    end
    wait (rst_n);
    for (int cyc = 0; cyc < 6000; cyc++) begin
      logic [N-1:0] oused;
      @(negedge clk);
      if (cyc < 5000 && $urandom_range(0, 1) == 0) add_packet($urandom_range(0, N - 1), $urandom_range(0, N - 1));
      o_ready = N'($urandom) | N'($urandom);
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) pkt_more[i][j] = pk[i][j] > 1;
      // random scheduler: free, requested pairs only
      gnt_valid = '0;
      oused = out_free;
      for (int i = 0; i < N; i++) if (in_free[i]) begin
        int s;
        s = $urandom_range(0, N - 1);
        for (int k = 0; k < N; k++) begin
          int j; j = (s + k) % N;
          if (!gnt_valid[i] && oused[j] && pk[i][j] > 0) begin
            gnt_valid[i] = 1; gnt_out[i] = port_t'(j); oused[j] = 0;
          end
        end
      end
      #1;
      for (int i = 0; i < N; i++) rd_word[i] = (q[i][rd_sel[i]].size() > 0) ? q[i][rd_sel[i]][0] : '0;
      #1;
      // check against the model
      for (int i = 0; i < N; i++) begin
        check(in_free[i] == !cv[i], "in_free");
        check(rd_en[i] == (cv[i] && o_ready[co[i]]), "rd_en");
        if (cv[i]) check(int'(rd_sel[i]) == co[i], "rd_sel");
      end
      for (int j = 0; j < N; j++) begin
        int src; src = -1;
        for (int i = 0; i < N; i++) if (cv[i] && co[i] == j) src = i;
        check(o_valid[j] == (src >= 0), "o_valid");
        check(out_free[j] == (src < 0), "out_free");
        if (src >= 0) check(o_word[j] == q[src][j][0], "o_word");
      end
      @(posedge clk);
      #1;
      // model update: transfers, releases, new connections
      for (int i = 0; i < N; i++) begin
        if (cv[i] && o_ready[co[i]]) begin
          word_t w;
          w = q[i][co[i]].pop_front();
          delivered++;
          if (w.flit.last) begin
            pk[i][co[i]]--;
            if (EXH && pk[i][co[i]] > 0) held++;
            else begin cv[i] = 0; released++; end
          end
        end else if (!cv[i] && gnt_valid[i]) begin
          cv[i] = 1; co[i] = int'(gnt_out[i]);
        end
      end
    end
    check(delivered > 3000, "flits delivered");
    done = 1;
  end
endmodule
