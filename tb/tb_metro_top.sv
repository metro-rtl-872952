// tb_metro_top: end-to-end test of the METRO mesh (4 x 4, 128-bit flits).
//
// Nodes are numbered 1..16 row by row as in the paper's examples; node n
// sits at x = (n-1) % 4, y = (n-1) / 4. The testbench plays the compute
// cores: it posts message descriptors with injection times, supplies the
// payload words (word k of message m is {m, k}) and collects what every
// node receives, checking message id, order, length and tail marking.
//
// Phase 1 - hybrid routing and multicast (the paper's Fig. 5 example):
//   node 2 multicasts to 9, 10, 12, 13, 14, 16 with critical nodes 2, 8, 11
//   (path 2-3-4-8-7-11 by dimension-order segments); router 11 forks by its
//   table to 10 and 12, router 10 to 9, 14 and its core, 14 to 13 and its
//   core, 12 to 16 and its core. Node 10's core stops reading for a while,
//   so the fork is held back by credits.
// Phase 2 - priority conflicts without injection time control (Fig. 3):
//   packet 1 (1 -> 11, highest priority), packet 2 (5 -> 15, lowest) and
//   packet 3 (13 -> 2, middle) are injected almost together (packet 2 four
//   cycles later, so that both heads ask router 7 for channel 7-11 in the
//   same cycle and priority decides); 1 and 2 meet on channel 7-11, 2 and 3 on channel 5-6, and packet 3 is delayed behind the
//   blocked packet 2.
// Phase 3 - the same three packets with injection time control: packet 2's
//   injection time is set after packet 1 has left channel 7-11, so packet 3
//   is no longer blocked. Packet 3's latency must be lower than in phase 2.
// Phase 4 - a message whose destination has no table entry is ejected there
//   and flagged as a table miss.
// Every mechanism (both routing modes, multicast fork, priority blocking,
// credit stall, injection waiting, table miss) is counted; one that never
// happens is a failure.
module tb_metro_top;
  import metro_pkg::*;
  localparam int K = 4, NN = K * K, DW = 128, LE = 8, TW = 32, LW = 16;
  logic clk = 0, rst_n = 0;
  logic [TW-1:0] time_now;
  logic cfg_we, cfg_valid;
  node_t cfg_node;
  logic [$clog2(LE)-1:0] cfg_idx;
  msg_id_t cfg_msg_id;
  port_mask_t cfg_mask;
  logic [NN-1:0] desc_valid, desc_ready, pay_valid, pay_ready, rx_valid, rx_ready, rx_last;
  logic [TW-1:0] desc_time [NN];
  head_t desc_hdr [NN];
  logic [LW-1:0] desc_len [NN];
  logic [DW-1:0] pay_data [NN], rx_data [NN];
  msg_id_t rx_msg_id [NN];
  port_mask_t stat_alg_route [NN], stat_lut_route [NN], stat_lut_miss [NN], stat_sa_blocked [NN], stat_credit_stall [NN];
  logic [NN-1:0] stat_inj_wait, stat_inj_head;

  metro_top #(.MESH_K(K), .DATA_W(DW), .BUF_DEPTH(8), .LUT_ENTRIES(LE), .DESC_DEPTH(4),
              .TIME_W(TW), .LEN_W(LW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic node_t nd(int n1);
    node_t r; r.x = 4'((n1 - 1) % K); r.y = 4'((n1 - 1) / K); return r;
  endfunction

  // ---------------- core models ----------------
  int     post_id  [NN][$];
  int     post_len [NN][$];
  int     pay_k    [NN];
  logic [NN-1:0] hold_rx = '0;

  always_comb begin
    for (int n = 0; n < NN; n++) begin
      pay_valid[n] = post_id[n].size() > 0;
      pay_data[n]  = (post_id[n].size() > 0) ? DW'({16'(post_id[n][0]), 16'(pay_k[n])}) : '0;
      rx_ready[n]  = !hold_rx[n];
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < NN; n++) begin
        if (pay_valid[n] && pay_ready[n]) begin
          if (pay_k[n] == post_len[n][0] - 1) begin
            void'(post_id[n].pop_front()); void'(post_len[n].pop_front()); pay_k[n] = 0;
          end else pay_k[n]++;
        end
      end
    end
  end

  // receive bookkeeping: words received of message m at node n
  int rx_words [NN][int];
  int rx_done  [NN][int];
  longint rx_done_cyc [NN][int];
  int rx_errors = 0;
  always @(posedge clk) begin
    int m, k;
    if (rst_n) begin
      for (int n = 0; n < NN; n++) begin
        if (rx_valid[n] && rx_ready[n]) begin
          m = int'(rx_msg_id[n]);
          k = rx_words[n].exists(m) ? rx_words[n][m] : 0;
          if (rx_data[n] !== DW'({16'(m), 16'(k)})) begin
            rx_errors++;
            $display("node %0d msg %0d word %0d: got %h", n + 1, m, k, rx_data[n]);
          end
          rx_words[n][m] = k + 1;
          if (rx_last[n]) begin
            rx_done[n][m] = k + 1;
            rx_done_cyc[n][m] = longint'(time_now);
          end
        end
      end
    end
  end

  // event counters
  int ev_alg = 0, ev_lut = 0, ev_block = 0, ev_cstall = 0, ev_wait = 0, ev_miss = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < NN; n++) begin
        ev_alg    += $countones(stat_alg_route[n]);
        ev_lut    += $countones(stat_lut_route[n]);
        ev_block  += $countones(stat_sa_blocked[n]);
        ev_cstall += $countones(stat_credit_stall[n]);
        ev_miss   += $countones(stat_lut_miss[n]);
        ev_wait   += stat_inj_wait[n] ? 1 : 0;
      end
    end
  end

  // ---------------- stimulus helpers ----------------
  int lut_next [NN];

  task automatic prog_lut(int n1, int id, port_mask_t m);
    @(negedge clk);
    cfg_we = 1; cfg_node = nd(n1); cfg_idx = lut_next[n1-1][$clog2(LE)-1:0];
    cfg_valid = 1; cfg_msg_id = msg_id_t'(id); cfg_mask = m;
    lut_next[n1-1]++;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // post a message at node src with critical nodes c (1-based, 0 = unused)
  task automatic post(int src, int id, int prio, int len, int t_inj, int c0, int c1, int c2, int c3);
    head_t h;
    int cl [4];
    cl = '{c0, c1, c2, c3};
    h = '0; h.msg_id = msg_id_t'(id); h.prio = prio_t'(prio);
    for (int i = 0; i < 4; i++) if (cl[i] != 0) begin h.crit[i] = nd(cl[i]); h.crit_cnt = 4'(i + 1); end
    @(negedge clk);
    desc_valid[src-1] = 1; desc_time[src-1] = TW'(t_inj); desc_hdr[src-1] = h; desc_len[src-1] = LW'(len);
    post_id[src-1].push_back(id); post_len[src-1].push_back(len);
    @(negedge clk);
    desc_valid[src-1] = 0;
  endtask

  function automatic logic got(int n1, int id, int len);
    return rx_done[n1-1].exists(id) && rx_done[n1-1][id] == len && rx_words[n1-1][id] == len;
  endfunction

  localparam port_mask_t L = 5'b00001, E = 5'b00100, S = 5'b01000, W = 5'b10000;
  localparam int MC_DST [6] = '{9, 10, 12, 13, 14, 16};
  localparam int MC_OFF [9] = '{1, 3, 4, 5, 6, 7, 8, 11, 15};

  int lat3_bp = 0, lat3_itc = 0;

  initial begin
    cfg_we = 0; cfg_valid = 0; cfg_node = '0; cfg_idx = 0; cfg_msg_id = 0; cfg_mask = 0;
    desc_valid = 0;
    for (int n = 0; n < NN; n++) begin
      desc_time[n] = 0; desc_hdr[n] = '0; desc_len[n] = 0; pay_k[n] = 0; lut_next[n] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // routing tables
    prog_lut(11, 1, W | E);          // Fig. 5: fork at 11 toward 10 and 12
    prog_lut(10, 1, W | S | L);      // 9 & 14 & eject
    prog_lut(9,  1, L);
    prog_lut(14, 1, W | L);          // 13 & eject
    prog_lut(13, 1, L);
    prog_lut(12, 1, S | L);          // 16 & eject
    prog_lut(16, 1, L);
    for (int ph = 0; ph < 2; ph++) begin
      prog_lut(11, 10 + 10 * ph, L);  // packet 1 ends at 11
      prog_lut(15, 11 + 10 * ph, L);  // packet 2 ends at 15
      prog_lut(2,  12 + 10 * ph, L);  // packet 3 ends at 2
    end

    // ---- phase 1: multicast with hybrid routing ----
    hold_rx[9] = 1;                 // node 10's core busy
    post(2, 1, 100, 24, 0, 2, 8, 11, 0);
    repeat (60) @(posedge clk);
    hold_rx[9] = 0;
    repeat (120) @(posedge clk);
    for (int i = 0; i < 6; i++) chk(got(MC_DST[i], 1, 24), $sformatf("multicast delivered to node %0d", MC_DST[i]));
    for (int i = 0; i < 9; i++) chk(!rx_words[MC_OFF[i]-1].exists(1), $sformatf("no copy at node %0d", MC_OFF[i]));

    // ---- phases 2 and 3: Fig. 3 conflicts, back-pressure vs injection time control ----
    for (int ph = 0; ph < 2; ph++) begin
      int t0, t2;
      t0 = int'(time_now) + 12;
      t2 = (ph == 0) ? t0 + 4 : t0 + 60;   // heads meet at router 7; phase 3 delays packet 2
      fork
        post(1,  10 + 10 * ph, 30, 40, t0,     1, 3, 11, 0);    // packet 1, 1-2-3-7-11
        post(5,  11 + 10 * ph, 10, 20, t2,     5, 7, 15, 0);    // packet 2, 5-6-7-11-15
        post(13, 12 + 10 * ph, 20, 4,  t0 + 1, 13, 5, 6, 2);    // packet 3, 13-9-5-6-2
      join
      repeat (250) @(posedge clk);
      chk(got(11, 10 + 10 * ph, 40), $sformatf("phase %0d packet 1", ph + 2));
      chk(got(15, 11 + 10 * ph, 20), $sformatf("phase %0d packet 2", ph + 2));
      chk(got(2,  12 + 10 * ph, 4),  $sformatf("phase %0d packet 3", ph + 2));
      if (got(2, 12 + 10 * ph, 4)) begin
        if (ph == 0) lat3_bp  = int'(rx_done_cyc[1][12]) - (t0 + 1);
        else         lat3_itc = int'(rx_done_cyc[1][22]) - (t0 + 1);
      end
      if (got(11, 10 + 10 * ph, 40) && got(15, 11 + 10 * ph, 20))
        chk(rx_done_cyc[10][10 + 10 * ph] < rx_done_cyc[14][11 + 10 * ph], "higher priority packet 1 finishes first");
    end
    $display("packet 3 latency: back-pressure %0d cycles, injection time control %0d cycles", lat3_bp, lat3_itc);
    chk(lat3_itc > 0 && lat3_itc < lat3_bp, "injection time control shortens packet 3");

    // ---- phase 4: table miss at the destination ----
    post(1, 40, 1, 3, 0, 1, 4, 0, 0);
    repeat (60) @(posedge clk);
    chk(got(4, 40, 3), "table miss ejected at its last critical node");

    chk(rx_errors == 0, $sformatf("%0d payload errors", rx_errors));
    $display("events: alg=%0d lut=%0d sa_blocked=%0d credit_stall=%0d inj_wait=%0d lut_miss=%0d",
             ev_alg, ev_lut, ev_block, ev_cstall, ev_wait, ev_miss);
    chk(ev_alg > 0,    "algorithmic routing used");
    chk(ev_lut > 0,    "table routing used");
    chk(ev_block > 0,  "priority conflict happened");
    chk(ev_cstall > 0, "credit stall happened");
    chk(ev_wait > 0,   "injection waited for its time");
    chk(ev_miss == 1,  "one table miss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
