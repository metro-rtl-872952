// tb_metro_router: one router at (1,1) of a mesh, with a credit-respecting
// flit source on every input and a sink on every output.
// Checks: the 4-cycle head latency (LT, BW/RC, SA, ST) and one-flit-per-cycle
// body streaming; priority arbitration between two packets for one output
// (the higher priority packet passes whole, then the other); a table-routed
// multicast fork to three outputs including ejection; back-pressure when a
// sink withholds credits; and a table miss being ejected locally.
module tb_metro_router;
  import metro_pkg::*;
  localparam int DW = 128, BD = 4, LE = 4, N = 5;
  logic clk = 0, rst_n = 0;
  node_t cur;
  logic [N-1:0] in_valid, in_credit, out_valid, out_credit;
  flit_type_e in_type [N], out_type [N];
  logic [DW-1:0] in_data [N], out_data [N];
  logic cfg_we, cfg_valid;
  logic [$clog2(LE)-1:0] cfg_idx;
  msg_id_t cfg_msg_id;
  port_mask_t cfg_mask;
  logic [N-1:0] stat_alg_route, stat_lut_route, stat_lut_miss, stat_sa_blocked, stat_credit_stall;
  int checks = 0, failures = 0;
  longint cyc = 0;

  metro_router #(.DATA_W(DW), .BUF_DEPTH(BD), .LUT_ENTRIES(LE)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct packed { flit_type_e t; logic [DW-1:0] d; } flit_s;
  flit_s src_q [N][$];
  flit_s rcv_q [N][$];
  longint rcv_cyc [N][$];
  int src_cred [N];
  int pend_cred [N];
  logic [N-1:0] stall;
  int n_blocked = 0, n_cstall = 0, n_lut = 0, n_alg = 0, n_miss = 0;

  // sources
  always @(negedge clk) begin
    flit_s f;
    for (int i = 0; i < N; i++) begin
      in_valid[i] = 0;
      if (rst_n && src_q[i].size() > 0 && src_cred[i] > 0) begin
        f = src_q[i].pop_front();
        in_valid[i] = 1; in_type[i] = f.t; in_data[i] = f.d;
        src_cred[i]--;
      end
    end
  end
  always @(posedge clk) if (rst_n) for (int i = 0; i < N; i++) if (in_credit[i]) src_cred[i]++;
  // cycle in which the first head flit is on an input link
  longint head_in_cyc = -1;
  always @(posedge clk) if (rst_n && head_in_cyc < 0 && in_valid[P_WEST] && in_type[P_WEST] == FT_HEAD) head_in_cyc = cyc;

  // sinks
  always @(posedge clk) begin
    if (rst_n) begin
      for (int o = 0; o < N; o++) begin
        if (out_valid[o]) begin
          rcv_q[o].push_back('{out_type[o], out_data[o]});
          rcv_cyc[o].push_back(cyc);
          pend_cred[o]++;
        end
      end
      n_blocked += $countones(stat_sa_blocked);
      n_cstall  += $countones(stat_credit_stall);
      n_lut     += $countones(stat_lut_route);
      n_alg     += $countones(stat_alg_route);
      n_miss    += $countones(stat_lut_miss);
    end
  end
  always @(negedge clk) begin
    for (int o = 0; o < N; o++) begin
      out_credit[o] = 0;
      if (rst_n && !stall[o] && pend_cred[o] > 0) begin out_credit[o] = 1; pend_cred[o]--; end
    end
  end

  function automatic head_t mkhead(int id, int prio, int cnt, node_t c0);
    head_t h = '0;
    h.msg_id = msg_id_t'(id); h.prio = prio_t'(prio); h.crit_cnt = 4'(cnt); h.crit[0] = c0;
    return h;
  endfunction

  function automatic node_t nd(int x, int y);
    node_t n; n.x = 4'(x); n.y = 4'(y); return n;
  endfunction

  // expected stream of a packet: head then len payload words (data = tag + k)
  task automatic queue_packet(int port, head_t h, int len, int tag, ref flit_s exp[$]);
    flit_s f;
    f.t = FT_HEAD; f.d = '0; f.d[HDR_W-1:0] = h;
    src_q[port].push_back(f);
    exp.push_back(f);
    for (int k = 0; k < len; k++) begin
      f.t = (k == len - 1) ? FT_TAIL : FT_BODY;
      f.d = DW'(tag * 1000 + k);
      src_q[port].push_back(f);
      exp.push_back(f);
    end
  endtask

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // compare payloads (head data may be rewritten by the pop, so compare type and non-header bits)
  task automatic compare(int o, flit_s exp[$], string m);
    chk(rcv_q[o].size() == exp.size(), $sformatf("%s: port %0d got %0d flits exp %0d", m, o, rcv_q[o].size(), exp.size()));
    for (int k = 0; k < exp.size() && k < rcv_q[o].size(); k++) begin
      if (exp[k].t == FT_HEAD) chk(rcv_q[o][k].t == FT_HEAD, $sformatf("%s: flit %0d not head", m, k));
      else chk(rcv_q[o][k] == exp[k], $sformatf("%s: flit %0d mismatch", m, k));
    end
  endtask

  task automatic clear_rcv();
    for (int o = 0; o < N; o++) begin rcv_q[o].delete(); rcv_cyc[o].delete(); end
  endtask

  initial begin
    flit_s e1[$], e2[$], e3[$], e4[$];
    cur = nd(1, 1);
    cfg_we = 0; cfg_idx = 0; cfg_valid = 0; cfg_msg_id = 0; cfg_mask = 0;
    stall = 0; in_valid = 0; out_credit = 0;
    for (int i = 0; i < N; i++) begin src_cred[i] = BD; pend_cred[i] = 0; in_type[i] = FT_BODY; in_data[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // program table: msg 7 -> east, south and eject
    @(negedge clk); cfg_we = 1; cfg_idx = 0; cfg_valid = 1; cfg_msg_id = 7; cfg_mask = 5'b01101;
    @(negedge clk); cfg_we = 0;
    repeat (2) @(posedge clk);

    // 1: latency and streaming, west input -> east output (critical node (3,1))
    clear_rcv();
    @(negedge clk);
    queue_packet(P_WEST, mkhead(1, 5, 1, nd(3, 1)), 6, 1, e1);
    repeat (30) @(posedge clk);
    compare(P_EAST, e1, "unicast");
    if (rcv_cyc[P_EAST].size() == 7) begin
      // head on input link in cycle c -> on output link in cycle c + 4 (LT, BW/RC, SA, ST)
      chk(rcv_cyc[P_EAST][0] - head_in_cyc == 4, $sformatf("head latency %0d cycles", rcv_cyc[P_EAST][0] - head_in_cyc));
      chk(rcv_cyc[P_EAST][6] - rcv_cyc[P_EAST][1] == 5, "body flits at one per cycle");
    end

    // 2: priority conflict for the east output: north (prio 3) vs south (prio 9)
    clear_rcv();
    @(negedge clk);
    queue_packet(P_NORTH, mkhead(2, 3, 1, nd(2, 1)), 5, 2, e2);
    queue_packet(P_SOUTH, mkhead(3, 9, 1, nd(3, 1)), 5, 3, e3);
    repeat (40) @(posedge clk);
    begin
      flit_s both[$];
      both = {e3, e2};
      compare(P_EAST, both, "priority order");
    end

    // 3: table-routed multicast (critical node = this router, popped -> table)
    clear_rcv();
    e4.delete();
    @(negedge clk);
    queue_packet(P_WEST, mkhead(7, 1, 1, nd(1, 1)), 8, 4, e4);
    stall[P_SOUTH] = 1;                      // 4: back-pressure on one branch
    repeat (30) @(posedge clk);
    chk(rcv_q[P_SOUTH].size() == BD, $sformatf("stalled branch got %0d flits, buffer %0d", rcv_q[P_SOUTH].size(), BD));
    chk(rcv_q[P_EAST].size() == BD, "fork advances in lockstep under back-pressure");
    stall[P_SOUTH] = 0;
    repeat (30) @(posedge clk);
    compare(P_EAST, e4, "multicast east");
    compare(P_SOUTH, e4, "multicast south");
    compare(P_LOCAL, e4, "multicast eject");

    // 5: table miss -> ejected locally
    clear_rcv();
    e1.delete();
    @(negedge clk);
    queue_packet(P_EAST, mkhead(99, 1, 0, nd(0, 0)), 2, 5, e1);
    repeat (20) @(posedge clk);
    compare(P_LOCAL, e1, "miss ejected");

    chk(n_blocked > 0, "priority conflict seen");
    chk(n_cstall > 0, "credit stall seen");
    chk(n_lut >= 2 && n_alg >= 3, "both routing modes used");
    chk(n_miss == 1, "one table miss");
    $display("events: blocked=%0d credit_stall=%0d lut=%0d alg=%0d miss=%0d", n_blocked, n_cstall, n_lut, n_alg, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
