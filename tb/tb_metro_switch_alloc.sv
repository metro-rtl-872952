// tb_metro_switch_alloc: directed cases of priority flow control
// (higher priority wins a shared output, a held output blocks later heads
// until release, all-or-nothing multicast), then random traffic checked
// against invariants and an allocation model.
module tb_metro_switch_alloc;
  import metro_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, release_i, in_active, out_busy, grant, blocked;
  logic [N-1:0] req_mask [N], in_mask [N];
  prio_t req_prio [N];
  logic [2:0] out_owner [N];
  int checks = 0, failures = 0;

  metro_switch_alloc #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear();
    req = 0; release_i = 0;
    for (int i = 0; i < N; i++) begin req_mask[i] = 0; req_prio[i] = 0; end
  endtask

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference allocation model
  logic [N-1:0] m_busy; int m_owner [N]; logic [N-1:0] m_active;

  initial begin
    clear();
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1: inputs 1 and 3 want output 2; input 3 has higher priority
    @(negedge clk);
    req = 5'b01010; req_mask[1] = 5'b00100; req_prio[1] = 10; req_mask[3] = 5'b00100; req_prio[3] = 20;
    #1;
    chk(grant == 5'b01000 && blocked == 5'b00010, "priority winner");
    @(posedge clk); #1;
    chk(in_active[3] && out_busy[2] && out_owner[2] == 3, "grant registered");
    // input 1 keeps asking and is blocked while output 2 is held
    req = 5'b00010;
    #1; chk(grant == 0 && blocked == 5'b00010, "held output blocks");
    @(posedge clk); #1;
    // 2: multicast from input 0 to outputs 2 and 4: output 2 busy -> nothing granted
    req = 5'b00011; req_mask[0] = 5'b10100; req_prio[0] = 50;
    #1; chk(grant == 0, "all-or-nothing multicast");
    @(posedge clk); #1;
    chk(!out_busy[4], "no partial reservation");
    // release input 3 (tail sent)
    req = 0; release_i = 5'b01000;
    @(posedge clk); #1;
    release_i = 0;
    chk(!out_busy[2] && !in_active[3], "release frees output");
    // both ask again: input 0 (prio 50) beats input 1 (prio 10) on output 2
    req = 5'b00011;
    #1; chk(grant == 5'b00001, "multicast wins after release");
    @(posedge clk); #1;
    chk(out_busy[2] && out_busy[4] && out_owner[2] == 0 && out_owner[4] == 0 && in_mask[0] == 5'b10100, "multicast reserved");
    req = 0; release_i = 5'b00001;
    @(posedge clk); #1;
    clear();
    @(posedge clk); #1;
    // random traffic against the model
    m_busy = 0; m_active = 0;
    for (int i = 0; i < N; i++) m_owner[i] = 0;
    for (int t = 0; t < 3000; t++) begin
      logic [N-1:0] eg; int win [N]; logic [N-1:0] anyr;
      @(negedge clk);
      clear();
      for (int i = 0; i < N; i++) begin
        if (!m_active[i] && $urandom_range(0, 1)) begin
          req[i] = 1; req_mask[i] = N'($urandom_range(1, 31)); req_prio[i] = prio_t'($urandom_range(0, 1023));
        end
        if (m_active[i] && $urandom_range(0, 3) == 0) release_i[i] = 1;
      end
      // model
      for (int o = 0; o < N; o++) begin
        anyr[o] = 0; win[o] = 0;
        for (int i = 0; i < N; i++)
          if (req[i] && req_mask[i][o] && (!anyr[o] || req_prio[i] > req_prio[win[o]])) begin win[o] = i; anyr[o] = 1; end
      end
      for (int i = 0; i < N; i++) begin
        eg[i] = req[i];
        for (int o = 0; o < N; o++) if (req_mask[i][o] && (m_busy[o] || win[o] != i)) eg[i] = 0;
      end
      #1;
      chk(grant == eg, $sformatf("random grant %b exp %b", grant, eg));
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) begin
        if (release_i[i]) begin
          m_active[i] = 0;
          for (int o = 0; o < N; o++) if (m_busy[o] && m_owner[o] == i) m_busy[o] = 0;
        end
        if (eg[i]) begin
          m_active[i] = 1;
          for (int o = 0; o < N; o++) if (req_mask[i][o]) begin m_busy[o] = 1; m_owner[o] = i; end
        end
      end
      chk(out_busy == m_busy && in_active == m_active, "random state");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
