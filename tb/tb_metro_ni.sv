// tb_metro_ni: network interface alone, with the router side modelled.
// Injection: two descriptors, the second scheduled in the future; checks
// that no flit of a message leaves before its injection time, that the
// head carries the posted control bits, that exactly len payload flits
// follow with the last one marked tail, that payload words arrive in order,
// and that the NI stops at BUF_DEPTH flits when the router returns no
// credits. Ejection: a head and payload fed in, with rx_ready throttled;
// checks the delivered words, message id, last flag and returned credits.
module tb_metro_ni;
  import metro_pkg::*;
  localparam int DW = 128, TW = 32, LW = 16, BD = 4;
  logic clk = 0, rst_n = 0;
  logic [TW-1:0] time_now;
  logic desc_valid, desc_ready, pay_valid, pay_ready;
  logic [TW-1:0] desc_time;
  head_t desc_hdr;
  logic [LW-1:0] desc_len;
  logic [DW-1:0] pay_data, inj_data, ej_data, rx_data;
  logic inj_valid, inj_credit, ej_valid, ej_credit, rx_valid, rx_ready, rx_last;
  flit_type_e inj_type, ej_type;
  msg_id_t rx_msg_id;
  logic stat_inj_wait, stat_inj_head;
  int checks = 0, failures = 0;

  metro_ni #(.DATA_W(DW), .TIME_W(TW), .LEN_W(LW), .DESC_DEPTH(2), .BUF_DEPTH(BD)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) time_now <= rst_n ? time_now + 1 : 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // core payload source: word k of the stream is 'hA000 + k
  int pay_k = 0;
  always @(negedge clk) begin
    pay_valid = rst_n && ($urandom_range(0, 3) != 0);
    pay_data  = DW'(32'hA000 + pay_k);
  end
  always @(posedge clk) if (pay_valid && pay_ready) pay_k++;

  // router model: credits returned on demand
  logic hold_credits = 0;
  int owed = 0;
  always @(posedge clk) if (inj_valid) owed++;
  always @(negedge clk) begin
    inj_credit = 0;
    if (!hold_credits && owed > 0) begin inj_credit = 1; owed--; end
  end

  // received injection stream
  flit_type_e got_t[$]; logic [DW-1:0] got_d[$]; longint got_time[$];
  always @(posedge clk) if (inj_valid) begin got_t.push_back(inj_type); got_d.push_back(inj_data); got_time.push_back(time_now); end

  int n_wait = 0;
  always @(posedge clk) if (stat_inj_wait) n_wait++;

  initial begin
    head_t h1, h2;
    desc_valid = 0; desc_time = 0; desc_hdr = 0; desc_len = 0;
    ej_valid = 0; ej_type = FT_BODY; ej_data = 0; rx_ready = 0;
    time_now = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    h1 = '0; h1.msg_id = 11; h1.prio = 4; h1.crit_cnt = 2; h1.crit[0] = 8'h12; h1.crit[1] = 8'h33;
    h2 = '0; h2.msg_id = 12; h2.prio = 9;
    @(negedge clk);
    desc_valid = 1; desc_time = 0;   desc_hdr = h1; desc_len = 3;
    @(negedge clk);
    desc_valid = 1; desc_time = 200; desc_hdr = h2; desc_len = 6;
    @(negedge clk);
    desc_valid = 0;
    wait (time_now > 260);
    @(negedge clk);
    chk(got_t.size() == 11, $sformatf("flit count %0d", got_t.size()));
    if (got_t.size() == 11) begin
      chk(got_t[0] == FT_HEAD && got_d[0][HDR_W-1:0] == h1, "head 1");
      chk(got_t[1] == FT_BODY && got_t[2] == FT_BODY && got_t[3] == FT_TAIL, "types 1");
      chk(got_d[1] == DW'(32'hA000) && got_d[3] == DW'(32'hA002), "payload 1");
      chk(got_t[4] == FT_HEAD && got_d[4][HDR_W-1:0] == h2, "head 2");
      chk(got_time[4] >= 200, $sformatf("message 2 injected at %0d, scheduled 200", got_time[4]));
      chk(got_time[4] <= 202, $sformatf("message 2 injected late at %0d", got_time[4]));
      chk(got_t[10] == FT_TAIL && got_d[10] == DW'(32'hA008), "tail 2");
      for (int k = 5; k < 10; k++) chk(got_t[k] == FT_BODY, "body 2");
    end
    chk(n_wait > 150, "injection held while waiting for its time");
    // credit back-pressure: no credits -> at most BD flits
    hold_credits = 1;
    got_t.delete(); got_d.delete(); got_time.delete();
    @(negedge clk);
    desc_valid = 1; desc_time = 0; desc_hdr = h1; desc_len = 10;
    @(negedge clk);
    desc_valid = 0;
    repeat (50) @(posedge clk);
    chk(got_t.size() == BD, $sformatf("sent %0d flits without credits", got_t.size()));
    hold_credits = 0;
    repeat (80) @(posedge clk);
    chk(got_t.size() == 11 && got_t[10] == FT_TAIL, "resumes after credits");

    // ejection
    begin
      head_t he; int nrx; logic [DW-1:0] w;
      int credits_back;
      he = '0; he.msg_id = 321;
      nrx = 0; credits_back = 0;
      fork
        begin
          @(negedge clk); ej_valid = 1; ej_type = FT_HEAD; ej_data = '0; ej_data[HDR_W-1:0] = he;
          for (int k = 0; k < 4; k++) begin
            @(negedge clk); ej_valid = 1; ej_type = (k == 3) ? FT_TAIL : FT_BODY; ej_data = DW'(500 + k);
          end
          @(negedge clk); ej_valid = 0;
        end
        begin
          repeat (60) begin
            @(negedge clk);
            rx_ready = $urandom_range(0, 1);
            #1;
            if (rx_valid && rx_ready) begin
              chk(rx_data == DW'(500 + nrx) && rx_msg_id == 321 && rx_last == (nrx == 3), $sformatf("rx word %0d", nrx));
              nrx++;
            end
          end
        end
        begin
          repeat (60) begin @(posedge clk); if (ej_credit) credits_back++; end
        end
      join
      chk(nrx == 4, $sformatf("received %0d words", nrx));
      chk(credits_back == 5, $sformatf("credits returned %0d", credits_back));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
