// tb_metro_credit_mgr: random sends and credit returns against a counter
// model; checks has_credit for every port every cycle, and that it drops
// after DEPTH sends with no credit back.
module tb_metro_credit_mgr;
  localparam int D = 4, N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] send, credit_in, has_credit;
  int cnt [N];
  int checks = 0, failures = 0;

  metro_credit_mgr #(.DEPTH(D), .N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    send = 0; credit_in = 0;
    for (int o = 0; o < N; o++) cnt[o] = D;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // drain port 0 completely
    for (int k = 0; k < D; k++) begin
      @(negedge clk);
      checks++; if (!has_credit[0]) failures++;
      send = 5'b00001;
      @(posedge clk); #1; send = 0; cnt[0]--;
    end
    @(negedge clk);
    checks++; if (has_credit[0]) begin failures++; $display("credit left after %0d sends", D); end
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int o = 0; o < N; o++) begin
        checks++;
        if (has_credit[o] !== (cnt[o] > 0)) begin failures++; $display("port %0d cnt %0d has %0b", o, cnt[o], has_credit[o]); end
        send[o]      = (cnt[o] > 0) && $urandom_range(0, 1);
        credit_in[o] = (cnt[o] - (send[o] ? 1 : 0) < D) && (cnt[o] < D) && $urandom_range(0, 1);
      end
      @(posedge clk); #1;
      for (int o = 0; o < N; o++) cnt[o] = cnt[o] + (credit_in[o] ? 1 : 0) - (send[o] ? 1 : 0);
      send = 0; credit_in = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
