// tb_metro_flit_fifo: random push/pop traffic against a queue model.
// Checks data order, empty/full flags and the occupancy count every cycle.
module tb_metro_flit_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  metro_flit_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      checks++;
      if (empty !== (model.size() == 0) || full !== (model.size() == D) || count != model.size()) begin
        failures++;
        $display("flag mismatch cyc=%0d size=%0d empty=%0b full=%0b count=%0d", cyc, model.size(), empty, full, count);
      end
      if (model.size() != 0) begin
        checks++;
        if (rd_data !== model[0]) begin failures++; $display("data mismatch %h vs %h", rd_data, model[0]); end
      end
      pop  = (model.size() != 0) && ($urandom_range(0, 2) != 0);
      push = ((model.size() < D) || pop) && ($urandom_range(0, 2) != 0);
      wr_data = W'($urandom);
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
