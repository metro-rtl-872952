// tb_metro_crossbar: random selections and enables, including several
// outputs reading the same input (multicast fork).
module tb_metro_crossbar;
  localparam int N = 5, W = 34;
  logic [W-1:0] in_data [N];
  logic [$clog2(N)-1:0] sel [N];
  logic [N-1:0] out_en, out_valid;
  logic [W-1:0] out_data [N];
  int checks = 0, failures = 0;

  metro_crossbar #(.N(N), .W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < N; i++) begin
        in_data[i] = {2'($urandom), 32'($urandom)};
        sel[i] = ($urandom_range(0, 3) == 0) ? 3'd2 : 3'($urandom_range(0, N-1));
        out_en[i] = 1'($urandom_range(0, 1));
      end
      #1;
      for (int o = 0; o < N; o++) begin
        checks++;
        if (out_valid[o] !== out_en[o] || (out_en[o] && out_data[o] !== in_data[sel[o]])) begin
          failures++;
          $display("o=%0d en=%0b sel=%0d got %h exp %h", o, out_en[o], sel[o], out_data[o], in_data[sel[o]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
