// metro_credit_mgr: credit-based back-pressure for the output ports.
//
// One counter per output port holds the number of free slots in the input
// buffer at the other end of the link. It starts at DEPTH (the downstream
// buffer depth) after reset, drops by one in every cycle a flit is sent on
// that port (send[o]) and rises by one for every credit the downstream
// router returns (credit_in[o], one pulse per slot it frees). A port may send
// only while its counter is non-zero (has_credit[o]). Send and credit in the
// same cycle cancel. The paper names a credit manager in its router; the
// counter scheme is the usual one and is this design's choice. Sending
// without credit or receiving more credits than DEPTH is flagged by
// assertions.
module metro_credit_mgr
  import metro_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned N     = NPORTS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] send,
  input  logic [N-1:0] credit_in,
  output logic [N-1:0] has_credit
);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  logic [CW-1:0] cnt [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N; o++) cnt[o] <= CW'(DEPTH);
    end else begin
      for (int o = 0; o < N; o++) begin
        cnt[o] <= cnt[o] + CW'(credit_in[o]) - CW'(send[o]);
      end
    end
  end

  always_comb begin
    for (int o = 0; o < N; o++) has_credit[o] = (cnt[o] != '0);
  end

  for (genvar o = 0; o < N; o++) begin : g_chk
    a_send_with_credit: assert property (@(posedge clk) disable iff (!rst_n)
      send[o] |-> cnt[o] != '0);
    a_no_excess_credit: assert property (@(posedge clk) disable iff (!rst_n)
      credit_in[o] |-> (cnt[o] != CW'(DEPTH) || send[o]));
  end
endmodule
