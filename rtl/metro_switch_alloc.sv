// metro_switch_alloc: SA stage of the METRO router - priority flow control.
//
// METRO replaces virtual-channel allocation and round-robin arbitration by a
// software-assigned message priority: when several messages want the same
// channel, the one with the higher priority gets it and the others wait until
// its tail flit has passed. Because a whole data chunk is one packet, the
// allocation is made once per packet: the head flit reserves its output
// ports, body flits use them without arbitrating, and the tail flit releases
// them.
//
// Each cycle every input whose buffer front is an unallocated head flit
// requests its route mask (req, req_mask, req_prio). For every output the
// requester with the highest priority is found (ties go to the lower input
// number). An input is granted only if it wins every output in its mask and
// all of them are free; the grant is all-or-nothing so that a multicast head
// never holds part of its fork while waiting for the rest. The grant is
// registered: in the next cycle in_active/in_mask show the input's channels
// and out_busy/out_owner show each output's owner (switch traversal then
// starts). release[i], raised in the cycle input i sends its tail flit,
// frees its outputs at the clock edge. grant and blocked are one-cycle
// status pulses (a request granted / a request that had to wait).
// Priority arbitration and hold-until-tail follow the paper; the
// all-or-nothing multicast rule and the tie break are this design's choices.
module metro_switch_alloc
  import metro_pkg::*;
#(
  parameter int unsigned N = NPORTS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic [N-1:0]         req_mask [N],
  input  prio_t                req_prio [N],
  input  logic [N-1:0]         release_i,
  output logic [N-1:0]         in_active,
  output logic [N-1:0]         in_mask  [N],
  output logic [N-1:0]         out_busy,
  output logic [$clog2(N)-1:0] out_owner [N],
  output logic [N-1:0]         grant,
  output logic [N-1:0]         blocked
);
  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] winner     [N];
  logic [N-1:0]  any_req_out;

  // Highest-priority requester of every output.
  always_comb begin
    for (int o = 0; o < N; o++) begin
      winner[o]      = '0;
      any_req_out[o] = 1'b0;
      for (int i = 0; i < N; i++) begin
        if (req[i] && req_mask[i][o]) begin
          if (!any_req_out[o] || req_prio[i] > req_prio[winner[o]]) begin
            winner[o] = IW'(i);
          end
          any_req_out[o] = 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      grant[i] = req[i] && (req_mask[i] != '0);
      for (int o = 0; o < N; o++) begin
        if (req_mask[i][o] && (out_busy[o] || winner[o] != IW'(i))) grant[i] = 1'b0;
      end
      blocked[i] = req[i] && !grant[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_active <= '0;
      out_busy  <= '0;
      for (int i = 0; i < N; i++) begin
        in_mask[i]   <= '0;
        out_owner[i] <= '0;
      end
    end else begin
      for (int i = 0; i < N; i++) begin
        if (release_i[i]) begin
          in_active[i] <= 1'b0;
          in_mask[i]   <= '0;
          for (int o = 0; o < N; o++) begin
            if (out_busy[o] && out_owner[o] == IW'(i)) out_busy[o] <= 1'b0;
          end
        end
        if (grant[i]) begin
          in_active[i] <= 1'b1;
          in_mask[i]   <= req_mask[i];
          for (int o = 0; o < N; o++) begin
            if (req_mask[i][o]) begin
              out_busy[o]  <= 1'b1;
              out_owner[o] <= IW'(i);
            end
          end
        end
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_chk
    a_release_active: assert property (@(posedge clk) disable iff (!rst_n)
      release_i[i] |-> in_active[i]);
    a_req_idle: assert property (@(posedge clk) disable iff (!rst_n)
      req[i] |-> !in_active[i]);
  end
endmodule
