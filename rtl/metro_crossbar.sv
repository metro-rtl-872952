// metro_crossbar: the ST stage switch of a METRO router.
//
// An N x N crossbar in which every output independently selects the input it
// is owned by (sel[o], from the switch allocator). Several outputs may select
// the same input, which is how a multicast head, body or tail flit is forked
// on the fly to all branches of its tree. An output carries a valid flit only
// when it is enabled (out_en[o]: owned and the owner sends this cycle).
// Combinational; the router registers the outputs at the end of ST. The
// paper draws the crossbar but not its insides; the mux-per-output form is
// this design's choice.
module metro_crossbar
  import metro_pkg::*;
#(
  parameter int unsigned N = NPORTS,
  parameter int unsigned W = DEF_DATA_W + 2
) (
  input  logic [W-1:0]         in_data  [N],
  input  logic [$clog2(N)-1:0] sel      [N],
  input  logic [N-1:0]         out_en,
  output logic [W-1:0]         out_data [N],
  output logic [N-1:0]         out_valid
);
  always_comb begin
    for (int o = 0; o < N; o++) begin
      out_valid[o] = out_en[o];
      out_data[o]  = out_en[o] ? in_data[sel[o]] : '0;
    end
  end
endmodule
