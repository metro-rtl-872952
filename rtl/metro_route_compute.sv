// metro_route_compute: head-flit decoder and route selection for one input.
//
// Runs in the BW/RC stage on the flit that is being written into the input
// buffer. For a head flit it decodes the control bits (head_t in the low bits
// of the payload) and implements the hybrid routing of METRO:
//   * pop-then-calculate mode: if the first critical node of the list is this
//     router, it is popped (the list shifts down by one and crit_cnt drops by
//     one). If the list is still not empty, the output port is computed by
//     dimension-order routing toward the new first critical node.
//   * look-up-table mode: once the list is empty the message id is looked up
//     in the router's routing table (shared, lookup ports lut_id/lut_mask/
//     lut_hit) and the table's next-hop mask is the route. A miss sends the
//     packet to the local port and raises lut_miss, so it is not lost.
// The rewritten head (with the popped node removed) is returned on out_data
// and is what is stored and forwarded. Body and tail flits pass unchanged and
// get an empty mask: they follow the channels their head reserved.
// Combinational. The two modes and the popping rule follow the paper; the
// miss handling and the one-pop-per-router rule are this design's choices.
module metro_route_compute
  import metro_pkg::*;
#(
  parameter int unsigned DATA_W = DEF_DATA_W
) (
  input  node_t             cur,
  input  logic              in_valid,
  input  flit_type_e        in_type,
  input  logic [DATA_W-1:0] in_data,
  // shared routing table lookup
  output msg_id_t           lut_id,
  input  port_mask_t        lut_mask,
  input  logic              lut_hit,
  // result
  output logic [DATA_W-1:0] out_data,
  output port_mask_t        route,
  output logic              lut_mode,
  output logic              lut_miss
);
  head_t      hdr_in, hdr_out;
  port_mask_t xy_mask;

  assign hdr_in = head_t'(in_data[HDR_W-1:0]);
  assign lut_id = hdr_in.msg_id;

  always_comb begin
    hdr_out = hdr_in;
    if (hdr_in.crit_cnt != '0 && hdr_in.crit[0] == cur) begin
      for (int i = 0; i < MAX_CRIT - 1; i++) hdr_out.crit[i] = hdr_in.crit[i+1];
      hdr_out.crit[MAX_CRIT-1] = '0;
      hdr_out.crit_cnt = hdr_in.crit_cnt - 1'b1;
    end
  end

  metro_xy_route u_xy (
    .cur      (cur),
    .target   (hdr_out.crit[0]),
    .out_mask (xy_mask)
  );

  always_comb begin
    out_data = in_data;
    route    = '0;
    lut_mode = 1'b0;
    lut_miss = 1'b0;
    if (in_valid && in_type == FT_HEAD) begin
      out_data[HDR_W-1:0] = hdr_out;
      if (hdr_out.crit_cnt != '0) begin
        route = xy_mask;
      end else begin
        lut_mode = 1'b1;
        if (lut_hit) begin
          route = lut_mask;
        end else begin
          route    = '0;
          route[P_LOCAL] = 1'b1;
          lut_miss = 1'b1;
        end
      end
    end
  end
endmodule
