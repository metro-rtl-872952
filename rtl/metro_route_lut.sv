// metro_route_lut: the LUT (table-based) routing module of a METRO router.
//
// A small table of ENTRIES pre-programmed routing entries, each holding a
// valid bit, a message id and the set of next hops (an output-port mask that
// may have several bits set for a multicast fork, including the local port
// for "eject to the attached core"). The table is written by software before
// the application runs, through a one-entry-per-cycle write port (cfg_*).
// It has NLOOK independent associative read ports, one per router input, so
// that all inputs can look up in the same cycle: each port compares its
// message id with every valid entry and returns the mask of the matching
// entry (the lowest-index one if software wrote duplicates) and a hit flag.
// Read is combinational; a write becomes visible the cycle after.
// The entry contents follow the paper's routing tables (message id -> next
// hops). The paper sizes the table as at least three entries per operator
// mapped to the core; ENTRIES = 16 and the associative organisation are this
// design's choices.
module metro_route_lut
  import metro_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned NLOOK   = NPORTS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // configuration write port
  input  logic                       cfg_we,
  input  logic [$clog2(ENTRIES)-1:0] cfg_idx,
  input  logic                       cfg_valid,
  input  msg_id_t                    cfg_msg_id,
  input  port_mask_t                 cfg_mask,
  // lookup ports
  input  msg_id_t                    look_id   [NLOOK],
  output port_mask_t                 look_mask [NLOOK],
  output logic                       look_hit  [NLOOK]
);
  logic       ent_valid [ENTRIES];
  msg_id_t    ent_id    [ENTRIES];
  port_mask_t ent_mask  [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin
        ent_valid[e] <= 1'b0;
        ent_id[e]    <= '0;
        ent_mask[e]  <= '0;
      end
    end else if (cfg_we) begin
      ent_valid[cfg_idx] <= cfg_valid;
      ent_id[cfg_idx]    <= cfg_msg_id;
      ent_mask[cfg_idx]  <= cfg_mask;
    end
  end

  always_comb begin
    for (int p = 0; p < NLOOK; p++) begin
      look_mask[p] = '0;
      look_hit[p]  = 1'b0;
      for (int e = ENTRIES - 1; e >= 0; e--) begin
        if (ent_valid[e] && ent_id[e] == look_id[p]) begin
          look_mask[p] = ent_mask[e];
          look_hit[p]  = 1'b1;
        end
      end
    end
  end
endmodule
