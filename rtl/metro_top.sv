// metro_top: the METRO interconnect of a spatial accelerator.
//
// A MESH_K x MESH_K 2D mesh (16 x 16 in the main configuration) of METRO
// routers, each with the network interface of its compute core. Node n sits
// at column x = n % MESH_K and row y = n / MESH_K; its router links to the
// east/west/north/south neighbours with DATA_W-bit flits (1024 bits). Ports
// on the mesh boundary are left unconnected: their inputs are idle and their
// outputs never receive credits, so software must not route off the edge.
//
// The compute cores (MAC arrays, scratch-pad buffers, controllers), the
// memory controllers and the scale-out interface are outside this design:
// every core's side of its network interface (descriptor, payload and
// receive handshakes) is a port of this module, indexed by node.
//
// The module also holds the global cycle counter time_now that all network
// interfaces compare against the software-computed injection times, and a
// broadcast bus that programs the per-router routing tables before a run
// (cfg_node selects the router). Per-node event flags are brought out for
// observation. Mesh size and link width follow the paper's main
// configuration; the rest is this design's choice.
module metro_top
  import metro_pkg::*;
#(
  parameter int unsigned MESH_K      = DEF_MESH_K,
  parameter int unsigned DATA_W      = DEF_DATA_W,
  parameter int unsigned BUF_DEPTH   = 8,
  parameter int unsigned LUT_ENTRIES = 16,
  parameter int unsigned DESC_DEPTH  = 4,
  parameter int unsigned TIME_W      = 32,
  parameter int unsigned LEN_W       = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  output logic [TIME_W-1:0]              time_now,
  // routing table programming
  input  logic                           cfg_we,
  input  node_t                          cfg_node,
  input  logic [$clog2(LUT_ENTRIES)-1:0] cfg_idx,
  input  logic                           cfg_valid,
  input  msg_id_t                        cfg_msg_id,
  input  port_mask_t                     cfg_mask,
  // core side of every network interface
  input  logic        [MESH_K*MESH_K-1:0] desc_valid,
  output logic        [MESH_K*MESH_K-1:0] desc_ready,
  input  logic        [TIME_W-1:0]        desc_time [MESH_K*MESH_K],
  input  head_t                           desc_hdr  [MESH_K*MESH_K],
  input  logic        [LEN_W-1:0]         desc_len  [MESH_K*MESH_K],
  input  logic        [MESH_K*MESH_K-1:0] pay_valid,
  output logic        [MESH_K*MESH_K-1:0] pay_ready,
  input  logic        [DATA_W-1:0]        pay_data  [MESH_K*MESH_K],
  output logic        [MESH_K*MESH_K-1:0] rx_valid,
  input  logic        [MESH_K*MESH_K-1:0] rx_ready,
  output logic        [DATA_W-1:0]        rx_data   [MESH_K*MESH_K],
  output msg_id_t                         rx_msg_id [MESH_K*MESH_K],
  output logic        [MESH_K*MESH_K-1:0] rx_last,
  // event flags per node
  output port_mask_t                      stat_alg_route    [MESH_K*MESH_K],
  output port_mask_t                      stat_lut_route    [MESH_K*MESH_K],
  output port_mask_t                      stat_lut_miss     [MESH_K*MESH_K],
  output port_mask_t                      stat_sa_blocked   [MESH_K*MESH_K],
  output port_mask_t                      stat_credit_stall [MESH_K*MESH_K],
  output logic        [MESH_K*MESH_K-1:0] stat_inj_wait,
  output logic        [MESH_K*MESH_K-1:0] stat_inj_head
);
  localparam int unsigned NN = MESH_K * MESH_K;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) time_now <= '0;
    else        time_now <= time_now + 1'b1;
  end

  // Router link signals, indexed [node][port].
  port_mask_t        r_in_valid  [NN];
  flit_type_e        r_in_type   [NN][NPORTS];
  logic [DATA_W-1:0] r_in_data   [NN][NPORTS];
  port_mask_t        r_in_credit [NN];
  port_mask_t        r_out_valid [NN];
  flit_type_e        r_out_type  [NN][NPORTS];
  logic [DATA_W-1:0] r_out_data  [NN][NPORTS];
  port_mask_t        r_out_credit[NN];

  // Neighbour wiring.
  function automatic int neigh(input int n, input int p);
    int x, y;
    x = n % MESH_K;
    y = n / MESH_K;
    case (p)
      P_NORTH: return (y > 0)          ? n - MESH_K : -1;
      P_SOUTH: return (y < MESH_K - 1) ? n + MESH_K : -1;
      P_EAST:  return (x < MESH_K - 1) ? n + 1      : -1;
      P_WEST:  return (x > 0)          ? n - 1      : -1;
      default: return -1;
    endcase
  endfunction

  function automatic int opposite(input int p);
    case (p)
      P_NORTH: return P_SOUTH;
      P_SOUTH: return P_NORTH;
      P_EAST:  return P_WEST;
      default: return P_EAST;
    endcase
  endfunction

  for (genvar n = 0; n < NN; n++) begin : g_node
    for (genvar p = 1; p < NPORTS; p++) begin : g_port
      localparam int M = neigh(n, p);
      if (M >= 0) begin : g_link
        localparam int Q = opposite(p);
        assign r_in_valid[n][p]   = r_out_valid[M][Q];
        assign r_in_type[n][p]    = r_out_type[M][Q];
        assign r_in_data[n][p]    = r_out_data[M][Q];
        assign r_out_credit[n][p] = r_in_credit[M][Q];
      end else begin : g_edge
        assign r_in_valid[n][p]   = 1'b0;
        assign r_in_type[n][p]    = FT_BODY;
        assign r_in_data[n][p]    = '0;
        assign r_out_credit[n][p] = 1'b0;
      end
    end

    node_t me;
    assign me.x = COORD_W'(n % MESH_K);
    assign me.y = COORD_W'(n / MESH_K);

    metro_router #(
      .DATA_W(DATA_W), .BUF_DEPTH(BUF_DEPTH), .LUT_ENTRIES(LUT_ENTRIES)
    ) u_router (
      .clk, .rst_n,
      .cur        (me),
      .in_valid   (r_in_valid[n]),
      .in_type    (r_in_type[n]),
      .in_data    (r_in_data[n]),
      .in_credit  (r_in_credit[n]),
      .out_valid  (r_out_valid[n]),
      .out_type   (r_out_type[n]),
      .out_data   (r_out_data[n]),
      .out_credit (r_out_credit[n]),
      .cfg_we     (cfg_we && cfg_node == me),
      .cfg_idx, .cfg_valid, .cfg_msg_id, .cfg_mask,
      .stat_alg_route    (stat_alg_route[n]),
      .stat_lut_route    (stat_lut_route[n]),
      .stat_lut_miss     (stat_lut_miss[n]),
      .stat_sa_blocked   (stat_sa_blocked[n]),
      .stat_credit_stall (stat_credit_stall[n])
    );

    metro_ni #(
      .DATA_W(DATA_W), .TIME_W(TIME_W), .LEN_W(LEN_W),
      .DESC_DEPTH(DESC_DEPTH), .BUF_DEPTH(BUF_DEPTH)
    ) u_ni (
      .clk, .rst_n,
      .time_now   (time_now),
      .desc_valid (desc_valid[n]),
      .desc_ready (desc_ready[n]),
      .desc_time  (desc_time[n]),
      .desc_hdr   (desc_hdr[n]),
      .desc_len   (desc_len[n]),
      .pay_valid  (pay_valid[n]),
      .pay_ready  (pay_ready[n]),
      .pay_data   (pay_data[n]),
      .inj_valid  (r_in_valid[n][P_LOCAL]),
      .inj_type   (r_in_type[n][P_LOCAL]),
      .inj_data   (r_in_data[n][P_LOCAL]),
      .inj_credit (r_in_credit[n][P_LOCAL]),
      .ej_valid   (r_out_valid[n][P_LOCAL]),
      .ej_type    (r_out_type[n][P_LOCAL]),
      .ej_data    (r_out_data[n][P_LOCAL]),
      .ej_credit  (r_out_credit[n][P_LOCAL]),
      .rx_valid   (rx_valid[n]),
      .rx_ready   (rx_ready[n]),
      .rx_data    (rx_data[n]),
      .rx_msg_id  (rx_msg_id[n]),
      .rx_last    (rx_last[n]),
      .stat_inj_wait (stat_inj_wait[n]),
      .stat_inj_head (stat_inj_head[n])
    );
  end
endmodule
