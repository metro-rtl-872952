// metro_router: one router of the METRO mesh network-on-chip.
//
// A five-port (local, north, east, south, west) wormhole router with no
// virtual channels. Traffic scheduling - paths, priorities and injection
// times - is decided offline by software, so the router only has to carry
// out that schedule:
//   * routing is hybrid: a head flit either carries a list of critical
//     nodes and is routed dimension-order toward the first of them
//     (pop-then-calculate mode), or, once that list is empty, is routed by a
//     pre-programmed per-router table keyed by message id (look-up-table
//     mode, which also provides multicast forks and ejection);
//   * flow control is by message priority: a head flit reserves all of its
//     output ports at once, the higher priority wins a conflict, and the
//     ports stay reserved until the tail flit has passed;
//   * back-pressure is credit based, one credit per input-buffer slot.
//
// Pipeline (one cycle per stage, matching the paper's 3-stage router plus
// link traversal):
//   LT    flit crosses the link and is captured in the input register;
//   BW/RC flit is written into the input buffer; for a head flit the route is
//         computed in the same cycle and stored with it;
//   SA    a head flit at the buffer front requests its outputs (skipped by
//         body and tail flits, which reuse the reservation);
//   ST    the flit at the front of an input that owns its outputs, and has a
//         credit on every one of them, crosses the crossbar into the output
//         registers, which drive the outgoing links.
// A head flit therefore advances one hop every 4 cycles; body flits stream at
// one flit per cycle per port once credits allow it.
//
// Interface: link inputs in_* with a credit pulse back (in_credit, one per
// freed buffer slot, registered), link outputs out_* with the downstream
// credit pulses (out_credit). cfg_* writes the routing table. The stat_*
// outputs are one-cycle event flags per input port, for observation.
// What follows the paper: the stages, the two routing modes, the table, the
// priority rule and the removal of virtual channels. Buffer depth, table
// size, field widths and the all-or-nothing multicast reservation are this
// design's own choices.
module metro_router
  import metro_pkg::*;
#(
  parameter int unsigned DATA_W      = DEF_DATA_W,
  parameter int unsigned BUF_DEPTH   = 8,
  parameter int unsigned LUT_ENTRIES = 16
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  node_t                            cur,
  // incoming links
  input  logic       [NPORTS-1:0]          in_valid,
  input  flit_type_e                       in_type   [NPORTS],
  input  logic       [DATA_W-1:0]          in_data   [NPORTS],
  output logic       [NPORTS-1:0]          in_credit,
  // outgoing links
  output logic       [NPORTS-1:0]          out_valid,
  output flit_type_e                       out_type  [NPORTS],
  output logic       [DATA_W-1:0]          out_data  [NPORTS],
  input  logic       [NPORTS-1:0]          out_credit,
  // routing table programming
  input  logic                             cfg_we,
  input  logic [$clog2(LUT_ENTRIES)-1:0]   cfg_idx,
  input  logic                             cfg_valid,
  input  msg_id_t                          cfg_msg_id,
  input  port_mask_t                       cfg_mask,
  // event flags
  output logic       [NPORTS-1:0]          stat_alg_route,
  output logic       [NPORTS-1:0]          stat_lut_route,
  output logic       [NPORTS-1:0]          stat_lut_miss,
  output logic       [NPORTS-1:0]          stat_sa_blocked,
  output logic       [NPORTS-1:0]          stat_credit_stall
);
  localparam int unsigned N     = NPORTS;
  localparam int unsigned IW    = $clog2(N);
  localparam int unsigned FW    = 2 + DATA_W;       // type + data
  localparam int unsigned ENT_W = N + FW;           // route + flit

  // ---------------- LT: input registers ----------------
  logic       [N-1:0]      lq_valid;
  flit_type_e              lq_type [N];
  logic       [DATA_W-1:0] lq_data [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lq_valid <= '0;
      for (int i = 0; i < N; i++) begin
        lq_type[i] <= FT_BODY;
        lq_data[i] <= '0;
      end
    end else begin
      lq_valid <= in_valid;
      for (int i = 0; i < N; i++) begin
        if (in_valid[i]) begin
          lq_type[i] <= in_type[i];
          lq_data[i] <= in_data[i];
        end
      end
    end
  end

  // ---------------- BW/RC ----------------
  msg_id_t    lut_id   [N];
  port_mask_t lut_mask [N];
  logic       lut_hit  [N];

  metro_route_lut #(.ENTRIES(LUT_ENTRIES), .NLOOK(N)) u_lut (
    .clk, .rst_n,
    .cfg_we, .cfg_idx, .cfg_valid, .cfg_msg_id, .cfg_mask,
    .look_id   (lut_id),
    .look_mask (lut_mask),
    .look_hit  (lut_hit)
  );

  logic [ENT_W-1:0]  f_wr   [N];
  logic [ENT_W-1:0]  f_rd   [N];
  logic [N-1:0]      f_empty, f_full, f_pop;
  port_mask_t        f_route [N];
  flit_type_e        f_type  [N];
  logic [DATA_W-1:0] f_data  [N];

  for (genvar i = 0; i < N; i++) begin : g_in
    logic [DATA_W-1:0] rc_data;
    port_mask_t        rc_route;
    logic              rc_lut_mode, rc_miss;

    metro_route_compute #(.DATA_W(DATA_W)) u_rc (
      .cur      (cur),
      .in_valid (lq_valid[i]),
      .in_type  (lq_type[i]),
      .in_data  (lq_data[i]),
      .lut_id   (lut_id[i]),
      .lut_mask (lut_mask[i]),
      .lut_hit  (lut_hit[i]),
      .out_data (rc_data),
      .route    (rc_route),
      .lut_mode (rc_lut_mode),
      .lut_miss (rc_miss)
    );

    assign f_wr[i] = {rc_route, lq_type[i], rc_data};

    metro_flit_fifo #(.WIDTH(ENT_W), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .push    (lq_valid[i]),
      .wr_data (f_wr[i]),
      .pop     (f_pop[i]),
      .rd_data (f_rd[i]),
      .empty   (f_empty[i]),
      .full    (f_full[i]),
      .count   ()
    );

    assign f_route[i] = f_rd[i][ENT_W-1 -: N];
    assign f_type[i]  = flit_type_e'(f_rd[i][DATA_W +: 2]);
    assign f_data[i]  = f_rd[i][DATA_W-1:0];

    assign stat_alg_route[i] = lq_valid[i] && lq_type[i] == FT_HEAD && !rc_lut_mode;
    assign stat_lut_route[i] = rc_lut_mode;
    assign stat_lut_miss[i]  = rc_miss;

    a_head_routed: assert property (@(posedge clk) disable iff (!rst_n)
      (lq_valid[i] && lq_type[i] == FT_HEAD) |-> rc_route != '0);
  end

  // ---------------- SA ----------------
  logic [N-1:0]  sa_req, sa_release, in_active, out_busy, sa_grant, sa_blocked;
  logic [N-1:0]  sa_mask  [N];
  logic [N-1:0]  act_mask [N];
  prio_t         sa_prio  [N];
  logic [IW-1:0] out_owner [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      head_t h;
      h = head_t'(f_data[i][HDR_W-1:0]);
      sa_req[i]  = !f_empty[i] && f_type[i] == FT_HEAD && !in_active[i];
      sa_mask[i] = f_route[i];
      sa_prio[i] = h.prio;
    end
  end

  metro_switch_alloc #(.N(N)) u_sa (
    .clk, .rst_n,
    .req       (sa_req),
    .req_mask  (sa_mask),
    .req_prio  (sa_prio),
    .release_i (sa_release),
    .in_active (in_active),
    .in_mask   (act_mask),
    .out_busy  (out_busy),
    .out_owner (out_owner),
    .grant     (sa_grant),
    .blocked   (sa_blocked)
  );
  assign stat_sa_blocked = sa_blocked;

  // ---------------- ST ----------------
  logic [N-1:0] has_credit, send, out_en;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      send[i] = in_active[i] && !f_empty[i] && ((act_mask[i] & ~has_credit) == '0);
      stat_credit_stall[i] = in_active[i] && !f_empty[i] && !send[i];
      f_pop[i]      = send[i];
      sa_release[i] = send[i] && f_type[i] == FT_TAIL;
    end
    for (int o = 0; o < N; o++) out_en[o] = out_busy[o] && send[out_owner[o]];
  end

  metro_credit_mgr #(.DEPTH(BUF_DEPTH), .N(N)) u_cm (
    .clk, .rst_n,
    .send       (out_en),
    .credit_in  (out_credit),
    .has_credit (has_credit)
  );

  logic [FW-1:0] xb_in  [N];
  logic [FW-1:0] xb_out [N];
  logic [N-1:0]  xb_valid;

  always_comb begin
    for (int i = 0; i < N; i++) xb_in[i] = {f_type[i], f_data[i]};
  end

  metro_crossbar #(.N(N), .W(FW)) u_xb (
    .in_data   (xb_in),
    .sel       (out_owner),
    .out_en    (out_en),
    .out_data  (xb_out),
    .out_valid (xb_valid)
  );

  // Output registers (end of ST) and credit return for freed buffer slots.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      in_credit <= '0;
      for (int o = 0; o < N; o++) begin
        out_type[o] <= FT_BODY;
        out_data[o] <= '0;
      end
    end else begin
      out_valid <= xb_valid;
      in_credit <= f_pop;
      for (int o = 0; o < N; o++) begin
        if (xb_valid[o]) begin
          out_type[o] <= flit_type_e'(xb_out[o][DATA_W +: 2]);
          out_data[o] <= xb_out[o][DATA_W-1:0];
        end
      end
    end
  end
endmodule
