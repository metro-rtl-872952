// metro_ni: network interface between a compute core and its METRO router.
//
// Injection side. The core posts a message as a descriptor: the head control
// bits (message id, priority, critical-node list), the number of payload
// flits and the injection time the scheduling software computed for it. The
// descriptors wait in a small queue; the payload words stay in the core and
// are pulled through pay_valid/pay_ready only while the packet is being sent.
// This is METRO's injection time control: a message whose path would be
// blocked is held in the source core, not in the network, until the global
// cycle counter time_now reaches its injection time. The whole data chunk is
// sent as one packet: one head flit, then desc_len payload flits of which the
// last is marked as the tail flit that releases the reserved channels.
// Flits are sent only with a credit for the router's local input buffer.
// Messages are sent in the order they were posted.
//
// Ejection side. Flits the router delivers on its local output are buffered
// (EJ_DEPTH slots, one credit each back to the router). A head flit is
// consumed here and its message id is kept; body and tail flits are handed
// to the core on rx_* (rx_last marks the tail) with that message id.
//
// Timing: a posted descriptor whose time has passed starts its head flit the
// cycle after it reaches the queue front; payload then flows at one flit per
// cycle while credits and pay_valid allow. Fields and handshakes are this
// design's choices; the paper gives the function (packetising, injection at
// the scheduled time, chunk-sized packets with explicit tail).
module metro_ni
  import metro_pkg::*;
#(
  parameter int unsigned DATA_W     = DEF_DATA_W,
  parameter int unsigned TIME_W     = 32,
  parameter int unsigned LEN_W      = 16,
  parameter int unsigned DESC_DEPTH = 4,
  parameter int unsigned BUF_DEPTH  = 8    // router input buffer depth
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TIME_W-1:0] time_now,
  // message descriptors from the core
  input  logic              desc_valid,
  output logic              desc_ready,
  input  logic [TIME_W-1:0] desc_time,
  input  head_t             desc_hdr,
  input  logic [LEN_W-1:0]  desc_len,
  // payload words from the core
  input  logic              pay_valid,
  output logic              pay_ready,
  input  logic [DATA_W-1:0] pay_data,
  // to the router's local input port
  output logic              inj_valid,
  output flit_type_e        inj_type,
  output logic [DATA_W-1:0] inj_data,
  input  logic              inj_credit,
  // from the router's local output port
  input  logic              ej_valid,
  input  flit_type_e        ej_type,
  input  logic [DATA_W-1:0] ej_data,
  output logic              ej_credit,
  // received payload to the core
  output logic              rx_valid,
  input  logic              rx_ready,
  output logic [DATA_W-1:0] rx_data,
  output msg_id_t           rx_msg_id,
  output logic              rx_last,
  // event flags
  output logic              stat_inj_wait,
  output logic              stat_inj_head
);
  // ---------------- injection ----------------
  localparam int unsigned DW = TIME_W + HDR_W + LEN_W;

  logic          dq_empty, dq_full, dq_pop;
  logic [DW-1:0] dq_rd;
  logic [TIME_W-1:0] d_time;
  head_t             d_hdr;
  logic [LEN_W-1:0]  d_len;

  assign desc_ready = !dq_full;

  metro_flit_fifo #(.WIDTH(DW), .DEPTH(DESC_DEPTH)) u_descq (
    .clk, .rst_n,
    .push    (desc_valid && !dq_full),
    .wr_data ({desc_time, desc_hdr, desc_len}),
    .pop     (dq_pop),
    .rd_data (dq_rd),
    .empty   (dq_empty),
    .full    (dq_full),
    .count   ()
  );
  assign {d_time, d_hdr, d_len} = dq_rd;

  typedef enum logic {S_IDLE, S_PAY} inj_state_e;
  inj_state_e        state;
  logic [LEN_W-1:0]  remaining;
  logic              has_credit, send;
  logic              send_q;
  flit_type_e        type_q;
  logic [DATA_W-1:0] data_q;

  metro_credit_mgr #(.DEPTH(BUF_DEPTH), .N(1)) u_cm (
    .clk, .rst_n,
    .send       (send),
    .credit_in  (inj_credit),
    .has_credit (has_credit)
  );

  logic       due;
  flit_type_e nxt_type;
  logic [DATA_W-1:0] nxt_data;

  always_comb begin
    due       = !dq_empty && (time_now >= d_time);
    send      = 1'b0;
    pay_ready = 1'b0;
    dq_pop    = 1'b0;
    nxt_type  = FT_BODY;
    nxt_data  = '0;
    stat_inj_wait = (state == S_IDLE) && !dq_empty && !due;
    stat_inj_head = 1'b0;
    if (state == S_IDLE) begin
      if (due && has_credit) begin
        send     = 1'b1;
        nxt_type = FT_HEAD;
        nxt_data[HDR_W-1:0] = d_hdr;
        stat_inj_head = 1'b1;
      end
    end else begin
      if (pay_valid && has_credit) begin
        send      = 1'b1;
        pay_ready = 1'b1;
        nxt_data  = pay_data;
        nxt_type  = (remaining == 1) ? FT_TAIL : FT_BODY;
        dq_pop    = (remaining == 1);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      remaining <= '0;
      send_q    <= 1'b0;
      type_q    <= FT_BODY;
      data_q    <= '0;
    end else begin
      send_q <= send;
      if (send) begin
        type_q <= nxt_type;
        data_q <= nxt_data;
      end
      if (state == S_IDLE) begin
        if (send) begin
          state     <= S_PAY;
          remaining <= d_len;
        end
      end else if (send) begin
        remaining <= remaining - 1'b1;
        if (remaining == 1) state <= S_IDLE;
      end
    end
  end

  assign inj_valid = send_q;
  assign inj_type  = type_q;
  assign inj_data  = data_q;

  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (desc_valid && desc_ready) |-> desc_len != '0);

  // ---------------- ejection ----------------
  localparam int unsigned EW = 2 + DATA_W;
  logic          eq_empty, eq_full, eq_pop;
  logic [EW-1:0] eq_rd;
  flit_type_e    e_type;
  msg_id_t       cur_msg;
  head_t         e_hdr;

  metro_flit_fifo #(.WIDTH(EW), .DEPTH(BUF_DEPTH)) u_ejq (
    .clk, .rst_n,
    .push    (ej_valid),
    .wr_data ({ej_type, ej_data}),
    .pop     (eq_pop),
    .rd_data (eq_rd),
    .empty   (eq_empty),
    .full    (eq_full),
    .count   ()
  );

  assign e_type    = flit_type_e'(eq_rd[DATA_W +: 2]);
  assign e_hdr     = head_t'(eq_rd[HDR_W-1:0]);
  assign rx_valid  = !eq_empty && e_type != FT_HEAD;
  assign rx_data   = eq_rd[DATA_W-1:0];
  assign rx_last   = e_type == FT_TAIL;
  assign rx_msg_id = cur_msg;
  assign eq_pop    = !eq_empty && (e_type == FT_HEAD || rx_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_msg   <= '0;
      ej_credit <= 1'b0;
    end else begin
      ej_credit <= eq_pop;
      if (!eq_empty && e_type == FT_HEAD) begin
        cur_msg <= e_hdr.msg_id;
      end
    end
  end
endmodule
