// tb_metro_route_compute: random head flits against a reference model of
// the hybrid routing rule. The routing table is modelled in the testbench
// (a fixed function of the message id, with some ids missing). Checks the
// popped header, the route mask, the mode and the miss flag; also checks
// that body flits pass unchanged with no route, and the Fig. 5 path
// 2-3-4-8-7-11 (critical nodes 2, 8, 11) hop by hop.
module tb_metro_route_compute;
  import metro_pkg::*;
  localparam int DW = 128;
  node_t cur;
  logic in_valid;
  flit_type_e in_type;
  logic [DW-1:0] in_data, out_data;
  msg_id_t lut_id;
  port_mask_t lut_mask, route;
  logic lut_hit, lut_mode, lut_miss;
  int checks = 0, failures = 0;

  metro_route_compute #(.DATA_W(DW)) dut (.*);

  // table model: ids divisible by 3 are missing
  always_comb begin
    lut_hit  = (lut_id % 3) != 0;
    lut_mask = port_mask_t'((lut_id * 5) % 31 + 1);
  end

  function automatic node_t nd(int n1);  // 1-based node of a 4x4 mesh
    node_t r; r.x = 4'((n1 - 1) % 4); r.y = 4'((n1 - 1) / 4); return r;
  endfunction

  function automatic port_mask_t xy(node_t c, node_t t);
    if (t.x > c.x) return 5'b00100;
    if (t.x < c.x) return 5'b10000;
    if (t.y > c.y) return 5'b01000;
    if (t.y < c.y) return 5'b00010;
    return 5'b00001;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_head(head_t h);
    head_t eh; port_mask_t er; logic emode, emiss;
    in_valid = 1; in_type = FT_HEAD;
    in_data = {DW{1'b0}} | DW'({$urandom, $urandom}) << HDR_W;
    in_data[HDR_W-1:0] = h;
    #1;
    eh = h;
    if (h.crit_cnt != 0 && h.crit[0] == cur) begin
      for (int i = 0; i < MAX_CRIT - 1; i++) eh.crit[i] = h.crit[i+1];
      eh.crit[MAX_CRIT-1] = '0;
      eh.crit_cnt = h.crit_cnt - 1;
    end
    emode = (eh.crit_cnt == 0); emiss = 0;
    if (!emode) er = xy(cur, eh.crit[0]);
    else if ((h.msg_id % 3) != 0) er = port_mask_t'((h.msg_id * 5) % 31 + 1);
    else begin er = 5'b00001; emiss = 1; end
    checks++;
    if (out_data[HDR_W-1:0] !== eh || out_data[DW-1:HDR_W] !== in_data[DW-1:HDR_W] ||
        route !== er || lut_mode !== emode || lut_miss !== emiss) begin
      failures++;
      if (failures < 10) $display("cur=(%0d,%0d) cnt=%0d route %b/%b mode %0b/%0b miss %0b/%0b", cur.x, cur.y,
                                  h.crit_cnt, route, er, lut_mode, emode, lut_miss, emiss);
    end
  endtask

  initial begin
    head_t h;
    in_valid = 0; in_type = FT_BODY; in_data = 0; cur = '0;
    #1;
    for (int t = 0; t < 5000; t++) begin
      cur.x = 4'($urandom); cur.y = 4'($urandom);
      h = head_t'({$urandom, $urandom, $urandom});
      h.crit_cnt = 4'($urandom_range(0, MAX_CRIT));
      if ($urandom_range(0, 1)) h.crit[0] = cur;     // often at a critical node
      check_head(h);
    end
    // body and tail flits are not routed or modified
    for (int t = 0; t < 200; t++) begin
      in_valid = 1; in_type = $urandom_range(0, 1) ? FT_BODY : FT_TAIL;
      in_data = DW'({$urandom, $urandom, $urandom, $urandom});
      #1;
      checks++;
      if (route !== 0 || out_data !== in_data || lut_mode) failures++;
    end
    // Fig. 5: message from node 2 with critical nodes 2, 8, 11
    begin
      int path [6] = '{2, 3, 4, 8, 7, 11};
      port_mask_t exp_r [6] = '{5'b00100, 5'b00100, 5'b01000, 5'b10000, 5'b01000, 5'b00000};
      h = '0; h.msg_id = 1; h.prio = 5; h.crit_cnt = 3;
      h.crit[0] = nd(2); h.crit[1] = nd(8); h.crit[2] = nd(11);
      for (int k = 0; k < 6; k++) begin
        cur = nd(path[k]);
        in_valid = 1; in_type = FT_HEAD; in_data = '0; in_data[HDR_W-1:0] = h;
        #1;
        checks++;
        if (k < 5) begin
          if (route !== exp_r[k] || lut_mode) begin failures++; $display("fig5 hop %0d route %b exp %b", path[k], route, exp_r[k]); end
        end else begin
          if (!lut_mode) begin failures++; $display("fig5: node 11 not in table mode"); end
        end
        h = head_t'(out_data[HDR_W-1:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
