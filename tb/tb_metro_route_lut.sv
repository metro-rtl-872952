// tb_metro_route_lut: programs the routing table, then looks up random
// message ids on all ports in parallel and compares hit/mask with a model;
// also overwrites and invalidates entries.
module tb_metro_route_lut;
  import metro_pkg::*;
  localparam int E = 8, L = 5;
  logic clk = 0, rst_n = 0;
  logic cfg_we, cfg_valid;
  logic [$clog2(E)-1:0] cfg_idx;
  msg_id_t cfg_msg_id;
  port_mask_t cfg_mask;
  msg_id_t look_id [L];
  port_mask_t look_mask [L];
  logic look_hit [L];
  int checks = 0, failures = 0;
  logic m_valid [E];
  msg_id_t m_id [E];
  port_mask_t m_mask [E];

  metro_route_lut #(.ENTRIES(E), .NLOOK(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_entry(int idx, logic v, msg_id_t id, port_mask_t m);
    @(negedge clk);
    cfg_we = 1; cfg_idx = idx[$clog2(E)-1:0]; cfg_valid = v; cfg_msg_id = id; cfg_mask = m;
    @(posedge clk); #1;
    cfg_we = 0;
    m_valid[idx] = v; m_id[idx] = id; m_mask[idx] = m;
  endtask

  task automatic check_lookups();
    @(negedge clk);
    for (int p = 0; p < L; p++) begin
      // half the probes use a programmed id
      if ($urandom_range(0, 1)) look_id[p] = m_id[$urandom_range(0, E-1)];
      else look_id[p] = msg_id_t'($urandom_range(0, 63));
    end
    #1;
    for (int p = 0; p < L; p++) begin
      logic eh; port_mask_t em;
      eh = 0; em = '0;
      for (int e = 0; e < E; e++)
        if (!eh && m_valid[e] && m_id[e] == look_id[p]) begin eh = 1; em = m_mask[e]; end
      checks++;
      if (look_hit[p] !== eh || (eh && look_mask[p] !== em)) begin
        failures++;
        $display("port %0d id %0d: hit %0b/%0b mask %b/%b", p, look_id[p], look_hit[p], eh, look_mask[p], em);
      end
    end
  endtask

  initial begin
    cfg_we = 0; cfg_idx = 0; cfg_valid = 0; cfg_msg_id = 0; cfg_mask = 0;
    for (int p = 0; p < L; p++) look_id[p] = 0;
    for (int e = 0; e < E; e++) begin m_valid[e] = 0; m_id[e] = 0; m_mask[e] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_lookups();
    for (int e = 0; e < E; e++) write_entry(e, 1, msg_id_t'(e * 7 + 1), port_mask_t'($urandom_range(1, 31)));
    repeat (200) check_lookups();
    write_entry(3, 0, m_id[3], m_mask[3]);             // invalidate
    write_entry(5, 1, msg_id_t'(40), 5'b10101);       // overwrite
    repeat (200) check_lookups();
    // the Fig. 5 example: router 10 sends message 1 to west, south and eject
    write_entry(0, 1, msg_id_t'(1), 5'b11001);
    @(negedge clk); look_id[2] = 1; #1;
    checks++;
    if (!look_hit[2] || look_mask[2] !== 5'b11001) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
