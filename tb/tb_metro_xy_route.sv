// tb_metro_xy_route: exhaustive check of dimension-order routing on a
// 16 x 16 mesh: x is corrected first (east/west), then y (south/north).
module tb_metro_xy_route;
  import metro_pkg::*;
  node_t cur, target;
  port_mask_t out_mask, exp;
  int checks = 0, failures = 0;

  metro_xy_route dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int cx = 0; cx < 16; cx++)
      for (int cy = 0; cy < 16; cy++)
        for (int tx = 0; tx < 16; tx++)
          for (int ty = 0; ty < 16; ty++) begin
            cur.x = 4'(cx); cur.y = 4'(cy); target.x = 4'(tx); target.y = 4'(ty);
            #1;
            exp = '0;
            if (tx > cx)      exp = 5'b00100;   // east
            else if (tx < cx) exp = 5'b10000;   // west
            else if (ty > cy) exp = 5'b01000;   // south
            else if (ty < cy) exp = 5'b00010;   // north
            else              exp = 5'b00001;   // local
            checks++;
            if (out_mask !== exp) begin
              failures++;
              if (failures < 10) $display("cur=(%0d,%0d) tgt=(%0d,%0d) got %b exp %b", cx, cy, tx, ty, out_mask, exp);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
