// metro_flit_fifo: the input buffer of one router port.
//
// A synchronous first-in first-out queue of WIDTH-bit entries. In the router
// each entry is a flit together with the output-port mask that route
// computation produced for it while it was being written (the BW and RC
// stages share a cycle). The head entry is visible combinationally on
// rd_data whenever empty is low; a pop removes it at the clock edge. A push
// and a pop in the same cycle are allowed, also when full (the pop frees the
// slot). Writing a full queue or reading an empty one is a protocol error and
// is flagged by assertions: the upstream credit counter guarantees it never
// happens. The paper names the buffer but gives no depth; DEPTH is this
// design's choice, sized to cover the credit round trip.
module metro_flit_fifo #(
  parameter int unsigned WIDTH = 1031,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  assign empty   = (cnt == 0);
  assign full    = (cnt == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign count   = cnt;
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      cnt <= cnt + CNT_W'(push) - CNT_W'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
