// static_noc: statically routed token network of the DR-CGRA grid.
//
// Every unit input (destination) is connected to one unit output (source)
// chosen at configuration time; a source may feed several destinations. A
// source's token is handed to all of its destinations in the same cycle and
// only when every one of them can take it, so a multicast token is never
// split. A source that no destination selects is drained (its ready is
// high) and its tokens are discarded.
//
// Interface: per source valid/token/ready, per destination valid/token/ready,
// and per destination route_en/route_sel. Combinational, no buffering: the
// units' token buffers are the storage of the network. Destination ready
// must not depend on destination valid (all grid units obey this).
//
// Follows the paper: a statically routed network whose routing is fixed by
// the compiler and programmed into the array. Own choice: a full crossbar in
// place of the mesh of switches of the physical grid, which keeps any mapping
// routable and adds no hop latency.
module static_noc
  import drcgra_pkg::*;
#(
  parameter int unsigned NUM_SRC = 10,
  parameter int unsigned NUM_DST = 16,
  localparam int unsigned SEL_W  = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1
) (
  input  logic             src_valid [NUM_SRC],
  input  token_t           src_tok   [NUM_SRC],
  output logic             src_ready [NUM_SRC],
  output logic             dst_valid [NUM_DST],
  output token_t           dst_tok   [NUM_DST],
  input  logic             dst_ready [NUM_DST],
  input  logic             route_en  [NUM_DST],
  input  logic [SEL_W-1:0] route_sel [NUM_DST]
);

  always_comb begin
    for (int s = 0; s < NUM_SRC; s++) begin
      src_ready[s] = 1'b1;
      for (int d = 0; d < NUM_DST; d++) begin
        if (route_en[d] && route_sel[d] == SEL_W'(s) && !dst_ready[d]) src_ready[s] = 1'b0;
      end
    end
    for (int d = 0; d < NUM_DST; d++) begin
      if (route_en[d] && int'(route_sel[d]) < NUM_SRC) begin
        dst_valid[d] = src_valid[route_sel[d]] && src_ready[route_sel[d]];
        dst_tok[d]   = src_tok[route_sel[d]];
      end else begin
        dst_valid[d] = 1'b0;
        dst_tok[d]   = '0;
      end
    end
  end

endmodule
