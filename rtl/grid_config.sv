// grid_config: configuration registers of the DR-CGRA grid.
//
// Holds what the compiler's mapping programs into the array before a loop
// runs: the route of every grid destination, the operation, dependency
// enable, dependent operand and DIFF of every compute unit, the mode of
// every load/store unit and the size of the active thread group. Written one
// 32-bit word per cycle over a simple write bus (cfg_we, cfg_addr,
// cfg_wdata); the address map is in drcgra_pkg. Registers take effect the
// cycle after the write. Reset clears all routes and dependencies and sets
// the thread group to TG_RESET threads. Data bits that no field uses are
// ignored.
//
// Follows the paper: a compile-time configuration of instructions, routes
// and the per-dependency "diff" value. Own choices: the bus, the address map
// and the reset values.
module grid_config
  import drcgra_pkg::*;
#(
  parameter int unsigned NUM_CU   = 4,
  parameter int unsigned NUM_LSU  = 2,
  parameter int unsigned NUM_DST  = 16,
  parameter int unsigned SEL_W    = 4,
  parameter int unsigned TG_RESET = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [7:0]       cfg_addr,
  input  logic [31:0]      cfg_wdata,
  output logic [TID_W:0]   tg_size,
  output logic             route_en  [NUM_DST],
  output logic [SEL_W-1:0] route_sel [NUM_DST],
  output cu_cfg_t          cu_cfg    [NUM_CU],
  output lsu_cfg_t         lsu_cfg   [NUM_LSU]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tg_size <= (TID_W+1)'(TG_RESET);
      for (int d = 0; d < NUM_DST; d++) begin
        route_en[d]  <= 1'b0;
        route_sel[d] <= '0;
      end
      for (int u = 0; u < NUM_CU; u++) cu_cfg[u] <= '{op: OP_ADD, dep_en: 1'b0, dep_operand: 1'b0, diff: '0};
      for (int l = 0; l < NUM_LSU; l++) lsu_cfg[l] <= '0;
    end else if (cfg_we) begin
      if (cfg_addr == CFG_TG_SIZE) tg_size <= cfg_wdata[TID_W:0];
      for (int d = 0; d < NUM_DST; d++) begin
        if (cfg_addr == CFG_ROUTE_BASE + 8'(d)) begin
          route_en[d]  <= cfg_wdata[15];
          route_sel[d] <= cfg_wdata[SEL_W-1:0];
        end
      end
      for (int u = 0; u < NUM_CU; u++) begin
        if (cfg_addr == CFG_CU_BASE + 8'(u)) begin
          cu_cfg[u].op          <= alu_op_e'(cfg_wdata[3:0]);
          cu_cfg[u].dep_en      <= cfg_wdata[4];
          cu_cfg[u].dep_operand <= cfg_wdata[5];
          cu_cfg[u].diff        <= cfg_wdata[16 +: TID_W];
        end
      end
      for (int l = 0; l < NUM_LSU; l++) begin
        if (cfg_addr == CFG_LSU_BASE + 8'(l)) lsu_cfg[l].is_store <= cfg_wdata[0];
      end
    end
  end

endmodule
