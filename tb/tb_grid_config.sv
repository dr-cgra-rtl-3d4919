// tb_grid_config: checks reset values, then writes every configuration
// register with random contents through the write bus and checks each
// decoded field the cycle after, and that writes to other addresses leave
// a register alone.
module tb_grid_config;
  import drcgra_pkg::*;

  localparam int NCU = 4, NLSU = 2, ND = 16, SW = 4;
  logic           clk = 0, rst_n = 1;
  logic           cfg_we;
  logic [7:0]     cfg_addr;
  logic [31:0]    cfg_wdata;
  logic [TID_W:0] tg_size;
  logic           route_en  [ND];
  logic [SW-1:0]  route_sel [ND];
  cu_cfg_t        cu_cfg    [NCU];
  lsu_cfg_t       lsu_cfg   [NLSU];
  int             checks = 0, failures = 0;

  grid_config #(.NUM_CU(NCU), .NUM_LSU(NLSU), .NUM_DST(ND), .SEL_W(SW), .TG_RESET(512)) u_dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t %s", $time, msg);
    end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    logic [31:0] w;
    #1 rst_n = 0;
    cfg_we = 0; cfg_addr = '0; cfg_wdata = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(tg_size == 512, "thread group resets to 512");
    for (int d = 0; d < ND; d++) check(!route_en[d], "routes reset off");
    for (int u = 0; u < NCU; u++) check(!cu_cfg[u].dep_en, "dependency resets off");

    for (int rep = 0; rep < 5; rep++) begin
      w = $urandom % 513;
      wr(CFG_TG_SIZE, w);
      check(tg_size == w[TID_W:0], "thread group size");
      for (int d = 0; d < ND; d++) begin
        w = $urandom;
        wr(CFG_ROUTE_BASE + 8'(d), w);
        check(route_en[d] == w[15] && route_sel[d] == w[SW-1:0], $sformatf("route %0d", d));
      end
      for (int u = 0; u < NCU; u++) begin
        w = $urandom;
        w[3:0] = 4'($urandom % 11);
        wr(CFG_CU_BASE + 8'(u), w);
        check(cu_cfg[u].op == alu_op_e'(w[3:0]) && cu_cfg[u].dep_en == w[4] &&
              cu_cfg[u].dep_operand == w[5] && cu_cfg[u].diff == w[16 +: TID_W],
              $sformatf("compute unit %0d", u));
      end
      for (int l = 0; l < NLSU; l++) begin
        w = $urandom;
        wr(CFG_LSU_BASE + 8'(l), w);
        check(lsu_cfg[l].is_store == w[0], $sformatf("load/store unit %0d", l));
      end
      // an unrelated address leaves the thread group size alone
      w = 32'(tg_size);
      wr(8'hF0, 32'h0);
      check(32'(tg_size) == w, "unmapped address ignored");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
