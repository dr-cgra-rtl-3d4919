// tb_thread_sweep: thread-group sweep of a single-path loop-carried
// dependency, with and without a memory load on the dependent path, on the
// full grid at its default size.
//
//   with memory:    x[t] = x[t-1] + load(a[t])   (load/store unit -> CU0)
//   without memory: x[t] = x[t-1] + v[t]         (live value -> CU0)
//
// Each loop runs twice per thread-group size (8 ... 512): once with the
// ILDR off, where every x leaves the grid and comes back after a spill and
// reload delay of SPILL cycles, and once with the ILDR carrying x inside
// the unit. Every output is checked; the cycle counts and the speedup are
// printed, and the ILDR run must be faster for every size. The loop bodies
// of the measured benchmark are not published, so this sweep shows the
// trend, not the published numbers.
module tb_thread_sweep;
  import drcgra_pkg::*;

  localparam int NCU = 4, NLSU = 2, NLVI = 4, NLVO = 4;
  localparam int SPILL = 8;
  localparam int S_LSU0 = NCU, S_LVI0 = NCU + NLSU;
  localparam int D_LSU0 = 2 * NCU, D_LVO0 = 2 * NCU + 2 * NLSU;

  logic        clk = 0, rst_n = 1;
  logic        cfg_we;
  logic [7:0]  cfg_addr;
  logic [31:0] cfg_wdata;
  logic        lv_in_valid  [NLVI];
  token_t      lv_in_tok    [NLVI];
  logic        lv_in_ready  [NLVI];
  logic        lv_out_valid [NLVO];
  token_t      lv_out_tok   [NLVO];
  logic        lv_out_ready [NLVO];
  logic        mem_req_valid [NLSU];
  logic        mem_req_we    [NLSU];
  tid_t        mem_req_tid   [NLSU];
  data_t       mem_req_addr  [NLSU];
  data_t       mem_req_wdata [NLSU];
  logic        mem_req_ready [NLSU];
  logic        mem_rsp_valid [NLSU];
  tid_t        mem_rsp_tid   [NLSU];
  data_t       mem_rsp_rdata [NLSU];
  logic        mem_rsp_ready [NLSU];
  logic        ev_feedback [NCU];
  logic        ev_initial  [NCU];
  logic        ev_drop     [NCU];
  logic        ev_sel_wait [NCU];
  int          outstanding [NLSU];
  int          max_outstanding [NLSU];

  dr_cgra_top u_dut (.*);

  for (genvar l = 0; l < NLSU; l++) begin : g_mem
    mem_model #(.LAT_MIN(10), .LAT_MAX(20), .SLOTS(32)) u_mem (
      .clk(clk), .rst_n(rst_n),
      .req_valid(mem_req_valid[l]), .req_we(mem_req_we[l]), .req_tid(mem_req_tid[l]),
      .req_addr(mem_req_addr[l]), .req_wdata(mem_req_wdata[l]), .req_ready(mem_req_ready[l]),
      .rsp_valid(mem_rsp_valid[l]), .rsp_tid(mem_rsp_tid[l]), .rsp_rdata(mem_rsp_rdata[l]),
      .rsp_ready(mem_rsp_ready[l]), .outstanding(outstanding[l]),
      .max_outstanding(max_outstanding[l])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
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

  // one run of the loop; returns the cycles from the first input to the
  // last output
  task automatic run(input bit with_mem, input bit use_ildr, input int n, output int cycles);
    data_t exp_x [512];
    data_t src   [512];
    data_t x, prev;
    int    got, sent, start, ready_at;

    @(negedge clk);
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    wr(CFG_TG_SIZE, 32'(n));
    wr(CFG_CU_BASE + 0, 32'(OP_ADD) | (32'(use_ildr) << 4) | (32'd1 << 16));
    wr(CFG_ROUTE_BASE + 0, 32'h8000 | 32'(S_LVI0));
    wr(CFG_ROUTE_BASE + 1, 32'h8000 | 32'(with_mem ? S_LSU0 : S_LVI0 + 1));
    if (with_mem) begin
      wr(CFG_LSU_BASE + 0, 32'h0);
      wr(CFG_ROUTE_BASE + D_LSU0, 32'h8000 | 32'(S_LVI0 + 1));
    end
    wr(CFG_ROUTE_BASE + D_LVO0, 32'h8000 | 32'd0);

    x = 32'd99;
    for (int t = 0; t < n; t++) begin
      if (with_mem) begin
        src[t] = data_t'(t * 8 + 4096);
        x = x + (src[t] * 17 + 3);
      end else begin
        src[t] = data_t'($urandom % 65536);
        x = x + src[t];
      end
      exp_x[t] = x;
    end

    got = 0; sent = 0; prev = 32'd99; ready_at = 0;
    start = 0;
    for (int c = 0; c < 100000 && got < n; c++) begin
      @(negedge clk);
      // x of the previous iteration (only thread 0 when the ILDR is on)
      lv_in_valid[0] = use_ildr ? (ready_at == 0) : (c >= ready_at) && (got < n);
      lv_in_tok[0]   = {tid_t'(got), prev};
      // per-iteration input stream (addresses or addends)
      lv_in_valid[1] = (sent < n);
      lv_in_tok[1]   = {tid_t'(sent), src[sent < n ? sent : 0]};
      lv_out_ready[0] = 1;
      #1;
      if (lv_out_valid[0]) begin
        automatic int t = int'(lv_out_tok[0].tid);
        check(t == got && lv_out_tok[0].data == exp_x[t],
              $sformatf("mem=%0d ildr=%0d n=%0d thread %0d: %h", with_mem, use_ildr, n, t, lv_out_tok[0].data));
        prev = lv_out_tok[0].data;
        got++;
        ready_at = c + SPILL;
      end
      if (lv_in_valid[0] && lv_in_ready[0]) ready_at = 1 << 30;
      if (lv_in_valid[1] && lv_in_ready[1]) sent++;
      cycles = c + 1;
    end
    @(negedge clk);
    lv_in_valid[0] = 0; lv_in_valid[1] = 0;
    check(got == n, $sformatf("mem=%0d ildr=%0d n=%0d: %0d outputs", with_mem, use_ildr, n, got));
  endtask

  initial begin
    int sizes [7] = '{8, 16, 32, 64, 128, 256, 512};
    int cb, cd;
    #1 rst_n = 0;
    cfg_we = 0; cfg_addr = '0; cfg_wdata = '0;
    for (int i = 0; i < NLVI; i++) begin lv_in_valid[i] = 0; lv_in_tok[i] = '0; end
    for (int o = 0; o < NLVO; o++) lv_out_ready[o] = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int m = 1; m >= 0; m--) begin
      foreach (sizes[i]) begin
        run(m[0], 1'b0, sizes[i], cb);
        run(m[0], 1'b1, sizes[i], cd);
        $display("%s threads=%0d  spill=%0d cycles  ildr=%0d cycles  speedup=%0d.%02d",
                 m ? "with memory   " : "without memory", sizes[i], cb, cd, cb / cd, (cb * 100 / cd) % 100);
        check(cd < cb, $sformatf("ILDR faster at %0d threads", sizes[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
