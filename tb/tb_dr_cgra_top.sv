// tb_dr_cgra_top: end-to-end runs of the whole grid at its default size
// (4 compute units, 2 load/store units, thread group of 512 threads).
//
//  1. Dependency with background memory access (x1 += load(a[t]);
//     x4 = x1 + x3): the load/store unit feeds compute unit 0, whose ILDR
//     carries x1 from thread t to thread t+1; compute unit 1 consumes the
//     updated x1 and a per-thread live value. 512 threads, one initial
//     value of x1 from outside.
//  2. The single-path loop x1 += x2 with the dependency switched off, as a
//     grid without the ILDR must run it: every x1 leaves the grid and is fed
//     back in from outside after a spill/reload delay of SPILL cycles.
//  3. The same loop with the ILDR on.
// Checks every output value, and counts each mechanism of the design:
// ILDR feedback, initial value through the original path, drop at the end of
// the thread group, back-pressure stalls in the network, overlapping and
// out-of-order memory accesses, multicast routing, and the mode switch
// (phase 3 must be faster than phase 2). A mechanism that never happened is
// a failure.
module tb_dr_cgra_top;
  import drcgra_pkg::*;

  localparam int NCU = 4, NLSU = 2, NLVI = 4, NLVO = 4;
  localparam int N = 512;
  localparam int SPILL = 8;
  // network indices
  localparam int S_CU0 = 0, S_CU1 = 1, S_LSU0 = NCU, S_LVI0 = NCU + NLSU;
  localparam int D_CU0 = 0, D_LSU0 = 2 * NCU, D_LVO0 = 2 * NCU + 2 * NLSU;

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
    mem_model u_mem (
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

  // ------------------------------------------------------ event counters
  int cyc = 0;
  int n_fb = 0, n_init = 0, n_drop = 0, n_stall = 0, n_ooo = 0, n_mcast = 0;
  int last_rsp_tid = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int u = 0; u < NCU; u++) begin
      if (ev_feedback[u]) n_fb++;
      if (ev_initial[u])  n_init++;
      if (ev_drop[u])     n_drop++;
    end
    for (int k = 0; k < NCU + NLSU + NLVI; k++)
      if (u_dut.src_valid[k] && !u_dut.src_ready[k]) n_stall++;
    if (mem_rsp_valid[0] && mem_rsp_ready[0]) begin
      if (int'(mem_rsp_tid[0]) < last_rsp_tid) n_ooo++;
      last_rsp_tid <= int'(mem_rsp_tid[0]);
    end
    if (lv_out_valid[0] && lv_out_ready[0] && u_dut.dst_valid[2] && u_dut.dst_ready[2]) n_mcast++;
  end

  // ---------------------------------------------------------- helpers
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic route(input int dst, input int src);
    wr(CFG_ROUTE_BASE + 8'(dst), 32'h8000 | 32'(src));
  endtask

  task automatic unroute_all();
    for (int d = 0; d < 2 * NCU + 2 * NLSU + NLVO; d++) wr(CFG_ROUTE_BASE + 8'(d), 32'h0);
  endtask

  function automatic logic [31:0] cu_word(input alu_op_e op, input bit dep, input bit dop, input int diff);
    return 32'(op) | (32'(dep) << 4) | (32'(dop) << 5) | (32'(diff) << 16);
  endfunction

  int    qt [NLVI][$];
  data_t qd [NLVI][$];
  data_t exp_out [NLVO][N];
  int    got [NLVO][N];
  int    n_got [NLVO];

  // drives the live-value inputs from their queues, collects live-value
  // outputs, until want[o] tokens came out of every output o
  task automatic stream(input int want [NLVO], input int max_cycles, output int cycles);
    int start = cyc;
    bit done;
    for (int o = 0; o < NLVO; o++) begin
      n_got[o] = 0;
      for (int t = 0; t < N; t++) got[o][t] = 0;
    end
    for (int c = 0; c < max_cycles; c++) begin
      @(negedge clk);
      for (int i = 0; i < NLVI; i++) begin
        lv_in_valid[i] = (qt[i].size() > 0);
        if (qt[i].size() > 0) lv_in_tok[i] = {tid_t'(qt[i][0]), qd[i][0]};
      end
      for (int o = 0; o < NLVO; o++) lv_out_ready[o] = ($urandom % 8 != 0);
      #1;
      for (int o = 0; o < NLVO; o++)
        if (lv_out_valid[o] && lv_out_ready[o]) begin
          automatic int t = int'(lv_out_tok[o].tid);
          check(got[o][t] == 0, $sformatf("output %0d thread %0d once", o, t));
          check(lv_out_tok[o].data == exp_out[o][t],
                $sformatf("output %0d thread %0d: %h, expected %h", o, t, lv_out_tok[o].data, exp_out[o][t]));
          got[o][t]++;
          n_got[o]++;
        end
      for (int i = 0; i < NLVI; i++)
        if (lv_in_valid[i] && lv_in_ready[i]) begin void'(qt[i].pop_front()); void'(qd[i].pop_front()); end
      done = 1;
      for (int o = 0; o < NLVO; o++) if (n_got[o] < want[o]) done = 0;
      if (done) break;
    end
    @(negedge clk);
    for (int i = 0; i < NLVI; i++) lv_in_valid[i] = 0;
    for (int o = 0; o < NLVO; o++)
      check(n_got[o] == want[o], $sformatf("output %0d delivered %0d of %0d", o, n_got[o], want[o]));
    cycles = cyc - start;
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    int want [NLVO];
    int cyc_mem, cyc_base, cyc_dr;
    data_t x, x2 [N];

    #1 rst_n = 0;
    cfg_we = 0; cfg_addr = '0; cfg_wdata = '0;
    for (int i = 0; i < NLVI; i++) begin lv_in_valid[i] = 0; lv_in_tok[i] = '0; end
    for (int o = 0; o < NLVO; o++) lv_out_ready[o] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ================================================= phase 1
    wr(CFG_TG_SIZE, 32'(N));
    wr(CFG_LSU_BASE + 0, 32'h0);                              // LSU0 loads
    wr(CFG_CU_BASE + 0, cu_word(OP_ADD, 1, 0, 1));            // CU0: x1 += ld, OP1 dependent, diff 1
    wr(CFG_CU_BASE + 1, cu_word(OP_ADD, 0, 0, 0));            // CU1: x4 = x1 + x3
    route(D_LSU0,     S_LVI0 + 1);                            // address stream -> LSU0
    route(D_CU0,      S_LVI0);                                // initial x1 -> CU0.OP1
    route(D_CU0 + 1,  S_LSU0);                                // loaded word -> CU0.OP2
    route(2,          S_CU0);                                 // x1 -> CU1.OP1
    route(3,          S_LVI0 + 2);                            // x3 -> CU1.OP2
    route(D_LVO0,     S_CU0);                                 // x1 leaves (SET_VAL x1)
    route(D_LVO0 + 1, S_CU1);                                 // x4 leaves

    x = 32'd12345;
    qt[0].push_back(0); qd[0].push_back(x);
    for (int t = 0; t < N; t++) begin
      automatic data_t a  = data_t'(t * 4 + 64);
      automatic data_t x3 = data_t'($urandom);
      x = x + (a * 17 + 3);
      exp_out[0][t] = x;
      exp_out[1][t] = x + x3;
      qt[1].push_back(t); qd[1].push_back(a);
      qt[2].push_back(t); qd[2].push_back(x3);
    end
    want = '{N, N, 0, 0};
    stream(want, 20000, cyc_mem);
    $display("phase 1: %0d threads with memory access in %0d cycles", N, cyc_mem);
    check(n_fb == N - 1, $sformatf("ILDR feedback writes %0d", n_fb));
    check(n_init == 1, $sformatf("initial values %0d", n_init));
    check(n_drop == 1, $sformatf("drops at group end %0d", n_drop));
    check(n_mcast > 0, "multicast of x1 to grid and output");
    check(max_outstanding[0] > 1, $sformatf("overlapping memory accesses %0d", max_outstanding[0]));
    check(n_ooo > 0, $sformatf("out-of-order memory responses %0d", n_ooo));
    check(n_stall > 0, $sformatf("back-pressure stalls in the network %0d", n_stall));

    // ================================================= phase 2: no ILDR
    unroute_all();
    wr(CFG_CU_BASE + 0, cu_word(OP_ADD, 0, 0, 0));
    wr(CFG_CU_BASE + 1, cu_word(OP_ADD, 0, 0, 0));
    route(D_CU0,     S_LVI0);
    route(D_CU0 + 1, S_LVI0 + 1);
    route(D_LVO0,    S_CU0);
    x = 32'd7;
    for (int t = 0; t < N; t++) begin
      x2[t] = data_t'($urandom % 100000);
      x = x + x2[t];
      exp_out[0][t] = x;
      qt[1].push_back(t); qd[1].push_back(x2[t]);
    end
    begin
      // x1 of thread t-1 re-enters from outside SPILL cycles after it left
      automatic int start = cyc;
      automatic int n = 0;
      automatic data_t prev = 32'd7;
      automatic int ready_at = 0;
      for (int o = 0; o < NLVO; o++) n_got[o] = 0;
      for (int c = 0; c < 100000 && n < N; c++) begin
        @(negedge clk);
        lv_in_valid[0] = (c >= ready_at) && (n < N) && (qt[0].size() == 0 || 1);
        lv_in_tok[0]   = {tid_t'(n), prev};
        lv_in_valid[1] = (qt[1].size() > 0);
        if (qt[1].size() > 0) lv_in_tok[1] = {tid_t'(qt[1][0]), qd[1][0]};
        lv_out_ready[0] = 1;
        #1;
        if (lv_out_valid[0]) begin
          automatic int t = int'(lv_out_tok[0].tid);
          check(lv_out_tok[0].data == exp_out[0][t], $sformatf("baseline thread %0d", t));
          prev = lv_out_tok[0].data;
          n++;
          ready_at = c + SPILL;
        end
        if (lv_in_valid[0] && lv_in_ready[0]) ready_at = 1 << 30;
        if (lv_in_valid[1] && lv_in_ready[1]) begin void'(qt[1].pop_front()); void'(qd[1].pop_front()); end
      end
      @(negedge clk);
      lv_in_valid[0] = 0; lv_in_valid[1] = 0;
      cyc_base = cyc - start;
      check(n == N, $sformatf("baseline produced %0d of %0d", n, N));
    end
    $display("phase 2: %0d threads without ILDR in %0d cycles", N, cyc_base);

    // ================================================= phase 3: ILDR on
    wr(CFG_CU_BASE + 0, cu_word(OP_ADD, 1, 0, 1));
    qt[0].push_back(0); qd[0].push_back(32'd7);
    for (int t = 0; t < N; t++) begin qt[1].push_back(t); qd[1].push_back(x2[t]); end
    n_fb = 0; n_drop = 0;
    want = '{N, 0, 0, 0};
    stream(want, 20000, cyc_dr);
    $display("phase 3: %0d threads with ILDR in %0d cycles, speedup %0d.%02d", N, cyc_dr,
             cyc_base / cyc_dr, (cyc_base * 100 / cyc_dr) % 100);
    check(n_fb == N - 1, $sformatf("phase 3 feedback writes %0d", n_fb));
    check(n_drop == 1, $sformatf("phase 3 drops %0d", n_drop));
    check(cyc_dr < cyc_base, "mode switch: ILDR run faster than spilling run");

    $display("mechanisms: feedback=%0d initial=%0d drop=%0d stall=%0d multicast=%0d mem_overlap=%0d mem_ooo=%0d",
             n_fb, n_init, n_drop, n_stall, n_mcast, max_outstanding[0], n_ooo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
