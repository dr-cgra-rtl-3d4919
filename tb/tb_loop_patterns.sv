// tb_loop_patterns: the diverging-path and consecutive loop-carried
// dependency patterns on the full grid at its default size.
//
//   diverging, read after the update:   x1 = x1 + x2;  x6 = x1 + x5
//   diverging, read before the update:  x6 = x1 + x5;  x1 = x1 + x2
//   consecutive updates:                x1 = x1 + x2;  x1 = x1 + x3;  x1 = x1 + x4
//
// In the first two, CU0 updates x1 with its ILDR on (DIFF 1). After the
// update, CU1 reads x1 by a multicast route from CU0. Before the update,
// CU1 needs the x1 of the previous iteration, which the ILDR cannot deliver
// (it only feeds its own unit). So x1 leaves the grid on a live-value output
// and comes back on a live-value input tagged with the next thread ID,
// RELOAD cycles later. This testbench plays the live-value units that do
// that. The reload must add only a constant delay: the run-time difference
// between the two patterns is checked to be the same at 64 and 512 threads.
//
// The consecutive pattern chains CU0 -> CU1 -> CU2. Its dependency runs from
// the last unit back to the first, so it can only go round through the
// live-value reload, and the iterations serialise. This is checked as at
// least RELOAD cycles per iteration. Three updates are used instead of four
// because the grid has four live-value inputs, and one of them carries the
// reload.
//
// Every output value is checked against a reference computed here, and the
// ILDR feedback and drop events are counted.
module tb_loop_patterns;
  import drcgra_pkg::*;

  localparam int NCU = 4, NLSU = 2, NLVI = 4, NLVO = 4;
  localparam int RELOAD = 8;
  localparam int MAXN = 512;
  localparam int S_LVI0 = NCU + NLSU;
  localparam int D_LVO0 = 2 * NCU + 2 * NLSU;

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

  dr_cgra_top u_dut (.*);

  // no load/store unit is used: the memory channels stay idle
  for (genvar l = 0; l < NLSU; l++) begin : g_nomem
    assign mem_req_ready[l] = 1'b0;
    assign mem_rsp_valid[l] = 1'b0;
    assign mem_rsp_tid[l]   = '0;
    assign mem_rsp_rdata[l] = '0;
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

  int n_fb = 0, n_drop = 0;
  always @(posedge clk) begin
    for (int u = 0; u < NCU; u++) begin
      if (ev_feedback[u]) n_fb++;
      if (ev_drop[u])     n_drop++;
    end
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic route(input int dst, input int src);
    wr(CFG_ROUTE_BASE + 8'(dst), 32'h8000 | 32'(src));
  endtask

  // per-input stimulus: in_cnt[i] tokens, thread IDs 0, 1, ... in order
  data_t in_data [NLVI][MAXN];
  int    in_cnt  [NLVI];
  // expected values per live-value output and thread; out_on marks outputs
  // in use
  data_t exp_out [NLVO][MAXN];
  bit    out_on  [NLVO];

  localparam int P_AFTER = 0, P_BEFORE = 1, P_CONSEC = 2;

  // run one pattern over n threads; returns cycles from the first input to
  // the last output
  task automatic run(input int pat, input int n, output int cycles);
    data_t  x1, x2, x3, x4, x5;
    int     rl_lvi, rl_lvo;
    token_t rl_q [$];
    int     rl_due [$];
    int     sent [NLVI];
    int     got  [NLVO];
    bit     seen [NLVO][MAXN];
    bit     done;

    @(negedge clk);
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    n_fb = 0; n_drop = 0;

    // ---- reference and stimulus
    foreach (in_cnt[i]) in_cnt[i] = 0;
    foreach (out_on[o]) out_on[o] = 0;
    x1 = data_t'($urandom % 1000);
    rl_q.delete(); rl_due.delete();
    rl_lvi = -1; rl_lvo = -1;
    if (pat == P_CONSEC) begin
      rl_lvi = 0; rl_lvo = 0;
      rl_q.push_back({tid_t'(0), x1}); rl_due.push_back(0);
      in_cnt[1] = n; in_cnt[2] = n; in_cnt[3] = n;
      out_on[0] = 1;
      for (int t = 0; t < n; t++) begin
        x2 = data_t'($urandom % 65536); x3 = data_t'($urandom % 65536); x4 = data_t'($urandom % 65536);
        in_data[1][t] = x2; in_data[2][t] = x3; in_data[3][t] = x4;
        x1 = x1 + x2 + x3 + x4;
        exp_out[0][t] = x1;
      end
    end else begin
      // LVI0: initial x1 (thread 0 only), LVI1: x2, LVI2: x5
      in_cnt[0] = 1; in_data[0][0] = x1;
      in_cnt[1] = n; in_cnt[2] = n;
      out_on[0] = 1; out_on[1] = 1;
      if (pat == P_BEFORE) begin
        rl_lvi = 3; rl_lvo = 0;
        rl_q.push_back({tid_t'(0), x1}); rl_due.push_back(0);
      end
      for (int t = 0; t < n; t++) begin
        x2 = data_t'($urandom % 65536); x5 = data_t'($urandom % 65536);
        in_data[1][t] = x2; in_data[2][t] = x5;
        if (pat == P_BEFORE) exp_out[1][t] = x1 + x5;
        x1 = x1 + x2;
        exp_out[0][t] = x1;
        if (pat == P_AFTER) exp_out[1][t] = x1 + x5;
      end
    end

    // ---- configuration
    wr(CFG_TG_SIZE, 32'(n));
    if (pat == P_CONSEC) begin
      for (int u = 0; u < 3; u++) wr(CFG_CU_BASE + 8'(u), 32'(OP_ADD));
      route(0, S_LVI0 + 0);          // CU0.OP1 <- reloaded x1
      route(1, S_LVI0 + 1);          // CU0.OP2 <- x2
      route(2, 0);                   // CU1.OP1 <- CU0
      route(3, S_LVI0 + 2);          // CU1.OP2 <- x3
      route(4, 1);                   // CU2.OP1 <- CU1
      route(5, S_LVI0 + 3);          // CU2.OP2 <- x4
      route(D_LVO0 + 0, 2);          // x1 out <- CU2
    end else begin
      wr(CFG_CU_BASE + 0, 32'(OP_ADD) | (32'd1 << 4) | (32'd1 << 16));
      wr(CFG_CU_BASE + 1, 32'(OP_ADD));
      route(0, S_LVI0 + 0);          // CU0.OP1 <- initial x1 (dependent)
      route(1, S_LVI0 + 1);          // CU0.OP2 <- x2
      route(2, pat == P_AFTER ? 0 : S_LVI0 + 3); // CU1.OP1 <- updated / reloaded x1
      route(3, S_LVI0 + 2);          // CU1.OP2 <- x5
      route(D_LVO0 + 0, 0);          // x1 out <- CU0
      route(D_LVO0 + 1, 1);          // x6 out <- CU1
    end

    // ---- run
    foreach (sent[i]) sent[i] = 0;
    foreach (got[o]) got[o] = 0;
    foreach (seen[o, t]) seen[o][t] = 0;
    done = 0;
    cycles = 0;
    for (int c = 0; c < 200000 && !done; c++) begin
      @(negedge clk);
      for (int i = 0; i < NLVI; i++) begin
        if (i == rl_lvi) begin
          lv_in_valid[i] = (rl_q.size() > 0) && (c >= rl_due[0]);
          lv_in_tok[i]   = rl_q.size() > 0 ? rl_q[0] : '0;
        end else begin
          lv_in_valid[i] = sent[i] < in_cnt[i];
          lv_in_tok[i]   = {tid_t'(sent[i]), in_data[i][sent[i] < MAXN ? sent[i] : 0]};
        end
      end
      for (int o = 0; o < NLVO; o++) lv_out_ready[o] = ($urandom % 8) != 0;
      #1;
      for (int o = 0; o < NLVO; o++) begin
        if (lv_out_valid[o] && lv_out_ready[o]) begin
          automatic int t = int'(lv_out_tok[o].tid);
          check(out_on[o] && t < n && !seen[o][t] && lv_out_tok[o].data == exp_out[o][t],
                $sformatf("pattern %0d n=%0d output %0d thread %0d: %h", pat, n, o, t, lv_out_tok[o].data));
          if (t < n) seen[o][t] = 1;
          got[o]++;
          if (o == rl_lvo && t + 1 < n) begin
            rl_q.push_back({tid_t'(t + 1), lv_out_tok[o].data});
            rl_due.push_back(c + RELOAD);
          end
        end
      end
      for (int i = 0; i < NLVI; i++) begin
        if (lv_in_valid[i] && lv_in_ready[i]) begin
          if (i == rl_lvi) begin
            void'(rl_q.pop_front()); void'(rl_due.pop_front());
          end else sent[i]++;
        end
      end
      done = 1;
      for (int o = 0; o < NLVO; o++) if (out_on[o] && got[o] < n) done = 0;
      cycles = c + 1;
    end
    @(negedge clk);
    foreach (lv_in_valid[i]) lv_in_valid[i] = 0;
    repeat (4) @(negedge clk);
    for (int o = 0; o < NLVO; o++)
      if (out_on[o]) check(got[o] == n, $sformatf("pattern %0d n=%0d output %0d: %0d tokens", pat, n, o, got[o]));
    if (pat == P_CONSEC) begin
      check(n_fb == 0, $sformatf("consecutive: %0d feedback writes", n_fb));
    end else begin
      check(n_fb == n - 1, $sformatf("pattern %0d n=%0d: %0d feedback writes", pat, n, n_fb));
      check(n_drop == 1, $sformatf("pattern %0d n=%0d: %0d drops", pat, n, n_drop));
    end
  endtask

  initial begin
    int ca64, cb64, ca512, cb512, cc;
    #1 rst_n = 0;
    cfg_we = 0; cfg_addr = '0; cfg_wdata = '0;
    for (int i = 0; i < NLVI; i++) begin lv_in_valid[i] = 0; lv_in_tok[i] = '0; end
    for (int o = 0; o < NLVO; o++) lv_out_ready[o] = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    run(P_AFTER,  64,  ca64);
    run(P_BEFORE, 64,  cb64);
    run(P_AFTER,  512, ca512);
    run(P_BEFORE, 512, cb512);
    run(P_CONSEC, 512, cc);
    $display("read after update : 64 threads %0d cycles, 512 threads %0d cycles", ca64, ca512);
    $display("read before update: 64 threads %0d cycles, 512 threads %0d cycles (reload delay %0d)",
             cb64, cb512, RELOAD);
    $display("consecutive updates through the reload: 512 threads %0d cycles", cc);
    // the reload adds a constant delay, not a delay per iteration
    check(cb64 - ca64 <= 2 * RELOAD + 8 && cb512 - ca512 <= 2 * RELOAD + 8,
          $sformatf("reload delay 64: %0d, 512: %0d", cb64 - ca64, cb512 - ca512));
    // the consecutive chain serialises on the reload
    check(cc >= 512 * RELOAD, $sformatf("consecutive pattern %0d cycles", cc));
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
