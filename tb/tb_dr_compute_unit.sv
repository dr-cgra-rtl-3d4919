// tb_dr_compute_unit: runs loop-carried chains through one compute unit.
//  1: x[t] = x[t-1] + v[t], dependent OP1, diff 1, 64 threads, only x[-1]
//     enters from outside. Checks every result, that each fed-back operand
//     enters the token buffer in the same cycle its result is on the output
//     (one cycle from result to next iteration's operand), and that the
//     chain advances one iteration every 2 cycles.
//  2: y[t] = w[t] - y[t-2], dependent OP2, diff 2, random output stalls.
//  3: no dependency: independent products in scrambled thread order.
module tb_dr_compute_unit;
  import drcgra_pkg::*;

  logic           clk = 0, rst_n = 1;
  cu_cfg_t        cfg;
  logic [TID_W:0] tg_size;
  logic           in_valid [2];
  token_t         in_tok   [2];
  logic           in_ready [2];
  logic           out_valid, out_ready;
  token_t         out_tok;
  logic           ev_feedback, ev_initial, ev_drop, ev_sel_wait;
  int             checks = 0, failures = 0;

  dr_compute_unit u_dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t %s", $time, msg);
    end
  endtask

  // per-cycle bookkeeping
  int cyc = 0;
  int n_fb, n_init, n_drop, n_stall;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_feedback) n_fb++;
    if (ev_initial)  n_init++;
    if (ev_drop)     n_drop++;
    if (ev_sel_wait) n_stall++;
  end

  localparam int N = 64;
  data_t exp_val [N];
  int    got     [N];
  int    t_out   [N];
  int    qt [2][$];
  data_t qd [2][$];
  int    n_out;
  int    rand_ready;

  // drives the two input queues and collects outputs until n tokens came out
  task automatic run(input int n, input int max_cycles);
    n_out = 0;
    for (int c = 0; c < max_cycles && n_out < n; c++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        in_valid[p] = (qt[p].size() > 0);
        if (qt[p].size() > 0) in_tok[p] = {tid_t'(qt[p][0]), qd[p][0]};
      end
      out_ready = rand_ready ? ($urandom % 3 != 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        automatic int t = int'(out_tok.tid);
        check(t < n && got[t] == 0, $sformatf("thread %0d output once", t));
        check(out_tok.data == exp_val[t], $sformatf("thread %0d value %h exp %h", t, out_tok.data, exp_val[t]));
        if (t < n) begin got[t]++; t_out[t] = cyc; end
        n_out++;
        if (!rand_ready && cfg.dep_en && t + int'(cfg.diff) < int'(tg_size))
          check(ev_feedback, $sformatf("thread %0d result fed back in its output cycle", t));
      end
      for (int p = 0; p < 2; p++)
        if (in_valid[p] && in_ready[p]) begin void'(qt[p].pop_front()); void'(qd[p].pop_front()); end
    end
    @(negedge clk);
    in_valid[0] = 0; in_valid[1] = 0;
    check(n_out == n, $sformatf("all %0d threads produced (%0d)", n, n_out));
  endtask

  initial begin
    data_t v [N];
    #1 rst_n = 0;
    in_valid[0] = 0; in_valid[1] = 0; out_ready = 0;
    in_tok[0] = '0; in_tok[1] = '0;
    cfg = '{op: OP_ADD, dep_en: 1'b1, dep_operand: 1'b0, diff: tid_t'(1)};
    tg_size = (TID_W+1)'(N);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // ---------------------------------------------------------------- 1
    n_fb = 0; n_init = 0; n_drop = 0; n_stall = 0;
    rand_ready = 0;
    foreach (got[i]) got[i] = 0;
    begin
      data_t x;
      x = 32'd1000;
      qt[0].push_back(0); qd[0].push_back(x);
      for (int t = 0; t < N; t++) begin
        v[t] = data_t'($urandom % 1000);
        x = x + v[t];
        exp_val[t] = x;
        qt[1].push_back(t); qd[1].push_back(v[t]);
      end
    end
    run(N, 2000);
    check(n_fb == N - 1, $sformatf("feedback writes %0d", n_fb));
    check(n_init == 1, $sformatf("initial values %0d", n_init));
    check(n_drop == 1, $sformatf("dropped at group end %0d", n_drop));
    for (int t = 10; t < N - 1; t++)
      check(t_out[t+1] - t_out[t] == 2, $sformatf("iteration interval %0d at thread %0d", t_out[t+1] - t_out[t], t));

    // ---------------------------------------------------------------- 2
    cfg = '{op: OP_SUB, dep_en: 1'b1, dep_operand: 1'b1, diff: tid_t'(2)};
    rand_ready = 1;
    foreach (got[i]) got[i] = 0;
    begin
      data_t y [N];
      data_t w;
      y[0] = 0; y[1] = 0;
      qt[1].push_back(0); qd[1].push_back(32'd5);
      qt[1].push_back(1); qd[1].push_back(32'd9);
      for (int t = 0; t < N; t++) begin
        w = data_t'($urandom);
        y[t] = w - ((t < 2) ? ((t == 0) ? 32'd5 : 32'd9) : y[t-2]);
        exp_val[t] = y[t];
        qt[0].push_back(t); qd[0].push_back(w);
      end
    end
    n_fb = 0; n_drop = 0;
    run(N, 4000);
    check(n_fb == N - 2, $sformatf("diff-2 feedback writes %0d", n_fb));
    check(n_drop == 2, $sformatf("diff-2 drops %0d", n_drop));

    // ---------------------------------------------------------------- 3
    cfg = '{op: OP_MUL, dep_en: 1'b0, dep_operand: 1'b0, diff: tid_t'(1)};
    foreach (got[i]) got[i] = 0;
    begin
      int ord [2][N];
      data_t a [N], b [N];
      for (int t = 0; t < N; t++) begin
        a[t] = $urandom; b[t] = $urandom; exp_val[t] = a[t] * b[t];
        ord[0][t] = t; ord[1][t] = t;
      end
      for (int p = 0; p < 2; p++)
        for (int i = 0; i + 1 < N; i += 2)
          if ($urandom % 2) begin
            automatic int tmp = ord[p][i]; ord[p][i] = ord[p][i+1]; ord[p][i+1] = tmp;
          end
      for (int i = 0; i < N; i++) begin
        qt[0].push_back(ord[0][i]); qd[0].push_back(a[ord[0][i]]);
        qt[1].push_back(ord[1][i]); qd[1].push_back(b[ord[1][i]]);
      end
    end
    n_fb = 0;
    run(N, 4000);
    check(n_fb == 0, "no feedback without dependency");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
