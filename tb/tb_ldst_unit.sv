// tb_ldst_unit: 100 loads with addresses in scrambled thread order against a
// memory that answers out of order, then 60 stores whose address and data
// tokens arrive separately and in different orders, then loads of the stored words. Checks every
// output token's thread and value, that each thread comes out once, and
// that several accesses were in flight at once.
module tb_ldst_unit;
  import drcgra_pkg::*;

  logic     clk = 0, rst_n = 1;
  lsu_cfg_t cfg;
  logic     in_valid [2];
  token_t   in_tok   [2];
  logic     in_ready [2];
  logic     out_valid, out_ready;
  token_t   out_tok;
  logic     mem_req_valid, mem_req_we, mem_req_ready;
  tid_t     mem_req_tid;
  data_t    mem_req_addr, mem_req_wdata;
  logic     mem_rsp_valid, mem_rsp_ready;
  tid_t     mem_rsp_tid;
  data_t    mem_rsp_rdata;
  int       outstanding, max_outstanding;
  int       checks = 0, failures = 0;

  ldst_unit u_dut (.*);

  mem_model u_mem (
    .clk(clk), .rst_n(rst_n),
    .req_valid(mem_req_valid), .req_we(mem_req_we), .req_tid(mem_req_tid),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_ready(mem_req_ready),
    .rsp_valid(mem_rsp_valid), .rsp_tid(mem_rsp_tid), .rsp_rdata(mem_rsp_rdata),
    .rsp_ready(mem_rsp_ready), .outstanding(outstanding), .max_outstanding(max_outstanding)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t %s", $time, msg);
    end
  endtask

  localparam int N = 100;
  data_t exp_val [N];
  int    got [N];
  int    qt [2][$];
  data_t qd [2][$];

  task automatic run(input int n);
    int n_out = 0;
    foreach (got[i]) got[i] = 0;
    for (int c = 0; c < 5000 && n_out < n; c++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        in_valid[p] = (qt[p].size() > 0) && ($urandom % 3 != 0);
        if (qt[p].size() > 0) in_tok[p] = {tid_t'(qt[p][0]), qd[p][0]};
      end
      out_ready = ($urandom % 4 != 0);
      #1;
      if (out_valid && out_ready) begin
        automatic int t = int'(out_tok.tid);
        check(t < n && got[t] == 0, $sformatf("thread %0d once", t));
        check(out_tok.data == exp_val[t], $sformatf("thread %0d data %h exp %h", t, out_tok.data, exp_val[t]));
        if (t < n) got[t]++;
        n_out++;
      end
      for (int p = 0; p < 2; p++)
        if (in_valid[p] && in_ready[p]) begin void'(qt[p].pop_front()); void'(qd[p].pop_front()); end
    end
    @(negedge clk);
    in_valid[0] = 0; in_valid[1] = 0;
    check(n_out == n, $sformatf("%0d of %0d threads answered", n_out, n));
  endtask

  initial begin
    int ord [N];
    #1 rst_n = 0;
    in_valid[0] = 0; in_valid[1] = 0; out_ready = 0;
    in_tok[0] = '0; in_tok[1] = '0;
    cfg.is_store = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // loads
    for (int t = 0; t < N; t++) ord[t] = t;
    for (int i = 0; i < N; i++) begin
      automatic int j = $urandom % N;
      automatic int tmp = ord[i]; ord[i] = ord[j]; ord[j] = tmp;
    end
    for (int i = 0; i < N; i++) begin
      automatic int t = ord[i];
      automatic data_t a = data_t'(t * 5 + 100);
      exp_val[t] = a * 17 + 3;
      qt[0].push_back(t); qd[0].push_back(a);
    end
    run(N);
    check(max_outstanding > 1, $sformatf("overlapping accesses (%0d)", max_outstanding));

    // stores
    cfg.is_store = 1;
    for (int t = 0; t < 60; t++) begin
      exp_val[t] = data_t'($urandom);
      qt[0].push_back(t); qd[0].push_back(data_t'(t + 5000));
    end
    // data tokens in a locally scrambled order (pairs swapped at random)
    for (int t = 0; t < 60; t += 2) begin
      automatic bit sw = $urandom % 2;
      qt[1].push_back(sw ? t + 1 : t); qd[1].push_back(exp_val[sw ? t + 1 : t]);
      qt[1].push_back(sw ? t : t + 1); qd[1].push_back(exp_val[sw ? t : t + 1]);
    end
    run(60);

    // read back
    cfg.is_store = 0;
    for (int t = 0; t < 60; t++) begin
      qt[0].push_back(t); qd[0].push_back(data_t'(t + 5000));
    end
    run(60);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
