// tb_token_buffer: checks tagged-token matching on a 16-row table, so that
// threads share rows.
//  A: 300 threads whose OP1 and OP2 arrive on the two ports in locally
//     shuffled, independent orders with random gaps and random issue
//     back-pressure; every thread must issue exactly once with its own pair.
//  B: both operands of one thread in the same cycle issue the very next
//     cycle, and the row is free after issue.
//  C: a token whose row holds another thread is held off until that row
//     issues; a token of the row's own thread is taken.
//  D: two different threads claiming one empty row in one cycle: port 0
//     wins, port 1 waits.
//  E: single-operand mode issues on OP1 alone.
module tb_token_buffer;
  import drcgra_pkg::*;

  localparam int DEPTH = 16;
  localparam int N     = 300;

  logic   clk = 0, rst_n = 1;
  logic   need_op2;
  logic   w_valid [2];
  token_t w_tok   [2];
  logic   w_ready [2];
  logic   out_valid, out_ready;
  tid_t   out_tid;
  data_t  out_op1, out_op2;
  int     checks = 0, failures = 0;

  token_buffer #(.DEPTH(DEPTH)) u_dut (.*);

  always #5 clk = ~clk;

  function automatic data_t v1(int t); return data_t'(32'h1000_0000 + t * 7); endfunction
  function automatic data_t v2(int t); return data_t'(32'h2000_0000 ^ (t * 13)); endfunction

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t %s", $time, msg);
    end
  endtask

  task automatic idle();
    w_valid[0] = 0; w_valid[1] = 0; out_ready = 0;
  endtask

  // ------------------------------------------------------------ phase A
  int q [2][$];
  int issued [N];
  int n_issued;

  task automatic make_order(input int p);
    q[p] = {};
    for (int t = 0; t < N; t++) q[p].push_back(t);
    for (int i = 0; i + 1 < N; i++)
      if ($urandom % 2) begin
        automatic int tmp = q[p][i]; q[p][i] = q[p][i+1]; q[p][i+1] = tmp;
      end
  endtask

  initial begin
    #1 rst_n = 0;
    need_op2 = 1;
    idle();
    w_tok[0] = '0; w_tok[1] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- A
    make_order(0); make_order(1);
    foreach (issued[i]) issued[i] = 0;
    n_issued = 0;
    for (int cyc = 0; cyc < 20000 && n_issued < N; cyc++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        w_valid[p] = (q[p].size() > 0) && ($urandom % 4 != 0);
        if (q[p].size() > 0) w_tok[p] = {tid_t'(q[p][0]), (p == 0) ? v1(q[p][0]) : v2(q[p][0])};
      end
      out_ready = ($urandom % 3 != 0);
      #1;
      if (out_valid && out_ready) begin
        automatic int t = int'(out_tid);
        check(out_op1 == v1(t) && out_op2 == v2(t), $sformatf("pair of thread %0d: %h %h", t, out_op1, out_op2));
        issued[t]++;
        n_issued++;
      end
      for (int p = 0; p < 2; p++)
        if (w_valid[p] && w_ready[p]) void'(q[p].pop_front());
    end
    @(negedge clk); idle();
    foreach (issued[i]) check(issued[i] == 1, $sformatf("thread %0d issued %0d times", i, issued[i]));
    @(negedge clk);
    check(!out_valid, "table empty after A");

    // ---- B
    @(negedge clk);
    w_valid[0] = 1; w_tok[0] = {tid_t'(77), v1(77)};
    w_valid[1] = 1; w_tok[1] = {tid_t'(77), v2(77)};
    #1;
    check(w_ready[0] && w_ready[1], "both ports ready on an empty row");
    check(!out_valid, "nothing to issue before the write");
    @(negedge clk); idle();
    check(out_valid && out_tid == 77 && out_op1 == v1(77) && out_op2 == v2(77), "issues the next cycle");
    out_ready = 1;
    @(negedge clk); out_ready = 0;
    check(!out_valid, "row freed on issue");

    // ---- C: row 5 taken by thread 5 (OP1 only); thread 21 maps to row 5
    @(negedge clk);
    w_valid[0] = 1; w_tok[0] = {tid_t'(5), v1(5)};
    @(negedge clk); idle();
    w_valid[1] = 1; w_tok[1] = {tid_t'(21), v2(21)};
    w_tok[0] = {tid_t'(21), v1(21)};
    #1;
    check(!w_ready[1], "OP2 of another thread held off from an occupied row");
    check(!w_ready[0], "OP1 column of the row already full");
    w_tok[1] = {tid_t'(5), v2(5)};
    #1;
    check(w_ready[1], "OP2 of the row's own thread taken");
    @(negedge clk); idle();
    out_ready = 1;
    #1;
    check(out_valid && out_tid == 5 && out_op2 == v2(5), "row issues");
    @(negedge clk); idle();
    w_valid[1] = 1; w_tok[1] = {tid_t'(21), v2(21)};
    #1;
    check(w_ready[1], "held-off thread taken after the row issued");
    @(negedge clk); idle();
    w_valid[0] = 1; w_tok[0] = {tid_t'(21), v1(21)};
    @(negedge clk); idle(); out_ready = 1;
    #1;
    check(out_valid && out_tid == 21 && out_op1 == v1(21) && out_op2 == v2(21), "thread 21 pair");
    @(negedge clk); idle();
    check(!out_valid, "table empty after C");

    // ---- D: threads 3 and 19 claim empty row 3 in one cycle
    @(negedge clk);
    w_valid[0] = 1; w_tok[0] = {tid_t'(3), v1(3)};
    w_valid[1] = 1; w_tok[1] = {tid_t'(19), v2(19)};
    #1;
    check(w_ready[0] && !w_ready[1], "port 0 wins a contested empty row");
    @(negedge clk); idle();
    w_valid[1] = 1; w_tok[1] = {tid_t'(3), v2(3)};
    @(negedge clk); idle(); out_ready = 1;
    #1;
    check(out_valid && out_tid == 3 && out_op1 == v1(3) && out_op2 == v2(3), "thread 3 pair");
    @(negedge clk); idle();

    // ---- E: single-operand mode
    need_op2 = 0;
    @(negedge clk);
    w_valid[0] = 1; w_tok[0] = {tid_t'(5), v1(5)};
    @(negedge clk); idle();
    check(out_valid && out_tid == 5 && out_op1 == v1(5), "single operand issues on OP1");
    out_ready = 1;
    @(negedge clk); idle();
    check(!out_valid, "single operand issued once");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
