// token_buffer: tagged-token matching store of a DR-CGRA unit.
//
// A table of DEPTH rows with the columns TID, OP1 and OP2. A token of
// thread t goes to row t mod DEPTH: the row keeps the thread ID as its tag
// and the operand in the column of the port it came in on (port 0 -> OP1,
// port 1 -> OP2). A row whose operands are all present (OP1 alone when
// need_op2 is low) is offered on the issue port; the lowest such row goes
// first and is cleared when taken. Tokens of different threads may arrive in
// any order, which lets many threads interleave in one unit and lets memory
// answer out of order.
//
// With the default DEPTH equal to the thread group (512) every thread of the
// group owns a row, so a token never waits for another thread and the grid
// cannot deadlock on a full buffer. With a smaller DEPTH, threads whose IDs
// share a row take turns: a token whose row holds a different thread is held
// off (w_ready low) until that row issues.
//
// Interface: write ports and the issue port are valid/ready. A write is
// accepted in the cycle valid and ready are both high; the row can issue
// from the next cycle on. w_ready depends only on the stored state and the
// offered tokens' thread IDs, never on a valid, so the grid built from these
// buffers has no combinational valid/ready loop. The operand columns are
// plain memories with one write and one read port each.
//
// Follows the paper: every unit stores TID and operands until both operands
// of one thread ID are present, then hands them to the operation. Own
// choices: one table shared by the two inputs (the paper's figure draws a
// table at each input), row selection by thread ID, the issue order.
module token_buffer
  import drcgra_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic   clk,
  input  logic   rst_n,
  // configuration
  input  logic   need_op2,      // 0: single-operand operation, issue on OP1 alone
  // write ports (0 -> OP1, 1 -> OP2)
  input  logic   w_valid [2],
  input  token_t w_tok   [2],
  output logic   w_ready [2],
  // issue port
  output logic   out_valid,
  output tid_t   out_tid,
  output data_t  out_op1,
  output data_t  out_op2,
  input  logic   out_ready
);

  localparam int unsigned IDX_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  tid_t  etid [DEPTH];     // TID column (tag)
  logic  v1   [DEPTH];     // OP1 present
  logic  v2   [DEPTH];     // OP2 present
  data_t op1_mem [DEPTH];  // OP1 column
  data_t op2_mem [DEPTH];  // OP2 column

  function automatic logic [IDX_W-1:0] row_of(input tid_t t);
    return IDX_W'(int'(t) % DEPTH);
  endfunction

  // ------------------------------------------------------------ write side
  logic [IDX_W-1:0] r0, r1;
  logic             ok0, ok1;

  assign r0 = row_of(w_tok[0].tid);
  assign r1 = row_of(w_tok[1].tid);

  always_comb begin
    // a row takes an operand if that column is empty and the row is empty or
    // already belongs to the same thread
    ok0 = !v1[r0] && (!v2[r0] || etid[r0] == w_tok[0].tid);
    ok1 = !v2[r1] && (!v1[r1] || etid[r1] == w_tok[1].tid);
    // two different threads claiming one empty row in the same cycle:
    // port 0 goes first
    if (r0 == r1 && w_tok[0].tid != w_tok[1].tid && !v1[r1] && !v2[r1]) ok1 = 1'b0;
    w_ready[0] = ok0;
    w_ready[1] = ok1;
  end

  logic wf0, wf1;
  assign wf0 = w_valid[0] && w_ready[0];
  assign wf1 = w_valid[1] && w_ready[1];

  // ------------------------------------------------------------ issue side
  logic             rdy_any;
  logic [IDX_W-1:0] rdy_idx;
  always_comb begin
    rdy_any = 1'b0;
    rdy_idx = '0;
    for (int i = DEPTH-1; i >= 0; i--) begin
      if (v1[i] && (v2[i] || !need_op2)) begin
        rdy_any = 1'b1;
        rdy_idx = IDX_W'(i);
      end
    end
  end

  assign out_valid = rdy_any;
  assign out_tid   = etid[rdy_idx];
  assign out_op1   = op1_mem[rdy_idx];
  assign out_op2   = op2_mem[rdy_idx];

  // ---------------------------------------------------------------- update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        v1[i]   <= 1'b0;
        v2[i]   <= 1'b0;
        etid[i] <= '0;
      end
    end else begin
      if (out_valid && out_ready) begin
        v1[rdy_idx] <= 1'b0;
        v2[rdy_idx] <= 1'b0;
      end
      if (wf0) begin
        v1[r0]   <= 1'b1;
        etid[r0] <= w_tok[0].tid;
      end
      if (wf1) begin
        v2[r1]   <= 1'b1;
        etid[r1] <= w_tok[1].tid;
      end
    end
  end

  // operand columns: no reset needed, a column is read only when its valid
  // bit is set
  always_ff @(posedge clk) begin
    if (wf0) op1_mem[r0] <= w_tok[0].data;
    if (wf1) op2_mem[r1] <= w_tok[1].data;
  end

  // A single-operand row must never receive OP2.
  a_no_op2_single: assert property (@(posedge clk) disable iff (!rst_n) !(wf1 && !need_op2))
    else $error("token_buffer: OP2 of thread %0d sent to a single-operand unit", w_tok[1].tid);

endmodule
