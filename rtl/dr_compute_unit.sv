// dr_compute_unit: a DR-CGRA compute unit with its ILDR and selector.
//
// Two operand inputs arrive from the grid as tagged tokens and are matched
// by thread ID in the unit's token buffer. A thread whose operands are all
// present issues to the operation (alu_op); the result is registered and
// leaves through the unit's output with the thread ID unchanged.
//
// With cfg.dep_en set, the same result is also fed back: the ILDR adds
// cfg.diff to its thread ID and the selector writes it into the column of
// the dependent operand (cfg.dep_operand) of this unit's own token buffer,
// where it becomes that operand of thread TID+diff. Only the initial values
// of the loop-carried variable (threads below diff) then need to come in on
// the dependent input from the grid. A result leaves only when both the grid
// and the feedback path take it, so no copy is lost.
//
// Timing: a token written at a clock edge can issue in the next cycle; the
// result appears one edge later; the fed-back operand is in the token buffer
// one edge after that. A chain of dependent iterations with diff = 1 thus
// advances one iteration every two cycles. Throughput is one thread per
// cycle when no dependency limits it.
//
// Interface: in_valid/in_tok/in_ready per input, out_valid/out_tok/out_ready,
// plus event pulses for performance counting.
//
// Follows the paper: token buffer at the inputs, ILDR built from a TID adder,
// selector between the original input and the fed-back value, one dependent
// operand per unit. Own choices: the integer operation set, the one-cycle
// result register and the token buffer depth.
module dr_compute_unit
  import drcgra_pkg::*;
#(
  parameter int unsigned TB_DEPTH = 512
) (
  input  logic           clk,
  input  logic           rst_n,
  input  cu_cfg_t        cfg,
  input  logic [TID_W:0] tg_size,
  input  logic           in_valid [2],
  input  token_t         in_tok   [2],
  output logic           in_ready [2],
  output logic           out_valid,
  output token_t         out_tok,
  input  logic           out_ready,
  // event pulses
  output logic           ev_feedback,   // a fed-back operand was written
  output logic           ev_initial,    // an original token entered the dependent column
  output logic           ev_drop,       // a result had no next iteration in the group
  output logic           ev_sel_wait    // an original token waited behind a fed-back one
);

  // ------------------------------------------------------------- selector
  logic   sel_out_valid, sel_out_from_fb, sel_out_ready, sel_orig_ready;
  token_t sel_out_tok;
  logic   fb_valid, fb_ready;
  token_t fb_tok;
  logic   sel_stall;

  dr_selector u_sel (
    .dep_en        (cfg.dep_en),
    .orig_valid    (in_valid[cfg.dep_operand]),
    .orig_tok      (in_tok[cfg.dep_operand]),
    .orig_ready    (sel_orig_ready),
    .fb_valid      (fb_valid),
    .fb_tok        (fb_tok),
    .fb_ready      (fb_ready),
    .out_valid     (sel_out_valid),
    .out_tok       (sel_out_tok),
    .out_from_fb   (sel_out_from_fb),
    .out_ready     (sel_out_ready),
    .original_stall(sel_stall)
  );

  // --------------------------------------------------------- token buffer
  logic   tb_w_valid [2];
  token_t tb_w_tok   [2];
  logic   tb_w_ready [2];
  logic   iss_valid, iss_ready;
  tid_t   iss_tid;
  data_t  iss_op1, iss_op2;
  logic   need_op2;

  assign need_op2 = (cfg.op != OP_PASS);

  assign tb_w_valid[0] = (cfg.dep_en && cfg.dep_operand == 1'b0) ? sel_out_valid : in_valid[0];
  assign tb_w_valid[1] = (cfg.dep_en && cfg.dep_operand == 1'b1) ? sel_out_valid : in_valid[1];
  assign tb_w_tok[0]   = (cfg.dep_en && cfg.dep_operand == 1'b0) ? sel_out_tok   : in_tok[0];
  assign tb_w_tok[1]   = (cfg.dep_en && cfg.dep_operand == 1'b1) ? sel_out_tok   : in_tok[1];
  assign in_ready[0]   = (cfg.dep_en && cfg.dep_operand == 1'b0) ? sel_orig_ready : tb_w_ready[0];
  assign in_ready[1]   = (cfg.dep_en && cfg.dep_operand == 1'b1) ? sel_orig_ready : tb_w_ready[1];
  assign sel_out_ready = cfg.dep_operand ? tb_w_ready[1] : tb_w_ready[0];

  token_buffer #(.DEPTH(TB_DEPTH)) u_tb (
    .clk       (clk),
    .rst_n     (rst_n),
    .need_op2  (need_op2),
    .w_valid   (tb_w_valid),
    .w_tok     (tb_w_tok),
    .w_ready   (tb_w_ready),
    .out_valid (iss_valid),
    .out_tid   (iss_tid),
    .out_op1   (iss_op1),
    .out_op2   (iss_op2),
    .out_ready (iss_ready)
  );

  // ------------------------------------------------------------ operation
  data_t alu_y;
  alu_op u_alu (.op(cfg.op), .a(iss_op1), .b(iss_op2), .y(alu_y));

  // ------------------------------------------------------- result register
  // The result forks to the grid and, with dep_en, to the ILDR. Each branch
  // takes it on its own; sent_out / sent_fb remember which branch already
  // has it, and the register is free once both have.
  logic   res_valid, sent_out, sent_fb;
  token_t res_tok;
  logic   ildr_in_valid, ildr_in_ready, ildr_dropped;
  logic   out_fire, fb_fire, out_done, fb_done, res_free;

  assign out_valid     = res_valid && !sent_out;
  assign out_tok       = res_tok;
  assign ildr_in_valid = res_valid && cfg.dep_en && !sent_fb;
  assign out_fire      = out_valid && out_ready;
  assign fb_fire       = ildr_in_valid && ildr_in_ready;
  assign out_done      = sent_out || out_fire;
  assign fb_done       = !cfg.dep_en || sent_fb || fb_fire;
  assign res_free      = !res_valid || (out_done && fb_done);
  assign iss_ready     = res_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      sent_out  <= 1'b0;
      sent_fb   <= 1'b0;
      res_tok   <= '0;
    end else if (res_free) begin
      res_valid <= iss_valid;
      sent_out  <= 1'b0;
      sent_fb   <= 1'b0;
      if (iss_valid) begin
        res_tok.tid  <= iss_tid;
        res_tok.data <= alu_y;
      end
    end else begin
      sent_out <= out_done;
      sent_fb  <= sent_fb || fb_fire;
    end
  end

  // ------------------------------------------------------------------ ILDR
  ildr u_ildr (
    .diff      (cfg.diff),
    .tg_size   (tg_size),
    .in_valid  (ildr_in_valid),
    .in_tok    (res_tok),
    .in_ready  (ildr_in_ready),
    .out_valid (fb_valid),
    .out_tok   (fb_tok),
    .out_ready (fb_ready),
    .dropped   (ildr_dropped)
  );

  // ---------------------------------------------------------------- events
  assign ev_feedback = sel_out_valid && sel_out_ready && sel_out_from_fb;
  assign ev_initial  = cfg.dep_en && sel_out_valid && sel_out_ready && !sel_out_from_fb;
  assign ev_drop     = ildr_dropped;
  assign ev_sel_wait = sel_stall;

endmodule
