// ldst_unit: tagged load/store unit of the DR-CGRA grid.
//
// Operands arrive as tagged tokens and are matched by thread ID in a token
// buffer, as in every grid unit: OP1 is the address, OP2 the store data
// (stores only; a load issues on its address alone). A matched thread sends
// one request, tagged with its thread ID, to the memory port. Responses come
// back tagged and may return in any order, so accesses of many threads are
// in flight at once and a thread waiting for memory does not hold up the
// others. Each response leaves the unit as a token of the same thread: the
// loaded word for a load, the written word for a store (the store's
// completion token).
//
// Timing: request one cycle after the operands are matched (combinational
// from the token buffer); the output token is registered, one cycle after
// the response. Interface: valid/ready on the grid side and on both memory
// channels.
//
// Follows the paper: memory operations run on load/store units at the grid
// edge; several memory accesses can overlap. Own choices: the request and
// response formats, tagging responses with the thread ID, word addressing.
module ldst_unit
  import drcgra_pkg::*;
#(
  parameter int unsigned TB_DEPTH = 512
) (
  input  logic     clk,
  input  logic     rst_n,
  input  lsu_cfg_t cfg,
  // grid side
  input  logic     in_valid [2],
  input  token_t   in_tok   [2],
  output logic     in_ready [2],
  output logic     out_valid,
  output token_t   out_tok,
  input  logic     out_ready,
  // memory request
  output logic     mem_req_valid,
  output logic     mem_req_we,
  output tid_t     mem_req_tid,
  output data_t    mem_req_addr,
  output data_t    mem_req_wdata,
  input  logic     mem_req_ready,
  // memory response
  input  logic     mem_rsp_valid,
  input  tid_t     mem_rsp_tid,
  input  data_t    mem_rsp_rdata,
  output logic     mem_rsp_ready
);

  logic  iss_valid;
  tid_t  iss_tid;
  data_t iss_op1, iss_op2;

  token_buffer #(.DEPTH(TB_DEPTH)) u_tb (
    .clk       (clk),
    .rst_n     (rst_n),
    .need_op2  (cfg.is_store),
    .w_valid   (in_valid),
    .w_tok     (in_tok),
    .w_ready   (in_ready),
    .out_valid (iss_valid),
    .out_tid   (iss_tid),
    .out_op1   (iss_op1),
    .out_op2   (iss_op2),
    .out_ready (mem_req_ready)
  );

  assign mem_req_valid = iss_valid;
  assign mem_req_we    = cfg.is_store;
  assign mem_req_tid   = iss_tid;
  assign mem_req_addr  = iss_op1;
  assign mem_req_wdata = iss_op2;

  logic   res_valid;
  token_t res_tok;

  assign mem_rsp_ready = !res_valid || out_ready;
  assign out_valid     = res_valid;
  assign out_tok       = res_tok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_tok   <= '0;
    end else if (mem_rsp_ready) begin
      res_valid <= mem_rsp_valid;
      if (mem_rsp_valid) begin
        res_tok.tid  <= mem_rsp_tid;
        res_tok.data <= mem_rsp_rdata;
      end
    end
  end

endmodule
