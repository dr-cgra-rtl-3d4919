// dr_cgra_top: the DR-CGRA reconfigurable grid.
//
// A multithreaded CGRA in which every loop iteration runs as its own thread
// and tokens carry their thread ID. The grid holds NUM_CU compute units
// (each with its token buffer, ILDR and selector), NUM_LSU load/store units
// and a statically routed network that connects unit outputs, and the
// live-value streams entering the grid, to unit inputs and to the live-value
// streams leaving it. A loop-carried dependency is mapped onto one compute
// unit with dep_en set: that unit feeds each result back to its own
// dependent operand, re-tagged for thread TID+diff, so the value never
// leaves the grid. With dep_en clear the unit behaves as a plain dataflow
// unit and a dependent value must be brought back in from outside.
//
// Source numbering on the network: 0..NUM_CU-1 compute unit outputs,
// then NUM_LSU load/store unit outputs, then NUM_LVI live-value inputs.
// Destination numbering: 2u+p is input p of compute unit u, then
// 2*NUM_CU+2l+p is input p of load/store unit l, then the NUM_LVO
// live-value outputs.
//
// Interface: configuration write bus (see grid_config and drcgra_pkg), the
// live-value token streams in and out (valid/ready), one memory request and
// response channel per load/store unit (to the L1, outside this block), and
// per-unit event pulses. All state resets asynchronously on rst_n low.
//
// Follows the paper: heterogeneous units joined by a statically routed
// network, tag matching in every unit, ILDR and selector on every compute
// unit, load/store units for memory, live values entering and leaving at the
// grid edge, thread groups of up to 512 threads. Own choices: the unit
// counts, the crossbar network, the integer-only compute units. Control,
// split/join and special compute units, the live-value units and cache and
// the L1 are not part of this block.
module dr_cgra_top
  import drcgra_pkg::*;
#(
  parameter int unsigned NUM_CU      = 4,
  parameter int unsigned NUM_LSU     = 2,
  parameter int unsigned NUM_LVI     = 4,
  parameter int unsigned NUM_LVO     = 4,
  parameter int unsigned TB_DEPTH    = 512,
  parameter int unsigned NUM_THREADS = 512,
  localparam int unsigned NUM_SRC    = NUM_CU + NUM_LSU + NUM_LVI,
  localparam int unsigned NUM_DST    = 2*NUM_CU + 2*NUM_LSU + NUM_LVO,
  localparam int unsigned SEL_W      = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic        cfg_we,
  input  logic [7:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  // live values entering the grid
  input  logic        lv_in_valid  [NUM_LVI],
  input  token_t      lv_in_tok    [NUM_LVI],
  output logic        lv_in_ready  [NUM_LVI],
  // live values leaving the grid
  output logic        lv_out_valid [NUM_LVO],
  output token_t      lv_out_tok   [NUM_LVO],
  input  logic        lv_out_ready [NUM_LVO],
  // memory channels of the load/store units
  output logic        mem_req_valid [NUM_LSU],
  output logic        mem_req_we    [NUM_LSU],
  output tid_t        mem_req_tid   [NUM_LSU],
  output data_t       mem_req_addr  [NUM_LSU],
  output data_t       mem_req_wdata [NUM_LSU],
  input  logic        mem_req_ready [NUM_LSU],
  input  logic        mem_rsp_valid [NUM_LSU],
  input  tid_t        mem_rsp_tid   [NUM_LSU],
  input  data_t       mem_rsp_rdata [NUM_LSU],
  output logic        mem_rsp_ready [NUM_LSU],
  // event pulses of the compute units
  output logic        ev_feedback  [NUM_CU],
  output logic        ev_initial   [NUM_CU],
  output logic        ev_drop      [NUM_CU],
  output logic        ev_sel_wait  [NUM_CU]
);

  // --------------------------------------------------------- configuration
  logic [TID_W:0]   tg_size;
  logic             route_en  [NUM_DST];
  logic [SEL_W-1:0] route_sel [NUM_DST];
  cu_cfg_t          cu_cfg    [NUM_CU];
  lsu_cfg_t         lsu_cfg   [NUM_LSU];

  grid_config #(
    .NUM_CU  (NUM_CU),
    .NUM_LSU (NUM_LSU),
    .NUM_DST (NUM_DST),
    .SEL_W   (SEL_W),
    .TG_RESET(NUM_THREADS)
  ) u_cfg (
    .clk      (clk),
    .rst_n    (rst_n),
    .cfg_we   (cfg_we),
    .cfg_addr (cfg_addr),
    .cfg_wdata(cfg_wdata),
    .tg_size  (tg_size),
    .route_en (route_en),
    .route_sel(route_sel),
    .cu_cfg   (cu_cfg),
    .lsu_cfg  (lsu_cfg)
  );

  // --------------------------------------------------------------- network
  logic   src_valid [NUM_SRC];
  token_t src_tok   [NUM_SRC];
  logic   src_ready [NUM_SRC];
  logic   dst_valid [NUM_DST];
  token_t dst_tok   [NUM_DST];
  logic   dst_ready [NUM_DST];

  static_noc #(.NUM_SRC(NUM_SRC), .NUM_DST(NUM_DST)) u_noc (
    .src_valid(src_valid),
    .src_tok  (src_tok),
    .src_ready(src_ready),
    .dst_valid(dst_valid),
    .dst_tok  (dst_tok),
    .dst_ready(dst_ready),
    .route_en (route_en),
    .route_sel(route_sel)
  );

  // ---------------------------------------------------------- compute units
  for (genvar u = 0; u < NUM_CU; u++) begin : g_cu
    logic   in_valid [2];
    token_t in_tok   [2];
    logic   in_ready [2];

    assign in_valid[0] = dst_valid[2*u];
    assign in_valid[1] = dst_valid[2*u+1];
    assign in_tok[0]   = dst_tok[2*u];
    assign in_tok[1]   = dst_tok[2*u+1];
    assign dst_ready[2*u]   = in_ready[0];
    assign dst_ready[2*u+1] = in_ready[1];

    dr_compute_unit #(.TB_DEPTH(TB_DEPTH)) u_cu (
      .clk        (clk),
      .rst_n      (rst_n),
      .cfg        (cu_cfg[u]),
      .tg_size    (tg_size),
      .in_valid   (in_valid),
      .in_tok     (in_tok),
      .in_ready   (in_ready),
      .out_valid  (src_valid[u]),
      .out_tok    (src_tok[u]),
      .out_ready  (src_ready[u]),
      .ev_feedback(ev_feedback[u]),
      .ev_initial (ev_initial[u]),
      .ev_drop    (ev_drop[u]),
      .ev_sel_wait(ev_sel_wait[u])
    );
  end

  // ------------------------------------------------------- load/store units
  for (genvar l = 0; l < NUM_LSU; l++) begin : g_lsu
    localparam int unsigned D = 2*NUM_CU + 2*l;
    logic   in_valid [2];
    token_t in_tok   [2];
    logic   in_ready [2];

    assign in_valid[0] = dst_valid[D];
    assign in_valid[1] = dst_valid[D+1];
    assign in_tok[0]   = dst_tok[D];
    assign in_tok[1]   = dst_tok[D+1];
    assign dst_ready[D]   = in_ready[0];
    assign dst_ready[D+1] = in_ready[1];

    ldst_unit #(.TB_DEPTH(TB_DEPTH)) u_lsu (
      .clk          (clk),
      .rst_n        (rst_n),
      .cfg          (lsu_cfg[l]),
      .in_valid     (in_valid),
      .in_tok       (in_tok),
      .in_ready     (in_ready),
      .out_valid    (src_valid[NUM_CU+l]),
      .out_tok      (src_tok[NUM_CU+l]),
      .out_ready    (src_ready[NUM_CU+l]),
      .mem_req_valid(mem_req_valid[l]),
      .mem_req_we   (mem_req_we[l]),
      .mem_req_tid  (mem_req_tid[l]),
      .mem_req_addr (mem_req_addr[l]),
      .mem_req_wdata(mem_req_wdata[l]),
      .mem_req_ready(mem_req_ready[l]),
      .mem_rsp_valid(mem_rsp_valid[l]),
      .mem_rsp_tid  (mem_rsp_tid[l]),
      .mem_rsp_rdata(mem_rsp_rdata[l]),
      .mem_rsp_ready(mem_rsp_ready[l])
    );
  end

  // ------------------------------------------------------ live-value edges
  for (genvar i = 0; i < NUM_LVI; i++) begin : g_lvi
    assign src_valid[NUM_CU+NUM_LSU+i] = lv_in_valid[i];
    assign src_tok[NUM_CU+NUM_LSU+i]   = lv_in_tok[i];
    assign lv_in_ready[i]              = src_ready[NUM_CU+NUM_LSU+i];
  end

  for (genvar o = 0; o < NUM_LVO; o++) begin : g_lvo
    localparam int unsigned D = 2*NUM_CU + 2*NUM_LSU + o;
    assign lv_out_valid[o] = dst_valid[D];
    assign lv_out_tok[o]   = dst_tok[D];
    assign dst_ready[D]    = lv_out_ready[o];
  end

endmodule
