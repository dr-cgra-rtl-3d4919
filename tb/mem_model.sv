// mem_model: behavioural memory for testbenches, standing in for the L1
// that serves a load/store unit. Not synthesizable (associative array).
// Takes a request when a slot is free, answers after a random latency of
// LAT_MIN..LAT_MAX cycles, and answers out of order when latencies cross,
// tagging each response with the request's thread ID. A word never written
// reads as addr * 17 + 3. A store writes at acceptance and answers with
// the stored word.
module mem_model
  import drcgra_pkg::*;
#(
  parameter int SLOTS   = 16,
  parameter int LAT_MIN = 2,
  parameter int LAT_MAX = 12
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  input  logic  req_we,
  input  tid_t  req_tid,
  input  data_t req_addr,
  input  data_t req_wdata,
  output logic  req_ready,
  output logic  rsp_valid,
  output tid_t  rsp_tid,
  output data_t rsp_rdata,
  input  logic  rsp_ready,
  output int    outstanding,
  output int    max_outstanding
);

  data_t mem [data_t];
  logic  sv  [SLOTS];
  tid_t  st  [SLOTS];
  data_t sd  [SLOTS];
  int    sc  [SLOTS];

  function automatic data_t rd(input data_t a);
    return mem.exists(a) ? mem[a] : a * 17 + 3;
  endfunction

  int free_slot, rsp_slot;
  always_comb begin
    free_slot = -1;
    rsp_slot  = -1;
    outstanding = 0;
    for (int i = SLOTS-1; i >= 0; i--) begin
      if (!sv[i]) free_slot = i;
      if (sv[i] && sc[i] == 0) rsp_slot = i;
      if (sv[i]) outstanding++;
    end
    req_ready = (free_slot >= 0);
    rsp_valid = (rsp_slot >= 0);
    rsp_tid   = (rsp_slot >= 0) ? st[rsp_slot] : '0;
    rsp_rdata = (rsp_slot >= 0) ? sd[rsp_slot] : '0;
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SLOTS; i++) begin sv[i] <= 0; st[i] <= '0; sd[i] <= '0; sc[i] <= 0; end
      max_outstanding <= 0;
    end else begin
      for (int i = 0; i < SLOTS; i++) if (sv[i] && sc[i] > 0) sc[i] <= sc[i] - 1;
      if (rsp_valid && rsp_ready) sv[rsp_slot] <= 0;
      if (req_valid && req_ready) begin
        sv[free_slot] <= 1;
        st[free_slot] <= req_tid;
        sc[free_slot] <= LAT_MIN - 1 + int'($urandom % (LAT_MAX - LAT_MIN + 1));
        if (req_we) begin
          mem[req_addr] = req_wdata;
          sd[free_slot] <= req_wdata;
        end else begin
          sd[free_slot] <= rd(req_addr);
        end
      end
      if (outstanding > max_outstanding) max_outstanding <= outstanding;
    end
  end

endmodule
