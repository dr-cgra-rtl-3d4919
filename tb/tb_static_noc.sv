// tb_static_noc: random route tables, valids, tokens and readies on a
// 10-source, 16-destination network. Checks each destination carries its
// routed source's token, that a multicast source is taken only when all of
// its destinations are ready (and then delivered to all of them), that an
// unrouted source is drained and that a disabled destination stays idle.
module tb_static_noc;
  import drcgra_pkg::*;

  localparam int NS = 10, ND = 16, SW = 4;
  logic          src_valid [NS];
  token_t        src_tok   [NS];
  logic          src_ready [NS];
  logic          dst_valid [ND];
  token_t        dst_tok   [ND];
  logic          dst_ready [ND];
  logic          route_en  [ND];
  logic [SW-1:0] route_sel [ND];
  int            checks = 0, failures = 0, n_mcast = 0, n_block = 0;

  static_noc #(.NUM_SRC(NS), .NUM_DST(ND)) u_dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    for (int k = 0; k < 500; k++) begin
      for (int d = 0; d < ND; d++) begin
        route_en[d]  = ($urandom % 5 != 0);
        route_sel[d] = SW'($urandom % NS);
        dst_ready[d] = ($urandom % 4 != 0);
      end
      for (int s = 0; s < NS; s++) begin
        src_valid[s] = $urandom % 2;
        src_tok[s]   = {tid_t'($urandom), data_t'($urandom)};
      end
      #1;
      for (int s = 0; s < NS; s++) begin
        automatic bit all_rdy = 1;
        automatic int fan = 0;
        for (int d = 0; d < ND; d++)
          if (route_en[d] && route_sel[d] == SW'(s)) begin
            fan++;
            if (!dst_ready[d]) all_rdy = 0;
          end
        check(src_ready[s] == all_rdy, $sformatf("source %0d ready", s));
        if (fan > 1 && src_valid[s] && all_rdy) n_mcast++;
        if (fan > 1 && src_valid[s] && !all_rdy) n_block++;
      end
      for (int d = 0; d < ND; d++) begin
        if (route_en[d]) begin
          automatic int s = int'(route_sel[d]);
          check(dst_valid[d] == (src_valid[s] && src_ready[s]), $sformatf("destination %0d valid", d));
          check(dst_tok[d] == src_tok[s], $sformatf("destination %0d token", d));
        end else begin
          check(!dst_valid[d], $sformatf("disabled destination %0d idle", d));
        end
      end
    end
    check(n_mcast > 0 && n_block > 0, "multicast taken and held back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
