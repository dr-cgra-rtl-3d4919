// tb_ildr: checks the ILDR's re-tagging (TID + DIFF, data untouched), the
// dropping of tokens whose new TID leaves the thread group, and that it is
// combinational (zero cycles) with ready passed back correctly.
module tb_ildr;
  import drcgra_pkg::*;

  tid_t           diff;
  logic [TID_W:0] tg_size;
  logic           in_valid, in_ready, out_valid, out_ready, dropped;
  token_t         in_tok, out_tok;
  int             checks = 0, failures = 0;
  int             n_drop = 0, n_pass = 0;

  ildr u_dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (tid=%0d diff=%0d tg=%0d)", msg, in_tok.tid, diff, tg_size);
    end
  endtask

  initial begin
    for (int k = 0; k < 2000; k++) begin
      automatic int unsigned nt;
      tg_size      = (TID_W+1)'(1 + ($urandom % 512));
      diff         = tid_t'(1 + ($urandom % 4));
      in_tok.tid   = tid_t'($urandom % 512);
      in_tok.data  = $urandom;
      in_valid     = ($urandom % 4) != 0;
      out_ready    = ($urandom % 3) != 0;
      #1;
      nt = int'(in_tok.tid) + int'(diff);
      if (nt >= int'(tg_size)) begin
        check(!out_valid, "token beyond the group must not be fed back");
        check(dropped == in_valid, "drop pulse");
        check(in_ready, "beyond-group token is consumed");
        if (in_valid) n_drop++;
      end else begin
        check(out_valid == in_valid, "valid passes");
        check(out_tok.tid == tid_t'(nt), "new thread id = tid + diff");
        check(out_tok.data == in_tok.data, "data unchanged");
        check(in_ready == out_ready, "ready passes back");
        check(!dropped, "no drop");
        if (in_valid) n_pass++;
      end
    end
    check(n_drop > 0 && n_pass > 0, "both cases exercised");
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
