// tb_dr_selector: checks the selector in front of the dependent operand in
// every combination of mode, valids and ready: feedback wins when both are
// present, the original input waits, and with dependency off only the
// original input passes.
module tb_dr_selector;
  import drcgra_pkg::*;

  logic   dep_en, orig_valid, orig_ready, fb_valid, fb_ready;
  logic   out_valid, out_from_fb, out_ready, original_stall;
  token_t orig_tok, fb_tok, out_tok;
  int     checks = 0, failures = 0;

  dr_selector u_dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s dep=%b ov=%b fv=%b r=%b", msg, dep_en, orig_valid, fb_valid, out_ready);
    end
  endtask

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      for (int m = 0; m < 16; m++) begin
        {dep_en, orig_valid, fb_valid, out_ready} = 4'(m);
        orig_tok = {tid_t'($urandom), data_t'($urandom)};
        fb_tok   = {tid_t'($urandom), data_t'($urandom)};
        #1;
        if (dep_en && fb_valid) begin
          check(out_valid, "feedback valid");
          check(out_tok == fb_tok, "feedback token selected");
          check(out_from_fb, "source flag");
          check(fb_ready == out_ready, "feedback ready");
          check(!orig_ready, "original waits");
          check(original_stall == orig_valid, "stall flag");
        end else begin
          check(out_valid == orig_valid, "original valid");
          if (orig_valid) check(out_tok == orig_tok, "original token selected");
          check(!out_from_fb, "source flag");
          check(orig_ready == out_ready, "original ready");
          check(fb_ready == (dep_en && out_ready), "feedback ready when idle");
          check(!original_stall, "no stall");
        end
      end
    end
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
