// tb_alu_op: checks every operation of the compute unit's ALU against a
// reference written independently here, with corner and random operands.
module tb_alu_op;
  import drcgra_pkg::*;

  alu_op_e op;
  data_t   a, b, y;
  int      checks = 0, failures = 0;

  alu_op u_dut (.op(op), .a(a), .b(b), .y(y));

  function automatic data_t ref_y(input int o, input data_t x, input data_t z);
    longint sx, sz;
    sx = longint'(signed'(x));
    sz = longint'(signed'(z));
    case (o)
      0:  return data_t'(longint'(x) + longint'(z));
      1:  return data_t'(longint'(x) - longint'(z));
      2:  return data_t'(longint'(x) * longint'(z));
      3:  return x & z;
      4:  return x | z;
      5:  return x ^ z;
      6:  return data_t'(longint'(x) << (z % 32));
      7:  return data_t'(longint'(x) >> (z % 32));
      8:  return (sx < sz) ? x : z;
      9:  return (sx > sz) ? x : z;
      default: return x;
    endcase
  endfunction

  initial begin
    data_t corner [6] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF, 32'h21};
    for (int o = 0; o <= 10; o++) begin
      for (int i = 0; i < 6; i++) begin
        for (int j = 0; j < 6; j++) begin
          op = alu_op_e'(o); a = corner[i]; b = corner[j];
          #1;
          checks++;
          if (y !== ref_y(o, a, b)) begin
            failures++;
            $display("FAIL op=%0d a=%h b=%h y=%h exp=%h", o, a, b, y, ref_y(o, a, b));
          end
        end
      end
      for (int k = 0; k < 200; k++) begin
        op = alu_op_e'(o); a = $urandom; b = $urandom;
        #1;
        checks++;
        if (y !== ref_y(o, a, b)) begin
          failures++;
          $display("FAIL op=%0d a=%h b=%h y=%h exp=%h", o, a, b, y, ref_y(o, a, b));
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
