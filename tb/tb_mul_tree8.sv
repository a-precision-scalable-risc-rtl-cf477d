// tb_mul_tree8: exhaustive check of the 8-bit multiplier tree in INT8, INT4 and INT2 mode
// (all 65536 operand pairs each) against lane products computed with plain integers.
module tb_mul_tree8;
  import ps_pkg::*;
  logic [7:0] x, w;
  prec_e prec;
  logic [15:0] p, exp_p;
  int checks = 0, failures = 0;

  mul_tree8 dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prec_e modes[3] = '{PREC_INT8, PREC_INT4, PREC_INT2};
    foreach (modes[m]) begin
      prec = modes[m];
      for (int i = 0; i < 65536; i++) begin
        x = i[7:0]; w = i[15:8];
        #1;
        case (prec)
          PREC_INT8: exp_p = 16'(int'(signed'(x)) * int'(signed'(w)));
          PREC_INT4: for (int l = 0; l < 2; l++)
                       exp_p[8*l +: 8] = 8'(int'(signed'(x[4*l +: 4])) * int'(signed'(w[4*l +: 4])));
          default:   for (int l = 0; l < 4; l++)
                       exp_p[4*l +: 4] = 4'(int'(signed'(x[2*l +: 2])) * int'(signed'(w[2*l +: 2])));
        endcase
        checks++;
        if (p !== exp_p) begin
          failures++;
          if (failures < 10) $display("FAIL prec=%s x=%h w=%h p=%h exp=%h", prec.name(), x, w, p, exp_p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
