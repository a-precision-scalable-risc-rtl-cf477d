// tb_ps_adder: random lane sums in all five precisions against the lane reference,
// including lane wrap-around (no carry may cross a lane boundary).
module tb_ps_adder;
  import ps_pkg::*;
  import fp16_ref_pkg::*;
  import ps_ref_pkg::*;
  prec_e prec;
  logic [63:0] op_a, op_b, out, expv;
  int checks = 0, failures = 0;

  ps_adder dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prec_e modes[5] = '{PREC_INT2, PREC_INT4, PREC_INT8, PREC_INT16, PREC_FP16};
    foreach (modes[m]) begin
      prec = modes[m];
      for (int i = 0; i < 4000; i++) begin
        if (prec == PREC_FP16) begin
          op_a = {48'd0, rand_fp16(5, 25)};
          op_b = {48'd0, rand_fp16(5, 25)};
        end else begin
          op_a = {$urandom, $urandom};
          op_b = (i % 8 == 0) ? ~op_a + 64'h1111_1111_1111_1111 : {$urandom, $urandom};
        end
        #1;
        expv = ps_ref_pkg::ref_add(prec, op_a, op_b);
        checks++;
        if (!y_eq(prec, out, expv)) begin
          failures++;
          if (failures < 10) $display("FAIL %s a=%h b=%h out=%h exp=%h", prec.name(), op_a, op_b, out, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
