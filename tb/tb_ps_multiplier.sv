// tb_ps_multiplier: random operands in all five precisions against the lane reference,
// plus directed FP16 cases (zero, infinity, NaN, overflow, underflow, ties).
module tb_ps_multiplier;
  import ps_pkg::*;
  import fp16_ref_pkg::*;
  import ps_ref_pkg::*;
  prec_e prec;
  logic [31:0] op_a, op_b;
  logic [63:0] out, expv;
  int checks = 0, failures = 0;

  ps_multiplier dut (.*);

  task automatic check();
    #1;
    expv = ps_ref_pkg::ref_mul(prec, op_a, op_b);
    checks++;
    if (!y_eq(prec, out, expv)) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h out=%h exp=%h", prec.name(), op_a, op_b, out, expv);
    end
  endtask

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
      for (int i = 0; i < 3000; i++) begin
        op_a = rand_op(prec);
        op_b = rand_op(prec);
        check();
      end
    end
    prec = PREC_FP16;
    // wide exponent range: overflow and underflow
    for (int i = 0; i < 3000; i++) begin
      op_a = {16'd0, rand_fp16(1, 30)};
      op_b = {16'd0, rand_fp16(1, 30)};
      check();
    end
    // specials: zero, inf, NaN, inf*0
    op_a = 32'h0000_3C00; op_b = 32'h0000_0000; check();
    op_a = 32'h0000_7C00; op_b = 32'h0000_C000; check();
    if (out[15:0] != 16'hFC00) failures++;
    op_a = 32'h0000_7C00; op_b = 32'h0000_0000; #1; checks++; if (out[15:0] != FP16_QNAN) failures++;
    op_a = 32'h0000_7E01; op_b = 32'h0000_3C00; #1; checks++; if (out[15:0] != FP16_QNAN) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
