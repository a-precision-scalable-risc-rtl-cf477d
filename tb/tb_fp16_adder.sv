// tb_fp16_adder: random FP16 sums (close and far exponents, both signs, cancellation,
// overflow, underflow) and special values against the real-number reference.
module tb_fp16_adder;
  import ps_pkg::*;
  import fp16_ref_pkg::*;
  logic [15:0] a, b, s, e;
  int checks = 0, failures = 0;

  fp16_adder dut (.*);

  task automatic check();
    #1;
    e = ref_add(a, b);
    checks++;
    if (!fp16_eq(s, e)) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h s=%h exp=%h", a, b, s, e);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp16(1, 30);
      case (i % 4)
        0: b = rand_fp16(1, 30);
        1: begin b = rand_fp16(1, 30); b[14:10] = a[14:10]; end               // same exponent
        2: begin b = a; b[15] = ~a[15]; b[3:0] = 4'($urandom); end           // near cancellation
        default: begin b = rand_fp16(1, 30); b[14:10] = 5'(int'(a[14:10]) > 2 ? int'(a[14:10]) - 1 - int'($urandom % 2) : 1); end
      endcase
      check();
    end
    a = 16'h3C00; b = 16'hBC00; check();                // exact cancellation
    a = 16'h7BFF; b = 16'h7BFF; check();                // overflow
    a = 16'h0400; b = 16'h8401; check();                // underflow
    a = 16'h3C00; b = 16'h1000; check();                // far operand, sticky only
    a = 16'h7C00; b = 16'hFC00; #1; checks++; if (s != FP16_QNAN) failures++;
    a = 16'h7C00; b = 16'h3C00; #1; checks++; if (s != 16'h7C00) failures++;
    a = 16'h0000; b = 16'hC500; #1; checks++; if (s != 16'hC500) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
