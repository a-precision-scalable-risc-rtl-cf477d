// tb_mul_tree4: exhaustive check of the 4-bit multiplier tree.
// Full mode: all 256 operand pairs under all four signed/unsigned combinations against the
// integer product. Split mode: all pairs against the two INT2 lane products cut to 4 bits.
module tb_mul_tree4;
  logic [3:0] x, w;
  logic x_sgn, w_sgn, split;
  logic signed [9:0] p;
  int checks = 0, failures = 0;

  mul_tree4 dut (.*);

  function automatic int val(input logic [3:0] v, input logic sgn);
    return sgn ? int'(signed'(v)) : int'(v);
  endfunction
  function automatic int v2(input logic [1:0] v);
    return int'(signed'(v));
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 5; m++) begin
      for (int i = 0; i < 256; i++) begin
        x = i[3:0]; w = i[7:4];
        split = (m == 4);
        x_sgn = m[0]; w_sgn = m[1];
        #1;
        checks++;
        if (!split) begin
          if (int'(p) != val(x, x_sgn) * val(w, w_sgn)) begin
            failures++;
            if (failures < 10) $display("FAIL full x=%h w=%h sx=%0d sw=%0d p=%0d", x, w, x_sgn, w_sgn, p);
          end
        end else begin
          logic [3:0] l0, l1;
          l0 = 4'(v2(x[1:0]) * v2(w[1:0]));
          l1 = 4'(v2(x[3:2]) * v2(w[3:2]));
          if (p[7:0] != {l1, l0}) begin
            failures++;
            if (failures < 10) $display("FAIL split x=%h w=%h p=%h", x, w, p);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
