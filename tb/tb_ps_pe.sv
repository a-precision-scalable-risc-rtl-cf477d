// tb_ps_pe: one PE in isolation. Streams random operand pairs in every precision with
// random stall cycles, checks the X/W forwarding registers, the accumulated Y against the
// lane reference, the two-cycle multiply-accumulate latency, hold under stall, clear, and
// the shift mode that loads Y from the PE above.
module tb_ps_pe;
  import ps_pkg::*;
  import fp16_ref_pkg::*;
  import ps_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  prec_e prec;
  logic en, clr, shift, xv_in, wv_in, xv_out, wv_out;
  logic [31:0] x_in, w_in, x_out, w_out;
  logic [63:0] y_in, y_out, acc;
  int checks = 0, failures = 0;

  ps_pe dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s prec=%s y=%h acc=%h", msg, prec.name(), y_out, acc);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prec_e modes[5] = '{PREC_INT2, PREC_INT4, PREC_INT8, PREC_INT16, PREC_FP16};
    en = 0; clr = 0; shift = 0; xv_in = 0; wv_in = 0; x_in = 0; w_in = 0; y_in = 0; prec = PREC_INT8;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (modes[m]) begin
      prec = modes[m];
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      chk(y_out == 64'd0, "clear");
      acc = '0;
      for (int i = 0; i < 40; i++) begin
        x_in = rand_op(prec); w_in = rand_op(prec);
        xv_in = 1; wv_in = 1; en = 1;
        if (prec == PREC_FP16) begin x_in = {16'd0, rand_fp16(12, 16)}; w_in = {16'd0, rand_fp16(12, 16)}; end
        @(negedge clk);
        chk(x_out == x_in && w_out == w_in && xv_out && wv_out, "forward");
        acc = ps_ref_pkg::ref_mac(prec, acc, x_in, w_in);
        // random stall: Y and the forwarded operands must hold
        if ($urandom % 3 == 0) begin
          logic [63:0] yh;
          en = 0; yh = y_out;
          x_in = ~x_in;
          @(negedge clk);
          chk(y_out == yh && x_out == ~x_in, "stall hold");
          x_in = ~x_in;
        end
      end
      // one invalid operand pair must not be accumulated
      en = 1; xv_in = 1; wv_in = 0; x_in = rand_op(prec); w_in = rand_op(prec);
      @(negedge clk);
      xv_in = 0;
      @(negedge clk);   // last valid product accumulated at this edge
      chk(y_eq(prec, y_out, acc), "accumulate");
      @(negedge clk);
      chk(y_eq(prec, y_out, acc), "bubble ignored");
      en = 0;
    end
    // latency: product of a pair given before edge t appears in Y after edge t+2
    prec = PREC_INT16;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    en = 1; xv_in = 1; wv_in = 1; x_in = 32'd3; w_in = 32'd5;
    @(negedge clk); xv_in = 0; wv_in = 0;
    chk(y_out == 0, "latency edge 1");
    @(negedge clk);
    chk(y_out == 0, "latency edge 2");
    @(negedge clk);
    chk(y_out == 64'd15, "latency edge 3");
    // shift mode
    en = 0; shift = 1; y_in = 64'hDEAD_BEEF_0123_4567;
    @(negedge clk);
    chk(y_out == 64'hDEAD_BEEF_0123_4567, "shift");
    shift = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
