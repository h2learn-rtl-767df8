// tb_fp16_arith - checks the FP16 add and multiply of h2l_pkg against a real-number reference.
//
// Random normal FP16 operands (exponents kept in a range where results stay normal or
// flush cleanly) are added and multiplied; the reference is the double result rounded
// by tb_fp16_pkg::r2h, which is the exact correctly rounded answer.
module tb_fp16_arith;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp16_t rnd();
    fp16_t v;
    v = 16'($urandom);
    v[14:10] = 5'($urandom_range(5, 25));
    return v;
  endfunction

  initial begin
    fp16_t a, b, got, exp_v;
    for (int i = 0; i < 20000; i++) begin
      a = rnd(); b = rnd();
      if (i % 4 == 0) b[14:10] = a[14:10];           // exercise cancellation
      if (i % 8 == 1) b = {~a[15], a[14:0]};
      got = fp16_add(a, b);
      exp_v = r2h(h2r(a) + h2r(b));
      if (exp_v[14:0] == 15'd0) exp_v = got[14:0] == 15'd0 ? got : 16'h0000; // sign of zero not checked
      checks++;
      if (got !== exp_v) begin
        failures++;
        if (failures < 10) $display("add %h + %h = %h expected %h", a, b, got, exp_v);
      end
      got = fp16_mul(a, b);
      exp_v = r2h(h2r(a) * h2r(b));
      checks++;
      if (got !== exp_v) begin
        failures++;
        if (failures < 10) $display("mul %h * %h = %h expected %h", a, b, got, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
