// tb_grad - self-checking testbench of the Grad unit.
//
// Random FP16 operands; the reference evaluates, with real numbers rounded to FP16 after
// every operation (the same rounding points as the unit),
//   ds = ps + adu_next * (-u)
//   du = (s ? 0 : adu_next) + (smask ? beta : 0) * ds,   adu = alpha * du
// and the non-zero flag of du. A new operand set is given every cycle and the results
// must appear two cycles later, in order.
module tb_grad;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fp16_t alpha, beta, ps, u, adu_next, du, adu;
  logic in_valid = 0, s = 0, smask = 0, out_valid, du_nz;

  grad dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp16_t q_du [$], q_adu [$];
  logic  q_nz [$];

  function automatic real rnd_val();
    return real'(int'($urandom_range(0, 2000)) - 1000) / 256.0;
  endfunction

  initial begin
    alpha = r2h(0.75); beta = r2h(0.3);
    ps = '0; u = '0; adu_next = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      // check results of the operand set from two cycles ago
      if (out_valid) begin
        fp16_t e_du, e_adu;
        logic e_nz;
        e_du = q_du.pop_front(); e_adu = q_adu.pop_front(); e_nz = q_nz.pop_front();
        checks += 3;
        if (du !== e_du)   begin failures++; if (failures < 10) $display("du %h vs %h", du, e_du); end
        if (adu !== e_adu) begin failures++; if (failures < 10) $display("adu %h vs %h", adu, e_adu); end
        if (du_nz !== e_nz) begin failures++; if (failures < 10) $display("du_nz"); end
      end
      in_valid = (n < 4998) && ($urandom_range(0, 3) != 0);
      if (in_valid) begin
        fp16_t prod, ds, t2, d;
        ps = r2h(rnd_val()); u = r2h(rnd_val()); adu_next = r2h(rnd_val());
        if ($urandom_range(0, 9) == 0) adu_next = '0;
        s = 1'($urandom); smask = 1'($urandom);
        prod = r2h(h2r(adu_next) * -h2r(u));
        ds   = r2h(h2r(ps) + h2r(prod));
        t2   = r2h((smask ? h2r(beta) : 0.0) * h2r(ds));
        d    = r2h((s ? 0.0 : h2r(adu_next)) + h2r(t2));
        q_du.push_back(d);
        q_adu.push_back(r2h(h2r(alpha) * h2r(d)));
        q_nz.push_back(h2r(d) != 0.0);
      end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (q_du.size() != 0) begin
      failures++;
      $display("%0d results missing", q_du.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
