// tb_soma - self-checking testbench of the LIF soma.
//
// Random partial sums and previous potentials (multiples of 1/4) with alpha = 0.5, so
// u = ps + alpha*u_prev is exact; the reference applies the reset after a spike, the
// firing rule u >= th_f, the mask th_l < u < th_r and the packing of the masked-in
// potentials into the low lanes. Some potentials are placed exactly on the thresholds.
// Outputs must appear one cycle after in_valid.
module tb_soma;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  localparam int P = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fp16_t alpha, th_f, th_l, th_r;
  logic in_valid = 0, out_valid;
  fp16_t [P-1:0] ps, u_prev, u, ucmp;
  logic [P-1:0] s_prev, s, smask;
  logic [$clog2(P+1)-1:0] ucmp_cnt;

  soma #(.P(P)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("mismatch: %s", what);
    end
  endtask

  initial begin
    alpha = r2h(0.5); th_f = r2h(1.0); th_l = r2h(-0.5); th_r = r2h(1.5);
    ps = '0; u_prev = '0; s_prev = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      real ue [P];
      logic [P-1:0] se, me;
      fp16_t [P-1:0] ce;
      int cnt;
      @(negedge clk);
      for (int p = 0; p < P; p++) begin
        real a, b;
        a = real'(int'($urandom_range(0, 16)) - 8) / 4.0;
        b = real'(int'($urandom_range(0, 16)) - 8) / 4.0;
        if ($urandom_range(0, 7) == 0) begin   // land exactly on a threshold
          b = 0.0;
          case ($urandom_range(0, 2))
            0: a = 1.0;
            1: a = -0.5;
            default: a = 1.5;
          endcase
        end
        ps[p] = r2h(a); u_prev[p] = r2h(b); s_prev[p] = 1'($urandom);
        ue[p] = a + (s_prev[p] ? 0.0 : 0.5 * b);
        se[p] = ue[p] >= 1.0;
        me[p] = (ue[p] > -0.5) && (ue[p] < 1.5);
      end
      cnt = 0; ce = '0;
      for (int p = 0; p < P; p++) if (me[p]) begin ce[cnt] = r2h(ue[p]); cnt++; end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      chk(out_valid, "out_valid");
      chk(s === se, $sformatf("s %b vs %b", s, se));
      chk(smask === me, $sformatf("smask %b vs %b", smask, me));
      chk(int'(ucmp_cnt) == cnt, "ucmp_cnt");
      for (int p = 0; p < P; p++) chk(u[p] === r2h(ue[p]), $sformatf("u[%0d]", p));
      for (int p = 0; p < cnt; p++) chk(ucmp[p] === ce[p], $sformatf("ucmp[%0d]", p));
      @(negedge clk);
      chk(!out_valid, "out_valid must drop");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
