// tb_be_pe - self-checking testbench of the Backward Engine PE.
//
// Issues random MAC instructions (output id, weight, gradient), sometimes back to back
// on the same output, and keeps a real-valued model of the 64 partial sums rounded to
// FP16 after the multiply and after the add. After each burst all 64 sums are read back
// through the combinational read port, then cleared with clr and read again as zero.
module tb_be_pe;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic clr = 0, inst_valid = 0;
  logic [5:0] inst_sid = '0, rd_addr = '0;
  fp16_t w_val = '0, u_val = '0, rd_data;

  be_pe dut (.*);

  int checks = 0, failures = 0;
  fp16_t model [64];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 10; b++) begin
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      for (int i = 0; i < 64; i++) model[i] = '0;
      for (int i = 0; i < 64; i++) begin
        rd_addr = 6'(i); #1;
        checks++;
        if (rd_data !== '0) failures++;
      end
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        inst_valid = ($urandom_range(0, 4) != 0);
        if ($urandom_range(0, 2) != 0) inst_sid = 6'($urandom_range(0, 63));
        w_val = small_val(); u_val = small_val();
        if (inst_valid)
          model[inst_sid] = r2h(h2r(model[inst_sid]) + h2r(r2h(h2r(w_val) * h2r(u_val))));
      end
      @(negedge clk);
      inst_valid = 0;
      for (int i = 0; i < 64; i++) begin
        rd_addr = 6'(i); #1;
        checks++;
        if (rd_data !== model[i]) begin
          failures++;
          if (failures < 10) $display("ps[%0d] = %f expected %f", i, h2r(rd_data), h2r(model[i]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
