// tb_fe_acc - self-checking testbench of lut_acc in the Forward Engine configuration
// (64 rows x 3 sub-LUT outputs per lane, 4 lanes).
//
// Drives grid iterations of 1..3 beats (first ... last) with random multiples of 1/4 in
// [-0.75, 0.75], small enough that every partial sum is exact in FP16, and compares
// out_ps with the real-valued sum over all rows, sub-LUTs and beats. Checks that
// out_valid comes exactly one cycle after the last beat and never otherwise.
module tb_fe_acc;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  localparam int ROWS = 64;
  localparam int NSUB = 3;
  localparam int P    = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, first = 0, last = 0, out_valid;
  fp16_t [P-1:0][ROWS-1:0][NSUB-1:0] in_val;
  fp16_t [P-1:0] out_ps;

  lut_acc #(.ROWS(ROWS), .NSUB(NSUB), .P(P)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real exp_r [P];
    in_val = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      int nb;
      nb = $urandom_range(1, 3);
      for (int p = 0; p < P; p++) exp_r[p] = 0.0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        for (int p = 0; p < P; p++)
          for (int r = 0; r < ROWS; r++)
            for (int k = 0; k < NSUB; k++) begin
              real v;
              v = real'(int'($urandom_range(0, 6)) - 3) / 4.0;
              in_val[p][r][k] = r2h(v);
              exp_r[p] += v;
            end
        in_valid = 1; first = (b == 0); last = (b == nb - 1);
        @(negedge clk);
        in_valid = 0; first = 0; last = 0;
        checks++;
        if (out_valid !== (b == nb - 1)) begin
          failures++;
          $display("out_valid=%0b after beat %0d of %0d", out_valid, b, nb);
        end
        // idle gap of random length, accumulator must hold
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      for (int p = 0; p < P; p++) begin
        checks++;
        if (out_ps[p] !== r2h(exp_r[p])) begin
          failures++;
          if (failures < 10) $display("lane %0d: got %f expected %f", p, h2r(out_ps[p]), exp_r[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
