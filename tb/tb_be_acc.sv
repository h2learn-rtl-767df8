// tb_be_acc - self-checking testbench of the Backward Engine Acc.
//
// 64 inputs per beat (one per PE of a column). Random multiples of 1/4 in [-0.75, 0.75]
// keep every sum exact. For three grid iterations the 64 elements of the output tile
// are visited in a random order each; the first iteration loads, the others add. Each
// beat's result must come one cycle later with its element index.
module tb_be_acc;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  localparam int N = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, first = 0, out_valid;
  logic [5:0] addr = '0, out_addr;
  fp16_t in_val [N];
  fp16_t out_ps;

  be_acc #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  real model [64];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) in_val[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 5; tile++)
      for (int it = 0; it < 3; it++) begin
        int order [64];
        for (int i = 0; i < 64; i++) order[i] = i;
        order.shuffle();
        for (int e = 0; e < 64; e++) begin
          real s;
          @(negedge clk);
          s = 0.0;
          for (int i = 0; i < N; i++) begin
            real v;
            v = real'(int'($urandom_range(0, 6)) - 3) / 4.0;
            in_val[i] = r2h(v);
            s += v;
          end
          model[order[e]] = (it == 0) ? s : model[order[e]] + s;
          in_valid = 1; first = (it == 0); addr = 6'(order[e]);
          @(negedge clk);
          in_valid = 0;
          checks++;
          if (!out_valid || out_addr != 6'(order[e]) || out_ps !== r2h(model[order[e]])) begin
            failures++;
            if (failures < 10)
              $display("elem %0d: v=%0b addr=%0d got %f expected %f", order[e], out_valid,
                       out_addr, h2r(out_ps), model[order[e]]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
