// tb_fe_lut_pe - self-checking testbench of lut_pe in the Forward Engine configuration
// (3 sub-LUTs of 8 entries, 3x3 spike windows, 4 parallel read ports).
//
// Loads random kernel values at the one-hot addresses, triggers the LUT build and checks
// that it takes NSUB*2^KBITS cycles, then drives random spike windows on every port and
// compares each sub-LUT output with the sum of the kernel values whose spike is 1,
// computed with real numbers. Finally checks FC mode (sub-LUT as a spike-gated weight
// buffer). Values are multiples of 1/4 so every reference sum is exact in FP16.
module tb_fe_lut_pe;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  localparam int NSUB  = 3;
  localparam int KBITS = 3;
  localparam int P     = 4;
  localparam int DEPTH = 1 << KBITS;
  localparam int WIN   = NSUB * KBITS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, build = 0, busy, fc_mode = 0, in_valid = 0, out_valid;
  logic [$clog2(NSUB+1)-1:0] wr_sub = '0;
  logic [KBITS-1:0] wr_addr = '0, fc_addr = '0;
  fp16_t wr_data = '0;
  logic [P-1:0][WIN-1:0] in_win = '0;
  fp16_t [P-1:0][NSUB-1:0] out_val;

  lut_pe #(.NSUB(NSUB), .KBITS(KBITS), .P(P)) dut (.*);

  int checks = 0, failures = 0;
  real wv [NSUB][KBITS];     // kernel values, element j of sub-LUT k
  real fv [NSUB][DEPTH];     // FC-mode raw entries

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input fp16_t got, input real exp_r, input string what);
    checks++;
    if (got !== r2h(exp_r)) begin
      failures++;
      if (failures < 10) $display("%s: got %h (%f) expected %f", what, got, h2r(got), exp_r);
    end
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      // load single values at one-hot addresses
      for (int k = 0; k < NSUB; k++)
        for (int j = 0; j < KBITS; j++) begin
          wv[k][j] = real'(int'($urandom_range(0, 126)) - 63) / 4.0;
          @(negedge clk);
          wr_en = 1; wr_sub = ($clog2(NSUB+1))'(k); wr_addr = KBITS'(1 << (KBITS - 1 - j));
          wr_data = r2h(wv[k][j]);
        end
      @(negedge clk);
      wr_en = 0; build = 1;
      @(negedge clk);
      build = 0;
      cyc = 0;
      while (busy) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != NSUB * DEPTH) begin
        failures++;
        $display("build took %0d cycles, expected %0d", cyc, NSUB * DEPTH);
      end
      // random reads
      for (int n = 0; n < 200; n++) begin
        logic [P-1:0][WIN-1:0] w;
        for (int p = 0; p < P; p++) w[p] = WIN'($urandom);
        @(negedge clk);
        in_valid = 1; in_win = w;
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid) begin
          failures++;
          $display("out_valid missing");
        end
        for (int p = 0; p < P; p++)
          for (int k = 0; k < NSUB; k++) begin
            real e;
            e = 0.0;
            for (int j = 0; j < KBITS; j++)
              if (w[p][WIN-1-(k*KBITS+j)]) e += wv[k][j];
            check(out_val[p][k], e, $sformatf("conv p%0d k%0d", p, k));
          end
      end
    end
    // FC mode: raw entries, gated by one spike bit per sub-LUT
    for (int k = 0; k < NSUB; k++)
      for (int a = 0; a < DEPTH; a++) begin
        fv[k][a] = real'(int'($urandom_range(0, 126)) - 63) / 4.0;
        @(negedge clk);
        wr_en = 1; wr_sub = ($clog2(NSUB+1))'(k); wr_addr = KBITS'(a); wr_data = r2h(fv[k][a]);
      end
    @(negedge clk);
    wr_en = 0; fc_mode = 1;
    for (int n = 0; n < 100; n++) begin
      logic [P-1:0][WIN-1:0] w;
      logic [KBITS-1:0] fa;
      for (int p = 0; p < P; p++) w[p] = WIN'($urandom);
      fa = KBITS'($urandom);
      @(negedge clk);
      in_valid = 1; in_win = w; fc_addr = fa;
      @(negedge clk);
      in_valid = 0;
      for (int p = 0; p < P; p++)
        for (int k = 0; k < NSUB; k++)
          check(out_val[p][k], w[p][k] ? fv[k][fa] : 0.0, $sformatf("fc p%0d k%0d", p, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
