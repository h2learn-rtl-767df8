// tb_backward_engine - self-checking testbench of the Backward Engine at a reduced array
// size (2 input-channel rows x 2 output-channel columns, groups of 4 PEs).
//
// Each case is one output tile per column over two grid iterations (first, then last),
// each with its own random kernels and input gradient tiles of random density. The
// spike-gradient masks are random; the compressed potentials are offered with random
// gaps, so the Output Finders stall. The reference computes, per output element e of
// column c, ps = sum over iterations, rows and window positions of w * grad_u over the
// non-zero inputs, only where the mask is set, then the Grad step with FP16 rounding
// after every operation. Checks every (out_pos, du, du_nz, adu) and that the number of
// MACs the PEs would do without sparsity is larger than the work done.
module tb_backward_engine;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  localparam int ROWS = 2, COLS = 2, G = 4, K = 3, UT = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fp16_t alpha, beta;
  logic w_we = 0, ut_we = 0, ut_nz = 0, adu_we = 0;
  logic [$clog2(ROWS)-1:0] w_row = '0, ut_row = '0;
  logic [$clog2(COLS)-1:0] w_col = '0, adu_col = '0;
  logic [3:0] w_idx = '0;
  fp16_t w_data = '0, ut_data = '0, adu_data = '0;
  logic [6:0] ut_addr = '0;
  logic [5:0] adu_addr = '0;
  logic [COLS-1:0][TILE_N-1:0] smask = '0, s_bits = '0;
  logic [COLS-1:0] ucmp_valid = '0, ucmp_ready;
  fp16_t [COLS-1:0] ucmp_data = '0;
  logic start = 0, first = 0, last = 0, busy, done, out_valid;
  logic [5:0] out_pos;
  fp16_t [COLS-1:0] du, adu;
  logic [COLS-1:0] du_nz;

  backward_engine #(.ROWS(ROWS), .COLS(COLS), .G(G), .K(K)) dut (.*);

  int checks = 0, failures = 0, stalls = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sv(input int lim);
    return real'(int'($urandom_range(0, 2 * lim)) - lim) / 4.0;
  endfunction

  // compressed potential streams, one per column
  fp16_t uq [COLS][$];
  always @(negedge clk) begin
    for (int c = 0; c < COLS; c++) begin
      ucmp_valid[c] = (uq[c].size() != 0) && ($urandom_range(0, 2) != 0);
      ucmp_data[c]  = ucmp_valid[c] ? uq[c][0] : '0;
    end
    #1;
    for (int c = 0; c < COLS; c++) if (ucmp_ready[c] && !ucmp_valid[c]) stalls++;
  end
  always @(posedge clk)
    for (int c = 0; c < COLS; c++)
      if (ucmp_ready[c] && ucmp_valid[c]) void'(uq[c].pop_front());

  initial begin
    real ps [COLS][64];
    real uval [COLS][64];
    real adun [COLS][64];
    alpha = r2h(0.5); beta = r2h(0.75);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int seen;
      // forward results of this layer: mask, spikes, potentials, alpha*grad_u_{t+1}
      for (int c = 0; c < COLS; c++)
        for (int e = 0; e < 64; e++) begin
          smask[c][e] = 1'($urandom_range(0, 2) == 0);
          s_bits[c][e] = 1'($urandom);
          uval[c][e] = smask[c][e] ? sv(8) : 0.0;
          if (smask[c][e]) uq[c].push_back(r2h(uval[c][e]));
          adun[c][e] = sv(8);
          ps[c][e] = 0.0;
          @(negedge clk);
          adu_we = 1; adu_col = ($clog2(COLS))'(c); adu_addr = 6'(e); adu_data = r2h(adun[c][e]);
        end
      @(negedge clk);
      adu_we = 0;
      for (int it = 0; it < 2; it++) begin
        real wv [ROWS][COLS][K*K];
        real gv [ROWS][UT*UT];
        int dens;
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            for (int i = 0; i < K * K; i++) begin
              wv[r][c][i] = sv(3);
              @(negedge clk);
              w_we = 1; w_row = ($clog2(ROWS))'(r); w_col = ($clog2(COLS))'(c); w_idx = 4'(i);
              w_data = r2h(wv[r][c][i]);
            end
        @(negedge clk);
        w_we = 0;
        dens = $urandom_range(1, 3);
        for (int r = 0; r < ROWS; r++)
          for (int a = 0; a < UT * UT; a++) begin
            gv[r][a] = ($urandom_range(0, 3) < dens) ? sv(3) : 0.0;
            @(negedge clk);
            ut_we = 1; ut_row = ($clog2(ROWS))'(r); ut_addr = 7'(a);
            ut_data = r2h(gv[r][a]); ut_nz = (gv[r][a] != 0.0);
          end
        @(negedge clk);
        ut_we = 0;
        for (int c = 0; c < COLS; c++)
          for (int e = 0; e < 64; e++)
            if (smask[c][e])
              for (int r = 0; r < ROWS; r++)
                for (int i = 0; i < K * K; i++)
                  ps[c][e] += wv[r][c][i] * gv[r][(e / 8 + i / K) * UT + e % 8 + i % K];
        @(negedge clk);
        start = 1; first = (it == 0); last = (it == 1);
        @(negedge clk);
        start = 0;
        seen = 0;
        while (!done) begin
          if (out_valid) begin
            for (int c = 0; c < COLS; c++) begin
              int e;
              fp16_t pr, ds, t2, d;
              e = int'(out_pos);
              pr = r2h(h2r(r2h(adun[c][e])) * -uval[c][e]);
              ds = r2h(r2h(ps[c][e]) == '0 ? h2r(pr) : ps[c][e] + h2r(pr));
              t2 = r2h((smask[c][e] ? 0.75 : 0.0) * h2r(ds));
              d  = r2h((s_bits[c][e] ? 0.0 : adun[c][e]) + h2r(t2));
              checks += 3;
              if (du[c] !== d) begin
                failures++;
                if (failures < 10) $display("col %0d elem %0d: du %f expected %f (ps %f)", c, e, h2r(du[c]), h2r(d), ps[c][e]);
              end
              if (adu[c] !== r2h(0.5 * h2r(d))) failures++;
              if (du_nz[c] !== (h2r(d) != 0.0)) failures++;
            end
            seen++;
          end
          @(negedge clk);
        end
        checks++;
        if (seen != (it == 1 ? 64 : 0)) begin
          failures++;
          $display("iteration %0d gave %0d results", it, seen);
        end
      end
    end
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("no Output Finder stall happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
