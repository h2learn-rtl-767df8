// tb_be_pe_group - self-checking testbench of a Backward Engine PE group (4 finder/PE
// pairs sharing one 3x3 weight buffer and one 10x10 input gradient tile).
//
// Random output IDs are dealt round-robin to the 4 ID lists (as the Output Finder does),
// random input tiles with a non-zero mask, random kernels. Values are small multiples of
// 1/4 so every sum is exact. After clr and start the group must finish in
// max over PEs of sum(max(1, valid inputs per ID)) cycles, and PE g must hold for each
// of its IDs the convolution sum over the non-zero inputs, zero elsewhere.
module tb_be_pe_group;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  localparam int G = 4, K = 3, DEPTH = 16, UT = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we = 0, start = 0, clr = 0, busy, done;
  logic [3:0] w_idx = '0;
  fp16_t w_data = '0;
  logic [G-1:0][DEPTH-1:0][5:0] ids = '0;
  logic [G-1:0][$clog2(DEPTH+1)-1:0] id_cnt = '0;
  fp16_t [UT*UT-1:0] utile = '0;
  logic [UT*UT-1:0] umask = '0;
  logic [5:0] rd_addr = '0;
  fp16_t [G-1:0] rd_data;

  be_pe_group #(.G(G), .K(K), .DEPTH(DEPTH), .UT(UT)) dut (.*);

  int checks = 0, failures = 0;

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

  initial begin
    real wv [K*K];
    real uv [UT*UT];
    real expv [G][64];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int dens, n, maxc, cyc;
      int pc [G];
      for (int i = 0; i < K * K; i++) begin
        wv[i] = sv(7);
        @(negedge clk);
        w_we = 1; w_idx = 4'(i); w_data = r2h(wv[i]);
      end
      @(negedge clk);
      w_we = 0;
      dens = $urandom_range(0, 4);
      for (int b = 0; b < UT * UT; b++) begin
        umask[b] = ($urandom_range(0, 3) < dens);
        uv[b] = umask[b] ? sv(7) : 0.0;
        if (uv[b] == 0.0) umask[b] = 0;
        // a masked-off position may still hold a stale value: it must not be used
        utile[b] = umask[b] ? r2h(uv[b]) : r2h(sv(7));
      end
      for (int g = 0; g < G; g++) begin
        pc[g] = 0;
        for (int e = 0; e < 64; e++) expv[g][e] = 0.0;
      end
      n = 0;
      for (int e = 0; e < 64; e++)
        if ($urandom_range(0, 1) == 1) begin
          int g, cnt;
          g = n % G;
          ids[g][n / G] = 6'(e);
          cnt = 0;
          for (int c = 0; c < K * K; c++) begin
            int a;
            a = (e / 8 + c / K) * UT + e % 8 + c % K;
            if (umask[a]) begin
              expv[g][e] += wv[c] * uv[a];
              cnt++;
            end
          end
          pc[g] += (cnt == 0) ? 1 : cnt;
          n++;
        end
      for (int g = 0; g < G; g++) id_cnt[g] = ($clog2(DEPTH+1))'(n / G + ((n % G > g) ? 1 : 0));
      maxc = 0;
      for (int g = 0; g < G; g++) if (pc[g] > maxc) maxc = pc[g];
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0; start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != maxc && n != 0) begin
        failures++;
        $display("group took %0d cycles, expected %0d", cyc, maxc);
      end
      for (int e = 0; e < 64; e++) begin
        rd_addr = 6'(e); #1;
        for (int g = 0; g < G; g++) begin
          checks++;
          if (rd_data[g] !== r2h(expv[g][e])) begin
            failures++;
            if (failures < 10) $display("pe %0d elem %0d: %f vs %f", g, e, h2r(rd_data[g]), expv[g][e]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
