// tb_forward_engine - self-checking testbench of the Forward Engine at a reduced array
// size (4 rows x 3 columns of LUT PEs, 4 lanes).
//
// Loads random 3x3 kernels for every (input channel, output channel) pair, builds the
// LUTs, then runs grid iterations of 1..3 beats of random spike windows. The reference
// is the direct convolution sum (kernel element times spike bit) over rows, beats and
// window elements, followed by the LIF update with u_{t-1}, s_{t-1} given on the last
// beat, the firing rule, the mask and the compressed potentials. Kernel values are small
// multiples of 1/4 and alpha = 0.5 so all sums are exact. Checks that out_valid comes
// exactly 3 cycles after the last beat, and an FC-mode pass (spike-gated weight reads).
module tb_forward_engine;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  localparam int ROWS = 4, COLS = 3, NSUB = 3, KBITS = 3, P = 4;
  localparam int WIN = NSUB * KBITS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fc_mode = 0, wr_en = 0, build = 0, busy, in_valid = 0, first = 0, last = 0, out_valid;
  fp16_t alpha, th_f, th_l, th_r, wr_data = '0;
  logic [$clog2(ROWS)-1:0] wr_row = '0;
  logic [$clog2(COLS)-1:0] wr_col = '0;
  logic [$clog2(NSUB+1)-1:0] wr_sub = '0;
  logic [KBITS-1:0] wr_addr = '0, fc_addr = '0;
  logic [ROWS-1:0][P-1:0][WIN-1:0] in_win = '0;
  fp16_t [COLS-1:0][P-1:0] u_prev = '0, u, ucmp;
  logic [COLS-1:0][P-1:0] s_prev = '0, s, smask;
  logic [COLS-1:0][$clog2(P+1)-1:0] ucmp_cnt;

  forward_engine #(.ROWS(ROWS), .COLS(COLS), .NSUB(NSUB), .KBITS(KBITS), .P(P)) dut (.*);

  int checks = 0, failures = 0;
  real kw [ROWS][COLS][WIN];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("mismatch: %s", what);
    end
  endtask

  initial begin
    alpha = r2h(0.5); th_f = r2h(1.0); th_l = r2h(-0.5); th_r = r2h(1.5);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // kernels: element j of sub-LUT k is window element k*3+j (MSB first)
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int e = 0; e < WIN; e++) begin
          kw[r][c][e] = real'(int'($urandom_range(0, 6)) - 3) / 4.0;
          @(negedge clk);
          wr_en = 1; wr_row = ($clog2(ROWS))'(r); wr_col = ($clog2(COLS))'(c);
          wr_sub = ($clog2(NSUB+1))'(e / KBITS); wr_addr = KBITS'(1 << (KBITS - 1 - e % KBITS));
          wr_data = r2h(kw[r][c][e]);
        end
    @(negedge clk);
    wr_en = 0; build = 1;
    @(negedge clk);
    build = 0;
    while (busy) @(negedge clk);
    for (int it = 0; it < 60; it++) begin
      int nb;
      real ps [COLS][P];
      real ue [COLS][P];
      nb = $urandom_range(1, 3);
      for (int c = 0; c < COLS; c++) for (int p = 0; p < P; p++) ps[c][p] = 0.0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        for (int r = 0; r < ROWS; r++)
          for (int p = 0; p < P; p++) begin
            in_win[r][p] = WIN'($urandom);
            for (int c = 0; c < COLS; c++)
              for (int e = 0; e < WIN; e++)
                if (in_win[r][p][WIN-1-e]) ps[c][p] += kw[r][c][e];
          end
        in_valid = 1; first = (b == 0); last = (b == nb - 1);
        if (b == nb - 1)
          for (int c = 0; c < COLS; c++)
            for (int p = 0; p < P; p++) begin
              real up;
              up = real'(int'($urandom_range(0, 8)) - 4) / 4.0;
              u_prev[c][p] = r2h(up); s_prev[c][p] = 1'($urandom);
              ue[c][p] = ps[c][p] + (s_prev[c][p] ? 0.0 : 0.5 * up);
            end
      end
      @(negedge clk);
      in_valid = 0; first = 0; last = 0;
      chk(!out_valid, "early out_valid");
      @(negedge clk);
      chk(!out_valid, "early out_valid");
      @(negedge clk);
      chk(out_valid, "out_valid 3 cycles after the last beat");
      for (int c = 0; c < COLS; c++) begin
        int cnt;
        cnt = 0;
        for (int p = 0; p < P; p++) begin
          logic me;
          me = (ue[c][p] > -0.5) && (ue[c][p] < 1.5);
          chk(u[c][p] === r2h(ue[c][p]), $sformatf("u[%0d][%0d] %f vs %f", c, p, h2r(u[c][p]), ue[c][p]));
          chk(s[c][p] === (ue[c][p] >= 1.0), "s");
          chk(smask[c][p] === me, "smask");
          if (me) begin
            chk(ucmp[c][cnt] === r2h(ue[c][p]), "ucmp");
            cnt++;
          end
        end
        chk(int'(ucmp_cnt[c]) == cnt, "ucmp_cnt");
      end
    end
    // FC mode: write raw entries, sub-LUT k of PE (r,c) read at fc_addr gated by bit k
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int k = 0; k < NSUB; k++) begin
          @(negedge clk);
          wr_en = 1; wr_row = ($clog2(ROWS))'(r); wr_col = ($clog2(COLS))'(c);
          wr_sub = ($clog2(NSUB+1))'(k); wr_addr = 3'd5; wr_data = r2h(kw[r][c][k]);
        end
    @(negedge clk);
    wr_en = 0; fc_mode = 1; fc_addr = 3'd5;
    begin
      real ps [COLS][P];
      for (int r = 0; r < ROWS; r++)
        for (int p = 0; p < P; p++) in_win[r][p] = WIN'($urandom);
      for (int c = 0; c < COLS; c++)
        for (int p = 0; p < P; p++) begin
          ps[c][p] = 0.0;
          for (int r = 0; r < ROWS; r++)
            for (int k = 0; k < NSUB; k++) if (in_win[r][p][k]) ps[c][p] += kw[r][c][k];
        end
      u_prev = '0; s_prev = '1;
      in_valid = 1; first = 1; last = 1;
      @(negedge clk);
      in_valid = 0; first = 0; last = 0;
      repeat (2) @(negedge clk);
      chk(out_valid, "fc out_valid");
      for (int c = 0; c < COLS; c++)
        for (int p = 0; p < P; p++)
          chk(u[c][p] === r2h(ps[c][p]), $sformatf("fc u[%0d][%0d]", c, p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
