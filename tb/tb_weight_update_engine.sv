// tb_weight_update_engine - self-checking testbench of the Weight Update Engine at a
// reduced array size (3 timestep rows x 2 columns, 2 sub-LUTs of 16 entries, 4 lanes).
//
// Loads random gradient values (one 1x8 window per PE) at the one-hot addresses, builds
// the LUTs and runs gradient accumulations of 1..3 beats of random spike windows. The
// reference is the dot product of spikes and gradients summed over timesteps and beats,
// plus dw_prev, and w_cur - dw when apply is set. All values are small multiples of 1/4
// so every sum is exact. Checks the 3-cycle latency and w_new_valid = apply.
module tb_weight_update_engine;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  localparam int ROWS = 3, COLS = 2, NSUB = 2, KBITS = 4, P = 4;
  localparam int WIN = NSUB * KBITS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fc_mode = 0, wr_en = 0, build = 0, busy, in_valid = 0, first = 0, last = 0;
  logic apply = 0, out_valid, w_new_valid;
  fp16_t wr_data = '0;
  logic [$clog2(ROWS)-1:0] wr_row = '0;
  logic [$clog2(COLS)-1:0] wr_col = '0;
  logic [$clog2(NSUB+1)-1:0] wr_sub = '0;
  logic [KBITS-1:0] wr_addr = '0, fc_addr = '0;
  logic [ROWS-1:0][P-1:0][WIN-1:0] in_win = '0;
  fp16_t [COLS-1:0][P-1:0] dw_prev = '0, w_cur = '0, dw, w_new;

  weight_update_engine #(.ROWS(ROWS), .COLS(COLS), .NSUB(NSUB), .KBITS(KBITS), .P(P)) dut (.*);

  int checks = 0, failures = 0;
  real gv [ROWS][COLS][WIN];

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
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int e = 0; e < WIN; e++) begin
          gv[r][c][e] = real'(int'($urandom_range(0, 6)) - 3) / 4.0;
          @(negedge clk);
          wr_en = 1; wr_row = ($clog2(ROWS))'(r); wr_col = ($clog2(COLS))'(c);
          wr_sub = ($clog2(NSUB+1))'(e / KBITS); wr_addr = KBITS'(1 << (KBITS - 1 - e % KBITS));
          wr_data = r2h(gv[r][c][e]);
        end
    @(negedge clk);
    wr_en = 0; build = 1;
    @(negedge clk);
    build = 0;
    while (busy) @(negedge clk);
    for (int it = 0; it < 60; it++) begin
      int nb;
      logic ap;
      real acc [COLS][P];
      real dwe [COLS][P];
      real wne [COLS][P];
      nb = $urandom_range(1, 3);
      ap = 1'($urandom);
      for (int c = 0; c < COLS; c++) for (int p = 0; p < P; p++) acc[c][p] = 0.0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        for (int r = 0; r < ROWS; r++)
          for (int p = 0; p < P; p++) begin
            in_win[r][p] = WIN'($urandom);
            for (int c = 0; c < COLS; c++)
              for (int e = 0; e < WIN; e++)
                if (in_win[r][p][WIN-1-e]) acc[c][p] += gv[r][c][e];
          end
        in_valid = 1; first = (b == 0); last = (b == nb - 1); apply = ap && (b == nb - 1);
        if (b == nb - 1)
          for (int c = 0; c < COLS; c++)
            for (int p = 0; p < P; p++) begin
              real dp, wc;
              dp = real'(int'($urandom_range(0, 16)) - 8) / 4.0;
              wc = real'(int'($urandom_range(0, 16)) - 8) / 4.0;
              dw_prev[c][p] = r2h(dp); w_cur[c][p] = r2h(wc);
              dwe[c][p] = acc[c][p] + dp;
              wne[c][p] = wc - dwe[c][p];
            end
      end
      @(negedge clk);
      in_valid = 0; first = 0; last = 0; apply = 0;
      repeat (2) begin
        chk(!out_valid, "early out_valid");
        @(negedge clk);
      end
      chk(out_valid, "out_valid 3 cycles after the last beat");
      chk(w_new_valid == ap, "w_new_valid");
      for (int c = 0; c < COLS; c++)
        for (int p = 0; p < P; p++) begin
          chk(dw[c][p] === r2h(dwe[c][p]), $sformatf("dw[%0d][%0d] %f vs %f", c, p, h2r(dw[c][p]), dwe[c][p]));
          if (ap) chk(w_new[c][p] === r2h(wne[c][p]), "w_new");
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
