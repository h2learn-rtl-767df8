// tb_h2learn - end-to-end testbench of the H2Learn top at reduced engine sizes
// (Forward Engine 2 x 2 PEs, Backward Engine 2 x 2 groups, Weight Update Engine 2 x 2 PEs).
//
// The pipeline controller runs a training job of 2 layers, 5 sub-batches and batch
// groups of 2. The testbench plays the memory system: for every forward step it loads
// random kernels into the Forward Engine, builds the LUTs, sends one beat of random
// spikes and checks the soma outputs against a reference; for every backward step it
// runs (when the controller enables it) one Backward Engine tile and always one Weight
// Update Engine accumulation, checking both against references, and checks that the
// weight update is produced exactly on the steps the controller flags. Forward and
// backward steps run concurrently, as the controller issues them. After the job the
// engines are switched to FC mode for one more forward pass.
// Mechanisms counted (each must happen at least once): LUT builds, forward/backward
// overlap, both external memories used by the forward pass, Backward Engine skipped at
// layer 0, weight update applied, gradient accumulated without update, Output Finder
// stall, MACs skipped for zero input gradients, FC-mode pass.
module tb_h2learn;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  localparam int FR = 2, FC = 2, BR = 2, BC = 2, WR = 2, WC = 2, P = 4, LW = 4, BW = 8;
  localparam int UT = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fp16_t alpha, beta, th_f, th_l, th_r;
  logic fc_mode = 0;
  logic ctl_start = 0;
  logic [LW-1:0] ctl_n_layers = '0, ctl_fe_layer, ctl_bw_layer;
  logic [BW-1:0] ctl_group_size = '0, ctl_n_subbatch = '0, ctl_fe_sub, ctl_bw_sub;
  logic ctl_fe_start, ctl_fe_mem, ctl_fe_done = 0, ctl_bw_start, ctl_bw_mem, ctl_bw_be_en;
  logic ctl_bw_apply, ctl_bw_done = 0, ctl_busy, ctl_done, ctl_overlap;
  // Forward Engine
  logic fe_wr_en = 0, fe_build = 0, fe_busy, fe_in_valid = 0, fe_first = 0, fe_last = 0, fe_out_valid;
  logic [$clog2(FR)-1:0] fe_wr_row = '0;
  logic [$clog2(FC)-1:0] fe_wr_col = '0;
  logic [1:0] fe_wr_sub = '0;
  logic [2:0] fe_wr_addr = '0, fe_fc_addr = '0;
  fp16_t fe_wr_data = '0;
  logic [FR-1:0][P-1:0][8:0] fe_in_win = '0;
  fp16_t [FC-1:0][P-1:0] fe_u_prev = '0, fe_u, fe_ucmp;
  logic [FC-1:0][P-1:0] fe_s_prev = '0, fe_s, fe_smask;
  logic [FC-1:0][$clog2(P+1)-1:0] fe_ucmp_cnt;
  // Backward Engine
  logic be_w_we = 0, be_ut_we = 0, be_ut_nz = 0, be_adu_we = 0;
  logic [$clog2(BR)-1:0] be_w_row = '0, be_ut_row = '0;
  logic [$clog2(BC)-1:0] be_w_col = '0, be_adu_col = '0;
  logic [3:0] be_w_idx = '0;
  fp16_t be_w_data = '0, be_ut_data = '0, be_adu_data = '0;
  logic [6:0] be_ut_addr = '0;
  logic [5:0] be_adu_addr = '0, be_out_pos;
  logic [BC-1:0][TILE_N-1:0] be_smask = '0, be_s_bits = '0;
  logic [BC-1:0] be_ucmp_valid = '0, be_ucmp_ready, be_du_nz;
  fp16_t [BC-1:0] be_ucmp_data = '0, be_du, be_adu;
  logic be_start = 0, be_first = 0, be_last = 0, be_busy, be_done, be_out_valid;
  // Weight Update Engine
  logic wu_wr_en = 0, wu_build = 0, wu_busy, wu_in_valid = 0, wu_first = 0, wu_last = 0;
  logic wu_out_valid, wu_w_new_valid;
  logic [$clog2(WR)-1:0] wu_wr_row = '0;
  logic [$clog2(WC)-1:0] wu_wr_col = '0;
  logic [1:0] wu_wr_sub = '0;
  logic [3:0] wu_wr_addr = '0, wu_fc_addr = '0;
  fp16_t wu_wr_data = '0;
  logic [WR-1:0][P-1:0][7:0] wu_in_win = '0;
  fp16_t [WC-1:0][P-1:0] wu_dw_prev = '0, wu_w_cur = '0, wu_dw, wu_w_new;

  h2learn #(.FE_ROWS(FR), .FE_COLS(FC), .BE_ROWS(BR), .BE_COLS(BC), .BE_G(4),
            .WU_ROWS(WR), .WU_COLS(WC), .P(P), .LW(LW), .BW(BW)) dut (.*);

  int checks = 0, failures = 0;
  int n_build = 0, n_overlap = 0, n_mem0 = 0, n_mem1 = 0, n_be_skip = 0, n_apply = 0;
  int n_accum = 0, n_stall = 0, n_zero_in = 0, n_fc = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 15) $display("mismatch: %s", what);
    end
  endtask

  function automatic real sv(input int lim);
    return real'(int'($urandom_range(0, 2 * lim)) - lim) / 4.0;
  endfunction

  // ---------------- forward step: load, build, one beat, check ----------------
  task automatic fe_step(input logic fc);
    real kw [FR][FC][9];
    real ue [FC][P];
    for (int r = 0; r < FR; r++)
      for (int c = 0; c < FC; c++)
        for (int e = 0; e < 9; e++) begin
          kw[r][c][e] = sv(3);
          @(negedge clk);
          fe_wr_en = 1; fe_wr_row = ($clog2(FR))'(r); fe_wr_col = ($clog2(FC))'(c);
          fe_wr_sub = 2'(e / 3);
          fe_wr_addr = fc ? 3'd6 : 3'(1 << (2 - e % 3));
          fe_wr_data = r2h(kw[r][c][e]);
        end
    @(negedge clk);
    fe_wr_en = 0;
    if (!fc) begin
      fe_build = 1;
      @(negedge clk);
      fe_build = 0;
      chk(fe_busy, "forward LUT build started");
      while (fe_busy) @(negedge clk);
      n_build++;
    end
    // with fc the last written element of each sub-LUT (e = 3k+2) sits at address 6
    fe_fc_addr = 3'd6;
    for (int c = 0; c < FC; c++) for (int p = 0; p < P; p++) ue[c][p] = 0.0;
    for (int r = 0; r < FR; r++)
      for (int p = 0; p < P; p++) begin
        fe_in_win[r][p] = 9'($urandom);
        for (int c = 0; c < FC; c++)
          for (int e = 0; e < 9; e++)
            if (!fc && fe_in_win[r][p][8-e]) ue[c][p] += kw[r][c][e];
            else if (fc && e % 3 == 2 && fe_in_win[r][p][e/3]) ue[c][p] += kw[r][c][e];
      end
    for (int c = 0; c < FC; c++)
      for (int p = 0; p < P; p++) begin
        real up;
        up = sv(4);
        fe_u_prev[c][p] = r2h(up); fe_s_prev[c][p] = 1'($urandom);
        if (!fe_s_prev[c][p]) ue[c][p] += 0.5 * up;
      end
    fe_in_valid = 1; fe_first = 1; fe_last = 1;
    @(negedge clk);
    fe_in_valid = 0; fe_first = 0; fe_last = 0;
    repeat (2) @(negedge clk);
    chk(fe_out_valid, "forward result");
    for (int c = 0; c < FC; c++)
      for (int p = 0; p < P; p++) begin
        chk(fe_u[c][p] === r2h(ue[c][p]), $sformatf("forward u %f vs %f", h2r(fe_u[c][p]), ue[c][p]));
        chk(fe_s[c][p] === (ue[c][p] >= 1.0), "forward spike");
        chk(fe_smask[c][p] === (ue[c][p] > -0.5 && ue[c][p] < 1.5), "forward mask");
      end
  endtask

  // ---------------- backward engine: one tile, one grid iteration ----------------
  fp16_t uq [BC][$];
  always @(negedge clk) begin
    for (int c = 0; c < BC; c++) begin
      be_ucmp_valid[c] = (uq[c].size() != 0) && ($urandom_range(0, 2) != 0);
      be_ucmp_data[c]  = be_ucmp_valid[c] ? uq[c][0] : '0;
    end
    #1;
    for (int c = 0; c < BC; c++) if (be_ucmp_ready[c] && !be_ucmp_valid[c]) n_stall++;
  end
  always @(posedge clk)
    for (int c = 0; c < BC; c++)
      if (be_ucmp_ready[c] && be_ucmp_valid[c]) void'(uq[c].pop_front());

  task automatic be_step();
    real ps [BC][64];
    real uval [BC][64];
    real adun [BC][64];
    real wv [BR][BC][9];
    real gv [BR][UT*UT];
    int seen;
    for (int c = 0; c < BC; c++)
      for (int e = 0; e < 64; e++) begin
        be_smask[c][e] = 1'($urandom_range(0, 2) == 0);
        be_s_bits[c][e] = 1'($urandom);
        uval[c][e] = be_smask[c][e] ? sv(8) : 0.0;
        if (be_smask[c][e]) uq[c].push_back(r2h(uval[c][e]));
        adun[c][e] = sv(8);
        ps[c][e] = 0.0;
        @(negedge clk);
        be_adu_we = 1; be_adu_col = ($clog2(BC))'(c); be_adu_addr = 6'(e);
        be_adu_data = r2h(adun[c][e]);
      end
    for (int r = 0; r < BR; r++)
      for (int c = 0; c < BC; c++)
        for (int i = 0; i < 9; i++) begin
          wv[r][c][i] = sv(3);
          @(negedge clk);
          be_adu_we = 0;
          be_w_we = 1; be_w_row = ($clog2(BR))'(r); be_w_col = ($clog2(BC))'(c);
          be_w_idx = 4'(i); be_w_data = r2h(wv[r][c][i]);
        end
    for (int r = 0; r < BR; r++)
      for (int a = 0; a < UT * UT; a++) begin
        gv[r][a] = ($urandom_range(0, 1) == 0) ? sv(3) : 0.0;
        if (gv[r][a] == 0.0) n_zero_in++;
        @(negedge clk);
        be_w_we = 0;
        be_ut_we = 1; be_ut_row = ($clog2(BR))'(r); be_ut_addr = 7'(a);
        be_ut_data = r2h(gv[r][a]); be_ut_nz = (gv[r][a] != 0.0);
      end
    @(negedge clk);
    be_ut_we = 0;
    for (int c = 0; c < BC; c++)
      for (int e = 0; e < 64; e++)
        if (be_smask[c][e])
          for (int r = 0; r < BR; r++)
            for (int i = 0; i < 9; i++)
              ps[c][e] += wv[r][c][i] * gv[r][(e / 8 + i / 3) * UT + e % 8 + i % 3];
    be_start = 1; be_first = 1; be_last = 1;
    @(negedge clk);
    be_start = 0;
    seen = 0;
    while (!be_done) begin
      if (be_out_valid) begin
        for (int c = 0; c < BC; c++) begin
          int e;
          fp16_t pr, ds, t2, d;
          e = int'(be_out_pos);
          pr = r2h(adun[c][e] * -uval[c][e]);
          ds = r2h(ps[c][e] + h2r(pr));
          t2 = r2h((be_smask[c][e] ? 0.75 : 0.0) * h2r(ds));
          d  = r2h((be_s_bits[c][e] ? 0.0 : adun[c][e]) + h2r(t2));
          chk(be_du[c] === d, $sformatf("backward du %f vs %f", h2r(be_du[c]), h2r(d)));
        end
        seen++;
      end
      @(negedge clk);
    end
    chk(seen == 64, "backward tile complete");
  endtask

  // ---------------- weight update engine: build, one beat, check ----------------
  task automatic wu_step(input logic ap);
    real gw [WR][WC][8];
    real dwe [WC][P];
    real wne [WC][P];
    for (int r = 0; r < WR; r++)
      for (int c = 0; c < WC; c++)
        for (int e = 0; e < 8; e++) begin
          gw[r][c][e] = sv(3);
          @(negedge clk);
          wu_wr_en = 1; wu_wr_row = ($clog2(WR))'(r); wu_wr_col = ($clog2(WC))'(c);
          wu_wr_sub = 2'(e / 4); wu_wr_addr = 4'(1 << (3 - e % 4)); wu_wr_data = r2h(gw[r][c][e]);
        end
    @(negedge clk);
    wu_wr_en = 0; wu_build = 1;
    @(negedge clk);
    wu_build = 0;
    while (wu_busy) @(negedge clk);
    n_build++;
    for (int c = 0; c < WC; c++)
      for (int p = 0; p < P; p++) begin
        real dp, wc;
        dp = sv(8); wc = sv(8);
        wu_dw_prev[c][p] = r2h(dp); wu_w_cur[c][p] = r2h(wc);
        dwe[c][p] = dp;
        for (int r = 0; r < WR; r++) begin
          if (c == 0) wu_in_win[r][p] = 8'($urandom);
          for (int e = 0; e < 8; e++) if (wu_in_win[r][p][7-e]) dwe[c][p] += gw[r][c][e];
        end
        wne[c][p] = wc - dwe[c][p];
      end
    wu_in_valid = 1; wu_first = 1; wu_last = 1;
    @(negedge clk);
    wu_in_valid = 0; wu_first = 0; wu_last = 0;
    repeat (2) @(negedge clk);
    chk(wu_out_valid, "weight gradient result");
    chk(wu_w_new_valid == ap, "weight update exactly on flagged steps");
    if (wu_w_new_valid) n_apply++; else n_accum++;
    for (int c = 0; c < WC; c++)
      for (int p = 0; p < P; p++) begin
        chk(wu_dw[c][p] === r2h(dwe[c][p]), "weight gradient");
        if (ap) chk(wu_w_new[c][p] === r2h(wne[c][p]), "updated weight");
      end
  endtask

  // ---------------- engine-side responders of the controller ----------------
  initial forever begin
    @(negedge clk);
    while (rst_n && ctl_fe_start) begin
      if (ctl_fe_mem) n_mem1++; else n_mem0++;
      fe_step(1'b0);
      ctl_fe_done = 1;
      @(negedge clk);
      ctl_fe_done = 0;
    end
  end

  initial forever begin
    @(negedge clk);
    while (rst_n && ctl_bw_start) begin
      logic ap;
      ap = ctl_bw_apply;   // held by the controller for the whole step
      if (ctl_bw_be_en) be_step();
      else n_be_skip++;
      wu_step(ap);
      ctl_bw_done = 1;
      @(negedge clk);
      ctl_bw_done = 0;
    end
  end

  always @(posedge clk) if (rst_n && ctl_overlap) n_overlap++;

  initial begin
    alpha = r2h(0.5); beta = r2h(0.75); th_f = r2h(1.0); th_l = r2h(-0.5); th_r = r2h(1.5);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    ctl_n_layers = 4'd2; ctl_n_subbatch = 8'd5; ctl_group_size = 8'd2; ctl_start = 1;
    @(negedge clk);
    ctl_start = 0;
    while (!ctl_done) @(negedge clk);
    // FC-mode pass of the forward engine after the convolutional job
    fc_mode = 1;
    fe_step(1'b1);
    fc_mode = 0;
    n_fc++;
    chk(n_build > 0,    "LUT build");
    chk(n_overlap > 0,  "forward/backward overlap");
    chk(n_mem0 > 0 && n_mem1 > 0, "both forward memories used");
    chk(n_be_skip > 0,  "Backward Engine skipped at layer 0");
    chk(n_apply > 0,    "weight update applied");
    chk(n_accum > 0,    "gradient accumulated without update");
    chk(n_stall > 0,    "Output Finder stall");
    chk(n_zero_in > 0,  "zero input gradients skipped");
    chk(n_fc > 0,       "FC mode");
    $display("builds=%0d overlap_cycles=%0d mem0=%0d mem1=%0d be_skips=%0d applies=%0d accum=%0d stalls=%0d zero_inputs=%0d fc=%0d",
             n_build, n_overlap, n_mem0, n_mem1, n_be_skip, n_apply, n_accum, n_stall, n_zero_in, n_fc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
