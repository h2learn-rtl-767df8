// tb_pipeline_ctrl - self-checking testbench of the sub-batch pipeline controller.
//
// Models both engine sides as responders that answer each *_start with a *_done after a
// random delay, and records every step. For random layer counts, batch-group sizes and
// sub-batch counts it checks: the forward steps run sub-batches 0..N-1, layers 0..L-1,
// on memory k mod 2; the backward steps run sub-batches 0..N-1, layers L-1..0, on the
// memory its forward pass wrote, with the Backward Engine enabled except at layer 0 and
// the update flag exactly on the last sub-batch of each group and the final one; the
// backward pass of sub-batch k never starts before its forward pass ended and overlaps
// the forward pass of k+1 (overlap is seen); done comes once at the end.
module tb_pipeline_ctrl;
  localparam int LW = 4, BW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [LW-1:0] n_layers = '0;
  logic [BW-1:0] group_size = '0, n_subbatch = '0;
  logic fe_start, fe_mem, fe_done = 0, bw_start, bw_mem, bw_be_en, bw_apply, bw_done = 0;
  logic [LW-1:0] fe_layer, bw_layer;
  logic [BW-1:0] fe_sub, bw_sub;
  logic busy, done, overlap;

  pipeline_ctrl #(.LW(LW), .BW(BW)) dut (.*);

  int checks = 0, failures = 0, overlaps = 0;

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

  // expected step sequences
  int fe_k, fe_l, bw_k, bw_l, L, N, GS;
  logic fe_fin [256];

  // forward responder
  initial forever begin
    @(negedge clk);
    while (rst_n && fe_start) begin
      chk(fe_sub == BW'(fe_k) && fe_layer == LW'(fe_l) && fe_mem == fe_k[0],
          $sformatf("fe step sub %0d layer %0d mem %0d, expected %0d %0d", fe_sub, fe_layer, fe_mem, fe_k, fe_l));
      repeat ($urandom_range(0, 11)) @(negedge clk);
      fe_done = 1;
      if (fe_l == L - 1) fe_fin[fe_k] = 1;
      if (fe_l == L - 1) begin fe_l = 0; fe_k++; end else fe_l++;
      @(negedge clk);
      fe_done = 0;
    end
  end

  // backward responder
  initial forever begin
    @(negedge clk);
    while (rst_n && bw_start) begin
      logic ap;
      ap = ((bw_k % GS) == GS - 1) || (bw_k == N - 1);
      chk(bw_sub == BW'(bw_k) && bw_layer == LW'(bw_l) && bw_mem == bw_k[0] &&
          bw_be_en == (bw_l != 0) && bw_apply == ap,
          $sformatf("bw step sub %0d layer %0d mem %0d be %0d ap %0d", bw_sub, bw_layer, bw_mem, bw_be_en, bw_apply));
      chk(fe_fin[bw_k], "backward before forward finished");
      repeat ($urandom_range(0, 11)) @(negedge clk);
      bw_done = 1;
      if (bw_l == 0) begin bw_l = L - 1; bw_k++; end else bw_l--;
      @(negedge clk);
      bw_done = 0;
    end
  end

  always @(posedge clk) if (rst_n && overlap) overlaps++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int cyc;
      L = $urandom_range(1, 6); N = $urandom_range(1, 9); GS = $urandom_range(1, 4);
      fe_k = 0; fe_l = 0; bw_k = 0; bw_l = L - 1;
      for (int i = 0; i < 256; i++) fe_fin[i] = 0;
      @(negedge clk);
      n_layers = LW'(L); n_subbatch = BW'(N); group_size = BW'(GS); start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done && cyc < 5000) begin
        @(negedge clk);
        cyc++;
      end
      chk(done, "done missing");
      chk(fe_k == N && bw_k == N, $sformatf("steps: fe %0d bw %0d of %0d", fe_k, bw_k, N));
      @(negedge clk);
      chk(!busy, "busy after done");
    end
    chk(overlaps > 0, "forward/backward overlap never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
