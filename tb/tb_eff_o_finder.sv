// tb_eff_o_finder - self-checking testbench of the Effectual Output Finder.
//
// Random spike-gradient masks of several densities; the compressed potentials are
// offered on the ucmp stream with random gaps, so the scan must stall. The reference
// expects the IDs of the set mask bits in row-major order, dealt round-robin to the G
// Output ID Buffers (the 1st to buffer 0, the 2nd to buffer 1, ...), the potentials
// placed back at their positions (zero elsewhere), and a scan of 64 cycles plus one per
// stall cycle. A directed case uses the mask of a 4x4 corner with IDs (0,1), (1,2),
// (2,3), (3,0).
module tb_eff_o_finder;
  import h2l_pkg::*;
  import tb_fp16_pkg::*;

  localparam int G = 4, DEPTH = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, ucmp_valid = 0, ucmp_ready, busy, done;
  logic [TILE_N-1:0] smask = '0;
  fp16_t ucmp_data = '0;
  logic [G-1:0][DEPTH-1:0][5:0] id_buf;
  logic [G-1:0][$clog2(DEPTH+1)-1:0] id_cnt;
  fp16_t [TILE_N-1:0] udec;

  eff_o_finder #(.G(G), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, stalls = 0;

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

  task automatic run_case(input logic [TILE_N-1:0] m);
    fp16_t vals [$];
    fp16_t expu [TILE_N];
    int k, cyc, st;
    k = 0;
    for (int i = 0; i < TILE_N; i++) begin
      expu[i] = '0;
      if (m[i]) begin
        expu[i] = small_val();
        vals.push_back(expu[i]);
      end
    end
    @(negedge clk);
    smask = m; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0; st = 0;
    while (!done) begin
      ucmp_valid = (vals.size() != 0) && ($urandom_range(0, 2) != 0);
      ucmp_data  = ucmp_valid ? vals[0] : 16'h7bff;
      #1;
      if (ucmp_ready && !ucmp_valid) st++;
      @(posedge clk);
      if (ucmp_ready && ucmp_valid) void'(vals.pop_front());
      @(negedge clk);
      cyc++;
    end
    ucmp_valid = 0;
    stalls += st;
    chk(cyc == TILE_N + st, $sformatf("scan %0d cycles, stalls %0d", cyc, st));
    chk(vals.size() == 0, "potentials left");
    for (int i = 0; i < TILE_N; i++) chk(udec[i] === expu[i], $sformatf("udec[%0d]", i));
    for (int g = 0; g < G; g++) begin
      int n;
      n = 0;
      for (int i = 0; i < TILE_N; i++)
        if (m[i]) begin
          if (k % G == g) begin
            chk(id_buf[g][n] == 6'(i), $sformatf("buf %0d entry %0d", g, n));
            n++;
          end
          k++;
        end
      k = 0;
      chk(int'(id_cnt[g]) == n, $sformatf("id_cnt[%0d]", g));
    end
  endtask

  initial begin
    logic [TILE_N-1:0] m;
    repeat (3) @(posedge clk);
    rst_n = 1;
    m = '0; m[0*8+1] = 1; m[1*8+2] = 1; m[2*8+3] = 1; m[3*8+0] = 1;
    run_case(m);
    chk(id_buf[0][0] == 6'd1 && id_buf[1][0] == 6'd10 && id_buf[2][0] == 6'd19 &&
        id_buf[3][0] == 6'd24, "directed buffers");
    for (int t = 0; t < 100; t++) begin
      int dens;
      dens = $urandom_range(0, 4);
      for (int i = 0; i < TILE_N; i++) m[i] = ($urandom_range(0, 3) < dens);
      run_case(m);
    end
    chk(stalls > 0, "no stall was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
