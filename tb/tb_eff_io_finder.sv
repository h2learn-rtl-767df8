// tb_eff_io_finder - self-checking testbench of the Effectual Input-and-Output Finder.
//
// Random output-ID lists and random input non-zero masks (several densities). The
// reference walks the IDs in order and, for each, the K x K window of the input tile,
// expecting one instruction per non-zero input (Conv ID dr*K+dc, weight ID = Conv ID,
// input ID = (row+dr, col+dc)) in increasing Conv ID order, one per cycle, with one
// idle cycle for an ID whose window is all zero. The run time is checked against
// sum(max(1, valid inputs of the ID)) cycles. A directed case checks output (2,3):
// Conv ID 1 addresses input (2,4) and Conv ID 3 input (3,3).
module tb_eff_io_finder;
  import h2l_pkg::*;

  localparam int K = 3, DEPTH = 16, UT = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, inst_valid, busy, done;
  logic [$clog2(DEPTH+1)-1:0] n_ids = '0;
  logic [DEPTH-1:0][5:0] ids = '0;
  logic [UT*UT-1:0] umask = '0;
  logic [5:0] inst_sid;
  logic [3:0] inst_wid;
  logic [7:0] inst_uid;

  eff_io_finder #(.K(K), .DEPTH(DEPTH), .UT(UT)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(input int n, input logic [DEPTH-1:0][5:0] idl, input logic [UT*UT-1:0] m);
    logic [17:0] expq [$];
    int exp_cycles, cyc;
    exp_cycles = 0;
    for (int i = 0; i < n; i++) begin
      int sr, sc, cntv;
      sr = int'(idl[i][5:3]); sc = int'(idl[i][2:0]); cntv = 0;
      for (int c = 0; c < K * K; c++) begin
        int ur, uc;
        ur = sr + c / K; uc = sc + c % K;
        if (m[ur*UT+uc]) begin
          expq.push_back({idl[i], 4'(c), 4'(ur), 4'(uc)});
          cntv++;
        end
      end
      exp_cycles += (cntv == 0) ? 1 : cntv;
    end
    @(negedge clk);
    n_ids = ($clog2(DEPTH+1))'(n); ids = idl; umask = m; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done) begin
      if (inst_valid) begin
        logic [17:0] e;
        checks++;
        if (expq.size() == 0) begin
          failures++;
          $display("unexpected instruction");
        end else begin
          e = expq.pop_front();
          if ({inst_sid, inst_wid, inst_uid} !== e) begin
            failures++;
            if (failures < 10) $display("inst %h expected %h", {inst_sid, inst_wid, inst_uid}, e);
          end
        end
      end
      @(negedge clk);
      cyc++;
    end
    checks += 2;
    if (expq.size() != 0) begin
      failures++;
      $display("%0d instructions missing", expq.size());
    end
    if (cyc != exp_cycles && n != 0) begin
      failures++;
      $display("took %0d cycles, expected %0d", cyc, exp_cycles);
    end
  endtask

  initial begin
    logic [DEPTH-1:0][5:0] idl;
    logic [UT*UT-1:0] m;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: output (2,3) with only inputs (2,4) and (3,3) non-zero
    idl = '0; idl[0] = {3'd2, 3'd3};
    m = '0; m[2*UT+4] = 1'b1; m[3*UT+3] = 1'b1;
    run_case(1, idl, m);
    for (int t = 0; t < 300; t++) begin
      int n, dens;
      n = $urandom_range(0, DEPTH);
      dens = $urandom_range(0, 4);
      for (int i = 0; i < DEPTH; i++) idl[i] = 6'($urandom_range(0, 63));
      for (int b = 0; b < UT * UT; b++) m[b] = ($urandom_range(0, 3) < dens);
      run_case(n, idl, m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
