// lut_acc - column accumulator (Acc unit) of the Forward and Weight Update Engines.
//
// For each of P parallel tiles it adds the NSUB sub-LUT outputs of all ROWS LUT PEs of
// one PE-array column with a balanced FP16 adder tree (ROWS*NSUB leaves, padded with +0
// up to a power of two), then accumulates the tree result across grid iterations in an
// output-stationary register: on a beat with first = 1 the register is loaded with the
// tree sum, otherwise the sum is added to it. On a beat with last = 1 the final value
// is presented on out_ps with out_valid one cycle later.
//
// Forward Engine: ROWS = 64 input channels, NSUB = 3, result = spatial partial sum ps of
// u. Weight Update Engine: ROWS = 10 timesteps, NSUB = 2, result = weight gradient.
// The adder tree and the accumulation over grid iterations follow the paper; the tree is
// combinational with a single output register here, which is this design's choice.
//
// Timing: in_valid at cycle n -> accumulator updated at the edge ending cycle n;
// out_valid (only for last = 1) at cycle n+1.
module lut_acc
  import h2l_pkg::*;
#(
  parameter int ROWS = 64,
  parameter int NSUB = 3,
  parameter int P    = 4
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic                              first,
  input  logic                              last,
  input  fp16_t [P-1:0][ROWS-1:0][NSUB-1:0] in_val,
  output logic                              out_valid,
  output fp16_t [P-1:0]                     out_ps
);
  localparam int N = ROWS * NSUB;

  fp16_t tree_sum [P];
  fp16_t acc [P];

  for (genvar p = 0; p < P; p++) begin : g_tree
    fp16_t leaves [N];
    for (genvar r = 0; r < ROWS; r++) begin : g_r
      for (genvar k = 0; k < NSUB; k++) begin : g_k
        assign leaves[r*NSUB+k] = in_val[p][r][k];
      end
    end
    fp16_adder_tree #(.N(N)) u_tree (.in(leaves), .sum(tree_sum[p]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && last;
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int p = 0; p < P; p++)
        acc[p] <= first ? tree_sum[p] : fp16_add(acc[p], tree_sum[p]);
  end

  for (genvar p = 0; p < P; p++) begin : g_out
    assign out_ps[p] = acc[p];
  end
endmodule
