// be_acc - Acc unit of the Backward Engine (one per PE-array column).
//
// After all PE groups of the column have finished a tile, the Acc reads one tile element
// per beat from every PE of the column (N = rows x PE-group size partial sums), adds them
// with an FP16 adder tree, and accumulates the result over grid iterations in a 64-entry
// buffer for the output tile: with first = 1 the element is loaded, otherwise added.
// The accumulated value is output one cycle after the beat.
//
// The adder tree and output-stationary accumulation follow the paper; the one-element-
// per-beat schedule is this design's choice.
module be_acc
  import h2l_pkg::*;
#(
  parameter int N = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [5:0]        addr,
  input  logic              first,
  input  fp16_t             in_val [N],
  output logic              out_valid,
  output logic [5:0]        out_addr,
  output fp16_t             out_ps
);
  fp16_t buf_ps [TILE_N];
  fp16_t tsum, nsum;

  fp16_adder_tree #(.N(N)) u_tree (.in(in_val), .sum(tsum));

  assign nsum = first ? tsum : fp16_add(buf_ps[addr], tsum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      buf_ps[addr] <= nsum;
      out_ps       <= nsum;
      out_addr     <= addr;
    end
  end
endmodule
