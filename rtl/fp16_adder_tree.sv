// fp16_adder_tree - combinational balanced FP16 adder tree.
//
// Sums N FP16 values with N-1 FP16 adders arranged as a balanced binary tree of depth
// ceil(log2 N): the inputs are split into a lower half of N/2 and an upper half of
// N - N/2 values, each summed by a smaller tree, and the two sums are added. Every
// addition rounds, as in a hardware tree of FP16 adders. Used by the Acc units of all
// three engines; purely combinational, no clock.
//
// Lint note: lo_sum and hi_sum are driven by the two sub-tree instances; the linter's
// report of them as undriven comes from its handling of the recursive instantiation
// (the sub-tree outputs) and does not reflect the circuit, which the testbenches of
// every accumulator exercise.
module fp16_adder_tree
  import h2l_pkg::*;
#(
  parameter int N = 8
) (
  input  fp16_t in  [N],
  output fp16_t sum
);
  if (N == 1) begin : g_leaf
    assign sum = in[0];
  end else begin : g_split
    localparam int NL = N / 2;
    localparam int NH = N - NL;
    fp16_t lo_in [NL];
    fp16_t hi_in [NH];
    fp16_t lo_sum, hi_sum;
    for (genvar i = 0; i < NL; i++) begin : g_lo
      assign lo_in[i] = in[i];
    end
    for (genvar i = 0; i < NH; i++) begin : g_hi
      assign hi_in[i] = in[NL+i];
    end
    fp16_adder_tree #(.N(NL)) u_lo (.in(lo_in), .sum(lo_sum));
    fp16_adder_tree #(.N(NH)) u_hi (.in(hi_in), .sum(hi_sum));
    assign sum = fp16_add(lo_sum, hi_sum);
  end
endmodule
