// grad - Grad unit of the Backward Engine (one per PE-array column).
//
// Element-wise end of the backward pass for one neuron per beat, in two phases:
//   phase 1: ds  = ps + adu_next * (-u)                spike gradient
//   phase 2: du  = (s ? 0 : adu_next) + (smask ? beta : 0) * ds
//            du_nz = (du != 0),  adu = alpha * du
// with ps the accumulated spatial sum from the Acc, u the (decompressed) potential u_t,
// s the spike s_t, smask the spike-gradient mask, and adu_next = alpha * grad_u_{t+1}
// (the adu output of the same neuron one timestep later; 0 at the last timestep).
// beta is the height of the pulse that approximates the derivative of the fire
// function. du_nz is the potential-gradient mask used as input sparsity by the next
// layer down; adu is kept for the next (earlier) timestep.
//
// The two phases and their muxes follow the paper. Each phase has one register stage
// (this design's choice): outputs are valid two cycles after in_valid, one beat per cycle.
module grad
  import h2l_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  fp16_t  alpha,
  input  fp16_t  beta,
  input  logic   in_valid,
  input  fp16_t  ps,
  input  fp16_t  u,
  input  fp16_t  adu_next,
  input  logic   s,
  input  logic   smask,
  output logic   out_valid,
  output fp16_t  du,
  output logic   du_nz,
  output fp16_t  adu
);
  // phase 1
  logic  v1, s1, m1;
  fp16_t ds1, adu1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      ds1  <= fp16_add(ps, fp16_mul(adu_next, fp16_neg(u)));
      adu1 <= adu_next;
      s1   <= s;
      m1   <= smask;
    end
  end

  // phase 2
  fp16_t du_n;
  assign du_n = fp16_add(s1 ? FP16_ZERO : adu1, fp16_mul(m1 ? beta : FP16_ZERO, ds1));

  always_ff @(posedge clk) begin
    if (v1) begin
      du    <= du_n;
      du_nz <= !fp16_is_zero(du_n);
      adu   <= fp16_mul(alpha, du_n);
    end
  end
endmodule
