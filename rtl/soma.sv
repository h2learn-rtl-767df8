// soma - leaky integrate-and-fire update of the Forward Engine (one per PE-array column).
//
// For each of P lanes (the P tiles the column's Acc delivers per beat) it computes
//   u_t     = ps + (s_{t-1} ? 0 : alpha * u_{t-1})      temporal part reset after a spike
//   s_t     = u_t >= th_f                               Heaviside fire function
//   smask_t = th_l < u_t < th_r                         spike-gradient mask for backprop
// and a compressed potential output: the potentials of the lanes whose mask bit is set
// are packed, in lane order, into the low lanes of ucmp and counted in ucmp_cnt; the
// other potentials are not needed by the backward pass and are dropped. The dense u_t
// is also output because it is the temporal state of the next timestep.
//
// The update equations and the mask follow the paper. The firing compare uses >= as in
// the paper's definition of the fire function (its figure prints ">"); the lane count,
// the packing order and the register stage are this design's choices.
//
// Timing: all outputs are registered, valid one cycle after in_valid.
module soma
  import h2l_pkg::*;
#(
  parameter int P = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  fp16_t                    alpha,
  input  fp16_t                    th_f,
  input  fp16_t                    th_l,
  input  fp16_t                    th_r,
  input  logic                     in_valid,
  input  fp16_t [P-1:0]            ps,
  input  fp16_t [P-1:0]            u_prev,
  input  logic  [P-1:0]            s_prev,
  output logic                     out_valid,
  output logic  [P-1:0]            s,
  output logic  [P-1:0]            smask,
  output fp16_t [P-1:0]            u,
  output fp16_t [P-1:0]            ucmp,
  output logic  [$clog2(P+1)-1:0]  ucmp_cnt
);
  fp16_t                   u_n   [P];
  logic  [P-1:0]           s_n, m_n;
  fp16_t                   c_n   [P];
  logic  [$clog2(P+1)-1:0] cnt_n;

  always_comb begin
    for (int p = 0; p < P; p++) begin
      u_n[p] = fp16_add(ps[p], s_prev[p] ? FP16_ZERO : fp16_mul(alpha, u_prev[p]));
      s_n[p] = fp16_ge(u_n[p], th_f);
      m_n[p] = fp16_lt(th_l, u_n[p]) && fp16_lt(u_n[p], th_r);
    end
    // pack the masked-in potentials into the low lanes
    cnt_n = '0;
    for (int p = 0; p < P; p++) c_n[p] = FP16_ZERO;
    for (int p = 0; p < P; p++)
      if (m_n[p]) begin
        c_n[cnt_n[$clog2(P)-1:0]] = u_n[p];
        cnt_n      = cnt_n + 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      s         <= '0;
      smask     <= '0;
      ucmp_cnt  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        s        <= s_n;
        smask    <= m_n;
        ucmp_cnt <= cnt_n;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int p = 0; p < P; p++) begin
        u[p]    <= u_n[p];
        ucmp[p] <= c_n[p];
      end
  end
endmodule
