// weight_update_engine - Weight Update Engine: LUT-based weight-gradient convolution.
//
// Computes grad_w^l[i,j] = sum_t grad_u_t^{l+1}[j] * s_t^l[i] with a ROWS x COLS array of
// LUT PEs (10 x 128). Row t handles timestep t and all PEs of a row share the spike
// windows of s_t; column c handles one output channel of grad_u. The PE at (t, c) holds
// in its two 16-entry sub-LUTs every subset sum of a 1x8 window of grad_u_t (channel c),
// so an 8-bit spike window addresses the partial dot product directly. The column's Acc
// adds the 10 timesteps x 2 sub-LUT outputs and, over the beats first ... last, the
// sliding windows, for P weight-gradient elements in parallel (output stationary: the
// gradient stays in the Acc until complete).
//
// On the beat with last = 1 the engine also takes, per column and lane, the gradient
// accumulated by the earlier sub-batches of the batch group (dw_prev, from the gradient
// memory) and the current weight w_cur. One cycle after the Acc result it outputs
//   dw    = acc + dw_prev                 (to be stored back)
//   w_new = w_cur - dw   when apply = 1   (last sub-batch of the batch group)
// The weight-update form w - dw is the one the paper's architecture figure prints; a
// learning rate is taken to be folded into the gradients (this design's choice).
// In FC mode the sub-LUTs are fed grad_u elements directly and gated by spikes (lut_pe).
//
// Timing: beat at cycle n -> PE outputs n+1 -> Acc n+2 -> out_valid n+3.
//
// Lint note: only the valid output of row 0 of the PE array is used (all PEs run in
// lockstep), so the other valid bits are unused.
module weight_update_engine
  import h2l_pkg::*;
#(
  parameter int ROWS  = 10,
  parameter int COLS  = 128,
  parameter int NSUB  = 2,
  parameter int KBITS = 4,
  parameter int P     = 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   fc_mode,
  // LUT load (grad_u values at one-hot addresses, or FC values)
  input  logic                                   wr_en,
  input  logic [$clog2(ROWS)-1:0]                wr_row,
  input  logic [$clog2(COLS)-1:0]                wr_col,
  input  logic [$clog2(NSUB+1)-1:0]              wr_sub,
  input  logic [KBITS-1:0]                       wr_addr,
  input  fp16_t                                  wr_data,
  input  logic                                   build,
  output logic                                   busy,
  // spike beats
  input  logic                                   in_valid,
  input  logic                                   first,
  input  logic                                   last,
  input  logic [KBITS-1:0]                       fc_addr,
  input  logic [ROWS-1:0][P-1:0][NSUB*KBITS-1:0] in_win,
  input  fp16_t [COLS-1:0][P-1:0]                dw_prev,
  input  fp16_t [COLS-1:0][P-1:0]                w_cur,
  input  logic                                   apply,
  // results
  output logic                                   out_valid,
  output fp16_t [COLS-1:0][P-1:0]                dw,
  output fp16_t [COLS-1:0][P-1:0]                w_new,
  output logic                                   w_new_valid
);
  logic [ROWS-1:0][COLS-1:0] pe_busy;
  logic [ROWS-1:0][COLS-1:0] pe_ovalid;
  fp16_t [ROWS-1:0][COLS-1:0][P-1:0][NSUB-1:0] pe_out;

  logic d_first, d_last, apply_d1, apply_d2;
  fp16_t [COLS-1:0][P-1:0] dwp_d1, dwp_d2, w_d1, w_d2;

  always_ff @(posedge clk) begin
    d_first  <= first;
    d_last   <= last;
    apply_d1 <= apply;
    apply_d2 <= apply_d1;
    dwp_d1   <= dw_prev;
    dwp_d2   <= dwp_d1;
    w_d1     <= w_cur;
    w_d2     <= w_d1;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      lut_pe #(.NSUB(NSUB), .KBITS(KBITS), .P(P)) u_pe (
        .clk, .rst_n,
        .wr_en    (wr_en && wr_row == ($clog2(ROWS))'(r) && wr_col == ($clog2(COLS))'(c)),
        .wr_sub, .wr_addr, .wr_data,
        .build,
        .busy     (pe_busy[r][c]),
        .fc_mode, .fc_addr,
        .in_valid,
        .in_win   (in_win[r]),
        .out_valid(pe_ovalid[r][c]),
        .out_val  (pe_out[r][c])
      );
    end
  end

  assign busy = |pe_busy;

  logic [COLS-1:0] acc_valid;
  fp16_t [COLS-1:0][P-1:0] acc_dw;

  for (genvar c = 0; c < COLS; c++) begin : g_colunit
    fp16_t [P-1:0][ROWS-1:0][NSUB-1:0] col_in;
    for (genvar p = 0; p < P; p++) begin : g_p
      for (genvar r = 0; r < ROWS; r++) begin : g_r
        assign col_in[p][r] = pe_out[r][c][p];
      end
    end

    lut_acc #(.ROWS(ROWS), .NSUB(NSUB), .P(P)) u_acc (
      .clk, .rst_n,
      .in_valid (pe_ovalid[0][c]),
      .first    (d_first),
      .last     (d_last),
      .in_val   (col_in),
      .out_valid(acc_valid[c]),
      .out_ps   (acc_dw[c])
    );

    always_ff @(posedge clk) begin
      if (acc_valid[c])
        for (int p = 0; p < P; p++) begin
          dw[c][p]    <= fp16_add(acc_dw[c][p], dwp_d2[c][p]);
          w_new[c][p] <= fp16_add(w_d2[c][p], fp16_neg(fp16_add(acc_dw[c][p], dwp_d2[c][p])));
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      w_new_valid <= 1'b0;
    end else begin
      out_valid   <= acc_valid[0];
      w_new_valid <= acc_valid[0] && apply_d2;
    end
  end
endmodule
