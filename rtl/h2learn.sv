// h2learn - top level of the H2Learn BPTT training accelerator.
//
// Three engines, one per training phase, and the sub-batch pipeline controller:
//   * Forward Engine (64 x 16 LUT PEs, P = 4): spike-based Conv/MM of the forward pass,
//     LIF soma, compressed potentials and spike-gradient masks;
//   * Backward Engine (16 x 64 PE groups of 4): sparse FP16 Conv of the backward pass
//     exploiting output sparsity (spike-gradient mask) and input sparsity (non-zero
//     mask of the gradients), and the element-wise gradient (Grad) units;
//   * Weight Update Engine (10 x 128 LUT PEs, P = 4): spike-based weight-gradient Conv,
//     gradient accumulation over a batch group and the weight update w - dw;
//   * pipeline_ctrl: runs the forward pass of sub-batch k+1 while the backward pass and
//     weight update of sub-batch k run, alternates the forward results between external
//     memories 0 and 1, and flags the steps of the last sub-batch of a batch group.
// The engines exchange data only through their global buffers and the external memories
// (Mem 0/1 for forward results, weights and gradients; Mem 2 for weight gradients). Those
// buffers and memories are not part of this RTL: every engine's load and result ports,
// and the controller's step handshake, are ports of this top, where a memory system or a
// testbench drives them. Port names carry the engine prefix fe_, be_, wu_ or ctl_.
//
// Parameters default to the paper's configuration; all engines share one clock and an
// active-low asynchronous reset.
//
// Lint note: rst_n is also sampled synchronously, by the handshake assertions of the
// controller and units (their disable condition); the flops use it asynchronously only.
module h2learn
  import h2l_pkg::*;
#(
  parameter int FE_ROWS = 64,
  parameter int FE_COLS = 16,
  parameter int BE_ROWS = 16,
  parameter int BE_COLS = 64,
  parameter int BE_G    = 4,
  parameter int WU_ROWS = 10,
  parameter int WU_COLS = 128,
  parameter int P       = 4,
  parameter int LW      = 4,
  parameter int BW      = 8
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // shared configuration
  input  fp16_t                                   alpha,
  input  fp16_t                                   beta,
  input  fp16_t                                   th_f,
  input  fp16_t                                   th_l,
  input  fp16_t                                   th_r,
  input  logic                                    fc_mode,
  // ---------------- pipeline controller ----------------
  input  logic                                    ctl_start,
  input  logic [LW-1:0]                           ctl_n_layers,
  input  logic [BW-1:0]                           ctl_group_size,
  input  logic [BW-1:0]                           ctl_n_subbatch,
  output logic                                    ctl_fe_start,
  output logic [LW-1:0]                           ctl_fe_layer,
  output logic [BW-1:0]                           ctl_fe_sub,
  output logic                                    ctl_fe_mem,
  input  logic                                    ctl_fe_done,
  output logic                                    ctl_bw_start,
  output logic [LW-1:0]                           ctl_bw_layer,
  output logic [BW-1:0]                           ctl_bw_sub,
  output logic                                    ctl_bw_mem,
  output logic                                    ctl_bw_be_en,
  output logic                                    ctl_bw_apply,
  input  logic                                    ctl_bw_done,
  output logic                                    ctl_busy,
  output logic                                    ctl_done,
  output logic                                    ctl_overlap,
  // ---------------- Forward Engine ----------------
  input  logic                                    fe_wr_en,
  input  logic [$clog2(FE_ROWS)-1:0]              fe_wr_row,
  input  logic [$clog2(FE_COLS)-1:0]              fe_wr_col,
  input  logic [1:0]                              fe_wr_sub,
  input  logic [2:0]                              fe_wr_addr,
  input  fp16_t                                   fe_wr_data,
  input  logic                                    fe_build,
  output logic                                    fe_busy,
  input  logic                                    fe_in_valid,
  input  logic                                    fe_first,
  input  logic                                    fe_last,
  input  logic [2:0]                              fe_fc_addr,
  input  logic [FE_ROWS-1:0][P-1:0][8:0]          fe_in_win,
  input  fp16_t [FE_COLS-1:0][P-1:0]              fe_u_prev,
  input  logic  [FE_COLS-1:0][P-1:0]              fe_s_prev,
  output logic                                    fe_out_valid,
  output logic  [FE_COLS-1:0][P-1:0]              fe_s,
  output logic  [FE_COLS-1:0][P-1:0]              fe_smask,
  output fp16_t [FE_COLS-1:0][P-1:0]              fe_u,
  output fp16_t [FE_COLS-1:0][P-1:0]              fe_ucmp,
  output logic  [FE_COLS-1:0][$clog2(P+1)-1:0]    fe_ucmp_cnt,
  // ---------------- Backward Engine ----------------
  input  logic                                    be_w_we,
  input  logic [$clog2(BE_ROWS)-1:0]              be_w_row,
  input  logic [$clog2(BE_COLS)-1:0]              be_w_col,
  input  logic [3:0]                              be_w_idx,
  input  fp16_t                                   be_w_data,
  input  logic                                    be_ut_we,
  input  logic [$clog2(BE_ROWS)-1:0]              be_ut_row,
  input  logic [6:0]                              be_ut_addr,
  input  fp16_t                                   be_ut_data,
  input  logic                                    be_ut_nz,
  input  logic                                    be_adu_we,
  input  logic [$clog2(BE_COLS)-1:0]              be_adu_col,
  input  logic [5:0]                              be_adu_addr,
  input  fp16_t                                   be_adu_data,
  input  logic  [BE_COLS-1:0][TILE_N-1:0]         be_smask,
  input  logic  [BE_COLS-1:0][TILE_N-1:0]         be_s_bits,
  input  logic  [BE_COLS-1:0]                     be_ucmp_valid,
  input  fp16_t [BE_COLS-1:0]                     be_ucmp_data,
  output logic  [BE_COLS-1:0]                     be_ucmp_ready,
  input  logic                                    be_start,
  input  logic                                    be_first,
  input  logic                                    be_last,
  output logic                                    be_busy,
  output logic                                    be_done,
  output logic                                    be_out_valid,
  output logic [5:0]                              be_out_pos,
  output fp16_t [BE_COLS-1:0]                     be_du,
  output logic  [BE_COLS-1:0]                     be_du_nz,
  output fp16_t [BE_COLS-1:0]                     be_adu,
  // ---------------- Weight Update Engine ----------------
  input  logic                                    wu_wr_en,
  input  logic [$clog2(WU_ROWS)-1:0]              wu_wr_row,
  input  logic [$clog2(WU_COLS)-1:0]              wu_wr_col,
  input  logic [1:0]                              wu_wr_sub,
  input  logic [3:0]                              wu_wr_addr,
  input  fp16_t                                   wu_wr_data,
  input  logic                                    wu_build,
  output logic                                    wu_busy,
  input  logic                                    wu_in_valid,
  input  logic                                    wu_first,
  input  logic                                    wu_last,
  input  logic [3:0]                              wu_fc_addr,
  input  logic [WU_ROWS-1:0][P-1:0][7:0]          wu_in_win,
  input  fp16_t [WU_COLS-1:0][P-1:0]              wu_dw_prev,
  input  fp16_t [WU_COLS-1:0][P-1:0]              wu_w_cur,
  output logic                                    wu_out_valid,
  output fp16_t [WU_COLS-1:0][P-1:0]              wu_dw,
  output fp16_t [WU_COLS-1:0][P-1:0]              wu_w_new,
  output logic                                    wu_w_new_valid
);

  pipeline_ctrl #(.LW(LW), .BW(BW)) u_ctrl (
    .clk, .rst_n,
    .start     (ctl_start),
    .n_layers  (ctl_n_layers),
    .group_size(ctl_group_size),
    .n_subbatch(ctl_n_subbatch),
    .fe_start  (ctl_fe_start),
    .fe_layer  (ctl_fe_layer),
    .fe_sub    (ctl_fe_sub),
    .fe_mem    (ctl_fe_mem),
    .fe_done   (ctl_fe_done),
    .bw_start  (ctl_bw_start),
    .bw_layer  (ctl_bw_layer),
    .bw_sub    (ctl_bw_sub),
    .bw_mem    (ctl_bw_mem),
    .bw_be_en  (ctl_bw_be_en),
    .bw_apply  (ctl_bw_apply),
    .bw_done   (ctl_bw_done),
    .busy      (ctl_busy),
    .done      (ctl_done),
    .overlap   (ctl_overlap)
  );

  forward_engine #(.ROWS(FE_ROWS), .COLS(FE_COLS), .NSUB(3), .KBITS(3), .P(P)) u_fe (
    .clk, .rst_n, .fc_mode, .alpha, .th_f, .th_l, .th_r,
    .wr_en    (fe_wr_en),
    .wr_row   (fe_wr_row),
    .wr_col   (fe_wr_col),
    .wr_sub   (fe_wr_sub),
    .wr_addr  (fe_wr_addr),
    .wr_data  (fe_wr_data),
    .build    (fe_build),
    .busy     (fe_busy),
    .in_valid (fe_in_valid),
    .first    (fe_first),
    .last     (fe_last),
    .fc_addr  (fe_fc_addr),
    .in_win   (fe_in_win),
    .u_prev   (fe_u_prev),
    .s_prev   (fe_s_prev),
    .out_valid(fe_out_valid),
    .s        (fe_s),
    .smask    (fe_smask),
    .u        (fe_u),
    .ucmp     (fe_ucmp),
    .ucmp_cnt (fe_ucmp_cnt)
  );

  backward_engine #(.ROWS(BE_ROWS), .COLS(BE_COLS), .G(BE_G), .K(3)) u_be (
    .clk, .rst_n, .alpha, .beta,
    .w_we      (be_w_we),
    .w_row     (be_w_row),
    .w_col     (be_w_col),
    .w_idx     (be_w_idx),
    .w_data    (be_w_data),
    .ut_we     (be_ut_we),
    .ut_row    (be_ut_row),
    .ut_addr   (be_ut_addr),
    .ut_data   (be_ut_data),
    .ut_nz     (be_ut_nz),
    .adu_we    (be_adu_we),
    .adu_col   (be_adu_col),
    .adu_addr  (be_adu_addr),
    .adu_data  (be_adu_data),
    .smask     (be_smask),
    .s_bits    (be_s_bits),
    .ucmp_valid(be_ucmp_valid),
    .ucmp_data (be_ucmp_data),
    .ucmp_ready(be_ucmp_ready),
    .start     (be_start),
    .first     (be_first),
    .last      (be_last),
    .busy      (be_busy),
    .done      (be_done),
    .out_valid (be_out_valid),
    .out_pos   (be_out_pos),
    .du        (be_du),
    .du_nz     (be_du_nz),
    .adu       (be_adu)
  );

  weight_update_engine #(.ROWS(WU_ROWS), .COLS(WU_COLS), .NSUB(2), .KBITS(4), .P(P)) u_wu (
    .clk, .rst_n, .fc_mode,
    .wr_en      (wu_wr_en),
    .wr_row     (wu_wr_row),
    .wr_col     (wu_wr_col),
    .wr_sub     (wu_wr_sub),
    .wr_addr    (wu_wr_addr),
    .wr_data    (wu_wr_data),
    .build      (wu_build),
    .busy       (wu_busy),
    .in_valid   (wu_in_valid),
    .first      (wu_first),
    .last       (wu_last),
    .fc_addr    (wu_fc_addr),
    .in_win     (wu_in_win),
    .dw_prev    (wu_dw_prev),
    .w_cur      (wu_w_cur),
    .apply      (ctl_bw_apply),
    .out_valid  (wu_out_valid),
    .dw         (wu_dw),
    .w_new      (wu_w_new),
    .w_new_valid(wu_w_new_valid)
  );
endmodule
