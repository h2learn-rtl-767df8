// forward_engine - Forward Engine: LUT-based spike convolution plus LIF soma.
//
// A ROWS x COLS array of LUT PEs (64 x 16). Row r holds the kernels of input channel r
// and all PEs of a row share the spike windows of that channel's tile; column c holds
// the kernels of output channel c, and its Acc adds the sub-LUT outputs of all its PEs
// (the spatial sum over up to 64 input channels) for P tiles in parallel. Over C_s/64
// grid iterations (first ... last) the Acc keeps accumulating in place (output
// stationary). After the last iteration the column's Soma adds the temporal part and
// produces the spike s_t, the compressed potential u_t and the spike-gradient mask.
//
// One beat (in_valid) supplies, for every row, P spike windows of NSUB*KBITS bits (a
// 3x3 window, first element in the MSB). In FC mode the PEs act as weight buffers read
// at fc_addr and gated by the spike bits (see lut_pe).
//
// LUT loading: wr_* writes one entry of PE (wr_row, wr_col); build starts the LUT fill
// in every PE at once; busy is high while any PE is filling.
//
// Temporal state: u_prev / s_prev (u_{t-1}, s_{t-1} of the COLS x P output neurons) are
// sampled on the beat that carries last = 1 and delayed internally to meet the Acc
// result; in hardware they come from the GLB. Array sizes, the sharing of rows and
// columns and the per-column Acc and Soma follow the paper; port widths and the
// sampling of the state are this design's choices.
//
// Timing: beat at cycle n -> PE outputs n+1 -> Acc result n+2 -> Soma outputs
// (out_valid) n+3. A new beat may be given every cycle.
//
// Lint notes: only the valid outputs of row 0 of the PE array and the soma of column 0
// are used (all PEs and somas run in lockstep), so the other valid bits are unused.
module forward_engine
  import h2l_pkg::*;
#(
  parameter int ROWS  = 64,
  parameter int COLS  = 16,
  parameter int NSUB  = 3,
  parameter int KBITS = 3,
  parameter int P     = 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // configuration
  input  logic                                   fc_mode,
  input  fp16_t                                  alpha,
  input  fp16_t                                  th_f,
  input  fp16_t                                  th_l,
  input  fp16_t                                  th_r,
  // LUT load
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
  input  fp16_t [COLS-1:0][P-1:0]                u_prev,
  input  logic  [COLS-1:0][P-1:0]                s_prev,
  // soma outputs
  output logic                                   out_valid,
  output logic  [COLS-1:0][P-1:0]                s,
  output logic  [COLS-1:0][P-1:0]                smask,
  output fp16_t [COLS-1:0][P-1:0]                u,
  output fp16_t [COLS-1:0][P-1:0]                ucmp,
  output logic  [COLS-1:0][$clog2(P+1)-1:0]      ucmp_cnt
);
  logic [ROWS-1:0][COLS-1:0] pe_busy;
  logic [ROWS-1:0][COLS-1:0] pe_ovalid;
  fp16_t [ROWS-1:0][COLS-1:0][P-1:0][NSUB-1:0] pe_out;

  // beat control delayed to the PE output stage
  logic d_first, d_last;
  fp16_t [COLS-1:0][P-1:0] u_prev_d1, u_prev_d2;
  logic  [COLS-1:0][P-1:0] s_prev_d1, s_prev_d2;

  always_ff @(posedge clk) begin
    d_first   <= first;
    d_last    <= last;
    u_prev_d1 <= u_prev;
    s_prev_d1 <= s_prev;
    u_prev_d2 <= u_prev_d1;
    s_prev_d2 <= s_prev_d1;
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
  fp16_t [COLS-1:0][P-1:0] acc_ps;
  logic [COLS-1:0] soma_valid;

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
      .out_ps   (acc_ps[c])
    );

    soma #(.P(P)) u_soma (
      .clk, .rst_n,
      .alpha, .th_f, .th_l, .th_r,
      .in_valid (acc_valid[c]),
      .ps       (acc_ps[c]),
      .u_prev   (u_prev_d2[c]),
      .s_prev   (s_prev_d2[c]),
      .out_valid(soma_valid[c]),
      .s        (s[c]),
      .smask    (smask[c]),
      .u        (u[c]),
      .ucmp     (ucmp[c]),
      .ucmp_cnt (ucmp_cnt[c])
    );
  end

  assign out_valid = soma_valid[0];
endmodule
