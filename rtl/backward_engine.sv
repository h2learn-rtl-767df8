// backward_engine - dual-sparsity Backward Engine.
//
// Computes the potential gradients grad_u_t^l of one 8x8 output tile per column from
// the gradients grad_u_t^{l+1} of the layer above, for a ROWS x COLS array of PE groups
// (16 x 64, G = 4 PEs per group). Row r takes input channel r (a 10x10 gradient tile
// with halo and its non-zero mask, loaded with ut_*), column c produces output channel c
// and owns an Effectual O Finder, an Acc and a Grad unit. Group (r, c) holds the rotated
// 3x3 kernel w[r][c] (loaded with w_*).
//
// A grid iteration (start ... done) runs three phases one after the other:
//   1. scan   (only when first = 1): every O Finder scans its column's spike-gradient
//             mask, fills its G Output ID Buffers and decompresses the potentials from
//             its ucmp stream (the scan stalls while a needed value is not offered);
//   2. MAC:   the PE partial sums are cleared, then every finder/PE pair walks its
//             Output ID Buffer and executes only MACs whose input gradient and output
//             mask are both non-zero; the phase ends when every group is done
//             (the groups run independently and synchronise here);
//   3. acc:   64 beats; beat e reads element e from every PE of a column, the Acc adds
//             them and accumulates over grid iterations (first = 1 loads). When last = 1
//             the sum goes on to the Grad unit with u_t, s_t, the mask and
//             alpha*grad_u_{t+1} (loaded with adu_*), which outputs grad_u_t, its
//             non-zero mask and alpha*grad_u_t for element out_pos.
// The grid iterations over the C_{grad u}/16 input-channel groups reuse the same output
// tile; the weight and gradient tiles are reloaded between iterations.
//
// Array sizes, the units and their order follow the paper. The strict phase sequencing,
// the load ports standing in for the GLB, and the beat-per-element Acc schedule are this
// design's choices. FC-layer mode (finders disabled) is not built.
//
// Lint note: the busy outputs of the PE groups and Output Finders are left unused; the
// FSM waits on their done flags instead.
module backward_engine
  import h2l_pkg::*;
#(
  parameter int ROWS = 16,
  parameter int COLS = 64,
  parameter int G    = 4,
  parameter int K    = 3
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  fp16_t                                alpha,
  input  fp16_t                                beta,
  // weight buffers of the PE groups (kernel already rotated by 180 degrees)
  input  logic                                 w_we,
  input  logic [$clog2(ROWS)-1:0]              w_row,
  input  logic [$clog2(COLS)-1:0]              w_col,
  input  logic [3:0]                           w_idx,
  input  fp16_t                                w_data,
  // gradient tiles of layer l+1, one per row: value and non-zero mask bit
  input  logic                                 ut_we,
  input  logic [$clog2(ROWS)-1:0]              ut_row,
  input  logic [6:0]                           ut_addr,   // row*UT + col
  input  fp16_t                                ut_data,
  input  logic                                 ut_nz,
  // alpha * grad_u_{t+1} tiles, one per column
  input  logic                                 adu_we,
  input  logic [$clog2(COLS)-1:0]              adu_col,
  input  logic [5:0]                           adu_addr,
  input  fp16_t                                adu_data,
  // forward-pass results of layer l, per column
  input  logic  [COLS-1:0][TILE_N-1:0]         smask,
  input  logic  [COLS-1:0][TILE_N-1:0]         s_bits,
  input  logic  [COLS-1:0]                     ucmp_valid,
  input  fp16_t [COLS-1:0]                     ucmp_data,
  output logic  [COLS-1:0]                     ucmp_ready,
  // control
  input  logic                                 start,
  input  logic                                 first,
  input  logic                                 last,
  output logic                                 busy,
  output logic                                 done,
  // results
  output logic                                 out_valid,
  output logic [5:0]                           out_pos,
  output fp16_t [COLS-1:0]                     du,
  output logic  [COLS-1:0]                     du_nz,
  output fp16_t [COLS-1:0]                     adu
);
  localparam int UT    = TILE_H + K - 1;
  localparam int DEPTH = (TILE_N + G - 1) / G;

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_SCAN_WAIT, S_CLR, S_MAC, S_MAC_WAIT, S_ACC, S_DRAIN}
    state_t;
  state_t state;

  logic       r_first, r_last;
  logic [5:0] pos;
  logic [2:0] drain;

  // row-shared gradient tiles and column alpha*grad tiles
  fp16_t [ROWS-1:0][UT*UT-1:0] utile;
  logic  [ROWS-1:0][UT*UT-1:0] umask;
  fp16_t adu_buf [COLS][TILE_N];

  always_ff @(posedge clk) begin
    if (ut_we) begin
      utile[ut_row][ut_addr] <= ut_data;
      umask[ut_row][ut_addr] <= ut_nz;
    end
    if (adu_we) adu_buf[adu_col][adu_addr] <= adu_data;
  end

  // control strobes
  logic scan_start, mac_start, mac_clr, acc_beat;
  assign scan_start = (state == S_SCAN);
  assign mac_clr    = (state == S_CLR);
  assign mac_start  = (state == S_MAC);
  assign acc_beat   = (state == S_ACC);

  logic [COLS-1:0] of_done;
  logic [ROWS-1:0][COLS-1:0] grp_done;

  // per-column units
  logic [COLS-1:0][G-1:0][DEPTH-1:0][5:0]      col_ids;
  logic [COLS-1:0][G-1:0][$clog2(DEPTH+1)-1:0] col_cnt;
  fp16_t [COLS-1:0][TILE_N-1:0]                col_udec;
  fp16_t [ROWS-1:0][COLS-1:0][G-1:0]           grp_rd;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic grp_busy;
      be_pe_group #(.G(G), .K(K), .DEPTH(DEPTH), .UT(UT)) u_grp (
        .clk, .rst_n,
        .w_we    (w_we && w_row == ($clog2(ROWS))'(r) && w_col == ($clog2(COLS))'(c)),
        .w_idx, .w_data,
        .start   (mac_start),
        .ids     (col_ids[c]),
        .id_cnt  (col_cnt[c]),
        .utile   (utile[r]),
        .umask   (umask[r]),
        .clr     (mac_clr),
        .rd_addr (pos),
        .rd_data (grp_rd[r][c]),
        .busy    (grp_busy),
        .done    (grp_done[r][c])
      );
    end
  end

  logic [COLS-1:0] acc_valid, grad_valid;
  logic [COLS-1:0][5:0] acc_addr;
  fp16_t [COLS-1:0] acc_ps;

  for (genvar c = 0; c < COLS; c++) begin : g_colunit
    logic of_busy;
    eff_o_finder #(.G(G), .DEPTH(DEPTH)) u_of (
      .clk, .rst_n,
      .start     (scan_start),
      .smask     (smask[c]),
      .ucmp_valid(ucmp_valid[c]),
      .ucmp_data (ucmp_data[c]),
      .ucmp_ready(ucmp_ready[c]),
      .id_buf    (col_ids[c]),
      .id_cnt    (col_cnt[c]),
      .udec      (col_udec[c]),
      .busy      (of_busy),
      .done      (of_done[c])
    );

    fp16_t acc_in [ROWS*G];
    for (genvar r = 0; r < ROWS; r++) begin : g_r
      for (genvar g = 0; g < G; g++) begin : g_g
        assign acc_in[r*G+g] = grp_rd[r][c][g];
      end
    end

    be_acc #(.N(ROWS*G)) u_acc (
      .clk, .rst_n,
      .in_valid (acc_beat),
      .addr     (pos),
      .first    (r_first),
      .in_val   (acc_in),
      .out_valid(acc_valid[c]),
      .out_addr (acc_addr[c]),
      .out_ps   (acc_ps[c])
    );

    grad u_grad (
      .clk, .rst_n, .alpha, .beta,
      .in_valid (acc_valid[c] && r_last),
      .ps       (acc_ps[c]),
      .u        (col_udec[c][acc_addr[c]]),
      .adu_next (adu_buf[c][acc_addr[c]]),
      .s        (s_bits[c][acc_addr[c]]),
      .smask    (smask[c][acc_addr[c]]),
      .out_valid(grad_valid[c]),
      .du       (du[c]),
      .du_nz    (du_nz[c]),
      .adu      (adu[c])
    );
  end

  // element index of the Grad outputs
  logic [5:0] pos_g1, pos_g2;
  always_ff @(posedge clk) begin
    pos_g1  <= acc_addr[0];
    pos_g2  <= pos_g1;
  end
  assign out_pos   = pos_g2;
  assign out_valid = grad_valid[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      pos     <= '0;
      drain   <= '0;
      r_first <= 1'b0;
      r_last  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          done    <= 1'b0;
          r_first <= first;
          r_last  <= last;
          state   <= first ? S_SCAN : S_CLR;
        end
        S_SCAN:      state <= S_SCAN_WAIT;
        S_SCAN_WAIT: if (&of_done) state <= S_CLR;
        S_CLR:       state <= S_MAC;
        S_MAC:       state <= S_MAC_WAIT;
        S_MAC_WAIT:  if (&grp_done) begin
          state <= S_ACC;
          pos   <= '0;
        end
        S_ACC: begin
          pos <= pos + 1'b1;
          if (pos == 6'(TILE_N - 1)) begin
            state <= S_DRAIN;
            drain <= '0;
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd3) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
