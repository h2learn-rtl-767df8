// be_pe_group - PE group of the Backward Engine: G finders, G PEs, one weight buffer.
//
// The group at (row r, column c) convolves the potential-gradient tile of channel r of
// layer l+1 (shared by all groups of row r, with its non-zero mask) with the kernel
// w[r][c] to produce partial spike gradients of channel c. PE g works through Output ID
// Buffer g of column c: its Effectual I-and-O Finder turns every valid output into the
// valid MACs of its window, and the PE executes them. The G PEs read the same weight
// buffer (K*K FP16 values, written already rotated by 180 degrees) and run
// independently; done rises when all G finders are done.
//
// Interface: w_we/w_idx/w_data load the weight buffer; start launches all finders on
// ids/id_cnt; clr clears the PE partial-sum buffers; rd_addr/rd_data let the Acc read
// the same element of the G partial-sum buffers. Timing: a finder issues one instruction
// per cycle and the PE retires it in the same cycle.
module be_pe_group
  import h2l_pkg::*;
#(
  parameter int G     = 4,
  parameter int K     = 3,
  parameter int DEPTH = (TILE_N + G - 1) / G,
  parameter int UT    = TILE_H + K - 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               w_we,
  input  logic [3:0]                         w_idx,
  input  fp16_t                              w_data,
  input  logic                               start,
  input  logic [G-1:0][DEPTH-1:0][5:0]       ids,
  input  logic [G-1:0][$clog2(DEPTH+1)-1:0]  id_cnt,
  input  fp16_t [UT*UT-1:0]                  utile,
  input  logic  [UT*UT-1:0]                  umask,
  input  logic                               clr,
  input  logic [5:0]                         rd_addr,
  output fp16_t [G-1:0]                      rd_data,
  output logic                               busy,
  output logic                               done
);
  fp16_t wbuf [K*K];

  always_ff @(posedge clk) begin
    if (w_we) wbuf[w_idx] <= w_data;
  end

  logic [G-1:0] f_busy, f_done;

  for (genvar g = 0; g < G; g++) begin : g_pe
    logic       iv;
    logic [5:0] sid;
    logic [3:0] wid;
    logic [7:0] uid;
    fp16_t      uval;

    eff_io_finder #(.K(K), .DEPTH(DEPTH), .UT(UT)) u_find (
      .clk, .rst_n, .start,
      .n_ids     (id_cnt[g]),
      .ids       (ids[g]),
      .umask,
      .inst_valid(iv),
      .inst_sid  (sid),
      .inst_wid  (wid),
      .inst_uid  (uid),
      .busy      (f_busy[g]),
      .done      (f_done[g])
    );

    assign uval = utile[int'(uid[7:4]) * UT + int'(uid[3:0])];

    be_pe u_pe (
      .clk, .clr,
      .inst_valid(iv),
      .inst_sid  (sid),
      .w_val     (wbuf[wid]),
      .u_val     (uval),
      .rd_addr,
      .rd_data   (rd_data[g])
    );
  end

  assign busy = |f_busy;
  assign done = &f_done;
endmodule
