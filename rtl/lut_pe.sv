// lut_pe - look-up-table processing element for spike-operand convolution.
//
// Because one operand of the forward-pass and weight-update convolutions is a binary
// spike, the dot product of a window of KBITS spikes with KBITS FP16 values can only
// take 2^KBITS values. The PE stores all of them in a sub-LUT and reads the result with
// the spike pattern as the address, so no multiplier and no per-element adder is used.
// A window of NSUB*KBITS spikes is split over NSUB sub-LUTs (Forward Engine: 3 sub-LUTs
// of 8 entries for a 3x3 window; Weight Update Engine: 2 sub-LUTs of 16 entries for a 1x8
// window). The NSUB sub-LUT outputs are summed later, in the column's Acc adder tree.
// Each sub-LUT has P read ports so that P tiles are processed in parallel.
//
// Address convention: the window is in_win[p][WIN-1:0] with its first element in the
// MSB; sub-LUT k takes bits [WIN-1-k*KBITS -: KBITS], and inside a sub-LUT address the
// MSB is its first element (LUT entry 100 = a, 010 = b, 001 = c for elements a b c).
//
// Filling the LUT: the single values are written with wr_* at the one-hot addresses
// (element j of sub-LUT k at address 1 << (KBITS-1-j)). A pulse on build then computes
// every other entry with one FP16 adder, one entry per cycle in increasing address
// order: entry[0] = 0 and entry[a] = entry[a & (a-1)] + entry[a & -a]. busy is high for
// the NSUB*2^KBITS cycles this takes. Computing the table inside the PE is this design's
// choice; the idea of precomputed pattern sums is the paper's.
//
// FC mode (fc_mode = 1): the sub-LUTs are used as weight buffers. All DEPTH entries are
// written directly; lane p, sub-LUT k outputs entry[fc_addr] if in_win[p][k] is 1, else 0.
//
// Timing: out_val is registered, one cycle after in_valid (out_valid follows in_valid).
//
// Lint note: wr_sub is one bit wider than the sub-LUT index when NSUB is a power of two
// (a shared port width with the engines); its top bit is then unused.
module lut_pe
  import h2l_pkg::*;
#(
  parameter int NSUB  = 3,   // sub-LUTs per PE
  parameter int KBITS = 3,   // window elements per sub-LUT (sub-LUT depth 2^KBITS)
  parameter int P     = 4    // parallel read ports (tiles in flight)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // LUT write / build
  input  logic                          wr_en,
  input  logic [$clog2(NSUB+1)-1:0]     wr_sub,
  input  logic [KBITS-1:0]              wr_addr,
  input  fp16_t                         wr_data,
  input  logic                          build,
  output logic                          busy,
  // read
  input  logic                          fc_mode,
  input  logic [KBITS-1:0]              fc_addr,
  input  logic                          in_valid,
  input  logic [P-1:0][NSUB*KBITS-1:0]  in_win,
  output logic                          out_valid,
  output fp16_t [P-1:0][NSUB-1:0]       out_val
);
  localparam int DEPTH = 1 << KBITS;
  localparam int WIN   = NSUB * KBITS;
  localparam int BCNT  = NSUB * DEPTH;
  localparam int SW    = $clog2(NSUB);    // sub-LUT index width (NSUB >= 2)

  fp16_t lut [NSUB][DEPTH];

  // build sequencer: bcnt = sub * DEPTH + addr
  logic                     building;
  logic [$clog2(BCNT)-1:0]  bcnt;
  logic [SW-1:0]             bsub;
  logic [KBITS-1:0]         baddr, blo, bhi;
  fp16_t                    bsum;

  assign bsub  = SW'(bcnt / DEPTH);
  assign baddr = KBITS'(bcnt % DEPTH);
  assign blo   = baddr & (baddr - KBITS'(1));   // address with its lowest set bit cleared
  assign bhi   = baddr & (~baddr + KBITS'(1));  // lowest set bit alone
  assign bsum  = (baddr == '0) ? FP16_ZERO : fp16_add(lut[bsub][blo], lut[bsub][bhi]);
  assign busy  = building;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      building <= 1'b0;
      bcnt     <= '0;
    end else if (building) begin
      if (int'(bcnt) == BCNT - 1) building <= 1'b0;
      bcnt <= bcnt + 1'b1;
    end else if (build) begin
      building <= 1'b1;
      bcnt     <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (building) lut[bsub][baddr] <= bsum;
    else if (wr_en) lut[wr_sub[SW-1:0]][wr_addr] <= wr_data;
  end

  // read ports
  fp16_t rd [P][NSUB];
  always_comb begin
    for (int p = 0; p < P; p++)
      for (int k = 0; k < NSUB; k++) begin
        if (fc_mode) rd[p][k] = in_win[p][k] ? lut[k][fc_addr] : FP16_ZERO;
        else         rd[p][k] = lut[k][in_win[p][WIN-1-k*KBITS -: KBITS]];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int p = 0; p < P; p++)
        for (int k = 0; k < NSUB; k++) out_val[p][k] <= rd[p][k];
  end

  // The table must not be read while it is being rebuilt.
  assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && building))
    else $error("lut_pe: read during LUT build");
endmodule
