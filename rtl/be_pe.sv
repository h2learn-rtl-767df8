// be_pe - floating-point PE of the Backward Engine.
//
// Executes one valid multiply-accumulate per cycle from its Effectual I-and-O Finder:
//   ps[inst_sid] = ps[inst_sid] + w_val * u_val
// where w_val is the weight addressed by the instruction's w ID and u_val the potential
// gradient addressed by its grad-u ID (both read by the PE group from the shared weight
// buffer and the row's gradient tile). The partial sums of the 8x8 output tile live in
// the PE's own buffer; clr zeroes it at the start of a grid iteration, and the column's
// Acc reads it through rd_addr / rd_data (combinational read).
//
// The PE function follows the paper; the separately rounded multiply and add (no fused
// MAC) and the clear/read ports are this design's choices.
// Timing: read-modify-write in one cycle; back-to-back instructions on the same output
// see each other's results.
module be_pe
  import h2l_pkg::*;
(
  input  logic        clk,
  input  logic        clr,
  input  logic        inst_valid,
  input  logic [5:0]  inst_sid,
  input  fp16_t       w_val,
  input  fp16_t       u_val,
  input  logic [5:0]  rd_addr,
  output fp16_t       rd_data
);
  fp16_t ps [TILE_N];

  always_ff @(posedge clk) begin
    if (clr) begin
      for (int i = 0; i < TILE_N; i++) ps[i] <= FP16_ZERO;
    end else if (inst_valid) begin
      ps[inst_sid] <= fp16_add(ps[inst_sid], fp16_mul(w_val, u_val));
    end
  end

  assign rd_data = ps[rd_addr];
endmodule
