// eff_o_finder - Effectual Output Finder of the Backward Engine (one per PE-array column).
//
// Output sparsity: only neurons whose spike-gradient mask bit (set by the Soma in the
// forward pass) is 1 can have a non-zero spike gradient, so only their outputs are
// computed. After start, the finder scans the 8x8 mask tile row by row, one position per
// cycle, and writes the ID (row*8 + col) of every valid position into G Output ID
// Buffers in turn (buffer 0, 1, ..., G-1, 0, ...), so each of the G PEs of a PE group
// gets an almost equal share. In the same scan it decompresses the potentials: the
// forward pass stored only masked-in potentials, in scan order; each valid position
// takes the next value of the ucmp stream and the others become 0, giving the dense
// tile udec used by the Grad unit.
//
// Handshake: ucmp_valid / ucmp_ready; a value is consumed on a cycle where both are 1.
// The scan stalls on a valid position while no compressed value is offered.
// done rises after the last position and stays until the next start.
// The alternating buffers and the decompression follow the paper; one position per
// cycle and the stall are this design's choices.
module eff_o_finder
  import h2l_pkg::*;
#(
  parameter int G     = 4,                 // Output ID Buffers = PE group size
  parameter int DEPTH = (TILE_N + G - 1) / G
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   start,
  input  logic [TILE_N-1:0]                      smask,      // bit row*8+col
  input  logic                                   ucmp_valid,
  input  fp16_t                                  ucmp_data,
  output logic                                   ucmp_ready,
  output logic [G-1:0][DEPTH-1:0][5:0]           id_buf,
  output logic [G-1:0][$clog2(DEPTH+1)-1:0]      id_cnt,
  output fp16_t [TILE_N-1:0]                     udec,
  output logic                                   busy,
  output logic                                   done
);
  logic [5:0]             pos;
  logic [$clog2(G+1)-1:0] sel;       // next buffer to write
  logic                   stall;

  assign ucmp_ready = busy && smask[pos];
  assign stall      = busy && smask[pos] && !ucmp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      pos    <= '0;
      sel    <= '0;
      id_cnt <= '0;
    end else if (start) begin
      busy   <= 1'b1;
      done   <= 1'b0;
      pos    <= '0;
      sel    <= '0;
      id_cnt <= '0;
    end else if (busy && !stall) begin
      if (smask[pos]) begin
        id_cnt[sel] <= id_cnt[sel] + 1'b1;
        sel         <= (int'(sel) == G - 1) ? '0 : sel + 1'b1;
      end
      if (pos == 6'(TILE_N - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
      pos <= pos + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (busy && !stall) begin
      if (smask[pos]) begin
        id_buf[sel][id_cnt[sel]] <= pos;
        udec[pos]                <= ucmp_data;
      end else begin
        udec[pos] <= FP16_ZERO;
      end
    end
  end
endmodule
