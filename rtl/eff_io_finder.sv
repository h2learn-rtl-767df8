// eff_io_finder - Effectual Input-and-Output Finder of the Backward Engine (one per PE).
//
// Input sparsity on top of output sparsity: for each valid output ID (sr, sc) taken from
// one Output ID Buffer, the KxK window of the potential-gradient tile it needs is
// ugrad[sr .. sr+K-1][sc .. sc+K-1] (the tile is (8+K-1) x (8+K-1) including its halo).
// The finder forms a Tag of K*K bits from the gradient mask over that window (bit
// dr*K+dc = mask[sr+dr][sc+dc]) and a priority encoder hands out one valid Conv ID per
// cycle, lowest first. Each is emitted as an 18-bit micro-instruction:
//   inst_sid = sr*8 + sc            (6 bits, output neuron)
//   inst_wid = dr*K + dc            (4 bits, weight of the 180-degree-rotated kernel)
//   inst_uid = {sr+dr, sc+dc}       (4-bit row, 4-bit column in the input tile)
// An output ID whose window holds no non-zero gradient costs one idle cycle.
//
// Handshake: start (one cycle) latches nothing but restarts the walk over ids[0..n_ids-1];
// the ids and the mask must stay stable until done. done rises when the list is
// exhausted and stays until the next start. The Tag, the priority encoder and the
// instruction fields follow the paper; the field packing is this design's choice,
// sized to the 18 bits the paper gives.
module eff_io_finder
  import h2l_pkg::*;
#(
  parameter int K     = 3,
  parameter int DEPTH = 16,
  parameter int UT    = TILE_H + K - 1       // input tile side including halo
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [$clog2(DEPTH+1)-1:0]   n_ids,
  input  logic [DEPTH-1:0][5:0]        ids,
  input  logic [UT*UT-1:0]             umask,   // bit row*UT+col
  output logic                         inst_valid,
  output logic [5:0]                   inst_sid,
  output logic [3:0]                   inst_wid,
  output logic [7:0]                   inst_uid,
  output logic                         busy,
  output logic                         done
);
  localparam int KK = K * K;

  logic [$clog2(DEPTH+1)-1:0] ptr;
  logic [KK-1:0]              rem;     // valid Conv IDs not yet issued for ids[ptr]
  logic [KK-1:0]              rem_lo;  // lowest set bit of rem
  logic [3:0]                 cid;

  function automatic logic [KK-1:0] tag_of(input logic [5:0] sid, input logic [UT*UT-1:0] m);
    logic [KK-1:0] t;
    int sr, sc;
    sr = int'(sid[5:3]);
    sc = int'(sid[2:0]);
    for (int dr = 0; dr < K; dr++)
      for (int dc = 0; dc < K; dc++)
        t[dr*K+dc] = m[(sr+dr)*UT + sc + dc];
    return t;
  endfunction

  // priority encoder
  always_comb begin
    cid = '0;
    for (int i = KK - 1; i >= 0; i--)
      if (rem[i]) cid = 4'(i);
  end
  assign rem_lo = rem & (~rem + 1'b1);

  logic [5:0] cur_sid;
  assign cur_sid    = ids[ptr[$clog2(DEPTH)-1:0]];
  assign inst_valid = busy && (rem != '0);
  assign inst_sid   = cur_sid;
  assign inst_wid   = cid;
  always_comb begin
    logic [3:0] ur, uc;
    ur = 4'(int'(cur_sid[5:3]) + int'(cid) / K);
    uc = 4'(int'(cur_sid[2:0]) + int'(cid) % K);
    inst_uid = {ur, uc};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      ptr  <= '0;
      rem  <= '0;
    end else if (start) begin
      ptr  <= '0;
      done <= (n_ids == '0);
      busy <= (n_ids != '0);
      rem  <= tag_of(ids[0], umask);
    end else if (busy) begin
      if ((rem & ~rem_lo) == '0) begin
        // this output ID is finished: move to the next one
        if (ptr + 1'b1 == n_ids) begin
          busy <= 1'b0;
          done <= 1'b1;
          rem  <= '0;
        end else begin
          rem <= tag_of(ids[ptr[$clog2(DEPTH)-1:0] + 1'b1], umask);
        end
        ptr <= ptr + 1'b1;
      end else begin
        rem <= rem & ~rem_lo;
      end
    end
  end
endmodule
