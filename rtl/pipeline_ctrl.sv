// pipeline_ctrl - sub-batch execution pipeline of the three engines.
//
// Training runs in sub-batches (4 samples each in the paper's configuration); a batch
// group is group_size sub-batches whose weight gradients are accumulated before one
// weight update. The controller runs stages k = 0 .. n_subbatch:
//   * the Forward Engine processes sub-batch k (if k < n_subbatch), layers 0 .. L-1;
//   * at the same time the Backward and Weight Update Engines process sub-batch k-1
//     (if k >= 1), layers L-1 down to 0. Each backward step runs the Weight Update Engine
//     for that layer and, except for layer 0, the Backward Engine (bw_be_en); the first
//     layer needs no gradient below it.
// A stage ends when both sides are finished. The forward results of sub-batch k go to
// external memory k mod 2 (fe_mem), so the backward side reads memory (k-1) mod 2 while
// the forward side fills the other one. bw_apply is set for the steps of the last
// sub-batch of each batch group (and of the final sub-batch), which turns the
// accumulated gradient into a weight update.
//
// Each engine step is a handshake: the controller pulses *_start with the step's layer
// and memory, the engine side answers with a one-cycle *_done pulse.
// The overlap, the alternating memories and the group-triggered update follow the paper;
// the stage barrier and the handshake are this design's choices.
module pipeline_ctrl #(
  parameter int LW = 4,    // layer index width
  parameter int BW = 8     // sub-batch counter width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LW-1:0] n_layers,     // >= 1
  input  logic [BW-1:0] group_size,   // sub-batches per batch group, >= 1
  input  logic [BW-1:0] n_subbatch,   // >= 1
  // Forward Engine steps
  output logic          fe_start,
  output logic [LW-1:0] fe_layer,
  output logic [BW-1:0] fe_sub,
  output logic          fe_mem,
  input  logic          fe_done,
  // Backward + Weight Update Engine steps
  output logic          bw_start,
  output logic [LW-1:0] bw_layer,
  output logic [BW-1:0] bw_sub,
  output logic          bw_mem,
  output logic          bw_be_en,
  output logic          bw_apply,
  input  logic          bw_done,
  // status
  output logic          busy,
  output logic          done,
  output logic          overlap       // both sides active in this stage
);
  logic [BW:0]   stage;
  logic          fe_act, bw_act, stage_go;
  logic [BW-1:0] grp_pos;             // position of sub-batch stage-1 in its batch group

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      stage    <= '0;
      stage_go <= 1'b0;
      fe_act   <= 1'b0;
      bw_act   <= 1'b0;
      fe_start <= 1'b0;
      bw_start <= 1'b0;
      fe_layer <= '0;
      bw_layer <= '0;
      fe_sub   <= '0;
      bw_sub   <= '0;
      fe_mem   <= 1'b0;
      bw_mem   <= 1'b0;
      bw_be_en <= 1'b0;
      bw_apply <= 1'b0;
      grp_pos  <= '0;
    end else begin
      fe_start <= 1'b0;
      bw_start <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        done     <= 1'b0;
        stage    <= '0;
        stage_go <= 1'b1;
        grp_pos  <= '0;
      end else if (stage_go) begin
        // launch stage `stage`
        stage_go <= 1'b0;
        if (stage < {1'b0, n_subbatch}) begin
          fe_act   <= 1'b1;
          fe_start <= 1'b1;
          fe_layer <= '0;
          fe_sub   <= stage[BW-1:0];
          fe_mem   <= stage[0];
        end
        if (stage != '0) begin
          bw_act   <= 1'b1;
          bw_start <= 1'b1;
          bw_layer <= n_layers - 1'b1;
          bw_be_en <= (n_layers != LW'(1));
          bw_sub   <= BW'(stage - 1'b1);
          bw_mem   <= ~stage[0];
          bw_apply <= (grp_pos == group_size - 1'b1) || (BW'(stage) == n_subbatch);
        end
      end else if (busy) begin
        if (fe_act && fe_done) begin
          if (fe_layer == n_layers - 1'b1) fe_act <= 1'b0;
          else begin
            fe_layer <= fe_layer + 1'b1;
            fe_start <= 1'b1;
          end
        end
        if (bw_act && bw_done) begin
          if (bw_layer == '0) begin
            bw_act  <= 1'b0;
            grp_pos <= (grp_pos == group_size - 1'b1) ? '0 : grp_pos + 1'b1;
          end else begin
            bw_layer <= bw_layer - 1'b1;
            bw_be_en <= (bw_layer != LW'(1));
            bw_start <= 1'b1;
          end
        end
        // stage barrier: both sides idle and no step pending
        if (!fe_act && !bw_act && !fe_start && !bw_start) begin
          if (stage == {1'b0, n_subbatch}) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            stage    <= stage + 1'b1;
            stage_go <= 1'b1;
          end
        end
      end
    end
  end

  assign overlap = fe_act && bw_act;

  // An engine must not report done for a step it was not given.
  assert property (@(posedge clk) disable iff (!rst_n) fe_done |-> fe_act)
    else $error("pipeline_ctrl: fe_done without an active forward step");
  assert property (@(posedge clk) disable iff (!rst_n) bw_done |-> bw_act)
    else $error("pipeline_ctrl: bw_done without an active backward step");
endmodule
