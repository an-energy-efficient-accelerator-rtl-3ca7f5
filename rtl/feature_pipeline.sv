// feature_pipeline: the pipeline registers that hand each input feature on
// from CU to CU.
//
// A chain of STAGES registers.  The word entering at slot_in is seen by
// CU #0 one cycle later (slot_out[0]), by CU #1 two cycles later, and so on:
// in each cycle a new feature enters and the others move one stage forward.
// Each CU therefore runs the same schedule as CU #0, delayed by its index.
// Besides the feature, the word carries the per-slot control of the CU
// (slot_t) so that SRAM addresses, border zeroing and weight loads stay
// aligned with the feature they belong to; the published design shows the
// feature path only, the control in the same registers is this
// implementation's choice.  Reset clears all stages (idle slots).
module feature_pipeline
  import cnn_pkg::*;
#(
  parameter int unsigned STAGES = NUM_CU
) (
  input  logic  clk,
  input  logic  rst_n,
  input  slot_t slot_in,
  output slot_t slot_out [STAGES]
);

  slot_t stage [STAGES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(STAGES); i++) stage[i] <= '0;
    end else begin
      stage[0] <= slot_in;
      for (int i = 1; i < int'(STAGES); i++) stage[i] <= stage[i-1];
    end
  end

  assign slot_out = stage;

endmodule
