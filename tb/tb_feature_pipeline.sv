// tb_feature_pipeline: checks the CU-to-CU pipeline registers at the
// default 64 stages: the word seen by CU #u in cycle t is the one that
// entered in cycle t-u-1, and reset clears every stage.
module tb_feature_pipeline;
  import cnn_pkg::*;
  localparam int S = NUM_CU;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  slot_t slot_in;
  slot_t slot_out [S];
  slot_t hist [$];
  int checks = 0, failures = 0;

  feature_pipeline #(.STAGES(S)) dut (.*);

  initial begin
    slot_in = '0;
    repeat (2) @(negedge clk);
    for (int u = 0; u < S; u++) begin
      checks++;
      if (slot_out[u] !== '0) failures++;
    end
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      // hist[0] entered last cycle, hist[u] u+1 cycles ago
      for (int u = 0; u < S && u < hist.size(); u++) begin
        checks++;
        if (slot_out[u] !== hist[u]) begin
          failures++;
          if (failures < 5) $display("FAIL: stage %0d at t=%0d", u, t);
        end
      end
      slot_in = slot_t'({$urandom, $urandom, $urandom});
      hist.push_front(slot_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
