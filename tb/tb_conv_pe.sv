// tb_conv_pe: checks the processing element in its two forms: with zeroing
// multiplexer and accumulator register (PE #0), and without accumulator
// (PE #2, whose sum goes straight to the SRAM).  Random weights, features
// and partial sums; the expected sum is psum + x*w (or psum when zeroed),
// registered one cycle later for the ACC form and immediate for the other.
// Also checks that WR holds its weight when w_load is low.
module tb_conv_pe;
  import cnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  w_load, zero;
  data_t w_in, x;
  acc_t  psum_in, out_acc, out_comb;
  int    checks = 0, failures = 0;

  conv_pe #(.HAS_ZERO_MUX(1'b1), .HAS_ACC(1'b1)) dut_acc (
    .clk, .rst_n, .w_load, .w_in, .x, .zero, .psum_in, .psum_out(out_acc));
  conv_pe #(.HAS_ZERO_MUX(1'b1), .HAS_ACC(1'b0)) dut_comb (
    .clk, .rst_n, .w_load, .w_in, .x, .zero, .psum_in, .psum_out(out_comb));

  task automatic check(input acc_t got, input acc_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL: %s got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    data_t w_model;
    acc_t  exp_now, exp_prev;
    w_load = 0; zero = 0; w_in = 0; x = 0; psum_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    w_model = 0;
    exp_prev = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      w_load  = ($urandom % 8) == 0;
      w_in    = data_t'($urandom);
      x       = data_t'($urandom);
      zero    = ($urandom % 4) == 0;
      psum_in = acc_t'($urandom);
      #1;
      exp_now = zero ? psum_in : psum_in + acc_t'(x) * acc_t'(w_model);
      check(out_comb, exp_now, "combinational sum");
      check(out_acc, exp_prev, "ACC register");
      @(posedge clk);
      exp_prev = exp_now;
      if (w_load) w_model = w_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
