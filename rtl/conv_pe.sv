// conv_pe: one processing element (PE) of a convolution unit.
//
// A PE holds one filter weight in its weight register WR, multiplies it by
// the input feature IX that is common to all PEs of the CU, and adds the
// product to the partial sum arriving from the PE on its left.  This is the
// serial accumulation of the design: partial sums travel left to right
// through the accumulator registers, one PE per cycle, while every PE works
// on a new input feature in every cycle.
//
// Parameters select the three PE variants of a CU:
//   HAS_ZERO_MUX = 1  the product passes a multiplexer (M0 / M2) that can
//                     force it to zero for zero padding at a row border;
//   HAS_ACC      = 1  the sum is stored in an accumulator register (ACC0,
//                     ACC1); with 0 the sum leaves combinationally, as the
//                     last PE writes it straight into the SRAM (SRAM_in).
//
// Timing: WR loads w_in at the clock edge when w_load is high.  With HAS_ACC
// the sum psum_in + IX*WR appears on psum_out one cycle later; without it,
// in the same cycle.  Arithmetic is two's complement; the 32-bit sum wraps.
// The variants and the 16/32-bit widths follow the published design; the
// synchronous active-low reset of WR and ACC is this implementation's choice.
module conv_pe
  import cnn_pkg::*;
#(
  parameter bit HAS_ZERO_MUX = 1'b0,
  parameter bit HAS_ACC      = 1'b1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_load,    // load WR from IW
  input  data_t w_in,      // IW
  input  data_t x,         // IX
  input  logic  zero,      // zero the product (only with HAS_ZERO_MUX)
  input  acc_t  psum_in,   // partial sum from the left
  output acc_t  psum_out   // ACC register, or SRAM_in for the last PE
);

  data_t wr;
  acc_t  prod, prod_m, sum;

  always_ff @(posedge clk) begin
    if (!rst_n)      wr <= '0;
    else if (w_load) wr <= w_in;
  end

  always_comb begin
    prod   = acc_t'(x) * acc_t'(wr);
    prod_m = (HAS_ZERO_MUX && zero) ? '0 : prod;
    sum    = psum_in + prod_m;
  end

  if (HAS_ACC) begin : g_acc
    acc_t acc;
    always_ff @(posedge clk) begin
      if (!rst_n) acc <= '0;
      else        acc <= sum;
    end
    assign psum_out = acc;
  end else begin : g_noacc
    assign psum_out = sum;
  end

endmodule
