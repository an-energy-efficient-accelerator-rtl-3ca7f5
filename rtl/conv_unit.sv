// conv_unit: one convolution unit (CU) of the engine.
//
// The CU convolves one filter row (three weights WR0..WR2, one per PE) with
// a stream of input features.  All three multipliers see the same feature
// IX in a cycle; the partial sums move serially PE #0 -> ACC0 -> PE #1 ->
// ACC1 -> PE #2 -> SRAM.  For the output at column n of a row, PE #0 adds
// x(n-1)*w0 to the partial result of earlier filter rows / channels (fed
// back from the SRAM through multiplexer F0, or 0 on the first pass),
// PE #1 adds x(n)*w1 one cycle later, and PE #2 adds x(n+1)*w2 and writes
// the sum into the SRAM one cycle after that.  One partial result is
// therefore written in every cycle.  Multiplexers M0 and M2 zero the
// left and right taps at the row borders (padding of one).
//
// Two SRAM banks (ping-pong): while the CU accumulates into one bank, the
// other can be read out by the output transfer unit through the drain port.
//
// Interface: slot (slot_t) carries the feature and all per-cycle control
// for this CU, already skewed by the pipeline registers; iw is the shared
// three-weight bus, sampled when slot.wload is high.  drain_* reads a bank
// word with a one-cycle latency.  Timing: a read issued in slot t (rd_en)
// is used by F0 in slot t+1; a write in slot t stores the PE #2 sum of slot t.
// The PE chain, F0/M0/M2 and the two banks are the published structure; the
// port-level control encoding is this implementation's own.
module conv_unit
  import cnn_pkg::*;
#(
  parameter int unsigned DEPTH = SRAM_DEPTH
) (
  input  logic  clk,
  input  logic  rst_n,
  input  slot_t slot,
  input  wrow_t iw,
  // drain (SRAM -> DRAM) read port
  input  logic  drain_en,
  input  logic  drain_bank,
  input  addr_t drain_addr,
  output acc_t  drain_rdata
);

  acc_t  acc0, acc1, f0, sram_in;
  acc_t  rdata [2];
  logic  rd_bank_q, drain_bank_q;

  // F0: previous partial result or 0
  always_comb f0 = slot.f0_use ? rdata[rd_bank_q] : '0;

  conv_pe #(.HAS_ZERO_MUX(1'b1), .HAS_ACC(1'b1)) u_pe0 (
    .clk, .rst_n, .w_load(slot.wload), .w_in(iw[0]), .x(slot.x),
    .zero(slot.zero0), .psum_in(f0), .psum_out(acc0));

  conv_pe #(.HAS_ZERO_MUX(1'b0), .HAS_ACC(1'b1)) u_pe1 (
    .clk, .rst_n, .w_load(slot.wload), .w_in(iw[1]), .x(slot.x),
    .zero(1'b0), .psum_in(acc0), .psum_out(acc1));

  conv_pe #(.HAS_ZERO_MUX(1'b1), .HAS_ACC(1'b0)) u_pe2 (
    .clk, .rst_n, .w_load(slot.wload), .w_in(iw[2]), .x(slot.x),
    .zero(slot.zero2), .psum_in(acc1), .psum_out(sram_in));

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic  we, re;
    addr_t raddr;
    always_comb begin
      // no SRAM access while in reset
      we    = rst_n && slot.wr_en && (slot.wr_bank == 1'(b));
      re    = rst_n && ((slot.rd_en && (slot.rd_bank == 1'(b))) || (drain_en && (drain_bank == 1'(b))));
      raddr = (slot.rd_en && (slot.rd_bank == 1'(b))) ? slot.rd_addr : drain_addr;
    end
    sram_1r1w #(.DEPTH(DEPTH), .WIDTH(ACC_W), .AW(ADDR_W)) u_sram (
      .clk, .we, .waddr(slot.wr_addr), .wdata(sram_in),
      .re, .raddr, .rdata(rdata[b]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_bank_q    <= 1'b0;
      drain_bank_q <= 1'b0;
    end else begin
      if (slot.rd_en) rd_bank_q    <= slot.rd_bank;
      if (drain_en)   drain_bank_q <= drain_bank;
    end
  end

  assign drain_rdata = rdata[drain_bank_q];

  // The accumulation and the output transfer never share a bank.
  always_ff @(posedge clk) begin
    if (rst_n && slot.rd_en && drain_en)
      assert (slot.rd_bank != drain_bank) else $error("conv_unit: bank read conflict");
    if (rst_n && slot.wr_en && drain_en)
      assert (slot.wr_bank != drain_bank) else $error("conv_unit: drain of the bank being written");
  end

endmodule
