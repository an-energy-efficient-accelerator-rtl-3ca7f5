// tb_conv_unit: checks one convolution unit.
//  1. The dataflow of a single filter row without padding, cycle by cycle:
//     after cycle k (feature x(k-1) on IX), ACC0 = x(k-1)w0,
//     ACC1 = x(k-2)w0 + x(k-1)w1, and during cycle k the SRAM input is
//     x(k-3)w0 + x(k-2)w1 + x(k-1)w2, i.e. one finished three-term partial
//     result per cycle from cycle 3 on.
//  2. Several passes (filter rows / channels) of one padded row accumulated
//     in bank 1 through F0, with M0/M2 zeroing the border taps, then read
//     back on the drain port and compared with a direct 1-D evaluation.
//  3. Two passes into bank 0 while bank 1 is read out at the same time
//     (ping-pong), then bank 0 read back.
// The slot sequence is built here from the timing rules of the CU:
// weights load in the slot before a pass, the read for output n is issued
// two slots before its left tap, F0 adds it one slot later, and output n is
// written in the slot after its right tap.
module tb_conv_unit;
  import cnn_pkg::*;

  localparam int L = 10;          // row length
  localparam int T = 200;         // schedule length

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  slot_t slot;
  wrow_t iw;
  logic  drain_en, drain_bank;
  addr_t drain_addr;
  acc_t  drain_rdata;
  int    checks = 0, failures = 0;

  conv_unit #(.DEPTH(64)) dut (.*);

  slot_t sched [T];
  wrow_t wsched [T];
  data_t X [5][L];
  wrow_t W [5];

  task automatic check(input acc_t got, input acc_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL: %s got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic slot_t idle();
    slot_t s = '0;
    s.zero0 = 1'b1;
    s.zero2 = 1'b1;
    return s;
  endfunction

  // schedule passes p0..p1-1 into bank b, first pass at time t0
  task automatic build(input int p0, input int p1, input logic b, input int t0);
    for (int t = 0; t < T; t++) begin
      sched[t] = idle();
      wsched[t] = wrow_t'({$urandom, $urandom});
    end
    for (int p = p0; p < p1; p++) begin
      int tp = t0 + (p - p0) * (L + 4);
      sched[tp-1].wload = 1'b1;
      wsched[tp-1] = W[p];
      for (int s = 0; s < L; s++) begin
        sched[tp+s].x = X[p][s];
        sched[tp+s].zero0 = (s == L - 1);
        sched[tp+s].zero2 = (s == 0);
      end
      for (int n = 0; n < L; n++) begin
        if (p != p0) begin
          sched[tp+n-2].rd_en = 1'b1;
          sched[tp+n-2].rd_bank = b;
          sched[tp+n-2].rd_addr = addr_t'(n);
          sched[tp+n-1].f0_use = 1'b1;
        end
        sched[tp+n+1].wr_en = 1'b1;
        sched[tp+n+1].wr_bank = b;
        sched[tp+n+1].wr_addr = addr_t'(n);
      end
    end
  endtask

  function automatic acc_t expect_out(int p0, int p1, int n);
    acc_t a = 0;
    for (int p = p0; p < p1; p++) begin
      if (n > 0)     a += acc_t'(X[p][n-1]) * acc_t'(W[p][0]);
      a += acc_t'(X[p][n]) * acc_t'(W[p][1]);
      if (n < L - 1) a += acc_t'(X[p][n+1]) * acc_t'(W[p][2]);
    end
    return a;
  endfunction

  initial begin
    slot = idle(); iw = '0; drain_en = 0; drain_bank = 0; drain_addr = '0;
    for (int p = 0; p < 5; p++) begin
      for (int i = 0; i < 3; i++) W[p][i] = data_t'($urandom);
      for (int s = 0; s < L; s++) X[p][s] = data_t'($urandom);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // ---- 1: dataflow of one filter row (no padding, no SRAM)
    slot = idle(); slot.wload = 1'b1; iw = W[0];
    @(negedge clk);
    for (int k = 1; k <= L; k++) begin
      slot = '0;
      slot.x = X[0][k-1];
      iw = wrow_t'({$urandom, $urandom});
      #1;
      if (k >= 3)
        check(dut.sram_in, acc_t'(X[0][k-3]) * W[0][0] + acc_t'(X[0][k-2]) * W[0][1] + acc_t'(X[0][k-1]) * W[0][2],
              $sformatf("cycle %0d SRAM_in", k));
      @(negedge clk);
      check(dut.acc0, acc_t'(X[0][k-1]) * W[0][0], $sformatf("cycle %0d ACC0", k));
      if (k >= 2)
        check(dut.acc1, acc_t'(X[0][k-2]) * W[0][0] + acc_t'(X[0][k-1]) * W[0][1], $sformatf("cycle %0d ACC1", k));
    end

    // ---- 2: three passes accumulated in bank 1
    build(0, 3, 1'b1, 4);
    for (int t = 0; t < T; t++) begin
      slot = sched[t]; iw = wsched[t];
      @(negedge clk);
    end
    slot = idle();

    // ---- 3: two passes into bank 0 while bank 1 is drained
    build(3, 5, 1'b0, 4);
    for (int t = 0; t < T; t++) begin
      slot = sched[t]; iw = wsched[t];
      drain_en = (t < L); drain_bank = 1'b1; drain_addr = addr_t'(t);
      @(negedge clk);
      if (t < L) check(drain_rdata, expect_out(0, 3, t), $sformatf("bank 1 word %0d", t));
    end
    slot = idle();
    drain_en = 1'b0;

    // read back bank 0
    for (int n = 0; n < L; n++) begin
      drain_en = 1'b1; drain_bank = 1'b0; drain_addr = addr_t'(n);
      @(negedge clk);
      check(drain_rdata, expect_out(3, 5, n), $sformatf("bank 0 word %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
