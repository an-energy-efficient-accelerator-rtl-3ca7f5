// tb_conv_engine: end-to-end test of the convolution engine at its default
// size (64 CUs, 448-word SRAM banks).
//
// A behavioural DRAM holds random input features and weights and answers
// the engine's fetches one cycle later; it also collects the output
// features.  Three layers are run back to back and every output feature is
// compared with a direct evaluation of the convolution (3x3, stride 1,
// zero padding 1, 32-bit wrapping accumulation, >>> 8 with saturation).
//   A  8x8x3 -> 128 filters, 3 rows per bank: two filter groups, three row
//      groups with top/bottom padding rows skipped, passes shorter than 64
//      cycles (weight-load idle slots), drains longer than the compute
//      (iteration waits for a free bank), large values (saturation);
//   B  14x14x2 -> 64 filters, 32 rows per bank (the whole map in one
//      iteration, as for the 14x14 layers of VGG-16): passes of 182..196
//      cycles must follow each other without a single idle cycle, i.e.
//      one partial result per CU per cycle;
//   C  5x5x2 -> 64, one row per bank: empty passes are skipped.
// It also checks the number of feature and weight fetches, and that each
// mechanism happened at least once.
module tb_conv_engine;
  import cnn_pkg::*;

  localparam int NCU = 64;
  localparam int MAXC = 4, MAXD = 16, MAXK = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             start;
  layer_cfg_t       cfg;
  logic             busy, done;
  logic             fx_req;
  logic [CH_W-1:0]  fx_c;
  logic [DIM_W-1:0] fx_row, fx_col;
  data_t            fx_data;
  logic             w_req;
  logic [CH_W-1:0]  w_k, w_c;
  logic [1:0]       w_j;
  wrow_t            w_data;
  logic             out_valid, out_sat;
  data_t            out_data;
  logic [CH_W-1:0]  out_k;
  logic [DIM_W-1:0] out_row, out_col;
  logic             stall_bank, stall_wload;

  conv_engine dut (.*);

  // behavioural DRAM
  data_t fm [MAXC][MAXD][MAXD];
  data_t wm [MAXK][MAXC][3][3];
  int    seen [MAXK][MAXD][MAXD];

  int checks = 0, failures = 0;
  int n_fx = 0, n_w = 0, n_out = 0, n_sat = 0, n_bank_stall = 0, n_wl_stall = 0;
  int n_drain_bank [2] = '{0, 0};
  int fx_first, fx_last, fx_cnt_b;

  always_ff @(posedge clk) begin
    fx_data <= fx_req ? fm[fx_c][fx_row][fx_col] : data_t'($urandom);
    if (w_req) for (int i = 0; i < 3; i++) w_data[i] <= wm[w_k][w_c][w_j][i];
    else       w_data <= wrow_t'({$urandom, $urandom});
  end

  function automatic data_t ref_out(int k, int r, int n, int ic, int il, output logic sat);
    logic signed [31:0] acc = 0;
    logic signed [31:0] sh;
    for (int c = 0; c < ic; c++)
      for (int j = 0; j < 3; j++)
        for (int i = 0; i < 3; i++) begin
          int rr = r + j - 1, cc = n + i - 1;
          if (rr >= 0 && rr < il && cc >= 0 && cc < il)
            acc += 32'(fm[c][rr][cc]) * 32'(wm[k][c][j][i]);
        end
    sh  = acc >>> 8;
    sat = (sh > 32767) || (sh < -32768);
    if (sh > 32767)  return 16'sh7fff;
    if (sh < -32768) return -16'sh8000;
    return data_t'(sh);
  endfunction

  int cur_ic, cur_il, cur_oc;
  int cyc = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (fx_req) begin
        n_fx <= n_fx + 1;
        if (fx_first < 0) fx_first <= cyc;
        fx_last <= cyc;
      end
      if (w_req) n_w <= n_w + 1;
      if (stall_bank)  n_bank_stall <= n_bank_stall + 1;
      if (stall_wload) n_wl_stall <= n_wl_stall + 1;
      if (dut.drain_done) n_drain_bank[dut.drain_done_bank] <= n_drain_bank[dut.drain_done_bank] + 1;
      if (out_valid) begin
        logic  s;
        data_t e;
        n_out <= n_out + 1;
        e = ref_out(int'(out_k), int'(out_row), int'(out_col), cur_ic, cur_il, s);
        if (s) n_sat <= n_sat + 1;
        checks++;
        if (out_k >= cur_oc || out_row >= cur_il || out_col >= cur_il) begin
          failures++;
          $display("FAIL: output index k=%0d r=%0d n=%0d out of range", out_k, out_row, out_col);
        end else begin
          seen[out_k][out_row][out_col]++;
          if (out_data !== e || out_sat !== s) begin
            failures++;
            if (failures < 10)
              $display("FAIL: y[%0d][%0d][%0d] = %0d, expected %0d", out_k, out_row, out_col, out_data, e);
          end
        end
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_layer(input int il, input int ic, input int oc, input int rows,
                           input int big_pct, input string name);
    int fx0, w0, o0, exp_fx, exp_w, ngroups, r0, nr, startc, endc;
    cur_il = il; cur_ic = ic; cur_oc = oc;
    for (int c = 0; c < ic; c++)
      for (int r = 0; r < il; r++)
        for (int n = 0; n < il; n++)
          fm[c][r][n] = (($urandom % 100) < big_pct) ? data_t'($urandom) : data_t'($signed($urandom % 512) - 256);
    for (int k = 0; k < oc; k++)
      for (int c = 0; c < ic; c++)
        for (int j = 0; j < 3; j++)
          for (int i = 0; i < 3; i++)
            wm[k][c][j][i] = (($urandom % 100) < big_pct) ? data_t'($urandom) : data_t'($signed($urandom % 512) - 256);
    for (int k = 0; k < MAXK; k++) for (int r = 0; r < MAXD; r++) for (int n = 0; n < MAXD; n++) seen[k][r][n] = 0;
    // expected fetch counts
    ngroups = (oc + NCU - 1) / NCU;
    exp_fx = 0; exp_w = 0;
    for (r0 = 0; r0 < il; r0 += rows) begin
      nr = (rows < il - r0) ? rows : il - r0;
      for (int j = 0; j < 3; j++) begin
        int lo = r0 + j - 1, hi = r0 + nr - 1 + j - 1;
        if (lo < 0) lo = 0;
        if (hi > il - 1) hi = il - 1;
        if (lo <= hi) begin
          exp_fx += ngroups * ic * (hi - lo + 1) * il;
          exp_w  += ic * oc;
        end
      end
    end
    fx0 = n_fx; w0 = n_w; o0 = n_out; fx_first = -1;
    @(negedge clk);
    cfg = '{il: DIM_W'(il), ic: CH_W'(ic), oc: CH_W'(oc), rows: ROW_W'(rows)};
    start = 1'b1;
    startc = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    endc = cyc;
    repeat (4) @(negedge clk);
    check(n_out - o0 == oc * il * il, $sformatf("%s: %0d outputs, expected %0d", name, n_out - o0, oc * il * il));
    for (int k = 0; k < oc; k++) for (int r = 0; r < il; r++) for (int n = 0; n < il; n++)
      if (seen[k][r][n] != 1) begin
        check(1'b0, $sformatf("%s: y[%0d][%0d][%0d] emitted %0d times", name, k, r, n, seen[k][r][n]));
      end
    check(n_fx - fx0 == exp_fx, $sformatf("%s: %0d feature fetches, expected %0d", name, n_fx - fx0, exp_fx));
    check(n_w - w0 == exp_w, $sformatf("%s: %0d weight fetches, expected %0d", name, n_w - w0, exp_w));
    $display("%s: %0d cycles, %0d feature fetches (span %0d cycles), %0d weight fetches",
             name, endc - startc, n_fx - fx0, fx_last - fx_first + 1, n_w - w0);
  endtask

  initial begin
    start = 1'b0;
    cfg   = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_layer(8, 3, 128, 3, 10, "A");
    run_layer(14, 2, 64, 32, 0, "B");
    // B streams every feature of its single iteration without an idle slot
    check(fx_last - fx_first + 1 == 2 * (3 * 14 - 2) * 14,
          $sformatf("B: features streamed in %0d cycles, expected %0d (one per cycle)",
                    fx_last - fx_first + 1, 2 * (3 * 14 - 2) * 14));
    run_layer(5, 2, 64, 1, 0, "C");
    $display("events: bank stalls %0d, weight-load stalls %0d, saturations %0d, drains bank0 %0d bank1 %0d",
             n_bank_stall, n_wl_stall, n_sat, n_drain_bank[0], n_drain_bank[1]);
    check(n_bank_stall > 0, "iteration never waited for the output transfer");
    check(n_wl_stall > 0, "weight-load idle slot never happened");
    check(n_sat > 0, "output saturation never happened");
    check(n_drain_bank[0] > 0 && n_drain_bank[1] > 0, "ping-pong never used both banks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
