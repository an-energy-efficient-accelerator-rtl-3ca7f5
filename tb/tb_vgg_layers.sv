// tb_vgg_layers: runs two complete VGG-16 convolutional layers on the
// engine at its default size and checks every output feature.
//   conv1_1  224x224x3  -> 64 filters, 2 output rows per bank (448/224)
//   conv5_1   14x14x512 -> 512 filters, 14 rows per bank (the whole map)
// These are the two extremes of the network: conv1_1 has the widest rows
// and the fewest channels (its iterations are limited by the one-word-per-
// cycle output transfer), conv5_1 the most channels and filter groups.
// Features and weights are small random values so that the 32-bit
// accumulation does not wrap.  Besides the values, it checks the number of
// feature and weight fetches against the schedule's formula, that conv5_1
// streams its features with no idle slot (one partial result per CU per
// cycle), and prints the cycle counts and DRAM traffic of each layer.
module tb_vgg_layers;
  import cnn_pkg::*;

  localparam int NCU = 64;

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

  data_t fm [];      // [c][row][col]
  data_t wm [];      // [k][c][j][i]
  bit    seen [];    // [k][row][col]
  int    IL, IC, OC;
  int    checks = 0, failures = 0;
  longint n_fx = 0, n_w = 0, n_out = 0, fx_first = -1, fx_last = 0, cyc = 0;

  function automatic int fi(int c, int r, int n); return (c * IL + r) * IL + n; endfunction
  function automatic int wi(int k, int c, int j, int i); return ((k * IC + c) * 3 + j) * 3 + i; endfunction

  always_ff @(posedge clk) begin
    fx_data <= fx_req ? fm[fi(int'(fx_c), int'(fx_row), int'(fx_col))] : '0;
    if (w_req) for (int i = 0; i < 3; i++) w_data[i] <= wm[wi(int'(w_k), int'(w_c), int'(w_j), i)];
  end

  function automatic data_t ref_out(int k, int r, int n);
    logic signed [31:0] acc, sh;
    acc = 0;
    for (int c = 0; c < IC; c++)
      for (int j = 0; j < 3; j++)
        for (int i = 0; i < 3; i++) begin
          int rr, cc;
          rr = r + j - 1;
          cc = n + i - 1;
          if (rr >= 0 && rr < IL && cc >= 0 && cc < IL)
            acc += 32'(fm[fi(c, rr, cc)]) * 32'(wm[wi(k, c, j, i)]);
        end
    sh = acc >>> 8;
    if (sh > 32767)  return 16'sh7fff;
    if (sh < -32768) return -16'sh8000;
    return data_t'(sh);
  endfunction

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (fx_req) begin
        n_fx <= n_fx + 1;
        if (fx_first < 0) fx_first <= cyc;
        fx_last <= cyc;
      end
      if (w_req) n_w <= n_w + 1;
      if (out_valid) begin
        int idx;
        n_out <= n_out + 1;
        checks++;
        idx = (int'(out_k) * IL + int'(out_row)) * IL + int'(out_col);
        if (out_k >= OC || out_row >= IL || out_col >= IL || seen[idx]) begin
          failures++;
          $display("FAIL: bad or repeated output k=%0d r=%0d n=%0d", out_k, out_row, out_col);
        end else begin
          seen[idx] = 1'b1;
          if (out_data !== ref_out(int'(out_k), int'(out_row), int'(out_col))) begin
            failures++;
            if (failures < 10) $display("FAIL: y[%0d][%0d][%0d] = %0d, expected %0d", out_k, out_row, out_col,
                                        out_data, ref_out(int'(out_k), int'(out_row), int'(out_col)));
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

  task automatic run_layer(input string name, input int il, input int ic, input int oc);
    longint c0, fx0, w0, o0, exp_fx, exp_w, cycles;
    int rows;
    IL = il; IC = ic; OC = oc;
    rows = SRAM_DEPTH / il;
    if (rows > il) rows = il;
    fm = new[ic * il * il];
    wm = new[oc * ic * 9];
    seen = new[oc * il * il];
    foreach (fm[i]) fm[i] = data_t'($signed($urandom % 64) - 32);
    foreach (wm[i]) wm[i] = data_t'($signed($urandom % 64) - 32);
    // every (filter group, channel) streams rows 1..IL-1, 0..IL-1, 0..IL-2
    exp_fx = longint'(oc / NCU) * ic * (3 * il - 2) * il;
    exp_w  = 0;
    for (int r0 = 0; r0 < il; r0 += rows) exp_w += longint'(ic) * oc * ((r0 + 1 < il) ? 3 : 2);
    fx0 = n_fx; w0 = n_w; o0 = n_out;
    fx_first = -1;
    @(negedge clk);
    cfg = '{il: DIM_W'(il), ic: CH_W'(ic), oc: CH_W'(oc), rows: ROW_W'(rows)};
    start = 1'b1;
    c0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    cycles = cyc - c0;
    repeat (4) @(negedge clk);
    check(n_out - o0 == longint'(oc) * il * il, $sformatf("%s: %0d outputs", name, n_out - o0));
    check(n_fx - fx0 == exp_fx, $sformatf("%s: %0d feature fetches, expected %0d", name, n_fx - fx0, exp_fx));
    check(n_w - w0 == exp_w, $sformatf("%s: %0d weight-row fetches, expected %0d", name, n_w - w0, exp_w));
    $display("%s: %0d cycles (%0.2f ms at 200 MHz), feature fetches %0d over %0d cycles, DRAM traffic %0.2f MiB",
             name, cycles, real'(cycles) / 200.0e3, n_fx - fx0, fx_last - fx_first + 1,
             real'(2 * (n_fx - fx0) + 6 * (n_w - w0) + 2 * (n_out - o0)) / 1048576.0);
    if (name == "conv5_1")
      check(fx_last - fx_first + 1 == exp_fx, "conv5_1: idle slots between features");
  endtask

  initial begin
    start = 1'b0;
    cfg   = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_layer("conv5_1", 14, 512, 512);
    run_layer("conv1_1", 224, 3, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
