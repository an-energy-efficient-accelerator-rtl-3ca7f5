// tb_output_drain: checks the SRAM-to-DRAM output transfer with 4 CUs.
// Behavioural SRAM banks answer the broadcast read port one cycle later.
// Bank 0 (rows 0-1 of filters 0-3) completes first; bank 1 (rows 2-4 of
// filter group 1, where only 2 of the 4 CUs hold real filters) completes
// while bank 0 is still being sent, so it must be queued.  Every output
// word is checked for order, filter/row/column tags and value (>>> 8 with
// saturation); the done pulses must name the banks in order, and the words
// of one bank must leave at one per cycle.
module tb_output_drain;
  import cnn_pkg::*;
  localparam int NCU = 4, IL = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             round_end, round_end_bank;
  logic [ROW_W-1:0] meta_r0 [2], meta_rows [2];
  logic [CH_W-1:0]  meta_g [2];
  layer_cfg_t       cfg;
  logic             drain_en, drain_bank;
  addr_t            drain_addr;
  acc_t             drain_rdata [NCU];
  logic             out_valid, out_sat, done, done_bank;
  data_t            out_data;
  logic [CH_W-1:0]  out_k;
  logic [DIM_W-1:0] out_row, out_col;

  output_drain #(.NCU(NCU), .OUT_SHIFT(8)) dut (.*);

  acc_t mem [NCU][2][32];
  always_ff @(posedge clk)
    if (drain_en) for (int u = 0; u < NCU; u++) drain_rdata[u] <= mem[u][drain_bank][drain_addr];

  typedef struct { int k, r, n; acc_t v; } exp_t;
  exp_t exp_q [$];
  int checks = 0, failures = 0, dones = 0, first_out = -1, last_out = 0, n_out = 0, cyc = 0;
  logic exp_done_bank [$];

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && done) begin
      checks++;
      dones++;
      if (exp_done_bank.size() == 0 || done_bank != exp_done_bank.pop_front()) begin
        failures++;
        $display("FAIL: unexpected done for bank %0d", done_bank);
      end
    end
    if (rst_n && out_valid) begin
      exp_t e;
      acc_t sh;
      data_t d;
      logic s;
      checks++;
      n_out++;
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: extra output");
      end else begin
        e  = exp_q.pop_front();
        sh = e.v >>> 8;
        s  = sh > 32767 || sh < -32768;
        d  = sh > 32767 ? 16'sh7fff : (sh < -32768 ? -16'sh8000 : data_t'(sh));
        if (out_k != CH_W'(e.k) || out_row != DIM_W'(e.r) || out_col != DIM_W'(e.n) || out_data != d || out_sat != s) begin
          failures++;
          if (failures < 8)
            $display("FAIL: got k%0d r%0d n%0d %0d, expected k%0d r%0d n%0d %0d (%0d)",
                     out_k, out_row, out_col, out_data, e.k, e.r, e.n, d, e.v);
        end
      end
    end
  end

  initial begin
    round_end = 0; round_end_bank = 0;
    cfg = '{il: DIM_W'(IL), ic: CH_W'(1), oc: CH_W'(6), rows: ROW_W'(3)};
    meta_r0[0] = 0; meta_rows[0] = 2; meta_g[0] = 0;
    meta_r0[1] = 2; meta_rows[1] = 3; meta_g[1] = 1;
    for (int u = 0; u < NCU; u++) for (int b = 0; b < 2; b++) for (int a = 0; a < 32; a++)
      mem[u][b][a] = (($urandom % 8) == 0) ? acc_t'($urandom) : acc_t'($signed($urandom % 65536) - 32768);
    for (int u = 0; u < NCU; u++) for (int a = 0; a < 2 * IL; a++)
      exp_q.push_back('{k: u, r: a / IL, n: a % IL, v: mem[u][0][a]});
    for (int u = 0; u < 2; u++) for (int a = 0; a < 3 * IL; a++)
      exp_q.push_back('{k: NCU + u, r: 2 + a / IL, n: a % IL, v: mem[u][1][a]});
    exp_done_bank.push_back(1'b0);
    exp_done_bank.push_back(1'b1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    round_end = 1; round_end_bank = 0;
    @(negedge clk);
    round_end = 0;
    repeat (7) @(negedge clk);
    round_end = 1; round_end_bank = 1;
    @(negedge clk);
    round_end = 0;
    repeat (100) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || dones != 2) begin
      failures++;
      $display("FAIL: %0d outputs missing, %0d done pulses", exp_q.size(), dones);
    end
    // 70 words, one per cycle, with one idle cycle between the two banks
    checks++;
    if (last_out - first_out + 1 != n_out + 1) begin
      failures++;
      $display("FAIL: %0d words took %0d cycles", n_out, last_out - first_out + 1);
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
