// tb_engine_ctrl: checks the controller's schedule with 4 CUs on a
// 6x6x2 -> 8 layer, 2 output rows per bank (three row groups, two filter
// groups: six iterations, top and bottom padding rows skipped).
// The expected order of feature fetches is generated here independently
// (row group, filter group, channel, filter row, input row, column).  For
// every fetched feature it checks the slot word handed to CU #0: the
// feature value one cycle later, the SRAM write of its output (address
// (row-r0)*IL+col, alternating banks per iteration) in the slot after,
// the read-back two slots before (absent on an output's first pass) and
// F0; a weight-load token and a weight fetch for filter g*4 at every pass
// start, followed by the fetches for the other CUs; one iteration end per
// iteration; the done pulse.  The output transfer is emulated by freeing a
// bank 100 cycles after its iteration ends, so iterations must wait.
module tb_engine_ctrl;
  import cnn_pkg::*;
  localparam int NCU = 4, IL = 6, IC = 2, OC = 8, ROWS = 2, TMAX = 4000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             start, busy, done;
  layer_cfg_t       cfg;
  logic             fx_req, w_req;
  logic [CH_W-1:0]  fx_c, w_k, w_c;
  logic [DIM_W-1:0] fx_row, fx_col;
  logic [1:0]       w_j;
  data_t            fx_data;
  slot_t            slot_out;
  logic             drain_done, drain_done_bank;
  logic [ROW_W-1:0] meta_r0 [2], meta_rows [2];
  logic [CH_W-1:0]  meta_g [2];
  layer_cfg_t       cfg_q;
  logic             stall_bank, stall_wload;

  engine_ctrl #(.NCU(NCU), .DEPTH(448)) dut (.*);

  typedef struct { int c, row, col, addr, first, bank, pstart, g, j; } fe_t;
  fe_t exp_f [$];
  int  exp_wk [$], exp_wc [$], exp_wj [$];

  // per-cycle record
  int    rec_idx [TMAX];
  slot_t rec_slot [TMAX];
  logic  rec_wreq [TMAX];
  int    rec_wk [TMAX];
  int    cyc = 0, nf = 0, nw = 0, n_rend = 0, n_done = 0, n_bstall = 0;
  int    checks = 0, failures = 0;
  int    free_at [2] = '{-1, -1};

  function automatic data_t fval(int c, int r, int n);
    return data_t'(c * 1000 + r * 37 + n * 3 + 1);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  always_ff @(posedge clk) begin
    fx_data <= fx_req ? fval(int'(fx_c), int'(fx_row), int'(fx_col)) : data_t'($urandom);
  end

  always_ff @(posedge clk) begin
    if (rst_n && cyc < TMAX) begin
      rec_slot[cyc] <= slot_out;
      rec_wreq[cyc] <= w_req;
      rec_wk[cyc]   <= int'(w_k);
      rec_idx[cyc]  <= -1;
      if (stall_bank) n_bstall <= n_bstall + 1;
      if (done) n_done <= n_done + 1;
      if (fx_req) begin
        fe_t e;
        rec_idx[cyc] <= nf;
        if (nf < exp_f.size()) begin
          e = exp_f[nf];
          check(int'(fx_c) == e.c && int'(fx_row) == e.row && int'(fx_col) == e.col,
                $sformatf("fetch %0d: (%0d,%0d,%0d) expected (%0d,%0d,%0d)", nf, fx_c, fx_row, fx_col, e.c, e.row, e.col));
        end else check(1'b0, "extra feature fetch");
        nf <= nf + 1;
      end
      if (w_req) begin
        if (nw < exp_wk.size())
          check(int'(w_k) == exp_wk[nw] && int'(w_c) == exp_wc[nw] && int'(w_j) == exp_wj[nw],
                $sformatf("weight fetch %0d: k%0d c%0d j%0d expected k%0d c%0d j%0d", nw, w_k, w_c, w_j,
                          exp_wk[nw], exp_wc[nw], exp_wj[nw]));
        else check(1'b0, "extra weight fetch");
        nw <= nw + 1;
      end
      if (slot_out.round_end) begin
        n_rend <= n_rend + 1;
        free_at[slot_out.wr_bank] <= cyc + 100;
      end
    end
  end

  // emulated output transfer
  always_comb begin
    drain_done = 1'b0;
    drain_done_bank = 1'b0;
    for (int b = 0; b < 2; b++)
      if (free_at[b] == cyc) begin
        drain_done = 1'b1;
        drain_done_bank = 1'(b);
      end
  end
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    int rnd = 0;
    start = 0;
    for (int t = 0; t < TMAX; t++) rec_idx[t] = -1;
    cfg = '{il: DIM_W'(IL), ic: CH_W'(IC), oc: CH_W'(OC), rows: ROW_W'(ROWS)};
    // expected schedule
    for (int r0 = 0; r0 < IL; r0 += ROWS) begin
      for (int g = 0; g * NCU < OC; g++) begin
        for (int c = 0; c < IC; c++)
          for (int j = 0; j < 3; j++) begin
            bit ps;
            ps = 1;
            for (int r = r0 + j - 1; r < r0 + ROWS + j - 1; r++) begin
              if (r < 0 || r >= IL) continue;
              for (int n = 0; n < IL; n++) begin
                exp_f.push_back('{c: c, row: r, col: n, addr: (r - (r0 + j - 1)) * IL + n,
                                  first: (c == 0 && (j == 0 || (j == 1 && r == 0))), bank: rnd % 2,
                                  pstart: ps, g: g, j: j});
                ps = 0;
              end
            end
            if (!ps) for (int u = 0; u < NCU; u++) begin
              exp_wk.push_back(g * NCU + u); exp_wc.push_back(c); exp_wj.push_back(j);
            end
          end
        rnd++;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done && cyc < TMAX - 10) @(negedge clk);
    repeat (3) @(negedge clk);
    check(nf == exp_f.size(), $sformatf("%0d feature fetches, expected %0d", nf, exp_f.size()));
    check(nw == exp_wk.size(), $sformatf("%0d weight fetches, expected %0d", nw, exp_wk.size()));
    check(n_rend == rnd, $sformatf("%0d iteration ends, expected %0d", n_rend, rnd));
    check(n_done == 1, "done pulse");
    check(n_bstall > 0, "no iteration waited for a bank");
    // slot checks per fetched feature
    for (int t = 1; t < TMAX - 2; t++) begin
      int    i;
      fe_t   e;
      slot_t s1, s2, sm, s0;
      i = rec_idx[t];
      if (i >= 0 && i < exp_f.size()) begin
        e  = exp_f[i];
        s0 = rec_slot[t];
        s1 = rec_slot[t+1];
        s2 = rec_slot[t+2];
        sm = rec_slot[t-1];
        check(s1.x == fval(e.c, e.row, e.col), $sformatf("feature %0d value", i));
        check(s2.wr_en && int'(s2.wr_addr) == e.addr && int'(s2.wr_bank) == e.bank,
              $sformatf("feature %0d write: en%0d addr %0d bank %0d, expected %0d/%0d", i, s2.wr_en, s2.wr_addr, s2.wr_bank, e.addr, e.bank));
        if (e.first) check(!sm.rd_en, $sformatf("feature %0d: read on first pass", i));
        else check(sm.rd_en && int'(sm.rd_addr) == e.addr && int'(sm.rd_bank) == e.bank,
                   $sformatf("feature %0d read: en%0d addr %0d, expected %0d", i, sm.rd_en, sm.rd_addr, e.addr));
        check(s0.f0_use == !e.first, $sformatf("feature %0d F0", i));
        check(s0.wload == 1'(e.pstart), $sformatf("feature %0d weight load token", i));
        if (e.pstart) check(rec_wreq[t] && rec_wk[t] == e.g * NCU, $sformatf("feature %0d: weight fetch of CU 0", i));
        check(s1.zero2 == (e.col == 0) && s1.zero0 == (e.col == IL - 1),
              $sformatf("feature %0d border zeroing", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (TMAX) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
