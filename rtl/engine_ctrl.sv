// engine_ctrl: controller of the convolution engine.
//
// It turns one layer configuration (3x3 filters, stride 1, zero padding 1,
// IL x IL x IC input, OC filters) into the row-wise schedule of the serial
// accumulation dataflow, for CU #0; the pipeline registers replay it for
// the other CUs one cycle later per CU.
//
// Schedule.  An iteration ("round") produces ROWS output rows of NUM_CU
// filters into one SRAM bank of every CU.  Its passes are, for each input
// channel c and each filter row j = 0,1,2: load the three weights of row j
// into every CU, then stream input rows r0+j-1 .. r0+ROWS-1+j-1 back to back
// through IX, one feature per cycle.  The partial result of output
// (row r, column n) lives at SRAM address (r-r0)*IL+n; it is read back
// through F0 and accumulated until the last pass, and the first pass that
// touches it adds 0 instead.  Input rows outside the image are not streamed
// (vertical padding), and multiplexers M0/M2 zero the taps that fall outside
// a row (horizontal padding).  Rounds alternate between the two SRAM banks:
// while one round accumulates, the previous bank is sent to DRAM.  Loop
// order: row group r0 (outer), filter group g, channel c, filter row j.
//
// Weights.  At the start of each pass the controller requests the three
// weights of filter g*NUM_CU+u for CU u on cycle u, so that the shared IW
// bus holds CU u's weights exactly when the weight-load token reaches CU u
// in the pipeline: passes follow each other with no idle cycle, provided a
// pass lasts at least NUM_CU cycles (otherwise idle slots are inserted).
//
// Memory interface: fx_req asks for feature (fx_c, fx_row, fx_col) and
// expects it on fx_data in the next cycle; w_req asks for the three weights
// of row w_j, channel w_c of filter w_k, expected on the IW bus of the
// engine in the next cycle.  Both sources are assumed never to stall.
//
// Stalls.  A round waits until its bank has been emptied by the output
// transfer (bank_busy); a short pass waits for the weight loading.  Both
// show as idle slots and are reported on stall_bank / stall_wload.
//
// The row-wise dataflow, the F0/M0/M2 muxes and the ping-pong banks follow
// the published design; the loop order, vertical padding by skipping rows,
// the weight-bus timing and all interface details are this implementation's.
module engine_ctrl
  import cnn_pkg::*;
#(
  parameter int unsigned NCU   = NUM_CU,
  parameter int unsigned DEPTH = SRAM_DEPTH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg,
  output logic             busy,
  output logic             done,       // one-cycle pulse at the end of the layer
  // feature fetch
  output logic             fx_req,
  output logic [CH_W-1:0]  fx_c,
  output logic [DIM_W-1:0] fx_row,
  output logic [DIM_W-1:0] fx_col,
  input  data_t            fx_data,
  // weight fetch
  output logic             w_req,
  output logic [CH_W-1:0]  w_k,
  output logic [CH_W-1:0]  w_c,
  output logic [1:0]       w_j,
  // to the pipeline registers (CU #0 schedule)
  output slot_t            slot_out,
  // ping-pong bookkeeping with the output transfer
  input  logic             drain_done,
  input  logic             drain_done_bank,
  output logic [ROW_W-1:0] meta_r0   [2],
  output logic [ROW_W-1:0] meta_rows [2],
  output logic [CH_W-1:0]  meta_g    [2],
  output layer_cfg_t       cfg_q,
  // events
  output logic             stall_bank,
  output logic             stall_wload
);

  localparam int unsigned CNT_W = $clog2(NCU + 1) + 1;

  typedef struct packed {
    logic [ROW_W-1:0] r0;
    logic [ROW_W-1:0] nrows;
    logic [CH_W-1:0]  g;
    logic [CH_W-1:0]  c;
    logic [1:0]       j;
    logic [DIM_W-1:0] lo;      // first input row streamed
    logic [DIM_W-1:0] hi;      // last input row streamed
    addr_t            addr0;   // SRAM address of the first output
    logic             bank;
    logic             round_first;
    logic             round_last;
  } pass_t;

  typedef struct packed {
    logic             valid;
    logic [CH_W-1:0]  c;
    logic [DIM_W-1:0] row;
    logic [DIM_W-1:0] col;
    addr_t            addr;
    logic             bank;
    logic             first;       // first contribution to this output (F0 = 0)
    logic             pass_start;
    logic             round_last;  // last output of the round
  } gslot_t;

  // ---------------------------------------------------------------- config
  logic running;
  always_ff @(posedge clk) begin
    if (!rst_n)                 cfg_q <= '0;
    else if (start && !running) cfg_q <= cfg;
  end

  // ---------------------------------------------------- pass generator
  logic [ROW_W-1:0] r0;
  logic [CH_W-1:0]  g, c;
  logic [1:0]       j;
  logic             gen_active, bank_n, round_started;
  pass_t            pend, nxt;
  logic             pend_valid, take, nxt_empty, j2_empty;
  logic             gen_step;

  always_comb begin
    int nrows, base, lo, hi, il;
    il    = int'(cfg_q.il);
    nrows = int'(cfg_q.rows);
    if (int'(r0) + nrows > il) nrows = il - int'(r0);
    base  = int'(r0) + int'(j) - 1;
    lo    = (base < 0) ? 0 : base;
    hi    = base + nrows - 1;
    if (hi > il - 1) hi = il - 1;
    nxt_empty = lo > hi;
    // filter row 2 pass is empty only in a last group of one row at the bottom
    j2_empty  = (int'(r0) + 1) > (il - 1);
    nxt.r0          = r0;
    nxt.nrows       = ROW_W'(nrows);
    nxt.g           = g;
    nxt.c           = c;
    nxt.j           = j;
    nxt.lo          = DIM_W'(lo);
    nxt.hi          = DIM_W'(hi);
    nxt.addr0       = (lo > base) ? addr_t'(il) : '0;
    nxt.bank        = bank_n;
    nxt.round_first = !round_started;
    nxt.round_last  = (c == cfg_q.ic - 1'b1) && ((j == 2'd2) || (j == 2'd1 && j2_empty));
  end

  assign gen_step = gen_active && (!pend_valid || take);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gen_active    <= 1'b0;
      r0            <= '0;
      g             <= '0;
      c             <= '0;
      j             <= '0;
      bank_n        <= 1'b0;
      round_started <= 1'b0;
      pend_valid    <= 1'b0;
      pend          <= '0;
    end else begin
      if (take) pend_valid <= 1'b0;
      if (start && !running) begin
        gen_active    <= 1'b1;
        r0            <= '0;
        g             <= '0;
        c             <= '0;
        j             <= '0;
        round_started <= 1'b0;
      end else if (gen_step) begin
        if (!nxt_empty) begin
          pend          <= nxt;
          pend_valid    <= 1'b1;
          round_started <= 1'b1;
        end
        if (j != 2'd2) begin
          j <= j + 2'd1;
        end else begin
          j <= '0;
          if (c != cfg_q.ic - 1'b1) begin
            c <= c + 1'b1;
          end else begin
            // end of round
            c             <= '0;
            bank_n        <= !bank_n;
            round_started <= 1'b0;
            if (32'(g + 1'b1) * NCU < 32'(cfg_q.oc)) begin
              g <= g + 1'b1;
            end else begin
              g <= '0;
              if (32'(r0) + 32'(cfg_q.rows) < 32'(cfg_q.il)) r0 <= r0 + cfg_q.rows;
              else gen_active <= 1'b0;
            end
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ streamer
  pass_t            cur;
  logic             cur_valid;
  logic [DIM_W-1:0] row, col;
  addr_t            addr;
  logic [CNT_W-1:0] cnt;
  logic [1:0]       bank_busy;
  gslot_t           g_q, d1, d2, d3;
  logic             last_slot, may_take, bank_ok, wl_ok;

  always_comb begin
    last_slot = cur_valid && (row == cur.hi) && (col == cfg_q.il - 1'b1);
    may_take  = !cur_valid || last_slot;
    bank_ok   = !pend.round_first || !bank_busy[pend.bank];
    wl_ok     = 32'(cnt) + 1 >= NCU;
    take      = pend_valid && may_take && bank_ok && wl_ok;
    stall_bank  = pend_valid && may_take && !bank_ok;
    stall_wload = pend_valid && may_take && bank_ok && !wl_ok;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      cur       <= '0;
      row       <= '0;
      col       <= '0;
      addr      <= '0;
      cnt       <= CNT_W'(NCU);
      g_q       <= '0;
      bank_busy <= '0;
      for (int b = 0; b < 2; b++) begin
        meta_r0[b]   <= '0;
        meta_rows[b] <= '0;
        meta_g[b]    <= '0;
      end
    end else begin
      g_q <= '0;
      if (32'(cnt) < NCU) cnt <= cnt + 1'b1;
      if (cur_valid) begin
        g_q.valid      <= 1'b1;
        g_q.c          <= cur.c;
        g_q.row        <= row;
        g_q.col        <= col;
        g_q.addr       <= addr;
        g_q.bank       <= cur.bank;
        g_q.first      <= (cur.c == '0) && ((cur.j == 2'd0) || (cur.j == 2'd1 && row == '0));
        g_q.pass_start <= (row == cur.lo) && (col == '0);
        g_q.round_last <= cur.round_last && last_slot;
        if ((row == cur.lo) && (col == '0)) cnt <= CNT_W'(1);
        addr <= addr + 1'b1;
        if (col == cfg_q.il - 1'b1) begin
          col <= '0;
          row <= row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
        if (last_slot) cur_valid <= 1'b0;
      end
      if (take) begin
        cur       <= pend;
        cur_valid <= 1'b1;
        row       <= pend.lo;
        col       <= '0;
        addr      <= pend.addr0;
        if (pend.round_first) begin
          bank_busy[pend.bank] <= 1'b1;
          meta_r0[pend.bank]   <= pend.r0;
          meta_rows[pend.bank] <= pend.nrows;
          meta_g[pend.bank]    <= pend.g;
        end
      end
      if (drain_done) bank_busy[drain_done_bank] <= 1'b0;
    end
  end

  // -------------------------------------------- slot alignment and fetch
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d1 <= '0;
      d2 <= '0;
      d3 <= '0;
    end else begin
      d1 <= g_q;
      d2 <= d1;
      d3 <= d2;
    end
  end

  // feature for the slot leaving next cycle
  assign fx_req = d1.valid;
  assign fx_c   = d1.c;
  assign fx_row = d1.row;
  assign fx_col = d1.col;

  always_comb begin
    slot_out           = '0;
    slot_out.x         = d2.valid ? fx_data : '0;
    slot_out.zero0     = !(d2.valid && d1.valid && d1.col != '0);
    slot_out.zero2     = !(d2.valid && d3.valid && d2.col != '0);
    slot_out.f0_use    = d1.valid && !d1.first;
    slot_out.rd_en     = g_q.valid && !g_q.first;
    slot_out.rd_bank   = g_q.bank;
    slot_out.rd_addr   = g_q.addr;
    slot_out.wr_en     = d3.valid;
    slot_out.wr_bank   = d3.bank;
    slot_out.wr_addr   = d3.addr;
    slot_out.wload     = d1.valid && d1.pass_start;
    slot_out.round_end = d3.valid && d3.round_last;
  end

  // weight sequencer: one CU per cycle, starting one cycle after the pass start
  logic             ws_active;
  logic [CH_W-1:0]  ws_u, ws_k0, ws_c;
  logic [1:0]       ws_j;
  pass_t            g_pass;   // pass of g_q (the current pass being streamed)

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ws_active <= 1'b0;
      ws_u      <= '0;
      ws_k0     <= '0;
      ws_c      <= '0;
      ws_j      <= '0;
      g_pass    <= '0;
    end else begin
      if (take) g_pass <= pend;
      if (g_q.valid && g_q.pass_start) begin
        ws_active <= 1'b1;
        ws_u      <= '0;
        ws_k0     <= CH_W'(32'(g_pass.g) * NCU);
        ws_c      <= g_pass.c;
        ws_j      <= g_pass.j;
      end else if (ws_active) begin
        if (32'(ws_u) == NCU - 1) ws_active <= 1'b0;
        ws_u <= ws_u + 1'b1;
      end
    end
  end

  always_comb begin
    w_k   = ws_k0 + ws_u;
    w_c   = ws_c;
    w_j   = ws_j;
    w_req = ws_active && (w_k < cfg_q.oc);
  end

  // ------------------------------------------------------------- status
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) running <= 1'b1;
      else if (running && !gen_active && !pend_valid && !cur_valid && !g_q.valid &&
               !d1.valid && !d2.valid && !d3.valid && bank_busy == 2'b00 && !ws_active) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end
  assign busy = running;

  // The pass length and the SRAM depth bound the configuration.
  always_ff @(posedge clk) begin
    if (start && !running) begin
      assert (32'(cfg.rows) * 32'(cfg.il) <= DEPTH) else $error("engine_ctrl: rows*il exceeds SRAM depth");
      assert (cfg.il >= 4 && cfg.ic >= 1 && cfg.oc >= 1 && cfg.rows >= 1) else $error("engine_ctrl: bad configuration");
    end
  end

endmodule
