// output_drain: transfer of finished output features from the CU SRAMs to
// DRAM (the "output features" path of the engine).
//
// When the last partial result of an iteration has been written into a
// bank of the last CU (round_end), that bank holds final results in every
// CU.  The drain then reads it, CU after CU and address after address, and
// sends one output feature per cycle to DRAM, tagged with its filter
// (output channel) k, row and column.  Meanwhile the CUs accumulate the next
// iteration in the other bank (ping-pong).  When the bank is empty it pulses
// done with the bank number, which frees the bank for a later iteration.
// If the other bank finishes while a drain is running, it is drained next.
//
// The 32-bit partial result is converted to a 16-bit output feature by an
// arithmetic right shift of OUT_SHIFT bits with saturation; saturated
// words are flagged on out_sat.  The published design states 32-bit SRAM
// words and 16-bit output features but not the conversion, nor the width
// of the DRAM write path; the shift, the saturation and the one-word-per-
// cycle output are this implementation's choices.
//
// Timing: a read is issued to all CUs (drain_en/drain_bank/drain_addr); the
// SRAM answers next cycle and the selected word leaves on out_* one cycle
// after that.  The DRAM side is assumed to accept a word in every cycle.
module output_drain
  import cnn_pkg::*;
#(
  parameter int unsigned NCU       = NUM_CU,
  parameter int unsigned OUT_SHIFT = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // completion of a bank, seen at the last CU
  input  logic             round_end,
  input  logic             round_end_bank,
  // what the bank holds (from the controller)
  input  logic [ROW_W-1:0] meta_r0   [2],
  input  logic [ROW_W-1:0] meta_rows [2],
  input  logic [CH_W-1:0]  meta_g    [2],
  input  layer_cfg_t       cfg,
  // read port broadcast to all CUs
  output logic             drain_en,
  output logic             drain_bank,
  output addr_t            drain_addr,
  input  acc_t             drain_rdata [NCU],
  // output features to DRAM
  output logic             out_valid,
  output data_t            out_data,
  output logic [CH_W-1:0]  out_k,
  output logic [DIM_W-1:0] out_row,
  output logic [DIM_W-1:0] out_col,
  output logic             out_sat,
  // bank emptied
  output logic             done,
  output logic             done_bank
);

  localparam int unsigned UW = (NCU > 1) ? $clog2(NCU) : 1;

  logic [1:0]       full;
  logic             active, bank;
  logic [UW-1:0]    u;
  logic [UW:0]      n_cu;          // CUs holding real filters in this bank
  addr_t            a;
  logic [DIM_W-1:0] row, col;      // row relative to the bank, column
  logic             last_word;

  // read-stage registers
  logic             v1;
  logic [UW-1:0]    u1;
  logic [CH_W-1:0]  k1;
  logic [DIM_W-1:0] row1, col1;

  always_comb begin
    last_word = (row == DIM_W'(meta_rows[bank] - 1'b1)) && (col == cfg.il - 1'b1);
    drain_en   = active;
    drain_bank = bank;
    drain_addr = a;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full      <= '0;
      active    <= 1'b0;
      bank      <= 1'b0;
      u         <= '0;
      n_cu      <= '0;
      a         <= '0;
      row       <= '0;
      col       <= '0;
      done      <= 1'b0;
      done_bank <= 1'b0;
      v1        <= 1'b0;
      u1        <= '0;
      k1        <= '0;
      row1      <= '0;
      col1      <= '0;
    end else begin
      done <= 1'b0;
      v1   <= 1'b0;
      if (round_end) full[round_end_bank] <= 1'b1;
      if (!active) begin
        if (full != 2'b00) begin
          logic b;
          int   left;
          b    = full[0] ? 1'b0 : 1'b1;
          left = int'(cfg.oc) - int'(meta_g[b]) * int'(NCU);
          active <= 1'b1;
          bank   <= b;
          u      <= '0;
          n_cu   <= (left >= int'(NCU)) ? (UW+1)'(NCU) : (UW+1)'(left);
          a      <= '0;
          row    <= '0;
          col    <= '0;
        end
      end else begin
        v1   <= 1'b1;
        u1   <= u;
        k1   <= CH_W'(int'(meta_g[bank]) * int'(NCU) + int'(u));
        row1 <= DIM_W'(meta_r0[bank]) + row;
        col1 <= col;
        a    <= a + 1'b1;
        if (col == cfg.il - 1'b1) begin
          col <= '0;
          row <= row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
        if (last_word) begin
          a   <= '0;
          row <= '0;
          col <= '0;
          if ((UW+1)'(u) == n_cu - 1'b1) begin
            active     <= 1'b0;
            full[bank] <= 1'b0;
            done       <= 1'b1;
            done_bank  <= bank;
          end else begin
            u <= u + 1'b1;
          end
        end
      end
    end
  end

  // output stage: select the CU, shift and saturate
  acc_t sel, shifted;
  logic sat;
  always_comb begin
    sel     = drain_rdata[u1];
    shifted = sel >>> OUT_SHIFT;
    sat     = (shifted > acc_t'(32767)) || (shifted < -acc_t'(32768));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_k     <= '0;
      out_row   <= '0;
      out_col   <= '0;
      out_sat   <= 1'b0;
    end else begin
      out_valid <= v1;
      out_k     <= k1;
      out_row   <= row1;
      out_col   <= col1;
      out_sat   <= v1 && sat;
      if (shifted > acc_t'(32767))       out_data <= 16'sh7fff;
      else if (shifted < -acc_t'(32768)) out_data <= -16'sh8000;
      else                               out_data <= data_t'(shifted);
    end
  end

  // A bank can complete only once before it is drained.
  always_ff @(posedge clk) begin
    if (rst_n && round_end)
      assert (!full[round_end_bank]) else $error("output_drain: bank overrun");
  end

endmodule
