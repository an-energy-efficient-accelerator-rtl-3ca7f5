// conv_engine: convolution engine with serial-accumulation convolution units.
//
// The engine computes a 3x3, stride-1, zero-padded convolutional layer.
// NCU convolution units (CUs) each work on a different filter; each CU has
// three processing elements (one per weight of a filter row) that share the
// current input feature and pass partial sums serially into a 32-bit SRAM.
// Input features enter once, at CU #0, and move from CU to CU through the
// pipeline registers, so every feature fetched from DRAM is used by all
// NCU filters and every multiplier does useful work in every cycle.  Each
// CU has two SRAM banks: while the CUs accumulate an iteration (a group of
// output rows of NCU filters) in one bank, the output transfer sends the
// previous iteration's bank to DRAM.
//
// Interfaces (all synchronous to clk, active-low synchronous reset):
//   start/cfg/busy/done  layer configuration and handshake with the host;
//   fx_*                 feature fetch: address out, data in one cycle later;
//   w_*                  weight fetch: (filter, channel, filter row) out,
//                        three 16-bit weights in on w_data one cycle later;
//   out_*                output features to DRAM, one per cycle.
// Defaults are the published configuration: 64 CUs of 3 PEs (192 MACs),
// 448-word x 32-bit ping-pong SRAMs per CU (224 KB in total), 16-bit data.
module conv_engine
  import cnn_pkg::*;
#(
  parameter int unsigned NCU       = NUM_CU,
  parameter int unsigned DEPTH     = SRAM_DEPTH,
  parameter int unsigned OUT_SHIFT = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg,
  output logic             busy,
  output logic             done,
  // feature fetch
  output logic             fx_req,
  output logic [CH_W-1:0]  fx_c,
  output logic [DIM_W-1:0] fx_row,
  output logic [DIM_W-1:0] fx_col,
  input  data_t            fx_data,
  // weight fetch (IW)
  output logic             w_req,
  output logic [CH_W-1:0]  w_k,
  output logic [CH_W-1:0]  w_c,
  output logic [1:0]       w_j,
  input  wrow_t            w_data,
  // output features
  output logic             out_valid,
  output data_t            out_data,
  output logic [CH_W-1:0]  out_k,
  output logic [DIM_W-1:0] out_row,
  output logic [DIM_W-1:0] out_col,
  output logic             out_sat,
  // events
  output logic             stall_bank,
  output logic             stall_wload
);

  slot_t            slot0;
  slot_t            slots [NCU];
  logic             drain_en, drain_bank, drain_done, drain_done_bank;
  addr_t            drain_addr;
  acc_t             drain_rdata [NCU];
  logic [ROW_W-1:0] meta_r0 [2], meta_rows [2];
  logic [CH_W-1:0]  meta_g [2];
  layer_cfg_t       cfg_q;

  engine_ctrl #(.NCU(NCU), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .fx_req, .fx_c, .fx_row, .fx_col, .fx_data,
    .w_req, .w_k, .w_c, .w_j,
    .slot_out(slot0),
    .drain_done, .drain_done_bank,
    .meta_r0, .meta_rows, .meta_g, .cfg_q,
    .stall_bank, .stall_wload);

  feature_pipeline #(.STAGES(NCU)) u_pipe (
    .clk, .rst_n, .slot_in(slot0), .slot_out(slots));

  for (genvar u = 0; u < int'(NCU); u++) begin : g_cu
    conv_unit #(.DEPTH(DEPTH)) u_cu (
      .clk, .rst_n, .slot(slots[u]), .iw(w_data),
      .drain_en, .drain_bank, .drain_addr,
      .drain_rdata(drain_rdata[u]));
  end

  output_drain #(.NCU(NCU), .OUT_SHIFT(OUT_SHIFT)) u_drain (
    .clk, .rst_n,
    .round_end(slots[NCU-1].round_end), .round_end_bank(slots[NCU-1].wr_bank),
    .meta_r0, .meta_rows, .meta_g, .cfg(cfg_q),
    .drain_en, .drain_bank, .drain_addr, .drain_rdata,
    .out_valid, .out_data, .out_k, .out_row, .out_col, .out_sat,
    .done(drain_done), .done_bank(drain_done_bank));

endmodule
