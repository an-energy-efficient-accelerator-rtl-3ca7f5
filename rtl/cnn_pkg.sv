// cnn_pkg: shared sizes and types of the serial-accumulation convolution engine.
//
// Word lengths follow the design as published: 16-bit weights, input and
// output features, and 32-bit partial-result SRAM words of 448 entries.
// The engine has 64 convolution units (CUs) of 3 processing elements each.
// The per-slot control word (slot_t) is this implementation's own choice:
// it is the bundle that travels with every input feature through the
// CU-to-CU pipeline registers, so that each CU executes exactly the same
// schedule as CU #0, one cycle later per stage.
package cnn_pkg;

  // Word lengths
  localparam int unsigned DATA_W = 16;   // weights, input and output features
  localparam int unsigned ACC_W  = 32;   // partial results, SRAM word width
  localparam int unsigned TAPS   = 3;    // PEs per CU (filter row length, 3x3 filters)

  // Array sizes (defaults)
  localparam int unsigned NUM_CU     = 64;   // U
  localparam int unsigned SRAM_DEPTH = 448;  // words per SRAM bank
  localparam int unsigned ADDR_W     = 9;    // enough for SRAM_DEPTH <= 512

  // Layer configuration field widths
  localparam int unsigned DIM_W = 8;    // feature-map side IL (= OL), up to 255
  localparam int unsigned CH_W  = 10;   // channel / filter index, up to 1023
  localparam int unsigned ROW_W = 9;    // output rows per SRAM bank, up to 511

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [ADDR_W-1:0]        addr_t;

  // Three weights of one filter row, one per PE (index = PE number)
  typedef data_t [TAPS-1:0] wrow_t;

  // Layer configuration written by the host before start
  typedef struct packed {
    logic [DIM_W-1:0] il;    // input side; output side is equal (3x3, pad 1, stride 1)
    logic [CH_W-1:0]  ic;    // input channels
    logic [CH_W-1:0]  oc;    // output channels (filters)
    logic [ROW_W-1:0] rows;  // output rows held by one SRAM bank per iteration
  } layer_cfg_t;

  // Control word that accompanies each input feature through the pipeline.
  typedef struct packed {
    data_t x;        // input feature on IX (0 in an idle slot)
    logic  zero0;    // M0: replace PE #0 product by zero (left border / idle)
    logic  zero2;    // M2: replace PE #2 product by zero (right border / idle)
    logic  f0_use;   // F0: add the SRAM word read in the previous slot (else 0)
    logic  rd_en;    // read partial result for the output two slots ahead
    logic  rd_bank;
    addr_t rd_addr;
    logic  wr_en;    // write SRAM_in (PE #2 sum) of the previous slot's output
    logic  wr_bank;
    addr_t wr_addr;
    logic  wload;    // load IW into WR0..WR2 at the end of this slot
    logic  round_end;// this write completes the bank of the current iteration
  } slot_t;

endpackage
