// sidr_pkg: constants and types shared by the sparse DLA blocks.
//
// The array follows the configuration evaluated for the design: a 16x16
// output-stationary PE array, 8-bit operands, 24-bit accumulators and
// shared registers of 8 entries. Bitmap word length (32), buffer depth
// (1024 compressed entries per row/column) and FIFO depth (8) are choices of
// this implementation; the source design does not state them.
package sidr_pkg;
  localparam int unsigned ROWS       = 16;   // PE rows (input vectors)
  localparam int unsigned COLS       = 16;   // PE columns (weight vectors)
  localparam int unsigned DATA_W     = 8;    // fxp8 operands
  localparam int unsigned ACC_W      = 24;   // accumulator / adder width
  localparam int unsigned REG_SIZE   = 8;    // entries per shared register
  localparam int unsigned BM_LEN     = 32;   // bitmap bits handled per chunk
  localparam int unsigned BUF_DEPTH  = 1024; // compressed entries per buffer
  localparam int unsigned FIFO_DEPTH = 8;    // EIM FIFO depth

  // Selector of the SRAM written through the top-level load port.
  typedef enum logic [1:0] {
    SEL_IN_DATA = 2'd0,   // input SRAM of row wr_lane, 8-bit value
    SEL_IN_BMP  = 2'd1,   // input bitmap SRAM of row wr_lane, 32-bit word
    SEL_W_DATA  = 2'd2,   // weight SRAM of column wr_lane
    SEL_W_BMP   = 2'd3    // weight bitmap SRAM of column wr_lane
  } wr_sel_e;

  // Controller states.
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,
    ST_RUN   = 2'd1,
    ST_DRAIN = 2'd2
  } ctrl_state_e;
endpackage
