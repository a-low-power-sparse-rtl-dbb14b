// sparse_dla_top: 16x16 output-stationary sparse DLA with Effective Index
// Matching (EIM) and Shared Index Data Reuse (SIDR).
//
// The array computes one output tile O[m][n] = sum_k I[m][k] * W[n][k] of
// bitmap-compressed sparse operands: row m gets input vector I_m, column n
// weight vector W_n. Each PE row has an input SRAM (non-zero values only), a
// bitmap SRAM, a shared register and an IMId generator; each PE column has
// the same for weights with a WMId generator. The generators broadcast the
// current bitmap chunk and its mask indexes along their row/column; the EIM
// unit inside every PE turns them into queued (EffI, EffW) pairs. Every
// cycle each row/column selects the smallest effective index of its PEs as
// shared index, the buffer loads the REG_SIZE entries from there into the
// shared register, and each PE whose input and weight both lie in the
// registers multiplies and accumulates; the others wait. Lagging PEs thus set
// the pace, every buffer entry is read roughly once, and data read once is
// reused by all PEs of the row/column.
//
// Interface: the four kinds of SRAM are loaded through one write port
// (wr_sel, wr_lane = row or column, wr_addr = compressed index or bitmap word,
// wr_data). start (while idle) begins an operation over num_chunks bitmap
// words of BM_LEN elements; done pulses when acc holds the tile. Counters
// report cycles, MAC operations, PE idle iterations and buf_reads, the
// number of buffer entries read into the shared registers, of the last
// operation; shared_i/shared_w expose the shared indexes
// of the current iteration. The organisation follows the source design's
// architecture figure and algorithm; load port, counters, pipelining and the
// unstated sizes (see sidr_pkg) are this implementation's choices.
module sparse_dla_top #(
  parameter int unsigned ROWS       = sidr_pkg::ROWS,
  parameter int unsigned COLS       = sidr_pkg::COLS,
  parameter int unsigned REG_SIZE   = sidr_pkg::REG_SIZE,
  parameter int unsigned BM_LEN     = sidr_pkg::BM_LEN,
  parameter int unsigned BUF_DEPTH  = sidr_pkg::BUF_DEPTH,
  parameter int unsigned FIFO_DEPTH = sidr_pkg::FIFO_DEPTH,
  parameter int unsigned DATA_W     = sidr_pkg::DATA_W,
  parameter int unsigned ACC_W      = sidr_pkg::ACC_W,
  localparam int unsigned IDX_W     = $clog2(BUF_DEPTH),
  localparam int unsigned LW        = $clog2(BM_LEN),
  localparam int unsigned BM_DEPTH  = BUF_DEPTH / BM_LEN,
  localparam int unsigned BAW       = (BM_DEPTH > 1) ? $clog2(BM_DEPTH) : 1,
  localparam int unsigned CHUNK_W   = BAW + 1,
  localparam int unsigned RS_W      = $clog2(REG_SIZE),
  localparam int unsigned LANE_W    = $clog2((ROWS > COLS) ? ROWS : COLS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // SRAM load port
  input  logic                    wr_en,
  input  sidr_pkg::wr_sel_e       wr_sel,
  input  logic [LANE_W-1:0]       wr_lane,
  input  logic [IDX_W-1:0]        wr_addr,
  input  logic [BM_LEN-1:0]       wr_data,
  // operation control
  input  logic                    start,
  input  logic [CHUNK_W-1:0]      num_chunks,
  output logic                    busy,
  output logic                    done,
  output logic signed [ACC_W-1:0] acc [ROWS][COLS],
  // observation
  output logic [31:0]             cycles,
  output logic [31:0]             mac_ops,
  output logic [31:0]             idle_ops,
  output logic [31:0]             buf_reads,
  output logic [IDX_W-1:0]        shared_i [ROWS],
  output logic [IDX_W-1:0]        shared_w [COLS],
  output logic [ROWS-1:0]         shared_i_vld,
  output logic [COLS-1:0]         shared_w_vld
);
  logic clear, eim_load;

  // Row side (inputs) and column side (weights) broadcasts.
  logic [BM_LEN-1:0]        bm_row   [ROWS];
  logic [LW-1:0]            mid_row  [ROWS][BM_LEN];
  logic [BM_LEN-1:0]        mvld_row [ROWS];
  logic [IDX_W-1:0]         base_row [ROWS];
  logic signed [DATA_W-1:0] reg_row  [ROWS][REG_SIZE];
  logic [ROWS-1:0]          rd_row;
  logic [RS_W:0]            brd_row  [ROWS];

  logic [BM_LEN-1:0]        bm_col   [COLS];
  logic [LW-1:0]            mid_col  [COLS][BM_LEN];
  logic [BM_LEN-1:0]        mvld_col [COLS];
  logic [IDX_W-1:0]         base_col [COLS];
  logic signed [DATA_W-1:0] reg_col  [COLS][REG_SIZE];
  logic [COLS-1:0]          rd_col;
  logic [RS_W:0]            brd_col  [COLS];

  // Per-PE signals.
  logic [IDX_W-1:0] eff_i [ROWS][COLS];
  logic [IDX_W-1:0] eff_w [ROWS][COLS];
  logic [COLS-1:0]  vld_r [ROWS];     // eff valid, grouped by row
  logic [ROWS-1:0]  vld_c [COLS];     // eff valid, grouped by column
  logic [COLS-1:0]  rdy   [ROWS];
  logic [COLS-1:0]  bsy   [ROWS];
  logic [COLS-1:0]  fire  [ROWS];

  // ---------------------------------------------------------------- rows
  for (genvar m = 0; m < ROWS; m++) begin : g_row
    logic              bm_rd_en;
    logic [BAW-1:0]    bm_rd_addr;
    logic [BM_LEN-1:0] bm_rd_data;
    logic [IDX_W-1:0]  eff_row [COLS];
    logic [IDX_W-1:0]  sh_q;

    bitmap_sram #(.BM_LEN(BM_LEN), .DEPTH(BM_DEPTH)) u_bmp (
      .clk,
      .wr_en(wr_en && wr_sel == sidr_pkg::SEL_IN_BMP && wr_lane == LANE_W'(m)),
      .wr_addr(wr_addr[BAW-1:0]), .wr_data,
      .rd_en(bm_rd_en), .rd_addr(bm_rd_addr), .rd_data(bm_rd_data));

    mask_index_gen #(.BM_LEN(BM_LEN), .IDX_W(IDX_W), .AW(BAW)) u_imid (
      .clk, .rst_n, .start(clear), .advance(eim_load),
      .bm_rd_en, .bm_rd_addr, .bm_rd_data,
      .bitmap(bm_row[m]), .mid(mid_row[m]), .mid_vld(mvld_row[m]), .base(base_row[m]));

    always_comb for (int n = 0; n < COLS; n++) eff_row[n] = eff_i[m][n];

    shared_index_unit #(.N(COLS), .IDX_W(IDX_W)) u_shi (
      .clk, .rst_n, .clear, .eff(eff_row), .eff_vld(vld_r[m]),
      .shared(shared_i[m]), .any_vld(shared_i_vld[m]), .rd_en(rd_row[m]), .shared_q(sh_q));

    data_buffer #(.DEPTH(BUF_DEPTH), .REG_SIZE(REG_SIZE), .DATA_W(DATA_W)) u_bufi (
      .clk, .rst_n, .clear,
      .wr_en(wr_en && wr_sel == sidr_pkg::SEL_IN_DATA && wr_lane == LANE_W'(m)),
      .wr_addr, .wr_data(wr_data[DATA_W-1:0]),
      .rd_en(rd_row[m]), .rd_start(shared_i[m]), .rd_win(reg_row[m]),
      .bank_reads(brd_row[m]));
  end

  // ------------------------------------------------------------- columns
  for (genvar n = 0; n < COLS; n++) begin : g_col
    logic              bm_rd_en;
    logic [BAW-1:0]    bm_rd_addr;
    logic [BM_LEN-1:0] bm_rd_data;
    logic [IDX_W-1:0]  eff_col [ROWS];
    logic [IDX_W-1:0]  sh_q;

    bitmap_sram #(.BM_LEN(BM_LEN), .DEPTH(BM_DEPTH)) u_bmp (
      .clk,
      .wr_en(wr_en && wr_sel == sidr_pkg::SEL_W_BMP && wr_lane == LANE_W'(n)),
      .wr_addr(wr_addr[BAW-1:0]), .wr_data,
      .rd_en(bm_rd_en), .rd_addr(bm_rd_addr), .rd_data(bm_rd_data));

    mask_index_gen #(.BM_LEN(BM_LEN), .IDX_W(IDX_W), .AW(BAW)) u_wmid (
      .clk, .rst_n, .start(clear), .advance(eim_load),
      .bm_rd_en, .bm_rd_addr, .bm_rd_data,
      .bitmap(bm_col[n]), .mid(mid_col[n]), .mid_vld(mvld_col[n]), .base(base_col[n]));

    always_comb
      for (int m = 0; m < ROWS; m++) begin
        eff_col[m]  = eff_w[m][n];
        vld_c[n][m] = vld_r[m][n];
      end

    shared_index_unit #(.N(ROWS), .IDX_W(IDX_W)) u_shw (
      .clk, .rst_n, .clear, .eff(eff_col), .eff_vld(vld_c[n]),
      .shared(shared_w[n]), .any_vld(shared_w_vld[n]), .rd_en(rd_col[n]), .shared_q(sh_q));

    data_buffer #(.DEPTH(BUF_DEPTH), .REG_SIZE(REG_SIZE), .DATA_W(DATA_W)) u_bufw (
      .clk, .rst_n, .clear,
      .wr_en(wr_en && wr_sel == sidr_pkg::SEL_W_DATA && wr_lane == LANE_W'(n)),
      .wr_addr, .wr_data(wr_data[DATA_W-1:0]),
      .rd_en(rd_col[n]), .rd_start(shared_w[n]), .rd_win(reg_col[n]),
      .bank_reads(brd_col[n]));
  end

  // ------------------------------------------------------------ PE array
  for (genvar m = 0; m < ROWS; m++) begin : g_pe_row
    for (genvar n = 0; n < COLS; n++) begin : g_pe
      pe #(.BM_LEN(BM_LEN), .IDX_W(IDX_W), .REG_SIZE(REG_SIZE),
           .FIFO_DEPTH(FIFO_DEPTH), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .clear, .eim_load,
        .bmi(bm_row[m]), .bmw(bm_col[n]),
        .imid(mid_row[m]), .imid_vld(mvld_row[m]),
        .wmid(mid_col[n]), .wmid_vld(mvld_col[n]),
        .base_i(base_row[m]), .base_w(base_col[n]),
        .eim_ready(rdy[m][n]),
        .eff_i(eff_i[m][n]), .eff_w(eff_w[m][n]), .eff_vld(vld_r[m][n]),
        .shared_i(shared_i[m]), .shared_w(shared_w[n]),
        .reg_i(reg_row[m]), .reg_w(reg_col[n]),
        .fire(fire[m][n]), .busy(bsy[m][n]), .acc(acc[m][n]));
    end
  end

  // ---------------------------------------------------------- controller
  logic all_ready, any_busy;
  always_comb begin
    all_ready = 1'b1;
    any_busy  = 1'b0;
    for (int m = 0; m < ROWS; m++) begin
      all_ready = all_ready & (&rdy[m]);
      any_busy  = any_busy | (|bsy[m]);
    end
  end

  dla_ctrl #(.CHUNK_W(CHUNK_W)) u_ctrl (
    .clk, .rst_n, .start, .num_chunks, .all_eim_ready(all_ready), .any_busy,
    .clear, .eim_load, .busy, .done, .cycles);

  // ------------------------------------------------------------ counters
  logic [31:0] n_fire, n_idle, n_rd;
  always_comb begin
    n_fire = '0;
    n_idle = '0;
    n_rd   = '0;
    for (int m = 0; m < ROWS; m++) n_rd += 32'(brd_row[m]);
    for (int n = 0; n < COLS; n++) n_rd += 32'(brd_col[n]);
    for (int m = 0; m < ROWS; m++) begin
      n_fire += 32'($countones(fire[m]));
      n_idle += 32'($countones(vld_r[m] & ~fire[m]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_ops <= '0; idle_ops <= '0; buf_reads <= '0;
    end else if (clear) begin
      mac_ops <= '0; idle_ops <= '0; buf_reads <= '0;
    end else if (busy) begin
      mac_ops   <= mac_ops + n_fire;
      idle_ops  <= idle_ops + n_idle;
      buf_reads <= buf_reads + n_rd;
    end
  end
endmodule
