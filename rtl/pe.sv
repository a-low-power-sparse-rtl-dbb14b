// pe: one processing element PE(m,n) of the sparse array.
//
// The PE computes o_mn, the dot product of input vector m and weight vector
// n, output stationary. Its EIM unit turns each bitmap chunk into (EffI, EffW)
// pairs and queues them in EIM_FIFO_I / EIM_FIFO_W. The PE holds one pair as
// its current operation and reports both indexes to its row's and column's
// shared index units. With the shared indexes it forms
//   OffsetI = EffI - SharedI_m,  OffsetW = EffW - SharedW_n
// and fires when both are below REG_SIZE, i.e. when the input and weight it
// needs are both in the shared registers; otherwise it idles and keeps the
// pair. A PE that fired, or holds nothing, takes the next pair from the
// FIFOs. This follows the source design's SIDR algorithm.
//
// Timing (this implementation's pipeline): cycle t decides fire from the
// offsets while the shared registers are being loaded; in cycle t+1 the data
// MUXes pick RegI[OffsetI] and RegW[OffsetW] and the MAC accumulates, so acc
// is updated at the end of t+1. One iteration per cycle.
module pe #(
  parameter int unsigned BM_LEN     = 32,
  parameter int unsigned IDX_W      = 10,
  parameter int unsigned REG_SIZE   = 8,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned DATA_W     = 8,
  parameter int unsigned ACC_W      = 24,
  localparam int unsigned LW        = $clog2(BM_LEN),
  localparam int unsigned OW        = $clog2(REG_SIZE)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  // EIM chunk broadcasts
  input  logic                     eim_load,
  input  logic [BM_LEN-1:0]        bmi,
  input  logic [BM_LEN-1:0]        bmw,
  input  logic [LW-1:0]            imid [BM_LEN],
  input  logic [BM_LEN-1:0]        imid_vld,
  input  logic [LW-1:0]            wmid [BM_LEN],
  input  logic [BM_LEN-1:0]        wmid_vld,
  input  logic [IDX_W-1:0]         base_i,
  input  logic [IDX_W-1:0]         base_w,
  output logic                     eim_ready,
  // SIDR
  output logic [IDX_W-1:0]         eff_i,
  output logic [IDX_W-1:0]         eff_w,
  output logic                     eff_vld,
  input  logic [IDX_W-1:0]         shared_i,
  input  logic [IDX_W-1:0]         shared_w,
  input  logic signed [DATA_W-1:0] reg_i [REG_SIZE],
  input  logic signed [DATA_W-1:0] reg_w [REG_SIZE],
  output logic                     fire,
  output logic                     busy,
  output logic signed [ACC_W-1:0]  acc
);
  logic             push, full_i, full_w, empty_i, empty_w, pop, take, eim_busy;
  logic [IDX_W-1:0] push_i, push_w, head_i, head_w;
  logic [IDX_W-1:0] off_i, off_w;
  logic             fire_q;
  logic [OW-1:0]    off_i_q, off_w_q;

  eim #(.BM_LEN(BM_LEN), .IDX_W(IDX_W)) u_eim (
    .clk, .rst_n, .clear, .load(eim_load), .bmi, .bmw,
    .imid, .imid_vld, .wmid, .wmid_vld, .base_i, .base_w,
    .fifo_full(full_i | full_w), .push, .eff_i(push_i), .eff_w(push_w),
    .ready(eim_ready), .busy(eim_busy));

  eim_fifo #(.WIDTH(IDX_W), .DEPTH(FIFO_DEPTH)) u_fifo_i (
    .clk, .rst_n, .clear, .push, .din(push_i), .pop, .dout(head_i),
    .empty(empty_i), .full(full_i));
  eim_fifo #(.WIDTH(IDX_W), .DEPTH(FIFO_DEPTH)) u_fifo_w (
    .clk, .rst_n, .clear, .push, .din(push_w), .pop, .dout(head_w),
    .empty(empty_w), .full(full_w));

  // Offsets into the shared registers and the fire / idle decision.
  assign off_i = eff_i - shared_i;
  assign off_w = eff_w - shared_w;
  assign fire  = eff_vld && (off_i < IDX_W'(REG_SIZE)) && (off_w < IDX_W'(REG_SIZE));
  assign take  = !eff_vld || fire;
  assign pop   = take && !empty_i;
  assign busy  = eim_busy || !empty_i || eff_vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eff_vld <= 1'b0; eff_i <= '0; eff_w <= '0;
      fire_q  <= 1'b0; off_i_q <= '0; off_w_q <= '0;
    end else if (clear) begin
      eff_vld <= 1'b0;
      fire_q  <= 1'b0;
    end else begin
      if (take) begin
        eff_vld <= !empty_i;
        eff_i   <= head_i;
        eff_w   <= head_w;
      end
      fire_q  <= fire;
      off_i_q <= off_i[OW-1:0];
      off_w_q <= off_w[OW-1:0];
    end
  end

  // Data MUXes and MAC (second pipeline stage).
  mac_unit #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_mac (
    .clk, .rst_n, .clear, .en(fire_q),
    .a(reg_i[off_i_q]), .b(reg_w[off_w_q]), .acc);

  a_fifos_in_step: assert property (@(posedge clk) disable iff (!rst_n) empty_i == empty_w);
endmodule
