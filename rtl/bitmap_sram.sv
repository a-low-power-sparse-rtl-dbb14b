// bitmap_sram: occupancy bitmap memory of one input row or weight column.
//
// Each word holds BM_LEN bits of the sparse vector's bitmap: bit i is 1 when
// original element (word*BM_LEN + i) is non-zero. One write port for loading,
// one synchronous read port whose registered output feeds the mask index
// generator. Read data appears one cycle after rd_en and holds until the next
// read. The bitmap format is the source design's; the word length and the
// single-port-per-direction organisation are this implementation's choice.
module bitmap_sram #(
  parameter int unsigned BM_LEN = 32,
  parameter int unsigned DEPTH  = 32,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [BM_LEN-1:0] wr_data,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [BM_LEN-1:0] rd_data
);
  logic [BM_LEN-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
