// mask_index_gen: IMId generator (one per PE row) or WMId generator (one
// per PE column).
//
// It walks the row's/column's bitmap SRAM one BM_LEN-bit chunk at a time and,
// for the current chunk, produces the mask index list: mid[j] is the original
// position (0..BM_LEN-1) of the j-th non-zero of the chunk, i.e. the original
// index that compressed entry j corresponds to; mid_vld[j] says that entry j
// exists. It also gives base, the compressed index of the chunk's first
// non-zero (a running popcount of the earlier chunks), so that
// base + j addresses the whole compressed buffer. The bitmap itself is
// broadcast as well; every EIM unit of the row/column uses these signals.
//
// The list is built in one cycle by a compaction network: bit i with
// popcount(bitmap[i-1:0]) = p writes mid[p] = i. The mask index concept is the
// source design's; the compaction network, the running base and the chunk
// walking are this implementation's choices.
//
// Timing: start reads chunk 0 (visible the next cycle, base = 0); advance
// reads the following chunk and adds the current popcount to base, both
// visible the next cycle. The bitmap SRAM is read only on start/advance.
module mask_index_gen #(
  parameter int unsigned BM_LEN = 32,
  parameter int unsigned IDX_W  = 10,
  parameter int unsigned AW     = 5,
  localparam int unsigned LW    = $clog2(BM_LEN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              advance,
  // bitmap SRAM read port
  output logic              bm_rd_en,
  output logic [AW-1:0]     bm_rd_addr,
  input  logic [BM_LEN-1:0] bm_rd_data,
  // broadcast to the EIM units
  output logic [BM_LEN-1:0] bitmap,
  output logic [LW-1:0]     mid [BM_LEN],
  output logic [BM_LEN-1:0] mid_vld,
  output logic [IDX_W-1:0]  base
);
  logic [AW-1:0]    ptr_q;
  logic [IDX_W-1:0] base_q;
  logic [LW:0]      cnt;

  assign bitmap     = bm_rd_data;
  assign base       = base_q;
  assign bm_rd_en   = start | advance;
  assign bm_rd_addr = start ? '0 : ptr_q + AW'(1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q  <= '0;
      base_q <= '0;
    end else if (start) begin
      ptr_q  <= '0;
      base_q <= '0;
    end else if (advance) begin
      ptr_q  <= ptr_q + AW'(1);
      base_q <= base_q + IDX_W'(cnt);
    end
  end

  // Compaction: prefix popcount gives every set bit its compressed slot.
  always_comb begin
    logic [LW:0] p;
    p = '0;
    for (int j = 0; j < BM_LEN; j++) mid[j] = '0;
    for (int i = 0; i < BM_LEN; i++) begin
      if (bm_rd_data[i]) begin
        mid[p[LW-1:0]] = LW'(i);
        p = p + 1'b1;
      end
    end
    cnt = p;
    for (int j = 0; j < BM_LEN; j++) mid_vld[j] = (j < int'(p));
  end
endmodule
