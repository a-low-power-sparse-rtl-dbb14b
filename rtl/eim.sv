// eim: Effective Index Matching unit inside every PE.
//
// For one bitmap chunk it finds the non-zero multiplications of PE(m,n) and
// their effective indexes, the compressed buffer positions of the input and
// weight each multiplication needs:
//   BMNZ     = BMI & BMW                      (non-zero operation bitmap)
//   IMBM[j]  = BMNZ[IMId[j]]  for valid j     (input masked bitmap)
//   WMBM[j]  = BMNZ[WMId[j]]  for valid j     (weight masked bitmap)
// IMId/WMId are the mask indexes broadcast by the row/column generators.
// Both masked bitmaps have the same number of ones, and their k-th ones
// belong to the same multiplication, so popping the lowest one of each gives
// the next (EffI, EffW) pair; base_i/base_w turn chunk positions into buffer
// indexes. This two-step method is the source design's; the one-pair-per-cycle
// priority encoder is this implementation's choice.
//
// Timing: load latches the masked bitmaps of a chunk (allowed while ready).
// From the next cycle one pair is pushed per cycle while the FIFOs are not
// full. ready is high when nothing is left, or when the last pair goes out
// this cycle, so chunks can follow back to back.
module eim #(
  parameter int unsigned BM_LEN = 32,
  parameter int unsigned IDX_W  = 10,
  localparam int unsigned LW    = $clog2(BM_LEN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              load,
  input  logic [BM_LEN-1:0] bmi,
  input  logic [BM_LEN-1:0] bmw,
  input  logic [LW-1:0]     imid [BM_LEN],
  input  logic [BM_LEN-1:0] imid_vld,
  input  logic [LW-1:0]     wmid [BM_LEN],
  input  logic [BM_LEN-1:0] wmid_vld,
  input  logic [IDX_W-1:0]  base_i,
  input  logic [IDX_W-1:0]  base_w,
  input  logic              fifo_full,
  output logic              push,
  output logic [IDX_W-1:0]  eff_i,
  output logic [IDX_W-1:0]  eff_w,
  output logic              ready,
  output logic              busy
);
  logic [BM_LEN-1:0] bmnz, imbm, wmbm;
  logic [BM_LEN-1:0] imbm_q, wmbm_q;
  logic [IDX_W-1:0]  base_i_q, base_w_q;
  logic [LW-1:0]     pos_i, pos_w;

  // Step 1 + 2: AND the bitmaps, then gather BMNZ through the mask indexes.
  always_comb begin
    bmnz = bmi & bmw;
    for (int j = 0; j < BM_LEN; j++) begin
      imbm[j] = imid_vld[j] & bmnz[imid[j]];
      wmbm[j] = wmid_vld[j] & bmnz[wmid[j]];
    end
  end

  // Lowest set bit of each masked bitmap.
  always_comb begin
    pos_i = '0;
    pos_w = '0;
    for (int j = BM_LEN - 1; j >= 0; j--) begin
      if (imbm_q[j]) pos_i = LW'(j);
      if (wmbm_q[j]) pos_w = LW'(j);
    end
  end

  assign busy  = (imbm_q != '0);
  assign push  = busy && !fifo_full;
  assign eff_i = base_i_q + IDX_W'(pos_i);
  assign eff_w = base_w_q + IDX_W'(pos_w);
  assign ready = !busy || (push && ((imbm_q & (imbm_q - 1'b1)) == '0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      imbm_q <= '0; wmbm_q <= '0; base_i_q <= '0; base_w_q <= '0;
    end else if (clear) begin
      imbm_q <= '0; wmbm_q <= '0;
    end else if (load) begin
      imbm_q   <= imbm;
      wmbm_q   <= wmbm;
      base_i_q <= base_i;
      base_w_q <= base_w;
    end else if (push) begin
      imbm_q <= imbm_q & (imbm_q - 1'b1);
      wmbm_q <= wmbm_q & (wmbm_q - 1'b1);
    end
  end

  a_load_when_ready: assert property (@(posedge clk) disable iff (!rst_n) load |-> ready);
endmodule
