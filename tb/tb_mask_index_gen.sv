// tb_mask_index_gen: drives the generator from a modelled bitmap SRAM
// (one-cycle read latency). For chunk 0 it uses the input bitmap of the
// worked example (original indexes 0,1,4,5,6,7 non-zero, so the mask indexes
// are 0,1,4,5,6,7), then random bitmaps, an empty and a full one. After
// start and after every advance it checks the mask index list, the valid
// mask, the broadcast bitmap and the running base (sum of the popcounts of
// the earlier chunks).
module tb_mask_index_gen;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic        start = 0, advance = 0, bm_rd_en;
  logic [4:0]  bm_rd_addr;
  logic [31:0] bm_rd_data, bitmap, mid_vld;
  logic [4:0]  mid [32];
  logic [9:0]  base;
  logic [31:0] bmem [32];
  int checks = 0, failures = 0;

  mask_index_gen dut (.*);
  always_ff @(posedge clk) if (bm_rd_en) bm_rd_data <= bmem[bm_rd_addr];

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_chunk(input int c, input int exp_base);
    int j = 0;
    checks++;
    if (bitmap !== bmem[c] || int'(base) != exp_base) begin
      failures++; $display("FAIL chunk %0d: bitmap %h base %0d exp %0d", c, bitmap, base, exp_base);
    end
    for (int i = 0; i < 32; i++)
      if (bmem[c][i]) begin
        checks++;
        if (int'(mid[j]) != i || !mid_vld[j]) begin failures++; $display("FAIL chunk %0d mid[%0d]=%0d exp %0d", c, j, mid[j], i); end
        j++;
      end
    checks++;
    if (mid_vld != ((j == 32) ? 32'hFFFF_FFFF : ((32'd1 << j) - 1))) begin failures++; $display("FAIL chunk %0d mid_vld %h", c, mid_vld); end
  endtask

  initial begin
    int b;
    bmem[0] = 32'b11110011;                // example: indexes 0,1,4,5,6,7
    for (int c = 1; c < 32; c++) bmem[c] = (c == 5) ? 32'h0 : (c == 6) ? 32'hFFFF_FFFF : $urandom & $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      check_chunk(0, 0);
      checks++;
      if (mid[0] != 0 || mid[1] != 1 || mid[2] != 4 || mid[3] != 5 || mid[4] != 6 || mid[5] != 7) begin
        failures++; $display("FAIL example mask index list");
      end
      b = 0;
      for (int c = 1; c < 32; c++) begin
        b += $countones(bmem[c-1]);
        @(negedge clk); advance = 1; @(negedge clk); advance = 0;
        repeat ($urandom % 3) @(negedge clk);
        check_chunk(c, b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
