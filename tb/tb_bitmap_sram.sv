// tb_bitmap_sram: fills the 32-word bitmap memory with random words, reads
// every word back (data must appear one cycle after rd_en) and checks that
// the read register holds its value while rd_en is low.
module tb_bitmap_sram;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic        wr_en = 0, rd_en = 0;
  logic [4:0]  wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic [31:0] ref_mem [32];
  int checks = 0, failures = 0;

  bitmap_sram dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < 32; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 5'(a); wr_data = $urandom; ref_mem[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      automatic int a = $urandom % 32;
      @(negedge clk); rd_en = 1; rd_addr = 5'(a);
      @(negedge clk); rd_en = 0; rd_addr = 5'($urandom);
      checks++;
      if (rd_data !== ref_mem[a]) begin failures++; $display("FAIL read %0d: %h exp %h", a, rd_data, ref_mem[a]); end
      @(negedge clk);
      checks++;
      if (rd_data !== ref_mem[a]) begin failures++; $display("FAIL hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
