// tb_data_buffer: loads 1024 random signed entries, then requests windows.
// Checks that rd_win[r] = Buf[start + r] one cycle after rd_en, that the
// window holds while rd_en is low, and how many banks are read: all 8 after
// clear, none for an unchanged start, d when the window slides forward by d
// (d < 8), and 8 for a jump of 8 or more.
module tb_data_buffer;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic              clear = 0, wr_en = 0, rd_en = 0;
  logic [9:0]        wr_addr = 0, rd_start = 0;
  logic signed [7:0] wr_data = 0;
  logic signed [7:0] rd_win [8];
  logic [3:0]        bank_reads;
  logic signed [7:0] ref_mem [1024];
  int checks = 0, failures = 0;

  data_buffer dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic req(input int s, input int exp_reads);
    @(negedge clk); rd_en = 1; rd_start = 10'(s);
    #1;
    if (exp_reads >= 0) begin
      checks++;
      if (int'(bank_reads) != exp_reads) begin
        failures++; $display("FAIL start %0d: bank_reads %0d exp %0d", s, bank_reads, exp_reads);
      end
    end
    @(negedge clk); rd_en = 0; rd_start = 10'($urandom);
    for (int r = 0; r < 8; r++) begin
      checks++;
      if (rd_win[r] !== ref_mem[(s + r) % 1024]) begin
        failures++; $display("FAIL start %0d r %0d: %0d exp %0d", s, r, rd_win[r], ref_mem[(s + r) % 1024]);
      end
    end
  endtask

  initial begin
    int s;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'(a); wr_data = 8'($urandom); ref_mem[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    req(0, 8);
    req(0, 0);
    s = 0;
    for (int t = 0; t < 300; t++) begin
      automatic int d = $urandom % 12;
      s = (s + d) % 1010;
      req(s, -1);
    end
    // sliding checks
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    req(100, 8);
    s = 100;
    for (int d = 1; d < 8; d++) begin s = s + d; req(s, d); end
    req(s + 9, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
