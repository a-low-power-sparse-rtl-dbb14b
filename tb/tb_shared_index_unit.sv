// tb_shared_index_unit: random effective indexes and valid masks for a row
// of 16 PEs. Checks the shared index (minimum over valid PEs), any_vld, that
// the window is requested only when the shared index changes (or after
// clear), and shared_q, the start of the window held.
module tb_shared_index_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic        clear = 0;
  logic [9:0]  eff [16];
  logic [15:0] eff_vld = '0;
  logic [9:0]  shared, shared_q;
  logic        any_vld, rd_en;
  int checks = 0, failures = 0;
  logic [9:0]  held = 0;
  bit          loaded = 0;

  shared_index_unit dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int mn; bit av; int base = 0;
    foreach (eff[k]) eff[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      clear = ($urandom % 300) == 0;
      if ($urandom % 3 == 0) base = base + $urandom % 4;
      if (base > 900) base = 0;
      for (int k = 0; k < 16; k++) eff[k] = 10'(base + $urandom % 20);
      eff_vld = 16'($urandom) & 16'($urandom | $urandom);
      if (t % 97 == 0) eff_vld = '0;
      #1;
      mn = 1023; av = 0;
      for (int k = 0; k < 16; k++) if (eff_vld[k]) begin av = 1; if (eff[k] < mn) mn = eff[k]; end
      checks++;
      if (any_vld != av || (av && int'(shared) != mn)) begin
        failures++; $display("FAIL t=%0d shared %0d exp %0d any %0d", t, shared, mn, any_vld);
      end
      checks++;
      if (rd_en != (av && (!loaded || 10'(mn) != held))) begin failures++; $display("FAIL t=%0d rd_en %0d", t, rd_en); end
      @(posedge clk);
      if (clear) loaded = 0;
      else if (av && (!loaded || 10'(mn) != held)) begin loaded = 1; held = 10'(mn); end
      #1;
      checks++;
      if (loaded && shared_q != held) begin failures++; $display("FAIL t=%0d shared_q %0d exp %0d", t, shared_q, held); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
