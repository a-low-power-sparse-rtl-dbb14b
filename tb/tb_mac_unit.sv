// tb_mac_unit: accumulates random signed 8-bit products, with random enable
// gaps and clears, and compares the 24-bit accumulator with a model that
// wraps at 24 bits (including runs of -128 x -128 to force wrap-around).
module tb_mac_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 0, en = 0;
  logic signed [7:0]  a = 0, b = 0;
  logic signed [23:0] acc;
  logic signed [23:0] model = 0;
  int checks = 0, failures = 0;

  mac_unit dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      checks++;
      if (acc !== model) begin failures++; if (failures < 10) $display("FAIL t=%0d acc %0d exp %0d", t, acc, model); end
      clear = ($urandom % 400) == 0;
      en    = ($urandom % 4) != 0;
      a = 8'($urandom); b = 8'($urandom);
      if (t % 1000 < 600 && t % 1000 > 300) begin a = -8'sd128; b = -8'sd128; end
      if (clear) model = 0;
      else if (en) model = model + 24'(int'(a) * int'(b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
