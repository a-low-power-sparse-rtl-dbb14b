// tb_eim_fifo: random push/pop traffic against a queue model, including
// simultaneous push and pop, running full and running empty. Checks the
// head, empty and full flags every cycle and that clear empties the FIFO.
module tb_eim_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic       clear = 0, push = 0, pop = 0, empty, full;
  logic [9:0] din = 0, dout;
  logic [9:0] q [$];
  int checks = 0, failures = 0, n_full = 0;

  eim_fifo dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      automatic int bias = (t / 500) % 2;   // alternate filling and draining phases
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 8) || (q.size() > 0 && dout != q[0])) begin
        failures++; $display("FAIL t=%0d size %0d empty %0d full %0d dout %0d", t, q.size(), empty, full, dout);
      end
      if (full) n_full++;
      pop  = !empty && (($urandom % 4) < (bias ? 1 : 3));
      push = ($urandom % 4) < (bias ? 3 : 1);
      if (full && !pop) push = 0;
      din  = 10'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    @(negedge clk); push = 0; pop = 0; clear = 1;
    @(negedge clk); clear = 0; q.delete();
    checks++;
    if (!empty || full) begin failures++; $display("FAIL clear"); end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
