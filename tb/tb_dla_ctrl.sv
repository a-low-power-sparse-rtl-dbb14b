// tb_dla_ctrl: runs operations of 0 to 40 chunks against a modelled array.
// all_eim_ready is random; any_busy stays high for a random time after each
// chunk load. Checked per operation: clear pulses with start, exactly
// num_chunks loads, never a load while the EIM units are not ready, done
// exactly one cycle after the first cycle with all chunks loaded and the
// array idle, busy from start to done, and the cycle counter.
module tb_dla_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic        start = 0, all_eim_ready = 0, any_busy = 0;
  logic [5:0]  num_chunks = 0;
  logic        clear, eim_load, busy, done;
  logic [31:0] cycles;
  int checks = 0, failures = 0;

  dla_ctrl dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int op = 0; op < 60; op++) begin
      automatic int nc = (op < 3) ? op : $urandom % 41;
      automatic int loads = 0, busy_left = 0, run = 0, done_at = -1, t = 0, exp_done = -1;
      @(negedge clk);
      num_chunks = 6'(nc); start = 1;
      #1;
      checks++;
      if (!clear || eim_load) begin failures++; $display("FAIL op %0d: clear %0d at start", op, clear); end
      @(negedge clk);
      start = 0;
      while (t < 5000) begin
        all_eim_ready = ($urandom % 3) != 0;
        any_busy = busy_left > 0;
        #1;
        if (done) begin done_at = t; break; end
        checks++;
        if (!busy || clear) begin failures++; $display("FAIL op %0d: busy %0d clear %0d", op, busy, clear); end
        run++;
        if (eim_load) begin
          loads++;
          if (!all_eim_ready) begin failures++; $display("FAIL op %0d: load while not ready", op); end
        end
        if (exp_done < 0 && loads == nc && !eim_load && !any_busy) exp_done = t + 1;
        if (eim_load) busy_left = $urandom % 6;
        else if (busy_left > 0) busy_left--;
        @(negedge clk);
        t++;
      end
      checks++;
      if (loads != nc || done_at != exp_done || int'(cycles) != run) begin
        failures++;
        $display("FAIL op %0d: loads %0d/%0d done at %0d exp %0d cycles %0d exp %0d",
                 op, loads, nc, done_at, exp_done, cycles, run);
      end
      @(negedge clk);
      checks++;
      if (busy || done) begin failures++; $display("FAIL op %0d: not idle after done", op); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
