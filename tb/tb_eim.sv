// tb_eim: feeds the EIM unit bitmap chunks with their mask index lists
// (computed here by a plain loop) and collects the (EffI, EffW) pairs it
// pushes. Chunk 0 is the worked example: BMI with original indexes
// 0,1,4,5,6,7 and BMW with 0,2,3,4,5,7 must give EffI 0,2,3,5 and
// EffW 0,3,4,5. The other chunks are random, with random bases. Expected
// pairs: for every original index k set in both bitmaps, (base_i + number of
// BMI ones below k, base_w + number of BMW ones below k), in order of k.
// Without back pressure a chunk of p pairs must take max(p,1) cycles from
// load to the next load; with random FIFO-full cycles only the pairs are
// checked.
module tb_eim;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic        clear = 0, load = 0, fifo_full = 0;
  logic [31:0] bmi = 0, bmw = 0, imid_vld, wmid_vld;
  logic [4:0]  imid [32];
  logic [4:0]  wmid [32];
  logic [9:0]  base_i = 0, base_w = 0, eff_i, eff_w;
  logic        push, ready, busy;
  int checks = 0, failures = 0;
  int exp_i [$], exp_w [$];

  eim dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // mask index lists of the current bitmaps
  always_comb begin
    int p, q;
    p = 0; q = 0;
    for (int j = 0; j < 32; j++) begin imid[j] = '0; wmid[j] = '0; end
    for (int i = 0; i < 32; i++) begin
      if (bmi[i]) begin imid[p] = 5'(i); p++; end
      if (bmw[i]) begin wmid[q] = 5'(i); q++; end
    end
    imid_vld = (p == 32) ? '1 : ((32'd1 << p) - 1);
    wmid_vld = (q == 32) ? '1 : ((32'd1 << q) - 1);
  end

  // scoreboard
  always @(posedge clk) if (rst_n && push) begin
    checks++;
    if (exp_i.size() == 0) begin failures++; $display("FAIL unexpected push %0d,%0d", eff_i, eff_w); end
    else begin
      automatic int ei = exp_i.pop_front(), ew = exp_w.pop_front();
      if (int'(eff_i) != ei || int'(eff_w) != ew) begin
        failures++; $display("FAIL pair %0d,%0d exp %0d,%0d", eff_i, eff_w, ei, ew);
      end
    end
  end

  task automatic add_expected(input logic [31:0] bi, input logic [31:0] bw, input int b_i, input int b_w);
    int ri = 0, rw = 0;
    for (int k = 0; k < 32; k++) begin
      if (bi[k] && bw[k]) begin exp_i.push_back(b_i + ri); exp_w.push_back(b_w + rw); end
      if (bi[k]) ri++;
      if (bw[k]) rw++;
    end
  endtask

  initial begin
    logic [31:0] bi, bw;
    int bbi, bbw, p, t0, t1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 400; c++) begin
      bi = (c == 0) ? 32'b11110011 : ($urandom & ($urandom | $urandom));
      bw = (c == 0) ? 32'b10111101 : ($urandom | (c % 3 == 0 ? 32'h0 : $urandom));
      if (c % 17 == 5) bw = 32'h0;
      bbi = (c == 0) ? 0 : $urandom % 900;
      bbw = (c == 0) ? 0 : $urandom % 900;
      p = $countones(bi & bw);
      while (!ready) @(negedge clk);
      t0 = $time / 10;
      add_expected(bi, bw, bbi, bbw);
      bmi = bi; bmw = bw; base_i = 10'(bbi); base_w = 10'(bbw);
      load = 1;
      @(negedge clk);
      load = 0;
      if (c == 0) begin
        checks++;
        if (exp_i.size() != 4 || exp_i[0] != 0 || exp_i[1] != 2 || exp_i[2] != 3 || exp_i[3] != 5 ||
            exp_w[0] != 0 || exp_w[1] != 3 || exp_w[2] != 4 || exp_w[3] != 5) begin
          failures++; $display("FAIL example reference");
        end
      end
      bmi = $urandom; bmw = $urandom;   // broadcasts may change after load
      if (c >= 200) begin
        while (!ready || fifo_full) begin fifo_full = ($urandom % 3) == 0; @(negedge clk); end
      end else begin
        while (!ready) @(negedge clk);
        t1 = $time / 10;
        checks++;
        if (t1 - t0 != ((p > 1) ? p : 1)) begin
          failures++; $display("FAIL chunk %0d: %0d pairs took %0d cycles", c, p, t1 - t0);
        end
      end
      fifo_full = 0;
    end
    while (busy) @(negedge clk);
    @(negedge clk);
    checks++;
    if (exp_i.size() != 0) begin failures++; $display("FAIL %0d pairs missing", exp_i.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
