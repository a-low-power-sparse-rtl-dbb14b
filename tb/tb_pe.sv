// tb_pe: one PE with its row and column surroundings modelled here.
//
// The testbench plays the mask index generators (mask index lists, bases),
// the controller (loads a chunk whenever the EIM is ready) and the shared
// index units: each cycle it picks shared indexes a random distance 0..11
// below the PE's current effective indexes, so the PE sometimes finds its
// data in the shared registers and sometimes has to wait. The shared
// registers are modelled as the window registered one cycle after the shared
// index, filled from value functions vi(idx), vw(idx). Checked: the fire
// decision every cycle (both offsets below 8), the pair fired against the
// expected sequence, that waits happened, and the final accumulator against
// the dot product of the pairs.
module tb_pe;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic        clear = 0, eim_load = 0, eim_ready;
  logic [31:0] bmi = 0, bmw = 0, imid_vld, wmid_vld;
  logic [4:0]  imid [32];
  logic [4:0]  wmid [32];
  logic [9:0]  base_i = 0, base_w = 0;
  logic [9:0]  eff_i, eff_w, shared_i = 0, shared_w = 0;
  logic        eff_vld, fire, busy;
  logic signed [7:0]  reg_i [8];
  logic signed [7:0]  reg_w [8];
  logic signed [23:0] acc;
  int checks = 0, failures = 0, n_wait = 0, n_fire = 0;
  int exp_i [$], exp_w [$];
  longint exp_acc = 0;

  pe dut (.*);

  function automatic logic signed [7:0] vi(input int idx); return 8'(idx * 37 + 11); endfunction
  function automatic logic signed [7:0] vw(input int idx); return 8'(idx * 53 + 5);  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

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

  // shared registers: window of the shared index of the previous cycle
  always_ff @(posedge clk)
    for (int r = 0; r < 8; r++) begin
      reg_i[r] <= vi(int'(shared_i) + r);
      reg_w[r] <= vw(int'(shared_w) + r);
    end

  // shared index choice and fire check (between edges)
  always @(negedge clk) if (rst_n) begin
    int di, dw;
    di = $urandom % 12; dw = $urandom % 12;
    shared_i = (eff_vld && int'(eff_i) >= di) ? eff_i - 10'(di) : (eff_vld ? 10'd0 : 10'($urandom));
    shared_w = (eff_vld && int'(eff_w) >= dw) ? eff_w - 10'(dw) : (eff_vld ? 10'd0 : 10'($urandom));
    #1;
    checks++;
    if (fire != (eff_vld && (eff_i - shared_i) < 8 && (eff_w - shared_w) < 8)) begin
      failures++; $display("FAIL fire=%0d eff %0d,%0d shared %0d,%0d", fire, eff_i, eff_w, shared_i, shared_w);
    end
    if (eff_vld && !fire) n_wait++;
    if (fire) begin
      n_fire++;
      checks++;
      if (exp_i.size() == 0 || int'(eff_i) != exp_i[0] || int'(eff_w) != exp_w[0]) begin
        failures++; $display("FAIL fired pair %0d,%0d", eff_i, eff_w);
      end else begin
        exp_acc += vi(exp_i[0]) * vw(exp_w[0]);
        void'(exp_i.pop_front()); void'(exp_w.pop_front());
      end
    end
  end

  initial begin
    int bbi = 0, bbw = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int op = 0; op < 4; op++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      exp_acc = 0; bbi = 0; bbw = 0;
      for (int c = 0; c < 24; c++) begin
        automatic logic [31:0] bi = $urandom | ((op == 3) ? $urandom : 32'h0);
        automatic logic [31:0] bw = $urandom | ((op == 3) ? $urandom : 32'h0);
        automatic int ri = 0, rw = 0;
        while (!eim_ready) @(negedge clk);
        #2;
        for (int k = 0; k < 32; k++) begin
          if (bi[k] && bw[k]) begin exp_i.push_back(bbi + ri); exp_w.push_back(bbw + rw); end
          if (bi[k]) ri++;
          if (bw[k]) rw++;
        end
        bmi = bi; bmw = bw; base_i = 10'(bbi); base_w = 10'(bbw);
        eim_load = 1;
        @(posedge clk); #1;
        eim_load = 0;
        bbi += ri; bbw += rw;
        @(negedge clk);
      end
      while (busy) @(negedge clk);
      @(negedge clk);
      checks++;
      if (exp_i.size() != 0 || acc != 24'(exp_acc)) begin
        failures++; $display("FAIL op %0d: acc %0d exp %0d, %0d pairs left", op, acc, exp_acc, exp_i.size());
      end
    end
    checks++;
    if (n_wait == 0) begin failures++; $display("FAIL no idle wait"); end
    $display("fires=%0d waits=%0d", n_fire, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
