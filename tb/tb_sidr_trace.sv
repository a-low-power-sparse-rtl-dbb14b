// tb_sidr_trace: replays the worked SIDR example on a 2x2 array with
// 2-entry shared registers and 8-bit bitmaps.
//
// Operands (original index 0..7; bitmaps written index 0 first):
//   I0 = 0 1 0 0 4 5 6 7   bitmap 11001111
//   I1 = 0 0 2 3 4 0 6 7   bitmap 10111011
//   W0 = 0 0 2 3 4 5 0 7   bitmap 10111101
//   W1 = 0 1 2 0 4 5 6 0   bitmap 01101110
// (the zeros at index 0 of I0, I1 and W0 are stored, as their bitmaps say).
// For the first four iterations the test checks the shared indexes, which
// PEs compute and which wait, and the shared register contents the cycle
// after, against the published trace:
//   it  SharedI0 SharedI1 SharedW0 SharedW1  idle PEs     RegI0 RegI1 RegW0 RegW1
//   1   0        0        0        0         -            0 1   0 2   0 2   1 2
//   2   2        1        1        2         PE00, PE11   4 5   2 3   2 3   4 5
//   3   2        2        2        2         -            4 5   3 4   3 4   4 5
//   4   3        3        3        4         -            5 6   4 6   4 5   6 -
// and finally the four dot products 90, 78, 78, 56.
module tb_sidr_trace;
  import sidr_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        wr_en = 1'b0;
  wr_sel_e     wr_sel = SEL_IN_DATA;
  logic [0:0]  wr_lane = '0;
  logic [5:0]  wr_addr = '0;
  logic [7:0]  wr_data = '0;
  logic        start = 1'b0;
  logic [3:0]  num_chunks = 4'd1;
  logic        busy, done;
  logic signed [23:0] acc [2][2];
  logic [31:0] cycles, mac_ops, idle_ops, buf_reads;
  logic [5:0]  shared_i [2];
  logic [5:0]  shared_w [2];
  logic [1:0]  shared_i_vld, shared_w_vld;

  sparse_dla_top #(.ROWS(2), .COLS(2), .REG_SIZE(2), .BM_LEN(8), .BUF_DEPTH(64)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input wr_sel_e s, input int lane, input int addr, input int d);
    @(negedge clk);
    wr_en = 1'b1; wr_sel = s; wr_lane = 1'(lane); wr_addr = 6'(addr); wr_data = 8'(d);
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic load(input wr_sel_e sd, input wr_sel_e sb, input int lane, input logic [7:0] bm, input int v [8]);
    automatic int p = 0;
    for (int i = 0; i < 8; i++) if (bm[i]) begin wr(sd, lane, p, v[i]); p++; end
    wr(sb, lane, 0, bm);
  endtask

  initial begin
    // published trace
    int exp_si [4][2] = '{'{0, 0}, '{2, 1}, '{2, 2}, '{3, 3}};
    int exp_sw [4][2] = '{'{0, 0}, '{1, 2}, '{2, 2}, '{3, 4}};
    bit exp_idle [4][2][2] = '{'{'{0, 0}, '{0, 0}}, '{'{1, 0}, '{0, 1}}, '{'{0, 0}, '{0, 0}}, '{'{0, 0}, '{0, 0}}};
    int exp_ri [4][2][2] = '{'{'{0, 1}, '{0, 2}}, '{'{4, 5}, '{2, 3}}, '{'{4, 5}, '{3, 4}}, '{'{5, 6}, '{4, 6}}};
    int exp_rw [4][2][2] = '{'{'{0, 2}, '{1, 2}}, '{'{2, 3}, '{4, 5}}, '{'{3, 4}, '{4, 5}}, '{'{4, 5}, '{6, -1}}};
    int i0 [8] = '{0, 1, 0, 0, 4, 5, 6, 7};
    int i1 [8] = '{0, 0, 2, 3, 4, 0, 6, 7};
    int w0 [8] = '{0, 0, 2, 3, 4, 5, 0, 7};
    int w1 [8] = '{0, 1, 2, 0, 4, 5, 6, 0};
    int it;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // bit i = original index i
    load(SEL_IN_DATA, SEL_IN_BMP, 0, 8'b11110011, i0);
    load(SEL_IN_DATA, SEL_IN_BMP, 1, 8'b11011101, i1);
    load(SEL_W_DATA,  SEL_W_BMP,  0, 8'b10111101, w0);
    load(SEL_W_DATA,  SEL_W_BMP,  1, 8'b01110110, w1);
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    it = 0;
    while (!done) begin
      if (shared_i_vld != 0 && it < 4) begin
        checks++;
        for (int m = 0; m < 2; m++)
          if (int'(shared_i[m]) != exp_si[it][m] || int'(shared_w[m]) != exp_sw[it][m]) begin
            failures++;
            $display("FAIL iteration %0d: SharedI%0d=%0d SharedW%0d=%0d exp %0d %0d", it + 1,
                     m, shared_i[m], m, shared_w[m], exp_si[it][m], exp_sw[it][m]);
          end
        for (int m = 0; m < 2; m++)
          for (int n = 0; n < 2; n++) begin
            checks++;
            if (dut.fire[m][n] == exp_idle[it][m][n]) begin
              failures++; $display("FAIL iteration %0d: PE%0d%0d fire=%0d", it + 1, m, n, dut.fire[m][n]);
            end
          end
        @(negedge clk);
        for (int m = 0; m < 2; m++)
          for (int r = 0; r < 2; r++) begin
            checks++;
            if (int'(dut.reg_row[m][r]) != exp_ri[it][m][r]) begin
              failures++; $display("FAIL iteration %0d: RegI%0d[%0d]=%0d", it + 1, m, r, dut.reg_row[m][r]);
            end
            if (exp_rw[it][m][r] >= 0) begin
              checks++;
              if (int'(dut.reg_col[m][r]) != exp_rw[it][m][r]) begin
                failures++; $display("FAIL iteration %0d: RegW%0d[%0d]=%0d", it + 1, m, r, dut.reg_col[m][r]);
              end
            end
          end
        it++;
      end else @(negedge clk);
    end
    @(negedge clk);
    checks++;
    if (it != 4) begin failures++; $display("FAIL only %0d iterations seen", it); end
    checks++;
    if (acc[0][0] != 90 || acc[0][1] != 78 || acc[1][0] != 78 || acc[1][1] != 56) begin
      failures++; $display("FAIL outputs %0d %0d %0d %0d", acc[0][0], acc[0][1], acc[1][0], acc[1][1]);
    end
    $display("iterations to completion: %0d cycles, %0d MACs, %0d idle", cycles, mac_ops, idle_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
