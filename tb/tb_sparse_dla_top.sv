// tb_sparse_dla_top: end-to-end test of the 16x16 sparse DLA at its default
// parameters (BUF_DEPTH 1024, BM_LEN 32, REG_SIZE 8).
//
// Tests, each loading all 32 SRAMs through the load port and running one
// output tile:
//   0  the 2x2 example of the bitmap-compression figure in PE(0..1,0..1),
//      all other vectors empty (expected o00=90, o01=78, o10=78, o11=56);
//   1+ random signed 8-bit tiles of K = 1024 (32 chunks) at input/weight
//      sparsities from 0% to 90%, a K = 960 tile shaped like a pruned
//      MobileNetV2 pointwise layer, a short K = 64 tile and an all-zero one.
// For every tile all 256 accumulators are compared with a dot product
// computed here from the dense vectors, and mac_ops must equal the number of
// non-zero products. The test also counts how often each mechanism happened
// (PE idle waits, shared-register reuse without re-read, EIM FIFO back
// pressure, chunk loads held back, empty chunks) and fails if one never did.
module tb_sparse_dla_top;
  import sidr_pkg::*;
  localparam int R = 16, C = 16, K = 1024, BL = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              wr_en = 1'b0;
  wr_sel_e           wr_sel = SEL_IN_DATA;
  logic [3:0]        wr_lane = '0;
  logic [9:0]        wr_addr = '0;
  logic [31:0]       wr_data = '0;
  logic              start = 1'b0;
  logic [5:0]        num_chunks = '0;
  logic              busy, done;
  logic signed [23:0] acc [R][C];
  logic [31:0]       cycles, mac_ops, idle_ops, buf_reads;
  logic [9:0]        shared_i [R];
  logic [9:0]        shared_w [C];
  logic [R-1:0]      shared_i_vld;
  logic [C-1:0]      shared_w_vld;

  sparse_dla_top dut (.*);

  int checks = 0, failures = 0;
  int n_idle = 0, n_reuse = 0, n_fifo_full = 0, n_load_wait = 0, n_empty_chunk = 0;

  logic signed [7:0] I [R][K];
  logic signed [7:0] W [C][K];

  // mechanism monitors
  always @(posedge clk) if (busy) begin
    if (idle_ops != 0 && dut.n_idle != 0) n_idle++;
    for (int m = 0; m < R; m++) if (shared_i_vld[m] && !dut.rd_row[m]) n_reuse++;
    if (dut.g_pe_row[0].g_pe[0].u_pe.full_i) n_fifo_full++;
    if (dut.u_ctrl.state_q == ST_RUN && !dut.u_ctrl.all_loaded && !dut.all_ready) n_load_wait++;
    if (dut.eim_load) begin
      logic any;
      any = 1'b0;
      for (int m = 0; m < R; m++)
        for (int n = 0; n < C; n++)
          any |= |(dut.bm_row[m] & dut.bm_col[n]);
      if (!any) n_empty_chunk++;
    end
  end

  task automatic wr(input wr_sel_e s, input int lane, input int addr, input logic [31:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_sel = s; wr_lane = 4'(lane); wr_addr = 10'(addr); wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  // Compress one dense vector into bitmap words and packed non-zeros.
  task automatic load_vec(input bit is_w, input int lane, input int klen);
    int p = 0;
    for (int c = 0; c < klen / BL; c++) begin
      logic [31:0] bm = '0;
      for (int i = 0; i < BL; i++) begin
        logic signed [7:0] v = is_w ? W[lane][c*BL+i] : I[lane][c*BL+i];
        if (v != 0) begin
          bm[i] = 1'b1;
          wr(is_w ? SEL_W_DATA : SEL_IN_DATA, lane, p, 32'(v));
          p++;
        end
      end
      wr(is_w ? SEL_W_BMP : SEL_IN_BMP, lane, c, bm);
    end
  endtask

  task automatic run_tile(input string name, input int klen);
    longint exp_acc;
    int nz_ops = 0, wd = 0;
    for (int m = 0; m < R; m++) load_vec(1'b0, m, klen);
    for (int n = 0; n < C; n++) load_vec(1'b1, n, klen);
    @(negedge clk);
    start = 1'b1; num_chunks = 6'(klen / BL);
    @(negedge clk);
    start = 1'b0;
    while (!done && wd < 200000) begin @(negedge clk); wd++; end
    checks++;
    if (!done) begin failures++; $display("FAIL %s: no done", name); end
    @(negedge clk);
    for (int m = 0; m < R; m++)
      for (int n = 0; n < C; n++) begin
        exp_acc = 0;
        for (int k = 0; k < klen; k++)
          if (I[m][k] != 0 && W[n][k] != 0) begin
            exp_acc += I[m][k] * W[n][k];
            nz_ops++;
          end
        checks++;
        if (acc[m][n] != 24'(exp_acc)) begin
          failures++;
          if (failures < 10) $display("FAIL %s: acc[%0d][%0d]=%0d exp %0d", name, m, n, acc[m][n], exp_acc);
        end
      end
    checks++;
    if (mac_ops != 32'(nz_ops)) begin
      failures++;
      $display("FAIL %s: mac_ops=%0d exp %0d", name, mac_ops, nz_ops);
    end
    if (name == "sp_in=0 sp_w=0") begin
      // dense tile: every buffer entry is read exactly once, plus the
      // REG_SIZE-1 entries the last windows reach past the vector's end
      checks++;
      if (buf_reads != 32'((R + C) * (klen + 7))) begin
        failures++;
        $display("FAIL %s: buf_reads=%0d exp %0d", name, buf_reads, (R + C) * (klen + 7));
      end
    end
    $display("%-22s K=%0d cycles=%0d macs=%0d util=%0.1f%% dense_cycles=%0d speedup=%0.2f buf_reads=%0d MAPM=%0.3f",
             name, klen, cycles, mac_ops, 100.0 * mac_ops / (256.0 * cycles), klen,
             real'(klen) / real'(cycles), buf_reads,
             (buf_reads + 3.0 * R * C) / real'(mac_ops));
  endtask

  task automatic fill(input int sp_i, input int sp_w);
    for (int m = 0; m < R; m++)
      for (int k = 0; k < K; k++)
        I[m][k] = (($urandom % 100) < sp_i) ? 8'sd0 : 8'($urandom_range(1, 255));
    for (int n = 0; n < C; n++)
      for (int k = 0; k < K; k++)
        W[n][k] = (($urandom % 100) < sp_w) ? 8'sd0 : 8'($urandom_range(1, 255));
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sp [5] = '{0, 50, 60, 70, 90};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Test 0: the worked 2x2 example (first 8 elements of two vectors each).
    foreach (I[m, k]) I[m][k] = 0;
    foreach (W[n, k]) W[n][k] = 0;
    begin
      int i0 [8] = '{0, 1, 0, 0, 4, 5, 6, 7};
      int i1 [8] = '{0, 0, 2, 3, 4, 0, 6, 7};
      int w0 [8] = '{0, 0, 2, 3, 4, 5, 0, 7};
      int w1 [8] = '{0, 1, 2, 0, 4, 5, 6, 0};
      for (int k = 0; k < 8; k++) begin
        I[0][k] = 8'(i0[k]); I[1][k] = 8'(i1[k]);
        W[0][k] = 8'(w0[k]); W[1][k] = 8'(w1[k]);
      end
      // the figure's bitmaps mark index 0 as non-zero (value 0 is stored)
      I[0][0] = 8'sd0; W[0][0] = 8'sd0;
    end
    run_tile_example();

    for (int a = 0; a < 5; a++)
      for (int b = 0; b < 5; b += 2) begin
        fill(sp[a], sp[b]);
        run_tile($sformatf("sp_in=%0d sp_w=%0d", sp[a], sp[b]), K);
      end
    // pointwise layer of a pruned MobileNetV2: 960 input channels (30
    // chunks), 75% of the weights pruned, about half the activations zero
    fill(50, 75);
    run_tile("PW K=960 sp_w=75", 960);
    fill(50, 50);
    run_tile("short K=64", 64);
    fill(100, 100);
    run_tile("all zero", K);

    checks++; if (n_idle == 0)        begin failures++; $display("FAIL: no PE idle wait"); end
    checks++; if (n_reuse == 0)       begin failures++; $display("FAIL: no shared register reuse"); end
    checks++; if (n_fifo_full == 0)   begin failures++; $display("FAIL: no FIFO back pressure"); end
    checks++; if (n_load_wait == 0)   begin failures++; $display("FAIL: no held chunk load"); end
    checks++; if (n_empty_chunk == 0) begin failures++; $display("FAIL: no empty chunk"); end
    $display("mechanisms: idle=%0d reuse=%0d fifo_full=%0d load_wait=%0d empty_chunk=%0d",
             n_idle, n_reuse, n_fifo_full, n_load_wait, n_empty_chunk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The example stores the explicit zero at original index 0 of I0 and W0,
  // exactly as its bitmaps (I0 11001111, W0 10111101) mark it.
  task automatic run_tile_example();
    logic [31:0] bi [2] = '{32'b11110011, 32'b11011101};  // bit i = index i
    logic [31:0] bw [2] = '{32'b10111101, 32'b01110110};
    for (int v = 0; v < 2; v++) begin
      int p = 0;
      for (int i = 0; i < 8; i++) if (bi[v][i]) begin wr(SEL_IN_DATA, v, p, 32'(I[v][i])); p++; end
      wr(SEL_IN_BMP, v, 0, bi[v]);
      p = 0;
      for (int i = 0; i < 8; i++) if (bw[v][i]) begin wr(SEL_W_DATA, v, p, 32'(W[v][i])); p++; end
      wr(SEL_W_BMP, v, 0, bw[v]);
    end
    for (int v = 2; v < 16; v++) begin wr(SEL_IN_BMP, v, 0, '0); wr(SEL_W_BMP, v, 0, '0); end
    @(negedge clk); start = 1'b1; num_chunks = 6'd1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks += 5;
    if (acc[0][0] != 24'sd90) begin failures++; $display("FAIL example o00=%0d", acc[0][0]); end
    if (acc[0][1] != 24'sd78) begin failures++; $display("FAIL example o01=%0d", acc[0][1]); end
    if (acc[1][0] != 24'sd78) begin failures++; $display("FAIL example o10=%0d", acc[1][0]); end
    if (acc[1][1] != 24'sd56) begin failures++; $display("FAIL example o11=%0d", acc[1][1]); end
    // 4 + 4 + 5 + 3 non-zero multiplications (index 0 of o00/o10 counts)
    if (mac_ops != 32'd16) begin failures++; $display("FAIL example mac_ops=%0d", mac_ops); end
    $display("example: cycles=%0d macs=%0d", cycles, mac_ops);
  endtask
endmodule
