// data_buffer: compressed input (BufI_m) or weight (BufW_n) buffer together
// with its shared register (RegI_m / RegW_n).
//
// The buffer holds only the non-zero values of one vector, in order, so an
// address is a "compressed index". SIDR needs the REG_SIZE consecutive
// entries starting at the shared index. The buffer is split into REG_SIZE
// banks interleaved on the low index bits: entry k lives in bank
// k % REG_SIZE at row k / REG_SIZE, so every window holds exactly one entry
// of each bank. The bank output registers form the shared register. When the
// window slides, only the banks whose entry changed are read; the others keep
// their data, so a buffer swept from front to back reads each entry once and
// the banks otherwise stay idle.
//
// Timing: rd_en with rd_start in cycle t gives rd_win[r] = Buf[rd_start + r]
// from cycle t+1 until the next rd_en. clear (start of an operation) forgets
// what the register holds. Entries past the end wrap around and are never
// used. bank_reads counts the banks read in the current cycle. The windowed
// register follows the source design's algorithm; the banked organisation and
// the partial refill are this implementation's choices.
module data_buffer #(
  parameter int unsigned DEPTH    = 1024,
  parameter int unsigned REG_SIZE = 8,
  parameter int unsigned DATA_W   = 8,
  localparam int unsigned IDX_W   = $clog2(DEPTH),
  localparam int unsigned BS_W    = $clog2(REG_SIZE),
  localparam int unsigned BANK_D  = DEPTH / REG_SIZE,
  localparam int unsigned RW      = IDX_W - BS_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     wr_en,
  input  logic [IDX_W-1:0]         wr_addr,
  input  logic signed [DATA_W-1:0] wr_data,
  input  logic                     rd_en,
  input  logic [IDX_W-1:0]         rd_start,
  output logic signed [DATA_W-1:0] rd_win [REG_SIZE],
  output logic [BS_W:0]            bank_reads
);
  logic signed [DATA_W-1:0] bank_q [REG_SIZE];
  logic [REG_SIZE-1:0]      bank_rd;
  logic [BS_W-1:0]          start_lo_q;

  for (genvar b = 0; b < REG_SIZE; b++) begin : g_bank
    logic signed [DATA_W-1:0] mem [BANK_D];
    logic [IDX_W-1:0]         idx;
    logic [RW-1:0]            row_q;
    logic                     held_q;
    // Index inside the window that falls into bank b.
    always_comb idx = rd_start + IDX_W'(BS_W'(BS_W'(b) - rd_start[BS_W-1:0]));
    assign bank_rd[b] = rd_en && (!held_q || idx[IDX_W-1:BS_W] != row_q);
    always_ff @(posedge clk) begin
      if (wr_en && (wr_addr[BS_W-1:0] == BS_W'(b))) mem[wr_addr[IDX_W-1:BS_W]] <= wr_data;
      if (bank_rd[b]) bank_q[b] <= mem[idx[IDX_W-1:BS_W]];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          begin held_q <= 1'b0; row_q <= '0; end
      else if (clear)      held_q <= 1'b0;
      else if (bank_rd[b]) begin held_q <= 1'b1; row_q <= idx[IDX_W-1:BS_W]; end
    end
  end

  always_ff @(posedge clk) if (rd_en) start_lo_q <= rd_start[BS_W-1:0];

  // Rotate bank outputs into window order: window entry r sits in bank
  // (start + r) % REG_SIZE.
  always_comb
    for (int r = 0; r < REG_SIZE; r++)
      rd_win[r] = bank_q[BS_W'(start_lo_q + BS_W'(r))];

  assign bank_reads = (BS_W+1)'($countones(bank_rd));
endmodule
