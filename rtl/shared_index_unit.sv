// shared_index_unit: shared index selection for one PE row (SharedI_m) or
// one PE column (SharedW_n).
//
// Every PE of the row/column reports the effective index of the operation
// it holds. The unit takes the smallest one among the PEs that hold an
// operation, so the PE lagging furthest behind can always be served, and
// asks the data buffer to load the window Buf[shared : shared+REG_SIZE-1]
// into the shared register. The minimum rule is the source design's; leaving
// out PEs that hold nothing, and re-reading the window only when the shared
// index changes, are this implementation's choices.
//
// Timing: shared and rd_en are combinational in cycle t; the window and
// shared_q (the start index of the data now in the register) are valid from
// cycle t+1. The minimum is a plain linear comparison chain.
module shared_index_unit #(
  parameter int unsigned N     = 16,
  parameter int unsigned IDX_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [IDX_W-1:0] eff     [N],
  input  logic [N-1:0]     eff_vld,
  output logic [IDX_W-1:0] shared,
  output logic             any_vld,
  output logic             rd_en,
  output logic [IDX_W-1:0] shared_q
);
  logic loaded_q;

  always_comb begin
    shared  = '1;
    any_vld = 1'b0;
    for (int k = 0; k < N; k++) begin
      if (eff_vld[k] && (!any_vld || eff[k] < shared)) shared = eff[k];
      any_vld = any_vld | eff_vld[k];
    end
  end

  assign rd_en = any_vld && (!loaded_q || shared != shared_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loaded_q <= 1'b0;
      shared_q <= '0;
    end else if (clear) begin
      loaded_q <= 1'b0;
    end else if (rd_en) begin
      loaded_q <= 1'b1;
      shared_q <= shared;
    end
  end
endmodule
