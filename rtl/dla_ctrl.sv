// dla_ctrl: sequencer of one output-tile operation.
//
// start clears the array and restarts the mask index generators at chunk 0.
// While running, all EIM units load the next bitmap chunk together
// (eim_load, which also advances every generator) as soon as each of them is
// ready, until num_chunks chunks have been loaded. The SIDR iterations run by
// themselves in the PEs; the operation is complete when every chunk has been
// loaded and no PE holds, queues or is still matching an operation. One drain
// cycle lets the last MAC stage finish, then done pulses for one cycle and
// the accumulators hold the result. cycles counts the cycles of the last
// operation. The source design gives no controller; this is the simplest one
// that runs its algorithm.
module dla_ctrl #(
  parameter int unsigned CHUNK_W = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [CHUNK_W-1:0] num_chunks,
  input  logic               all_eim_ready,
  input  logic               any_busy,
  output logic               clear,
  output logic               eim_load,
  output logic               busy,
  output logic               done,
  output logic [31:0]        cycles
);
  import sidr_pkg::*;

  ctrl_state_e        state_q;
  logic [CHUNK_W-1:0] chunk_q;
  logic               all_loaded;

  assign clear      = start && (state_q == ST_IDLE);
  assign all_loaded = (chunk_q == num_chunks);
  assign eim_load   = (state_q == ST_RUN) && !all_loaded && all_eim_ready;
  assign busy       = (state_q != ST_IDLE);
  assign done       = (state_q == ST_DRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      chunk_q <= '0;
      cycles  <= '0;
    end else begin
      case (state_q)
        ST_IDLE: if (start) begin
          state_q <= ST_RUN;
          chunk_q <= '0;
          cycles  <= '0;
        end
        ST_RUN: begin
          cycles <= cycles + 1;
          if (eim_load) chunk_q <= chunk_q + 1'b1;
          if (all_loaded && !any_busy) state_q <= ST_DRAIN;
        end
        ST_DRAIN: state_q <= ST_IDLE;
        default:  state_q <= ST_IDLE;
      endcase
    end
  end

  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);
endmodule
