// State register of the instrumented circuit: NFF time-multiplexed cells.
//
// Each cell replaces one flip-flop of the circuit under test (see tm_cell).
// All cells share one control bundle. Their mask flip-flops form a single
// scan chain, cell 0 at the head (fed by ctrl.scan_in) and cell NFF-1 at the
// tail (scan_out); shifting a lone 1 along the chain selects, one after the
// other, the flip-flop that the next fault hits. The DetectadoN outputs of
// all cells are ORed into any_diff, which tells the controller whether the
// faulty and golden states still differ.
//
// The cell structure follows the published instrument; the chain order and
// the OR reduction are this design's choices.
//
// Interface: state[i] is DataOut of cell i and next_state[i] its DataIn, so
// the circuit's combinational logic sits between the two. Timing: state and
// any_diff are combinational from the flip-flops and ctrl.
module tm_state_array
  import fault_emu_pkg::*;
#(
  parameter int unsigned NFF = 215
) (
  input  logic           clk,
  input  logic           rst_n,
  input  tm_ctrl_t       ctrl,
  input  logic [NFF-1:0] next_state,
  output logic [NFF-1:0] state,
  output logic           scan_out,
  output logic           any_diff
);

  logic [NFF:0]   chain;   // chain[i] feeds cell i; chain[NFF] is the tail
  logic [NFF-1:0] detect;

  assign chain[0] = ctrl.scan_in;

  for (genvar i = 0; i < NFF; i++) begin : g_cell
    tm_cell u_cell (
      .clk      (clk),
      .rst_n    (rst_n),
      .ctrl     (ctrl),
      .scan_in  (chain[i]),
      .data_in  (next_state[i]),
      .data_out (state[i]),
      .scan_out (chain[i+1]),
      .detect   (detect[i])
    );
  end

  assign scan_out = chain[NFF];
  assign any_diff = |detect;

endmodule
