// Flip-flops of the circuit under test instrumented for the state-scan
// technique.
//
// The circuit flip-flops form one scan chain (bit 0 at the head, bit NFF-1 at
// the tail). With scan_en set they shift by one place per clock, so a whole
// faulty state is inserted in NFF clocks, tail bit first. With ena set they
// capture next_state as in the original circuit. clr returns them to the
// all-zero reset state.
//
// The scan chain through the circuit flip-flops follows the published
// technique; the clear input, the run enable and the chain order are this
// design's choices. Timing: changes on the rising edge; scan_en has priority
// over ena. Needs NFF >= 2.
module ss_state_array #(
  parameter int unsigned NFF = 215
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic           ena,
  input  logic           scan_en,
  input  logic           scan_in,
  input  logic [NFF-1:0] next_state,
  output logic [NFF-1:0] state,
  output logic           scan_out
);

  logic [NFF-1:0] ff_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       ff_q <= '0;
    else if (clr)     ff_q <= '0;
    else if (scan_en) ff_q <= {ff_q[NFF-2:0], scan_in};
    else if (ena)     ff_q <= next_state;
  end

  assign state    = ff_q;
  assign scan_out = ff_q[NFF-1];

endmodule
