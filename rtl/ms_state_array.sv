// Flip-flops of the circuit under test instrumented for the mask-scan
// technique.
//
// Every circuit flip-flop gets one extra flip-flop, its fault mask. The masks
// form a scan chain (bit 0 at the head). While ena is set the circuit
// flip-flops capture next_state, XORed with the mask where inject is set, so
// a lone 1 in the mask chain flips exactly one flip-flop in the clock chosen
// by the controller. clr returns the circuit flip-flops to the all-zero reset
// state so that each fault can be emulated from the start of the testbench.
//
// The mask flip-flop per circuit flip-flop follows the published technique;
// the clear input, the run enable and the chain order are this design's
// choices. Timing: all flip-flops change on the rising edge; state is their
// output. Needs NFF >= 2.
module ms_state_array #(
  parameter int unsigned NFF = 215
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,         // synchronous clear of the circuit flip-flops
  input  logic           ena,         // circuit flip-flops capture next_state
  input  logic           inject,      // flip where the mask is set
  input  logic           mask_shift,  // shift the mask chain
  input  logic           scan_in,     // head of the mask chain
  input  logic [NFF-1:0] next_state,
  output logic [NFF-1:0] state,
  output logic           scan_out
);

  logic [NFF-1:0] ff_q, mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ff_q   <= '0;
      mask_q <= '0;
    end else begin
      if (mask_shift) mask_q <= {mask_q[NFF-2:0], scan_in};
      if (clr)        ff_q   <= '0;
      else if (ena)   ff_q   <= next_state ^ (mask_q & {NFF{inject}});
    end
  end

  assign state    = ff_q;
  assign scan_out = mask_q[NFF-1];

endmodule
