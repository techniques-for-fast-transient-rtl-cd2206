// Time-multiplexed fault-injection instrument for one flip-flop.
//
// Every flip-flop of the circuit under test is replaced by this cell. It holds
// four flip-flops:
//   FAULTY  - the flip-flop of the faulty copy of the circuit
//   GOLDEN  - the same flip-flop in the fault-free (golden) copy
//   MASK    - one bit of a scan chain; a 1 marks the flip-flop to be hit
//   STATE   - the golden value saved at the injection instant, so that each
//             new fault can start from there instead of from reset
// Both copies share the circuit's combinational logic: when EnaFaulty is set
// DataOut shows FaultyQ and FAULTY captures DataIn (XOR the mask bit when
// Inject is set, which is the bit-flip); otherwise DataOut shows GoldenQ and
// GOLDEN may capture DataIn under EnaGolden. A copy that is not enabled either
// holds or, under LoadState, takes StateQ. STATE takes GoldenQ under SaveState.
// DetectadoN is high when FaultyQ and GoldenQ differ and EnaDetect is set.
//
// The names, the multiplexer arrangement and their select signals follow the
// published instrument drawing. The gate types (AND for MaskQ/Inject, XOR for
// the flip and for the comparison), the active-high DetectadoN, the mask
// shift enable and the asynchronous all-zero reset are this design's choices.
//
// Timing: all four flip-flops update on the rising clock edge; data_out and
// detect are combinational from the flip-flops and the control bundle.
module tm_cell
  import fault_emu_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  tm_ctrl_t ctrl,
  input  logic     scan_in,   // ScanOut of the previous cell in the mask chain
  input  logic     data_in,   // DataIn: next-state value from the logic
  output logic     data_out,  // DataOut: value the logic sees
  output logic     scan_out,  // ScanOut (= MaskQ)
  output logic     detect     // DetectadoN
);

  logic mask_q, faulty_q, golden_q, state_q;
  logic faulty_d, golden_d;

  always_comb begin
    // FAULTY input: DataIn with the bit-flip, or hold / reload from STATE
    if (ctrl.ena_faulty)      faulty_d = data_in ^ (mask_q & ctrl.inject);
    else if (ctrl.load_state) faulty_d = state_q;
    else                      faulty_d = faulty_q;
    // GOLDEN input: DataIn, or hold / reload from STATE
    if (ctrl.ena_golden)      golden_d = data_in;
    else if (ctrl.load_state) golden_d = state_q;
    else                      golden_d = golden_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_q   <= 1'b0;
      faulty_q <= 1'b0;
      golden_q <= 1'b0;
      state_q  <= 1'b0;
    end else begin
      if (ctrl.mask_shift) mask_q <= scan_in;
      faulty_q <= faulty_d;
      golden_q <= golden_d;
      if (ctrl.save_state) state_q <= golden_q;
    end
  end

  assign data_out = ctrl.ena_faulty ? faulty_q : golden_q;
  assign scan_out = mask_q;
  assign detect   = (faulty_q ^ golden_q) & ctrl.ena_detect;

endmodule
