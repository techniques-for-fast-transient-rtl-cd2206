// Shared types of the autonomous fault emulator (time-multiplexed technique).
//
// tm_ctrl_t is the control bundle that the emulation controller broadcasts to
// every instrumented flip-flop. Its fields carry the signal names of the
// instrument: Inject, EnaFaulty, EnaGolden, LoadState, SaveState and EnaDetect,
// plus the shift enable and the serial input of the mask scan chain, which
// this design adds because the instrument's scan path needs them.
//
// technique_t selects which of the three fault-injection techniques the
// emulator is built with; time-multiplexed is the default.
//
// fault_class_t is the 2-bit code stored per fault in the classification
// memory. The three classes (failure, latent, silent) are the standard SEU
// grading classes; the numeric encoding is this design's choice.
package fault_emu_pkg;

  typedef struct packed {
    logic inject;      // Inject: allow the bit-flip where the mask is set
    logic ena_faulty;  // EnaFaulty: FAULTY captures, DataOut shows FaultyQ
    logic ena_golden;  // EnaGolden: GOLDEN captures
    logic load_state;  // LoadState: FAULTY and GOLDEN take StateQ (when not enabled)
    logic save_state;  // SaveState: STATE takes GoldenQ
    logic ena_detect;  // EnaDetect: let the faulty/golden comparison through
    logic mask_shift;  // shift the mask scan chain by one position
    logic scan_in;     // serial input at the head of the mask chain
  } tm_ctrl_t;

  typedef enum logic [1:0] {
    FC_NONE    = 2'd0,  // not graded; with mask-scan: not a failure
    FC_SILENT  = 2'd1,  // effect disappeared or never reached anything
    FC_LATENT  = 2'd2,  // state still wrong after the last vector, outputs correct
    FC_FAILURE = 2'd3   // some primary output differed from the golden run
  } fault_class_t;

  typedef enum logic [1:0] {
    TECH_TIME_MUX   = 2'd0,  // faulty and golden copy per flip-flop (default)
    TECH_MASK_SCAN  = 2'd1,  // mask flip-flop per flip-flop, rerun from reset
    TECH_STATE_SCAN = 2'd2   // scan chain, stored faulty states scanned in
  } technique_t;

endpackage
