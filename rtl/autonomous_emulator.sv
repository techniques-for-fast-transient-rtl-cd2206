// Autonomous transient-fault emulator.
//
// Grades every single bit-flip (each flip-flop at each stimulus cycle) of a
// sequential circuit without host interaction during the campaign. The
// circuit's flip-flops are replaced by instrumented ones inside this module;
// its combinational logic stays outside and is connected through the cut_*
// ports: cut_state and cut_in go into the logic, cut_next and cut_out come
// back.
//
// TECHNIQUE selects one of three fault-injection techniques:
//   TECH_TIME_MUX (default) - tm_state_array + emulation_controller: a
//       faulty and a golden copy of every flip-flop take turns on the logic,
//       so outputs and states are compared on the fly and a fault whose
//       effect vanishes is dropped at once. Classes: failure/latent/silent.
//   TECH_MASK_SCAN - ms_state_array + ms_controller: a mask flip-flop per
//       flip-flop; every fault re-runs the testbench from reset and the
//       outputs are compared with a stored golden run. Classes: failure or
//       not (code FC_NONE); n_latent and n_silent stay 0.
//   TECH_STATE_SCAN - ss_state_array + ss_controller: the flip-flops form a
//       scan chain; a stored faulty state per fault (host_fst_*) is shifted
//       in and the run continues from there. Classes: failure/latent/silent.
//
// Host use: load the NCYC input vectors through host_stim_* (and, for
// state-scan, the NFF*NCYC faulty states through host_fst_*), pulse start,
// wait for done, then read one classification code per fault through
// host_res_addr/host_res_data (one clock read latency; fault t*NFF + i is
// flip-flop i hit at the end of cycle t). n_failure, n_latent and n_silent
// give the totals and cycles the emulation time in clocks. A new campaign
// needs a reset first. host_fst_* is unused by the other two techniques.
//
// The split into instrumented flip-flops, controller, stimulus memory,
// (for the scan techniques) golden-output and fault-state memories and the
// classification memory follows the published system; the port list, the
// reset and the counters are this design's choices.
module autonomous_emulator
  import fault_emu_pkg::*;
#(
  parameter int unsigned NFF       = 215,
  parameter int unsigned NIN       = 32,
  parameter int unsigned NOUT      = 54,
  parameter int unsigned NCYC      = 160,
  parameter technique_t  TECHNIQUE = TECH_TIME_MUX,
  localparam int unsigned NFAULT = NFF * NCYC,
  localparam int unsigned CAW    = (NCYC > 1) ? $clog2(NCYC) : 1,
  localparam int unsigned RAW    = (NFAULT > 1) ? $clog2(NFAULT) : 1,
  localparam int unsigned CNTW   = $clog2(NFAULT + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // host side
  input  logic            host_stim_we,
  input  logic [CAW-1:0]  host_stim_addr,
  input  logic [NIN-1:0]  host_stim_data,
  input  logic            host_fst_we,
  input  logic [RAW-1:0]  host_fst_addr,
  input  logic [NFF-1:0]  host_fst_data,
  input  logic            start,
  output logic            busy,
  output logic            done,
  input  logic [RAW-1:0]  host_res_addr,
  output logic [1:0]      host_res_data,
  output logic [CNTW-1:0] n_failure,
  output logic [CNTW-1:0] n_latent,
  output logic [CNTW-1:0] n_silent,
  output logic [31:0]     cycles,
  // combinational logic of the circuit under test
  output logic [NIN-1:0]  cut_in,
  output logic [NFF-1:0]  cut_state,
  input  logic [NFF-1:0]  cut_next,
  input  logic [NOUT-1:0] cut_out
);

  logic [CAW-1:0] stim_addr;
  logic           res_we;
  logic [RAW-1:0] res_addr;
  fault_class_t   res_data;

  stimulus_ram #(.NIN(NIN), .NCYC(NCYC)) u_stim (
    .clk,
    .we    (host_stim_we),
    .waddr (host_stim_addr),
    .wdata (host_stim_data),
    .raddr (stim_addr),
    .rdata (cut_in)
  );

  result_ram #(.DEPTH(NFAULT), .WIDTH(2)) u_res (
    .clk,
    .we    (res_we),
    .waddr (res_addr),
    .wdata (res_data),
    .raddr (host_res_addr),
    .rdata (host_res_data)
  );

  if (TECHNIQUE == TECH_MASK_SCAN) begin : g_ms
    logic            clr, ena, inject, mask_shift, scan_in, gout_we, mask_tail;
    logic [NOUT-1:0] gout_rdata;

    ms_controller #(.NFF(NFF), .NOUT(NOUT), .NCYC(NCYC)) u_ctrl (
      .clk, .rst_n, .start, .busy, .done,
      .clr, .ena, .inject, .mask_shift, .scan_in,
      .stim_addr, .gout_we, .gout_rdata, .cut_out,
      .res_we, .res_addr, .res_data,
      .n_failure, .cycles
    );
    ms_state_array #(.NFF(NFF)) u_regs (
      .clk, .rst_n, .clr, .ena, .inject, .mask_shift, .scan_in,
      .next_state (cut_next),
      .state      (cut_state),
      .scan_out   (mask_tail)
    );
    // golden outputs, one word per vector
    stimulus_ram #(.NIN(NOUT), .NCYC(NCYC)) u_gout (
      .clk,
      .we    (gout_we),
      .waddr (stim_addr),
      .wdata (cut_out),
      .raddr (stim_addr),
      .rdata (gout_rdata)
    );
    assign n_latent = '0;
    assign n_silent = '0;

  end else if (TECHNIQUE == TECH_STATE_SCAN) begin : g_ss
    logic            clr, ena, scan_en, scan_in, gout_we, chain_tail;
    logic [NOUT-1:0] gout_rdata;
    logic [RAW-1:0]  fst_addr;
    logic [NFF-1:0]  fst_rdata;

    ss_controller #(.NFF(NFF), .NOUT(NOUT), .NCYC(NCYC)) u_ctrl (
      .clk, .rst_n, .start, .busy, .done,
      .clr, .ena, .scan_en, .scan_in, .cut_state,
      .stim_addr, .gout_we, .gout_rdata, .cut_out,
      .fst_addr, .fst_rdata,
      .res_we, .res_addr, .res_data,
      .n_failure, .n_latent, .n_silent, .cycles
    );
    ss_state_array #(.NFF(NFF)) u_regs (
      .clk, .rst_n, .clr, .ena, .scan_en, .scan_in,
      .next_state (cut_next),
      .state      (cut_state),
      .scan_out   (chain_tail)
    );
    stimulus_ram #(.NIN(NOUT), .NCYC(NCYC)) u_gout (
      .clk,
      .we    (gout_we),
      .waddr (stim_addr),
      .wdata (cut_out),
      .raddr (stim_addr),
      .rdata (gout_rdata)
    );
    // faulty states, one per fault, written by the host
    result_ram #(.DEPTH(NFAULT), .WIDTH(NFF)) u_fst (
      .clk,
      .we    (host_fst_we),
      .waddr (host_fst_addr),
      .wdata (host_fst_data),
      .raddr (fst_addr),
      .rdata (fst_rdata)
    );

  end else begin : g_tm
    tm_ctrl_t ctrl;
    logic     any_diff;
    logic     mask_tail;  // end of the mask chain, not needed here

    emulation_controller #(.NFF(NFF), .NOUT(NOUT), .NCYC(NCYC)) u_ctrl (
      .clk, .rst_n, .start, .busy, .done,
      .ctrl, .any_diff, .stim_addr, .cut_out,
      .res_we, .res_addr, .res_data,
      .n_failure, .n_latent, .n_silent, .cycles
    );
    tm_state_array #(.NFF(NFF)) u_regs (
      .clk, .rst_n, .ctrl,
      .next_state (cut_next),
      .state      (cut_state),
      .scan_out   (mask_tail),
      .any_diff
    );
  end

endmodule
