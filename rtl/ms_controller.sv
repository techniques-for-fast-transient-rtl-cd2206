// Emulation controller for the mask-scan technique.
//
// First a golden run: the circuit is cleared and run over all NCYC vectors,
// and its outputs are written to the golden-output memory. Then, for every
// fault (flip-flop i hit at the end of cycle t; t outer loop, i inner loop):
//
//   START : clear the circuit flip-flops and shift the mask chain (a 1 enters
//           when i = 0, so the lone 1 moves to flip-flop i); k <- 0
//   RUN   : one emulated cycle per clock from reset; Inject is raised when
//           k = t. Outputs that differ from the stored golden outputs make
//           the fault a FAILURE and end it; after the last vector it ends as
//           not a failure (FC_NONE): this technique compares outputs only and
//           cannot tell latent from silent faults.
//
// Each fault therefore re-runs the testbench from its start, which is what
// makes this technique slower than the time-multiplexed one. The mask per
// flip-flop, the stored stimuli and outputs and the autonomous loop follow
// the published technique; the loop order, the clear, the schedule and the
// two-valued result are this design's choices.
//
// Timing: golden run 1 + NCYC clocks; a fault found failing in cycle k costs
// k + 2 clocks, one that is not a failure NCYC + 1 clocks.
module ms_controller
  import fault_emu_pkg::*;
#(
  parameter int unsigned NFF  = 215,
  parameter int unsigned NOUT = 54,
  parameter int unsigned NCYC = 160,
  localparam int unsigned NFAULT = NFF * NCYC,
  localparam int unsigned CAW    = (NCYC > 1) ? $clog2(NCYC) : 1,
  localparam int unsigned FFW    = (NFF > 1) ? $clog2(NFF) : 1,
  localparam int unsigned RAW    = (NFAULT > 1) ? $clog2(NFAULT) : 1,
  localparam int unsigned CNTW   = $clog2(NFAULT + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            done,
  // instrumented flip-flops
  output logic            clr,
  output logic            ena,
  output logic            inject,
  output logic            mask_shift,
  output logic            scan_in,
  // stimulus and golden-output memories, circuit outputs
  output logic [CAW-1:0]  stim_addr,
  output logic            gout_we,
  input  logic [NOUT-1:0] gout_rdata,
  input  logic [NOUT-1:0] cut_out,
  // classification memory
  output logic            res_we,
  output logic [RAW-1:0]  res_addr,
  output fault_class_t    res_data,
  // results
  output logic [CNTW-1:0] n_failure,
  output logic [31:0]     cycles
);

  typedef enum logic [2:0] {S_IDLE, S_GCLR, S_GRUN, S_START, S_RUN, S_DONE} state_t;

  state_t         st;
  logic [CAW-1:0] t_q, k_q;
  logic [FFW-1:0] i_q;
  logic [RAW-1:0] addr_q;
  logic           fin, fail;

  always_comb begin
    clr        = (st == S_GCLR) || (st == S_START);
    ena        = (st == S_GRUN) || (st == S_RUN);
    inject     = (st == S_RUN) && (k_q == t_q);
    mask_shift = (st == S_START);
    scan_in    = (st == S_START) && (i_q == '0);
    gout_we    = (st == S_GRUN);
    fail       = (st == S_RUN) && (cut_out != gout_rdata);
    fin        = (st == S_RUN) && (fail || 32'(k_q) == NCYC - 1);
  end

  assign stim_addr = k_q;
  assign res_we    = fin;
  assign res_addr  = addr_q;
  assign res_data  = fail ? FC_FAILURE : FC_NONE;
  assign busy      = (st != S_IDLE) && (st != S_DONE);
  assign done      = (st == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      t_q <= '0; k_q <= '0; i_q <= '0; addr_q <= '0;
      n_failure <= '0;
      cycles <= '0;
    end else begin
      if (busy) cycles <= cycles + 32'd1;
      unique case (st)
        S_IDLE: if (start) begin
          t_q <= '0; i_q <= '0; addr_q <= '0; k_q <= '0;
          n_failure <= '0;
          cycles <= '0;
          st <= S_GCLR;
        end
        S_GCLR: st <= S_GRUN;
        S_GRUN: begin
          if (32'(k_q) == NCYC - 1) begin
            k_q <= '0;
            st  <= S_START;
          end else k_q <= k_q + 1'b1;
        end
        S_START: st <= S_RUN;
        S_RUN: begin
          if (!fin) k_q <= k_q + 1'b1;
          else begin
            if (fail) n_failure <= n_failure + 1'b1;
            addr_q <= addr_q + 1'b1;
            k_q    <= '0;
            if (32'(i_q) == NFF - 1) begin
              i_q <= '0;
              if (32'(t_q) == NCYC - 1) st <= S_DONE;
              else begin
                t_q <= t_q + 1'b1;
                st  <= S_START;
              end
            end else begin
              i_q <= i_q + 1'b1;
              st  <= S_START;
            end
          end
        end
        default: ;
      endcase
    end
  end

  a_we_busy: assert property (@(posedge clk) disable iff (!rst_n) res_we |-> busy);

endmodule
