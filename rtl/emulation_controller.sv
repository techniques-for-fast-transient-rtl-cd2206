// Emulation controller of the autonomous fault emulator (time-multiplexed).
//
// Runs a complete single-fault campaign in hardware. The fault list is every
// flip-flop at every stimulus cycle (NFF x NCYC faults). The loop is:
//
//   for t in 0..NCYC-1            (injection cycle; STATE holds golden(t))
//     for i in 0..NFF-1           (flip-flop hit)
//       LOAD : FAULTY, GOLDEN <- STATE; shift the mask chain (a 1 enters
//              when i = 0, so the lone 1 sits on flip-flop i); k <- t
//       F    : faulty phase of cycle k. If k > t and the states are equal the
//              fault has vanished: class SILENT, next fault. Otherwise
//              FAULTY captures (with the bit-flip when k = t) and the faulty
//              outputs are registered.
//       G    : golden phase of cycle k. GOLDEN captures; outputs that differ
//              from the registered faulty ones give class FAILURE. After the
//              last vector go to END, else k <- k+1 and back to F.
//       END  : states still differ -> LATENT, else SILENT.
//     ADV_LOAD, ADV_RUN, ADV_SAVE: restore golden(t), run one golden cycle,
//              save golden(t+1) into STATE.
//
// The instrument, the alternate faulty/golden running, the state save that
// avoids rerunning from reset, the early stop when the effect disappears and
// the three classes come from the published technique. The loop order, the
// two-clock emulated cycle, the classification rules in detail, the memory
// addressing (fault number t*NFF + i) and the counters are this design's own.
//
// Interface: start (one clock, accepted in IDLE) launches a campaign from the
// reset state; busy is high while it runs and done stays high afterwards
// until reset. Each decided fault is written through res_we/res_addr/res_data
// in the clock it is decided. cycles counts the clocks spent busy.
// Timing per fault: 1 + 2*(emulated cycles) clocks, plus 1 for END or minus
// 1 when a vanished effect is found in F; 3 more clocks per injection cycle.
module emulation_controller
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
  output tm_ctrl_t        ctrl,
  input  logic            any_diff,
  // stimulus memory and circuit outputs
  output logic [CAW-1:0]  stim_addr,
  input  logic [NOUT-1:0] cut_out,
  // classification memory
  output logic            res_we,
  output logic [RAW-1:0]  res_addr,
  output fault_class_t    res_data,
  // results
  output logic [CNTW-1:0] n_failure,
  output logic [CNTW-1:0] n_latent,
  output logic [CNTW-1:0] n_silent,
  output logic [31:0]     cycles
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_F, S_G, S_END, S_ADV_LOAD, S_ADV_RUN, S_ADV_SAVE, S_DONE
  } state_t;

  state_t          st;
  logic [CAW-1:0]  t_q;      // injection cycle
  logic [CAW-1:0]  k_q;      // emulated cycle
  logic [FFW-1:0]  i_q;      // flip-flop hit
  logic [RAW-1:0]  addr_q;   // fault number
  logic [NOUT-1:0] outf_q;   // faulty outputs of the current cycle

  logic         fin;         // current fault decided this clock
  fault_class_t fcls;

  always_comb begin
    ctrl = '0;
    fin  = 1'b0;
    fcls = FC_NONE;
    unique case (st)
      S_LOAD: begin
        ctrl.load_state = 1'b1;
        ctrl.mask_shift = 1'b1;
        ctrl.scan_in    = (i_q == '0);
      end
      S_F: begin
        // The controls do not depend on the comparison, so there is no
        // combinational path from any_diff back into ctrl. If the fault is
        // found silent here, the faulty capture of this clock is discarded
        // by the LoadState of the next fault.
        ctrl.ena_detect = 1'b1;
        ctrl.ena_faulty = 1'b1;
        ctrl.inject     = (k_q == t_q);
        if (k_q != t_q && !any_diff) begin
          fin  = 1'b1;
          fcls = FC_SILENT;
        end
      end
      S_G: begin
        ctrl.ena_golden = 1'b1;
        if (cut_out != outf_q) begin
          fin  = 1'b1;
          fcls = FC_FAILURE;
        end
      end
      S_END: begin
        ctrl.ena_detect = 1'b1;
        fin  = 1'b1;
        fcls = any_diff ? FC_LATENT : FC_SILENT;
      end
      S_ADV_LOAD: ctrl.load_state = 1'b1;
      S_ADV_RUN:  ctrl.ena_golden = 1'b1;
      S_ADV_SAVE: ctrl.save_state = 1'b1;
      default: ;
    endcase
  end

  assign stim_addr = (st == S_ADV_RUN) ? t_q : k_q;
  assign res_we    = fin;
  assign res_addr  = addr_q;
  assign res_data  = fcls;
  assign busy      = (st != S_IDLE) && (st != S_DONE);
  assign done      = (st == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      t_q       <= '0;
      k_q       <= '0;
      i_q       <= '0;
      addr_q    <= '0;
      outf_q    <= '0;
      n_failure <= '0;
      n_latent  <= '0;
      n_silent  <= '0;
      cycles    <= '0;
    end else begin
      if (busy) cycles <= cycles + 32'd1;
      unique case (st)
        S_IDLE: if (start) begin
          t_q <= '0; i_q <= '0; addr_q <= '0;
          n_failure <= '0; n_latent <= '0; n_silent <= '0;
          cycles <= '0;
          st <= S_LOAD;
        end
        S_LOAD: begin
          k_q <= t_q;
          st  <= S_F;
        end
        S_F: if (!fin) begin
          outf_q <= cut_out;
          st     <= S_G;
        end
        S_G: if (!fin) begin
          if (32'(k_q) == NCYC - 1) st <= S_END;
          else begin
            k_q <= k_q + 1'b1;
            st  <= S_F;
          end
        end
        S_ADV_LOAD: st <= S_ADV_RUN;
        S_ADV_RUN:  st <= S_ADV_SAVE;
        S_ADV_SAVE: begin
          t_q <= t_q + 1'b1;
          st  <= S_LOAD;
        end
        default: ;
      endcase
      if (fin) begin
        unique case (fcls)
          FC_FAILURE: n_failure <= n_failure + 1'b1;
          FC_LATENT:  n_latent  <= n_latent + 1'b1;
          default:    n_silent  <= n_silent + 1'b1;
        endcase
        addr_q <= addr_q + 1'b1;
        if (32'(i_q) == NFF - 1) begin
          i_q <= '0;
          st  <= (32'(t_q) == NCYC - 1) ? S_DONE : S_ADV_LOAD;
        end else begin
          i_q <= i_q + 1'b1;
          st  <= S_LOAD;
        end
      end
    end
  end

  // The two copies never capture in the same clock, and a result is only
  // written while a campaign runs.
  a_one_copy: assert property (@(posedge clk) disable iff (!rst_n)
                               !(ctrl.ena_faulty && ctrl.ena_golden));
  a_we_busy:  assert property (@(posedge clk) disable iff (!rst_n)
                               res_we |-> busy);

endmodule
