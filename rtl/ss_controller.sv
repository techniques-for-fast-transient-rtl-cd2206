// Emulation controller for the state-scan technique.
//
// The faulty states are prepared outside and stored, one per fault, in the
// fault-state memory: entry t*NFF + i is the circuit state at the start of
// cycle t+1 with flip-flop i inverted, i.e. the state just after a bit-flip
// at the end of cycle t. The campaign is:
//
//   golden run : clear the circuit, run all NCYC vectors, store the outputs
//                in the golden-output memory and keep the final state
//   per fault  : FETCH  read the stored faulty state (1 clock)
//                SCAN   shift it into the circuit's scan chain (NFF clocks)
//                RUN    emulate cycles t+1 .. NCYC-1, one per clock; an output
//                       differing from the stored golden one -> FAILURE
//                END    final state differs from the golden final state ->
//                       LATENT, else SILENT
//
// The scan chain through the circuit flip-flops, the stored faulty states and
// the stored stimuli and outputs follow the published technique; the golden
// run inside the controller, the parallel final-state comparison, the memory
// layout and the schedule are this design's choices.
//
// Timing: golden run NCYC + 2 clocks; a fault at cycle t costs 1 + NFF clocks
// for insertion, one clock per emulated cycle until a failure, and one more
// clock for END when no failure was seen. The fault-state memory has a
// one-clock read latency: fst_addr is the fault number held during FETCH.
module ss_controller
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
  output logic            scan_en,
  output logic            scan_in,
  input  logic [NFF-1:0]  cut_state,
  // memories and circuit outputs
  output logic [CAW-1:0]  stim_addr,
  output logic            gout_we,
  input  logic [NOUT-1:0] gout_rdata,
  input  logic [NOUT-1:0] cut_out,
  output logic [RAW-1:0]  fst_addr,
  input  logic [NFF-1:0]  fst_rdata,
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
    S_IDLE, S_GCLR, S_GRUN, S_GEND, S_FETCH, S_SCAN, S_RUN, S_END, S_DONE
  } state_t;

  state_t         st;
  logic [CAW-1:0] t_q, k_q;
  logic [FFW-1:0] i_q, j_q;   // flip-flop hit; scan position
  logic [RAW-1:0] addr_q;
  logic [NFF-1:0] gfinal_q;   // golden final state
  logic           fin;
  fault_class_t   fcls;

  always_comb begin
    clr     = (st == S_GCLR);
    ena     = (st == S_GRUN) || (st == S_RUN);
    scan_en = (st == S_SCAN);
    scan_in = fst_rdata[NFF - 1 - 32'(j_q)];
    gout_we = (st == S_GRUN);
    fin     = 1'b0;
    fcls    = FC_NONE;
    if (st == S_RUN && cut_out != gout_rdata) begin
      fin  = 1'b1;
      fcls = FC_FAILURE;
    end else if (st == S_END) begin
      fin  = 1'b1;
      fcls = (cut_state != gfinal_q) ? FC_LATENT : FC_SILENT;
    end
  end

  assign stim_addr = k_q;
  assign fst_addr  = addr_q;
  assign res_we    = fin;
  assign res_addr  = addr_q;
  assign res_data  = fcls;
  assign busy      = (st != S_IDLE) && (st != S_DONE);
  assign done      = (st == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      t_q <= '0; k_q <= '0; i_q <= '0; j_q <= '0; addr_q <= '0;
      gfinal_q <= '0;
      n_failure <= '0; n_latent <= '0; n_silent <= '0;
      cycles <= '0;
    end else begin
      if (busy) cycles <= cycles + 32'd1;
      unique case (st)
        S_IDLE: if (start) begin
          t_q <= '0; i_q <= '0; j_q <= '0; addr_q <= '0; k_q <= '0;
          n_failure <= '0; n_latent <= '0; n_silent <= '0;
          cycles <= '0;
          st <= S_GCLR;
        end
        S_GCLR: st <= S_GRUN;
        S_GRUN: begin
          if (32'(k_q) == NCYC - 1) st <= S_GEND;
          else k_q <= k_q + 1'b1;
        end
        S_GEND: begin
          gfinal_q <= cut_state;
          st       <= S_FETCH;
        end
        S_FETCH: begin
          j_q <= '0;
          st  <= S_SCAN;
        end
        S_SCAN: begin
          if (32'(j_q) == NFF - 1) begin
            k_q <= t_q + 1'b1;
            st  <= (32'(t_q) == NCYC - 1) ? S_END : S_RUN;
          end else j_q <= j_q + 1'b1;
        end
        S_RUN: if (!fin) begin
          if (32'(k_q) == NCYC - 1) st <= S_END;
          else k_q <= k_q + 1'b1;
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
          t_q <= t_q + 1'b1;
          st  <= (32'(t_q) == NCYC - 1) ? S_DONE : S_FETCH;
        end else begin
          i_q <= i_q + 1'b1;
          st  <= S_FETCH;
        end
      end
    end
  end

  a_we_busy: assert property (@(posedge clk) disable iff (!rst_n) res_we |-> busy);

endmodule
