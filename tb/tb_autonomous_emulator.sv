// End-to-end test of the autonomous emulator at its default size
// (215 flip-flops, 32 inputs, 54 outputs, 160 vectors, 34,400 faults).
//
// The circuit under test is a synthetic sequential circuit of that size,
// described here by two functions (next state and outputs) and wired to the
// emulator's cut_* ports. Its flip-flops fall in four groups by index mod 4:
//   0: reloaded from the inputs every cycle (faults vanish or show up),
//   1: copy group 0 when an input bit is set, else hold,
//   2: accumulate group 1 under two input bits (faults here stay: latent),
//   3: copy group 0 under an input bit, else hold; these drive the outputs.
// The output j is (s[4j] & x[j]) ^ s[(4j+3) mod NFF].
//
// The testbench loads random vectors, runs one full campaign, and compares
// with a reference fault simulation written directly from the functions:
//   - every classification code in the result memory,
//   - the three class totals,
//   - the clock count of the campaign (1 load clock per fault, 2 clocks per
//     emulated cycle, 1 clock for the final check, 3 clocks per advance of
//     the saved state).
// It also counts how often each mechanism happened (failure, latent, early
// stop on a vanished effect, saved-state advance, bit-flip injection) and
// fails if one never did.
module tb_autonomous_emulator;
  import fault_emu_pkg::*;

  localparam int unsigned NFF    = 215;
  localparam int unsigned NIN    = 32;
  localparam int unsigned NOUT   = 54;
  localparam int unsigned NCYC   = 160;
  localparam int unsigned NFAULT = NFF * NCYC;
  localparam int unsigned CAW    = $clog2(NCYC);
  localparam int unsigned RAW    = $clog2(NFAULT);
  localparam int unsigned CNTW   = $clog2(NFAULT + 1);
  localparam int unsigned REP    = (NFF + NIN - 1) / NIN;
  localparam int WATCHDOG        = 20_000_000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            host_stim_we = 1'b0;
  logic [CAW-1:0]  host_stim_addr = '0;
  logic [NIN-1:0]  host_stim_data = '0;
  logic            start = 1'b0;
  logic            busy, done;
  logic [RAW-1:0]  host_res_addr = '0;
  logic [1:0]      host_res_data;
  logic [CNTW-1:0] n_failure, n_latent, n_silent;
  logic [31:0]     cycles;
  logic [NIN-1:0]  cut_in;
  logic [NFF-1:0]  cut_state, cut_next;
  logic [NOUT-1:0] cut_out;

  logic            host_fst_we = 1'b0;
  logic [RAW-1:0]  host_fst_addr = '0;
  logic [NFF-1:0]  host_fst_data = '0;

  autonomous_emulator dut (.*);

  // ---------------- synthetic circuit under test ----------------
  logic [NFF-1:0] m0, m1, m2, m3;
  initial begin
    for (int i = 0; i < int'(NFF); i++) begin
      m0[i] = (i % 4 == 0); m1[i] = (i % 4 == 1);
      m2[i] = (i % 4 == 2); m3[i] = (i % 4 == 3);
    end
  end

  function automatic logic [NFF-1:0] rep(input logic [NIN-1:0] x);
    return NFF'({REP{x}});
  endfunction

  function automatic logic [NFF-1:0] f_next(input logic [NFF-1:0] s, input logic [NIN-1:0] x);
    logic [NFF-1:0] xa, xb, s1, s2, s3;
    xa = rep(x);
    xb = rep((x >> 7) | (x << (NIN - 7)));
    s1 = s << 1;
    s2 = s << 2;
    s3 = s << 3;
    return (m0 & (xa ^ xb))
         | (m1 & ((xa & s1) | (~xa & s)))
         | (m2 & (s ^ (xa & xb & s1)))
         | (m3 & ((xb & s3) | (~xb & s)));
  endfunction

  function automatic logic [NOUT-1:0] f_out(input logic [NFF-1:0] s, input logic [NIN-1:0] x);
    logic [NOUT-1:0] o;
    for (int j = 0; j < int'(NOUT); j++)
      o[j] = (s[(4 * j) % NFF] & x[j % NIN]) ^ s[(4 * j + 3) % NFF];
    return o;
  endfunction

  always_comb begin
    cut_next = f_next(cut_state, cut_in);
    cut_out  = f_out(cut_state, cut_in);
  end

  // ---------------- reference fault simulation ----------------
  logic [NIN-1:0] vec [NCYC];
  logic [NFF-1:0] gold [NCYC + 1];
  logic [1:0]     ref_class [NFAULT];
  int unsigned    ref_fail, ref_lat, ref_sil, ref_early;
  longint         ref_cycles;

  task automatic reference();
    logic [NFF-1:0] f;
    int unsigned cyc;
    logic [1:0] c;
    gold[0] = '0;
    for (int k = 0; k < int'(NCYC); k++) gold[k + 1] = f_next(gold[k], vec[k]);
    ref_fail = 0; ref_lat = 0; ref_sil = 0; ref_early = 0;
    ref_cycles = 3 * longint'(NCYC - 1);
    for (int t = 0; t < int'(NCYC); t++) begin
      for (int i = 0; i < int'(NFF); i++) begin
        f = gold[t + 1];
        f[i] = ~f[i];
        cyc = 3;                          // load, faulty and golden phase of cycle t
        c = 2'(FC_NONE);
        for (int k = t + 1; k < int'(NCYC); k++) begin
          cyc++;                          // faulty phase, checks the states
          if (f == gold[k]) begin c = 2'(FC_SILENT); ref_early++; break; end
          cyc++;                          // golden phase, checks the outputs
          if (f_out(f, vec[k]) != f_out(gold[k], vec[k])) begin c = 2'(FC_FAILURE); break; end
          f = f_next(f, vec[k]);
        end
        if (c == 2'(FC_NONE)) begin
          cyc++;                          // final state check
          c = (f != gold[NCYC]) ? 2'(FC_LATENT) : 2'(FC_SILENT);
        end
        ref_class[t * NFF + i] = c;
        ref_cycles += longint'(cyc);
        case (c)
          2'(FC_FAILURE): ref_fail++;
          2'(FC_LATENT):  ref_lat++;
          default:        ref_sil++;
        endcase
      end
    end
  endtask

  // ---------------- mechanism counters (observed on the design) ----------------
  int unsigned seen_fail, seen_lat, seen_early, seen_adv, seen_inject;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_tm.u_ctrl.res_we && dut.g_tm.u_ctrl.res_data == FC_FAILURE) seen_fail++;
    if (dut.g_tm.u_ctrl.res_we && dut.g_tm.u_ctrl.res_data == FC_LATENT)  seen_lat++;
    if (dut.g_tm.u_ctrl.res_we && dut.g_tm.u_ctrl.res_data == FC_SILENT && dut.g_tm.u_ctrl.ctrl.ena_faulty)
      seen_early++;
    if (dut.g_tm.u_ctrl.ctrl.save_state) seen_adv++;
    if (dut.g_tm.u_ctrl.ctrl.inject) seen_inject++;
  end

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned mism;
    void'($urandom(32'd14));
    for (int k = 0; k < int'(NCYC); k++) vec[k] = $urandom();
    seen_fail = 0; seen_lat = 0; seen_early = 0; seen_adv = 0; seen_inject = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // host loads the vectors
    for (int k = 0; k < int'(NCYC); k++) begin
      @(posedge clk);
      host_stim_we   <= 1'b1;
      host_stim_addr <= CAW'(k);
      host_stim_data <= vec[k];
    end
    @(posedge clk);
    host_stim_we <= 1'b0;
    reference();
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    @(posedge clk);
    // host reads the classification
    mism = 0;
    for (int a = 0; a < int'(NFAULT); a++) begin
      host_res_addr <= RAW'(a);
      @(posedge clk);
      #1;
      if (host_res_data != ref_class[a]) begin
        mism++;
        if (mism <= 5) $display("fault %0d (ff %0d, cycle %0d): got %0d expected %0d",
                                a, a % NFF, a / NFF, host_res_data, ref_class[a]);
      end
    end
    check(mism == 0, $sformatf("%0d classification codes differ", mism));
    check(n_failure == CNTW'(ref_fail), $sformatf("failures %0d expected %0d", n_failure, ref_fail));
    check(n_latent  == CNTW'(ref_lat),  $sformatf("latent %0d expected %0d", n_latent, ref_lat));
    check(n_silent  == CNTW'(ref_sil),  $sformatf("silent %0d expected %0d", n_silent, ref_sil));
    check(longint'(cycles) == ref_cycles, $sformatf("cycles %0d expected %0d", cycles, ref_cycles));
    check(seen_fail > 0,  "no failure fault was seen");
    check(seen_lat > 0,   "no latent fault was seen");
    check(seen_early > 0, "no early stop on a vanished effect was seen");
    check(seen_early == ref_early, $sformatf("early stops %0d expected %0d", seen_early, ref_early));
    check(seen_adv == NCYC - 1, $sformatf("saved-state advances %0d expected %0d", seen_adv, NCYC - 1));
    check(seen_inject == NFAULT, $sformatf("injections %0d expected %0d", seen_inject, NFAULT));
    $display("faults %0d: failure %0d latent %0d silent %0d (early stop %0d)",
             NFAULT, n_failure, n_latent, n_silent, seen_early);
    $display("campaign clocks %0d, %0.2f clocks/fault, %0.3f us/fault at 25 MHz",
             cycles, real'(cycles) / NFAULT, real'(cycles) / NFAULT / 25.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
