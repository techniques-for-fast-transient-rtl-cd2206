// Full-size test of the state-scan configuration (b14 sizes, 34,400 faults):
// the emulator built with TECHNIQUE = TECH_STATE_SCAN, which uses
// ss_controller and ss_state_array, runs one campaign on the synthetic
// circuit of synth_cut_pkg. The testbench plays the host: it computes the
// golden states, stores the 34,400 faulty states (golden state after cycle t
// with flip-flop i inverted) in the fault-state memory, and starts the run.
//
// Checks every stored code (failure, latent, silent) against a reference
// fault simulation, the three totals, and the exact clock count: NCYC + 2
// for the golden run, then per fault 1 + NFF clocks to fetch and insert the
// state, one clock per emulated cycle up to a failure, and one more for the
// final check when no failure occurred. Counts the mechanisms that must
// occur: scan clocks, golden-output writes and each class.
module tb_ss_controller;
  import fault_emu_pkg::*;
  import synth_cut_pkg::*;

  localparam int unsigned CAW  = $clog2(NCYC);
  localparam int unsigned RAW  = $clog2(NFAULT);
  localparam int unsigned CNTW = $clog2(NFAULT + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            host_stim_we = 1'b0;
  logic [CAW-1:0]  host_stim_addr = '0;
  logic [NIN-1:0]  host_stim_data = '0;
  logic            host_fst_we = 1'b0;
  logic [RAW-1:0]  host_fst_addr = '0;
  logic [NFF-1:0]  host_fst_data = '0;
  logic            start = 1'b0;
  logic            busy, done;
  logic [RAW-1:0]  host_res_addr = '0;
  logic [1:0]      host_res_data;
  logic [CNTW-1:0] n_failure, n_latent, n_silent;
  logic [31:0]     cycles;
  logic [NIN-1:0]  cut_in;
  logic [NFF-1:0]  cut_state, cut_next;
  logic [NOUT-1:0] cut_out;

  autonomous_emulator #(.TECHNIQUE(TECH_STATE_SCAN)) dut (.*);

  always_comb begin
    cut_next = f_next(cut_state, cut_in);
    cut_out  = f_out(cut_state, cut_in);
  end

  logic [NIN-1:0] vec [NCYC];
  logic [NFF-1:0] gold [NCYC + 1];
  logic [1:0]     ref_class [NFAULT];
  int unsigned    ref_fail, ref_lat, ref_sil;
  longint         ref_cycles;

  task automatic reference();
    int fk;
    logic [1:0] c;
    gold[0] = '0;
    for (int k = 0; k < int'(NCYC); k++) gold[k + 1] = f_next(gold[k], vec[k]);
    ref_fail = 0; ref_lat = 0; ref_sil = 0;
    ref_cycles = longint'(NCYC) + 2;
    for (int t = 0; t < int'(NCYC); t++)
      for (int i = 0; i < int'(NFF); i++) begin
        c = grade(gold, vec, i, t, fk);
        ref_class[t * NFF + i] = c;
        ref_cycles += longint'(1 + NFF);
        if (c == 2'd3) begin
          ref_fail++;
          ref_cycles += longint'(fk - t);
        end else begin
          ref_cycles += longint'(NCYC - t);   // NCYC-1-t emulated cycles + final check
          if (c == 2'd2) ref_lat++; else ref_sil++;
        end
      end
  endtask

  int unsigned seen_gout, seen_scan, seen_fail, seen_lat, seen_sil;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_ss.u_ctrl.gout_we) seen_gout++;
    if (dut.g_ss.u_ctrl.scan_en) seen_scan++;
    if (dut.g_ss.u_ctrl.res_we && dut.g_ss.u_ctrl.res_data == FC_FAILURE) seen_fail++;
    if (dut.g_ss.u_ctrl.res_we && dut.g_ss.u_ctrl.res_data == FC_LATENT) seen_lat++;
    if (dut.g_ss.u_ctrl.res_we && dut.g_ss.u_ctrl.res_data == FC_SILENT) seen_sil++;
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
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned mism;
    void'($urandom(32'd14));
    for (int k = 0; k < int'(NCYC); k++) vec[k] = $urandom();
    seen_gout = 0; seen_scan = 0; seen_fail = 0; seen_lat = 0; seen_sil = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int k = 0; k < int'(NCYC); k++) begin
      @(posedge clk);
      host_stim_we   <= 1'b1;
      host_stim_addr <= CAW'(k);
      host_stim_data <= vec[k];
    end
    @(posedge clk);
    host_stim_we <= 1'b0;
    reference();
    // host stores the faulty states
    for (int t = 0; t < int'(NCYC); t++)
      for (int i = 0; i < int'(NFF); i++) begin
        @(posedge clk);
        host_fst_we   <= 1'b1;
        host_fst_addr <= RAW'(t * NFF + i);
        host_fst_data <= gold[t + 1] ^ (NFF'(1) << i);
      end
    @(posedge clk);
    host_fst_we <= 1'b0;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    @(posedge clk);
    mism = 0;
    for (int a = 0; a < int'(NFAULT); a++) begin
      host_res_addr <= RAW'(a);
      @(posedge clk);
      #1;
      if (host_res_data != ref_class[a]) begin
        mism++;
        if (mism <= 5) $display("fault %0d: got %0d expected %0d", a, host_res_data, ref_class[a]);
      end
    end
    check(mism == 0, $sformatf("%0d classification codes differ", mism));
    check(n_failure == CNTW'(ref_fail), $sformatf("failures %0d expected %0d", n_failure, ref_fail));
    check(n_latent == CNTW'(ref_lat), $sformatf("latent %0d expected %0d", n_latent, ref_lat));
    check(n_silent == CNTW'(ref_sil), $sformatf("silent %0d expected %0d", n_silent, ref_sil));
    check(longint'(cycles) == ref_cycles, $sformatf("cycles %0d expected %0d", cycles, ref_cycles));
    check(seen_gout == NCYC, $sformatf("golden-output writes %0d expected %0d", seen_gout, NCYC));
    check(seen_scan == NFAULT * NFF, $sformatf("scan clocks %0d expected %0d", seen_scan, NFAULT * NFF));
    check(seen_fail > 0, "no failure seen");
    check(seen_lat > 0, "no latent fault seen");
    check(seen_sil > 0, "no silent fault seen");
    $display("state-scan: %0d faults: failure %0d latent %0d silent %0d; %0d clocks, %0.2f clocks/fault, %0.3f us/fault at 25 MHz",
             NFAULT, n_failure, n_latent, n_silent, cycles, real'(cycles) / NFAULT, real'(cycles) / NFAULT / 25.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
