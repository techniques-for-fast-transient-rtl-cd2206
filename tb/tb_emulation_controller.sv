// Test of the emulation controller on a small campaign (3 flip-flops,
// 2 outputs, 8 vectors, 24 faults, repeated for several random input sets).
//
// The instrumented flip-flops are modelled here as plain vectors that obey
// the controls (faulty, golden, saved state, mask), and a 3-flip-flop circuit
// is described by two small functions. The controller must write the class
// of every fault, in fault order, equal to a reference fault simulation,
// reach the same totals, and spend exactly the clocks the schedule gives
// (1 per load, 2 per emulated cycle, 1 per final check, 3 per advance).
module tb_emulation_controller;
  import fault_emu_pkg::*;

  localparam int unsigned NFF = 3, NOUT = 2, NCYC = 8, NIN = 2;
  localparam int unsigned NFAULT = NFF * NCYC;
  localparam int unsigned CAW = $clog2(NCYC), RAW = $clog2(NFAULT), CNTW = $clog2(NFAULT + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            start = 1'b0;
  logic            busy, done;
  tm_ctrl_t        ctrl;
  logic            any_diff;
  logic [CAW-1:0]  stim_addr;
  logic [NOUT-1:0] cut_out;
  logic            res_we;
  logic [RAW-1:0]  res_addr;
  fault_class_t    res_data;
  logic [CNTW-1:0] n_failure, n_latent, n_silent;
  logic [31:0]     cycles;

  emulation_controller #(.NFF(NFF), .NOUT(NOUT), .NCYC(NCYC)) dut (.*);

  // small circuit under test
  function automatic logic [NFF-1:0] f_next(input logic [NFF-1:0] s, input logic [NIN-1:0] x);
    return {s[2] ^ (x[1] & s[1]), x[0] ? s[0] : s[1], x[0] ^ x[1]};
  endfunction
  function automatic logic [NOUT-1:0] f_out(input logic [NFF-1:0] s, input logic [NIN-1:0] x);
    return {s[1] & x[1], s[0] & x[0]};
  endfunction

  // behavioural instrumented flip-flops
  logic [NIN-1:0] vec [NCYC];
  logic [NFF-1:0] fq, gq, sq, mq, view;
  assign view     = ctrl.ena_faulty ? fq : gq;
  assign cut_out  = f_out(view, vec[stim_addr]);
  assign any_diff = ctrl.ena_detect && (fq != gq);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fq <= '0; gq <= '0; sq <= '0; mq <= '0;
    end else begin
      if (ctrl.ena_faulty)      fq <= f_next(view, vec[stim_addr]) ^ (mq & {NFF{ctrl.inject}});
      else if (ctrl.load_state) fq <= sq;
      if (ctrl.ena_golden)      gq <= f_next(view, vec[stim_addr]);
      else if (ctrl.load_state) gq <= sq;
      if (ctrl.save_state)      sq <= gq;
      if (ctrl.mask_shift)      mq <= {mq[NFF-2:0], ctrl.scan_in};
    end
  end

  // reference
  logic [1:0]  ref_class [NFAULT];
  int unsigned ref_fail, ref_lat, ref_sil, ref_cycles;
  task automatic reference();
    logic [NFF-1:0] gold [NCYC + 1];
    logic [NFF-1:0] f;
    logic [1:0] c;
    gold[0] = '0;
    for (int k = 0; k < int'(NCYC); k++) gold[k + 1] = f_next(gold[k], vec[k]);
    ref_fail = 0; ref_lat = 0; ref_sil = 0; ref_cycles = 3 * (NCYC - 1);
    for (int t = 0; t < int'(NCYC); t++)
      for (int i = 0; i < int'(NFF); i++) begin
        f = gold[t + 1];
        f[i] = ~f[i];
        ref_cycles += 3;
        c = 2'(FC_NONE);
        for (int k = t + 1; k < int'(NCYC); k++) begin
          ref_cycles++;
          if (f == gold[k]) begin c = 2'(FC_SILENT); break; end
          ref_cycles++;
          if (f_out(f, vec[k]) != f_out(gold[k], vec[k])) begin c = 2'(FC_FAILURE); break; end
          f = f_next(f, vec[k]);
        end
        if (c == 2'(FC_NONE)) begin
          ref_cycles++;
          c = (f != gold[NCYC]) ? 2'(FC_LATENT) : 2'(FC_SILENT);
        end
        ref_class[t * NFF + i] = c;
        if (c == 2'(FC_FAILURE)) ref_fail++;
        else if (c == 2'(FC_LATENT)) ref_lat++;
        else ref_sil++;
      end
  endtask

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  // every result write is checked as it happens
  int unsigned nwr;
  int unsigned cls_seen [4];
  always @(posedge clk) if (rst_n && res_we) begin
    check(32'(res_addr) == nwr, $sformatf("write %0d went to address %0d", nwr, res_addr));
    if (32'(res_addr) < NFAULT)
      check(2'(res_data) == ref_class[res_addr],
            $sformatf("fault %0d class %0d expected %0d", res_addr, res_data, ref_class[res_addr]));
    cls_seen[res_data]++;
    nwr++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cls_seen = '{default: 0};
    for (int run = 0; run < 6; run++) begin
      rst_n = 1'b0;
      for (int k = 0; k < int'(NCYC); k++) vec[k] = NIN'($urandom());
      reference();
      nwr = 0;
      repeat (2) @(posedge clk);
      rst_n = 1'b1;
      @(negedge clk);
      check(!busy && !done, "idle after reset");
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      check(busy, "busy after start");
      wait (done);
      @(negedge clk);
      check(nwr == NFAULT, $sformatf("%0d results written, expected %0d", nwr, NFAULT));
      check(n_failure == CNTW'(ref_fail) && n_latent == CNTW'(ref_lat) && n_silent == CNTW'(ref_sil),
            $sformatf("totals %0d/%0d/%0d expected %0d/%0d/%0d", n_failure, n_latent, n_silent,
                      ref_fail, ref_lat, ref_sil));
      check(cycles == ref_cycles, $sformatf("cycles %0d expected %0d", cycles, ref_cycles));
      check(!busy, "not busy when done");
    end
    check(cls_seen[FC_FAILURE] > 0 && cls_seen[FC_LATENT] > 0 && cls_seen[FC_SILENT] > 0,
          "all three classes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
