// Test of the time-multiplexed instrument cell.
//
// A directed part checks the behaviour named by the instrument: injection
// flips the captured value only where the mask is set, LoadState copies the
// saved state into both copies, SaveState saves the golden value, DataOut
// follows EnaFaulty and DetectadoN shows a difference only under EnaDetect.
// A random part then drives all controls and data for many clocks and
// compares every output with a reference model of the four flip-flops.
module tb_tm_cell;
  import fault_emu_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  tm_ctrl_t ctrl;
  logic scan_in, data_in, data_out, scan_out, detect;

  tm_cell dut (.*);

  // reference model
  logic r_mask, r_faulty, r_golden, r_state;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic model_step();
    logic nf, ng;
    nf = ctrl.ena_faulty ? (data_in ^ (r_mask & ctrl.inject)) : (ctrl.load_state ? r_state : r_faulty);
    ng = ctrl.ena_golden ? data_in : (ctrl.load_state ? r_state : r_golden);
    if (ctrl.mask_shift) r_mask = scan_in;
    if (ctrl.save_state) r_state = r_golden;
    r_faulty = nf;
    r_golden = ng;
  endtask

  task automatic compare(input string where);
    check(data_out == (ctrl.ena_faulty ? r_faulty : r_golden), {where, ": DataOut"});
    check(scan_out == r_mask, {where, ": ScanOut"});
    check(detect == ((r_faulty ^ r_golden) & ctrl.ena_detect), {where, ": DetectadoN"});
  endtask

  // apply one clock: controls set before the edge, model advanced with it
  task automatic step(input tm_ctrl_t c, input logic si, input logic di);
    ctrl = c; scan_in = si; data_in = di;
    #1 compare("before edge");
    @(posedge clk);
    model_step();
    #1 compare("after edge");
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tm_ctrl_t c;
    ctrl = '0; scan_in = 1'b0; data_in = 1'b0;
    r_mask = 0; r_faulty = 0; r_golden = 0; r_state = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    #1 compare("after reset");

    // golden and faulty capture 1 without a mask: no flip
    c = '0; c.ena_faulty = 1; c.inject = 1;
    step(c, 0, 1);
    check(dut.faulty_q == 1'b1, "no flip without mask");
    // set the mask, inject: FAULTY captures the inverse of DataIn
    c = '0; c.mask_shift = 1; step(c, 1, 0);
    c = '0; c.ena_faulty = 1; c.inject = 1; step(c, 0, 1);
    check(dut.faulty_q == 1'b0, "flip with mask and Inject");
    // same without Inject: no flip
    c = '0; c.ena_faulty = 1; step(c, 0, 1);
    check(dut.faulty_q == 1'b1, "no flip without Inject");
    // golden captures 1, detect shows no difference, then a difference
    c = '0; c.ena_golden = 1; step(c, 0, 1);
    c = '0; c.ena_detect = 1; step(c, 0, 0);
    check(detect == 1'b0, "equal copies, no detect");
    c = '0; c.ena_faulty = 1; c.ena_detect = 1; step(c, 0, 0);
    c = '0; c.ena_detect = 1; ctrl = c; #1;
    check(detect == 1'b1, "different copies, detect");
    c = '0; ctrl = c; #1;
    check(detect == 1'b0, "detect gated by EnaDetect");
    // save golden (1) into STATE, corrupt both, reload
    c = '0; c.save_state = 1; step(c, 0, 0);
    c = '0; c.ena_faulty = 1; step(c, 0, 0);
    c = '0; c.ena_golden = 1; step(c, 0, 0);
    c = '0; c.load_state = 1; step(c, 0, 0);
    check(dut.faulty_q == 1'b1 && dut.golden_q == 1'b1, "LoadState restores both copies");

    // random
    for (int n = 0; n < 1500; n++) begin
      c = tm_ctrl_t'($urandom());
      if (c.ena_faulty && c.ena_golden) c.ena_golden = 0;
      step(c, 1'($urandom()), 1'($urandom()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
