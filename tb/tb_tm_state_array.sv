// Test of the instrumented state register (an array of time-multiplexed
// cells) at 9 flip-flops.
//
// Checks that a lone 1 shifted into the mask chain walks from cell 0 to the
// tail, that injection flips exactly the selected flip-flop, that the copies
// are reloaded and saved as a whole, and that any_diff reports a difference
// in any single position. A random phase compares state, scan_out and
// any_diff each clock with a vector reference model.
module tb_tm_state_array;
  import fault_emu_pkg::*;

  localparam int unsigned NFF = 9;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  tm_ctrl_t       ctrl;
  logic [NFF-1:0] next_state, state;
  logic           scan_out, any_diff;

  tm_state_array #(.NFF(NFF)) dut (.*);

  logic [NFF-1:0] r_mask, r_faulty, r_golden, r_state;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic compare(input string where);
    check(state == (ctrl.ena_faulty ? r_faulty : r_golden), {where, ": state"});
    check(scan_out == r_mask[NFF-1], {where, ": scan_out"});
    check(any_diff == (ctrl.ena_detect && (r_faulty != r_golden)), {where, ": any_diff"});
  endtask

  task automatic step(input tm_ctrl_t c, input logic [NFF-1:0] d);
    logic [NFF-1:0] nf, ng;
    ctrl = c; next_state = d;
    #1 compare("before edge");
    nf = c.ena_faulty ? (d ^ (r_mask & {NFF{c.inject}})) : (c.load_state ? r_state : r_faulty);
    ng = c.ena_golden ? d : (c.load_state ? r_state : r_golden);
    @(posedge clk);
    if (c.mask_shift) r_mask = {r_mask[NFF-2:0], c.scan_in};
    if (c.save_state) r_state = r_golden;
    r_faulty = nf; r_golden = ng;
    #1 compare("after edge");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tm_ctrl_t c;
    logic [NFF-1:0] d;
    ctrl = '0; next_state = '0;
    r_mask = '0; r_faulty = '0; r_golden = '0; r_state = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // walk a lone 1 down the chain; at each position inject into an all-ones word
    for (int i = 0; i < int'(NFF); i++) begin
      c = '0; c.mask_shift = 1; c.scan_in = (i == 0); step(c, '0);
      c = '0; c.ena_faulty = 1; c.inject = 1; c.ena_detect = 1; step(c, '1);
      c = '0; c.ena_faulty = 1; ctrl = c; #1;
      check(state == ~(NFF'(1) << i), $sformatf("flip of flip-flop %0d only", i));
      c = '0; c.ena_golden = 1; step(c, '1);
      c = '0; c.ena_detect = 1; ctrl = c; #1;
      check(any_diff, $sformatf("difference at %0d seen", i));
    end
    c = '0; c.mask_shift = 1; step(c, '0);
    check(r_mask == '0 && !scan_out, "lone 1 left the chain");
    // random
    for (int n = 0; n < 2000; n++) begin
      c = tm_ctrl_t'($urandom());
      if (c.ena_faulty && c.ena_golden) c.ena_golden = 0;
      d = NFF'($urandom());
      step(c, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
