// Test of the mask-scan flip-flop array at 7 flip-flops: walks a lone 1
// through the mask chain and checks that injection flips exactly that
// flip-flop, that clear returns the state to zero, and, with random
// controls, compares state and scan_out each clock with a reference model.
module tb_ms_state_array;

  localparam int unsigned NFF = 7;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           clr, ena, inject, mask_shift, scan_in, scan_out;
  logic [NFF-1:0] next_state, state;

  ms_state_array #(.NFF(NFF)) dut (.*);

  logic [NFF-1:0] r_ff, r_mask;
  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic step(input logic c, input logic e, input logic inj, input logic sh,
                      input logic si, input logic [NFF-1:0] d);
    clr = c; ena = e; inject = inj; mask_shift = sh; scan_in = si; next_state = d;
    @(posedge clk);
    if (c) r_ff = '0;
    else if (e) r_ff = d ^ (r_mask & {NFF{inj}});
    if (sh) r_mask = {r_mask[NFF-2:0], si};
    #1;
    check(state == r_ff, $sformatf("state %b expected %b", state, r_ff));
    check(scan_out == r_mask[NFF-1], "scan_out");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    r_ff = '0; r_mask = '0;
    clr = 0; ena = 0; inject = 0; mask_shift = 0; scan_in = 0; next_state = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < int'(NFF); i++) begin
      step(1, 0, 0, 1, i == 0, '0);                  // clear + shift
      step(0, 1, 1, 0, 0, '1);                       // inject into all-ones
      check(state == ~(NFF'(1) << i), $sformatf("only flip-flop %0d flipped", i));
      step(0, 1, 0, 0, 0, '1);                       // no inject: no flip
      check(state == '1, "no flip without inject");
    end
    for (int n = 0; n < 2000; n++)
      step(($urandom() % 8) == 0, 1'($urandom()), 1'($urandom()), 1'($urandom()),
           1'($urandom()), NFF'($urandom()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
