// Test of the state-scan flip-flop array at 7 flip-flops: shifts whole
// states in through the scan chain (tail bit first) and checks they arrive
// in place after NFF clocks, checks the normal capture and the clear, and,
// with random controls, compares state and scan_out each clock with a
// reference model.
module tb_ss_state_array;

  localparam int unsigned NFF = 7;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           clr, ena, scan_en, scan_in, scan_out;
  logic [NFF-1:0] next_state, state;

  ss_state_array #(.NFF(NFF)) dut (.*);

  logic [NFF-1:0] r_ff;
  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic step(input logic c, input logic e, input logic se, input logic si,
                      input logic [NFF-1:0] d);
    clr = c; ena = e; scan_en = se; scan_in = si; next_state = d;
    @(posedge clk);
    if (c) r_ff = '0;
    else if (se) r_ff = {r_ff[NFF-2:0], si};
    else if (e) r_ff = d;
    #1;
    check(state == r_ff, $sformatf("state %b expected %b", state, r_ff));
    check(scan_out == r_ff[NFF-1], "scan_out");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NFF-1:0] w;
    r_ff = '0;
    clr = 0; ena = 0; scan_en = 0; scan_in = 0; next_state = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 20; n++) begin
      w = NFF'($urandom());
      for (int j = 0; j < int'(NFF); j++) step(0, 1, 1, w[NFF-1-j], ~w);  // ena ignored while scanning
      check(state == w, $sformatf("scanned state %b expected %b", state, w));
      step(0, 1, 0, 0, ~w);
      check(state == ~w, "capture after scan");
      step(1, 1, 1, 1, w);
      check(state == '0, "clear has priority");
    end
    for (int n = 0; n < 2000; n++)
      step(($urandom() % 8) == 0, 1'($urandom()), 1'($urandom()), 1'($urandom()), NFF'($urandom()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
