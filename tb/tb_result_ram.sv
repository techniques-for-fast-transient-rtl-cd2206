// Test of the classification memory at its default depth (34,400 entries of
// 2 bits): fills it with random codes, reads every entry back and checks the
// one-clock read latency, then rewrites a few entries.
module tb_result_ram;

  localparam int unsigned DEPTH = 34400, WIDTH = 2, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic             we = 1'b0;
  logic [AW-1:0]    waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;

  result_ram dut (.*);

  logic [WIDTH-1:0] ref_mem [DEPTH];
  int unsigned checks = 0, failures = 0;
  int unsigned mism = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(input int a);
    @(negedge clk);
    raddr = AW'(a);
    @(posedge clk);
    #1;
    checks++;
    if (rdata !== ref_mem[a]) begin
      failures++;
      if (failures <= 10) $display("FAIL: entry %0d read %0d expected %0d", a, rdata, ref_mem[a]);
    end
  endtask

  initial begin
    for (int a = 0; a < int'(DEPTH); a++) begin
      ref_mem[a] = WIDTH'($urandom());
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = ref_mem[a];
    end
    @(negedge clk);
    we = 1'b0;
    for (int a = 0; a < int'(DEPTH); a++) read_check(a);
    // one-clock latency: the address changes, rdata keeps the old entry until the edge
    @(negedge clk);
    raddr = AW'(10);
    @(posedge clk);
    #1;
    raddr = AW'(11);
    #1;
    checks++;
    if (rdata !== ref_mem[10]) begin
      failures++;
      $display("FAIL: read data changed before the clock edge");
    end
    for (int n = 0; n < 50; n++) begin
      int a;
      a = int'($urandom_range(DEPTH - 1));
      ref_mem[a] = WIDTH'($urandom());
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = ref_mem[a];
      @(negedge clk);
      we = 1'b0;
      read_check(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
