// Test of the stimulus memory at its default size (160 x 32 bits): writes
// every vector, then reads them back in random order through the
// combinational read port, and checks that a write without we changes
// nothing.
module tb_stimulus_ram;

  localparam int unsigned NIN = 32, NCYC = 160, AW = $clog2(NCYC);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic           we = 1'b0;
  logic [AW-1:0]  waddr = '0, raddr = '0;
  logic [NIN-1:0] wdata = '0, rdata;

  stimulus_ram dut (.*);

  logic [NIN-1:0] ref_mem [NCYC];
  int unsigned checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < int'(NCYC); a++) begin
      ref_mem[a] = $urandom();
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = ref_mem[a];
    end
    @(negedge clk);
    we = 1'b0; waddr = 3; wdata = ~ref_mem[3];   // no write enable
    @(negedge clk);
    for (int n = 0; n < 400; n++) begin
      int a;
      a = (n < int'(NCYC)) ? n : int'($urandom_range(NCYC - 1));
      raddr = AW'(a);
      #1;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        if (failures <= 10) $display("FAIL: vector %0d read %h expected %h", a, rdata, ref_mem[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
