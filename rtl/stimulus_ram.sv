// Stimulus memory: the testbench input vectors of the circuit under test.
//
// The host writes the NCYC input vectors once, before the campaign. During
// the campaign the emulation controller reads the vector of the emulated
// cycle every clock, for the faulty and the golden phase alike. Only inputs
// are kept: the golden outputs come from the golden copy running alongside,
// so no expected-output table is needed.
//
// Interface: one synchronous write port (we, waddr, wdata) and one
// combinational read port (raddr -> rdata), like an FPGA distributed RAM.
// The read timing and the port arrangement are this design's choices.
module stimulus_ram #(
  parameter int unsigned NIN  = 32,
  parameter int unsigned NCYC = 160,
  localparam int unsigned AW  = (NCYC > 1) ? $clog2(NCYC) : 1
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AW-1:0]  waddr,
  input  logic [NIN-1:0] wdata,
  input  logic [AW-1:0]  raddr,
  output logic [NIN-1:0] rdata
);

  logic [NIN-1:0] mem [NCYC];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < NCYC)) mem[waddr] <= wdata;
  end

  assign rdata = (32'(raddr) < NCYC) ? mem[raddr] : '0;

endmodule
