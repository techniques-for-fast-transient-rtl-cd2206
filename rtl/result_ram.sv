// Fault classification memory: one code per single fault.
//
// The emulation controller writes the class of each fault (failure, latent or
// silent, see fault_emu_pkg) as soon as it is decided; the host reads the
// whole table after the campaign. With 2 bits per fault the 34,400 faults of
// the reference campaign take 68,800 bits, which is the size of the board
// memory the published system used for this technique. There it was an
// off-chip RAM; here it is an array with one write port and one synchronous
// read port. The memory is not cleared by reset, so the host should only read
// entries of a finished campaign.
//
// Timing: a write takes effect at the rising edge; rdata shows the entry at
// raddr one clock after raddr is presented.
module result_ram #(
  parameter int unsigned DEPTH = 34400,
  parameter int unsigned WIDTH = 2,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

endmodule
