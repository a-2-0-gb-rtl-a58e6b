// msg_ram -- one message RAM of the decoder: DEPTH words of WIDTH bits, one
// synchronous write port and one synchronous read port.
//
// In the decoder each word holds the same message slot of all I processors
// side by side (I lanes of 4 bits); the paper combines the per-processor RAMs
// this way because all processors use the same addresses. Reading and writing
// the same address in one cycle returns the old word. The read data register
// holds its value while re is low. No reset: the decoder clears the contents
// by writing zeros after reset.
module msg_ram #(
  parameter int DEPTH = 512,
  parameter int WIDTH = 72,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
