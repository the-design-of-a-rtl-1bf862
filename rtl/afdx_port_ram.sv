// afdx_port_ram: local storage memory of one receiving port.
//
// A single-port synchronous RAM, DEPTH words of WIDTH bits (2K bytes by
// default, the size the paper gives; one maximum-size AFDX frame of 1518
// bytes plus 8 bytes of preamble and SFD needs 1526). One address serves both
// writing (while the frame is received) and reading (while it is checked and
// forwarded); the switch controller never does both at once on one port.
//
// Timing: a write happens on the clock edge where we is high; a read returns
// the word at addr on rdata one clock later (read-first on a write cycle).
// Written as an array so that an FPGA or ASIC flow can map it onto a block
// RAM; the contents are not reset.
module afdx_port_ram #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule
