// sdp_ram: simple dual-port RAM, one write port and one read port, both
// synchronous to clk. Read data appears the cycle after the address
// (registered output, as an UltraRAM or block RAM provides). A read of the
// address being written in the same cycle returns the old contents. The
// contents are not reset.
module sdp_ram #(
  parameter int W     = 32,
  parameter int DEPTH = 1024,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
