// key_nvm -- behavioural model of the key generator's dedicated NVM.
//
// The key generator stores here the challenges it gives the PUF during the
// Context Storing Phase and reads them back during the Context Loading Phase.
// A real part would be a non-volatile macro of the target process; this model
// is a plain array with no reset, so its content survives a reset of the rest
// of the design, which is how a power cycle is shown in simulation.
//
// Interface: synchronous write ('we', 'addr', 'wdata' sampled on the clock
// edge) and synchronous read ('re' at one edge, 'rdata' valid after it).
// Depth and width are set by the key generator: one CHAL_W-bit challenge per
// key bit.
module key_nvm #(
  parameter int unsigned DEPTH = 208,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic             re,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    if (re) rdata <= mem[addr];
  end

endmodule
