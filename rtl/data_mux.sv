// data_mux -- N-input word multiplexer.
//
// Used for the selectors the SECCS architecture draws as M1 and M2 in front
// of the MAC engine and the target NVM, and for M1 of the key generator,
// which chooses the PUF challenge between the fresh TRNG value (CSP) and the
// value read back from the key NVM (CLP). Purely combinational: dout is
// din[sel]; a select beyond N-1 gives zero.
module data_mux #(
  parameter int unsigned N = 2,
  parameter int unsigned W = 32,
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][W-1:0] din,
  input  logic [SW-1:0]       sel,
  output logic [W-1:0]        dout
);

  always_comb begin
    dout = '0;
    for (int i = 0; i < int'(N); i++)
      if (sel == SW'(i)) dout = din[i];
  end

endmodule
