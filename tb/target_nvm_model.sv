// target_nvm_model -- behavioural model of the external target NVM used by
// the system testbench. A word array with a request/acknowledge port: each
// request is acknowledged after 1 + a random 0..MAX_WAIT clocks with a
// one-clock 'ack'; a write is done and read data is valid with that ack.
// Like a real NVM it has no reset: the content survives a power cycle.
module target_nvm_model #(
  parameter int AW       = 6,
  parameter int MAX_WAIT = 3
) (
  input  logic          clk,
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic          ack,
  output logic [31:0]   rdata
);
  logic [31:0] mem [2**AW];
  int wait_q = 0;

  initial ack = 1'b0;

  always @(posedge clk) begin
    ack <= 1'b0;
    if (req && !ack) begin
      if (wait_q == 0) begin
        ack <= 1'b1;
        if (we) mem[addr] <= wdata;
        else    rdata     <= mem[addr];
        wait_q <= $urandom_range(0, MAX_WAIT);
      end else begin
        wait_q <= wait_q - 1;
      end
    end
  end
endmodule
