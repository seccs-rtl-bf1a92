// arbiter_puf -- behavioural model of an arbiter PUF (not a circuit).
//
// A real arbiter PUF races two edges through a chain of N switch stages,
// each stage crossing or passing the two paths according to one challenge
// bit; an arbiter latch at the end says which edge came first. The outcome
// depends on manufacturing delay mismatch and cannot be written as logic, so
// this model uses the standard additive delay model instead:
//   delta = w_N + sum_{i=0}^{N-1} w_i * phi_i,  phi_i = prod_{j>=i} (1 - 2 c_j)
//   resp  = (delta > 0)
// The stage weights w_i stand for the delay mismatches of one chip and are
// drawn from a hash of the DEVICE_SEED parameter: two seeds are two chips.
// The model is noise-free, so a challenge always gets the same answer.
//
// Interface: 'challenge' is sampled when 'req' is high; 'resp' and a one-clock
// 'resp_valid' pulse follow one clock later. The one-bit response per
// challenge matches a single arbiter chain; N = 64 stages is an assumed size.
module arbiter_puf #(
  parameter int unsigned N           = 64,
  parameter logic [31:0] DEVICE_SEED = 32'h1234_5678
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req,
  input  logic [N-1:0] challenge,
  output logic         resp,
  output logic         resp_valid
);

  // 32-bit integer mixing function used to draw the stage weights.
  function automatic logic [31:0] mix(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h85eb_ca6b;
    h = h ^ (h >> 13);
    h = h * 32'hc2b2_ae35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Signed delay difference of stage i (i = N: the arbiter offset).
  function automatic logic signed [15:0] weight(input int unsigned i);
    logic [31:0] h;
    h = mix(DEVICE_SEED ^ (32'(i) * 32'h9e37_79b9));
    return signed'(h[31:16] ^ h[15:0]);
  endfunction

  logic signed [31:0] delta;

  always_comb begin
    logic phi_neg;   // phi_i == -1
    delta   = 32'(weight(N));
    phi_neg = 1'b0;
    for (int i = int'(N) - 1; i >= 0; i--) begin
      phi_neg = phi_neg ^ challenge[i];
      if (phi_neg) delta = delta - 32'(weight(i));
      else         delta = delta + 32'(weight(i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp       <= 1'b0;
      resp_valid <= 1'b0;
    end else begin
      resp_valid <= req;
      if (req) resp <= (delta > 0);
    end
  end

endmodule
