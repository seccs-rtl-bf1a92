// key_generator -- PUF-based generator of the two session keys.
//
// For every key bit the generator needs one PUF challenge. During the Context
// Storing Phase (gen_csp) each challenge is a fresh value from the TRNG: it is
// written into the dedicated key NVM and, through multiplexer M1, applied to
// the PUF; the PUF's response bit becomes the key bit. During the Context
// Loading Phase (gen_clp) the same challenges are read back from the key NVM
// and sent through M1 to the PUF, which regenerates the same keys. Only
// challenges are ever stored, never keys.
//
// Key bit k (k = 0 .. SC_KEY_W+MAC_KEY_W-1) is the response to the challenge
// at key-NVM address k. Bits 0..SC_KEY_W-1 form the stream-cipher key
// (sc_key[k] = bit k), the rest the MAC key (mac_key[k] = bit SC_KEY_W+k).
// The TRNG, the key NVM, M1 and the PUF follow the key-generator figure; one
// response bit per challenge (a single arbiter chain), the bit-by-bit
// sequence and the address layout are this design's choices.
//
// Interface: gen_csp/gen_clp are one-clock requests, ignored while busy.
// TRNG: trng_req is held until trng_valid returns a challenge in trng_data.
// 'done' pulses when both keys are complete; sc_key/mac_key then stay valid
// (keys_valid high) until the next request or reset. A CSP takes 3 clocks
// per key bit plus the TRNG latency, a CLP exactly 3*NK+1 clocks from the
// request edge to done (NK = SC_KEY_W + MAC_KEY_W key bits).
module key_generator #(
  parameter int unsigned CHAL_W      = 64,
  parameter int unsigned SC_KEY_W    = 80,
  parameter int unsigned MAC_KEY_W   = 128,
  parameter logic [31:0] DEVICE_SEED = 32'h1234_5678
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 gen_csp,
  input  logic                 gen_clp,
  output logic                 trng_req,
  input  logic                 trng_valid,
  input  logic [CHAL_W-1:0]    trng_data,
  output logic                 busy,
  output logic                 done,
  output logic                 keys_valid,
  output logic [SC_KEY_W-1:0]  sc_key,
  output logic [MAC_KEY_W-1:0] mac_key
);

  localparam int unsigned NK = SC_KEY_W + MAC_KEY_W;
  localparam int unsigned AW = $clog2(NK);

  typedef enum logic [2:0] {
    S_IDLE, S_TRNG, S_NV_RD, S_NV_DATA, S_RESP
  } state_e;

  state_e          state_q;
  logic            from_nvm_q;   // CLP: challenges come from the key NVM
  logic [AW-1:0]   k_q;
  logic [NK-1:0]   key_q;
  logic            valid_q;

  logic              nvm_we, nvm_re;
  logic [CHAL_W-1:0] nvm_rdata, challenge;
  logic              puf_req, puf_resp, puf_resp_valid;

  // Key NVM holding one challenge per key bit.
  key_nvm #(.DEPTH(NK), .WIDTH(CHAL_W)) u_nvm (
    .clk   (clk),
    .we    (nvm_we),
    .re    (nvm_re),
    .addr  (k_q),
    .wdata (trng_data),
    .rdata (nvm_rdata)
  );

  // M1: fresh TRNG challenge (0) or stored challenge (1).
  data_mux #(.N(2), .W(CHAL_W)) u_m1 (
    .din  ({nvm_rdata, trng_data}),
    .sel  (from_nvm_q),
    .dout (challenge)
  );

  arbiter_puf #(.N(CHAL_W), .DEVICE_SEED(DEVICE_SEED)) u_puf (
    .clk        (clk),
    .rst_n      (rst_n),
    .req        (puf_req),
    .challenge  (challenge),
    .resp       (puf_resp),
    .resp_valid (puf_resp_valid)
  );

  assign trng_req   = (state_q == S_TRNG);
  assign nvm_we     = (state_q == S_TRNG) && trng_valid;
  assign nvm_re     = (state_q == S_NV_RD);
  assign puf_req    = ((state_q == S_TRNG) && trng_valid) || (state_q == S_NV_DATA);
  assign busy       = (state_q != S_IDLE);
  assign keys_valid = valid_q;
  assign sc_key     = key_q[SC_KEY_W-1:0];
  assign mac_key    = key_q[NK-1:SC_KEY_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      from_nvm_q <= 1'b0;
      k_q        <= '0;
      key_q      <= '0;
      valid_q    <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (gen_csp || gen_clp) begin
            from_nvm_q <= gen_clp && !gen_csp;
            k_q        <= '0;
            key_q      <= '0;
            valid_q    <= 1'b0;
            state_q    <= (gen_csp) ? S_TRNG : S_NV_RD;
          end
        end
        S_TRNG:    if (trng_valid) state_q <= S_RESP;
        S_NV_RD:   state_q <= S_NV_DATA;
        S_NV_DATA: state_q <= S_RESP;
        S_RESP: begin
          if (puf_resp_valid) begin
            key_q[k_q] <= puf_resp;
            if (k_q == AW'(NK - 1)) begin
              valid_q <= 1'b1;
              done    <= 1'b1;
              state_q <= S_IDLE;
            end else begin
              k_q     <= k_q + 1'b1;
              state_q <= from_nvm_q ? S_NV_RD : S_TRNG;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
