// sha256_core -- iterative SHA-256 compression function, one round per clock.
//
// This is the hash engine inside the MAC engine of the SECCS module. It takes
// a 512-bit message block and a 256-bit chaining value and returns the next
// chaining value, exactly as FIPS 180-4 defines the compression function.
// Padding and message length are handled by the caller (mac_engine).
//
// Structure: eight 32-bit working registers a..h and a sliding window of the
// last 16 message-schedule words. Each clock performs one of the 64 rounds
// and computes the next schedule word from the window, so no 64-word schedule
// memory is needed. A last clock adds the working registers to the chaining
// value.
//
// Interface: 'start' is accepted while 'ready' is high; 'blk' and 'chain_in'
// are sampled on that edge and need not be held. blk[0] is the first message
// word (big-endian word order of the standard), chain_in[0] is H0 (a).
// Timing: 'done' pulses for one clock 65 clocks after the start edge, with
// 'hash_out' valid from then until the next start. 'ready' is low meanwhile.
// The one-round-per-clock structure is this design's choice; the SECCS
// description only names "SHA-256 engine" as the MAC module.
module sha256_core
  import sha256_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [15:0][31:0] blk,
  input  logic [7:0][31:0]  chain_in,
  output logic             ready,
  output logic             done,
  output logic [7:0][31:0]  hash_out
);

  logic [7:0][31:0]  chain_q;   // chaining value of this block
  logic [7:0][31:0]  wk_q;      // working registers: wk_q[0]=a .. wk_q[7]=h
  logic [15:0][31:0] win_q;     // win_q[0] = W[t], win_q[15] = W[t+15]
  logic [5:0]        round_q;
  logic              busy_q;
  logic              fin_q;     // final addition pending

  w32_t t1, t2, w_next;

  always_comb begin
    t1 = wk_q[7] + bsig1(wk_q[4]) + ch(wk_q[4], wk_q[5], wk_q[6])
       + K[round_q] + win_q[0];
    t2 = bsig0(wk_q[0]) + maj(wk_q[0], wk_q[1], wk_q[2]);
    // W[t+16] = s1(W[t+14]) + W[t+9] + s0(W[t+1]) + W[t]
    w_next = ssig1(win_q[14]) + win_q[9] + ssig0(win_q[1]) + win_q[0];
  end

  assign ready = !busy_q && !fin_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chain_q  <= '0;
      wk_q     <= '0;
      win_q    <= '0;
      round_q  <= '0;
      busy_q   <= 1'b0;
      fin_q    <= 1'b0;
      done     <= 1'b0;
      hash_out <= '0;
    end else begin
      done <= 1'b0;
      if (start && ready) begin
        chain_q <= chain_in;
        wk_q    <= chain_in;
        win_q   <= blk;
        round_q <= '0;
        busy_q  <= 1'b1;
      end else if (busy_q) begin
        wk_q[7] <= wk_q[6];
        wk_q[6] <= wk_q[5];
        wk_q[5] <= wk_q[4];
        wk_q[4] <= wk_q[3] + t1;
        wk_q[3] <= wk_q[2];
        wk_q[2] <= wk_q[1];
        wk_q[1] <= wk_q[0];
        wk_q[0] <= t1 + t2;
        win_q   <= {w_next, win_q[15:1]};
        round_q <= round_q + 6'd1;
        if (round_q == 6'd63) begin
          busy_q <= 1'b0;
          fin_q  <= 1'b1;
        end
      end else if (fin_q) begin
        fin_q <= 1'b0;
        done  <= 1'b1;
        for (int i = 0; i < 8; i++) hash_out[i] <= chain_q[i] + wk_q[i];
      end
    end
  end

endmodule
