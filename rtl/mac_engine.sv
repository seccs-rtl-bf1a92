// mac_engine -- keyed SHA-256 signature of the context, with signature check.
//
// The MAC engine of the SECCS module signs the plaintext context during the
// Context Storing Phase (CSP) and, during the Context Loading Phase (CLP),
// recomputes the signature over the decrypted context and compares it with
// the signature read back from the target NVM.
//
// Construction (this design's choice; the SECCS proposal only says the MAC hashes the
// data with a secret key using a SHA-256 engine): the key is zero-extended to
// one full 512-bit block that is hashed first, followed by the context words,
// then standard SHA-256 padding. The signature is therefore
//   SIG = SHA-256( K || 0^(512-KEY_W) || C_0 || C_1 || ... || C_(n-1) ),
// with K placed big-endian (key[KEY_W-1] is the first bit hashed). The context
// length is fixed per session, and the key occupies a whole block, so length
// extension gives an attacker nothing here.
//
// Interface and timing:
//  - key_load: restart with 'key'. The key block is compressed at once
//    (about 67 clocks); msg_ready stays low meanwhile.
//  - msg_valid/msg_ready: one 32-bit word 'din' is absorbed per handshake.
//    Every 16th word fills a block and msg_ready drops for about 67 clocks
//    while it is compressed: the MAC stall seen by the SECCS controller.
//  - finish: (while msg_ready is high and msg_valid low) append the padding
//    and length; 'sig_valid' rises when the digest is complete.
//  - sig_idx selects the digest word on 'sig_word' (word 0 = H0 = the first
//    word of the standard digest).
//  - cmp_valid: while sig_valid, compare 'din' with digest word sig_idx.
//    'match' is high once all eight words were compared and all were equal.
module mac_engine
  import sha256_pkg::*;
#(
  parameter int unsigned KEY_W = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             key_load,
  input  logic [KEY_W-1:0] key,
  input  logic [31:0]      din,
  input  logic             msg_valid,
  output logic             msg_ready,
  input  logic             finish,
  output logic             sig_valid,
  input  logic [2:0]       sig_idx,
  output logic [31:0]      sig_word,
  input  logic             cmp_valid,
  output logic             match
);

  localparam int unsigned KEY_WORDS = KEY_W / 32;

  typedef enum logic [2:0] {
    S_IDLE, S_ABSORB, S_PAD, S_GO, S_WAIT, S_DONE
  } state_e;

  state_e            state_q, ret_q;
  logic [15:0][31:0] blk_q;
  logic [7:0][31:0]  chain_q;
  logic [3:0]        wcnt_q;      // next free word of blk_q
  logic [31:0]       nwords_q;    // context words absorbed
  logic              marked_q;    // 0x80 marker word already appended
  logic              need_new_q;  // length does not fit this block any more
  logic              mismatch_q;
  logic [7:0]        seen_q;

  logic              core_start, core_ready, core_done;
  logic [7:0][31:0]  core_hash;
  logic [63:0]       len_bits;
  logic [15:0][31:0] key_blk;

  always_comb begin
    key_blk = '0;
    for (int i = 0; i < int'(KEY_WORDS); i++)
      key_blk[i] = key[KEY_W-1-32*i -: 32];
  end

  // bits hashed = key block + context words
  assign len_bits = 64'd512 + {27'd0, nwords_q, 5'd0};

  assign core_start = (state_q == S_GO) && core_ready;
  assign msg_ready  = (state_q == S_ABSORB);
  assign sig_valid  = (state_q == S_DONE);
  assign sig_word   = chain_q[sig_idx];
  assign match      = sig_valid && !mismatch_q && (&seen_q);

  sha256_core u_core (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (core_start),
    .blk      (blk_q),
    .chain_in (chain_q),
    .ready    (core_ready),
    .done     (core_done),
    .hash_out (core_hash)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      ret_q      <= S_IDLE;
      blk_q      <= '0;
      chain_q    <= '0;
      wcnt_q     <= '0;
      nwords_q   <= '0;
      marked_q   <= 1'b0;
      need_new_q <= 1'b0;
      mismatch_q <= 1'b0;
      seen_q     <= '0;
    end else if (key_load) begin
      blk_q      <= key_blk;
      chain_q    <= H0;
      wcnt_q     <= '0;
      nwords_q   <= '0;
      marked_q   <= 1'b0;
      need_new_q <= 1'b0;
      mismatch_q <= 1'b0;
      seen_q     <= '0;
      ret_q      <= S_ABSORB;
      state_q    <= S_GO;
    end else begin
      unique case (state_q)
        S_IDLE: ;
        S_ABSORB: begin
          if (msg_valid) begin
            blk_q[wcnt_q] <= din;
            nwords_q      <= nwords_q + 32'd1;
            wcnt_q        <= wcnt_q + 4'd1;
            if (wcnt_q == 4'd15) begin
              ret_q   <= S_ABSORB;
              state_q <= S_GO;
            end
          end else if (finish) begin
            state_q <= S_PAD;
          end
        end
        S_PAD: begin
          // one padding word per clock
          if (!marked_q) begin
            blk_q[wcnt_q] <= 32'h8000_0000;
            marked_q      <= 1'b1;
            need_new_q    <= (wcnt_q >= 4'd14);
          end else if (wcnt_q == 4'd14 && !need_new_q) begin
            blk_q[wcnt_q] <= len_bits[63:32];
          end else if (wcnt_q == 4'd15 && !need_new_q) begin
            blk_q[wcnt_q] <= len_bits[31:0];
          end else begin
            blk_q[wcnt_q] <= 32'h0;
          end
          wcnt_q <= wcnt_q + 4'd1;
          if (wcnt_q == 4'd15) begin
            ret_q   <= (marked_q && !need_new_q) ? S_DONE : S_PAD;
            state_q <= S_GO;
          end
        end
        S_GO: begin
          if (core_ready) state_q <= S_WAIT;
        end
        S_WAIT: begin
          if (core_done) begin
            chain_q    <= core_hash;
            need_new_q <= 1'b0;
            state_q    <= ret_q;
          end
        end
        S_DONE: begin
          if (cmp_valid) begin
            seen_q[sig_idx] <= 1'b1;
            if (din != chain_q[sig_idx]) mismatch_q <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
