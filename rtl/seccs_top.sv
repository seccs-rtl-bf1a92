// seccs_top -- SECure Context Saving (SECCS) module.
//
// The module sits between a processor and an external non-volatile memory
// (the target NVM). When the supply is about to fail, the processor starts a
// Context Storing Phase (CSP) and streams its context words in: every word is
// encrypted with a Trivium keystream before it is written to the NVM, and
// the plaintext is hashed by a keyed SHA-256 MAC whose 8-word signature is
// written after the context. When power is back, the processor starts a
// Context Loading Phase (CLP): the words are read back, decrypted and handed
// to the processor, the MAC is recomputed over the decrypted words and
// compared with the stored signature; a difference raises 'tamper'.
// Both keys come from a PUF-based key generator: fresh for each CSP, rebuilt
// from the challenges kept in its own key NVM for the CLP that follows.
//
// Datapath (as in the architecture figure): lower XOR = CPU word ^ keystream
// -> M2 -> NVM; upper XOR = NVM word ^ keystream -> CPU; M1 chooses the MAC
// input among the CPU word, the decrypted word and the raw NVM word (stored
// signature); M2 chooses the NVM write data between ciphertext and signature.
// The controller below is this design's own: the SECCS proposal describes the two
// phases but no sequencer.
//
// NVM layout: context word i at address i (0..CTX_WORDS-1), signature word j
// (SHA-256 word order) at CTX_WORDS+j.
//
// Interfaces and timing:
//  - csp_start / clp_start: one-clock requests while !busy. 'done' pulses at
//    the end of either phase; after a CLP 'integrity_ok' or 'tamper' is high
//    until the next request. The CPU must not resume from the loaded context
//    unless integrity_ok is set: words are delivered before the check ends.
//  - CPU to SECCS (CSP): cpu_wvalid/cpu_wready/cpu_wdata, CTX_WORDS words.
//  - SECCS to CPU (CLP): cpu_rvalid/cpu_rready/cpu_rdata, CTX_WORDS words.
//  - Target NVM: nvm_req with nvm_we/nvm_addr/nvm_wdata held until a one-clock
//    nvm_ack; for a read nvm_rdata is valid with nvm_ack. Any latency works.
//  - TRNG (external IP): trng_req held until trng_valid with trng_data.
//  - A word costs at least 2 clocks (CSP) or 3 clocks (CLP) plus NVM
//    latency; every 16 words the MAC stalls about 67 clocks to compress a
//    block. Key generation costs about 3 clocks per key bit (208 bits).
module seccs_top
  import seccs_pkg::*;
#(
  parameter int unsigned CTX_N       = CTX_WORDS,
  parameter int unsigned CHAL_BITS   = CHAL_W,
  parameter int unsigned MAC_KEY_LEN = MAC_KEY_W,
  parameter logic [31:0] DEVICE_SEED = 32'h1234_5678,
  localparam int unsigned NVM_AW     = $clog2(CTX_N + SIG_WORDS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control from / status to the CPU
  input  logic                 csp_start,
  input  logic                 clp_start,
  output logic                 busy,
  output logic                 done,
  output phase_e               phase,
  output logic                 integrity_ok,
  output logic                 tamper,
  // context words from the CPU (CSP)
  input  logic                 cpu_wvalid,
  output logic                 cpu_wready,
  input  word_t                cpu_wdata,
  // context words to the CPU (CLP)
  output logic                 cpu_rvalid,
  input  logic                 cpu_rready,
  output word_t                cpu_rdata,
  // target NVM
  output logic                 nvm_req,
  output logic                 nvm_we,
  output logic [NVM_AW-1:0]    nvm_addr,
  output word_t                nvm_wdata,
  input  logic                 nvm_ack,
  input  word_t                nvm_rdata,
  // TRNG
  output logic                 trng_req,
  input  logic                 trng_valid,
  input  logic [CHAL_BITS-1:0] trng_data
);

  localparam int unsigned IW = $clog2(CTX_N + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_KEYS, S_INIT, S_CSP_GET, S_CSP_PUT, S_CLP_RD, S_CLP_PUT,
    S_FIN, S_SIG_WAIT, S_SIG_WR, S_SIG_RD, S_SIG_CMP, S_CHECK
  } state_e;

  state_e        state_q;
  phase_e        phase_q;
  logic [IW-1:0] idx_q;        // context word index
  logic [2:0]    sidx_q;       // signature word index
  word_t         word_q;       // CPU word (CSP) or NVM word (CLP)
  logic          nvm_done_q;   // NVM access of the current word finished
  logic          mac_done_q;   // MAC took the current word
  logic          cpu_done_q;   // CPU took the current word (CLP)
  logic          ok_q, tamper_q, done_q;

  // key generator
  logic                   kg_start_csp, kg_start_clp, kg_busy, kg_done, kg_valid;
  logic [SC_KEY_W-1:0]    sc_key;
  logic [MAC_KEY_LEN-1:0] mac_key;
  // stream cipher
  logic                   ks_load, ks_valid, ks_next;
  word_t                  ks_word;
  // MAC
  logic                   mac_load, mac_valid, mac_ready, mac_finish;
  logic                   mac_sig_valid, mac_cmp, mac_match;
  word_t                  mac_din, mac_sig_word;
  // datapath
  word_t                  cipher_word, plain_word;
  m1_sel_e                m1_sel;
  m2_sel_e                m2_sel;
  logic                   last_word;

  key_generator #(
    .CHAL_W(CHAL_BITS), .SC_KEY_W(SC_KEY_W), .MAC_KEY_W(MAC_KEY_LEN),
    .DEVICE_SEED(DEVICE_SEED)
  ) u_keygen (
    .clk        (clk),
    .rst_n      (rst_n),
    .gen_csp    (kg_start_csp),
    .gen_clp    (kg_start_clp),
    .trng_req   (trng_req),
    .trng_valid (trng_valid),
    .trng_data  (trng_data),
    .busy       (kg_busy),
    .done       (kg_done),
    .keys_valid (kg_valid),
    .sc_key     (sc_key),
    .mac_key    (mac_key)
  );

  trivium #(.W(WORD_W)) u_prg (
    .clk      (clk),
    .rst_n    (rst_n),
    .key_load (ks_load),
    .key      (sc_key),
    .next     (ks_next),
    .ks_valid (ks_valid),
    .ks_word  (ks_word)
  );

  mac_engine #(.KEY_W(MAC_KEY_LEN)) u_mac (
    .clk       (clk),
    .rst_n     (rst_n),
    .key_load  (mac_load),
    .key       (mac_key),
    .din       (mac_din),
    .msg_valid (mac_valid),
    .msg_ready (mac_ready),
    .finish    (mac_finish),
    .sig_valid (mac_sig_valid),
    .sig_idx   (sidx_q),
    .sig_word  (mac_sig_word),
    .cmp_valid (mac_cmp),
    .match     (mac_match)
  );

  // The two XORs of the stream cipher.
  assign cipher_word = word_q ^ ks_word;   // CPU -> NVM
  assign plain_word  = word_q ^ ks_word;   // NVM -> CPU

  // M1: MAC input.
  data_mux #(.N(3), .W(WORD_W)) u_m1 (
    .din  ({word_q, plain_word, word_q}),  // M1_NVM, M1_PLAIN, M1_CPU
    .sel  (m1_sel),
    .dout (mac_din)
  );

  // M2: NVM write data.
  data_mux #(.N(2), .W(WORD_W)) u_m2 (
    .din  ({mac_sig_word, cipher_word}),   // M2_SIG, M2_CIPHER
    .sel  (m2_sel),
    .dout (nvm_wdata)
  );

  assign last_word = (idx_q == IW'(CTX_N - 1));

  // ---------------------------------------------------------------- control
  always_comb begin
    kg_start_csp = 1'b0;
    kg_start_clp = 1'b0;
    ks_load      = 1'b0;
    mac_load     = 1'b0;
    ks_next      = 1'b0;
    mac_valid    = 1'b0;
    mac_finish   = 1'b0;
    mac_cmp      = 1'b0;
    cpu_wready   = 1'b0;
    cpu_rvalid   = 1'b0;
    nvm_req      = 1'b0;
    nvm_we       = 1'b0;
    nvm_addr     = '0;
    m1_sel       = M1_CPU;
    m2_sel       = M2_CIPHER;
    unique case (state_q)
      S_IDLE: begin
        kg_start_csp = csp_start;
        kg_start_clp = clp_start && !csp_start;
      end
      S_KEYS: begin
        ks_load  = kg_done;
        mac_load = kg_done;
      end
      S_CSP_GET: cpu_wready = 1'b1;
      S_CSP_PUT: begin
        nvm_req   = !nvm_done_q;
        nvm_we    = 1'b1;
        nvm_addr  = NVM_AW'(idx_q);
        m2_sel    = M2_CIPHER;
        m1_sel    = M1_CPU;
        mac_valid = !mac_done_q;
        ks_next   = (nvm_done_q || nvm_ack) && (mac_done_q || mac_ready);
      end
      S_CLP_RD: begin
        nvm_req  = 1'b1;
        nvm_addr = NVM_AW'(idx_q);
      end
      S_CLP_PUT: begin
        cpu_rvalid = !cpu_done_q;
        m1_sel     = M1_PLAIN;
        mac_valid  = !mac_done_q;
        ks_next    = (cpu_done_q || cpu_rready) && (mac_done_q || mac_ready);
      end
      S_FIN: mac_finish = mac_ready;
      S_SIG_WR: begin
        nvm_req  = 1'b1;
        nvm_we   = 1'b1;
        nvm_addr = NVM_AW'(CTX_N) + NVM_AW'(sidx_q);
        m2_sel   = M2_SIG;
      end
      S_SIG_RD: begin
        nvm_req  = 1'b1;
        nvm_addr = NVM_AW'(CTX_N) + NVM_AW'(sidx_q);
      end
      S_SIG_CMP: begin
        m1_sel  = M1_NVM;
        mac_cmp = 1'b1;
      end
      default: ;
    endcase
  end

  assign cpu_rdata    = plain_word;
  assign busy         = (state_q != S_IDLE);
  assign done         = done_q;
  assign phase        = phase_q;
  assign integrity_ok = ok_q;
  assign tamper       = tamper_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      phase_q    <= PH_IDLE;
      idx_q      <= '0;
      sidx_q     <= '0;
      word_q     <= '0;
      nvm_done_q <= 1'b0;
      mac_done_q <= 1'b0;
      cpu_done_q <= 1'b0;
      ok_q       <= 1'b0;
      tamper_q   <= 1'b0;
      done_q     <= 1'b0;
    end else begin
      done_q <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (csp_start || clp_start) begin
            phase_q  <= csp_start ? PH_CSP : PH_CLP;
            ok_q     <= 1'b0;
            tamper_q <= 1'b0;
            idx_q    <= '0;
            sidx_q   <= '0;
            state_q  <= S_KEYS;
          end
        end
        S_KEYS: if (kg_done) state_q <= S_INIT;
        S_INIT: begin
          if (ks_valid && mac_ready)
            state_q <= (phase_q == PH_CSP) ? S_CSP_GET : S_CLP_RD;
        end
        S_CSP_GET: begin
          if (cpu_wvalid) begin
            word_q     <= cpu_wdata;
            nvm_done_q <= 1'b0;
            mac_done_q <= 1'b0;
            state_q    <= S_CSP_PUT;
          end
        end
        S_CSP_PUT: begin
          if (nvm_ack)               nvm_done_q <= 1'b1;
          if (mac_valid && mac_ready) mac_done_q <= 1'b1;
          if (ks_next) begin
            idx_q   <= idx_q + 1'b1;
            state_q <= last_word ? S_FIN : S_CSP_GET;
          end
        end
        S_CLP_RD: begin
          if (nvm_ack) begin
            word_q     <= nvm_rdata;
            cpu_done_q <= 1'b0;
            mac_done_q <= 1'b0;
            state_q    <= S_CLP_PUT;
          end
        end
        S_CLP_PUT: begin
          if (cpu_rvalid && cpu_rready) cpu_done_q <= 1'b1;
          if (mac_valid && mac_ready)   mac_done_q <= 1'b1;
          if (ks_next) begin
            idx_q   <= idx_q + 1'b1;
            state_q <= last_word ? S_FIN : S_CLP_RD;
          end
        end
        S_FIN:      if (mac_ready) state_q <= S_SIG_WAIT;
        S_SIG_WAIT: begin
          if (mac_sig_valid)
            state_q <= (phase_q == PH_CSP) ? S_SIG_WR : S_SIG_RD;
        end
        S_SIG_WR: begin
          if (nvm_ack) begin
            sidx_q <= sidx_q + 3'd1;
            if (sidx_q == 3'(SIG_WORDS - 1)) begin
              done_q  <= 1'b1;
              phase_q <= PH_IDLE;
              state_q <= S_IDLE;
            end
          end
        end
        S_SIG_RD: begin
          if (nvm_ack) begin
            word_q  <= nvm_rdata;
            state_q <= S_SIG_CMP;
          end
        end
        S_SIG_CMP: begin
          sidx_q  <= sidx_q + 3'd1;
          state_q <= (sidx_q == 3'(SIG_WORDS - 1)) ? S_CHECK : S_SIG_RD;
        end
        S_CHECK: begin
          ok_q     <= mac_match;
          tamper_q <= !mac_match;
          done_q   <= 1'b1;
          phase_q  <= PH_IDLE;
          state_q  <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------- assertions
  // An NVM request is held, with the same address and direction, until ack.
  a_nvm_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (nvm_req && !nvm_ack) |=> (nvm_req && $stable(nvm_addr) && $stable(nvm_we)));
  // No ack without a request.
  a_nvm_ack: assert property (@(posedge clk) disable iff (!rst_n)
    nvm_ack |-> nvm_req);
  // Keys are loaded into the cipher and the MAC only when complete.
  a_key_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (ks_load || mac_load) |-> kg_valid);
  // While waiting for keys the key generator is working.
  a_kg_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_KEYS && !kg_done) |-> kg_busy);
  // Keystream is only consumed when it is valid.
  a_ks_next: assert property (@(posedge clk) disable iff (!rst_n)
    ks_next |-> ks_valid);

endmodule
