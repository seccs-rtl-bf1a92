// seccs_pkg -- sizes and types shared by the secure context saving (SECCS)
// module and its sub-blocks.
//
// The context is moved as 32-bit words between the CPU, the SECCS module and
// the target NVM. The stream-cipher key is 80 bits because the cipher is
// Trivium; the MAC key length, the PUF challenge length and the context size
// are choices of this design, since the SECCS proposal gives none.
package seccs_pkg;

  // Data path word between CPU, SECCS and target NVM.
  localparam int unsigned WORD_W     = 32;
  typedef logic [WORD_W-1:0] word_t;

  // Trivium uses an 80-bit key and an 80-bit IV.
  localparam int unsigned SC_KEY_W   = 80;
  // Secret key of the keyed SHA-256 MAC.
  localparam int unsigned MAC_KEY_W  = 128;
  // Number of stages of the arbiter PUF = bits of one challenge.
  localparam int unsigned CHAL_W     = 64;
  // Context words saved per CSP.
  localparam int unsigned CTX_WORDS  = 32;
  // SHA-256 digest = signature, in words.
  localparam int unsigned SIG_WORDS  = 8;

  // Which phase the module is running.
  typedef enum logic [1:0] {
    PH_IDLE = 2'd0,
    PH_CSP  = 2'd1,   // Context Storing Phase
    PH_CLP  = 2'd2    // Context Loading Phase
  } phase_e;

  // Selects of multiplexer M1 in front of the MAC engine (Fig. 1).
  typedef enum logic [1:0] {
    M1_CPU   = 2'd0,  // plaintext word coming from the CPU (CSP)
    M1_PLAIN = 2'd1,  // word decrypted from the target NVM (CLP)
    M1_NVM   = 2'd2   // raw word read from the NVM: stored signature (CLP)
  } m1_sel_e;

  // Selects of multiplexer M2 in front of the target NVM (Fig. 1).
  typedef enum logic {
    M2_CIPHER = 1'b0, // encrypted context word
    M2_SIG    = 1'b1  // signature word from the MAC engine
  } m2_sel_e;

endpackage
