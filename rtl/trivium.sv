// trivium -- Trivium keystream generator, W keystream bits per clock.
//
// This is the pseudo random generator (PRG) of the SECCS stream cipher. Its
// seed is the 80-bit secret key produced by the key generator; the keystream
// it emits is XORed with the context words outside this module (encryption
// on the way to the NVM, decryption on the way back to the CPU).
//
// The 288-bit state s1..s288 is held in st_q with st_q[i-1] = s_i, loaded as
// in the Trivium specification: (s1..s93) = (K1..K80, 0..0),
// (s94..s177) = (IV1..IV80, 0..0), (s178..s288) = (0..0, 1, 1, 1), with
// key[i-1] = K_i and IV[i-1] = IV_i. The state is then clocked 4*288 = 1152
// times without output. The combinational update is unrolled W times, so each
// clock performs W Trivium steps (W <= 64 keeps the unrolled taps
// independent, as in the Trivium design document).
//
// Interface: 'key_load' (accepted in any state) restarts the cipher with
// 'key'. 'ks_valid' rises 1152/W clocks later. 'ks_word' is the next W bits of
// keystream, ks_word[0] being the earliest bit; 'next' consumes it and the
// following word is valid on the next clock, so one word per clock can be
// taken. The IV is a constant parameter: the key is renewed for every
// session, so a fixed IV is this design's choice, not the proposal's.
module trivium #(
  parameter int unsigned W  = 32,
  parameter logic [79:0] IV = '0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          key_load,
  input  logic [79:0]   key,
  input  logic          next,
  output logic          ks_valid,
  output logic [W-1:0]  ks_word
);

  localparam int unsigned INIT_STEPS  = 4 * 288;
  localparam int unsigned INIT_CLOCKS = INIT_STEPS / W;
  localparam int unsigned CNT_W       = $clog2(INIT_CLOCKS + 1);

  logic [287:0]     st_q, st_n;
  logic [CNT_W-1:0] warm_q;
  logic             run_q;

  // W unrolled Trivium steps. Indices are s_i -> s[i-1].
  always_comb begin
    logic [287:0] s;
    logic t1, t2, t3;
    s = st_q;
    for (int j = 0; j < int'(W); j++) begin
      t1 = s[65]  ^ s[92];
      t2 = s[161] ^ s[176];
      t3 = s[242] ^ s[287];
      ks_word[j] = t1 ^ t2 ^ t3;
      t1 = t1 ^ (s[90]  & s[91])  ^ s[170];
      t2 = t2 ^ (s[174] & s[175]) ^ s[263];
      t3 = t3 ^ (s[285] & s[286]) ^ s[68];
      s[92:0]    = {s[91:0], t3};
      s[176:93]  = {s[175:93], t1};
      s[287:177] = {s[286:177], t2};
    end
    st_n = s;
  end

  assign ks_valid = run_q && (warm_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= '0;
      warm_q <= '0;
      run_q  <= 1'b0;
    end else if (key_load) begin
      st_q          <= '0;
      st_q[79:0]    <= key;
      st_q[172:93]  <= IV;
      st_q[287:285] <= 3'b111;
      warm_q        <= CNT_W'(INIT_CLOCKS);
      run_q         <= 1'b1;
    end else if (run_q && warm_q != '0) begin
      st_q   <= st_n;
      warm_q <= warm_q - 1'b1;
    end else if (ks_valid && next) begin
      st_q <= st_n;
    end
  end

endmodule
