// tb_trivium -- self-checking test of the Trivium keystream generator.
//
// For several random keys (and one run with a random IV) the keystream words
// are compared with a bit-serial reference. Checks the warm-up latency
// (1152/W clocks from key_load to ks_valid), that a word is held while
// 'next' is low, that a new key_load restarts the generator, and that two
// keys give different keystreams.
module tb_trivium;
  import tb_ref_pkg::*;

  localparam logic [79:0] IV2 = 80'h3a5c_0f17_9be2_4d86_c031;

  logic clk = 1'b0, rst_n = 1'b0;
  logic key_load = 1'b0, next = 1'b0;
  logic [79:0] key;
  logic ks_valid, ks_valid2;
  logic [31:0] ks_word, ks_word2;
  int checks = 0, failures = 0;

  trivium #(.W(32)) dut (.clk, .rst_n, .key_load, .key, .next, .ks_valid, .ks_word);
  trivium #(.W(32), .IV(IV2)) dut_iv (.clk, .rst_n, .key_load, .key, .next,
                                      .ks_valid(ks_valid2), .ks_word(ks_word2));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    w32 ks[$], ks2[$], ksa[$];
    logic [79:0] k;
    int lat;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(!ks_valid, "not valid after reset");
    for (int n = 0; n < 6; n++) begin
      k = {$urandom, $urandom, $urandom};
      if (n == 0) k = '0;
      trivium_words(k, '0, 40, ks);
      trivium_words(k, IV2, 40, ks2);
      if (n == 1) ksa = ks;
      @(negedge clk);
      key = k; key_load = 1'b1;
      @(negedge clk);
      key_load = 1'b0; key = ~k;
      lat = 0;   // clocks after the key_load edge
      while (!ks_valid) begin @(negedge clk); lat++; end
      check(lat == 1152 / 32, $sformatf("warm-up %0d clocks", lat));
      for (int i = 0; i < 40; i++) begin
        // hold a while: the word must not change
        if ($urandom_range(0, 2) == 0) begin
          @(negedge clk);
          check(ks_word == ks[i], "word held while next low");
        end
        check(ks_valid, "valid during stream");
        check(ks_word == ks[i], $sformatf("key %0d word %0d: %h vs %h", n, i, ks_word, ks[i]));
        check(ks_word2 == ks2[i], $sformatf("IV run key %0d word %0d", n, i));
        next = 1'b1;
        @(negedge clk);
        next = 1'b0;
      end
    end
    trivium_words('0, '0, 1, ks);
    check(ks[0] != ksa[0], "different keys give different keystream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
