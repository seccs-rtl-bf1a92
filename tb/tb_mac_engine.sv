// tb_mac_engine -- self-checking test of the keyed SHA-256 MAC engine.
//
// For message lengths that put the padding marker at every awkward place of
// a block (0, 1, 13, 14, 15, 16, 32 and 45 words) and random 128-bit keys,
// the signature is compared with SHA-256(K || zeros || message) computed by
// the reference model. The verification path is exercised three ways: the
// right signature (match), a signature with one word flipped (no match), and
// only seven of eight words compared (no match). Words are offered with
// random gaps; clocks where a word waits on a compressing engine are counted
// as stalls and must occur.
module tb_mac_engine;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic key_load = 1'b0, msg_valid = 1'b0, finish = 1'b0, cmp_valid = 1'b0;
  logic [127:0] key;
  logic [31:0]  din, sig_word;
  logic         msg_ready, sig_valid, match;
  logic [2:0]   sig_idx;
  int checks = 0, failures = 0, stalls = 0;

  mac_engine #(.KEY_W(128)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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
    int lens[8] = '{0, 1, 13, 14, 15, 16, 32, 45};
    w32 msg[$];
    digest_t exp;
    logic [511:0] kw;
    sig_idx = '0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (lens[t]) for (int mode = 0; mode < 3; mode++) begin
      msg.delete();
      for (int i = 0; i < lens[t]; i++) msg.push_back($urandom);
      key = {$urandom, $urandom, $urandom, $urandom};
      kw = '0; kw[127:0] = key;
      exp = mac_ref(kw, 128, msg);
      @(negedge clk);
      key_load = 1'b1;
      @(negedge clk);
      key_load = 1'b0;
      check(!msg_ready, "busy with key block");
      foreach (msg[i]) begin
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        msg_valid = 1'b1; din = msg[i];
        @(posedge clk);
        while (!msg_ready) begin stalls++; @(posedge clk); end
        @(negedge clk);
        msg_valid = 1'b0;
      end
      while (!msg_ready) @(negedge clk);
      finish = 1'b1;
      @(negedge clk);
      finish = 1'b0;
      while (!sig_valid) @(negedge clk);
      for (int i = 0; i < 8; i++) begin
        sig_idx = 3'(i);
        #1 check(sig_word == exp[i], $sformatf("len %0d sig word %0d", lens[t], i));
      end
      check(!match, "no match before compare");
      @(negedge clk);
      // compare
      for (int i = 0; i < 8; i++) begin
        if (mode == 2 && i == 5) continue;
        sig_idx = 3'(i);
        din = exp[i] ^ ((mode == 1 && i == 3) ? 32'h0000_0100 : 32'h0);
        cmp_valid = 1'b1;
        @(negedge clk);
        cmp_valid = 1'b0;
      end
      @(negedge clk);
      check(match == (mode == 0), $sformatf("len %0d mode %0d match=%0b", lens[t], mode, match));
    end
    check(stalls > 0, "MAC stall seen");
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
