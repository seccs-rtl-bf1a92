// tb_sha256_core -- self-checking test of the SHA-256 compression engine.
//
// Known answers: the one-block message "abc" and the two-block 448-bit
// message "abcdbcdecdef...nopq" from the SHA-256 standard's examples. Then
// 40 random blocks with random chaining values against the reference model.
// Also checks that the constants of the RTL package equal those computed from
// prime roots, and the latency: 'done' 65 clocks after 'start', 'ready' low
// in between.
module tb_sha256_core;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, ready, done;
  logic [15:0][31:0] blk;
  logic [7:0][31:0]  chain_in, hash_out;
  int checks = 0, failures = 0;

  sha256_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input logic [7:0][31:0] c, input logic [15:0][31:0] b,
                     output logic [7:0][31:0] h, output int lat);
    @(negedge clk);
    while (!ready) @(negedge clk);
    chain_in = c; blk = b; start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0; chain_in = '0; blk = '0;   // inputs need not be held
    lat = 0;
    check(!ready, "ready low after start");
    do begin @(posedge clk); #1 lat++; end while (!done);
    h = hash_out;
  endtask

  initial begin
    logic [15:0][31:0] b;
    logic [7:0][31:0] c, h, exp;
    w32 k[64], h0[8];
    int lat;

    sha_consts(k, h0);
    for (int i = 0; i < 64; i++) check(sha256_pkg::K[i] == k[i], $sformatf("K[%0d]", i));
    for (int i = 0; i < 8; i++)  check(sha256_pkg::H0[i] == h0[i], $sformatf("H0[%0d]", i));

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // "abc"
    b = '0; b[0] = 32'h61626380; b[15] = 32'h18;
    run(sha_iv(), b, h, lat);
    exp = {32'hf20015ad, 32'hb410ff61, 32'h96177a9c, 32'hb00361a3,
           32'h5dae2223, 32'h414140de, 32'h8f01cfea, 32'hba7816bf};
    check(h == exp, "SHA-256(abc)");
    check(lat == 65, $sformatf("latency %0d, expected 65", lat));

    // "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq"
    b = '0;
    b[0]  = 32'h61626364; b[1]  = 32'h62636465; b[2]  = 32'h63646566; b[3]  = 32'h64656667;
    b[4]  = 32'h65666768; b[5]  = 32'h66676869; b[6]  = 32'h6768696a; b[7]  = 32'h68696a6b;
    b[8]  = 32'h696a6b6c; b[9]  = 32'h6a6b6c6d; b[10] = 32'h6b6c6d6e; b[11] = 32'h6c6d6e6f;
    b[12] = 32'h6d6e6f70; b[13] = 32'h6e6f7071; b[14] = 32'h80000000;
    run(sha_iv(), b, c, lat);
    b = '0; b[15] = 32'h1c0;
    run(c, b, h, lat);
    exp = {32'h19db06c1, 32'hf6ecedd4, 32'h64ff2167, 32'ha33ce459,
           32'h0c3e6039, 32'he5c02693, 32'hd20638b8, 32'h248d6a61};
    check(h == exp, "SHA-256(448-bit message)");

    for (int n = 0; n < 40; n++) begin
      for (int i = 0; i < 16; i++) b[i] = $urandom;
      for (int i = 0; i < 8; i++)  c[i] = $urandom;
      run(c, b, h, lat);
      check(h == sha_compress(c, b), $sformatf("random block %0d", n));
      check(lat == 65, "latency random block");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
