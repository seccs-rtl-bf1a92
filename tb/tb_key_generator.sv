// tb_key_generator -- self-checking test of the PUF-based key generator.
//
// A TRNG is modelled here with random values and a random 0..3-clock
// latency. Session 1 (CSP) must store every challenge it received in the key
// NVM at the address of its key bit, and each key bit must equal the PUF
// reference response to that challenge. After a reset (power cycle) a CLP
// must rebuild exactly the same two keys without asking the TRNG. A second
// CSP must produce new keys. A changed challenge in the key NVM must change
// the rebuilt key. Latency of the CLP: 3 clocks per key bit, plus one.
module tb_key_generator;
  import tb_ref_pkg::*;

  localparam int SCW = 80, MKW = 128, NK = SCW + MKW;
  localparam logic [31:0] SEED = 32'h1234_5678;

  logic clk = 1'b0, rst_n = 1'b0;
  logic gen_csp = 1'b0, gen_clp = 1'b0;
  logic trng_req, trng_valid = 1'b0;
  logic [63:0] trng_data;
  logic busy, done, keys_valid;
  logic [SCW-1:0] sc_key;
  logic [MKW-1:0] mac_key;
  logic [63:0] chal [$];
  int checks = 0, failures = 0, trng_reqs = 0;

  key_generator #(.CHAL_W(64), .SC_KEY_W(SCW), .MAC_KEY_W(MKW), .DEVICE_SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  // TRNG model
  initial begin
    trng_data = '0;
    forever begin
      @(negedge clk);
      trng_valid = 1'b0;
      if (trng_req) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        trng_data  = {$urandom, $urandom};
        trng_valid = 1'b1;
        chal.push_back(trng_data);
        trng_reqs++;
      end
    end
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input bit csp, output int lat);
    @(negedge clk);
    if (csp) gen_csp = 1'b1; else gen_clp = 1'b1;
    @(negedge clk);
    gen_csp = 1'b0; gen_clp = 1'b0;
    lat = 1;
    check(busy && !keys_valid, "busy, keys not valid");
    while (!done) begin @(negedge clk); lat++; end
    check(keys_valid, "keys valid at done");
  endtask

  initial begin
    logic [SCW-1:0] sc1;
    logic [MKW-1:0] mk1;
    logic [NK-1:0] expk;
    int lat, reqs0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    run(1'b1, lat);
    check(chal.size() == NK, $sformatf("%0d challenges", chal.size()));
    for (int k = 0; k < NK; k++) begin
      expk[k] = puf_ref(SEED, 64, chal[k]);
      check(dut.u_nvm.mem[k] == chal[k], $sformatf("challenge %0d stored", k));
    end
    check(sc_key == expk[SCW-1:0], "stream-cipher key = PUF responses");
    check(mac_key == expk[NK-1:SCW], "MAC key = PUF responses");
    sc1 = sc_key; mk1 = mac_key;

    // power cycle, then CLP
    @(negedge clk); rst_n = 1'b0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    check(!keys_valid && sc_key == '0, "keys gone after reset");
    reqs0 = trng_reqs;
    run(1'b0, lat);
    check(trng_reqs == reqs0, "CLP does not use the TRNG");
    check(sc_key == sc1 && mac_key == mk1, "CLP rebuilds the same keys");
    check(lat == 3 * NK + 1, $sformatf("CLP latency %0d, expected %0d", lat, 3 * NK + 1));

    // new session
    chal.delete();
    run(1'b1, lat);
    check(sc_key != sc1 && mac_key != mk1, "new CSP gives new keys");
    sc1 = sc_key; mk1 = mac_key;

    // tampered key NVM: flip many challenge bits of the first 16 entries
    for (int k = 0; k < 16; k++) dut.u_nvm.mem[k] = ~dut.u_nvm.mem[k] ^ 64'h1;
    run(1'b0, lat);
    check(sc_key != sc1, "tampered challenges give another key");
    check(mac_key == mk1, "untouched challenges give the same MAC key");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
