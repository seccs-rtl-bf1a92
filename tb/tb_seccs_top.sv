// tb_seccs_top -- end-to-end test of the SECCS module at its default size.
//
// Around the module: a CPU model that streams a random 32-word context in
// (CSP) and takes it back (CLP) with random gaps, a TRNG model, and the
// target NVM model with random latency. Sequence:
//  1. CSP. Then the NVM image is checked against references computed here:
//     keys = PUF responses to the challenges the TRNG gave, ciphertext =
//     context ^ Trivium keystream, signature = SHA-256(K_mac || 0 || context).
//  2. Power cycle (reset; both NVMs keep their content), CLP: the CPU must
//     get its context back and integrity_ok must rise.
//  3. Tampering: one ciphertext bit, one signature bit, 16 stored PUF
//     challenges of the MAC key; each CLP must end with 'tamper'. Restored NVM: clean again.
//  4. A second CSP of the same context must write a different ciphertext
//     (new session keys), and restore correctly.
// Mechanisms counted (each must occur): CSP, CLP, key generation from the
// TRNG and from the key NVM, MAC stalls, NVM wait states, CPU back-pressure,
// power cycles, tamper detections, clean restores.
module tb_seccs_top;
  import tb_ref_pkg::*;
  import seccs_pkg::*;

  localparam int N  = CTX_WORDS;
  localparam int NK = SC_KEY_W + MAC_KEY_W;
  localparam int AW = $clog2(N + SIG_WORDS);
  localparam logic [31:0] SEED = 32'h1234_5678;   // default DEVICE_SEED

  logic clk = 1'b0, rst_n = 1'b0;
  logic csp_start = 1'b0, clp_start = 1'b0, busy, done, integrity_ok, tamper;
  phase_e phase;
  logic cpu_wvalid = 1'b0, cpu_wready, cpu_rvalid, cpu_rready = 1'b0;
  word_t cpu_wdata = '0, cpu_rdata;
  logic nvm_req, nvm_we, nvm_ack;
  logic [AW-1:0] nvm_addr;
  word_t nvm_wdata, nvm_rdata;
  logic trng_req, trng_valid = 1'b0;
  logic [CHAL_W-1:0] trng_data = '0;

  int checks = 0, failures = 0;
  int n_csp = 0, n_clp = 0, n_kg_trng = 0, n_kg_nvm = 0, n_mac_stall = 0;
  int n_nvm_wait = 0, n_cpu_bp = 0, n_power = 0, n_tamper = 0, n_ok = 0;
  logic [63:0] chal [$];

  seccs_top dut (.*);

  target_nvm_model #(.AW(AW), .MAX_WAIT(3)) u_nvm (
    .clk, .req(nvm_req), .we(nvm_we), .addr(nvm_addr), .wdata(nvm_wdata),
    .ack(nvm_ack), .rdata(nvm_rdata));

  always #5 clk = ~clk;

  // TRNG model
  always @(negedge clk) begin
    trng_valid <= 1'b0;
    if (trng_req && !trng_valid && $urandom_range(0, 1) == 1) begin
      trng_data  <= {$urandom, $urandom};
      trng_valid <= 1'b1;
    end
  end
  always @(posedge clk) if (trng_valid && trng_req) chal.push_back(trng_data);

  // event counters
  always @(posedge clk) if (rst_n) begin
    if (nvm_req && !nvm_ack) n_nvm_wait++;
    if (cpu_rvalid && !cpu_rready) n_cpu_bp++;
    if (dut.mac_valid && !dut.mac_ready) n_mac_stall++;
    if (dut.u_keygen.done && !dut.u_keygen.from_nvm_q) n_kg_trng++;
    if (dut.u_keygen.done &&  dut.u_keygen.from_nvm_q) n_kg_nvm++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic power_cycle();
    @(negedge clk); rst_n = 1'b0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    n_power++;
    check(!busy && !integrity_ok && !tamper, "idle after power-up");
  endtask

  task automatic do_csp(input w32 ctx[$]);
    @(negedge clk);
    csp_start = 1'b1;
    @(negedge clk);
    csp_start = 1'b0;
    check(busy && phase == PH_CSP, "CSP running");
    foreach (ctx[i]) begin
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      cpu_wvalid = 1'b1; cpu_wdata = ctx[i];
      @(posedge clk);
      while (!cpu_wready) @(posedge clk);
      @(negedge clk);
      cpu_wvalid = 1'b0;
    end
    while (!done) @(negedge clk);
    n_csp++;
    @(negedge clk);
    check(!busy, "idle after CSP");
  endtask

  task automatic do_clp(output w32 got[$], output bit ok, output bit tmp);
    got.delete();
    @(negedge clk);
    clp_start = 1'b1;
    @(negedge clk);
    clp_start = 1'b0;
    check(busy && phase == PH_CLP, "CLP running");
    while (got.size() < N) begin
      cpu_rready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (cpu_rvalid && cpu_rready) got.push_back(cpu_rdata);
      @(negedge clk);
    end
    cpu_rready = 1'b0;
    while (!done) @(negedge clk);
    ok = integrity_ok; tmp = tamper;
    n_clp++;
    if (tmp) n_tamper++;
    if (ok) n_ok++;
  endtask

  // expected NVM image for a context and the challenges of a session
  task automatic expect_image(input w32 ctx[$], output w32 img[$]);
    logic [NK-1:0] k;
    logic [511:0] mk;
    w32 ks[$];
    digest_t sig;
    for (int i = 0; i < NK; i++) k[i] = puf_ref(SEED, CHAL_W, chal[i]);
    trivium_words(k[SC_KEY_W-1:0], '0, N, ks);
    mk = '0; mk[MAC_KEY_W-1:0] = k[NK-1:SC_KEY_W];
    sig = mac_ref(mk, MAC_KEY_W, ctx);
    img.delete();
    for (int i = 0; i < N; i++) img.push_back(ctx[i] ^ ks[i]);
    for (int j = 0; j < SIG_WORDS; j++) img.push_back(sig[j]);
  endtask

  initial begin
    w32 ctx[$], img[$], img1[$], got[$];
    bit ok, tmp;
    logic [63:0] saved_chal [16];
    time t0;
    int csp_clocks, clp_clocks;

    for (int i = 0; i < N; i++) ctx.push_back($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. CSP
    chal.delete();
    t0 = $time;
    do_csp(ctx);
    csp_clocks = int'(($time - t0) / 10);
    check(chal.size() == NK, $sformatf("%0d TRNG challenges", chal.size()));
    expect_image(ctx, img);
    for (int i = 0; i < N + SIG_WORDS; i++)
      check(u_nvm.mem[i] == img[i], $sformatf("NVM word %0d: %h vs %h", i, u_nvm.mem[i], img[i]));
    img1 = img;
    for (int i = 0; i < N; i++) if (u_nvm.mem[i] == ctx[i]) check(0, "plaintext in NVM");

    // 2. power cycle and CLP
    power_cycle();
    t0 = $time;
    do_clp(got, ok, tmp);
    clp_clocks = int'(($time - t0) / 10);
    check(got == ctx, "context restored");
    check(ok && !tmp, "integrity ok");

    // 3. tampering
    power_cycle();
    u_nvm.mem[5] = u_nvm.mem[5] ^ 32'h0000_0400;
    do_clp(got, ok, tmp);
    check(!ok && tmp, "tampered ciphertext detected");
    check(got[5] == (ctx[5] ^ 32'h0000_0400) && got[4] == ctx[4], "stream cipher is bitwise");
    u_nvm.mem[5] = u_nvm.mem[5] ^ 32'h0000_0400;

    power_cycle();
    u_nvm.mem[N + 7] = u_nvm.mem[N + 7] ^ 32'h8000_0000;
    do_clp(got, ok, tmp);
    check(!ok && tmp, "tampered signature detected");
    check(got == ctx, "data intact when only the signature changed");
    u_nvm.mem[N + 7] = u_nvm.mem[N + 7] ^ 32'h8000_0000;

    power_cycle();
    // replace 16 stored challenges (each moves one key bit with about even odds)
    for (int k = 0; k < 16; k++) begin
      saved_chal[k] = dut.u_keygen.u_nvm.mem[100 + k];
      dut.u_keygen.u_nvm.mem[100 + k] = {$urandom, $urandom};
    end
    do_clp(got, ok, tmp);
    check(!ok && tmp, "tampered key-NVM challenges detected");
    for (int k = 0; k < 16; k++) dut.u_keygen.u_nvm.mem[100 + k] = saved_chal[k];

    power_cycle();
    do_clp(got, ok, tmp);
    check(got == ctx && ok && !tmp, "clean restore after repair");

    // 4. new session, same context
    chal.delete();
    do_csp(ctx);
    expect_image(ctx, img);
    for (int i = 0; i < N + SIG_WORDS; i++)
      check(u_nvm.mem[i] == img[i], $sformatf("session 2 NVM word %0d", i));
    check(img[0] != img1[0] && img[N] != img1[N], "new keys give a new image");
    power_cycle();
    do_clp(got, ok, tmp);
    check(got == ctx && ok, "session 2 restore");

    $display("CSP %0d clocks, CLP %0d clocks", csp_clocks, clp_clocks);
    $display("mechanisms: csp=%0d clp=%0d keygen_trng=%0d keygen_nvm=%0d mac_stall=%0d nvm_wait=%0d cpu_backpressure=%0d power_cycles=%0d tamper=%0d restore_ok=%0d",
             n_csp, n_clp, n_kg_trng, n_kg_nvm, n_mac_stall, n_nvm_wait, n_cpu_bp, n_power, n_tamper, n_ok);
    check(n_csp > 0, "CSP happened");
    check(n_clp > 0, "CLP happened");
    check(n_kg_trng > 0, "key generation from TRNG happened");
    check(n_kg_nvm > 0, "key generation from key NVM happened");
    check(n_mac_stall > 0, "MAC stall happened");
    check(n_nvm_wait > 0, "NVM wait happened");
    check(n_cpu_bp > 0, "CPU back-pressure happened");
    check(n_power > 0, "power cycle happened");
    check(n_tamper == 3, "three tamper detections");
    check(n_ok == 3, "three clean restores");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
