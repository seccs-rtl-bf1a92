// tb_arbiter_puf -- self-checking test of the arbiter PUF model.
//
// Two instances with different device seeds stand for two chips. Checks, for
// 500 random challenges: each response equals the additive-delay reference;
// it comes one clock after 'req' with a one-clock 'resp_valid'; a repeated
// challenge gives the same answer (reproducible); the two chips disagree on
// a fair share of challenges (uniqueness, 25..75 %); and responses are not
// stuck at one value (bias within 15..85 %).
module tb_arbiter_puf;
  import tb_ref_pkg::*;

  localparam logic [31:0] SEED_A = 32'h1234_5678;
  localparam logic [31:0] SEED_B = 32'h0bad_cafe;

  logic clk = 1'b0, rst_n = 1'b0, req = 1'b0;
  logic [63:0] challenge;
  logic resp_a, resp_b, val_a, val_b;
  int checks = 0, failures = 0;

  arbiter_puf #(.N(64), .DEVICE_SEED(SEED_A)) chip_a (.clk, .rst_n, .req, .challenge,
                                                      .resp(resp_a), .resp_valid(val_a));
  arbiter_puf #(.N(64), .DEVICE_SEED(SEED_B)) chip_b (.clk, .rst_n, .req, .challenge,
                                                      .resp(resp_b), .resp_valid(val_b));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int diff = 0, ones = 0;
    logic r1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      challenge = {$urandom, $urandom};
      req = 1'b1;
      @(negedge clk);
      req = 1'b0;
      check(val_a && val_b, "resp_valid one clock after req");
      check(resp_a == puf_ref(SEED_A, 64, challenge), $sformatf("chip A challenge %h", challenge));
      check(resp_b == puf_ref(SEED_B, 64, challenge), "chip B");
      r1 = resp_a;
      if (resp_a != resp_b) diff++;
      if (resp_a) ones++;
      @(negedge clk);
      check(!val_a, "resp_valid is a pulse");
      req = 1'b1;
      @(negedge clk);
      req = 1'b0;
      check(resp_a == r1, "reproducible");
    end
    $display("inter-chip differences %0d/500, ones %0d/500", diff, ones);
    check(diff > 125 && diff < 375, "uniqueness");
    check(ones > 75 && ones < 425, "bias");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
