// tb_key_nvm -- self-checking test of the key NVM model: random writes, then
// reads of every address with random timing against a scoreboard; the read
// data appears one clock after 're' and stays while 're' is low; content is
// kept across a pulse of the surrounding reset (the model has none).
module tb_key_nvm;
  localparam int DEPTH = 208;
  logic clk = 1'b0, we = 1'b0, re = 1'b0, rst_n;
  logic [7:0]  addr;
  logic [63:0] wdata, rdata;
  logic [63:0] sb [DEPTH];
  int checks = 0, failures = 0;

  key_nvm #(.DEPTH(DEPTH), .WIDTH(64)) dut (.*);

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
    logic [63:0] held;
    rst_n = 1'b1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      addr = 8'(i); wdata = {$urandom, $urandom}; we = 1'b1; sb[i] = wdata;
    end
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      addr = 8'($urandom_range(0, DEPTH - 1)); wdata = {$urandom, $urandom};
      we = 1'b1; sb[addr] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    rst_n = 1'b0;   // "power cycle" of the rest of the chip
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < DEPTH; i++) begin
      addr = 8'(i); re = 1'b1;
      @(negedge clk);
      re = 1'b0;
      check(rdata == sb[i], $sformatf("addr %0d", i));
      held = rdata;
      addr = 8'($urandom_range(0, DEPTH - 1));
      @(negedge clk);
      check(rdata == held, "read data held while re low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
