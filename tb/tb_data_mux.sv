// tb_data_mux -- self-checking test of the word multiplexer: a 3-input
// instance (as M1 in front of the MAC) and a 2-input one (as M2), every
// select with random data; an out-of-range select gives zero.
module tb_data_mux;
  logic [2:0][31:0] d3;
  logic [1:0]       s3;
  logic [31:0]      o3;
  logic [1:0][31:0] d2;
  logic             s2;
  logic [31:0]      o2;
  int checks = 0, failures = 0;

  data_mux #(.N(3), .W(32)) m3 (.din(d3), .sel(s3), .dout(o3));
  data_mux #(.N(2), .W(32)) m2 (.din(d2), .sel(s2), .dout(o2));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e;
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 3; i++) d3[i] = $urandom;
      for (int i = 0; i < 2; i++) d2[i] = $urandom;
      s3 = 2'($urandom_range(0, 3));
      s2 = 1'($urandom_range(0, 1));
      #1;
      e = (s3 == 2'd0) ? d3[0] : (s3 == 2'd1) ? d3[1] : (s3 == 2'd2) ? d3[2] : 32'h0;
      check(o3 == e, $sformatf("3-input sel %0d", s3));
      check(o2 == (s2 ? d2[1] : d2[0]), $sformatf("2-input sel %0d", s2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
