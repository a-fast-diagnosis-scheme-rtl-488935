// tb_spc -- checks the serial to parallel converter: two SPCs of 4 and 3 bits
// share one serial input, as in a scheme with a 4-bit and a 3-bit memory. Random
// 4-bit patterns are sent MSB first in four shift cycles; afterwards the 4-bit SPC
// must hold the whole pattern and the 3-bit SPC its low three bits. With shift_en
// low the outputs must hold. A 100-bit SPC is checked the same way with random
// 100-bit patterns.
module tb_spc;
  logic clk = 1'b0, rst_n = 1'b0, shift_en = 1'b0, sdi = 1'b0;
  logic [3:0]  q4;
  logic [2:0]  q3;
  logic [99:0] q100;

  spc #(.WIDTH(4))   u4   (.clk(clk), .rst_n(rst_n), .shift_en(shift_en), .sdi(sdi), .q(q4));
  spc #(.WIDTH(3))   u3   (.clk(clk), .rst_n(rst_n), .shift_en(shift_en), .sdi(sdi), .q(q3));
  spc #(.WIDTH(100)) u100 (.clk(clk), .rst_n(rst_n), .shift_en(shift_en), .sdi(sdi), .q(q100));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0]  p;
    logic [99:0] w;
    repeat (2) @(negedge clk);
    check(q4 == '0 && q3 == '0, "reset value");
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      p = 4'($urandom);
      for (int i = 3; i >= 0; i--) begin
        @(negedge clk); shift_en = 1'b1; sdi = p[i];
      end
      @(negedge clk); shift_en = 1'b0;
      check(q4 == p, $sformatf("4-bit SPC holds %b, sent %b", q4, p));
      check(q3 == p[2:0], $sformatf("3-bit SPC holds %b, sent %b", q3, p));
      sdi = ~sdi;
      repeat (3) @(negedge clk);
      check(q4 == p && q3 == p[2:0], "SPC changed without shift_en");
    end
    for (int t = 0; t < 10; t++) begin
      for (int i = 0; i < 100; i += 32) w[i +: 32] = $urandom;
      for (int i = 99; i >= 0; i--) begin
        @(negedge clk); shift_en = 1'b1; sdi = w[i];
      end
      @(negedge clk); shift_en = 1'b0;
      check(q100 == w, "100-bit SPC");
      check(q4 == w[3:0] && q3 == w[2:0], "narrow SPCs keep the low bits of a 100-bit pattern");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
