// tb_psc -- checks the parallel to serial converter: a random word is captured
// (scan_en low), then shifted (scan_en high). Bit i must appear on so i cycles after
// the capture (LSB first) and zeros must follow the last bit. While scan_en is low
// the register must follow d on every clock, so only the last word before the
// shift is sent.
module tb_psc;
  localparam int unsigned W = 37;
  logic clk = 1'b0, rst_n = 1'b0, scan_en = 1'b0;
  logic [W-1:0] d = '0;
  logic so;

  psc #(.WIDTH(W)) dut (.clk(clk), .rst_n(rst_n), .scan_en(scan_en), .d(d), .so(so));

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
    logic [W-1:0] w, v;
    repeat (2) @(negedge clk);
    check(so == 1'b0, "reset value");
    rst_n = 1'b1;
    for (int t = 0; t < 30; t++) begin
      w = {$urandom, $urandom};
      v = {$urandom, $urandom};
      @(negedge clk); d = v; scan_en = 1'b0;
      @(negedge clk);
      check(so == v[0], "capture while scan_en is low");
      d = w;
      @(negedge clk); d = ~w; scan_en = 1'b1;
      for (int i = 0; i < W; i++) begin
        check(so == w[i], $sformatf("bit %0d: so=%b expected %b", i, so, w[i]));
        @(negedge clk);
      end
      check(so == 1'b0, "zero must follow the last bit");
      scan_en = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
