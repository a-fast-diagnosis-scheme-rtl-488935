// tb_local_addr_gen -- checks the local address generator of a 7-word memory
// against a reference counter: load sets 0 (up) or 6 (down), step moves one
// address in the loaded direction and wraps around at either end.
module tb_local_addr_gen;
  localparam int unsigned WORDS = 7;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, step = 1'b0, dir_down = 1'b0;
  logic [2:0] addr;

  local_addr_gen #(.WORDS(WORDS)) dut (.clk(clk), .rst_n(rst_n), .load(load), .step(step),
                                       .dir_down(dir_down), .addr(addr));

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
    int exp_a;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(addr == 0, "reset address");
    exp_a = 0;
    for (int t = 0; t < 6; t++) begin
      dir_down = t[0];
      load = 1'b1;
      @(negedge clk); load = 1'b0;
      exp_a = dir_down ? WORDS - 1 : 0;
      check(int'(addr) == exp_a, $sformatf("after load dir=%0d addr=%0d", dir_down, addr));
      for (int s = 0; s < 20; s++) begin
        step = ($urandom % 4) != 0;
        @(negedge clk);
        if (step) exp_a = dir_down ? (exp_a + WORDS - 1) % WORDS : (exp_a + 1) % WORDS;
        check(int'(addr) == exp_a, $sformatf("step dir=%0d addr=%0d expected %0d", dir_down, addr, exp_a));
      end
      step = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
