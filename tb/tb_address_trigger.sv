// tb_address_trigger -- checks the address trigger for N = 5: k restarts at 0 on
// load and counts steps, last is high exactly at k = 4, addr_dir follows load_dir in
// the load cycle and keeps it afterwards, and load wins over step.
module tb_address_trigger;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, load_dir = 1'b0, step = 1'b0;
  logic addr_load, addr_step, addr_dir, last;
  logic [2:0] k;

  address_trigger #(.N(5)) dut (.clk(clk), .rst_n(rst_n), .load(load), .load_dir(load_dir),
    .step(step), .addr_load(addr_load), .addr_step(addr_step), .addr_dir(addr_dir), .k(k),
    .last(last));

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
    int ek;
    logic ed;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    ek = 0; ed = 0;
    for (int t = 0; t < 200; t++) begin
      load = ($urandom % 7) == 0;
      load_dir = 1'($urandom);
      step = 1'($urandom);
      #1;
      check(addr_load == load, "addr_load");
      check(addr_step == (step && !load), "addr_step");
      check(addr_dir == (load ? load_dir : ed), "addr_dir");
      check(last == (ek == 4), $sformatf("last at k=%0d", k));
      @(negedge clk);
      if (load) begin ek = 0; ed = load_dir; end
      else if (step) ek = (ek + 1) % 5;
      check(int'(k) == ek, $sformatf("k=%0d expected %0d", k, ek));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
