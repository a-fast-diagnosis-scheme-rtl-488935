// tb_esram_node -- checks one memory node (6 words x 5 bits) driven through its
// global test wires the way the controller drives it: 8-bit patterns (the width of
// a wider memory elsewhere) are shifted in MSB first, written through the local
// address generator in ascending and descending order, read back by read, capture
// and four shifts, and compared bit by bit (LSB first) with the low five bits of
// what was sent. A node-A retention defect must make a no-write-recovery write of 1
// fail in test mode, and the same write must succeed from the functional port,
// where nwrtm is forced off.
module tb_esram_node;
  import bisd_pkg::*;
  localparam int unsigned WORDS = 6, WIDTH = 5, CW = 8;
  logic clk = 1'b0, rst_n = 1'b0, bisd_mode = 1'b1;
  logic spc_shift = 0, spc_sdi = 0, addr_load = 0, addr_step = 0, addr_dir = 0;
  logic mem_cen = 0, mem_we = 0, nwrtm = 0, scan_en = 0, psc_so;
  logic func_cen = 0, func_we = 0;
  logic [2:0] func_addr = '0;
  logic [WIDTH-1:0] func_din = '0, func_dout;
  sram_fault_t [NUM_FAULTS-1:0] faults = '0;

  esram_node #(.WORDS(WORDS), .WIDTH(WIDTH)) dut (.clk(clk), .rst_n(rst_n),
    .bisd_mode(bisd_mode), .spc_shift(spc_shift), .spc_sdi(spc_sdi), .addr_load(addr_load),
    .addr_step(addr_step), .addr_dir(addr_dir), .mem_cen(mem_cen), .mem_we(mem_we),
    .nwrtm(nwrtm), .scan_en(scan_en), .psc_so(psc_so), .func_cen(func_cen),
    .func_we(func_we), .func_addr(func_addr), .func_din(func_din), .func_dout(func_dout),
    .faults(faults));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic deliver(input logic [CW-1:0] p);
    for (int i = CW - 1; i >= 0; i--) begin
      spc_shift = 1; spc_sdi = p[i]; @(negedge clk);
    end
    spc_shift = 0;
  endtask

  task automatic load(input logic down);
    addr_load = 1; addr_dir = down; @(negedge clk); addr_load = 0;
  endtask

  task automatic step();
    addr_step = 1; @(negedge clk); addr_step = 0;
  endtask

  task automatic write_op(input logic nw);
    mem_cen = 1; mem_we = 1; nwrtm = nw; @(negedge clk);
    mem_cen = 0; mem_we = 0; nwrtm = 0;
  endtask

  task automatic read_op(output logic [WIDTH-1:0] w);
    mem_cen = 1; @(negedge clk); mem_cen = 0;
    scan_en = 0; @(negedge clk);
    scan_en = 1;
    for (int i = 0; i < WIDTH; i++) begin
      w[i] = psc_so;
      if (i < WIDTH - 1) @(negedge clk);
    end
    scan_en = 0;
    @(negedge clk);
  endtask

  initial begin
    logic [CW-1:0] pat [WORDS];
    logic [WIDTH-1:0] r;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int down = 0; down < 2; down++) begin
      // write a different pattern to every word, visiting the words in order
      load(down[0]);
      for (int s = 0; s < WORDS; s++) begin
        int a;
        a = down ? WORDS - 1 - s : s;
        pat[a] = CW'($urandom);
        deliver(pat[a]);
        write_op(0);
        step();
      end
      // read them all back
      load(down[0]);
      for (int s = 0; s < WORDS; s++) begin
        int a;
        a = down ? WORDS - 1 - s : s;
        read_op(r);
        check(r == pat[a][WIDTH-1:0], $sformatf("dir %0d word %0d read %b expected %b",
                                                down, a, r, pat[a][WIDTH-1:0]));
        step();
      end
      // one extra step wraps around
      read_op(r);
      check(r == pat[down ? WORDS - 1 : 0][WIDTH-1:0], "address wrap-around");
    end
    // retention defect: open pull-up on node A of word 0 bit 3
    faults[0] = '{kind: F_DRF_A, addr: 16'd0, bitpos: 8'd3, bit2: 8'd0};
    load(0);
    deliver('0);      write_op(0);
    deliver('1);      write_op(1);
    read_op(r);
    check(r == 5'b10111, $sformatf("NWRTM write of 1 should miss bit 3, read %b", r));
    deliver('0);      write_op(0);
    deliver('1);      write_op(0);
    read_op(r);
    check(r == 5'b11111, "a normal write still succeeds on the defective cell");
    // functional mode
    bisd_mode = 0;
    nwrtm = 1;
    @(negedge clk); func_cen = 1; func_we = 1; func_addr = 0; func_din = '0;
    @(negedge clk); func_din = '1;
    @(negedge clk); func_we = 0;
    @(negedge clk); func_cen = 0;
    check(func_dout == '1, "functional write ignores the NWRTM wire");
    for (int a = 1; a < WORDS; a++) begin
      func_cen = 1; func_we = 1; func_addr = 3'(a); func_din = WIDTH'(a * 7);
      @(negedge clk);
    end
    func_we = 0;
    for (int a = 1; a < WORDS; a++) begin
      func_addr = 3'(a); @(negedge clk);
      check(func_dout == WIDTH'(a * 7), $sformatf("functional read word %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
