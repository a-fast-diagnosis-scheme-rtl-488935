// tb_esram -- checks the behavioural SRAM model against a reference array: random
// reads and writes, normal and no-write-recovery, on an 8x6 memory with one defect
// of each kind. The reference applies the defect rules on its own: stuck-at cells
// read their value, an up-transition cell never goes 0->1, a node-A retention cell
// misses only an NWRTM write of 1 over a 0, a node-B cell only an NWRTM write of 0
// over a 1, and the bridged pair stores the AND of the two written bits.
module tb_esram;
  import bisd_pkg::*;
  localparam int unsigned WORDS = 8, WIDTH = 6;
  logic clk = 1'b0, cen = 1'b0, we = 1'b0, nwrtm = 1'b0;
  logic [2:0] addr = '0;
  logic [WIDTH-1:0] din = '0, dout;
  sram_fault_t [NUM_FAULTS-1:0] faults = '0;

  esram #(.WORDS(WORDS), .WIDTH(WIDTH)) dut (.clk(clk), .cen(cen), .we(we), .nwrtm(nwrtm),
    .addr(addr), .din(din), .dout(dout), .faults(faults));

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

  logic [WIDTH-1:0] ref_mem [WORDS];
  int n_drf_miss = 0, n_bridge = 0;

  initial begin
    logic [WIDTH-1:0] nw, old;
    faults[0] = '{kind: F_SA0,   addr: 16'd1, bitpos: 8'd0, bit2: 8'd0};
    faults[1] = '{kind: F_DRF_A, addr: 16'd2, bitpos: 8'd3, bit2: 8'd0};
    faults[2] = '{kind: F_DRF_B, addr: 16'd5, bitpos: 8'd5, bit2: 8'd0};
    faults[3] = '{kind: F_BRIDGE, addr: 16'd7, bitpos: 8'd1, bit2: 8'd4};
    // initialise by normal writes
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk); cen = 1; we = 1; nwrtm = 0; addr = 3'(a); din = '0;
      ref_mem[a] = '0;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      cen = 1; we = 1'($urandom); nwrtm = 1'($urandom); addr = 3'($urandom);
      din = WIDTH'($urandom);
      if (t == 2000) begin  // from here on, also an up-transition fault at word 3 bit 2
        faults[0] = '{kind: F_TF_UP, addr: 16'd3, bitpos: 8'd2, bit2: 8'd0};
      end
      if (we) begin
        old = ref_mem[addr];
        nw = din;
        if (t >= 2000) begin
          if (addr == 3 && !old[2] && din[2]) nw[2] = 1'b0;
        end else if (addr == 1) nw[0] = 1'b0;
        if (addr == 2 && nwrtm && !old[3] && din[3]) begin nw[3] = 1'b0; n_drf_miss++; end
        if (addr == 5 && nwrtm && old[5] && !din[5]) begin nw[5] = 1'b1; n_drf_miss++; end
        if (addr == 7) begin
          nw[1] = din[1] & din[4]; nw[4] = nw[1];
          if (din[1] != din[4]) n_bridge++;
        end
        ref_mem[addr] = nw;
      end else begin
        @(negedge clk);
        cen = 0;
        old = ref_mem[addr];
        if (t < 2000 && addr == 1) old[0] = 1'b0;
        check(dout == old, $sformatf("read addr %0d got %b expected %b", addr, dout, old));
      end
    end
    check(n_drf_miss > 0 && n_bridge > 0, "defects were never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
