// tb_bisd_top_full -- one complete diagnosis run of bisd_top at its default size:
// memories of 512x100, 384x37 and 256x64 bits, the largest being the paper's
// benchmark memory (n = 512 words, c = 100 IOs).
//
// Faults of four kinds are injected at the extreme addresses and bits of the three
// memories. The run must last exactly the closed-form cycle count of the scheme
// ((5n+5c+5n(c+1)) + (3n+3c+2n(c+1))*ceil(log2 c) + 2n+2c), report every injected
// cell and nothing else, and see the retention faults only in the element that
// follows their no-write-recovery write.
module tb_bisd_top_full;
  import bisd_pkg::*;

  localparam int unsigned NM = 3;
  localparam int unsigned N = 512, C = 100, AWM = 9;

  logic clk = 1'b0, rst_n = 1'b0, bisd = 1'b0;
  logic busy, done, diag_so, diag_valid, diag_pending;
  logic [NM-1:0] fail_valid, faulty, diag_overflow;
  fail_rec_t [NM-1:0] fail_rec;
  logic [NM-1:0] func_cen = '0, func_we = '0;
  logic [NM-1:0][AWM-1:0] func_addr = '0;
  logic [NM-1:0][C-1:0] func_din = '0, func_dout;
  sram_fault_t [NM-1:0][NUM_FAULTS-1:0] faults = '0;

  bisd_top dut (
    .clk(clk), .rst_n(rst_n), .bisd(bisd), .busy(busy), .done(done),
    .fail_valid(fail_valid), .fail_rec(fail_rec), .faulty(faulty),
    .diag_so(diag_so), .diag_valid(diag_valid), .diag_overflow(diag_overflow),
    .diag_pending(diag_pending), .func_cen(func_cen), .func_we(func_we),
    .func_addr(func_addr), .func_din(func_din), .func_dout(func_dout),
    .sram_faults(faults)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fail_rec_t par_q[$];
  int busy_cycles = 0;
  always @(negedge clk) begin
    for (int j = 0; j < NM; j++) if (fail_valid[j]) par_q.push_back(fail_rec[j]);
    if (busy) busy_cycles++;
  end

  function automatic longint t_paper(input longint n, input longint c);
    longint l;
    l = $clog2(c);
    return (5*n + 5*c + 5*n*(c+1)) + (3*n + 3*c + 2*n*(c+1)) * l + (2*n + 2*c);
  endfunction

  function automatic sram_fault_t mk(input fault_kind_e k, input int a, input int b,
                                     input int b2 = 0);
    sram_fault_t f;
    f.kind = k; f.addr = FAIL_ADDR_W'(a); f.bitpos = FAIL_BIT_W'(b); f.bit2 = FAIL_BIT_W'(b2);
    return f;
  endfunction

  initial begin
    int seen [NM][NUM_FAULTS];
    foreach (seen[m, i]) seen[m][i] = 0;
    faults[0][0] = mk(F_DRF_A, 511, 99);
    faults[0][1] = mk(F_SA0,     0,  0);
    faults[1][0] = mk(F_DRF_B, 383, 36);
    faults[2][0] = mk(F_BRIDGE, 100, 0, 63);
    faults[2][1] = mk(F_SA1,   255, 63);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) bisd = 1'b1;
    wait (done);
    repeat (3) @(negedge clk);
    $display("run: %0d cycles (%0d us at 10 ns), %0d records", busy_cycles,
             busy_cycles / 100, par_q.size());
    check(longint'(busy_cycles) == t_paper(N, C),
          $sformatf("run took %0d cycles, expected %0d", busy_cycles, t_paper(N, C)));
    foreach (par_q[r]) begin
      int m, a, b, hit;
      m = int'(par_q[r].mem); a = int'(par_q[r].addr); b = int'(par_q[r].bitpos);
      hit = 0;
      for (int i = 0; i < NUM_FAULTS; i++) begin
        if (faults[m][i].kind != F_NONE && int'(faults[m][i].addr) == a &&
            (int'(faults[m][i].bitpos) == b ||
             (faults[m][i].kind == F_BRIDGE && int'(faults[m][i].bit2) == b))) begin
          hit = 1;
          seen[m][i]++;
          if (faults[m][i].kind == F_DRF_A) check(par_q[r].elem == 2, "DRF A outside element 2");
          if (faults[m][i].kind == F_DRF_B) check(par_q[r].elem == 5, "DRF B outside element 5");
          if (faults[m][i].kind == F_BRIDGE) check(par_q[r].elem >= 8, "bridge under solid background");
        end
      end
      check(hit == 1, $sformatf("false record mem %0d addr %0d bit %0d", m, a, b));
    end
    for (int m = 0; m < NM; m++)
      for (int i = 0; i < NUM_FAULTS; i++)
        if (faults[m][i].kind != F_NONE)
          check(seen[m][i] > 0, $sformatf("fault mem %0d slot %0d not reported", m, i));
    check(faulty == 3'b111, "all memories should be flagged faulty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
