// tb_defect_rate -- the benchmark case of the diagnosis-time evaluation: memories
// at the default sizes (the largest 512 words x 100 IOs, clock period 10 ns) with
// 256 defective cells in the largest memory (the maximum fault count the evaluation
// assumes for a 1% defect rate) and 128 in each of the two others, of five kinds
// (stuck-at 0/1, up-transition, both retention faults), placed at random distinct
// cells.
//
// The point of the scheme is that its diagnosis time does not depend on how many
// cells are defective: the run must still take exactly
// (5n+5c+5n(c+1)) + (3n+3c+2n(c+1))*ceil(log2 c) + 2n+2c cycles, and every
// defective cell must be reported, with no false records. The run time and the
// resulting reduction factors against the serial-interface scheme are printed.
module tb_defect_rate;
  import bisd_pkg::*;

  localparam int unsigned NM = 3, NF = 256;
  localparam int unsigned WORDS [NM] = '{512, 384, 256};
  localparam int unsigned WIDTH [NM] = '{100, 37, 64};
  localparam int unsigned NFLT  [NM] = '{256, 128, 128};
  localparam int unsigned N = 512, C = 100, AWM = 9;

  logic clk = 1'b0, rst_n = 1'b0, bisd = 1'b0;
  logic busy, done, diag_so, diag_valid, diag_pending;
  logic [NM-1:0] fail_valid, faulty, diag_overflow;
  fail_rec_t [NM-1:0] fail_rec;
  logic [NM-1:0][AWM-1:0] func_addr = '0;
  logic [NM-1:0][C-1:0] func_din = '0, func_dout;
  sram_fault_t [NM-1:0][NF-1:0] faults = '0;

  bisd_top #(.NF(NF)) dut (
    .clk(clk), .rst_n(rst_n), .bisd(bisd), .busy(busy), .done(done),
    .fail_valid(fail_valid), .fail_rec(fail_rec), .faulty(faulty),
    .diag_so(diag_so), .diag_valid(diag_valid), .diag_overflow(diag_overflow),
    .diag_pending(diag_pending), .func_cen('0), .func_we('0),
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

  // cell key -> fault kind, and how often each cell was reported
  fault_kind_e kind_of [int];
  int          reported [int];
  int busy_cycles = 0, n_records = 0, n_false = 0, n_wrong_elem = 0, n_ser = 0;

  function automatic int key(input int m, input int a, input int b);
    return (m << 24) | (a << 8) | b;
  endfunction

  always @(negedge clk) begin
    if (busy) busy_cycles++;
    if (diag_valid) n_ser++;
    for (int j = 0; j < NM; j++) if (fail_valid[j]) begin
      int kk;
      kk = key(int'(fail_rec[j].mem), int'(fail_rec[j].addr), int'(fail_rec[j].bitpos));
      n_records++;
      if (!kind_of.exists(kk)) n_false++;
      else begin
        reported[kk] = reported[kk] + 1;
        if (kind_of[kk] == F_DRF_A && fail_rec[j].elem != 2) n_wrong_elem++;
        if (kind_of[kk] == F_DRF_B && fail_rec[j].elem != 5) n_wrong_elem++;
      end
    end
  end

  function automatic longint t_eq2(input longint n, input longint c);
    return (5*n + 5*c + 5*n*(c+1)) + (3*n + 3*c + 2*n*(c+1)) * $clog2(c);
  endfunction

  initial begin
    fault_kind_e kinds [5] = '{F_SA0, F_SA1, F_TF_UP, F_DRF_A, F_DRF_B};
    int n_missed;
    longint t78, t78_drf, tp, tp_drf;
    for (int m = 0; m < NM; m++) begin
      int placed;
      placed = 0;
      while (placed < int'(NFLT[m])) begin
        int a, b, kk;
        a = int'($urandom % WORDS[m]);
        b = int'($urandom % WIDTH[m]);
        kk = key(m, a, b);
        if (!kind_of.exists(kk)) begin
          faults[m][placed].kind   = kinds[$urandom % 5];
          faults[m][placed].addr   = FAIL_ADDR_W'(a);
          faults[m][placed].bitpos = FAIL_BIT_W'(b);
          faults[m][placed].bit2   = '0;
          kind_of[kk]  = faults[m][placed].kind;
          reported[kk] = 0;
          placed++;
        end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) bisd = 1'b1;
    wait (done);
    repeat (3) @(negedge clk);
    wait (!diag_pending);
    @(negedge clk);

    check(longint'(busy_cycles) == t_eq2(N, C) + 2*N + 2*C,
          $sformatf("run took %0d cycles, expected %0d", busy_cycles, t_eq2(N, C) + 2*N + 2*C));
    n_missed = 0;
    foreach (reported[kk]) if (reported[kk] == 0) n_missed++;
    check(n_missed == 0, $sformatf("%0d defective cells not reported", n_missed));
    check(n_false == 0, $sformatf("%0d false records", n_false));
    check(n_wrong_elem == 0, $sformatf("%0d retention records outside their element", n_wrong_elem));
    check(faulty == 3'b111, "all memories flagged faulty");

    // reduction factors, paper's Eq. (3) and (4) with k = 96, t = 10 ns
    t78     = (17*96 + 9) * longint'(N) * C * 10;
    t78_drf = t78 + 8*96*longint'(N)*C*10 + 200000000;
    tp      = t_eq2(N, C) * 10;
    tp_drf  = longint'(busy_cycles) * 10;
    $display("defective cells %0d, records %0d (serial stream %0d records, overflow %b)",
             kind_of.size(), n_records, n_ser / FAIL_REC_W, diag_overflow);
    $display("run %0d cycles = %0d ns; R without DRFs = %0d.%02d, with DRFs = %0d.%02d",
             busy_cycles, tp_drf, t78 / tp, (t78 * 100 / tp) % 100,
             t78_drf / tp_drf, (t78_drf * 100 / tp_drf) % 100);
    check(t78 / tp >= 84, "reduction factor without DRFs below 84");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
