// tb_bisd_top -- end-to-end test of the distributed e-SRAM diagnosis scheme at a
// reduced size: three memories of 16x8, 12x5 and 7x3 bits (two of them narrower
// and smaller than the largest, so pattern truncation in the SPCs and address
// wrap-around are both exercised) and 2-record scan-out FIFOs.
//
// Run 1 injects one defect of every modelled kind and checks, from first
// principles, that
//   * the run lasts exactly the cycle count of the closed-form diagnosis time of the
//     scheme, March CW part plus the 2n+2c of the two NWRTM elements;
//   * every injected cell is reported and nothing else is (no false fails from the
//     wrapped reads of the smaller memories);
//   * a retention fault is seen only by the read after its no-write-recovery write
//     (element 2 for node A, element 5 for node B) and an intra-word bridge only
//     under a non-solid background (elements 8 and up);
//   * the serial record stream carries the same records as the parallel outputs.
// Between the runs the memories are used through their functional ports. Run 2
// puts four faulty bits into one word, which must overflow that memory's FIFO.
// A second copy of the design, built for memories without an idle mode (kept
// reading while the PSCs shift), gets the same inputs and must give the same
// records, overflow flags and done, cycle for cycle.
// Each mechanism (delivery, capture, shift, NWRTM write, descending element,
// wrap-around, DRF and background detections, overflow, functional access) is
// counted and must occur.
module tb_bisd_top;
  import bisd_pkg::*;

  localparam int unsigned NM = 3;
  localparam int unsigned WORDS [NM] = '{16, 12, 7};
  localparam int unsigned WIDTH [NM] = '{8, 5, 3};
  localparam int unsigned N = 16, C = 8, AWM = 4;

  logic clk = 1'b0, rst_n = 1'b0, bisd = 1'b0;
  logic busy, done, diag_so, diag_valid, diag_pending;
  logic [NM-1:0] fail_valid, faulty, diag_overflow;
  fail_rec_t [NM-1:0] fail_rec;
  logic [NM-1:0] func_cen = '0, func_we = '0;
  logic [NM-1:0][AWM-1:0] func_addr = '0;
  logic [NM-1:0][C-1:0] func_din = '0, func_dout;
  sram_fault_t [NM-1:0][NUM_FAULTS-1:0] faults = '0;

  bisd_top #(.NUM_MEM(NM), .MEM_WORDS(WORDS), .MEM_WIDTH(WIDTH), .FIFO_DEPTH(2)) dut (
    .clk(clk), .rst_n(rst_n), .bisd(bisd), .busy(busy), .done(done),
    .fail_valid(fail_valid), .fail_rec(fail_rec), .faulty(faulty),
    .diag_so(diag_so), .diag_valid(diag_valid), .diag_overflow(diag_overflow),
    .diag_pending(diag_pending), .func_cen(func_cen), .func_we(func_we),
    .func_addr(func_addr), .func_din(func_din), .func_dout(func_dout),
    .sram_faults(faults)
  );

  // the same design for memories without an idle mode
  logic busy_nr, done_nr, diag_so_nr, diag_valid_nr, diag_pending_nr;
  logic [NM-1:0] fail_valid_nr, faulty_nr, diag_overflow_nr;
  fail_rec_t [NM-1:0] fail_rec_nr;
  logic [NM-1:0][C-1:0] func_dout_nr;

  bisd_top #(.NUM_MEM(NM), .MEM_WORDS(WORDS), .MEM_WIDTH(WIDTH), .FIFO_DEPTH(2),
             .MEM_IDLE(1'b0)) dut_nr (
    .clk(clk), .rst_n(rst_n), .bisd(bisd), .busy(busy_nr), .done(done_nr),
    .fail_valid(fail_valid_nr), .fail_rec(fail_rec_nr), .faulty(faulty_nr),
    .diag_so(diag_so_nr), .diag_valid(diag_valid_nr), .diag_overflow(diag_overflow_nr),
    .diag_pending(diag_pending_nr), .func_cen(func_cen), .func_we(func_we),
    .func_addr(func_addr), .func_din(func_din), .func_dout(func_dout_nr),
    .sram_faults(faults)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- observation ------------------------------------------------------------
  fail_rec_t par_q[$], ser_q[$];
  logic [FAIL_REC_W-1:0] acc;
  int acc_n = 0;
  int busy_cycles = 0;
  int n_deliver = 0, n_capture = 0, n_shift = 0, n_nwrc = 0, n_down = 0, n_wrap = 0;
  int n_func = 0, n_overflow = 0, n_drf = 0, n_bg = 0;
  int n_noidle_rd = 0, n_noidle_diff = 0;
  bit prev_read = 1'b0;

  always @(negedge clk) begin
    for (int j = 0; j < NM; j++) if (fail_valid[j]) par_q.push_back(fail_rec[j]);
    if (diag_valid) begin
      acc = {acc[FAIL_REC_W-2:0], diag_so};
      acc_n++;
      if (acc_n == FAIL_REC_W) begin ser_q.push_back(fail_rec_t'(acc)); acc_n = 0; end
    end
    if (busy) busy_cycles++;
    if (dut.spc_shift) n_deliver++;
    if (prev_read && !dut.scan_en) n_capture++;
    if (dut.scan_en) n_shift++;
    prev_read = dut.mem_cen && !dut.mem_we && !dut.scan_en;
    if (dut.mem_cen && dut.mem_we && dut.nwrtm) n_nwrc++;
    if (dut.mem_cen && dut.addr_dir) n_down++;
    if (dut.u_ctrl.cmp_valid && 32'(dut.u_ctrl.cmp_k) >= WORDS[NM-1]) n_wrap++;
    if (dut_nr.mem_cen && !dut_nr.mem_we && dut_nr.scan_en) n_noidle_rd++;
    if (dut.mem_cen && dut.scan_en) n_noidle_diff++;
    if (rst_n && (fail_valid_nr != fail_valid || fail_rec_nr != fail_rec ||
                  done_nr != done || busy_nr != busy || diag_overflow_nr != diag_overflow ||
                  diag_valid_nr != diag_valid || (diag_valid && diag_so_nr != diag_so)))
      n_noidle_diff++;
  end

  // ---- independent reference -----------------------------------------------
  function automatic int unsigned t_paper(input int unsigned n, input int unsigned c);
    int unsigned l;
    l = $clog2(c);
    return (5*n + 5*c + 5*n*(c+1)) + (3*n + 3*c + 2*n*(c+1)) * l + (2*n + 2*c);
  endfunction

  function automatic sram_fault_t mk(input fault_kind_e k, input int a, input int b,
                                     input int b2 = 0);
    sram_fault_t f;
    f.kind = k; f.addr = FAIL_ADDR_W'(a); f.bitpos = FAIL_BIT_W'(b); f.bit2 = FAIL_BIT_W'(b2);
    return f;
  endfunction

  // Is (m,a,b) one of the injected cells? Returns the kind, F_NONE if not.
  function automatic fault_kind_e injected(input int m, input int a, input int b);
    for (int i = 0; i < NUM_FAULTS; i++) begin
      if (faults[m][i].kind != F_NONE && int'(faults[m][i].addr) == a &&
          (int'(faults[m][i].bitpos) == b ||
           (faults[m][i].kind == F_BRIDGE && int'(faults[m][i].bit2) == b)))
        return faults[m][i].kind;
    end
    return F_NONE;
  endfunction

  task automatic run_bisd(output int cycles);
    busy_cycles = 0;
    par_q.delete(); ser_q.delete(); acc_n = 0;
    @(negedge clk) bisd = 1'b1;
    wait (done);
    repeat (3) @(negedge clk);
    wait (!diag_pending);
    repeat (3) @(negedge clk);
    cycles = busy_cycles;
  endtask

  task automatic check_records();
    int seen [NM][NUM_FAULTS];
    foreach (seen[m, i]) seen[m][i] = 0;
    foreach (par_q[r]) begin
      int m, a, b;
      fault_kind_e k;
      m = int'(par_q[r].mem); a = int'(par_q[r].addr); b = int'(par_q[r].bitpos);
      k = injected(m, a, b);
      check(k != F_NONE, $sformatf("record mem %0d addr %0d bit %0d elem %0d is not an injected cell",
                                   m, a, b, par_q[r].elem));
      if (k == F_DRF_A) begin
        check(par_q[r].elem == 2, "node-A retention fault seen outside element 2");
        n_drf++;
      end
      if (k == F_DRF_B) begin
        check(par_q[r].elem == 5, "node-B retention fault seen outside element 5");
        n_drf++;
      end
      if (k == F_BRIDGE) begin
        check(par_q[r].elem >= 8, "bridge seen under a solid background");
        n_bg++;
      end
      for (int i = 0; i < NUM_FAULTS; i++)
        if (faults[m][i].kind != F_NONE && int'(faults[m][i].addr) == a &&
            (int'(faults[m][i].bitpos) == b || int'(faults[m][i].bit2) == b))
          seen[m][i]++;
    end
    for (int m = 0; m < NM; m++)
      for (int i = 0; i < NUM_FAULTS; i++)
        if (faults[m][i].kind != F_NONE)
          check(seen[m][i] > 0, $sformatf("injected fault mem %0d slot %0d not reported", m, i));
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- run 1 ----
    faults[0][0] = mk(F_SA0,    3, 2);
    faults[0][1] = mk(F_DRF_A, 10, 7);
    faults[0][2] = mk(F_BRIDGE, 5, 1, 2);
    faults[0][3] = mk(F_TF_UP, 15, 0);
    faults[1][0] = mk(F_DRF_B, 11, 4);
    faults[1][1] = mk(F_SA1,    0, 0);
    faults[2][0] = mk(F_DRF_A,  6, 2);
    faults[2][1] = mk(F_DRF_B,  0, 1);
    run_bisd(cyc);
    check(cyc == int'(t_paper(N, C)), $sformatf("run took %0d cycles, expected %0d", cyc, t_paper(N, C)));
    check(32'(cyc) == 32'(run_cycles(N, C)), "cycle count differs from run_cycles()");
    check_records();
    check(faulty == 3'b111, "every memory should be flagged faulty");
    check(diag_overflow == '0, "no overflow expected in run 1");
    check(ser_q.size() == par_q.size(), $sformatf("serial stream has %0d records, parallel %0d",
                                                  ser_q.size(), par_q.size()));
    foreach (par_q[r]) begin
      int hit;
      hit = 0;
      foreach (ser_q[s]) if (ser_q[s] == par_q[r]) hit = 1;
      check(hit == 1, "parallel record missing from the serial stream");
    end
    $display("run 1: %0d cycles, %0d records", cyc, par_q.size());
    @(negedge clk) bisd = 1'b0;

    // ---- functional mode between runs ----
    faults = '0;
    for (int m = 0; m < NM; m++) begin
      @(negedge clk);
      func_cen[m] = 1'b1; func_we[m] = 1'b1; func_addr[m] = AWM'(m + 1);
      func_din[m] = C'(8'hA5 + m);
      @(negedge clk);
      func_we[m] = 1'b0;
      @(negedge clk);
      func_cen[m] = 1'b0;
      check(func_dout[m] == (C'(8'hA5 + m) & C'((1 << WIDTH[m]) - 1)),
            $sformatf("functional read-back of memory %0d gave %h", m, func_dout[m]));
      check(func_dout_nr[m] == func_dout[m],
            $sformatf("functional read-back of memory %0d differs without idle mode", m));
      n_func++;
    end

    // ---- run 2: four faulty bits in one word overflow a 2-deep FIFO ----
    for (int i = 0; i < 4; i++) faults[1][i] = mk(F_SA0, 2, i);
    run_bisd(cyc);
    check(diag_overflow == 3'b010, $sformatf("overflow flags %b, expected 010", diag_overflow));
    if (diag_overflow[1]) n_overflow++;
    check(faulty == 3'b010, "only memory 1 should be faulty in run 2");
    check_records();
    check(ser_q.size() < par_q.size(), "overflow must lose serial records");
    @(negedge clk) bisd = 1'b0;

    // ---- every mechanism must have happened ----
    $display("deliver=%0d capture=%0d shift=%0d nwrc=%0d down=%0d wrap=%0d func=%0d drf=%0d bg=%0d overflow=%0d noidle_reads=%0d",
             n_deliver, n_capture, n_shift, n_nwrc, n_down, n_wrap, n_func, n_drf, n_bg, n_overflow, n_noidle_rd);
    check(n_deliver > 0, "no pattern delivery");
    check(n_capture > 0, "no PSC capture");
    check(n_shift > 0, "no PSC shift");
    check(n_nwrc > 0, "no no-write-recovery write");
    check(n_down > 0, "no descending element");
    check(n_wrap > 0, "no wrapped read");
    check(n_func > 0, "no functional access");
    check(n_drf == 4, $sformatf("expected 4 retention-fault records, got %0d", n_drf));
    check(n_bg > 0, "no background-only detection");
    check(n_overflow > 0, "no overflow");
    check(n_noidle_rd > 0, "no read during a PSC shift in the no-idle design");
    check(n_noidle_diff == 0,
          $sformatf("no-idle design differs from the idle one in %0d cycles", n_noidle_diff));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
