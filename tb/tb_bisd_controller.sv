// tb_bisd_controller -- checks the shared controller driving two memory nodes of
// 10x6 and 7x4 bits over its global wires. Stuck-at, retention and bridge defects
// are injected; the run must take the closed-form number of cycles, report exactly
// the defective cells (node-A retention only in element 2, node-B only in element
// 5, the bridge only under a non-solid background), set faulty for both memories,
// and put the same records on the serial scan-out as on the parallel outputs.
// A second run without defects must report nothing.
module tb_bisd_controller;
  import bisd_pkg::*;
  localparam int unsigned NM = 2;
  localparam int unsigned WORDS [NM] = '{10, 7};
  localparam int unsigned WIDTH [NM] = '{6, 4};
  localparam int unsigned N = 10, C = 6;

  logic clk = 1'b0, rst_n = 1'b0, bisd = 1'b0;
  logic busy, done, spc_shift, spc_sdi, addr_load, addr_step, addr_dir;
  logic mem_cen, mem_we, nwrtm, scan_en, diag_so, diag_valid, diag_pending;
  logic [NM-1:0] psc_so, fail_valid, faulty, diag_overflow;
  fail_rec_t [NM-1:0] fail_rec;
  sram_fault_t [NM-1:0][NUM_FAULTS-1:0] faults = '0;

  bisd_controller #(.NUM_MEM(NM), .MEM_WORDS(WORDS), .MEM_WIDTH(WIDTH), .N_MAX(N), .C_MAX(C))
  dut (.clk(clk), .rst_n(rst_n), .bisd(bisd), .busy(busy), .done(done), .spc_shift(spc_shift),
    .spc_sdi(spc_sdi), .addr_load(addr_load), .addr_step(addr_step), .addr_dir(addr_dir),
    .mem_cen(mem_cen), .mem_we(mem_we), .nwrtm(nwrtm), .scan_en(scan_en),
    .psc_so(psc_so), .fail_valid(fail_valid), .fail_rec(fail_rec), .faulty(faulty),
    .diag_so(diag_so), .diag_valid(diag_valid), .diag_overflow(diag_overflow),
    .diag_pending(diag_pending));

  for (genvar j = 0; j < NM; j++) begin : g_node
    logic [WIDTH[j]-1:0] dout;
    esram_node #(.WORDS(WORDS[j]), .WIDTH(WIDTH[j])) u_node (.clk(clk), .rst_n(rst_n),
      .bisd_mode(1'b1), .spc_shift(spc_shift), .spc_sdi(spc_sdi), .addr_load(addr_load),
      .addr_step(addr_step), .addr_dir(addr_dir), .mem_cen(mem_cen), .mem_we(mem_we),
      .nwrtm(nwrtm), .scan_en(scan_en), .psc_so(psc_so[j]),
      .func_cen(1'b0), .func_we(1'b0), .func_addr('0), .func_din('0), .func_dout(dout),
      .faults(faults[j]));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fail_rec_t par_q[$], ser_q[$];
  logic [FAIL_REC_W-1:0] acc;
  int acc_n = 0, busy_cycles = 0;
  always @(negedge clk) begin
    for (int j = 0; j < NM; j++) if (fail_valid[j]) par_q.push_back(fail_rec[j]);
    if (diag_valid) begin
      acc = {acc[FAIL_REC_W-2:0], diag_so};
      acc_n++;
      if (acc_n == FAIL_REC_W) begin ser_q.push_back(fail_rec_t'(acc)); acc_n = 0; end
    end
    if (busy) busy_cycles++;
  end

  function automatic sram_fault_t mk(input fault_kind_e k, input int a, input int b, input int b2 = 0);
    sram_fault_t f;
    f.kind = k; f.addr = FAIL_ADDR_W'(a); f.bitpos = FAIL_BIT_W'(b); f.bit2 = FAIL_BIT_W'(b2);
    return f;
  endfunction

  task automatic run();
    par_q.delete(); ser_q.delete(); busy_cycles = 0;
    @(negedge clk) bisd = 1;
    wait (done);
    repeat (3) @(negedge clk);
    wait (!diag_pending);
    @(negedge clk);
    check(busy_cycles == (5*N + 5*C + 5*N*(C+1)) + (3*N + 3*C + 2*N*(C+1)) * 3 + 2*N + 2*C,
          $sformatf("run took %0d cycles", busy_cycles));
  endtask

  initial begin
    int seen [NM][NUM_FAULTS];
    repeat (2) @(negedge clk);
    rst_n = 1;
    faults[0][0] = mk(F_DRF_A, 9, 5);
    faults[0][1] = mk(F_BRIDGE, 4, 0, 3);
    faults[1][0] = mk(F_DRF_B, 3, 0);
    faults[1][1] = mk(F_SA1, 6, 3);
    foreach (seen[m, i]) seen[m][i] = 0;
    run();
    foreach (par_q[r]) begin
      int m, a, b, hit;
      m = int'(par_q[r].mem); a = int'(par_q[r].addr); b = int'(par_q[r].bitpos); hit = 0;
      for (int i = 0; i < NUM_FAULTS; i++)
        if (faults[m][i].kind != F_NONE && int'(faults[m][i].addr) == a &&
            (int'(faults[m][i].bitpos) == b ||
             (faults[m][i].kind == F_BRIDGE && int'(faults[m][i].bit2) == b))) begin
          hit = 1; seen[m][i]++;
          if (faults[m][i].kind == F_DRF_A) check(par_q[r].elem == 2, "DRF A element");
          if (faults[m][i].kind == F_DRF_B) check(par_q[r].elem == 5, "DRF B element");
          if (faults[m][i].kind == F_BRIDGE) check(par_q[r].elem >= 8, "bridge element");
        end
      check(hit == 1, $sformatf("false record mem %0d addr %0d bit %0d elem %0d", m, a, b, par_q[r].elem));
    end
    for (int m = 0; m < NM; m++) for (int i = 0; i < 2; i++)
      check(seen[m][i] > 0, $sformatf("fault mem %0d slot %0d missed", m, i));
    check(faulty == 2'b11, "faulty flags");
    check(ser_q.size() == par_q.size(), "serial and parallel record counts");
    foreach (par_q[r]) begin
      int hit;
      hit = 0;
      foreach (ser_q[s]) if (ser_q[s] == par_q[r]) hit = 1;
      check(hit == 1, "record missing from the serial stream");
    end
    @(negedge clk) bisd = 0;
    faults = '0;
    run();
    check(par_q.size() == 0 && faulty == 2'b00, "a good memory must give no records");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
