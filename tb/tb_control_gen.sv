// tb_control_gen -- checks the control generator cycle by cycle for N = 6 words and
// C = 4 IOs. The testbench writes out the March element list itself (March C- with
// Nw1 and Nw0 merged in, then three elements for each of the two intra-word
// backgrounds of a 4-bit word), builds from it the expected sequence of delivery,
// read, capture, shift and write cycles, and compares every control output with it,
// including the comparison strobe one cycle later. A second copy built for
// memories without an idle mode must differ only in keeping mem_cen high (a read)
// through the capture and shift cycles. The run must take exactly
// (5n+5c+5n(c+1)) + (3n+3c+2n(c+1))*ceil(log2 c) + 2n+2c cycles and be repeatable.
module tb_control_gen;
  import bisd_pkg::*;
  localparam int unsigned N = 6, C = 4;

  logic clk = 1'b0, rst_n = 1'b0, bisd = 1'b0;
  logic busy, done, spc_shift, mem_cen, mem_we, nwrtm, scan_en;
  logic at_load, at_load_dir, at_step, at_last, cmp_valid;
  logic [ELEM_W-1:0] elem, cmp_elem;
  elem_t elem_d;
  logic [1:0] del_idx, cmp_bit;
  logic [2:0] at_k, cmp_k;

  control_gen #(.N(N), .C(C)) dut (.clk(clk), .rst_n(rst_n), .bisd(bisd), .busy(busy),
    .done(done), .elem(elem), .elem_d(elem_d), .spc_shift(spc_shift), .del_idx(del_idx),
    .mem_cen(mem_cen), .mem_we(mem_we), .nwrtm(nwrtm), .scan_en(scan_en),
    .at_load(at_load), .at_load_dir(at_load_dir), .at_step(at_step), .at_last(at_last),
    .at_k(at_k), .cmp_valid(cmp_valid), .cmp_bit(cmp_bit), .cmp_k(cmp_k), .cmp_elem(cmp_elem));

  // a second copy for memories without an idle mode: only mem_cen may differ
  logic cen_ni, busy_ni, we_ni, se_ni, cv_ni;
  logic [ELEM_W-1:0] elem_ni;
  control_gen #(.N(N), .C(C), .MEM_IDLE(1'b0)) dut_ni (.clk(clk), .rst_n(rst_n), .bisd(bisd),
    .busy(busy_ni), .done(), .elem(elem_ni), .elem_d(), .spc_shift(), .del_idx(),
    .mem_cen(cen_ni), .mem_we(we_ni), .nwrtm(), .scan_en(se_ni),
    .at_load(), .at_load_dir(), .at_step(), .at_last(at_last),
    .at_k(at_k), .cmp_valid(cv_ni), .cmp_bit(), .cmp_k(), .cmp_elem());

  // the address trigger's counter, modelled here
  int k = 0;
  assign at_k    = 3'(k);
  assign at_last = (k == N - 1);
  always @(posedge clk) if (at_load) k <= 0; else if (at_step) k <= k + 1;

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

  // element list: {down, has_read, has_write, nwrtm}
  typedef struct { bit down; bit r; bit w; bit nw; } el_t;
  el_t els[$];

  // expected per-cycle outputs: {spc_shift, del_idx, mem_cen, mem_we, nwrtm, scan_en}; pe marks a
  // capture or shift cycle, whose bit is strobed to the comparators one cycle later
  typedef struct { bit shf; int di; bit cen; bit we; bit nw; bit pe; bit se; int bitn; int kk; int e; } cyc_t;
  cyc_t exp_q[$];

  initial begin
    int cyc, t_formula;
    els = '{'{0,0,1,0}, '{0,0,1,1}, '{0,1,1,0}, '{0,1,1,0}, '{0,0,1,1}, '{1,1,1,0}, '{1,1,1,0},
            '{0,1,0,0}};
    for (int b = 0; b < 2; b++) begin
      els.push_back('{0,0,1,0}); els.push_back('{0,1,1,0}); els.push_back('{0,1,1,0});
    end
    foreach (els[e]) begin
      if (els[e].w) for (int i = C - 1; i >= 0; i--) exp_q.push_back('{1,i,0,0,els[e].nw,0,0,-1,0,e});
      for (int a = 0; a < N; a++) begin
        if (els[e].r) begin
          exp_q.push_back('{0,-1,1,0,els[e].nw,0,0,-1,a,e});
          exp_q.push_back('{0,-1,0,0,els[e].nw,1,0,0,a,e});
          for (int s = 1; s < C; s++) exp_q.push_back('{0,-1,0,0,els[e].nw,1,1,s,a,e});
        end
        if (els[e].w) exp_q.push_back('{0,-1,1,1,els[e].nw,0,0,-1,a,e});
      end
    end
    t_formula = (5*N + 5*C + 5*N*(C+1)) + (3*N + 3*C + 2*N*(C+1)) * 2 + 2*N + 2*C;
    check(exp_q.size() == t_formula, "testbench element list disagrees with the formula");

    for (int run = 0; run < 2; run++) begin
      repeat (2) @(negedge clk);
      rst_n = 1'b1;
      bisd = 1'b1;
      @(negedge clk);
      cyc = 0;
      foreach (exp_q[i]) begin
        cyc_t x;
        x = exp_q[i];
        check(busy && !done, $sformatf("cycle %0d: not busy", i));
        check(spc_shift == x.shf && mem_cen == x.cen && mem_we == x.we && nwrtm == x.nw &&
              scan_en == x.se,
              $sformatf("cycle %0d elem %0d: sh%b cen%b we%b nw%b pe%b se%b", i, x.e,
                        spc_shift, mem_cen, mem_we, nwrtm, x.pe, scan_en));
        check(cen_ni == (x.cen || x.pe) && we_ni == x.we && se_ni == x.se &&
              busy_ni == busy && elem_ni == elem,
              $sformatf("cycle %0d: design without idle mode: cen%b", i, cen_ni));
        if (x.shf) check(int'(del_idx) == x.di, $sformatf("cycle %0d: del_idx %0d", i, del_idx));
        if (x.cen) check(k == x.kk, $sformatf("cycle %0d: address index %0d, expected %0d", i, k, x.kk));
        check(int'(elem) == x.e, $sformatf("cycle %0d: element %0d expected %0d", i, elem, x.e));
        // strobe for the previous cycle's capture/shift
        if (i > 0) begin
          cyc_t p;
          p = exp_q[i-1];
          check(cmp_valid == p.pe, $sformatf("cycle %0d: cmp_valid", i));
          if (p.pe) check(int'(cmp_bit) == p.bitn && int'(cmp_k) == p.kk && int'(cmp_elem) == p.e,
                          $sformatf("cycle %0d: strobe bit %0d k %0d", i, cmp_bit, cmp_k));
        end
        @(negedge clk);
        cyc++;
      end
      check(done && !busy, "done after the last operation");
      check(cyc == t_formula, "cycle count");
      repeat (3) @(negedge clk);
      check(done, "done holds while bisd is high");
      bisd = 1'b0;
      @(negedge clk);
      check(!done && !busy, "idle after bisd drops");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
