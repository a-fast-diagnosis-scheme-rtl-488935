// tb_comparator_array -- checks a two-memory comparator array (memories of 8x4 and
// 5x3 bits, controller sized for 8x4) with random strobes, response bits and
// expected bits. The reference decides for each memory whether a bit is checked
// (bit below the memory's width, operation index below its word count) and, on a
// mismatch, which record must come out one cycle later: the word address is the
// operation index in ascending elements and WORDS-1 minus it in descending ones.
module tb_comparator_array;
  import bisd_pkg::*;
  localparam int unsigned NM = 2;
  localparam int unsigned WORDS [NM] = '{8, 5};
  localparam int unsigned WIDTH [NM] = '{4, 3};

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, cmp_valid = 1'b0, exp_bit = 1'b0;
  logic [1:0] cmp_bit = '0;
  logic [2:0] cmp_k = '0;
  logic [ELEM_W-1:0] cmp_elem = '0;
  logic [NM-1:0] so = '0, fail_valid, faulty;
  fail_rec_t [NM-1:0] fail_rec;

  comparator_array #(.NUM_MEM(NM), .MEM_WORDS(WORDS), .MEM_WIDTH(WIDTH), .IW(2), .KW(3)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .cmp_valid(cmp_valid), .cmp_bit(cmp_bit),
    .cmp_k(cmp_k), .cmp_elem(cmp_elem), .exp_bit(exp_bit), .so(so), .fail_valid(fail_valid),
    .fail_rec(fail_rec), .faulty(faulty));

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

  initial begin
    bit exp_fail [NM];
    int exp_addr [NM];
    bit sticky [NM];
    int n_fail = 0, n_masked = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < NM; m++) begin exp_fail[m] = 0; sticky[m] = 0; end
    for (int t = 0; t < 4000; t++) begin
      bit down;
      cmp_valid = 1'($urandom);
      cmp_bit   = 2'($urandom);
      cmp_k     = 3'($urandom);
      cmp_elem  = ELEM_W'($urandom % 14);
      exp_bit   = 1'($urandom);
      so        = NM'($urandom);
      clr       = ($urandom % 50) == 0;
      // descending elements of the March list are 5 and 6
      down = (cmp_elem == 5 || cmp_elem == 6);
      // reference for the inputs just applied; the registered result shows after the edge
      for (int m = 0; m < NM; m++) begin
        bit in_range;
        in_range = cmp_bit < WIDTH[m] && cmp_k < WORDS[m];
        if (cmp_valid && !in_range && so[m] != exp_bit) n_masked++;
        exp_fail[m] = cmp_valid && in_range && (so[m] != exp_bit);
        exp_addr[m] = down ? int'(WORDS[m]) - 1 - int'(cmp_k) : int'(cmp_k);
        if (clr) sticky[m] = 0; else if (exp_fail[m]) sticky[m] = 1;
        if (exp_fail[m]) n_fail++;
      end
      @(negedge clk);
      for (int m = 0; m < NM; m++) begin
        check(fail_valid[m] == exp_fail[m], $sformatf("t %0d mem %0d fail_valid", t, m));
        if (exp_fail[m])
          check(int'(fail_rec[m].addr) == exp_addr[m] && int'(fail_rec[m].mem) == m &&
                fail_rec[m].bitpos == FAIL_BIT_W'(cmp_bit) && fail_rec[m].elem == cmp_elem,
                $sformatf("mem %0d record addr %0d expected %0d", m, fail_rec[m].addr, exp_addr[m]));
        check(faulty[m] == sticky[m], "faulty flag");
      end
    end
    check(n_fail > 0 && n_masked > 0, "both failures and masked bits must occur");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
