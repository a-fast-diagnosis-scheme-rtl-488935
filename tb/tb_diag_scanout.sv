// tb_diag_scanout -- checks the record scan-out with three sources and 4-deep
// FIFOs. Phase 1 sends sparse random records: the serial stream, cut into
// FAIL_REC_W-bit frames, must carry exactly the records sent, each once, with no
// overflow. Phase 2 sends a burst on one source: the records that fit must still
// come out and that source's overflow flag, and only that one, must rise; clr
// clears it.
module tb_diag_scanout;
  import bisd_pkg::*;
  localparam int unsigned NM = 3;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  logic [NM-1:0] rec_valid = '0, overflow;
  fail_rec_t [NM-1:0] rec = '0;
  logic diag_so, diag_valid, pending;

  diag_scanout #(.NUM_MEM(NM), .DEPTH(4)) dut (.clk(clk), .rst_n(rst_n), .clr(clr),
    .rec_valid(rec_valid), .rec(rec), .diag_so(diag_so), .diag_valid(diag_valid),
    .overflow(overflow), .pending(pending));

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

  fail_rec_t sent[$], got[$];
  logic [FAIL_REC_W-1:0] acc;
  int acc_n = 0;
  always @(negedge clk) if (rst_n && diag_valid) begin
    acc = {acc[FAIL_REC_W-2:0], diag_so};
    acc_n++;
    if (acc_n == FAIL_REC_W) begin got.push_back(fail_rec_t'(acc)); acc_n = 0; end
  end

  function automatic fail_rec_t rnd(input int m);
    fail_rec_t r;
    r = fail_rec_t'({$urandom, $urandom});
    r.mem = MEM_ID_W'(m);
    return r;
  endfunction

  task automatic compare_sets();
    check(got.size() == sent.size(), $sformatf("%0d records out, %0d in", got.size(), sent.size()));
    foreach (sent[i]) begin
      int hit;
      hit = 0;
      foreach (got[j]) if (got[j] == sent[i]) hit++;
      check(hit == 1, "record lost or duplicated");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(!pending && !diag_valid, "idle after reset");
    // phase 1: sparse traffic
    for (int t = 0; t < 3000; t++) begin
      for (int m = 0; m < NM; m++) begin
        rec_valid[m] = ($urandom % 200) == 0;
        rec[m] = rnd(m);
        if (rec_valid[m]) sent.push_back(rec[m]);
      end
      @(negedge clk);
    end
    rec_valid = '0;
    wait (!pending);
    @(negedge clk);
    check(overflow == '0, "no overflow with sparse traffic");
    compare_sets();
    // phase 2: burst of 8 records on source 2
    sent.delete(); got.delete();
    for (int t = 0; t < 8; t++) begin
      rec_valid[2] = 1'b1; rec[2] = rnd(2);
      sent.push_back(rec[2]);
      @(negedge clk);
    end
    rec_valid = '0;
    wait (!pending);
    @(negedge clk);
    check(overflow == 3'b100, $sformatf("overflow %b, expected 100", overflow));
    check(got.size() == 5, $sformatf("%0d records survive the burst, expected 5", got.size()));
    for (int i = 0; i < got.size(); i++) check(got[i] == sent[i], "burst records in order");
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    check(overflow == '0, "clr clears overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
