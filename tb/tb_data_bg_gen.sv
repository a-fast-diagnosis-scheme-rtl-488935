// tb_data_bg_gen -- checks the data background generator for c = 100 against
// backgrounds written out independently: the solid background and the seven
// intra-word backgrounds 0101..., 0011..., 00001111..., each plain and inverted,
// on both the delivery and the expected-bit side.
module tb_data_bg_gen;
  import bisd_pkg::*;
  logic [BG_W-1:0] del_bg, exp_bg;
  logic del_inv, exp_inv, sdo, exp_bit;
  logic [6:0] del_idx, exp_idx;

  data_bg_gen #(.C(100)) dut (.del_bg(del_bg), .del_inv(del_inv), .del_idx(del_idx), .sdo(sdo),
    .exp_bg(exp_bg), .exp_inv(exp_inv), .exp_idx(exp_idx), .exp_bit(exp_bit));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic ref_bit;
    for (int bg = 0; bg <= 7; bg++)
      for (int inv = 0; inv < 2; inv++)
        for (int i = 0; i < 100; i++) begin
          // background k has runs of 2**k zeros then 2**k ones
          ref_bit = (bg == 0) ? 1'b0 : (((i / (1 << (bg - 1))) % 2) == 1);
          ref_bit ^= inv[0];
          del_bg = BG_W'(bg); del_inv = inv[0]; del_idx = 7'(i);
          exp_bg = BG_W'(bg); exp_inv = inv[0]; exp_idx = 7'(99 - i);
          #1;
          check(sdo == ref_bit, $sformatf("sdo bg %0d inv %0d bit %0d", bg, inv, i));
          exp_idx = 7'(i);
          #1;
          check(exp_bit == ref_bit, $sformatf("exp bg %0d inv %0d bit %0d", bg, inv, i));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
