// data_bg_gen -- data background generator of the shared BISD controller.
//
// Produces, bit by bit, the data backgrounds of the March CW test: the solid
// background (all 0, inverted all 1) and ceil(log2 c) intra-word backgrounds, where
// bit i of background k equals bit k of i (0101..., 0011..., 00001111..., ...).
// It has two independent outputs, both purely combinational:
//   * sdo, the serial pattern delivered to every SPC. The control generator walks
//     del_idx from C-1 down to 0 during a delivery, so the pattern goes out MSB
//     first; narrower SPCs then keep exactly the low bits they need.
//   * exp_bit, the expected value of response bit exp_idx, for the comparator array.
//     Responses come back LSB first, so exp_idx counts upwards.
// Each side has its own background/inversion inputs because the comparison of a
// read overlaps, by one cycle, the start of the next element's delivery.
module data_bg_gen
  import bisd_pkg::*;
#(
  parameter int unsigned C  = 100,
  parameter int unsigned IW = (C > 1) ? $clog2(C) : 1
) (
  input  logic [BG_W-1:0] del_bg,
  input  logic            del_inv,
  input  logic [IW-1:0]   del_idx,
  output logic            sdo,
  input  logic [BG_W-1:0] exp_bg,
  input  logic            exp_inv,
  input  logic [IW-1:0]   exp_idx,
  output logic            exp_bit
);

  always_comb begin
    sdo     = bg_bit(del_bg, 32'(del_idx)) ^ del_inv;
    exp_bit = bg_bit(exp_bg, 32'(exp_idx)) ^ exp_inv;
  end

endmodule
