// spc -- serial to parallel converter placed next to one e-SRAM.
//
// A plain shift register of WIDTH flip-flops. While shift_en is high, each clock
// moves the word one place towards the MSB and takes sdi into bit 0. The pattern
// generator sends the widest memory's pattern MSB first, so after c shifts an SPC
// that is only WIDTH = c' bits wide holds the low c' bits of the pattern: the
// surplus high bits fall off its MSB end. This is why every SPC, whatever its width,
// receives the correct pattern from the same serial wire (MSB-first delivery and
// conversion, as the scheme requires). q drives the memory's data inputs in test
// mode and holds still for the whole March element.
//
// Interface: clk, rst_n (asynchronous active-low reset, clears the register),
// shift_en, sdi, q[WIDTH-1:0]. One bit per clock; no latency beyond the shift.
module spc #(
  parameter int unsigned WIDTH = 100
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shift_en,
  input  logic             sdi,
  output logic [WIDTH-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        q <= '0;
    else if (shift_en) q <= WIDTH'({q, sdi});  // drop the old MSB
  end

endmodule
