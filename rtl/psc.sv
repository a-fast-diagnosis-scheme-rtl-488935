// psc -- parallel to serial converter placed next to one e-SRAM.
//
// WIDTH scan flip-flops, each with a 2:1 multiplexer in front, as in the scheme's
// PSC drawing. scan_en is the only control: while it is low the register captures
// the memory's read word d on every clock; while it is high the register shifts one
// place towards bit 0, the MSB taking a constant 0. so is bit 0 of the register,
// so the word leaves LSB first: d[0] is on so in the cycle after the capture, d[i]
// i shifts later. Because the shift path never passes through the memory, a faulty
// bit cannot mask another. Capturing on every clock that does not shift costs
// nothing in correctness (only the capture right after a read is ever compared)
// and keeps the PSC down to the single extra global wire the scheme counts.
//
// Interface: clk, rst_n (asynchronous active-low reset, clears the register),
// scan_en, d[WIDTH-1:0], so.
module psc #(
  parameter int unsigned WIDTH = 100
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             scan_en,
  input  logic [WIDTH-1:0] d,
  output logic             so
);

  logic [WIDTH-1:0] r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       r <= '0;
    else if (scan_en) r <= WIDTH'({1'b0, r} >> 1);
    else              r <= d;
  end

  assign so = r[0];

endmodule
