// local_addr_gen -- address generator local to one e-SRAM.
//
// A counter over the memory's own WORDS addresses. The shared address trigger sends
// three wires to every memory: load, step and dir_down. load sets the counter to the
// first address of the coming March element (0 going up, WORDS-1 going down); step
// moves to the next address in the direction given by dir_down, wrapping around at
// the ends. The trigger runs each element over the largest memory, so a smaller
// memory wraps and sees some of its addresses more than once; the comparator array
// knows each memory's size and ignores those repeated reads.
//
// Interface: clk, rst_n (asynchronous active-low reset to address 0), load, step,
// dir_down, addr[AW-1:0]. The new address is valid in the cycle after load or step.
module local_addr_gen #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          step,
  input  logic          dir_down,
  output logic [AW-1:0] addr
);

  localparam logic [AW-1:0] LAST = AW'(WORDS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                addr <= '0;
    else if (load)             addr <= dir_down ? LAST : '0;
    else if (step) begin
      if (dir_down)            addr <= (addr == '0)   ? LAST : addr - 1'b1;
      else                     addr <= (addr == LAST) ? '0   : addr + 1'b1;
    end
  end

endmodule
