// comparator -- one cell of the comparator array: checks the serial response of a
// single memory of WORDS x WIDTH bits.
//
// Every PSC shifts at the same time, so all comparators see response bit cmp_bit of
// the read with operation index cmp_k in the same cycle, and share one expected bit
// from the data background generator. A comparator only checks
//   * bits below its memory's width (a narrower PSC shifts in zeros after its last
//     real bit), and
//   * reads with cmp_k < WORDS, i.e. the memory's first pass over its addresses.
//     The element runs over the largest memory; a smaller one wraps around and its
//     later reads see values the same element has already rewritten.
// A mismatch produces a one-cycle fail_valid pulse with a record of the memory id,
// element, word address (cmp_k, or WORDS-1-cmp_k in a descending element) and bit,
// one cycle after the strobe. faulty is a sticky go/no-go flag, cleared by clr.
module comparator
  import bisd_pkg::*;
#(
  parameter int unsigned WORDS  = 512,
  parameter int unsigned WIDTH  = 100,
  parameter int unsigned MEM_ID = 0,
  parameter int unsigned IW     = 7,
  parameter int unsigned KW     = 9
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              cmp_valid,
  input  logic [IW-1:0]     cmp_bit,
  input  logic [KW-1:0]     cmp_k,
  input  logic [ELEM_W-1:0] cmp_elem,
  input  logic              exp_bit,
  input  logic              so,
  output logic              fail_valid,
  output fail_rec_t         fail_rec,
  output logic              faulty
);

  logic  in_range, mismatch, dir_down;
  elem_t d;

  always_comb begin
    d        = elem_desc(cmp_elem);
    dir_down = d.dir_down;
    in_range = (32'(cmp_bit) < WIDTH) && (32'(cmp_k) < WORDS);
    mismatch = cmp_valid && in_range && (so != exp_bit);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fail_valid <= 1'b0;
      fail_rec   <= '0;
      faulty     <= 1'b0;
    end else begin
      fail_valid <= mismatch;
      if (mismatch) begin
        fail_rec.mem    <= MEM_ID_W'(MEM_ID);
        fail_rec.elem   <= cmp_elem;
        fail_rec.addr   <= dir_down ? FAIL_ADDR_W'(WORDS - 1 - 32'(cmp_k))
                                    : FAIL_ADDR_W'(cmp_k);
        fail_rec.bitpos <= FAIL_BIT_W'(cmp_bit);
      end
      if (clr)           faulty <= 1'b0;
      else if (mismatch) faulty <= 1'b1;
    end
  end

endmodule
