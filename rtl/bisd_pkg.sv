// bisd_pkg -- types and constants shared by the parallel built-in self-diagnosis
// (BISD) logic for distributed small embedded SRAMs.
//
// The test algorithm is March C- extended to March CW (one solid background plus
// ceil(log2 c) intra-word backgrounds) with two No-Write-Recovery write elements
// (Nw1 and Nw0) merged in to catch data retention faults. Every March element is
// described by an elem_t; elem_desc() returns the element for an index, so the
// controller needs no stored table. Each element holds at most one read and at most
// one write; the write (if any) is the pattern that is shifted into every SPC before
// the element starts, the read is checked bit by bit by the comparator array.
//
// Element list (this design's ordering; the paper gives only the operation counts):
//   0  any   (w0)          solid background
//   1  any   (Nw1)         no-write-recovery write of 1
//   2  up    (r1, w0)      a cell that missed Nw1 (open pull-up on node A) reads 0
//   3  up    (r0, w1)
//   4  any   (Nw0)         no-write-recovery write of 0
//   5  down  (r0, w1)      a cell that missed Nw0 (open pull-up on node B) reads 1
//   6  down  (r1, w0)
//   7  any   (r0)
//   8+3k   any (wB_k)      background k: bit i of the word is bit k of i
//   9+3k   any (rB_k, w~B_k)
//   10+3k  any (r~B_k, wB_k)     for k = 0 .. ceil(log2 c)-1
// "any" order is run upwards.
package bisd_pkg;

  // Field widths of a diagnosis record. They bound the largest memory the records
  // can describe: 2**FAIL_ADDR_W words, 2**FAIL_BIT_W IOs, 2**MEM_ID_W memories.
  localparam int unsigned MEM_ID_W    = 4;
  localparam int unsigned ELEM_W      = 5;
  localparam int unsigned FAIL_ADDR_W = 16;
  localparam int unsigned FAIL_BIT_W  = 8;

  // Default number of fault slots of the behavioural SRAM model's injection port.
  localparam int unsigned NUM_FAULTS = 4;

  // Background index 0 is the solid background; k+1 is intra-word background k.
  localparam int unsigned BG_W = 4;

  typedef struct packed {
    logic            dir_down;   // address order: 1 = descending
    logic            has_read;   // element starts with a read
    logic            rd_inv;     // read expects the inverted background
    logic            has_write;  // element ends with a write
    logic            wr_inv;     // write uses the inverted background
    logic            nwrtm;      // the write is a no-write-recovery cycle
    logic [BG_W-1:0] bg;         // data background
  } elem_t;

  // One detected faulty cell.
  typedef struct packed {
    logic [MEM_ID_W-1:0]    mem;    // which memory
    logic [ELEM_W-1:0]      elem;   // March element in which the read failed
    logic [FAIL_ADDR_W-1:0] addr;   // word address in that memory
    logic [FAIL_BIT_W-1:0]  bitpos; // IO bit
  } fail_rec_t;

  localparam int unsigned FAIL_REC_W = $bits(fail_rec_t);

  // Fault kinds understood by the behavioural SRAM model.
  typedef enum logic [2:0] {
    F_NONE    = 3'd0,
    F_SA0     = 3'd1,  // stuck-at 0
    F_SA1     = 3'd2,  // stuck-at 1
    F_TF_UP   = 3'd3,  // transition fault: cannot be written from 0 to 1
    F_DRF_A   = 3'd4,  // open pull-up on node A: retains 1 only briefly
    F_DRF_B   = 3'd5,  // open pull-up on node B: retains 0 only briefly
    F_BRIDGE  = 3'd6   // AND bridge between bit and bit2 of the same word
  } fault_kind_e;

  typedef struct packed {
    fault_kind_e            kind;
    logic [FAIL_ADDR_W-1:0] addr;
    logic [FAIL_BIT_W-1:0]  bitpos;
    logic [FAIL_BIT_W-1:0]  bit2;
  } sram_fault_t;

  localparam int unsigned NUM_BASE_ELEMS = 8;

  // ceil(log2(c)), 0 for c = 1
  function automatic int unsigned clog2(input int unsigned v);
    int unsigned r;
    r = 0;
    while ((32'd1 << r) < v) r++;
    return r;
  endfunction

  function automatic int unsigned num_elems(input int unsigned c);
    return NUM_BASE_ELEMS + 3 * clog2(c);
  endfunction

  // Element descriptor for element index e.
  function automatic elem_t elem_desc(input logic [ELEM_W-1:0] e);
    elem_t d;
    int unsigned k;
    int unsigned s;
    d = '0;
    case (e)
      5'd0: begin d.has_write = 1'b1; end
      5'd1: begin d.has_write = 1'b1; d.wr_inv = 1'b1; d.nwrtm = 1'b1; end
      5'd2: begin d.has_read = 1'b1; d.rd_inv = 1'b1; d.has_write = 1'b1; end
      5'd3: begin d.has_read = 1'b1; d.has_write = 1'b1; d.wr_inv = 1'b1; end
      5'd4: begin d.has_write = 1'b1; d.nwrtm = 1'b1; end
      5'd5: begin d.dir_down = 1'b1; d.has_read = 1'b1; d.has_write = 1'b1; d.wr_inv = 1'b1; end
      5'd6: begin d.dir_down = 1'b1; d.has_read = 1'b1; d.rd_inv = 1'b1; d.has_write = 1'b1; end
      5'd7: begin d.has_read = 1'b1; end
      default: begin
        k = (32'(e) - NUM_BASE_ELEMS) / 3;
        s = (32'(e) - NUM_BASE_ELEMS) % 3;
        d.bg = BG_W'(k + 1);
        case (s)
          0:       begin d.has_write = 1'b1; end
          1:       begin d.has_read = 1'b1; d.has_write = 1'b1; d.wr_inv = 1'b1; end
          default: begin d.has_read = 1'b1; d.rd_inv = 1'b1; d.has_write = 1'b1; end
        endcase
      end
    endcase
    return d;
  endfunction

  // Bit i of background bg (before inversion).
  function automatic logic bg_bit(input logic [BG_W-1:0] bg, input int unsigned i);
    if (bg == '0) return 1'b0;
    return i[bg - 1];
  endfunction

  // Number of clock cycles of one complete diagnosis run for the largest memory
  // (n words) and the widest memory (c IOs): a pattern delivery takes c cycles, a
  // write 1 cycle and a read c+1 cycles (read, capture, c-1 shifts).
  function automatic longint unsigned run_cycles(input int unsigned n, input int unsigned c);
    longint unsigned t;
    elem_t d;
    t = 0;
    for (int unsigned e = 0; e < num_elems(c); e++) begin
      d = elem_desc(ELEM_W'(e));
      if (d.has_write) t += longint'(c) + longint'(n);
      if (d.has_read)  t += longint'(n) * (longint'(c) + 1);
    end
    return t;
  endfunction

endpackage
