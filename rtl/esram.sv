// esram -- behavioural model of one small embedded SRAM macro with the
// No-Write-Recovery Test Mode (NWRTM) bit-line precharge control.
//
// This is a behavioural model, not synthesizable memory design: the real part is a
// process-specific SRAM macro with a transistor-level precharge circuit. The model
// reproduces what the diagnosis logic can observe. It is a single-port synchronous
// RAM of WORDS x WIDTH bits: on a rising clk edge with cen high it writes din to
// addr when we is high, otherwise it reads addr into dout. dout holds its value
// while the memory is idle (cen low).
//
// nwrtm high during a write turns it into a no-write-recovery cycle: the bit lines
// are not precharged, the side to be pulled high floats at GND and the side to be
// pulled low is driven to GND. A good cell still flips through its own latch, but a
// cell whose pull-up PMOS is open (the defect behind a data retention fault) cannot
// raise its storage node and keeps its old value. A normal write charges the node
// from the bit line and succeeds on such a cell, which is why retention faults
// otherwise need a long pause to show up.
//
// faults[] injects up to NF defects (kinds in bisd_pkg::fault_kind_e):
// stuck-at 0/1, an up-transition fault, the two retention faults (open pull-up on
// node A: an NWRTM write of 1 fails; on node B: an NWRTM write of 0 fails) and an
// AND bridge between two bits of a word, which only a non-solid data background
// reveals. Slots with kind F_NONE are ignored.
module esram
  import bisd_pkg::*;
#(
  parameter int unsigned WORDS = 512,
  parameter int unsigned WIDTH = 100,
  parameter int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1,
  parameter int unsigned NF    = NUM_FAULTS
) (
  input  logic                        clk,
  input  logic                        cen,
  input  logic                        we,
  input  logic                        nwrtm,
  input  logic [AW-1:0]               addr,
  input  logic [WIDTH-1:0]            din,
  output logic [WIDTH-1:0]            dout,
  input  sram_fault_t [NF-1:0]         faults
);

  logic [WIDTH-1:0] mem [WORDS];

  function automatic logic hit(input sram_fault_t f, input logic [AW-1:0] a);
    return (f.kind != F_NONE) && (f.addr == FAIL_ADDR_W'(a)) && (32'(f.bitpos) < WIDTH);
  endfunction

  // Value a write leaves in the word, given the old contents.
  function automatic logic [WIDTH-1:0] written(input logic [WIDTH-1:0] old_w,
                                               input logic [WIDTH-1:0] new_w,
                                               input logic             nw,
                                               input logic [AW-1:0]    a);
    logic [WIDTH-1:0] w;
    logic v;
    int   b, b2;
    w = new_w;
    for (int i = 0; i < NF; i++) begin
      b  = int'(faults[i].bitpos);
      b2 = int'(faults[i].bit2);
      if (hit(faults[i], a)) begin
        case (faults[i].kind)
          F_SA0:   w[b] = 1'b0;
          F_SA1:   w[b] = 1'b1;
          F_TF_UP: if (!old_w[b] && new_w[b])
                     w[b] = 1'b0;
          F_DRF_A: if (nw && !old_w[b] && new_w[b])
                     w[b] = 1'b0;
          F_DRF_B: if (nw && old_w[b] && !new_w[b])
                     w[b] = 1'b1;
          F_BRIDGE: if (32'(faults[i].bit2) < WIDTH) begin
                     v = new_w[b] & new_w[b2];
                     w[b] = v;
                     w[b2]   = v;
                   end
          default: ;
        endcase
      end
    end
    return w;
  endfunction

  // Value a read returns: stuck-at cells read their stuck value whatever was stored.
  function automatic logic [WIDTH-1:0] observed(input logic [WIDTH-1:0] w_in,
                                                input logic [AW-1:0]    a);
    logic [WIDTH-1:0] w;
    int   b;
    w = w_in;
    for (int i = 0; i < NF; i++) begin
      b = int'(faults[i].bitpos);
      if (hit(faults[i], a)) begin
        if (faults[i].kind == F_SA0) w[b] = 1'b0;
        if (faults[i].kind == F_SA1) w[b] = 1'b1;
      end
    end
    return w;
  endfunction

  always_ff @(posedge clk) begin
    if (cen && 32'(addr) < WORDS) begin
      if (we) mem[addr] <= written(mem[addr], din, nwrtm, addr);
      else    dout      <= observed(mem[addr], addr);
    end
  end

endmodule
