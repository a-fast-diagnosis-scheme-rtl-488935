// esram_node -- one distributed e-SRAM with its local diagnosis logic.
//
// Everything that sits next to a memory: the SPC that turns the serial pattern into
// the memory's data inputs, the PSC that serialises its read data, the local address
// generator, and 2:1 multiplexers that choose between the functional inputs and the
// test inputs. Only a few global wires reach the node from the shared controller:
// spc_shift/spc_sdi (pattern delivery), addr_load/addr_step/addr_dir (address
// trigger), mem_cen/mem_we/nwrtm (memory control), scan_en (response
// serialisation: capture while low, shift while high), and psc_so goes back. The
// controller keeps the memory idle (cen low) while the PSC shifts, or reading the
// same word if it is built for memories without an idle mode.
//
// bisd_mode high selects the test inputs; low gives the functional port full
// control of the memory, and nwrtm is then forced low. func_dout is the memory's
// read data in either mode. faults is passed to the behavioural memory model only.
module esram_node
  import bisd_pkg::*;
#(
  parameter int unsigned WORDS = 512,
  parameter int unsigned WIDTH = 100,
  parameter int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1,
  parameter int unsigned NF    = NUM_FAULTS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         bisd_mode,
  // global test wires
  input  logic                         spc_shift,
  input  logic                         spc_sdi,
  input  logic                         addr_load,
  input  logic                         addr_step,
  input  logic                         addr_dir,
  input  logic                         mem_cen,
  input  logic                         mem_we,
  input  logic                         nwrtm,
  input  logic                         scan_en,
  output logic                         psc_so,
  // functional port
  input  logic                         func_cen,
  input  logic                         func_we,
  input  logic [AW-1:0]                func_addr,
  input  logic [WIDTH-1:0]             func_din,
  output logic [WIDTH-1:0]             func_dout,
  // behavioural model only
  input  sram_fault_t [NF-1:0]         faults
);

  logic [WIDTH-1:0] spc_q, ram_din, ram_dout;
  logic [AW-1:0]    test_addr, ram_addr;
  logic             ram_cen, ram_we, ram_nwrtm;

  spc #(.WIDTH(WIDTH)) u_spc (
    .clk     (clk),
    .rst_n   (rst_n),
    .shift_en(spc_shift),
    .sdi     (spc_sdi),
    .q       (spc_q)
  );

  local_addr_gen #(.WORDS(WORDS), .AW(AW)) u_ag (
    .clk     (clk),
    .rst_n   (rst_n),
    .load    (addr_load),
    .step    (addr_step),
    .dir_down(addr_dir),
    .addr    (test_addr)
  );

  always_comb begin
    if (bisd_mode) begin
      ram_cen   = mem_cen;
      ram_we    = mem_we;
      ram_addr  = test_addr;
      ram_din   = spc_q;
      ram_nwrtm = nwrtm;
    end else begin
      ram_cen   = func_cen;
      ram_we    = func_we;
      ram_addr  = func_addr;
      ram_din   = func_din;
      ram_nwrtm = 1'b0;
    end
  end

  esram #(.WORDS(WORDS), .WIDTH(WIDTH), .AW(AW), .NF(NF)) u_ram (
    .clk   (clk),
    .cen   (ram_cen),
    .we    (ram_we),
    .nwrtm (ram_nwrtm),
    .addr  (ram_addr),
    .din   (ram_din),
    .dout  (ram_dout),
    .faults(faults)
  );

  psc #(.WIDTH(WIDTH)) u_psc (
    .clk    (clk),
    .rst_n  (rst_n),
    .scan_en(scan_en),
    .d      (ram_dout),
    .so     (psc_so)
  );

  assign func_dout = ram_dout;

endmodule
