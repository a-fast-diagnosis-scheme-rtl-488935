// bisd_top -- distributed small e-SRAMs sharing one built-in self-diagnosis (BISD)
// controller.
//
// NUM_MEM memories of different sizes (MEM_WORDS[j] words x MEM_WIDTH[j] IOs) each
// sit in an esram_node with their own SPC, PSC and address generator; one
// bisd_controller, sized for the largest and widest memory, drives them all over a
// handful of shared wires and analyses all their responses in parallel. Raising
// bisd runs the complete March CW + NWRTM test on every memory at once; done rises
// after bisd_pkg::run_cycles(N_MAX, C_MAX) cycles. Failures come out both as
// parallel records (fail_valid/fail_rec, one per memory, for repair logic) and as a
// serial record stream (diag_so/diag_valid).
//
// While bisd is low the memories belong to the functional ports (func_*), which are
// packed arrays indexed by memory and sized for the largest memory; the upper bits
// of a narrower memory's data and address are unused and read back as 0.
// MEM_IDLE = 0 is for memories without an idle mode: they are then held in read
// mode while the PSCs shift (see control_gen).
// sram_faults only reaches the behavioural memory models, to inject up to NF
// defects per memory.
module bisd_top
  import bisd_pkg::*;
#(
  parameter int unsigned NUM_MEM             = 3,
  parameter int unsigned MEM_WORDS [NUM_MEM] = '{512, 384, 256},
  parameter int unsigned MEM_WIDTH [NUM_MEM] = '{100, 37, 64},
  parameter int unsigned FIFO_DEPTH          = 8,
  parameter int unsigned NF                  = NUM_FAULTS,
  parameter bit          MEM_IDLE            = 1'b1,
  parameter int unsigned N_MAX               = max_of(MEM_WORDS),
  parameter int unsigned C_MAX               = max_of(MEM_WIDTH),
  parameter int unsigned AW_MAX              = (N_MAX > 1) ? $clog2(N_MAX) : 1
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          bisd,
  output logic                                          busy,
  output logic                                          done,
  output logic [NUM_MEM-1:0]                            fail_valid,
  output fail_rec_t [NUM_MEM-1:0]                       fail_rec,
  output logic [NUM_MEM-1:0]                            faulty,
  output logic                                          diag_so,
  output logic                                          diag_valid,
  output logic [NUM_MEM-1:0]                            diag_overflow,
  output logic                                          diag_pending,
  input  logic [NUM_MEM-1:0]                            func_cen,
  input  logic [NUM_MEM-1:0]                            func_we,
  input  logic [NUM_MEM-1:0][AW_MAX-1:0]                func_addr,
  input  logic [NUM_MEM-1:0][C_MAX-1:0]                 func_din,
  output logic [NUM_MEM-1:0][C_MAX-1:0]                 func_dout,
  input  sram_fault_t [NUM_MEM-1:0][NF-1:0]             sram_faults
);

  function automatic int unsigned max_of(input int unsigned v [NUM_MEM]);
    int unsigned m;
    m = 1;
    for (int i = 0; i < NUM_MEM; i++) if (v[i] > m) m = v[i];
    return m;
  endfunction

  logic spc_shift, spc_sdi, addr_load, addr_step, addr_dir;
  logic mem_cen, mem_we, nwrtm, scan_en;
  logic [NUM_MEM-1:0] psc_so;

  bisd_controller #(
    .NUM_MEM   (NUM_MEM),
    .MEM_WORDS (MEM_WORDS),
    .MEM_WIDTH (MEM_WIDTH),
    .N_MAX     (N_MAX),
    .C_MAX     (C_MAX),
    .FIFO_DEPTH(FIFO_DEPTH),
    .MEM_IDLE  (MEM_IDLE)
  ) u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .bisd         (bisd),
    .busy         (busy),
    .done         (done),
    .spc_shift    (spc_shift),
    .spc_sdi      (spc_sdi),
    .addr_load    (addr_load),
    .addr_step    (addr_step),
    .addr_dir     (addr_dir),
    .mem_cen      (mem_cen),
    .mem_we       (mem_we),
    .nwrtm        (nwrtm),
    .scan_en      (scan_en),
    .psc_so       (psc_so),
    .fail_valid   (fail_valid),
    .fail_rec     (fail_rec),
    .faulty       (faulty),
    .diag_so      (diag_so),
    .diag_valid   (diag_valid),
    .diag_overflow(diag_overflow),
    .diag_pending (diag_pending)
  );

  for (genvar j = 0; j < NUM_MEM; j++) begin : g_mem
    localparam int unsigned W  = MEM_WIDTH[j];
    localparam int unsigned AW = (MEM_WORDS[j] > 1) ? $clog2(MEM_WORDS[j]) : 1;
    logic [W-1:0] dout;

    esram_node #(.WORDS(MEM_WORDS[j]), .WIDTH(W), .AW(AW), .NF(NF)) u_node (
      .clk      (clk),
      .rst_n    (rst_n),
      .bisd_mode(bisd),
      .spc_shift(spc_shift),
      .spc_sdi  (spc_sdi),
      .addr_load(addr_load),
      .addr_step(addr_step),
      .addr_dir (addr_dir),
      .mem_cen  (mem_cen),
      .mem_we   (mem_we),
      .nwrtm    (nwrtm),
      .scan_en  (scan_en),
      .psc_so   (psc_so[j]),
      .func_cen (func_cen[j]),
      .func_we  (func_we[j]),
      .func_addr(func_addr[j][AW-1:0]),
      .func_din (func_din[j][W-1:0]),
      .func_dout(dout),
      .faults   (sram_faults[j])
    );

    assign func_dout[j] = C_MAX'(dout);
  end

endmodule
