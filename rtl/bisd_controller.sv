// bisd_controller -- the single BISD controller shared by all distributed e-SRAMs.
//
// Holds the four parts of the controller and the record scan-out:
//   control_gen      sequences the March test and drives the global control wires;
//   address_trigger  steers every local address generator;
//   data_bg_gen      sends each element's pattern serially (MSB first) and gives the
//                    expected response bit;
//   comparator_array compares every memory's serial response with that bit;
//   diag_scanout     queues the failure records and shifts them out serially.
// It is sized for the largest memory (N_MAX words) and the widest (C_MAX IOs); it
// keeps every memory's size in MEM_WORDS/MEM_WIDTH. fail_valid/fail_rec give the
// same records in parallel, one per memory per clock, for on-chip repair logic.
// MEM_IDLE = 0 keeps the memories reading (data ignored) while the PSCs shift, for
// memories without an idle mode.
// A run starts when bisd rises; overflow flags and faulty flags are cleared then.
module bisd_controller
  import bisd_pkg::*;
#(
  parameter int unsigned NUM_MEM             = 3,
  parameter int unsigned MEM_WORDS [NUM_MEM] = '{512, 384, 256},
  parameter int unsigned MEM_WIDTH [NUM_MEM] = '{100, 37, 64},
  parameter int unsigned N_MAX               = 512,
  parameter int unsigned C_MAX               = 100,
  parameter int unsigned FIFO_DEPTH          = 8,
  parameter bit          MEM_IDLE            = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    bisd,
  output logic                    busy,
  output logic                    done,
  // global wires to the memories
  output logic                    spc_shift,
  output logic                    spc_sdi,
  output logic                    addr_load,
  output logic                    addr_step,
  output logic                    addr_dir,
  output logic                    mem_cen,
  output logic                    mem_we,
  output logic                    nwrtm,
  output logic                    scan_en,
  input  logic [NUM_MEM-1:0]      psc_so,
  // diagnosis results
  output logic [NUM_MEM-1:0]      fail_valid,
  output fail_rec_t [NUM_MEM-1:0] fail_rec,
  output logic [NUM_MEM-1:0]      faulty,
  output logic                    diag_so,
  output logic                    diag_valid,
  output logic [NUM_MEM-1:0]      diag_overflow,
  output logic                    diag_pending
);

  localparam int unsigned IW = (C_MAX > 1) ? $clog2(C_MAX) : 1;
  localparam int unsigned KW = (N_MAX > 1) ? $clog2(N_MAX) : 1;

  logic [ELEM_W-1:0] elem, cmp_elem;
  elem_t             elem_d, cmp_d;
  logic [IW-1:0]     del_idx, cmp_bit;
  logic [KW-1:0]     k, cmp_k;
  logic              at_load, at_load_dir, at_step, at_last;
  logic              cmp_valid, exp_bit;
  logic              bisd_q, start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bisd_q <= 1'b0;
    else        bisd_q <= bisd;
  end
  assign start = bisd && !bisd_q;

  control_gen #(.N(N_MAX), .C(C_MAX), .MEM_IDLE(MEM_IDLE), .IW(IW), .KW(KW)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .bisd       (bisd),
    .busy       (busy),
    .done       (done),
    .elem       (elem),
    .elem_d     (elem_d),
    .spc_shift  (spc_shift),
    .del_idx    (del_idx),
    .mem_cen    (mem_cen),
    .mem_we     (mem_we),
    .nwrtm      (nwrtm),
    .scan_en    (scan_en),
    .at_load    (at_load),
    .at_load_dir(at_load_dir),
    .at_step    (at_step),
    .at_last    (at_last),
    .at_k       (k),
    .cmp_valid  (cmp_valid),
    .cmp_bit    (cmp_bit),
    .cmp_k      (cmp_k),
    .cmp_elem   (cmp_elem)
  );

  address_trigger #(.N(N_MAX), .KW(KW)) u_at (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (at_load),
    .load_dir (at_load_dir),
    .step     (at_step),
    .addr_load(addr_load),
    .addr_step(addr_step),
    .addr_dir (addr_dir),
    .k        (k),
    .last     (at_last)
  );

  assign cmp_d = elem_desc(cmp_elem);

  data_bg_gen #(.C(C_MAX), .IW(IW)) u_dbg (
    .del_bg (elem_d.bg),
    .del_inv(elem_d.wr_inv),
    .del_idx(del_idx),
    .sdo    (spc_sdi),
    .exp_bg (cmp_d.bg),
    .exp_inv(cmp_d.rd_inv),
    .exp_idx(cmp_bit),
    .exp_bit(exp_bit)
  );

  comparator_array #(
    .NUM_MEM  (NUM_MEM),
    .MEM_WORDS(MEM_WORDS),
    .MEM_WIDTH(MEM_WIDTH),
    .IW       (IW),
    .KW       (KW)
  ) u_cmp (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr       (start),
    .cmp_valid (cmp_valid),
    .cmp_bit   (cmp_bit),
    .cmp_k     (cmp_k),
    .cmp_elem  (cmp_elem),
    .exp_bit   (exp_bit),
    .so        (psc_so),
    .fail_valid(fail_valid),
    .fail_rec  (fail_rec),
    .faulty    (faulty)
  );

  diag_scanout #(.NUM_MEM(NUM_MEM), .DEPTH(FIFO_DEPTH)) u_so (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr       (start),
    .rec_valid (fail_valid),
    .rec       (fail_rec),
    .diag_so   (diag_so),
    .diag_valid(diag_valid),
    .overflow  (diag_overflow),
    .pending   (diag_pending)
  );

  for (genvar j = 0; j < NUM_MEM; j++) begin : g_chk
    initial assert (MEM_WORDS[j] <= N_MAX && MEM_WIDTH[j] <= C_MAX)
      else $error("bisd_controller: memory %0d is larger than N_MAX x C_MAX", j);
  end

endmodule
