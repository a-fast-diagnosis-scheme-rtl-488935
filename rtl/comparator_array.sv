// comparator_array -- the comparator array of the shared BISD controller.
//
// One comparator per memory, all driven by the same comparison strobe and expected
// bit, each with the size of its own memory (MEM_WORDS[j] x MEM_WIDTH[j]); this size
// information, kept in the controller, lets it ignore the repeated reads of a
// memory smaller than the largest one. The responses of all memories are analysed
// in parallel, each serially, one bit per clock. Outputs are one fail pulse and
// record per memory, one cycle after the strobe, and a sticky faulty flag per memory.
module comparator_array
  import bisd_pkg::*;
#(
  parameter int unsigned NUM_MEM              = 3,
  parameter int unsigned MEM_WORDS [NUM_MEM]  = '{512, 384, 256},
  parameter int unsigned MEM_WIDTH [NUM_MEM]  = '{100, 37, 64},
  parameter int unsigned IW                   = 7,
  parameter int unsigned KW                   = 9
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    cmp_valid,
  input  logic [IW-1:0]           cmp_bit,
  input  logic [KW-1:0]           cmp_k,
  input  logic [ELEM_W-1:0]       cmp_elem,
  input  logic                    exp_bit,
  input  logic [NUM_MEM-1:0]      so,
  output logic [NUM_MEM-1:0]      fail_valid,
  output fail_rec_t [NUM_MEM-1:0] fail_rec,
  output logic [NUM_MEM-1:0]      faulty
);

  for (genvar j = 0; j < NUM_MEM; j++) begin : g_cmp
    comparator #(
      .WORDS (MEM_WORDS[j]),
      .WIDTH (MEM_WIDTH[j]),
      .MEM_ID(j),
      .IW    (IW),
      .KW    (KW)
    ) u_cmp (
      .clk       (clk),
      .rst_n     (rst_n),
      .clr       (clr),
      .cmp_valid (cmp_valid),
      .cmp_bit   (cmp_bit),
      .cmp_k     (cmp_k),
      .cmp_elem  (cmp_elem),
      .exp_bit   (exp_bit),
      .so        (so[j]),
      .fail_valid(fail_valid[j]),
      .fail_rec  (fail_rec[j]),
      .faulty    (faulty[j])
    );
  end

endmodule
