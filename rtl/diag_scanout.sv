// diag_scanout -- registers the diagnosis records of all comparators and scans them
// out of the chip on one serial wire.
//
// Each memory has a small FIFO (DEPTH records) that takes at most one record per
// clock from its comparator. A round-robin arbiter picks the next non-empty FIFO
// whenever the serialiser is free, and the serialiser sends the record MSB first,
// one bit per clock, with diag_valid high for each of the FAIL_REC_W bits (a new
// record may follow with no gap). A record that arrives at a full FIFO is lost and
// sets that memory's sticky overflow flag, so an off-line analysis knows the list
// is incomplete. clr empties nothing but clears the overflow flags; pending is high
// while any record is still queued or being sent.
module diag_scanout
  import bisd_pkg::*;
#(
  parameter int unsigned NUM_MEM = 3,
  parameter int unsigned DEPTH   = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic [NUM_MEM-1:0]      rec_valid,
  input  fail_rec_t [NUM_MEM-1:0] rec,
  output logic                    diag_so,
  output logic                    diag_valid,
  output logic [NUM_MEM-1:0]      overflow,
  output logic                    pending
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned MW = (NUM_MEM > 1) ? $clog2(NUM_MEM) : 1;
  localparam int unsigned BW = $clog2(FAIL_REC_W + 1);

  fail_rec_t        fifo   [NUM_MEM][DEPTH];
  logic [PW-1:0]    rd_ptr [NUM_MEM];
  logic [PW-1:0]    wr_ptr [NUM_MEM];
  logic [PW:0]      count  [NUM_MEM];
  logic [NUM_MEM-1:0] nonempty, pop;

  logic [FAIL_REC_W-1:0] shreg;
  logic [BW-1:0]         bits_left;
  logic [MW-1:0]         rr;       // memory to look at first
  logic                  grant_any;
  logic [MW-1:0]         grant;

  for (genvar j = 0; j < NUM_MEM; j++) begin : g_fifo
    assign nonempty[j] = (count[j] != '0);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_ptr[j]   <= '0;
        wr_ptr[j]   <= '0;
        count[j]    <= '0;
        overflow[j] <= 1'b0;
      end else begin
        if (rec_valid[j] && 32'(count[j]) < DEPTH) begin
          fifo[j][wr_ptr[j]] <= rec[j];
          wr_ptr[j] <= (32'(wr_ptr[j]) == DEPTH - 1) ? '0 : wr_ptr[j] + 1'b1;
        end
        if (pop[j])
          rd_ptr[j] <= (32'(rd_ptr[j]) == DEPTH - 1) ? '0 : rd_ptr[j] + 1'b1;
        case ({rec_valid[j] && 32'(count[j]) < DEPTH, pop[j]})
          2'b10:   count[j] <= count[j] + 1'b1;
          2'b01:   count[j] <= count[j] - 1'b1;
          default: ;
        endcase
        if (clr)                                      overflow[j] <= 1'b0;
        else if (rec_valid[j] && 32'(count[j]) >= DEPTH) overflow[j] <= 1'b1;
      end
    end
  end

  // Round-robin choice among the non-empty FIFOs, starting at rr.
  always_comb begin
    grant_any = 1'b0;
    grant     = '0;
    for (int i = 0; i < NUM_MEM; i++) begin
      int unsigned j;
      j = (32'(rr) + i) % NUM_MEM;
      if (!grant_any && nonempty[j]) begin
        grant_any = 1'b1;
        grant     = MW'(j);
      end
    end
  end

  logic load_next;
  assign load_next = grant_any && (bits_left <= BW'(1));

  always_comb begin
    pop = '0;
    if (load_next) pop[grant] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '0;
      bits_left <= '0;
      rr        <= '0;
    end else if (load_next) begin
      shreg     <= fifo[grant][rd_ptr[grant]];
      bits_left <= BW'(FAIL_REC_W);
      rr        <= (32'(grant) == NUM_MEM - 1) ? '0 : grant + 1'b1;
    end else if (bits_left != '0) begin
      shreg     <= shreg << 1;
      bits_left <= bits_left - 1'b1;
    end
  end

  assign diag_so    = shreg[FAIL_REC_W-1];
  assign diag_valid = (bits_left != '0);
  assign pending    = diag_valid || (nonempty != '0);

endmodule
