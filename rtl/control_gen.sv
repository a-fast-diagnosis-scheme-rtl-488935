// control_gen -- control generator of the shared BISD controller.
//
// A state machine that runs the whole March test (element list in bisd_pkg) over
// all memories at once, sized for the largest memory (N words) and the widest (C
// IOs). For each element it
//   1. delivers the element's write pattern serially to every SPC (C cycles,
//      spc_shift high, pattern bit del_idx = C-1 .. 0); a read-only element has no
//      delivery;
//   2. visits N addresses; at each it performs
//        read  : one memory read cycle (mem_cen), one capture cycle (scan_en
//                low, memory idle) and C-1 shift cycles (scan_en high, memory
//                idle);
//        write : one memory write cycle (mem_cen, mem_we), with nwrtm held high
//                throughout a no-write-recovery element.
// A write therefore costs 1 cycle, a read C+1 cycles and a delivery C cycles, and a
// complete run lasts bisd_pkg::run_cycles(N, C) cycles with no gaps between
// elements. The data inputs (SPC) and the write enable stay unchanged from a read
// until its last shift, so the extra cycles do not weaken at-speed coverage.
//
// The comparison strobe (cmp_valid, cmp_bit, cmp_k, cmp_elem) is registered: it is
// high in the cycle in which response bit cmp_bit of the read at index cmp_k sits
// on every PSC's serial output, i.e. one cycle after the capture or shift that put
// it there. The last strobe of a read overlaps the next operation.
//
// MEM_IDLE says whether the memories have an idle (no-op) mode. If they have
// (the default), mem_cen is low during the capture and shift cycles; if not, the
// memories are kept in read mode at the same address with the data ignored, as
// the scheme allows for such memories. The PSCs are shifting while these extra
// reads happen, so they change nothing that is compared, and the run length is the
// same either way.
//
// bisd is a level: raising it starts a run, done rises when the run ends and stays
// high while bisd is high; dropping bisd returns to idle at any time.
module control_gen
  import bisd_pkg::*;
#(
  parameter int unsigned N  = 512,
  parameter int unsigned C  = 100,
  parameter bit          MEM_IDLE = 1'b1,
  parameter int unsigned IW = (C > 1) ? $clog2(C) : 1,
  parameter int unsigned KW = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bisd,
  output logic              busy,
  output logic              done,
  // current element
  output logic [ELEM_W-1:0] elem,
  output elem_t             elem_d,
  // pattern delivery
  output logic              spc_shift,
  output logic [IW-1:0]     del_idx,
  // memory controls (global wires)
  output logic              mem_cen,
  output logic              mem_we,
  output logic              nwrtm,
  output logic              scan_en,
  // address trigger
  output logic              at_load,
  output logic              at_load_dir,
  output logic              at_step,
  input  logic              at_last,
  input  logic [KW-1:0]     at_k,
  // comparison strobe, aligned with the PSC serial outputs
  output logic              cmp_valid,
  output logic [IW-1:0]     cmp_bit,
  output logic [KW-1:0]     cmp_k,
  output logic [ELEM_W-1:0] cmp_elem
);

  localparam int unsigned NE = num_elems(C);

  typedef enum logic [2:0] {
    S_IDLE, S_DELIVER, S_RD, S_CAP, S_SHIFT, S_WR, S_DONE
  } state_e;

  state_e            state, state_n;
  logic [IW-1:0]     cnt, cnt_n;
  logic [ELEM_W-1:0] elem_n;
  elem_t             next_d;
  logic              group_end;

  assign elem_d = elem_desc(elem);
  assign next_d = elem_desc(elem + 1'b1);

  // First state of an element.
  function automatic state_e first_state(input elem_t d);
    if (d.has_write) return S_DELIVER;
    return S_RD;
  endfunction

  // The last cycle of the operations at one address.
  always_comb begin
    group_end = 1'b0;
    case (state)
      S_WR:    group_end = 1'b1;
      S_CAP:   group_end = (C == 1) && !elem_d.has_write;
      S_SHIFT: group_end = (cnt == IW'(C - 1)) && !elem_d.has_write;
      default: group_end = 1'b0;
    endcase
  end

  always_comb begin
    state_n     = state;
    cnt_n       = cnt;
    elem_n      = elem;
    at_load     = 1'b0;
    at_load_dir = 1'b0;
    at_step     = 1'b0;
    case (state)
      S_IDLE: if (bisd) begin
        elem_n      = '0;
        at_load     = 1'b1;
        at_load_dir = elem_desc('0).dir_down;
        state_n     = first_state(elem_desc('0));
        cnt_n       = IW'(C - 1);
      end
      S_DELIVER: begin
        if (cnt == '0) state_n = elem_d.has_read ? S_RD : S_WR;
        else           cnt_n   = cnt - 1'b1;
      end
      S_RD:  state_n = S_CAP;
      S_CAP: begin
        if (C > 1)                   begin state_n = S_SHIFT; cnt_n = IW'(1); end
        else if (elem_d.has_write)   state_n = S_WR;
      end
      S_SHIFT: begin
        if (cnt == IW'(C - 1)) begin
          if (elem_d.has_write) state_n = S_WR;
        end else cnt_n = cnt + 1'b1;
      end
      S_DONE: ;
      default: ;
    endcase

    if (group_end) begin
      if (!at_last) begin
        at_step = 1'b1;
        state_n = elem_d.has_read ? S_RD : S_WR;
      end else if (32'(elem) == NE - 1) begin
        state_n = S_DONE;
      end else begin
        elem_n      = elem + 1'b1;
        at_load     = 1'b1;
        at_load_dir = next_d.dir_down;
        state_n     = first_state(next_d);
        cnt_n       = IW'(C - 1);
      end
    end

    if (!bisd) state_n = S_IDLE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      elem      <= '0;
      cmp_valid <= 1'b0;
      cmp_bit   <= '0;
      cmp_k     <= '0;
      cmp_elem  <= '0;
    end else begin
      state     <= state_n;
      cnt       <= cnt_n;
      elem      <= elem_n;
      cmp_valid <= bisd && (state == S_CAP || state == S_SHIFT);
      cmp_bit   <= (state == S_CAP) ? '0 : cnt;
      cmp_k     <= at_k;
      cmp_elem  <= elem;
    end
  end

  assign busy      = !(state == S_IDLE || state == S_DONE);
  assign done      = (state == S_DONE);
  assign spc_shift = (state == S_DELIVER);
  assign del_idx   = cnt;
  assign mem_cen   = (state == S_RD) || (state == S_WR) ||
                     (!MEM_IDLE && (state == S_CAP || state == S_SHIFT));
  assign mem_we    = (state == S_WR);
  assign nwrtm     = busy && elem_d.nwrtm;
  assign scan_en   = (state == S_SHIFT);

  // A read needs at least one shift; a width of 1 would make the capture the only
  // PSC cycle, which the state machine supports, but the counters need C >= 2.
  initial assert (C >= 2 && N >= 1) else $error("control_gen: need C >= 2 and N >= 1");
  initial assert (NE <= (1 << ELEM_W)) else $error("control_gen: too many elements for ELEM_W");

endmodule
