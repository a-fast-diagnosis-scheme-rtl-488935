// address_trigger -- address trigger of the shared BISD controller.
//
// Sends the three global wires that steer every local address generator (addr_load,
// addr_step, addr_dir) and keeps k, the index of the current operation within the
// March element as seen by the largest memory (0 .. N-1 in the order the addresses
// are visited). last tells the control generator that the element is on its final
// address. The comparator array uses k, together with each memory's size, to find
// the reads that belong to a memory's first pass over its addresses.
//
// Timing: load and step are requests from the control generator in the same cycle;
// they are passed straight on, and k changes on the following clock edge, together
// with the local addresses. addr_dir follows load_dir in the cycle of a load and
// holds that value for the rest of the element.
module address_trigger #(
  parameter int unsigned N  = 512,
  parameter int unsigned KW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          load_dir,
  input  logic          step,
  output logic          addr_load,
  output logic          addr_step,
  output logic          addr_dir,
  output logic [KW-1:0] k,
  output logic          last
);

  logic dir_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k     <= '0;
      dir_q <= 1'b0;
    end else if (load) begin
      k     <= '0;
      dir_q <= load_dir;
    end else if (step) begin
      k     <= (k == KW'(N - 1)) ? '0 : k + 1'b1;
    end
  end

  assign addr_load = load;
  assign addr_step = step && !load;
  assign addr_dir  = load ? load_dir : dir_q;
  assign last      = (k == KW'(N - 1));

endmodule
