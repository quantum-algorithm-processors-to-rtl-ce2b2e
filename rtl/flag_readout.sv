// flag_readout: reading the Hamiltonian circuit flags out of the array.
//
// Every register ends with a flag bit that is 1 if its candidate is a
// Hamiltonian circuit. any_o is the OR of all flags: it tells at once
// whether the graph has a Hamiltonian circuit at all. To find which
// candidates passed, the block performs a multi-read as a content
// addressable memory does: index_o is the location of the lowest true flag
// not yet read, valid_o says whether there is one, and a pulse on next
// marks that location as read so the following one is presented. The
// caller maps a location back to its permutation, either from its own list
// of initializations or through the array's read port.
//
// Interface and timing: any_o, valid_o and index_o are combinational from
// flags and the read mask. next is taken at the clock edge; clear empties
// the read mask (start of a new readout) and wins over next.
//
// From the paper: the OR of all flag bits and the one-at-a-time multi-read
// of the locations of true flags. This design's own choices: the priority
// order (lowest location first) and the next/clear handshake.
module flag_readout #(
  parameter int unsigned NUM = 24,
  localparam int unsigned AW = (NUM > 1) ? $clog2(NUM) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NUM-1:0] flags,
  input  logic           clear,
  input  logic           next,
  output logic           any_o,
  output logic           valid_o,
  output logic [AW-1:0]  index_o
);

  logic [NUM-1:0] read_q;
  logic [NUM-1:0] pending;

  assign any_o   = |flags;
  assign pending = flags & ~read_q;
  assign valid_o = |pending;

  always_comb begin
    index_o = '0;
    for (int r = NUM - 1; r >= 0; r--) begin
      if (pending[r]) index_o = AW'(r);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  read_q <= '0;
    else if (clear)              read_q <= '0;
    else if (next && valid_o)    read_q[index_o] <= 1'b1;
  end

endmodule
