// hc_qap_top: a processor that finds all Hamiltonian circuits of a graph.
//
// The processor tests every candidate circuit at once. A candidate is a
// permutation of the n vertices beginning at vertex 0; there are (n-1)! of
// them, each loaded into a register of its own. A sequencer then broadcasts
// one wiring diagram, gate by gate, to all registers: for every consecutive
// vertex pair of the candidate (including the pair that closes the circuit
// back to vertex 0) and for every edge of the graph in both directions, an
// edge detector sets the pair's result line if the pair is that edge. A
// final AND of the n pair results sets the register's Hamiltonian circuit
// flag. The flags are then read out: their OR says whether any circuit
// exists, and a multi-read lists the registers whose flag is set.
//
// Interface and timing:
//   load    wr_en/wr_addr/wr_codes write one candidate (vertex i of the
//           candidate in wr_codes[i*k +: k]) into register wr_addr.
//   graph   num_edges edges edge_u[j]-edge_v[j]; stable while busy_o.
//   run     a start pulse (idle only) runs the gate stream, about 8kmn
//           slots at one gate per clock; done_o pulses at the end. start
//           also clears the readout.
//   result  any_flag_o, flags_o; flag_valid_o/flag_index_o give the lowest
//           unread true flag, rd_next steps to the next, rd_clear restarts.
//           rd_addr/rd_codes read back a register's candidate.
// The candidates themselves are computed off chip.
//
// ENABLES = 1 (default) builds the one-shot enables, which also reject
// candidates that revisit a vertex; ENABLES = 0 builds the smaller register
// without enable lines, which is correct only when every candidate is a
// permutation of the vertices.
//
// From the paper: the structure of registers processed in parallel by one
// wiring diagram, the edge detectors, the one-shot enables, the closing AND
// and the flag OR and multi-read. This design's own choices are the ports,
// the clocking of one gate per cycle, and the graph given as an edge list.
module hc_qap_top
  import qap_pkg::*;
#(
  parameter int unsigned N = 5,
  parameter int unsigned K = 3,
  parameter bit ENABLES = 1'b1,
  parameter int unsigned MAX_M = 10,
  parameter int unsigned NUM = factorial(N - 1),
  localparam int unsigned AW = (NUM > 1) ? $clog2(NUM) : 1,
  localparam int unsigned MW = $clog2(MAX_M + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [MW-1:0]   num_edges,
  input  logic [K-1:0]    edge_u [MAX_M],
  input  logic [K-1:0]    edge_v [MAX_M],
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [N*K-1:0]  wr_codes,
  input  logic [AW-1:0]   rd_addr,
  output logic [N*K-1:0]  rd_codes,
  output logic            busy_o,
  output logic            done_o,
  output logic [NUM-1:0]  flags_o,
  output logic            any_flag_o,
  input  logic            rd_clear,
  input  logic            rd_next,
  output logic            flag_valid_o,
  output logic [AW-1:0]   flag_index_o
);

  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES);
  localparam int unsigned LW = $clog2(BITS);

  logic            op_valid;
  opcode_e         op_code;
  logic [LW-1:0]   op_a, op_b, op_t;
  logic [BITS-1:0] op_mask;

  qap_sequencer #(.N(N), .K(K), .ENABLES(ENABLES), .MAX_M(MAX_M)) u_seq (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .num_edges(num_edges),
    .edge_u   (edge_u),
    .edge_v   (edge_v),
    .op_valid (op_valid),
    .op_code  (op_code),
    .op_a     (op_a),
    .op_b     (op_b),
    .op_t     (op_t),
    .op_mask  (op_mask),
    .busy_o   (busy_o),
    .done_o   (done_o)
  );

  qap_array #(.N(N), .K(K), .ENABLES(ENABLES), .NUM(NUM)) u_array (
    .clk     (clk),
    .rst_n   (rst_n),
    .op_valid(op_valid),
    .op_code (op_code),
    .op_a    (op_a),
    .op_b    (op_b),
    .op_t    (op_t),
    .op_mask (op_mask),
    .wr_en   (wr_en),
    .wr_addr (wr_addr),
    .wr_codes(wr_codes),
    .rd_addr (rd_addr),
    .rd_codes(rd_codes),
    .flags_o (flags_o)
  );

  flag_readout #(.NUM(NUM)) u_rd (
    .clk    (clk),
    .rst_n  (rst_n),
    .flags  (flags_o),
    .clear  (rd_clear || (start && !busy_o)),
    .next   (rd_next),
    .any_o  (any_flag_o),
    .valid_o(flag_valid_o),
    .index_o(flag_index_o)
  );

  // Candidates must not be rewritten while the gate stream runs.
  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n) busy_o |-> !wr_en);

endmodule
