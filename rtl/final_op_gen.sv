// final_op_gen: the gate sequence that closes the circuit.
//
// After every edge detector has run, a register holds a candidate
// Hamiltonian circuit exactly when all n pair result lines are 1. This block
// gives the gates that AND them into the Hamiltonian circuit flag with a
// chain of double controlled NOTs, the same structure the edge detector uses
// for its (2k+1)-controlled NOT:
//   step j-1, j = 1 .. n-1   DCN(c(j-1), pair(j)) -> target(j)
// with c(0) = pair result 0, c(j) = scratch line j-1, and target(j) = scratch
// line j-1, except target(n-1) = the flag. The n-2 scratch gates are then
// repeated in reverse order (steps n-1 .. 2n-4), which returns the scratch
// lines to 0 and leaves only the flag changed. 2n-3 steps in all; last_o
// marks the final one. All gates are DCNs, so there is no NOT mask output.
// Combinational; needs n >= 3.
//
// From the paper: the all-ones detection of the pair results into the flag
// "using a method like" the pair result diagram, with n-1 gates. This
// design's own choices: the chain order and the scratch restore, which the
// paper does not draw for this step.
module final_op_gen
  import qap_pkg::*;
#(
  parameter int unsigned N = 5,
  parameter int unsigned K = 3,
  parameter bit ENABLES = 1'b1,
  localparam int unsigned LW = $clog2(bits_per_reg(N, K, ENABLES)),
  localparam int unsigned SW = $clog2(2*N)
) (
  input  logic [SW-1:0]   step,
  output opcode_e         op_code,
  output logic [LW-1:0]   op_a,
  output logic [LW-1:0]   op_b,
  output logic [LW-1:0]   op_t,
  output logic            last_o
);

  always_comb begin
    int unsigned s, j;
    s = 32'(step);
    j = (s <= N - 2) ? (s + 1) : (2*N - 3 - s);
    op_code = OP_NOP;
    op_a    = '0;
    op_b    = '0;
    op_t    = '0;
    last_o  = (s == 2*N - 4);
    if (s <= 2*N - 4 && j >= 1 && j <= N - 1) begin
      op_code = OP_DCN;
      op_a = LW'((j == 1) ? pair_line(N, K, 0) : scr_line(N, K, j - 2, ENABLES));
      op_b = LW'(pair_line(N, K, j));
      op_t = LW'((j == N - 1) ? flag_line(N, K, ENABLES) : scr_line(N, K, j - 1, ENABLES));
    end
  end

endmodule
