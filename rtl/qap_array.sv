// qap_array: the (n-1)! registers of the processor, working in parallel.
//
// Each register holds one candidate Hamiltonian circuit, a permutation of the
// vertices that starts at vertex 0, and the workspace lines its wiring
// diagram needs. All registers receive the same gate in the same clock, so
// the whole array tests every candidate in the time one register takes.
// The only per-register paths are the initialization write port, which works
// like an ordinary memory write, a read port for the stored vertex codes, and
// one flag bit per register.
//
// Interface and timing: op_* as in qap_register, applied to every register
// at the clock edge where op_valid is 1. wr_en writes wr_codes into register
// wr_addr at the clock edge. rd_codes shows the vertex codes of register
// rd_addr combinationally. flags_o[r] is the Hamiltonian circuit flag of
// register r, valid once the gate stream has finished.
//
// From the paper: NUM = (n-1)! registers, one initialization per register,
// every register processed in parallel, and conventional addressing as an
// option for reading a register. This design's own choices: the write and
// read ports themselves.
module qap_array
  import qap_pkg::*;
#(
  parameter int unsigned N = 5,
  parameter int unsigned K = 3,
  parameter bit ENABLES = 1'b1,
  parameter int unsigned NUM = factorial(N - 1),
  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES),
  localparam int unsigned LW = $clog2(BITS),
  localparam int unsigned AW = (NUM > 1) ? $clog2(NUM) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            op_valid,
  input  opcode_e         op_code,
  input  logic [LW-1:0]   op_a,
  input  logic [LW-1:0]   op_b,
  input  logic [LW-1:0]   op_t,
  input  logic [BITS-1:0] op_mask,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [N*K-1:0]  wr_codes,
  input  logic [AW-1:0]   rd_addr,
  output logic [N*K-1:0]  rd_codes,
  output logic [NUM-1:0]  flags_o
);

  logic [BITS-1:0] lines [NUM];

  for (genvar r = 0; r < NUM; r++) begin : g_reg
    qap_register #(.N(N), .K(K), .ENABLES(ENABLES)) u_reg (
      .clk     (clk),
      .rst_n   (rst_n),
      .op_valid(op_valid),
      .op_code (op_code),
      .op_a    (op_a),
      .op_b    (op_b),
      .op_t    (op_t),
      .op_mask (op_mask),
      .wr_en   (wr_en && (32'(wr_addr) == r)),
      .wr_codes(wr_codes),
      .lines_o (lines[r]),
      .flag_o  (flags_o[r])
    );
  end

  assign rd_codes = (32'(rd_addr) < NUM) ? lines[rd_addr][N*K-1:0] : '0;

endmodule
