// qap_register: one register ("little classical computer") of the Hamiltonian
// circuit processor.
//
// The register holds one candidate circuit as n k-bit vertex codes, together
// with the workspace lines the wiring diagram acts on: n pair result lines, n
// enable lines, the scratch pad lines and the Hamiltonian circuit flag (line
// layout in qap_pkg). It has no program of its own: every clock with op_valid
// high it applies the one broadcast gate to its own lines, exactly as every
// other register does in the same slot. The gate set is the NOT layer, CN,
// DCN and the two irreversible zeroing operations (zero, and zero the target
// if the control line is 1), plus OP_INIT, which clears pair results,
// scratch and flag and sets all enables to 1.
//
// Interface and timing: the gate on op_* takes effect at the clock edge where
// op_valid is 1; the new line values show on lines_o one cycle later. wr_en
// loads the n vertex codes from wr_codes (vertex i in bits i*k+k-1 .. i*k)
// and leaves the workspace lines alone; a write wins over a gate in the same
// cycle. Reset clears every line and sets the enables to 1.
//
// ENABLES = 1 builds the n enable lines of the one-shot enable method;
// ENABLES = 0 leaves them out, the reduced register of n(k+1) + scratch + 1
// lines for permutation-only initializations.
//
// From the paper: the gate set, the line roles and counts, and that each
// register starts from its own initialization of vertex codes. This design's
// own choices: one gate per clock, the write port, the reset state, and the
// encoding of a gate as an opcode with two control and one target line index.
module qap_register
  import qap_pkg::*;
#(
  parameter int unsigned N = 5,
  parameter int unsigned K = 3,
  parameter bit ENABLES = 1'b1,
  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES),
  localparam int unsigned LW = $clog2(BITS)
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
  input  logic [N*K-1:0]  wr_codes,
  output logic [BITS-1:0] lines_o,
  output logic            flag_o
);

  localparam int unsigned FLAG  = flag_line(N, K, ENABLES);

  // Workspace start state: enables (if built) at 1, everything else at 0.
  function automatic logic [BITS-1:0] init_ws();
    logic [BITS-1:0] w = '0;
    if (ENABLES) for (int unsigned v = 0; v < N; v++) w[en_line(N, K, v)] = 1'b1;
    return w;
  endfunction
  localparam logic [BITS-1:0] INIT_WS = init_ws();
  localparam logic [BITS-1:0] CODE_MASK = {{(BITS-N*K){1'b0}}, {(N*K){1'b1}}};

  logic [BITS-1:0] lines_q, lines_d;
  logic            la, lb;

  assign la = (32'(op_a) < BITS) ? lines_q[op_a] : 1'b0;
  assign lb = (32'(op_b) < BITS) ? lines_q[op_b] : 1'b0;

  always_comb begin
    lines_d = lines_q;
    if (wr_en) begin
      lines_d[N*K-1:0] = wr_codes;
    end else if (op_valid) begin
      unique case (op_code)
        OP_INIT:  lines_d = (lines_q & CODE_MASK) | INIT_WS;
        OP_NOTM:  lines_d = lines_q ^ op_mask;
        OP_CN:    if (32'(op_t) < BITS) lines_d[op_t] = lines_q[op_t] ^ la;
        OP_DCN:   if (32'(op_t) < BITS) lines_d[op_t] = lines_q[op_t] ^ (la & lb);
        OP_ZERO:  if (32'(op_t) < BITS) lines_d[op_t] = 1'b0;
        OP_CZERO: if (32'(op_t) < BITS && la) lines_d[op_t] = 1'b0;
        default:  lines_d = lines_q;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lines_q <= INIT_WS;
    else        lines_q <= lines_d;
  end

  assign lines_o = lines_q;
  assign flag_o  = lines_q[FLAG];

endmodule
