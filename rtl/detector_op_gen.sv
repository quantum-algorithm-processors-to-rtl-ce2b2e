// detector_op_gen: the gate sequence of one edge detector.
//
// An edge detector asks whether the vertex pair i of a register (vertex i and
// vertex i+1, or vertex n-1 and vertex 0 for the closing pair) holds the
// directed edge src->dst, and if so sets the pair result line of pair i. It
// is a fixed wiring diagram programmed by the edge: no register-specific
// state is involved, so this block only computes which gate to broadcast in
// each step. The steps of a detector are:
//   step 0            NOT layer on the 2k code lines of the pair wherever the
//                     edge code has a 0, so that a matching code becomes all
//                     ones
//   steps 1..2k-1     the DCN chain of the (2k+1)-controlled NOT: DCN(a,b)->s0,
//                     then for each further bit pair DCN(x,y)->s(2q-1) and
//                     DCN(s(2q-2),s(2q-1))->s(2q); the last scratch line is the
//                     AND of all 2k code lines
//   step 2k           DCN(enable[src], last scratch) -> pair result i; the
//                     closing pair is not gated by an enable and uses
//                     CN(last scratch) -> pair result
//   step 2k+1         one-shot enable: zero enable[src] if the last scratch
//                     line is 1 (left out for the closing pair)
//   next 2k-1 steps   the DCN chain again in reverse order, which restores
//                     the scratch lines to 0
//   last step         the same NOT layer, which restores the vertex codes
// A detector therefore takes 4k+2 slots, 4k+1 for the closing pair. With
// ENABLES = 0 (the reduced register without enable lines, enough when the
// candidates are permutations) every pair is built like the closing pair:
// CN into the pair result, no one-shot step, 4k+1 slots. last_o marks the
// final step.
//
// Code lines are taken most significant bit first (a,b,c = source, d,e,f =
// destination for k = 3), which gives the gate order of the paper's pair
// result and scratch restore diagrams. Combinational; no clock.
//
// From the paper: the NOT conversion to all ones, the DCN chain and its
// order, the enable as the extra control, the scratch restore, the closing
// pair without enable, and the irreversible one-shot enable reset. This
// design's own choices: which enable gates a detector (the one of the source
// vertex), that the one-shot reset is controlled by the detector's own
// AND-chain output (the pair result line is shared by all detectors of a pair
// and would also zero the enables of later detectors), and that the NOT
// layer is a single slot.
module detector_op_gen
  import qap_pkg::*;
#(
  parameter int unsigned N = 5,
  parameter int unsigned K = 3,
  parameter bit ENABLES = 1'b1,
  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES),
  localparam int unsigned LW = $clog2(BITS),
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SW = $clog2(4*K+2)
) (
  input  logic [PW-1:0]   pair_i,
  input  logic [K-1:0]    src_code,
  input  logic [K-1:0]    dst_code,
  input  logic [SW-1:0]   step,
  output opcode_e         op_code,
  output logic [LW-1:0]   op_a,
  output logic [LW-1:0]   op_b,
  output logic [LW-1:0]   op_t,
  output logic [BITS-1:0] op_mask,
  output logic            last_o
);

  localparam int unsigned SCR0 = scr_line(N, K, 0, ENABLES);

  // Line of code bit p (0 = source MSB ... 2k-1 = destination LSB) of pair i.
  function automatic int unsigned xline(int unsigned i, int unsigned p);
    int unsigned v;
    int unsigned b;
    v = (p < K) ? i : ((i + 1) % N);
    b = (p < K) ? (K - 1 - p) : (K - 1 - (p - K));
    return v * K + b;
  endfunction

  // Gate g (0 .. 2k-2) of the DCN chain: controls ca, cb, target ct.
  function automatic void chain_gate(input int unsigned i, input int unsigned g,
                                     output int unsigned ca, output int unsigned cb,
                                     output int unsigned ct);
    int unsigned q;
    if (g == 0) begin
      ca = xline(i, 0); cb = xline(i, 1); ct = SCR0;
    end else if (g % 2 == 1) begin
      q  = (g + 1) / 2;
      ca = xline(i, 2*q); cb = xline(i, 2*q + 1); ct = SCR0 + 2*q - 1;
    end else begin
      q  = g / 2;
      ca = SCR0 + 2*q - 2; cb = SCR0 + 2*q - 1; ct = SCR0 + 2*q;
    end
  endfunction

  always_comb begin
    int unsigned i, s, ca, cb, ct, slast, jv;
    logic closing, ungated;
    i       = 32'(pair_i);
    closing = (i == N - 1);
    ungated = closing || !ENABLES;
    s       = 32'(step);
    // Without an enable there is no one-shot enable step: skip step 2k+1.
    if (ungated && s >= 2*K + 1) s = s + 1;
    slast   = SCR0 + 2*K - 2;
    jv      = (i + 1) % N;

    op_code = OP_NOP;
    op_a    = '0;
    op_b    = '0;
    op_t    = '0;
    op_mask = '0;
    last_o  = (s == 4*K + 1);
    ca = 0; cb = 0; ct = 0;

    if (s == 0 || s == 4*K + 1) begin
      op_code = OP_NOTM;
      for (int unsigned b = 0; b < K; b++) begin
        op_mask[i*K + b]  = ~src_code[b];
        op_mask[jv*K + b] = ~dst_code[b];
      end
    end else if (s <= 2*K - 1) begin
      chain_gate(i, s - 1, ca, cb, ct);
      op_code = OP_DCN;
      op_a = LW'(ca); op_b = LW'(cb); op_t = LW'(ct);
    end else if (s == 2*K) begin
      op_t = LW'(pair_line(N, K, i));
      if (ungated) begin
        op_code = OP_CN;
        op_a = LW'(slast);
      end else begin
        op_code = OP_DCN;
        op_a = LW'(en_line(N, K, 32'(src_code)));
        op_b = LW'(slast);
      end
    end else if (s == 2*K + 1) begin
      op_code = OP_CZERO;
      op_a = LW'(slast);
      op_t = LW'(en_line(N, K, 32'(src_code)));
    end else if (s <= 4*K) begin
      chain_gate(i, 4*K - s, ca, cb, ct);
      op_code = OP_DCN;
      op_a = LW'(ca); op_b = LW'(cb); op_t = LW'(ct);
    end
  end

endmodule
