// tb_detector_op_gen: runs edge detector gate sequences on a line model.
//
// For n = 5, k = 3 and for random contents of a register's lines (random
// vertex codes, pair results, enables; scratch at 0) and random directed
// edges on every pair, the steps of one detector are applied to the model
// and the outcome is compared with what the detector must do:
//   - the pair result toggles exactly when the pair's codes equal the edge
//     and (except for the closing pair) the source vertex is enabled;
//   - the source's enable is zeroed exactly when the codes match (never for
//     the closing pair);
//   - the vertex codes and scratch lines end as they started; nothing else
//     changes;
//   - the sequence has 4k+2 steps (4k+1 for the closing pair).
// A second instance built without enable lines must toggle the pair result
// on every match, for every pair, in 4k+1 steps.
// The first gates are also compared with the pair result diagram: DCN(a,b),
// DCN(c,d), DCN(s0,s1), DCN(e,f), DCN(s2,s3), then the enable gate.
module tb_detector_op_gen;
  import qap_pkg::*;
  import tb_hc_pkg::*;

  localparam int unsigned N = 5, K = 3;
  localparam bit ENABLES = 1'b1;
  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES);
  localparam int unsigned LW = $clog2(BITS);
  localparam int unsigned PW = $clog2(N);
  localparam int unsigned SW = $clog2(4*K+2);

  logic [PW-1:0] pair_i;
  logic [K-1:0] src_code, dst_code;
  logic [SW-1:0] step;
  opcode_e op_code;
  logic [LW-1:0] op_a, op_b, op_t;
  logic [BITS-1:0] op_mask;
  logic last;
  int checks = 0, failures = 0;
  int n_match = 0, n_blocked = 0, n_closing = 0;

  detector_op_gen #(.N(N), .K(K), .ENABLES(ENABLES)) dut (
    .pair_i, .src_code, .dst_code, .step, .op_code, .op_a, .op_b, .op_t, .op_mask,
    .last_o(last)
  );

  // The reduced build without enable lines, driven by the same inputs.
  localparam int unsigned BITS0 = bits_per_reg(N, K, 1'b0);
  localparam int unsigned LW0 = $clog2(BITS0);
  opcode_e op_code0;
  logic [LW0-1:0] op_a0, op_b0, op_t0;
  logic [BITS0-1:0] op_mask0;
  logic last0;

  detector_op_gen #(.N(N), .K(K), .ENABLES(1'b0)) dut0 (
    .pair_i, .src_code, .dst_code, .step, .op_code(op_code0), .op_a(op_a0), .op_b(op_b0),
    .op_t(op_t0), .op_mask(op_mask0), .last_o(last0)
  );

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    lines_t l0, l, want;
    int i, s, d, vs, vd, nsteps, pl, el;
    bit match;
    // Gate order of the pair result diagram for pair 0 (vertex 0 lines 2..0
    // are a,b,c; vertex 1 lines 5..3 are d,e,f; scratch starts at line 25).
    pair_i = '0; src_code = 3'd0; dst_code = 3'd1;
    step = SW'(1); #1;
    expect_true(op_code == OP_DCN && op_a == 2 && op_b == 1 && op_t == 25, "gate DCN(a,b)");
    step = SW'(2); #1;
    expect_true(op_code == OP_DCN && op_a == 0 && op_b == 5 && op_t == 26, "gate DCN(c,d)");
    step = SW'(3); #1;
    expect_true(op_code == OP_DCN && op_a == 25 && op_b == 26 && op_t == 27, "gate DCN(s0,s1)");
    step = SW'(4); #1;
    expect_true(op_code == OP_DCN && op_a == 4 && op_b == 3 && op_t == 28, "gate DCN(e,f)");
    step = SW'(5); #1;
    expect_true(op_code == OP_DCN && op_a == 27 && op_b == 28 && op_t == 29, "gate DCN(s2,s3)");
    step = SW'(6); #1;
    expect_true(op_code == OP_DCN && op_a == 20 && op_b == 29 && op_t == 15, "enable gate");

    for (int trial = 0; trial < 3000; trial++) begin
      i  = $urandom_range(0, N - 1);
      s  = $urandom_range(0, N - 1);
      d  = $urandom_range(0, N - 1);
      l0 = '0;
      for (int x = 0; x < N*K + 2*N; x++) l0[x] = $urandom_range(0, 1);
      // Bias towards matches: often put the edge into the pair.
      if ($urandom_range(0, 1)) begin
        l0[i*K +: K] = K'(s);
        l0[((i+1)%N)*K +: K] = K'(d);
      end
      vs = int'(l0[i*K +: K]);
      vd = int'(l0[((i+1)%N)*K +: K]);
      pl = pair_line(N, K, i);
      el = en_line(N, K, s);
      match = (vs == s) && (vd == d);
      want = l0;
      if (i == N - 1) begin
        if (match) want[pl] = ~l0[pl];
        n_closing++;
      end else begin
        if (match && l0[el]) want[pl] = ~l0[pl];
        if (match) want[el] = 1'b0;
        if (match && l0[el]) n_match++;
        if (match && !l0[el]) n_blocked++;
      end
      pair_i = PW'(i); src_code = K'(s); dst_code = K'(d);
      l = l0;
      nsteps = 0;
      for (int st = 0; st < 20; st++) begin
        step = SW'(st); #1;
        l = apply_gate(l, op_code, int'(op_a), int'(op_b), int'(op_t), lines_t'(op_mask),
                       N, K, BITS, ENABLES);
        nsteps++;
        if (last) break;
      end
      expect_true(l[BITS-1:0] == want[BITS-1:0], $sformatf("outcome pair %0d edge %0d-%0d", i, s, d));
      expect_true(nsteps == ((i == N - 1) ? 4*K + 1 : 4*K + 2), "step count");
    end
    // Without enables: every pair toggles its result on a match, nothing
    // else changes, 4k+1 steps.
    for (int trial = 0; trial < 1000; trial++) begin
      i  = $urandom_range(0, N - 1);
      s  = $urandom_range(0, N - 1);
      d  = $urandom_range(0, N - 1);
      l0 = '0;
      for (int x = 0; x < N*K + N; x++) l0[x] = $urandom_range(0, 1);
      if ($urandom_range(0, 1)) begin
        l0[i*K +: K] = K'(s);
        l0[((i+1)%N)*K +: K] = K'(d);
      end
      match = (int'(l0[i*K +: K]) == s) && (int'(l0[((i+1)%N)*K +: K]) == d);
      want = l0;
      pl = pair_line(N, K, i);
      if (match) want[pl] = ~l0[pl];
      pair_i = PW'(i); src_code = K'(s); dst_code = K'(d);
      l = l0;
      nsteps = 0;
      for (int st = 0; st < 20; st++) begin
        step = SW'(st); #1;
        l = apply_gate(l, op_code0, int'(op_a0), int'(op_b0), int'(op_t0), lines_t'(op_mask0),
                       N, K, BITS0, 1'b0);
        nsteps++;
        if (last0) break;
      end
      expect_true(l[BITS0-1:0] == want[BITS0-1:0], $sformatf("no-enable outcome pair %0d", i));
      expect_true(nsteps == 4*K + 1, "no-enable step count");
    end
    expect_true(n_match > 0 && n_blocked > 0 && n_closing > 0, "coverage");
    $display("matches=%0d blocked_by_enable=%0d closing=%0d", n_match, n_blocked, n_closing);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
