// tb_final_op_gen: runs the closing sequence on a line model.
//
// For n = 5, k = 3 and every one of the 32 combinations of the five pair
// result lines (other lines random, scratch at 0), the closing gates are
// applied and the flag must toggle exactly when all pair results are 1,
// with every other line unchanged, in 2n-3 steps.
module tb_final_op_gen;
  import qap_pkg::*;
  import tb_hc_pkg::*;

  localparam int unsigned N = 5, K = 3;
  localparam bit ENABLES = 1'b1;
  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES);
  localparam int unsigned LW = $clog2(BITS);
  localparam int unsigned SW = $clog2(2*N);

  logic [SW-1:0] step;
  opcode_e op_code;
  logic [LW-1:0] op_a, op_b, op_t;
  logic last;
  int checks = 0, failures = 0;

  final_op_gen #(.N(N), .K(K), .ENABLES(ENABLES)) dut (
    .step, .op_code, .op_a, .op_b, .op_t, .last_o(last)
  );

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lines_t l0, l, want;
    int nsteps;
    for (int p = 0; p < (1 << N); p++) begin
      for (int rep = 0; rep < 4; rep++) begin
        l0 = '0;
        for (int x = 0; x < N*K + 2*N; x++) l0[x] = $urandom_range(0, 1);
        l0[flag_line(N, K, ENABLES)] = $urandom_range(0, 1);
        for (int i = 0; i < N; i++) l0[pair_line(N, K, i)] = p[i];
        want = l0;
        if (p == (1 << N) - 1) want[flag_line(N, K, ENABLES)] = ~l0[flag_line(N, K, ENABLES)];
        l = l0;
        nsteps = 0;
        for (int st = 0; st < 4*N; st++) begin
          step = SW'(st); #1;
          l = apply_gate(l, op_code, int'(op_a), int'(op_b), int'(op_t), lines_t'(0),
                         N, K, BITS, ENABLES);
          nsteps++;
          if (last) break;
        end
        checks++;
        if (l[BITS-1:0] != want[BITS-1:0]) begin
          failures++;
          $display("FAIL pairs=%b got %h want %h", p[N-1:0], l[BITS-1:0], want[BITS-1:0]);
        end
        checks++;
        if (nsteps != 2*N - 3) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
