// tb_qap_sequencer: the broadcast gate stream, checked by what it computes.
//
// The sequencer (n = 5, k = 3, up to 10 edges) is given random graphs. Its
// gate stream is applied to 16 model registers holding random candidates
// (half of them permutations starting at vertex 0, half arbitrary codes, so
// that revisits occur). After done, each model flag must equal the reference
// decision, the codes must be unchanged and the scratch lines back at 0. The
// number of gate slots must be 1 + 2m(4k+2)n - 2m + (2n-3), and done must be
// a single-cycle pulse. One graph with no edges is included.
module tb_qap_sequencer;
  import qap_pkg::*;
  import tb_hc_pkg::*;

  localparam int unsigned N = 5, K = 3, MAX_M = 10, R = 16;
  localparam bit ENABLES = 1'b1;
  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES);
  localparam int unsigned LW = $clog2(BITS);
  localparam int unsigned MW = $clog2(MAX_M + 1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [MW-1:0] num_edges = '0;
  logic [K-1:0] edge_u [MAX_M], edge_v [MAX_M];
  logic op_valid, busy, done;
  opcode_e op_code;
  logic [LW-1:0] op_a, op_b, op_t;
  logic [BITS-1:0] op_mask;
  int checks = 0, failures = 0;
  lines_t model [R];
  int slots;
  int n_flag = 0, n_rev_reject = 0;

  qap_sequencer #(.N(N), .K(K), .ENABLES(ENABLES), .MAX_M(MAX_M)) dut (
    .clk, .rst_n, .start, .num_edges, .edge_u, .edge_v, .op_valid, .op_code,
    .op_a, .op_b, .op_t, .op_mask, .busy_o(busy), .done_o(done)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (op_valid) begin
      slots <= slots + 1;
      for (int r = 0; r < R; r++)
        model[r] = apply_gate(model[r], op_code, int'(op_a), int'(op_b), int'(op_t),
                              lines_t'(op_mask), N, K, BITS, ENABLES);
    end
  end

  initial begin
    adj_t adj;
    int codes [R][16];
    int m, u, v, dup, done_cycles;
    for (int j = 0; j < MAX_M; j++) begin edge_u[j] = '0; edge_v[j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < 12; g++) begin
      // Random simple graph, no duplicate edges.
      @(negedge clk);
      adj = '0;
      m = (g == 0) ? 0 : $urandom_range(4, MAX_M);
      for (int j = 0; j < m; j++) begin
        do begin
          u = $urandom_range(0, N - 1);
          v = $urandom_range(0, N - 1);
        end while (u == v || adj[u][v]);
        adj[u][v] = 1'b1; adj[v][u] = 1'b1;
        edge_u[j] = K'(u); edge_v[j] = K'(v);
      end
      num_edges = MW'(m);
      for (int r = 0; r < R; r++) begin
        if (r % 2 == 0) begin
          int x;
          codes[r][0] = 0;
          for (int i = 1; i < N; i++) codes[r][i] = i;
          for (int i = N - 1; i > 1; i--) begin
            int t;
            x = $urandom_range(1, i);
            t = codes[r][i]; codes[r][i] = codes[r][x]; codes[r][x] = t;
          end
        end else begin
          for (int i = 0; i < N; i++) codes[r][i] = $urandom_range(0, N - 1);
        end
        model[r] = '0;
        for (int i = 0; i < N; i++) model[r][i*K +: K] = K'(codes[r][i]);
        for (int i = N*K; i < BITS; i++) model[r][i] = $urandom_range(0, 1);
      end
      slots = 0;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      wait (done);
      @(posedge clk);
      #1;
      checks++;
      if (done || busy) failures++;  // done lasts one cycle
      for (int r = 0; r < R; r++) begin
        bit want;
        int cr [16];
        cr = codes[r];
        want = ref_flag(N, cr, adj);
        n_flag += want;
        if (ref_flag_no_enable(N, cr, adj) && !is_hamiltonian(N, cr, adj) && !want)
          n_rev_reject++;
        checks++;
        if (model[r][flag_line(N, K, ENABLES)] !== want) begin
          failures++;
          $display("FAIL graph %0d reg %0d flag %0b want %0b", g, r,
                   model[r][flag_line(N, K, ENABLES)], want);
        end
        checks++;
        for (int i = 0; i < N; i++)
          if (int'(model[r][i*K +: K]) != codes[r][i]) begin failures++; break; end
        checks++;
        if (model[r][scr_line(N, K, 0, ENABLES) +: scr_lines(N, K)] != '0) failures++;
      end
      checks++;
      if (slots != 1 + 2*m*(4*K+2)*N - 2*m + (2*N - 3)) begin
        failures++;
        $display("FAIL slots %0d for m=%0d", slots, m);
      end
    end
    $display("flags=%0d revisits_rejected_by_enable=%0d", n_flag, n_rev_reject);
    checks++;
    if (n_flag == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
