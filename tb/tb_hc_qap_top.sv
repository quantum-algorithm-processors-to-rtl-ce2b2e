// tb_hc_qap_top: the whole processor at its default size, end to end.
//
// n = 5 vertices, k = 3 bits per vertex, up to 10 edges, 24 = 4! registers.
// The testbench plays the off-chip computer: it loads the 24 permutations
// of vertices 1..4 behind vertex 0 (lexicographic order) through the write
// port, programs a graph, starts the run, and then uses the readout to list
// the registers whose flag is set, reading each candidate back through the
// read port. The set of flagged registers must equal the Hamiltonian
// circuits of the graph, computed here by brute force. Graphs:
//   - the 5-cycle 0-1-2-3-4-0 used in the edge detection example: exactly
//     the circuit and its reverse;
//   - the 5-vertex example graph, drawn edges only, and with its two dashed
//     chords added;
//   - the complete graph on 5 vertices (10 edges): all 24 candidates;
//   - random graphs, and a graph with no edges.
// Then the bad cycle 1-2-3-1-4 is loaded into one register: it uses only
// edges but visits vertex 1 twice, and must not be flagged.
// A last run loads arbitrary vertex codes instead of permutations, as a
// device without structured initialization would see, and checks that the
// one-shot enables reject candidates that revisit a vertex.
// The run length must be 1 + 2m(4k+2)n - 2m + (2n-3) gate slots, done one
// cycle after the last. Counted and required at least once: edge matches,
// matches blocked by a used-up enable, one-shot enable resets, closing-pair
// matches, set flags, multi-read steps and read-backs.
module tb_hc_qap_top;
  import qap_pkg::*;
  import tb_hc_pkg::*;

  localparam int unsigned N = 5, K = 3, MAX_M = 10, NUM = 24;
  localparam bit ENABLES = 1'b1;
  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES);
  localparam int unsigned AW = $clog2(NUM);
  localparam int unsigned MW = $clog2(MAX_M + 1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [MW-1:0] num_edges = '0;
  logic [K-1:0] edge_u [MAX_M], edge_v [MAX_M];
  logic wr_en = 1'b0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [N*K-1:0] wr_codes = '0, rd_codes;
  logic busy, done, any_flag, flag_valid;
  logic [NUM-1:0] flags;
  logic rd_clear = 1'b0, rd_next = 1'b0;
  logic [AW-1:0] flag_index;

  int checks = 0, failures = 0;
  int codes [NUM][16];
  adj_t adj;
  lines_t model [NUM];
  int slots;
  int c_match = 0, c_blocked = 0, c_en_reset = 0, c_closing = 0, c_flags = 0;
  int c_multiread = 0, c_readback = 0;

  hc_qap_top dut (
    .clk, .rst_n, .start, .num_edges, .edge_u, .edge_v, .wr_en, .wr_addr, .wr_codes,
    .rd_addr, .rd_codes, .busy_o(busy), .done_o(done), .flags_o(flags),
    .any_flag_o(any_flag), .rd_clear, .rd_next, .flag_valid_o(flag_valid),
    .flag_index_o(flag_index)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watch the broadcast gate bus and keep a model of every register, to
  // count the mechanisms as they happen.
  always @(posedge clk) begin
    if (dut.op_valid) begin
      slots <= slots + 1;
      for (int r = 0; r < NUM; r++) begin
        automatic lines_t l = model[r];
        automatic int a = int'(dut.op_a), b = int'(dut.op_b), t = int'(dut.op_t);
        if (dut.op_code == OP_DCN && t >= pair_line(N, K, 0) && t < pair_line(N, K, N)) begin
          if (l[a] && l[b]) c_match++;
          if (!l[a] && l[b]) c_blocked++;
        end
        if (dut.op_code == OP_CN && t == pair_line(N, K, N - 1) && l[a]) c_closing++;
        if (dut.op_code == OP_CZERO && l[a] && l[t]) c_en_reset++;
        model[r] = apply_gate(l, dut.op_code, a, b, t, lines_t'(dut.op_mask), N, K, BITS, ENABLES);
      end
    end
  end

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic load_candidates(bit perms);
    int c [16];
    c[0] = 0;
    for (int i = 1; i < N; i++) c[i] = i;
    for (int r = 0; r < NUM; r++) begin
      if (!perms) begin
        for (int i = 0; i < N; i++) c[i] = $urandom_range(0, N - 1);
        c[0] = 0;
      end
      codes[r] = c;
      @(negedge clk);
      wr_en = 1'b1;
      wr_addr = AW'(r);
      for (int i = 0; i < N; i++) wr_codes[i*K +: K] = K'(c[i]);
      model[r] = '0;
      for (int i = 0; i < N; i++) model[r][i*K +: K] = K'(c[i]);
      if (perms) void'(next_perm(N, c));
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic set_graph(int m, int eu[MAX_M], int ev[MAX_M]);
    adj = '0;
    for (int j = 0; j < MAX_M; j++) begin edge_u[j] = '0; edge_v[j] = '0; end
    for (int j = 0; j < m; j++) begin
      edge_u[j] = K'(eu[j]); edge_v[j] = K'(ev[j]);
      adj[eu[j]][ev[j]] = 1'b1; adj[ev[j]][eu[j]] = 1'b1;
    end
    num_edges = MW'(m);
  endtask

  // Run the gate stream and check flags, readout and timing. With perms the
  // reference is the true Hamiltonian test, otherwise the enable rule.
  task automatic run_and_check(string name, int m, bit perms, int expect_count);
    int latency, found, hits [$];
    int cr [16];
    bit want;
    slots = 0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    latency = 1;
    while (!done) begin
      @(negedge clk);
      latency++;
    end
    expect_true(slots == 1 + 2*m*(4*K+2)*N - 2*m + (2*N - 3), $sformatf("%s slots %0d", name, slots));
    expect_true(latency == slots + 1, $sformatf("%s latency %0d", name, latency));
    found = 0;
    for (int r = 0; r < NUM; r++) begin
      cr = codes[r];
      want = perms ? is_hamiltonian(N, cr, adj) : ref_flag(N, cr, adj);
      if (!perms && !want && ref_flag_no_enable(N, cr, adj))
        $display("  %s: register %0d revisits a vertex, rejected", name, r);
      expect_true(flags[r] == want, $sformatf("%s flag %0d", name, r));
      found += int'(want);
      c_flags += int'(flags[r]);
    end
    expect_true(any_flag == (found > 0), $sformatf("%s any", name));
    if (expect_count >= 0)
      expect_true(found == expect_count, $sformatf("%s expected %0d circuits, reference %0d",
                                                  name, expect_count, found));
    // Multi-read of the flagged registers, reading each candidate back.
    while (flag_valid) begin
      string s;
      hits.push_back(int'(flag_index));
      rd_addr = flag_index;
      #1;
      s = "";
      for (int i = 0; i < N; i++) begin
        expect_true(int'(rd_codes[i*K +: K]) == codes[flag_index][i], "readback");
        s = {s, $sformatf("%0d-", int'(rd_codes[i*K +: K]) + 1)};
      end
      c_readback++;
      if (perms) $display("  %s: circuit %s1 in register %0d", name, s, flag_index);
      rd_next = 1'b1;
      @(negedge clk);
      rd_next = 1'b0;
      c_multiread++;
    end
    expect_true(hits.size() == found, $sformatf("%s multi-read count", name));
    for (int h = 0; h < hits.size(); h++) begin
      expect_true(flags[hits[h]], "multi-read location flagged");
      if (h > 0) expect_true(hits[h] > hits[h-1], "multi-read order");
    end
    $display("%s: m=%0d, %0d slots, %0d circuits", name, m, slots, found);
  endtask

  initial begin
    int eu [MAX_M], ev [MAX_M];
    int m, u, v;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load_candidates(1'b1);

    // 5-cycle of the edge detection example: 0-1, 1-2, 2-3, 3-4, 4-0.
    eu = '{0, 1, 2, 3, 4, 0, 0, 0, 0, 0};
    ev = '{1, 2, 3, 4, 0, 0, 0, 0, 0, 0};
    set_graph(5, eu, ev);
    run_and_check("cycle5", 5, 1'b1, 2);

    // Example graph (vertices 1..5 there, 0..4 here): 1-2, 2-3, 3-4, 4-5,
    // 5-1, 3-5; then with the dashed 1-3 and 1-4.
    eu = '{0, 1, 2, 3, 4, 2, 0, 0, 0, 0};
    ev = '{1, 2, 3, 4, 0, 4, 2, 3, 0, 0};
    set_graph(6, eu, ev);
    run_and_check("example_drawn", 6, 1'b1, -1);
    set_graph(8, eu, ev);
    run_and_check("example_dashed", 8, 1'b1, -1);

    // Complete graph K5.
    m = 0;
    for (int a = 0; a < N; a++)
      for (int b = a + 1; b < N; b++) begin eu[m] = a; ev[m] = b; m++; end
    set_graph(10, eu, ev);
    run_and_check("complete5", 10, 1'b1, 24);

    // Random graphs and the empty graph.
    for (int g = 0; g < 4; g++) begin
      adj = '0;
      m = (g == 3) ? 0 : $urandom_range(5, MAX_M);
      for (int j = 0; j < m; j++) begin
        do begin
          u = $urandom_range(0, N - 1);
          v = $urandom_range(0, N - 1);
        end while (u == v || adj[u][v]);
        adj[u][v] = 1'b1; adj[v][u] = 1'b1;
        eu[j] = u; ev[j] = v;
      end
      set_graph(m, eu, ev);
      run_and_check($sformatf("random%0d", g), m, 1'b1, (m == 0) ? 0 : -1);
    end

    // Arbitrary codes on the complete graph: enables reject revisits.
    m = 0;
    for (int a = 0; a < N; a++)
      for (int b = a + 1; b < N; b++) begin eu[m] = a; ev[m] = b; m++; end
    set_graph(10, eu, ev);
    load_candidates(1'b0);
    run_and_check("arbitrary_codes", 10, 1'b0, -1);

    // The bad cycle 1-2-3-1-4 of the example graph with its dashed chords:
    // every step is an edge, but vertex 1 comes twice.
    eu = '{0, 1, 2, 3, 4, 2, 0, 0, 0, 0};
    ev = '{1, 2, 3, 4, 0, 4, 2, 3, 0, 0};
    set_graph(8, eu, ev);
    load_candidates(1'b1);
    codes[0] = '{0, 1, 2, 0, 3, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    @(negedge clk);
    wr_en = 1'b1; wr_addr = '0;
    model[0] = '0;
    for (int i = 0; i < N; i++) begin
      wr_codes[i*K +: K] = K'(codes[0][i]);
      model[0][i*K +: K] = K'(codes[0][i]);
    end
    @(negedge clk);
    wr_en = 1'b0;
    begin
      int cr [16];
      cr = codes[0];
      expect_true(ref_flag_no_enable(N, cr, adj), "bad cycle uses only edges");
    end
    run_and_check("bad_cycle_1231", 8, 1'b0, 3);  // 4 circuits, one register replaced
    expect_true(!flags[0], "bad cycle 1-2-3-1-4 rejected");

    $display("mechanisms: matches=%0d blocked_by_enable=%0d enable_resets=%0d closing=%0d flags=%0d multiread=%0d readback=%0d",
             c_match, c_blocked, c_en_reset, c_closing, c_flags, c_multiread, c_readback);
    expect_true(c_match > 0, "edge matches seen");
    expect_true(c_blocked > 0, "blocked matches seen");
    expect_true(c_en_reset > 0, "enable resets seen");
    expect_true(c_closing > 0, "closing matches seen");
    expect_true(c_flags > 0, "flags seen");
    expect_true(c_multiread > 0, "multi-read seen");
    expect_true(c_readback > 0, "read-back seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
