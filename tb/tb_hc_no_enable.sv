// tb_hc_no_enable: the reduced processor without enable lines.
//
// With permutation candidates no vertex can repeat, so the enable lines can
// be left out (ENABLES = 0, 26 lines per register for n = 5, k = 3). The
// processor is built that way and loaded with the 24 permutations; for the
// 5-cycle, the complete graph and random graphs the flags must equal the
// brute-force Hamiltonian circuits, in 1 + 2m(4k+1)n + (2n-3) slots. Then the
// bad cycle 1-2-3-1-4 is loaded on the example graph with its chords: without
// enables it is (wrongly, as expected for this mode) flagged, which is why the
// enables are needed when candidates are not permutations.
module tb_hc_no_enable;
  import qap_pkg::*;
  import tb_hc_pkg::*;

  localparam int unsigned N = 5, K = 3, MAX_M = 10, NUM = 24;
  localparam bit ENABLES = 1'b0;
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
  int slots;

  hc_qap_top #(.N(N), .K(K), .ENABLES(ENABLES), .MAX_M(MAX_M), .NUM(NUM)) dut (
    .clk, .rst_n, .start, .num_edges, .edge_u, .edge_v, .wr_en, .wr_addr, .wr_codes,
    .rd_addr, .rd_codes, .busy_o(busy), .done_o(done), .flags_o(flags),
    .any_flag_o(any_flag), .rd_clear, .rd_next, .flag_valid_o(flag_valid),
    .flag_index_o(flag_index)
  );

  always #5 clk = ~clk;
  always @(posedge clk) if (dut.op_valid) slots <= slots + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic write_reg(int r, int c[16]);
    codes[r] = c;
    @(negedge clk);
    wr_en = 1'b1; wr_addr = AW'(r);
    for (int i = 0; i < N; i++) wr_codes[i*K +: K] = K'(c[i]);
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

  task automatic run(string name, int m);
    int found = 0;
    int cr [16];
    slots = 0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wait (done);
    @(negedge clk);
    expect_true(slots == 1 + 2*m*(4*K+1)*N + (2*N - 3), $sformatf("%s slots %0d", name, slots));
    for (int r = 0; r < NUM; r++) begin
      cr = codes[r];
      expect_true(flags[r] == ref_flag_no_enable(N, cr, adj), $sformatf("%s flag %0d", name, r));
      found += int'(flags[r]);
    end
    $display("%s: m=%0d, %0d slots, %0d flagged", name, m, slots, found);
  endtask

  initial begin
    int c [16];
    int eu [MAX_M], ev [MAX_M];
    int m, u, v;
    expect_true(bits_per_reg(N, K, ENABLES) == 26, "register width");
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    c = '{default: 0};
    for (int i = 0; i < N; i++) c[i] = i;
    for (int r = 0; r < NUM; r++) begin
      write_reg(r, c);
      void'(next_perm(N, c));
    end
    eu = '{0, 1, 2, 3, 4, 0, 0, 0, 0, 0};
    ev = '{1, 2, 3, 4, 0, 0, 0, 0, 0, 0};
    set_graph(5, eu, ev);
    run("cycle5", 5);
    expect_true(flags == 24'h800001, "cycle5 flags 0 and 23");
    m = 0;
    for (int a = 0; a < N; a++)
      for (int b = a + 1; b < N; b++) begin eu[m] = a; ev[m] = b; m++; end
    set_graph(10, eu, ev);
    run("complete5", 10);
    expect_true(flags == '1, "complete5 all flagged");
    for (int g = 0; g < 3; g++) begin
      adj = '0;
      m = $urandom_range(5, MAX_M);
      for (int j = 0; j < m; j++) begin
        do begin
          u = $urandom_range(0, N - 1);
          v = $urandom_range(0, N - 1);
        end while (u == v || adj[u][v]);
        adj[u][v] = 1'b1; adj[v][u] = 1'b1;
        eu[j] = u; ev[j] = v;
      end
      set_graph(m, eu, ev);
      run($sformatf("random%0d", g), m);
    end
    // Bad cycle without enables: accepted.
    eu = '{0, 1, 2, 3, 4, 2, 0, 0, 0, 0};
    ev = '{1, 2, 3, 4, 0, 4, 2, 3, 0, 0};
    set_graph(8, eu, ev);
    c = '{default: 0};
    c[0] = 0; c[1] = 1; c[2] = 2; c[3] = 0; c[4] = 3;
    write_reg(0, c);
    run("bad_cycle_1231", 8);
    expect_true(flags[0], "bad cycle passes without enables");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
