// tb_hc_workload_n4: the 4-vertex example graph.
//
// The processor is built for n = 4, k = 2 (3! = 6 registers, 6 edges). The
// graph is the complete graph on vertices 1..4, which has the Hamiltonian
// circuits 1-2-3-4-1, 1-2-4-3-1, 1-3-2-4-1 and their reverses: all six
// candidates must be flagged. A second run replaces one candidate with the
// bad cycle 1-2-1-2, which every pair of which is an edge; the one-shot
// enables must reject it while the other five stay flagged.
module tb_hc_workload_n4;
  import qap_pkg::*;
  import tb_hc_pkg::*;

  localparam int unsigned N = 4, K = 2, MAX_M = 6, NUM = 6;
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

  hc_qap_top #(.N(N), .K(K), .MAX_M(MAX_M), .NUM(NUM)) dut (
    .clk, .rst_n, .start, .num_edges, .edge_u, .edge_v, .wr_en, .wr_addr, .wr_codes,
    .rd_addr, .rd_codes, .busy_o(busy), .done_o(done), .flags_o(flags),
    .any_flag_o(any_flag), .rd_clear, .rd_next, .flag_valid_o(flag_valid),
    .flag_index_o(flag_index)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_reg(int r, int c[16]);
    @(negedge clk);
    wr_en = 1'b1; wr_addr = AW'(r);
    for (int i = 0; i < N; i++) wr_codes[i*K +: K] = K'(c[i]);
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic run();
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wait (done);
    @(negedge clk);
  endtask

  initial begin
    int c [16];
    int m, n_read;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    m = 0;
    for (int a = 0; a < N; a++)
      for (int b = a + 1; b < N; b++) begin
        edge_u[m] = K'(a); edge_v[m] = K'(b); m++;
      end
    num_edges = MW'(m);
    c = '{default: 0};
    for (int i = 0; i < N; i++) c[i] = i;
    for (int r = 0; r < NUM; r++) begin
      write_reg(r, c);
      void'(next_perm(N, c));
    end
    run();
    for (int r = 0; r < NUM; r++) begin
      checks++;
      if (!flags[r]) begin failures++; $display("FAIL flag %0d", r); end
    end
    n_read = 0;
    while (flag_valid) begin
      rd_addr = flag_index; #1;
      $display("circuit %0d-%0d-%0d-%0d-1", rd_codes[1:0] + 1, rd_codes[3:2] + 1,
               rd_codes[5:4] + 1, rd_codes[7:6] + 1);
      rd_next = 1'b1;
      @(negedge clk);
      rd_next = 1'b0;
      n_read++;
    end
    checks++;
    if (n_read != 6) failures++;

    // Bad cycle 1-2-1-2 into register 0.
    c = '{default: 0};
    c[0] = 0; c[1] = 1; c[2] = 0; c[3] = 1;
    write_reg(0, c);
    run();
    for (int r = 0; r < NUM; r++) begin
      checks++;
      if (flags[r] != (r != 0)) begin failures++; $display("FAIL bad cycle flag %0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
