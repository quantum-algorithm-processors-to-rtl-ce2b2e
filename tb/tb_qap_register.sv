// tb_qap_register: random gates against an independent model of the gate set.
//
// A register (n = 5, k = 3, 31 lines) receives random writes and random
// gates of every kind, with random line indices, for 4000 cycles; after each
// cycle every line is compared with the model. Checks also that reset leaves
// only the enables at 1 and that a write leaves the workspace alone.
module tb_qap_register;
  import qap_pkg::*;
  import tb_hc_pkg::*;

  localparam int unsigned N = 5, K = 3;
  localparam bit ENABLES = 1'b1;
  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES);
  localparam int unsigned LW = $clog2(BITS);

  logic clk = 1'b0, rst_n = 1'b0;
  logic op_valid = 1'b0, wr_en = 1'b0;
  opcode_e op_code = OP_NOP;
  logic [LW-1:0] op_a = '0, op_b = '0, op_t = '0;
  logic [BITS-1:0] op_mask = '0, lines;
  logic [N*K-1:0] wr_codes = '0;
  logic flag;
  int checks = 0, failures = 0;
  lines_t model;
  int n_kind[8];

  qap_register #(.N(N), .K(K), .ENABLES(ENABLES)) dut (
    .clk, .rst_n, .op_valid, .op_code, .op_a, .op_b, .op_t, .op_mask,
    .wr_en, .wr_codes, .lines_o(lines), .flag_o(flag)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_lines(string what);
    checks++;
    if (lines !== model[BITS-1:0] || flag !== model[flag_line(N, K, ENABLES)]) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, lines, model[BITS-1:0]);
    end
  endtask

  initial begin
    model = '0;
    for (int v = 0; v < N; v++) model[en_line(N, K, v)] = 1'b1;
    repeat (2) @(posedge clk);
    #1 check_lines("reset");
    rst_n = 1'b1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      wr_en    = ($urandom_range(0, 15) == 0);
      wr_codes = N*K'($urandom());
      op_valid = ($urandom_range(0, 7) != 0);
      op_code  = opcode_e'($urandom_range(0, 6));
      op_a     = LW'($urandom_range(0, BITS - 1));
      op_b     = LW'($urandom_range(0, BITS - 1));
      op_t     = LW'($urandom_range(0, BITS - 1));
      op_mask  = BITS'({$urandom(), $urandom()});
      if (wr_en) model[N*K-1:0] = wr_codes;
      else if (op_valid) begin
        model = apply_gate(model, op_code, int'(op_a), int'(op_b), int'(op_t),
                           lines_t'(op_mask), N, K, BITS, ENABLES);
        n_kind[op_code]++;
      end
      @(posedge clk);
      #1 check_lines("gate");
    end
    // Every gate kind must have been exercised.
    for (int o = 1; o <= 6; o++) begin
      checks++;
      if (n_kind[o] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
