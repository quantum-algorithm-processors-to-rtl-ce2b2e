// tb_qap_array: parallel registers, write and read ports.
//
// A reduced array (n = 4, k = 2, 6 registers) gets a random candidate in
// every register through the write port; the read port must return each.
// Broadcast gates must then act on every register alike: a NOT layer on
// all code lines inverts every stored candidate, and a DCN chain built from
// two code lines into the flag sets exactly the flags of the registers whose
// two lines are both 1 (compared with a model of the stored codes).
module tb_qap_array;
  import qap_pkg::*;
  import tb_hc_pkg::*;

  localparam int unsigned N = 4, K = 2, NUM = 6;
  localparam bit ENABLES = 1'b1;
  localparam int unsigned BITS = bits_per_reg(N, K, ENABLES);
  localparam int unsigned LW = $clog2(BITS);
  localparam int unsigned AW = $clog2(NUM);

  logic clk = 1'b0, rst_n = 1'b0;
  logic op_valid = 1'b0, wr_en = 1'b0;
  opcode_e op_code = OP_NOP;
  logic [LW-1:0] op_a = '0, op_b = '0, op_t = '0;
  logic [BITS-1:0] op_mask = '0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [N*K-1:0] wr_codes = '0, rd_codes;
  logic [NUM-1:0] flags;
  int checks = 0, failures = 0;
  logic [N*K-1:0] stored [NUM];

  qap_array #(.N(N), .K(K), .ENABLES(ENABLES), .NUM(NUM)) dut (
    .clk, .rst_n, .op_valid, .op_code, .op_a, .op_b, .op_t, .op_mask,
    .wr_en, .wr_addr, .wr_codes, .rd_addr, .rd_codes, .flags_o(flags)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic gate(opcode_e c, int a, int b, int t, logic [BITS-1:0] m);
    @(negedge clk);
    op_valid = 1'b1; op_code = c; op_a = LW'(a); op_b = LW'(b); op_t = LW'(t); op_mask = m;
    @(negedge clk);
    op_valid = 1'b0;
  endtask

  task automatic check_reads(string what);
    for (int r = 0; r < NUM; r++) begin
      rd_addr = AW'(r); #1;
      checks++;
      if (rd_codes !== stored[r]) begin
        failures++;
        $display("FAIL %s reg %0d got %h want %h", what, r, rd_codes, stored[r]);
      end
    end
  endtask

  initial begin
    logic [BITS-1:0] m;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 20; round++) begin
      for (int r = 0; r < NUM; r++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_addr = AW'(r); wr_codes = N*K'($urandom());
        stored[r] = wr_codes;
      end
      @(negedge clk);
      wr_en = 1'b0;
      check_reads("write");
      // Fresh workspace, then invert all code lines of all registers.
      gate(OP_INIT, 0, 0, 0, '0);
      m = '0; m[N*K-1:0] = '1;
      gate(OP_NOTM, 0, 0, 0, m);
      for (int r = 0; r < NUM; r++) stored[r] = ~stored[r];
      check_reads("not layer");
      // flag ^= line1 & line4, in every register.
      gate(OP_DCN, 1, 4, flag_line(N, K, ENABLES), '0);
      for (int r = 0; r < NUM; r++) begin
        checks++;
        if (flags[r] !== (stored[r][1] & stored[r][4])) begin
          failures++;
          $display("FAIL flag reg %0d", r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
