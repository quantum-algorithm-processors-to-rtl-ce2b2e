// tb_flag_readout: OR of the flags and the one-at-a-time multi-read.
//
// For random flag patterns over 24 locations (including none set and all
// set), any must be the OR, and repeated next pulses must list exactly the
// set locations in increasing order, after which valid drops. clear must
// restart the listing.
module tb_flag_readout;
  localparam int unsigned NUM = 24;
  localparam int unsigned AW = $clog2(NUM);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NUM-1:0] flags = '0;
  logic clear = 1'b0, next = 1'b0;
  logic any, valid;
  logic [AW-1:0] index;
  int checks = 0, failures = 0;

  flag_readout #(.NUM(NUM)) dut (
    .clk, .rst_n, .flags, .clear, .next, .any_o(any), .valid_o(valid), .index_o(index)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      clear = 1'b1;
      flags = (t == 0) ? '0 : (t == 1) ? '1 : NUM'({$urandom()} & {$urandom()});
      @(negedge clk);
      clear = 1'b0;
      expect_true(any == (|flags), "any");
      for (int r = 0; r < NUM; r++) begin
        if (flags[r]) begin
          expect_true(valid && index == AW'(r), $sformatf("index %0d", r));
          next = 1'b1;
          @(negedge clk);
          next = 1'b0;
        end
      end
      expect_true(!valid, "valid after last");
      if (t == 5 && |flags) begin
        clear = 1'b1;
        @(negedge clk);
        clear = 1'b0;
        expect_true(valid, "clear restarts");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
