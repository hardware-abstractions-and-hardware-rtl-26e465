// tb_mem_core: self-checking test of the MEM core.
// Line-buffer mode: a random stream with gaps must come back delayed by
// `count` valid words, one cycle after each input, and only once `count`
// words are buffered. Lookup mode: a table loaded through the configuration
// write port is read back at random addresses. Scratchpad mode: writes and
// reads through the operand ports.
module tb_mem_core;
  import cgra_pkg::*;

  localparam int unsigned DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, clr = 1'b0;
  logic [31:0] cfg_op = '0, cfg_count = '0, cfg_wdata = '0;
  logic cfg_wr = 1'b0;
  word_t a = '0, b = '0, c = '0, out;
  int checks = 0, failures = 0;
  logic [15:0] hist [$];
  logic [15:0] table_ref [DEPTH];

  mem_core #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    logic [15:0] x;
    int unsigned cnt;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // ---- line buffer, two different lengths
    for (int pass = 0; pass < 2; pass++) begin
      cnt = (pass == 0) ? 3 : 37;
      hist.delete();
      @(negedge clk);
      cfg_op = 32'(MEM_DELAY); cfg_count = cnt; clr = 1'b1;
      @(negedge clk);
      clr = 1'b0;
      for (int n = 0; n < 150; n++) begin
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin
          a = '{valid: 1'b0, data: 16'($urandom)};
          @(posedge clk); #1;
          check("no input no output", !out.valid);
        end else begin
          x = 16'($urandom);
          a = '{valid: 1'b1, data: x};
          hist.push_back(x);
          @(posedge clk); #1;
          if (hist.size() > cnt)
            check($sformatf("delay %0d word", cnt), out.valid && out.data == hist[hist.size()-1-cnt]);
          else
            check("filling, no output", !out.valid);
        end
      end
    end
    // ---- lookup table loaded by configuration writes
    @(negedge clk);
    a.valid = 1'b0;
    cfg_op = 32'(MEM_LUT);
    for (int i = 0; i < DEPTH; i++) begin
      table_ref[i] = 16'($urandom);
      @(negedge clk);
      cfg_wr = 1'b1; cfg_wdata = {16'(i), table_ref[i]};
    end
    @(negedge clk);
    cfg_wr = 1'b0;
    for (int n = 0; n < 100; n++) begin
      int unsigned ad;
      ad = $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      a = '{valid: 1'b1, data: 16'(ad)};
      @(posedge clk); #1;
      check("lut read", out.valid && out.data == table_ref[ad]);
    end
    // ---- scratchpad: write then read
    @(negedge clk);
    cfg_op = 32'(MEM_RAM);
    for (int i = 0; i < 16; i++) begin
      table_ref[i] = 16'($urandom);
      @(negedge clk);
      a = '{valid: 1'b1, data: table_ref[i]};
      b = '{valid: 1'b1, data: 16'(i)};
      c = '{valid: 1'b1, data: 16'd0};
      @(posedge clk); #1;
      check("write gives no output", !out.valid);
    end
    for (int i = 15; i >= 0; i--) begin
      @(negedge clk);
      a.valid = 1'b0; c.valid = 1'b0;
      b = '{valid: 1'b1, data: 16'(i)};
      @(posedge clk); #1;
      check("ram read", out.valid && out.data == table_ref[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
