// tb_switch_box: random select settings for all 20 outgoing tracks and random
// incoming words; each outgoing track must carry, one cycle later, the
// selected incoming word, the core output (code 20) or an invalid word.
// Also checks that en=0 drops every valid bit.
module tb_switch_box;
  import cgra_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  sides_t in, out;
  word_t core_out;
  logic [4*NUM_TRACKS-1:0][SB_SEL_W-1:0] sel;
  int checks = 0, failures = 0;

  switch_box dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sides_t in_s;
    word_t core_s, exp;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 200; rep++) begin
      @(negedge clk);
      for (int o = 0; o < 20; o++) sel[o] = 5'($urandom_range(0, 23));
      for (int s = 0; s < 4; s++)
        for (int t = 0; t < NUM_TRACKS; t++) in[s][t] = '{valid: 1'($urandom), data: 16'($urandom)};
      core_out = '{valid: 1'($urandom), data: 16'($urandom)};
      in_s = in; core_s = core_out;
      @(posedge clk); #1;
      for (int o = 0; o < 20; o++) begin
        if (sel[o] < 20)       exp = in_s[sel[o] / 5][sel[o] % 5];
        else if (sel[o] == 20) exp = core_s;
        else                   exp = '0;
        checks++;
        if (out[o / 5][o % 5].valid != exp.valid || (exp.valid && out[o / 5][o % 5].data != exp.data)) begin
          failures++;
          $display("FAIL out %0d sel %0d", o, sel[o]);
        end
      end
    end
    @(negedge clk);
    for (int o = 0; o < 20; o++) sel[o] = 5'd20;
    core_out = '{valid: 1'b1, data: 16'h1234};
    en = 1'b0;
    @(posedge clk); #1;
    checks++;
    for (int o = 0; o < 20; o++) if (out[o / 5][o % 5].valid) begin
      failures++;
      $display("FAIL frozen output %0d valid", o);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
