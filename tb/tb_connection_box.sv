// tb_connection_box: every select code is applied to random track contents;
// codes 0..19 must return that (side, track) word, codes 20..31 an invalid
// word.
module tb_connection_box;
  import cgra_pkg::*;
  sides_t in;
  logic [CB_SEL_W-1:0] sel;
  word_t out;
  int checks = 0, failures = 0;

  connection_box dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      for (int s = 0; s < 4; s++)
        for (int t = 0; t < NUM_TRACKS; t++)
          in[s][t] = '{valid: 1'($urandom), data: 16'($urandom)};
      for (int k = 0; k < 32; k++) begin
        sel = 5'(k);
        #1;
        checks++;
        if (k < 20 ? (out != in[k / 5][k % 5]) : (out.valid !== 1'b0)) begin
          failures++;
          $display("FAIL sel %0d", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
