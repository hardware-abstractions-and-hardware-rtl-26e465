// tb_glb_sram: random reads and writes on a 256-word copy of the bank SRAM
// against a reference array; checks the one-cycle read latency and that a
// read of the address being written returns the old word.
module tb_glb_sram;
  localparam int unsigned WORDS = 256;
  logic clk = 1'b0, re = 1'b0, we = 1'b0;
  logic [7:0] raddr = '0, waddr = '0;
  logic [63:0] rdata, wdata = '0;
  logic [63:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  glb_sram #(.WORDS(WORDS), .W(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] expect_q;
    logic        expect_v;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = 8'(i); wdata = {$urandom, $urandom};
      ref_mem[i] = wdata;
    end
    expect_v = 1'b0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (expect_v) begin
        checks++;
        if (rdata != expect_q) begin failures++; $display("FAIL read"); end
      end
      re = 1'($urandom); we = 1'($urandom);
      raddr = 8'($urandom); waddr = ($urandom_range(0, 3) == 0) ? raddr : 8'($urandom);
      wdata = {$urandom, $urandom};
      expect_v = re; expect_q = ref_mem[raddr];
      if (we) ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
