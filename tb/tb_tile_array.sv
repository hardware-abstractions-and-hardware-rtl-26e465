// tb_tile_array: the full 32 x 16 tile array (8 array-slices).
//  * a two-slice region: GLB lane 4 (slice 1) routed east along row 0
//    through columns 4..8, crossing into slice 2, and back out on lane 8:
//    7 cycles (IO tile, five switch boxes, IO tile);
//  * an independent task in slice 6: lane 24 + 100 back on lane 24,
//    4 cycles;
//  * freezing slice 6 stops its task while the other region keeps running.
module tb_tile_array;
  import cgra_pkg::*;
  localparam int S = NUM_SLICES, C = COLS_PER_SLICE;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en [S];
  cfg_req_t cfg [S];
  word_t ld [S*C], st [S*C];
  int checks = 0, failures = 0;

  tile_array dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input int col, input int row, input logic [7:0] r, input logic [31:0] d);
    @(negedge clk);
    cfg[col / C] = '{valid: 1'b1, addr: cfg_addr(col, row, r), data: d};
    @(negedge clk);
    cfg[col / C] = '0;
  endtask

  initial begin
    logic [15:0] a[$], b[$];
    for (int s = 0; s < S; s++) begin en[s] = 1'b1; cfg[s] = '0; end
    for (int i = 0; i < S*C; i++) ld[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wr(4, NUM_ROWS, 8'd0, 32'b00001);
    wr(4, 0, CFG_SB_BASE + 8'(trk(SIDE_E, 0)), 32'(trk(SIDE_N, 0)));
    for (int c = 5; c < 8; c++) wr(c, 0, CFG_SB_BASE + 8'(trk(SIDE_E, 0)), 32'(trk(SIDE_W, 0)));
    wr(8, 0, CFG_SB_BASE + 8'(trk(SIDE_N, 1)), 32'(trk(SIDE_W, 0)));
    wr(8, NUM_ROWS, 8'd1, 32'd1);
    wr(24, NUM_ROWS, 8'd0, 32'b00100);
    wr(24, 0, CFG_CB_BASE, 32'(trk(SIDE_N, 2)));
    wr(24, 0, CFG_OP, 32'(PE_ADD) | 32'h10);
    wr(24, 0, CFG_CONST, 32'd100);
    wr(24, 0, CFG_SB_BASE + 8'(trk(SIDE_N, 0)), 32'(SB_SEL_CORE0));
    wr(24, NUM_ROWS, 8'd1, 32'd0);
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      a.push_front(16'($urandom)); b.push_front(16'($urandom));
      ld[4]  = '{valid: 1'b1, data: a[0]};
      ld[24] = '{valid: 1'b1, data: b[0]};
      if (n == 40) begin
        for (int s = 0; s < S; s++) en[s] = (s != 6);
      end
      @(posedge clk); #1;
      if (n >= 6) check("slice 1 -> slice 2 in 7 cycles", st[8].valid && st[8].data == a[6]);
      if (n >= 3 && n < 40) check("slice 6 task in 4 cycles", st[24].valid && st[24].data == 16'(b[3] + 100));
      if (n >= 41) check("frozen slice 6 silent", !st[24].valid);
      check("lane 4 has no output", !st[4].valid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
