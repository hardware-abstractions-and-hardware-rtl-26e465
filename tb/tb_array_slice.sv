// tb_array_slice: one full-size array-slice (4 x 16 tiles) placed as slice 2
// (columns 8..11), configured through its configuration bus.
//  * column 8: GLB lane -> IO tile -> top PE multiplies by 3 -> back up
//    through the IO tile: 4 cycles from ld to st.
//  * column 9 -> 10: a word routed east along row 0 and back up column 10:
//    4 cycles.
//  * row 5: west edge track 3 routed straight through to the east edge,
//    through the MEM column: 4 cycles (one switch box per column).
//  * a write for column 0 (another slice) must configure nothing here.
//  * en=0 freezes the slice: no output.
module tb_array_slice;
  import cgra_pkg::*;
  localparam int ROWS = NUM_ROWS, COLS = COLS_PER_SLICE;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  cfg_req_t cfg = '0;
  word_t ld [COLS], st [COLS];
  side_t west_in [ROWS], west_out [ROWS], east_in [ROWS], east_out [ROWS];
  int checks = 0, failures = 0;

  array_slice dut (.clk, .rst_n, .en, .slice_id(8'd2), .cfg, .ld, .st,
                   .west_in, .west_out, .east_in, .east_out);
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
    cfg = '{valid: 1'b1, addr: cfg_addr(col, row, r), data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  initial begin
    logic [15:0] a[$], b[$], w[$];
    for (int c = 0; c < COLS; c++) ld[c] = '0;
    for (int r = 0; r < ROWS; r++) begin west_in[r] = '0; east_in[r] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // column 8: multiply by 3
    wr(8, ROWS, 8'd0, 32'b00001);                    // ld -> north track 0
    wr(8, 0, CFG_CB_BASE, 32'(trk(SIDE_N, 0)));
    wr(8, 0, CFG_OP, 32'(PE_MUL) | 32'h10);          // b = constant
    wr(8, 0, CFG_CONST, 32'd3);
    wr(8, 0, CFG_SB_BASE + 8'(trk(SIDE_N, 1)), 32'(SB_SEL_CORE0));
    wr(8, ROWS, 8'd1, 32'd1);                        // st <- north track 1
    // column 9 -> 10
    wr(9, ROWS, 8'd0, 32'b00001);
    wr(9, 0, CFG_SB_BASE + 8'(trk(SIDE_E, 0)), 32'(trk(SIDE_N, 0)));
    wr(10, 0, CFG_SB_BASE + 8'(trk(SIDE_N, 2)), 32'(trk(SIDE_W, 0)));
    wr(10, ROWS, 8'd1, 32'd2);
    // row 5 west -> east
    for (int c = 8; c < 12; c++) wr(c, 5, CFG_SB_BASE + 8'(trk(SIDE_E, 3)), 32'(trk(SIDE_W, 3)));
    // write for another slice's column 0: must not reach column 8
    wr(0, 0, CFG_CONST, 32'd7);
    for (int n = 0; n < 80; n++) begin
      @(negedge clk);
      a.push_front(16'($urandom)); b.push_front(16'($urandom)); w.push_front(16'($urandom));
      ld[0] = '{valid: 1'b1, data: a[0]};
      ld[1] = '{valid: 1'b1, data: b[0]};
      west_in[5][3] = '{valid: 1'b1, data: w[0]};
      @(posedge clk); #1;
      if (n >= 3) begin
        check("col 8 x3 in 4 cycles", st[0].valid && st[0].data == 16'(a[3] * 3));
        check("col 9->10 in 4 cycles", st[2].valid && st[2].data == b[3]);
        check("row 5 west->east in 4 cycles", east_out[5][3].valid && east_out[5][3].data == w[3]);
      end
      check("unused lanes silent", !st[1].valid && !st[3].valid);
    end
    @(negedge clk);
    en = 1'b0;
    repeat (2) @(posedge clk); #1;
    check("frozen slice silent", !st[0].valid && !st[2].valid && !east_out[5][3].valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
