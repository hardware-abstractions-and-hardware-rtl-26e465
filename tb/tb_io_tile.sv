// tb_io_tile: an IO tile configured to drive the GLB word onto north tracks
// 1 and 3 of its column's top tile and to return north track 4. Checks the
// mask, the one-cycle latency both ways, that a request for another column
// is ignored, and that en=0 silences both directions.
module tb_io_tile;
  import cgra_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  cfg_req_t cfg = '0;
  word_t ld = '0, st;
  side_t from_tile = '0, to_tile;
  int checks = 0, failures = 0;

  io_tile dut (.clk, .rst_n, .en, .col_id(8'd6), .cfg, .ld, .st, .from_tile, .to_tile);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input int col, input logic [7:0] r, input logic [31:0] d);
    @(negedge clk);
    cfg = '{valid: 1'b1, addr: cfg_addr(col, NUM_ROWS, r), data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  initial begin
    logic [15:0] x, y;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wr(6, 8'd0, 32'b01010);
    wr(6, 8'd1, 32'd4);
    wr(7, 8'd1, 32'd0);       // other column: ignored
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      x = 16'($urandom); y = 16'($urandom);
      ld = '{valid: 1'b1, data: x};
      for (int t = 0; t < NUM_TRACKS; t++) from_tile[t] = '{valid: 1'b1, data: 16'($urandom)};
      from_tile[4].data = y;
      @(posedge clk); #1;
      check("ld on tracks 1,3", to_tile[1].valid && to_tile[3].valid && to_tile[1].data == x && to_tile[3].data == x);
      check("ld not on 0,2,4", !to_tile[0].valid && !to_tile[2].valid && !to_tile[4].valid);
      check("st from track 4", st.valid && st.data == y);
    end
    @(negedge clk);
    en = 1'b0;
    @(posedge clk); #1;
    check("frozen", !st.valid && !to_tile[1].valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
