// tb_tile: a PE tile and a MEM tile configured through the configuration bus.
// PE tile (col 5,row 2): a = west track 2, b = north track 0, op ADD, core
// output to east track 1, west track 4 passed through to south track 3.
// Random words are driven; the sum must appear on east track 1 two cycles
// later (core register + switch-box register) and the pass-through one
// cycle later. Writes addressed to other tiles must be ignored. MEM tile
// (col 7,row 2): line buffer of length 2 from north track 1 to west track 0.
module tb_tile;
  import cgra_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  cfg_req_t cfg = '0;
  sides_t in_pe = '0, out_pe, in_mem = '0, out_mem;
  int checks = 0, failures = 0;

  tile #(.IS_MEM(1'b0)) u_pe  (.clk, .rst_n, .en, .col_id(8'd5), .row_id(8'd2), .cfg,
                               .in(in_pe), .out(out_pe));
  tile #(.IS_MEM(1'b1)) u_mem (.clk, .rst_n, .en, .col_id(8'd7), .row_id(8'd2), .cfg,
                               .in(in_mem), .out(out_mem));
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

  task automatic wr(input int col, input int row, input logic [7:0] r, input logic [31:0] d);
    @(negedge clk);
    cfg = '{valid: 1'b1, addr: cfg_addr(col, row, r), data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  initial begin
    logic [15:0] x[$], y[$], p[$], m[$];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // unconfigured tile drives nothing
    @(negedge clk);
    in_pe[SIDE_W][4] = '{valid: 1'b1, data: 16'h5555};
    @(posedge clk); #1;
    check("reset tile silent", out_pe[SIDE_S][3].valid == 1'b0);
    // configure PE tile; a later write to a wrong row must not land
    wr(5, 2, CFG_CB_BASE + 8'd0, 32'(trk(SIDE_W, 2)));
    wr(5, 2, CFG_CB_BASE + 8'd1, 32'(trk(SIDE_N, 0)));
    wr(5, 2, CFG_OP, 32'(PE_ADD));
    wr(5, 2, CFG_SB_BASE + 8'(trk(SIDE_E, 1)), 32'(SB_SEL_CORE0));
    wr(5, 2, CFG_SB_BASE + 8'(trk(SIDE_S, 3)), 32'(trk(SIDE_W, 4)));
    wr(5, 3, CFG_SB_BASE + 8'(trk(SIDE_E, 1)), 32'(trk(SIDE_N, 0)));
    // configure MEM tile
    wr(7, 2, CFG_CB_BASE + 8'd0, 32'(trk(SIDE_N, 1)));
    wr(7, 2, CFG_OP, 32'(MEM_DELAY));
    wr(7, 2, CFG_COUNT, 32'd2);
    wr(7, 2, CFG_SB_BASE + 8'(trk(SIDE_W, 0)), 32'(SB_SEL_CORE0));
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      x.push_front(16'($urandom)); y.push_front(16'($urandom));
      p.push_front(16'($urandom)); m.push_front(16'($urandom));
      in_pe[SIDE_W][2] = '{valid: 1'b1, data: x[0]};
      in_pe[SIDE_N][0] = '{valid: 1'b1, data: y[0]};
      in_pe[SIDE_W][4] = '{valid: 1'b1, data: p[0]};
      in_mem[SIDE_N][1] = '{valid: 1'b1, data: m[0]};
      @(posedge clk); #1;
      check("pass-through 1 cycle", out_pe[SIDE_S][3].valid && out_pe[SIDE_S][3].data == p[0]);
      if (n >= 1) check("add 2 cycles", out_pe[SIDE_E][1].valid && out_pe[SIDE_E][1].data == x[1] + y[1]);
      if (n >= 3) check("mem delay 2", out_mem[SIDE_W][0].valid && out_mem[SIDE_W][0].data == m[3]);
      check("unrouted track silent", !out_pe[SIDE_N][0].valid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
