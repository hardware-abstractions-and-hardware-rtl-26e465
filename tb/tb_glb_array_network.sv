// tb_glb_array_network: the network at full size (32 banks, 8 slices).
//  * slice 2 takes its load lanes from bank 7 and sends its store lanes to
//    bank 9; slice 5 loads from bank 30; everything one cycle later;
//  * banks not chosen by any slice receive invalid store lanes;
//  * bank 12 configuring slice 3 and bank 20 configuring slice 3 at once:
//    bank 12's requests reach slice 3, which alone is frozen;
//  * route registers read back.
module tb_glb_array_network;
  import cgra_pkg::*;
  localparam int B = NUM_BANKS, S = NUM_SLICES, C = COLS_PER_SLICE;
  logic clk = 1'b0, rst_n = 1'b0;
  logic rt_we = 1'b0;
  logic [7:0] rt_idx = '0;
  logic [31:0] rt_wdata = '0, rt_q [S];
  word_t bank_ld [B][C], bank_st [B][C], slice_ld [S*C], slice_st [S*C];
  cfg_req_t bank_cfg [B], slice_cfg [S];
  logic [7:0] bank_dest [B];
  logic bank_dpr [B], slice_en [S];
  int checks = 0, failures = 0;

  glb_array_network dut (.*);
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

  task automatic route(input int s, input logic [31:0] v);
    @(negedge clk);
    rt_we = 1'b1; rt_idx = 8'(s); rt_wdata = v;
    @(negedge clk);
    rt_we = 1'b0;
  endtask

  initial begin
    word_t bl [B][C], ss [S*C];
    cfg_req_t bc [B];
    for (int b = 0; b < B; b++) begin
      bank_cfg[b] = '0; bank_dest[b] = '0; bank_dpr[b] = 1'b0;
      for (int c = 0; c < C; c++) bank_ld[b][c] = '0;
    end
    for (int i = 0; i < S*C; i++) slice_st[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    route(2, (32'd1 << 17) | (32'd1 << 16) | (32'd9 << 8) | 32'd7);
    route(5, (32'd1 << 17) | 32'd30);
    check("route read back", rt_q[2] == ((32'd1 << 17) | (32'd1 << 16) | (32'd9 << 8) | 32'd7));
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      for (int b = 0; b < B; b++) begin
        for (int c = 0; c < C; c++) bank_ld[b][c] = '{valid: 1'b1, data: 16'($urandom)};
        bank_cfg[b] = '{valid: 1'b1, addr: $urandom, data: $urandom};
        bank_dest[b] = (b == 12 || b == 20) ? 8'd3 : 8'(b % S);
        bank_dpr[b] = (b == 12 || b == 20);
      end
      for (int i = 0; i < S*C; i++) slice_st[i] = '{valid: 1'b1, data: 16'($urandom)};
      bl = bank_ld; ss = slice_st; bc = bank_cfg;
      @(posedge clk); #1;
      for (int c = 0; c < C; c++) begin
        check("slice 2 loads from bank 7", slice_ld[2*C + c] == bl[7][c]);
        check("slice 5 loads from bank 30", slice_ld[5*C + c] == bl[30][c]);
        check("slice 0 unrouted", !slice_ld[c].valid);
        check("bank 9 stores slice 2", bank_st[9][c] == ss[2*C + c]);
        check("bank 7 gets no store", !bank_st[7][c].valid);
      end
      check("slice 3 configured by bank 12", slice_cfg[3] == bc[12]);
      check("other slices get no cfg", !slice_cfg[4].valid && !slice_cfg[2].valid);
      check("slice 3 frozen only", !slice_en[3] && slice_en[4] && slice_en[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
