// tb_glb: the global buffer at full size (32 banks x 16384 words), driven
// through the host bus. Checks the address decode: memory words in banks
// 0, 5 and 31 land in the right bank and read back; a bank register write
// and read; a route-register write appears on rt_* and its value is read
// back; a load started in bank 5 comes out on bank 5's lanes only.
module tb_glb;
  import cgra_pkg::*;
  localparam int B = NUM_BANKS, C = COLS_PER_SLICE, S = NUM_SLICES;
  logic clk = 1'b0, rst_n = 1'b0;
  host_req_t h_req = '0;
  logic h_ready, h_rvalid;
  logic [63:0] h_rdata;
  logic rt_we;
  logic [7:0] rt_idx;
  logic [31:0] rt_wdata, rt_q [S];
  word_t ld [B][C], st [B][C];
  cfg_req_t cfg_out [B];
  logic [7:0] dpr_dest [B];
  logic dpr_busy [B], ld_busy [B], st_busy [B];
  int checks = 0, failures = 0;

  glb dut (.*);
  always #5 clk = ~clk;

  // route registers as the network holds them
  always_ff @(posedge clk) if (rt_we) rt_q[rt_idx[2:0]] <= rt_wdata;

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

  task automatic hwr(input logic [31:0] addr, input logic [63:0] d);
    @(negedge clk);
    h_req = '{valid: 1'b1, we: 1'b1, addr: addr, wdata: d};
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    @(negedge clk);
    h_req = '0;
  endtask

  task automatic hrd(input logic [31:0] addr, output logic [63:0] d);
    @(negedge clk);
    h_req = '{valid: 1'b1, we: 1'b0, addr: addr, wdata: '0};
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    @(negedge clk);
    h_req = '0;
    while (!h_rvalid) @(negedge clk);
    d = h_rdata;
  endtask

  function automatic logic [31:0] mem_a(int bank, int word);
    return {1'b0, 12'd0, 5'(bank), 14'(word)};
  endfunction
  function automatic logic [31:0] reg_a(int bank, glb_reg_e r);
    return {2'b10, 21'd0, 5'(bank), 4'(r)};
  endfunction

  initial begin
    logic [63:0] d, v [3], v5 [4];
    int banks [3] = '{0, 5, 31};
    for (int s = 0; s < S; s++) rt_q[s] = '0;
    for (int b = 0; b < B; b++) for (int c = 0; c < C; c++) st[b][c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 4; w++) begin
      foreach (banks[i]) begin
        v[i] = {$urandom, $urandom};
        hwr(mem_a(banks[i], 1000 + w), v[i]);
        if (banks[i] == 5) v5[w] = v[i];
      end
      foreach (banks[i]) begin
        hrd(mem_a(banks[i], 1000 + w), d);
        check($sformatf("bank %0d word", banks[i]), d == v[i]);
      end
    end
    hwr(reg_a(3, GLB_LD_LEN), 64'd77);
    hrd(reg_a(3, GLB_LD_LEN), d);
    check("bank 3 register", d == 64'd77);
    hrd(reg_a(4, GLB_LD_LEN), d);
    check("bank 4 register untouched", d == 64'd0);
    hwr({2'b11, 22'd0, 8'd6}, 64'h2_0a05);
    check("route register written", rt_q[6] == 32'h2_0a05);
    hrd({2'b11, 22'd0, 8'd6}, d);
    check("route register read", d == 64'h2_0a05);
    // load 4 words from bank 5 starting at word 1000
    hwr(reg_a(5, GLB_LD_START), 64'd1000);
    hwr(reg_a(5, GLB_LD_LEN), 64'd4);
    hwr(reg_a(5, GLB_CTRL), 64'd1);
    @(posedge clk);
    for (int n = 0; n < 4; n++) begin
      @(posedge clk); #1;
      check("bank 5 load lane", ld[5][0].valid && !ld[0][0].valid && !ld[31][0].valid);
      check("bank 5 streams what was written to bank 5", ld[5][3].data == v5[n][63:48]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
