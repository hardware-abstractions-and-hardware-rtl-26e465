// tb_glb_bank: one GLB bank (1024 words) driven through its host port.
//  * memory and register writes read back through the host port;
//  * load engine: 10 words leave on the four lanes, one per cycle, the first
//    2 cycles after the start write, then STATUS shows load done;
//  * store engine: words with lanes 0 and 2 required (ST_MASK=0101) are
//    written only when both are valid, then read back;
//  * DPR engine: an 8-word bitstream compiled for columns 0..7 comes out
//    with its column fields moved to array-slice 5 (columns 20..23), one
//    word per cycle after 2 cycles of latency, data and row untouched;
//  * DPR and load started together: the DPR stream keeps the read port, the
//    load stream follows it.
module tb_glb_bank;
  import cgra_pkg::*;
  localparam int unsigned WORDS = 1024, COLS = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  bank_req_t h_req = '0;
  logic h_ready, h_rvalid;
  logic [63:0] h_rdata;
  word_t ld [COLS], st [COLS];
  cfg_req_t cfg_out;
  logic [7:0] dpr_dest;
  logic dpr_busy, ld_busy, st_busy;
  int checks = 0, failures = 0;
  logic [63:0] mem_ref [WORDS];

  glb_bank #(.WORDS(WORDS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic hwr(input logic isreg, input int addr, input logic [63:0] d);
    @(negedge clk);
    h_req = '{valid: 1'b1, we: 1'b1, is_reg: isreg, addr: 14'(addr), wdata: d};
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    @(negedge clk);
    h_req = '0;
  endtask

  task automatic hrd(input logic isreg, input int addr, output logic [63:0] d);
    @(negedge clk);
    h_req = '{valid: 1'b1, we: 1'b0, is_reg: isreg, addr: 14'(addr), wdata: '0};
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    @(negedge clk);
    h_req = '0;
    while (!h_rvalid) @(negedge clk);
    d = h_rdata;
  endtask

  initial begin
    logic [63:0] d;
    for (int c = 0; c < COLS; c++) st[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // ---- memory and registers through the host port
    for (int i = 0; i < 64; i++) begin
      mem_ref[i] = {$urandom, $urandom};
      hwr(1'b0, i, mem_ref[i]);
    end
    for (int i = 0; i < 64; i += 7) begin
      hrd(1'b0, i, d);
      check("host memory read", d == mem_ref[i]);
    end
    hwr(1'b1, GLB_LD_START, 64'd16);
    hwr(1'b1, GLB_LD_LEN, 64'd10);
    hrd(1'b1, GLB_LD_LEN, d);
    check("register read", d == 64'd10);
    // ---- load engine
    hwr(1'b1, GLB_CTRL, 64'b001);
    // the start write is taken at edge 0; the first word is out after edge 2
    @(posedge clk); #1;
    check("no load word after 1 cycle", !ld[0].valid);
    for (int n = 0; n < 10; n++) begin
      @(posedge clk); #1;
      for (int c = 0; c < COLS; c++)
        check($sformatf("load word %0d lane %0d", n, c),
              ld[c].valid && ld[c].data == mem_ref[16 + n][c*16 +: 16]);
    end
    @(posedge clk); #1;
    check("load stream ends", !ld[0].valid);
    hrd(1'b1, GLB_STATUS, d);
    check("load done, not busy", d[4] && !d[0]);
    // ---- store engine
    hwr(1'b1, GLB_ST_START, 64'd100);
    hwr(1'b1, GLB_ST_LEN, 64'd6);
    hwr(1'b1, GLB_ST_MASK, 64'b0101);
    hwr(1'b1, GLB_CTRL, 64'b010);
    check("store busy", st_busy);
    begin
      int written;
      logic [15:0] l0 [6], l2 [6];
      written = 0;
      while (written < 6) begin
        @(negedge clk);
        for (int c = 0; c < COLS; c++) st[c] = '{valid: 1'($urandom), data: 16'($urandom)};
        if (st[0].valid && st[2].valid) begin
          l0[written] = st[0].data; l2[written] = st[2].data;
          written++;
        end
      end
      @(negedge clk);
      for (int c = 0; c < COLS; c++) st[c] = '0;
      @(negedge clk);
      check("store done", !st_busy);
      for (int i = 0; i < 6; i++) begin
        hrd(1'b0, 100 + i, d);
        check("stored lanes 0 and 2", d[15:0] == l0[i] && d[47:32] == l2[i]);
      end
    end
    // ---- DPR engine with relocation
    for (int i = 0; i < 8; i++) begin
      mem_ref[200 + i] = {8'd0, 8'(i), 8'($urandom_range(0, 15)), 8'(4 * (i % 2) + i % 4), $urandom};
      hwr(1'b0, 200 + i, mem_ref[200 + i]);
    end
    hwr(1'b1, GLB_CFG_START, 64'd200);
    hwr(1'b1, GLB_CFG_LEN, 64'd8);
    hwr(1'b1, GLB_DPR_DEST, 64'd5);
    check("dest register out", dpr_dest == 8'd5);
    hwr(1'b1, GLB_LD_START, 64'd16);
    hwr(1'b1, GLB_LD_LEN, 64'd3);
    // DPR and load together
    hwr(1'b1, GLB_CTRL, 64'b101);
    @(posedge clk); #1;
    check("no cfg word after 1 cycle", !cfg_out.valid);
    for (int n = 0; n < 8; n++) begin
      @(posedge clk); #1;
      if (n == 0) check("dpr busy", dpr_busy);
      check($sformatf("cfg word %0d relocated", n),
            cfg_out.valid && cfg_out.addr == {mem_ref[200+n][63:40], 8'(20 + n % 4)} &&
            cfg_out.data == mem_ref[200+n][31:0]);
      check("load waits for dpr", !ld[0].valid);
    end
    for (int n = 0; n < 3; n++) begin
      @(posedge clk); #1;
      if (n == 0) check("dpr stream ends", !cfg_out.valid);
      check("load after dpr", ld[1].valid && ld[1].data == mem_ref[16 + n][31:16]);
    end
    hrd(1'b1, GLB_STATUS, d);
    check("dpr done", d[6] && !d[2] && !dpr_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
