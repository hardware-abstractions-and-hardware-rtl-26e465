// tb_workload_fir: a small convolution kernel run through the whole CGRA at
// its full size, as a stand-in for the convolution and stencil kernels
// (ResNet-18 and MobileNet layers, camera pipeline, Harris) of the evaluated
// workloads, whose real bitstreams come from a compiler outside this design.
//
// The kernel is a 3-tap filter y[n] = w0*x[n] + w1*x[n-1] + w2*x[n-2] in one
// array-slice. Two MEM tiles act as one-sample line buffers to produce
// x[n-1] and x[n-2]; one PE multiplies, two PEs multiply-accumulate; the
// routes are padded so that every operand pair meets in the same cycle.
// The 48-word bitstream is compiled for slice 0, preloaded in bank 5 with
// the input, and relocated to array-slice 2 by DPR; the region is
// GLB-slices 5..6 with array-slice 2. Outputs y[2..N-1] land in bank 6 and
// are compared with values computed here. The run is then repeated in
// array-slice 6 from the same bitstream with new weights written into the
// bitstream words, checking that a relocated kernel computes the same.
module tb_workload_fir;
  import cgra_pkg::*;
  localparam int B = NUM_BANKS, S = NUM_SLICES, N = 200;
  logic clk = 1'b0, rst_n = 1'b0;
  host_req_t h_req = '0;
  logic h_ready, h_rvalid;
  logic [63:0] h_rdata;
  logic bank_busy [B];
  logic slice_reconfig [S];
  int checks = 0, failures = 0;

  cgra_top dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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
  function automatic logic [31:0] rt_a(int slice);
    return {2'b11, 22'd0, 8'(slice)};
  endfunction
  function automatic logic [63:0] bs(int col, int row, logic [7:0] r, logic [31:0] d);
    return {cfg_addr(col, row, r), d};
  endfunction


  task automatic put_words(input int bank, input int base, input logic [63:0] w [$]);
    foreach (w[i]) hwr(mem_a(bank, base + i), w[i]);
  endtask

  task automatic wait_idle(input int bank);
    logic [63:0] st;
    do hrd(reg_a(bank, GLB_STATUS), st); while (st[2:0] != 3'b000);
  endtask

  task automatic dpr(input int bank, input int len, input int dest);
    hwr(reg_a(bank, GLB_CFG_START), 64'd0);
    hwr(reg_a(bank, GLB_CFG_LEN), 64'(len));
    hwr(reg_a(bank, GLB_DPR_DEST), 64'(dest));
  endtask

  logic [63:0] bsw [$];
  logic [15:0] x [N];

  task automatic sb(int c, int r, side_e os, int ot, logic [31:0] sel);
    bsw.push_back(bs(c, r, CFG_SB_BASE + 8'(trk(os, ot)), sel));
  endtask
  task automatic cb(int c, int r, int opnd, side_e s, int t);
    bsw.push_back(bs(c, r, CFG_CB_BASE + 8'(opnd), 32'(trk(s, t))));
  endtask
  task automatic core(int c, int r, logic [31:0] op, logic [31:0] k, logic [31:0] cnt);
    bsw.push_back(bs(c, r, CFG_OP, op));
    bsw.push_back(bs(c, r, CFG_CONST, k));
    bsw.push_back(bs(c, r, CFG_COUNT, cnt));
  endtask

  task automatic build(logic [15:0] w0, w1, w2);
    bsw.delete();
    bsw.push_back(bs(0, NUM_ROWS, 8'd0, 32'b00001));    // lane 0 -> (0,0) north track 0
    bsw.push_back(bs(0, NUM_ROWS, 8'd1, 32'd4));        // lane 0 <- (0,0) north track 4
    // x east along row 0 to the MEM column
    sb(0, 0, SIDE_E, 0, 32'(trk(SIDE_N, 0)));
    sb(1, 0, SIDE_E, 0, 32'(trk(SIDE_W, 0)));
    sb(2, 0, SIDE_E, 0, 32'(trk(SIDE_W, 0)));
    // (3,0) MEM: x[n-1]; (3,1) MEM: x[n-2]
    cb(3, 0, 0, SIDE_W, 0); core(3, 0, 32'(MEM_DELAY), 0, 1);
    sb(3, 0, SIDE_S, 0, 32'(SB_SEL_CORE0));
    sb(3, 0, SIDE_W, 1, 32'(SB_SEL_CORE0));
    cb(3, 1, 0, SIDE_N, 0); core(3, 1, 32'(MEM_DELAY), 0, 1);
    sb(3, 1, SIDE_W, 0, 32'(SB_SEL_CORE0));
    // (2,1): w2 * x[n-2]
    cb(2, 1, 0, SIDE_E, 0); core(2, 1, 32'(PE_MUL) | 32'h10, 32'(w2), 0);
    sb(2, 1, SIDE_W, 0, 32'(SB_SEL_CORE0));
    // x[n-1] padded route: (2,0) -> (2,1) -> (2,2) -> (1,2) -> (1,1)
    sb(2, 0, SIDE_S, 1, 32'(trk(SIDE_E, 1)));
    sb(2, 1, SIDE_S, 1, 32'(trk(SIDE_N, 1)));
    sb(2, 2, SIDE_W, 1, 32'(trk(SIDE_N, 1)));
    sb(1, 2, SIDE_N, 1, 32'(trk(SIDE_E, 1)));
    // (1,1): w1 * x[n-1] + w2 * x[n-2]
    cb(1, 1, 0, SIDE_S, 1); cb(1, 1, 2, SIDE_E, 0);
    core(1, 1, 32'(PE_MAC) | 32'h10, 32'(w1), 0);
    sb(1, 1, SIDE_W, 0, 32'(SB_SEL_CORE0));
    // x[n] padded route down column 0 to row 6 and back up to row 1
    sb(0, 0, SIDE_S, 2, 32'(trk(SIDE_N, 0)));
    for (int r = 1; r <= 5; r++) sb(0, r, SIDE_S, 2, 32'(trk(SIDE_N, 2)));
    sb(0, 6, SIDE_N, 3, 32'(trk(SIDE_N, 2)));
    for (int r = 5; r >= 2; r--) sb(0, r, SIDE_N, 3, 32'(trk(SIDE_S, 3)));
    // (0,1): y = w0 * x[n] + previous partial sum, then up to lane 0
    cb(0, 1, 0, SIDE_S, 3); cb(0, 1, 2, SIDE_E, 0);
    core(0, 1, 32'(PE_MAC) | 32'h10, 32'(w0), 0);
    sb(0, 1, SIDE_N, 4, 32'(SB_SEL_CORE0));
    sb(0, 0, SIDE_N, 4, 32'(trk(SIDE_S, 4)));
  endtask

  task automatic run_fir(int slice, int out_bank, logic [15:0] w0, w1, w2);
    logic [63:0] d;
    logic [15:0] y;
    build(w0, w1, w2);
    put_words(5, 0, bsw);
    dpr(5, bsw.size(), slice);
    hwr(reg_a(5, GLB_CTRL), 64'b100);
    wait_idle(5);
    hwr(rt_a(slice), (64'd1 << 17) | (64'd1 << 16) | (64'(out_bank) << 8) | 64'd5);
    hwr(reg_a(out_bank, GLB_ST_START), 64'd512);
    hwr(reg_a(out_bank, GLB_ST_LEN), 64'(N - 2));
    hwr(reg_a(out_bank, GLB_ST_MASK), 64'b0001);
    hwr(reg_a(out_bank, GLB_CTRL), 64'b010);
    hwr(reg_a(5, GLB_LD_START), 64'd256);
    hwr(reg_a(5, GLB_LD_LEN), 64'(N));
    hwr(reg_a(5, GLB_CTRL), 64'b001);
    wait_idle(5); wait_idle(out_bank);
    for (int n = 2; n < N; n++) begin
      y = 16'(w0 * x[n] + w1 * x[n-1] + w2 * x[n-2]);
      hrd(mem_a(out_bank, 512 + n - 2), d);
      check($sformatf("slice %0d y[%0d]", slice, n), d[15:0] == y);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      x[i] = 16'($urandom_range(0, 1000));
      hwr(mem_a(5, 256 + i), {48'd0, x[i]});
    end
    run_fir(2, 6, 16'd3, 16'd5, 16'd7);
    run_fir(6, 7, 16'd2, 16'hfffe, 16'd1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
