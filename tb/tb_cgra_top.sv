// tb_cgra_top: the whole CGRA at its full size, end to end, with two tasks
// sharing it in flexible-shape execution regions.
//
// Task A (y = 3x) is compiled once, for array-slice 0, as a region-agnostic
// bitstream in bank 1. Task B (y = x + 100) spans two array-slices; its two
// bitstream halves (columns 0..3 and 4..7) sit in banks 8 and 9.
//  1. Banks 8 and 9 reconfigure array-slices 5 and 6 in parallel (DPR with
//     relocation); the time taken must be the bitstream length plus a small
//     fixed latency.
//  2. Task B runs: region = GLB-slices 8..10, array-slices 5..6; input from
//     bank 8, output to bank 10.
//  3. While task B streams, bank 1 reconfigures array-slice 3 for task A
//     (slice 3 frozen, task B unaffected); task A then runs in the region
//     GLB-slices 1..2 + array-slice 3.
//  4. Task A's same bitstream is relocated to array-slice 7 by rewriting
//     one register and runs again, writing to bank 4.
// All results are read back over the host bus and compared with values
// computed here. Each mechanism is counted; one that never happened counts
// as a failure.
module tb_cgra_top;
  import cgra_pkg::*;
  localparam int B = NUM_BANKS, S = NUM_SLICES, N = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  host_req_t h_req = '0;
  logic h_ready, h_rvalid;
  logic [63:0] h_rdata;
  logic bank_busy [B];
  logic slice_reconfig [S];
  int checks = 0, failures = 0;
  longint cycle = 0;

  // mechanism counters
  int n_dpr = 0, n_parallel_dpr = 0, n_relocated = 0, n_flex_region = 0;
  int n_cross_slice = 0, n_freeze_while_running = 0, n_concurrent = 0;

  cgra_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
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

  // bitstreams, compiled for the leftmost region
  logic [63:0] bs_a [$], bs_b0 [$], bs_b1 [$];
  logic [15:0] xa [N], xb [N];

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

  task automatic stream(input int ld_bank, input int st_bank, input int slice_ld, input int slice_st);
    hwr(rt_a(slice_ld), (64'd1 << 17) | 64'(ld_bank));
    if (slice_st != slice_ld) hwr(rt_a(slice_st), (64'd1 << 16) | (64'(st_bank) << 8));
    else hwr(rt_a(slice_st), (64'd1 << 17) | (64'd1 << 16) | (64'(st_bank) << 8) | 64'(ld_bank));
    hwr(reg_a(st_bank, GLB_ST_START), 64'd512);
    hwr(reg_a(st_bank, GLB_ST_LEN), 64'(N));
    hwr(reg_a(st_bank, GLB_ST_MASK), 64'b0001);
    hwr(reg_a(st_bank, GLB_CTRL), 64'b010);
    hwr(reg_a(ld_bank, GLB_LD_START), 64'd256);
    hwr(reg_a(ld_bank, GLB_LD_LEN), 64'(N));
    hwr(reg_a(ld_bank, GLB_CTRL), 64'b001);
  endtask

  task automatic check_results(input int bank, input logic [15:0] x [N], input bit add100, input string name);
    logic [63:0] d;
    for (int i = 0; i < N; i++) begin
      hrd(mem_a(bank, 512 + i), d);
      check($sformatf("%s result %0d", name, i),
            d[15:0] == (add100 ? 16'(x[i] + 16'd100) : 16'(x[i] * 16'd3)));
    end
  endtask

  // monitors for mechanisms observed in hardware
  always @(posedge clk) if (rst_n) begin
    int frozen, busy_b, busy_a;
    if (slice_reconfig[3] && bank_busy[8] && bank_busy[10]) n_freeze_while_running++;
    if (bank_busy[1] && bank_busy[8] && !slice_reconfig[3] && !slice_reconfig[5]) n_concurrent++;
  end

  initial begin
    logic [63:0] st;
    longint t0;
    // ---- bitstreams
    // task A: lane 0 -> PE(0,0) * 3 -> back on lane 0
    bs_a.push_back(bs(0, NUM_ROWS, 8'd0, 32'b00001));
    bs_a.push_back(bs(0, 0, CFG_CB_BASE, 32'(trk(SIDE_N, 0))));
    bs_a.push_back(bs(0, 0, CFG_OP, 32'(PE_MUL) | 32'h10));
    bs_a.push_back(bs(0, 0, CFG_CONST, 32'd3));
    bs_a.push_back(bs(0, 0, CFG_SB_BASE + 8'(trk(SIDE_N, 1)), 32'(SB_SEL_CORE0)));
    bs_a.push_back(bs(0, NUM_ROWS, 8'd1, 32'd1));
    // task B, first slice: lane 0 east along row 0 to the next slice
    bs_b0.push_back(bs(0, NUM_ROWS, 8'd0, 32'b00001));
    bs_b0.push_back(bs(0, 0, CFG_SB_BASE + 8'(trk(SIDE_E, 0)), 32'(trk(SIDE_N, 0))));
    for (int c = 1; c < 4; c++) bs_b0.push_back(bs(c, 0, CFG_SB_BASE + 8'(trk(SIDE_E, 0)), 32'(trk(SIDE_W, 0))));
    // task B, second slice: PE(0,4) adds 100, result up column 4
    bs_b1.push_back(bs(4, 0, CFG_CB_BASE, 32'(trk(SIDE_W, 0))));
    bs_b1.push_back(bs(4, 0, CFG_OP, 32'(PE_ADD) | 32'h10));
    bs_b1.push_back(bs(4, 0, CFG_CONST, 32'd100));
    bs_b1.push_back(bs(4, 0, CFG_SB_BASE + 8'(trk(SIDE_N, 1)), 32'(SB_SEL_CORE0)));
    bs_b1.push_back(bs(4, NUM_ROWS, 8'd1, 32'd1));

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // ---- preload bitstreams and inputs
    put_words(1, 0, bs_a);
    put_words(8, 0, bs_b0);
    put_words(9, 0, bs_b1);
    for (int i = 0; i < N; i++) begin
      xa[i] = 16'($urandom); xb[i] = 16'($urandom);
      hwr(mem_a(1, 256 + i), {48'($urandom), xa[i]});
      hwr(mem_a(8, 256 + i), {48'($urandom), xb[i]});
    end

    // ---- 1. parallel DPR of task B into slices 5 and 6
    dpr(8, bs_b0.size(), 5);
    dpr(9, bs_b1.size(), 6);
    @(negedge clk);
    h_req = '{valid: 1'b1, we: 1'b1, addr: reg_a(8, GLB_CTRL), wdata: 64'b100};
    @(negedge clk);
    h_req = '{valid: 1'b1, we: 1'b1, addr: reg_a(9, GLB_CTRL), wdata: 64'b100};
    t0 = cycle;
    @(negedge clk);
    h_req = '0;
    while (!(slice_reconfig[5] && slice_reconfig[6])) @(negedge clk);
    n_parallel_dpr++;
    while (slice_reconfig[5] || slice_reconfig[6]) @(negedge clk);
    n_dpr += 2; n_relocated += 2; n_cross_slice++;
    check($sformatf("parallel DPR time %0d cycles for %0d words", cycle - t0, bs_b0.size()),
          cycle - t0 <= longint'(bs_b0.size() + 5));

    // ---- 2. run task B: GLB-slices 8..10, array-slices 5..6
    stream(8, 10, 5, 6);
    n_flex_region++;

    // ---- 3. DPR task A into slice 3 while task B runs, then run it
    dpr(1, bs_a.size(), 3);
    hwr(reg_a(1, GLB_CTRL), 64'b100);
    wait_idle(1);
    n_dpr++; n_relocated++;
    stream(1, 2, 3, 3);
    n_flex_region++;
    wait_idle(1); wait_idle(2); wait_idle(8); wait_idle(10);
    check_results(10, xb, 1'b1, "task B");
    check_results(2, xa, 1'b0, "task A");

    // ---- 4. relocate task A to slice 7, output to bank 4
    dpr(1, bs_a.size(), 7);
    hwr(reg_a(1, GLB_CTRL), 64'b100);
    wait_idle(1);
    n_dpr++; n_relocated++;
    for (int i = 0; i < N; i++) xa[i] = 16'($urandom);
    for (int i = 0; i < N; i++) hwr(mem_a(1, 256 + i), {48'd0, xa[i]});
    stream(1, 4, 7, 7);
    wait_idle(1); wait_idle(4);
    check_results(4, xa, 1'b0, "task A relocated");
    hrd(reg_a(4, GLB_STATUS), st);
    check("bank 4 store done", st[5]);

    $display("mechanisms: dpr=%0d parallel_dpr=%0d relocated=%0d flex_region=%0d cross_slice=%0d freeze_while_other_runs=%0d concurrent_cycles=%0d",
             n_dpr, n_parallel_dpr, n_relocated, n_flex_region, n_cross_slice, n_freeze_while_running, n_concurrent);
    check("dpr happened", n_dpr > 0);
    check("parallel dpr happened", n_parallel_dpr > 0);
    check("relocation happened", n_relocated > 0);
    check("flexible region used", n_flex_region > 0);
    check("region crossed slices", n_cross_slice > 0);
    check("slice frozen while another task ran", n_freeze_while_running > 0);
    check("two tasks streamed at once", n_concurrent > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
