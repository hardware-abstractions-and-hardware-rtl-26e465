// tb_pe_core: self-checking test of the PE core.
// Drives random operands through every opcode, with b from the track and
// from the constant, and compares the registered output one cycle later
// with a reference computed here. Checks the accumulate mode (output only
// on the count-th input), the freeze input and the one-cycle latency.
module tb_pe_core;
  import cgra_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, clr = 1'b0;
  logic [31:0] cfg_op = '0, cfg_const = '0, cfg_count = '0;
  word_t a = '0, b = '0, c = '0, out;
  int checks = 0, failures = 0;

  pe_core dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] ref_op(input pe_op_e op, input logic [15:0] x, y, z);
    logic signed [15:0] sx, sy;
    sx = x; sy = y;
    case (op)
      PE_PASS: return x;
      PE_ADD:  return x + y;
      PE_SUB:  return x - y;
      PE_MUL:  return 16'((32'(x) * 32'(y)) & 32'hffff);
      PE_MAC:  return 16'(32'(x) * 32'(y) + 32'(z));
      PE_MAX:  return (sx > sy) ? x : y;
      PE_MIN:  return (sx < sy) ? x : y;
      PE_SHR:  return 16'(sx >>> y[3:0]);
      PE_SHL:  return 16'(x << y[3:0]);
      PE_AND:  return x & y;
      PE_OR:   return x | y;
      PE_XOR:  return x ^ y;
      PE_ABS:  return sx < 0 ? 16'(-sx) : x;
      default: return 16'hxxxx;
    endcase
  endfunction

  task automatic check(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  pe_op_e ops [13] = '{PE_PASS, PE_ADD, PE_SUB, PE_MUL, PE_MAC, PE_MAX, PE_MIN,
                       PE_SHR, PE_SHL, PE_AND, PE_OR, PE_XOR, PE_ABS};

  initial begin
    logic [15:0] x, y, z, k, sum;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // every opcode, operand b from the track and from the constant
    for (int useconst = 0; useconst < 2; useconst++) begin
      foreach (ops[i]) begin
        for (int n = 0; n < 20; n++) begin
          x = 16'($urandom); y = 16'($urandom); z = 16'($urandom); k = 16'($urandom);
          @(negedge clk);
          cfg_op = {27'd0, 1'(useconst), 4'(ops[i])};
          cfg_const = {16'd0, k};
          a = '{valid: 1'b1, data: x};
          b = '{valid: 1'b1, data: y};
          c = '{valid: 1'b1, data: z};
          @(posedge clk); #1;
          check($sformatf("op %0d const %0d", ops[i], useconst),
                out.valid && out.data == ref_op(ops[i], x, useconst ? k : y, z));
        end
      end
    end
    // missing operand: no output
    @(negedge clk);
    cfg_op = {27'd0, 1'b0, 4'(PE_ADD)};
    b.valid = 1'b0;
    @(posedge clk); #1;
    check("no fire without b", !out.valid);
    // MAC needs c
    @(negedge clk);
    cfg_op = {27'd0, 1'b0, 4'(PE_MAC)};
    b.valid = 1'b1; c.valid = 1'b0;
    @(posedge clk); #1;
    check("no MAC without c", !out.valid);
    // accumulate over 4 inputs, twice
    @(negedge clk);
    a.valid = 1'b0; b.valid = 1'b0; c.valid = 1'b0;
    cfg_op = {27'd0, 1'b0, 4'(PE_ACC)}; cfg_count = 32'd4;
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    for (int rep = 0; rep < 2; rep++) begin
      sum = '0;
      for (int n = 0; n < 4; n++) begin
        @(negedge clk);
        x = 16'($urandom_range(0, 300)); y = 16'($urandom_range(0, 300));
        sum = sum + 16'(32'(x) * 32'(y));
        a = '{valid: 1'b1, data: x};
        b = '{valid: 1'b1, data: y};
        @(posedge clk); #1;
        if (n < 3) check("acc holds output", !out.valid);
        else       check("acc emits sum", out.valid && out.data == sum);
      end
    end
    // freeze: en=0 gives no output
    @(negedge clk);
    cfg_op = {27'd0, 1'b0, 4'(PE_ADD)};
    en = 1'b0;
    @(posedge clk); #1;
    check("frozen core is silent", !out.valid);
    @(negedge clk);
    en = 1'b1;
    a.valid = 1'b0;
    @(posedge clk); #1;
    check("no input no output", !out.valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
