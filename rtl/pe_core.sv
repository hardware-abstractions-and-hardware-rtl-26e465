// pe_core: the arithmetic core of a PE tile.
//
// A word-level ALU with one registered output. Its operands a, b and c come
// from the tile's connection boxes; b can be replaced by a configured
// constant. The paper only says that the PE is the Amber PE extended with a
// multiply-accumulate; the operation set and encodings here are this
// design's own. Two MAC forms exist: PE_MAC computes a*b+c in one step, and
// PE_ACC accumulates a*b over `count` valid inputs and then emits the sum and
// clears the accumulator.
//
// Interface: cfg_op[3:0] is the pe_op_e opcode, cfg_op[4] selects the
// constant for operand b. en=0 freezes the accumulator and drops the output valid (used while
// its array-slice is being reconfigured). Timing: an operation whose operands are all valid
// in cycle t produces a valid output in cycle t+1 (PE_ACC: only on the
// count-th input). Arithmetic wraps at 16 bits. clr (a write to the tile's
// opcode or count register) clears the accumulator.
module pe_core
  import cgra_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        clr,
  input  logic [31:0] cfg_op,
  input  logic [31:0] cfg_const,
  input  logic [31:0] cfg_count,
  input  word_t       a,
  input  word_t       b,
  input  word_t       c,
  output word_t       out
);

  pe_op_e            op;
  logic              use_const;
  word_t             bb;
  logic              need_c;
  logic              fire;
  logic [DATA_W-1:0] res;
  logic [DATA_W-1:0] acc_q, acc_next;
  logic [15:0]       cnt_q;
  logic              acc_emit;

  assign op        = pe_op_e'(cfg_op[3:0]);
  assign use_const = cfg_op[4];
  assign bb        = use_const ? word_t'{valid: 1'b1, data: cfg_const[DATA_W-1:0]} : b;
  assign need_c    = (op == PE_MAC);

  // Which operations read b at all.
  logic need_b;
  always_comb begin
    unique case (op)
      PE_PASS, PE_ABS: need_b = 1'b0;
      default:         need_b = 1'b1;
    endcase
  end

  assign fire = en && a.valid && (!need_b || bb.valid) && (!need_c || c.valid);

  always_comb begin
    res = '0;
    unique case (op)
      PE_PASS: res = a.data;
      PE_ADD:  res = a.data + bb.data;
      PE_SUB:  res = a.data - bb.data;
      PE_MUL:  res = DATA_W'(a.data * bb.data);
      PE_MAC:  res = DATA_W'(a.data * bb.data) + c.data;
      PE_ACC:  res = acc_next;
      PE_MAX:  res = ($signed(a.data) > $signed(bb.data)) ? a.data : bb.data;
      PE_MIN:  res = ($signed(a.data) < $signed(bb.data)) ? a.data : bb.data;
      PE_SHR:  res = DATA_W'($signed(a.data) >>> bb.data[3:0]);
      PE_SHL:  res = a.data << bb.data[3:0];
      PE_AND:  res = a.data & bb.data;
      PE_OR:   res = a.data | bb.data;
      PE_XOR:  res = a.data ^ bb.data;
      PE_ABS:  res = a.data[DATA_W-1] ? DATA_W'(-a.data) : a.data;
      default: res = a.data;
    endcase
  end

  assign acc_next = acc_q + DATA_W'(a.data * bb.data);
  assign acc_emit = (cnt_q + 16'd1 >= cfg_count[15:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out   <= '0;
      acc_q <= '0;
      cnt_q <= '0;
    end else if (clr) begin
      out   <= '0;
      acc_q <= '0;
      cnt_q <= '0;
    end else if (en) begin
      out.valid <= 1'b0;
      if (fire) begin
        if (op == PE_ACC) begin
          if (acc_emit) begin
            out   <= word_t'{valid: 1'b1, data: acc_next};
            acc_q <= '0;
            cnt_q <= '0;
          end else begin
            acc_q <= acc_next;
            cnt_q <= cnt_q + 16'd1;
          end
        end else begin
          out <= word_t'{valid: 1'b1, data: res};
        end
      end
    end else begin
      out.valid <= 1'b0;
    end
  end

endmodule
