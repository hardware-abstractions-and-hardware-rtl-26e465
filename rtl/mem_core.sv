// mem_core: the scratchpad core of a MEM tile.
//
// The paper uses MEM tiles as small scratchpads of the tile array and gives
// no more of their insides. This core holds DEPTH words in a single array
// and offers three modes, chosen by cfg_mode (mem_mode_e):
//   MEM_DELAY  line buffer: every valid word on a is written at a running
//              pointer; once `count` words have been written, each new
//              valid input also emits the word written `count` inputs
//              earlier (count must be 1..DEPTH-1). This is what stencil
//              kernels (camera pipeline, Harris) use the MEM tiles for.
//   MEM_LUT    lookup table: a valid a emits mem[a].
//   MEM_RAM    scratchpad: a valid c writes a into mem[b]; otherwise a valid
//              b reads mem[b].
// The contents can also be written through the configuration bus
// (cfg_wr with {addr, data}), which is how lookup tables are loaded.
// Depth, modes and encodings are this design's own choices.
//
// Timing: an output word appears one cycle after the input that causes it.
// en=0 freezes the core and drops the output valid; clr (a write to the
// tile's mode or count register) empties the line buffer.
module mem_core
  import cgra_pkg::*;
#(
  parameter int unsigned DEPTH = MEM_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        clr,
  input  logic [31:0] cfg_op,
  input  logic [31:0] cfg_count,
  input  logic        cfg_wr,
  input  logic [31:0] cfg_wdata,
  input  word_t       a,
  input  word_t       b,
  input  word_t       c,
  output word_t       out
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [DATA_W-1:0] mem [DEPTH];
  logic [AW-1:0]     wptr_q;
  logic [AW:0]       fill_q;
  mem_mode_e         mode;
  logic [AW-1:0]     count;
  logic [AW-1:0]     rd_addr;

  assign mode    = mem_mode_e'(cfg_op[1:0]);
  assign count   = cfg_count[AW-1:0];
  assign rd_addr = wptr_q - count;

  always_ff @(posedge clk) begin
    if (cfg_wr) begin
      mem[cfg_wdata[16+AW-1:16]] <= cfg_wdata[DATA_W-1:0];
    end else if (en) begin
      if (mode == MEM_DELAY && a.valid)             mem[wptr_q] <= a.data;
      else if (mode == MEM_RAM && c.valid && a.valid) mem[b.data[AW-1:0]] <= a.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out    <= '0;
      wptr_q <= '0;
      fill_q <= '0;
    end else if (clr) begin
      out    <= '0;
      wptr_q <= '0;
      fill_q <= '0;
    end else if (en) begin
      out.valid <= 1'b0;
      unique case (mode)
        MEM_DELAY: if (a.valid) begin
          wptr_q <= wptr_q + 1'b1;
          if (fill_q < (AW+1)'(DEPTH)) fill_q <= fill_q + 1'b1;
          if (fill_q >= {1'b0, count} && count != '0)
            out <= word_t'{valid: 1'b1, data: mem[rd_addr]};
        end
        MEM_LUT: if (a.valid)
          out <= word_t'{valid: 1'b1, data: mem[a.data[AW-1:0]]};
        MEM_RAM: if (b.valid && !c.valid)
          out <= word_t'{valid: 1'b1, data: mem[b.data[AW-1:0]]};
        default: ;
      endcase
    end else begin
      out.valid <= 1'b0;
    end
  end

endmodule
