// glb_sram: the storage array of one GLB bank.
//
// The paper gives each of the 32 GLB banks 128 KB of SRAM. This module holds
// that capacity as WORDS words of W bits (16384 x 64 bits by default) with
// one read port and one write port. Reads are synchronous: rdata is valid the
// cycle after re. A read and a write to the same address in one cycle return
// the old word. The word width and the two-port organisation are this
// design's choices; a real chip would put an SRAM macro here.
module glb_sram
  import cgra_pkg::*;
#(
  parameter int unsigned WORDS = BANK_WORDS,
  parameter int unsigned W     = GLB_WORD_W
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [W-1:0]             rdata,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [W-1:0]             wdata
);

  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
