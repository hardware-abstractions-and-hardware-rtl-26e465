// switch_box: routes a tile's incoming tracks to its outgoing tracks.
//
// The paper gives five incoming and five outgoing tracks per direction and
// says the switch boxes route incoming to outgoing tracks under static
// configuration. Here every one of the 20 outgoing tracks has its own
// multiplexer: select code side*5+track forwards that incoming track, code
// 20 (SB_SEL_CORE0) forwards the tile core's output, and any other code
// drives an invalid word. Every outgoing track is registered, so a word
// moves one tile per cycle; that keeps the statically configured mesh free
// of combinational loops whatever the configuration. The register on every
// output and the full (any-to-any) select are this design's choices; the
// paper shows the box only as a block.
// Timing: out(t+1) = selected input(t). en=0 holds the registers' data and
// drops their valid bits.
module switch_box
  import cgra_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               en,
  input  sides_t                             in,
  input  word_t                              core_out,
  input  logic [4*NUM_TRACKS-1:0][SB_SEL_W-1:0] sel,
  output sides_t                             out
);

  sides_t nxt;
  word_t  flat [32];

  // All select codes in one table: incoming tracks, the core, then nothing.
  always_comb begin
    for (int i = 0; i < 32; i++) flat[i] = '0;
    for (int i = 0; i < 4 * NUM_TRACKS; i++) flat[i] = in[i / NUM_TRACKS][i % NUM_TRACKS];
    flat[SB_SEL_CORE0] = core_out;
  end

  always_comb begin
    for (int o = 0; o < 4 * NUM_TRACKS; o++) nxt[o / NUM_TRACKS][o % NUM_TRACKS] = flat[sel[o]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0;
    end else if (en) begin
      out <= nxt;
    end else begin
      for (int o = 0; o < 4 * NUM_TRACKS; o++) out[o / NUM_TRACKS][o % NUM_TRACKS].valid <= 1'b0;
    end
  end

endmodule
