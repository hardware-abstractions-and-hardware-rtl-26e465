// connection_box: picks one core input out of the tile's incoming tracks.
//
// The paper: "Connection boxes select data from incoming tracks and route it
// to the PE or MEM tile cores." Each box is a 20:1 multiplexer over the five
// incoming tracks of each of the four sides. Select code side*5+track picks
// that track; codes 20..31 give an invalid word (the input is unused).
// Purely combinational; the select value comes from a configuration register.
module connection_box
  import cgra_pkg::*;
(
  input  sides_t              in,
  input  logic [CB_SEL_W-1:0] sel,
  output word_t               out
);

  word_t flat [32];

  always_comb begin
    for (int i = 0; i < 32; i++) flat[i] = '0;
    for (int i = 0; i < 4 * NUM_TRACKS; i++) flat[i] = in[i / NUM_TRACKS][i % NUM_TRACKS];
  end

  assign out = flat[sel];

endmodule
