// io_tile: joins one column of the tile array to one 16-bit GLB lane.
//
// The paper places IO tiles at the top of the array; through them the GLB
// talks to the tiles. Here each column has one IO tile. The word coming
// from the GLB (ld) is driven onto the incoming north tracks of the column's
// top tile chosen by a 5-bit mask (register 0), and the word leaving the top
// tile on the north track chosen by register 1 (0..4, any other value: none)
// goes back to the GLB (st). IO tiles answer to configuration row NUM_ROWS
// (16), one past the last tile row; this addressing and both registers are
// this design's choices. Both directions are registered: one cycle each way.
module io_tile
  import cgra_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic [7:0] col_id,
  input  cfg_req_t   cfg,
  input  word_t      ld,        // from the GLB
  output word_t      st,        // to the GLB
  input  side_t      from_tile, // north outgoing tracks of the top tile
  output side_t      to_tile    // north incoming tracks of the top tile
);

  logic [NUM_TRACKS-1:0] ld_mask_q;
  logic [2:0]            st_sel_q;
  logic                  hit;

  assign hit = cfg.valid && cfg.addr[7:0] == col_id && cfg.addr[15:8] == 8'(NUM_ROWS)
               && cfg.addr[31:24] == 8'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_mask_q <= '0;
      st_sel_q  <= '1;
    end else if (hit) begin
      if (cfg.addr[23:16] == 8'd0) ld_mask_q <= cfg.data[NUM_TRACKS-1:0];
      if (cfg.addr[23:16] == 8'd1) st_sel_q  <= cfg.data[2:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      to_tile <= '0;
      st      <= '0;
    end else begin
      for (int t = 0; t < NUM_TRACKS; t++) begin
        to_tile[t].data  <= ld.data;
        to_tile[t].valid <= en && ld.valid && ld_mask_q[t];
      end
      st <= '0;
      for (int t = 0; t < NUM_TRACKS; t++) begin
        if (int'(st_sel_q) == t) st <= word_t'{valid: en && from_tile[t].valid, data: from_tile[t].data};
      end
    end
  end

endmodule
