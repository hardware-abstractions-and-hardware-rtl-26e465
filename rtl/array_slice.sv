// array_slice: four adjacent columns of the tile array (an array-slice).
//
// The paper makes every set of four tile columns (48 PE and 16 MEM tiles in
// the 16-row array) one array-slice: the smallest amount of compute a task
// can be given, and the unit one GLB bank reconfigures. The slice holds
// ROWS x COLS tiles in a mesh, with the fourth column of MEM tiles (the
// PE-PE-PE-MEM column pattern of the paper's array drawing), and one IO tile
// on top of each column. The slice's west and east edge tracks are ports
// so that slices abut into the full array and a region of several
// contiguous slices can route across their boundary.
//
// Configuration: one request bus (cfg) reaches every tile and IO tile of the
// slice, unpipelined, as the paper's column-wise configuration distribution
// does; each tile picks out requests carrying its own column and row. The
// slice's columns are slice_id*COLS .. slice_id*COLS+COLS-1. en=0 freezes all
// tiles, which the top does while the slice is being reconfigured.
module array_slice
  import cgra_pkg::*;
#(
  parameter int unsigned ROWS = NUM_ROWS,
  parameter int unsigned COLS = COLS_PER_SLICE
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  logic [7:0] slice_id,
  input  cfg_req_t cfg,
  input  word_t    ld [COLS],
  output word_t    st [COLS],
  input  side_t    west_in  [ROWS],
  output side_t    west_out [ROWS],
  input  side_t    east_in  [ROWS],
  output side_t    east_out [ROWS]
);

  sides_t tin  [ROWS][COLS];
  sides_t tout [ROWS][COLS];
  side_t  io_to_tile [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic [7:0] col_id;
    assign col_id = 8'(slice_id * 8'(COLS) + 8'(c));

    io_tile u_io (
      .clk, .rst_n, .en, .col_id, .cfg,
      .ld(ld[c]), .st(st[c]),
      .from_tile(tout[0][c][SIDE_N]), .to_tile(io_to_tile[c])
    );

    for (genvar r = 0; r < ROWS; r++) begin : g_row
      tile #(.IS_MEM(c % 4 == 3)) u_tile (
        .clk, .rst_n, .en, .col_id, .row_id(8'(r)), .cfg,
        .in(tin[r][c]), .out(tout[r][c])
      );
      assign tin[r][c][SIDE_N] = (r == 0)        ? io_to_tile[c]         : tout[r-1][c][SIDE_S];
      assign tin[r][c][SIDE_S] = (r == ROWS - 1) ? side_t'('0)           : tout[r+1][c][SIDE_N];
      assign tin[r][c][SIDE_W] = (c == 0)        ? west_in[r]            : tout[r][c-1][SIDE_E];
      assign tin[r][c][SIDE_E] = (c == COLS - 1) ? east_in[r]            : tout[r][c+1][SIDE_W];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_edge
    assign west_out[r] = tout[r][0][SIDE_W];
    assign east_out[r] = tout[r][COLS-1][SIDE_E];
  end

endmodule
