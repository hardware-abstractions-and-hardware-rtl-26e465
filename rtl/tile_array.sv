// tile_array: the full CGRA tile array, SLICES array-slices side by side.
//
// The paper's array is 32 columns by 16 rows of tiles (384 PE, 128 MEM),
// joined by a statically configured mesh. Here it is built from SLICES
// array-slices of COLS columns each; the east tracks of slice s feed the
// west tracks of slice s+1 and the other way round, so the mesh is seamless
// and any run of contiguous slices can form one execution region. The outer
// west and east edges receive nothing. Each slice has its own configuration
// bus and its own freeze (en) so one slice can be reconfigured while the
// others keep running. ld/st carry one 16-bit GLB lane per column.
module tile_array
  import cgra_pkg::*;
#(
  parameter int unsigned SLICES = NUM_SLICES,
  parameter int unsigned ROWS   = NUM_ROWS,
  parameter int unsigned COLS   = COLS_PER_SLICE
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en  [SLICES],
  input  cfg_req_t cfg [SLICES],
  input  word_t    ld  [SLICES*COLS],
  output word_t    st  [SLICES*COLS]
);

  side_t w_in  [SLICES][ROWS];
  side_t w_out [SLICES][ROWS];
  side_t e_in  [SLICES][ROWS];
  side_t e_out [SLICES][ROWS];

  for (genvar s = 0; s < SLICES; s++) begin : g_slice
    word_t sl_ld [COLS];
    word_t sl_st [COLS];
    for (genvar c = 0; c < COLS; c++) begin : g_lane
      assign sl_ld[c]       = ld[s*COLS + c];
      assign st[s*COLS + c] = sl_st[c];
    end
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      assign w_in[s][r] = (s == 0)          ? side_t'('0) : e_out[s-1][r];
      assign e_in[s][r] = (s == SLICES - 1) ? side_t'('0) : w_out[s+1][r];
    end
    array_slice #(.ROWS(ROWS), .COLS(COLS)) u_slice (
      .clk, .rst_n, .en(en[s]), .slice_id(8'(s)), .cfg(cfg[s]),
      .ld(sl_ld), .st(sl_st),
      .west_in(w_in[s]), .west_out(w_out[s]), .east_in(e_in[s]), .east_out(e_out[s])
    );
  end

endmodule
