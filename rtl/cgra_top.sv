// cgra_top: a CGRA whose GLB and tile array can be split among several
// concurrently running tasks.
//
// The chip is a global buffer of BANKS banks (GLB-slices), a tile array of
// SLICES array-slices (COLS columns by ROWS rows of PE/MEM tiles each), and
// the GLB-array network between them. A task runs in an execution region:
// any contiguous run of GLB-slices together with any contiguous run of
// array-slices, in any ratio (a flexible-shape region). The host, which is
// outside this design, forms regions and runs tasks through one bus:
//   1. it writes data and region-agnostic bitstreams into GLB banks,
//   2. it writes a bank's DPR_DEST register with the target array-slice and
//      starts the bank's DPR engine: the bank streams the bitstream, with
//      the column fields relocated, into that slice (frozen meanwhile),
//   3. it sets the slice's route register in the network to pick the banks
//      that feed and receive the slice's data, and starts the banks' load
//      and store engines,
//   4. it polls the banks' STATUS registers (or the busy outputs below).
// Other regions keep running while one region is reconfigured.
// The sizes are the paper's (32 x 128 KB banks, 8 array-slices of 4 x 16
// tiles, 5 tracks per side); everything about the host bus, the registers
// and the engines is this design's choice.
module cgra_top
  import cgra_pkg::*;
#(
  parameter int unsigned BANKS  = NUM_BANKS,
  parameter int unsigned WORDS  = BANK_WORDS,
  parameter int unsigned SLICES = NUM_SLICES,
  parameter int unsigned ROWS   = NUM_ROWS,
  parameter int unsigned COLS   = COLS_PER_SLICE
) (
  input  logic        clk,
  input  logic        rst_n,
  input  host_req_t   h_req,
  output logic        h_ready,
  output logic        h_rvalid,
  output logic [63:0] h_rdata,
  output logic        bank_busy      [BANKS],
  output logic        slice_reconfig [SLICES]
);

  logic        rt_we;
  logic [7:0]  rt_idx;
  logic [31:0] rt_wdata;
  logic [31:0] rt_q [SLICES];

  word_t       bank_ld  [BANKS][COLS];
  word_t       bank_st  [BANKS][COLS];
  cfg_req_t    bank_cfg [BANKS];
  logic [7:0]  bank_dest[BANKS];
  logic        bank_dpr [BANKS];
  logic        bank_ldb [BANKS];
  logic        bank_stb [BANKS];

  word_t       slice_ld  [SLICES*COLS];
  word_t       slice_st  [SLICES*COLS];
  cfg_req_t    slice_cfg [SLICES];
  logic        slice_en  [SLICES];

  glb #(.BANKS(BANKS), .WORDS(WORDS), .COLS(COLS), .SLICES(SLICES)) u_glb (
    .clk, .rst_n, .h_req, .h_ready, .h_rvalid, .h_rdata,
    .rt_we, .rt_idx, .rt_wdata, .rt_q,
    .ld(bank_ld), .st(bank_st), .cfg_out(bank_cfg), .dpr_dest(bank_dest),
    .dpr_busy(bank_dpr), .ld_busy(bank_ldb), .st_busy(bank_stb)
  );

  glb_array_network #(.BANKS(BANKS), .SLICES(SLICES), .COLS(COLS)) u_net (
    .clk, .rst_n, .rt_we, .rt_idx, .rt_wdata, .rt_q,
    .bank_ld, .bank_st, .bank_cfg, .bank_dest, .bank_dpr(bank_dpr),
    .slice_ld, .slice_st, .slice_cfg, .slice_en
  );

  tile_array #(.SLICES(SLICES), .ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .en(slice_en), .cfg(slice_cfg), .ld(slice_ld), .st(slice_st)
  );

  for (genvar b = 0; b < BANKS; b++) begin : g_busy
    assign bank_busy[b] = bank_dpr[b] || bank_ldb[b] || bank_stb[b];
  end
  for (genvar s = 0; s < SLICES; s++) begin : g_frz
    assign slice_reconfig[s] = !slice_en[s];
  end

endmodule
