// glb_array_network: the network between GLB-slices and array-slices.
//
// With flexible-shape execution regions a task may own more or fewer
// GLB-slices than array-slices, so a slice's data need not come from the
// GLB bank directly above it. The paper names this a multi-stage network
// and says DPR bitstreams also travel over it, but gives no structure. This
// version is the simplest that serves both uses: a selection stage and a
// register stage.
//  * Data: each array-slice s has a route register. Its bits [4:0] name the
//    bank whose load lanes feed the slice's columns (used when bit 17 is
//    set), bits [12:8] the bank that receives the slice's store lanes (used
//    when bit 16 is set). When several slices send to one bank, the lowest
//    slice wins.
//  * Configuration: the bitstream of bank b goes to slice dpr_dest[b] while
//    bank b's DPR engine is busy. The lowest such bank wins. That slice is
//    frozen (en=0) for as long as any bank is configuring it.
// The host writes route registers through rt_we/rt_idx/rt_wdata. All paths
// have one register stage, so the network adds one cycle each way.
module glb_array_network
  import cgra_pkg::*;
#(
  parameter int unsigned BANKS  = NUM_BANKS,
  parameter int unsigned SLICES = NUM_SLICES,
  parameter int unsigned COLS   = COLS_PER_SLICE
) (
  input  logic        clk,
  input  logic        rst_n,
  // route registers
  input  logic        rt_we,
  input  logic [7:0]  rt_idx,
  input  logic [31:0] rt_wdata,
  output logic [31:0] rt_q [SLICES],
  // bank side
  input  word_t       bank_ld    [BANKS][COLS],
  output word_t       bank_st    [BANKS][COLS],
  input  cfg_req_t    bank_cfg   [BANKS],
  input  logic [7:0]  bank_dest  [BANKS],
  input  logic        bank_dpr   [BANKS],
  // array side
  output word_t       slice_ld   [SLICES*COLS],
  input  word_t       slice_st   [SLICES*COLS],
  output cfg_req_t    slice_cfg  [SLICES],
  output logic        slice_en   [SLICES]
);

  localparam int unsigned BW = $clog2(BANKS);

  logic [31:0] route_q [SLICES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SLICES; s++) route_q[s] <= '0;
    end else if (rt_we && int'(rt_idx) < SLICES) begin
      route_q[rt_idx[$clog2(SLICES)-1:0]] <= rt_wdata;
    end
  end
  assign rt_q = route_q;

  // selection stage
  word_t    ld_sel  [SLICES*COLS];
  word_t    st_sel  [BANKS][COLS];
  cfg_req_t cfg_sel [SLICES];
  logic     frz_sel [SLICES];

  always_comb begin
    for (int s = 0; s < SLICES; s++) begin
      for (int c = 0; c < COLS; c++) begin
        ld_sel[s*COLS + c] = '0;
        if (route_q[s][17]) ld_sel[s*COLS + c] = bank_ld[route_q[s][BW-1:0]][c];
      end
    end
    for (int b = 0; b < BANKS; b++) begin
      for (int c = 0; c < COLS; c++) st_sel[b][c] = '0;
    end
    for (int s = SLICES - 1; s >= 0; s--) begin
      if (route_q[s][16]) begin
        for (int c = 0; c < COLS; c++) st_sel[route_q[s][8 +: BW]][c] = slice_st[s*COLS + c];
      end
    end
    for (int s = 0; s < SLICES; s++) begin
      cfg_sel[s] = '0;
      frz_sel[s] = 1'b0;
      for (int b = BANKS - 1; b >= 0; b--) begin
        if (bank_dpr[b] && int'(bank_dest[b]) == s) begin
          cfg_sel[s] = bank_cfg[b];
          frz_sel[s] = 1'b1;
        end
      end
    end
  end

  // register stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SLICES*COLS; i++) slice_ld[i] <= '0;
      for (int b = 0; b < BANKS; b++) for (int c = 0; c < COLS; c++) bank_st[b][c] <= '0;
      for (int s = 0; s < SLICES; s++) begin
        slice_cfg[s] <= '0;
        slice_en[s]  <= 1'b1;
      end
    end else begin
      slice_ld <= ld_sel;
      bank_st  <= st_sel;
      for (int s = 0; s < SLICES; s++) begin
        slice_cfg[s] <= cfg_sel[s];
        slice_en[s]  <= !frz_sel[s];
      end
    end
  end

endmodule
