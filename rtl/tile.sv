// tile: one PE or MEM tile of the array, with its interconnect node.
//
// Following the paper's tile diagram, a tile is a core (PE, or MEM when
// IS_MEM=1), three connection boxes that pick the core's operands a, b, c
// from the incoming tracks, and a switch box that drives the 5 outgoing
// tracks of each of the four sides. The configuration registers of all of
// these sit in the tile and are written from the column's configuration
// bus: a request whose address column/row fields equal col_id/row_id writes
// register addr[23:16] (layout in cgra_pkg). The tile's position arrives on
// the col_id/row_id ports rather than as parameters, so all PE tiles share
// one module body. Reset leaves every switch-box output and connection box
// unconnected (select code 31), so an unconfigured tile drives nothing.
//
// Timing: a configuration write takes effect the next cycle; data crosses
// the tile in one cycle (switch-box register) and through the core in one
// more. en=0 (array-slice under reconfiguration) freezes the tile.
module tile
  import cgra_pkg::*;
#(
  parameter bit IS_MEM = 1'b0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  logic [7:0] col_id,
  input  logic [7:0] row_id,
  input  cfg_req_t cfg,
  input  sides_t   in,
  output sides_t   out
);

  logic [4*NUM_TRACKS-1:0][SB_SEL_W-1:0] sb_sel_q;
  logic [2:0][CB_SEL_W-1:0]              cb_sel_q;
  logic [31:0]                           op_q, const_q, count_q;
  logic                                  hit;
  logic [7:0]                            ridx;
  logic                                  core_clr;
  logic                                  mem_wr;
  word_t                                 opnd [3];
  word_t                                 core_out;

  assign hit      = cfg.valid && cfg.addr[7:0] == col_id && cfg.addr[15:8] == row_id
                    && cfg.addr[31:24] == 8'd0;
  assign ridx     = cfg.addr[23:16];
  assign core_clr = hit && (ridx == CFG_OP || ridx == CFG_COUNT);
  assign mem_wr   = hit && ridx == CFG_MEMWR;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sb_sel_q <= '1;
      cb_sel_q <= '1;
      op_q     <= '0;
      const_q  <= '0;
      count_q  <= '0;
    end else if (hit) begin
      if (ridx < 8'(4 * NUM_TRACKS)) sb_sel_q[ridx[4:0]] <= cfg.data[SB_SEL_W-1:0];
      if (ridx >= CFG_CB_BASE && ridx < CFG_CB_BASE + 8'd3)
        cb_sel_q[2'(ridx - CFG_CB_BASE)] <= cfg.data[CB_SEL_W-1:0];
      if (ridx == CFG_OP)    op_q    <= cfg.data;
      if (ridx == CFG_CONST) const_q <= cfg.data;
      if (ridx == CFG_COUNT) count_q <= cfg.data;
    end
  end

  for (genvar i = 0; i < 3; i++) begin : g_cb
    connection_box u_cb (.in(in), .sel(cb_sel_q[i]), .out(opnd[i]));
  end

  if (IS_MEM) begin : g_mem
    mem_core u_core (
      .clk, .rst_n, .en, .clr(core_clr),
      .cfg_op(op_q), .cfg_count(count_q),
      .cfg_wr(mem_wr), .cfg_wdata(cfg.data),
      .a(opnd[0]), .b(opnd[1]), .c(opnd[2]), .out(core_out)
    );
    logic unused_const;
    assign unused_const = ^const_q;
  end else begin : g_pe
    pe_core u_core (
      .clk, .rst_n, .en, .clr(core_clr),
      .cfg_op(op_q), .cfg_const(const_q), .cfg_count(count_q),
      .a(opnd[0]), .b(opnd[1]), .c(opnd[2]), .out(core_out)
    );
    logic unused_memwr;
    assign unused_memwr = mem_wr;
  end

  switch_box u_sb (
    .clk, .rst_n, .en, .in(in), .core_out(core_out), .sel(sb_sel_q), .out(out)
  );

endmodule
