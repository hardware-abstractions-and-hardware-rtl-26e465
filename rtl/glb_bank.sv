// glb_bank: one GLB bank, which is also one GLB-slice.
//
// The paper uses each GLB bank as one GLB-slice: the unit of GLB capacity
// and bandwidth handed to a task. A bank stores data and bitstreams, streams
// data to the tile array and takes results back, and, for fast dynamic
// partial reconfiguration (DPR), streams a bitstream into one array-slice.
// The paper adds to each bank a register naming the destination region of
// DPR; bitstreams are compiled as if the task sat in the leftmost region,
// and the bank relocates them on the fly. Here relocation replaces the
// slice part of each configuration address's column field by DPR_DEST:
// column' = DPR_DEST*COLS + column mod COLS. So one register write moves a
// task to any free array-slice.
//
// Three engines share the bank's 1-read/1-write SRAM:
//   load   reads LD_LEN words from LD_START, one per cycle; each 64-bit word
//          leaves as four 16-bit lanes, one per column of an array-slice.
//   store  writes a word (four lanes) whenever every lane in ST_MASK is
//          valid, ST_LEN words from ST_START.
//   dpr    reads CFG_LEN words {addr, data} from CFG_START and emits one
//          relocated configuration write per cycle on cfg_out.
// Read-port priority: dpr, then load, then host reads; write-port priority:
// store, then host writes. The host port is valid/ready; a read answers on
// h_rvalid one cycle after it is accepted. The engines, their registers and
// the linear address pattern are this design's choices; the paper describes
// the bank's role, not its insides.
// Timing: the first load word leaves 2 cycles after the start write; a
// bitstream of N words takes N cycles plus 2 cycles of latency.
module glb_bank
  import cgra_pkg::*;
#(
  parameter int unsigned WORDS = BANK_WORDS,
  parameter int unsigned COLS  = COLS_PER_SLICE
) (
  input  logic        clk,
  input  logic        rst_n,
  // host port
  input  bank_req_t   h_req,
  output logic        h_ready,
  output logic        h_rvalid,
  output logic [63:0] h_rdata,
  // data streams to and from the array (through the GLB-array network)
  output word_t       ld [COLS],
  input  word_t       st [COLS],
  // DPR stream
  output cfg_req_t    cfg_out,
  output logic [7:0]  dpr_dest,
  output logic        dpr_busy,
  output logic        ld_busy,
  output logic        st_busy
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [AW-1:0] reg_ld_start, reg_ld_len, reg_st_start, reg_st_len;
  logic [AW-1:0] reg_cfg_start, reg_cfg_len;
  logic [COLS-1:0] reg_st_mask;
  logic [7:0]    reg_dest;

  logic [AW-1:0] ld_ptr, ld_left, st_ptr, st_left, cfg_ptr, cfg_left;
  logic          ld_on, st_on, dpr_on;
  logic          ld_done, st_done, dpr_done;

  // SRAM ports
  logic          re, we;
  logic [AW-1:0] raddr, waddr;
  logic [63:0]   rdata, wdata;

  // who owns the read port this cycle, and last cycle
  typedef enum logic [1:0] {RD_NONE, RD_DPR, RD_LD, RD_HOST} rd_owner_e;
  rd_owner_e rd_now, rd_q;
  logic      host_rd, host_wr, host_reg, st_fire;
  logic [63:0] reg_rdata_q;
  logic        reg_rvalid_q;

  // ---- host port ---------------------------------------------------------------
  assign host_reg = h_req.valid && h_req.is_reg;
  assign st_fire  = st_on && (st_left != '0) && (reg_st_mask != '0) && (&(st_valid_vec() | ~reg_st_mask));

  function automatic logic [COLS-1:0] st_valid_vec();
    logic [COLS-1:0] v;
    for (int c = 0; c < COLS; c++) v[c] = st[c].valid;
    return v;
  endfunction

  assign host_rd = h_req.valid && !h_req.is_reg && !h_req.we && rd_now == RD_HOST;
  assign host_wr = h_req.valid && !h_req.is_reg &&  h_req.we && !st_fire;
  assign h_ready = host_reg || host_rd || host_wr;

  // ---- read-port arbitration -------------------------------------------------------
  always_comb begin
    if (dpr_on && cfg_left != '0)                      rd_now = RD_DPR;
    else if (ld_on && ld_left != '0)                   rd_now = RD_LD;
    else if (h_req.valid && !h_req.is_reg && !h_req.we) rd_now = RD_HOST;
    else                                               rd_now = RD_NONE;
  end

  always_comb begin
    unique case (rd_now)
      RD_DPR:  raddr = cfg_ptr;
      RD_LD:   raddr = ld_ptr;
      RD_HOST: raddr = h_req.addr[AW-1:0];
      default: raddr = '0;
    endcase
    re = (rd_now != RD_NONE);
    we    = st_fire || host_wr;
    waddr = st_fire ? st_ptr : h_req.addr[AW-1:0];
    for (int c = 0; c < COLS; c++) wdata[c*DATA_W +: DATA_W] = st[c].data;
    if (!st_fire) wdata = h_req.wdata;
  end

  glb_sram #(.WORDS(WORDS), .W(64)) u_sram (
    .clk, .re, .raddr, .rdata, .we, .waddr, .wdata
  );

  // ---- registers and engines ----------------------------------------------------------
  logic ctrl_wr;
  assign ctrl_wr = host_reg && h_req.we && h_req.addr[3:0] == GLB_CTRL;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_ld_start <= '0; reg_ld_len <= '0; reg_st_start <= '0; reg_st_len <= '0;
      reg_cfg_start <= '0; reg_cfg_len <= '0; reg_st_mask <= '0; reg_dest <= '0;
      ld_on <= 1'b0; st_on <= 1'b0; dpr_on <= 1'b0;
      ld_done <= 1'b0; st_done <= 1'b0; dpr_done <= 1'b0;
      ld_ptr <= '0; ld_left <= '0; st_ptr <= '0; st_left <= '0; cfg_ptr <= '0; cfg_left <= '0;
      rd_q <= RD_NONE;
      reg_rvalid_q <= 1'b0;
      reg_rdata_q  <= '0;
    end else begin
      rd_q         <= rd_now;
      reg_rvalid_q <= host_reg && !h_req.we;
      if (host_reg && h_req.we) begin
        unique case (h_req.addr[3:0])
          GLB_LD_START:  reg_ld_start  <= h_req.wdata[AW-1:0];
          GLB_LD_LEN:    reg_ld_len    <= h_req.wdata[AW-1:0];
          GLB_ST_START:  reg_st_start  <= h_req.wdata[AW-1:0];
          GLB_ST_LEN:    reg_st_len    <= h_req.wdata[AW-1:0];
          GLB_ST_MASK:   reg_st_mask   <= h_req.wdata[COLS-1:0];
          GLB_CFG_START: reg_cfg_start <= h_req.wdata[AW-1:0];
          GLB_CFG_LEN:   reg_cfg_len   <= h_req.wdata[AW-1:0];
          GLB_DPR_DEST:  reg_dest      <= h_req.wdata[7:0];
          default: ;
        endcase
      end
      if (host_reg && !h_req.we) begin
        unique case (h_req.addr[3:0])
          GLB_LD_START:  reg_rdata_q <= 64'(reg_ld_start);
          GLB_LD_LEN:    reg_rdata_q <= 64'(reg_ld_len);
          GLB_ST_START:  reg_rdata_q <= 64'(reg_st_start);
          GLB_ST_LEN:    reg_rdata_q <= 64'(reg_st_len);
          GLB_ST_MASK:   reg_rdata_q <= 64'(reg_st_mask);
          GLB_CFG_START: reg_rdata_q <= 64'(reg_cfg_start);
          GLB_CFG_LEN:   reg_rdata_q <= 64'(reg_cfg_len);
          GLB_DPR_DEST:  reg_rdata_q <= 64'(reg_dest);
          GLB_STATUS:    reg_rdata_q <= 64'({dpr_done, st_done, ld_done, 1'b0, dpr_busy, st_busy, ld_busy});
          default:       reg_rdata_q <= '0;
        endcase
      end

      // load engine
      if (ctrl_wr && h_req.wdata[0]) begin
        ld_on <= 1'b1; ld_done <= 1'b0; ld_ptr <= reg_ld_start; ld_left <= reg_ld_len;
      end else if (rd_now == RD_LD) begin
        ld_ptr  <= ld_ptr + 1'b1;
        ld_left <= ld_left - 1'b1;
      end else if (ld_on && ld_left == '0 && rd_q != RD_LD) begin
        ld_on <= 1'b0; ld_done <= 1'b1;
      end

      // store engine
      if (ctrl_wr && h_req.wdata[1]) begin
        st_on <= 1'b1; st_done <= 1'b0; st_ptr <= reg_st_start; st_left <= reg_st_len;
      end else if (st_fire) begin
        st_ptr  <= st_ptr + 1'b1;
        st_left <= st_left - 1'b1;
      end else if (st_on && st_left == '0) begin
        st_on <= 1'b0; st_done <= 1'b1;
      end

      // DPR engine
      if (ctrl_wr && h_req.wdata[2]) begin
        dpr_on <= 1'b1; dpr_done <= 1'b0; cfg_ptr <= reg_cfg_start; cfg_left <= reg_cfg_len;
      end else if (rd_now == RD_DPR) begin
        cfg_ptr  <= cfg_ptr + 1'b1;
        cfg_left <= cfg_left - 1'b1;
      end else if (dpr_on && cfg_left == '0 && rd_q != RD_DPR) begin
        dpr_on <= 1'b0; dpr_done <= 1'b1;
      end
    end
  end

  // ---- outputs ---------------------------------------------------------------------------
  // Relocated configuration write: rdata = {addr[31:0], data[31:0]}.
  logic [7:0] col_in, col_out;
  assign col_in  = rdata[39:32];
  assign col_out = 8'(reg_dest * 8'(COLS) + (col_in % 8'(COLS)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_out <= '0;
      for (int c = 0; c < COLS; c++) ld[c] <= '0;
    end else begin
      cfg_out.valid <= (rd_q == RD_DPR);
      cfg_out.addr  <= {rdata[63:40], col_out};
      cfg_out.data  <= rdata[31:0];
      for (int c = 0; c < COLS; c++)
        ld[c] <= word_t'{valid: rd_q == RD_LD, data: rdata[c*DATA_W +: DATA_W]};
    end
  end

  assign h_rvalid = (rd_q == RD_HOST) || reg_rvalid_q;
  assign h_rdata  = (rd_q == RD_HOST) ? rdata : reg_rdata_q;
  assign dpr_dest = reg_dest;
  assign dpr_busy = dpr_on || cfg_out.valid;
  assign ld_busy  = ld_on;
  assign st_busy  = st_on;

  // A host request that is not accepted must be held unchanged.
  assert property (@(posedge clk) disable iff (!rst_n)
                   h_req.valid && !h_ready |=> h_req.valid && $stable(h_req.addr) && $stable(h_req.we));

endmodule
