// glb: the global buffer, BANKS banks (GLB-slices) behind one host port.
//
// The paper's GLB has 32 banks of 128 KB and is the chip's medium-sized
// store and its path to the host and the tile array. This module holds the
// banks and decodes the host bus (host_req_t, valid/ready, reads answered
// on h_rvalid/h_rdata, one read outstanding). Address map (this design's
// choice):
//   addr[31]=0           memory word: bank = addr[18:14], word = addr[13:0]
//   addr[31:30]=2'b10    bank register: bank = addr[8:4], register = addr[3:0]
//                        (glb_reg_e)
//   addr[31:30]=2'b11    route register of the GLB-array network,
//                        array-slice = addr[7:0] (passed out on rt_*)
// Each bank's streams and DPR outputs are passed out unchanged to the
// GLB-array network.
module glb
  import cgra_pkg::*;
#(
  parameter int unsigned BANKS = NUM_BANKS,
  parameter int unsigned WORDS = BANK_WORDS,
  parameter int unsigned COLS  = COLS_PER_SLICE,
  parameter int unsigned SLICES = NUM_SLICES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  host_req_t   h_req,
  output logic        h_ready,
  output logic        h_rvalid,
  output logic [63:0] h_rdata,
  // route registers of the network
  output logic        rt_we,
  output logic [7:0]  rt_idx,
  output logic [31:0] rt_wdata,
  input  logic [31:0] rt_q [SLICES],
  // per-bank streams
  output word_t       ld       [BANKS][COLS],
  input  word_t       st       [BANKS][COLS],
  output cfg_req_t    cfg_out  [BANKS],
  output logic [7:0]  dpr_dest [BANKS],
  output logic        dpr_busy [BANKS],
  output logic        ld_busy  [BANKS],
  output logic        st_busy  [BANKS]
);

  localparam int unsigned BW = $clog2(BANKS);

  logic             is_mem, is_breg, is_rt;
  logic [BW-1:0]    bank_sel;
  logic             b_ready  [BANKS];
  logic             b_rvalid [BANKS];
  logic [63:0]      b_rdata  [BANKS];
  logic             rt_rvalid_q;
  logic [31:0]      rt_rdata_q;

  assign is_mem   = h_req.valid && !h_req.addr[31];
  assign is_breg  = h_req.valid && h_req.addr[31:30] == 2'b10;
  assign is_rt    = h_req.valid && h_req.addr[31:30] == 2'b11;
  assign bank_sel = is_mem ? h_req.addr[14 +: BW] : h_req.addr[4 +: BW];

  assign rt_we    = is_rt && h_req.we;
  assign rt_idx   = h_req.addr[7:0];
  assign rt_wdata = h_req.wdata[31:0];

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    bank_req_t breq;
    always_comb begin
      breq        = '0;
      breq.valid  = (is_mem || is_breg) && int'(bank_sel) == b;
      breq.we     = h_req.we;
      breq.is_reg = is_breg;
      breq.addr   = is_mem ? h_req.addr[13:0] : {10'd0, h_req.addr[3:0]};
      breq.wdata  = h_req.wdata;
    end
    glb_bank #(.WORDS(WORDS), .COLS(COLS)) u_bank (
      .clk, .rst_n,
      .h_req(breq), .h_ready(b_ready[b]), .h_rvalid(b_rvalid[b]), .h_rdata(b_rdata[b]),
      .ld(ld[b]), .st(st[b]),
      .cfg_out(cfg_out[b]), .dpr_dest(dpr_dest[b]), .dpr_busy(dpr_busy[b]),
      .ld_busy(ld_busy[b]), .st_busy(st_busy[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rt_rvalid_q <= 1'b0;
      rt_rdata_q  <= '0;
    end else begin
      rt_rvalid_q <= is_rt && !h_req.we;
      rt_rdata_q  <= (int'(rt_idx) < SLICES) ? rt_q[rt_idx[$clog2(SLICES)-1:0]] : '0;
    end
  end

  always_comb begin
    h_ready  = is_rt || (!is_mem && !is_breg && !is_rt);
    h_rvalid = rt_rvalid_q;
    h_rdata  = rt_rvalid_q ? 64'(rt_rdata_q) : '0;
    for (int b = 0; b < BANKS; b++) begin
      if ((is_mem || is_breg) && int'(bank_sel) == b) h_ready = b_ready[b];
      if (b_rvalid[b]) begin
        h_rvalid = 1'b1;
        h_rdata  = b_rdata[b];
      end
    end
  end

endmodule
