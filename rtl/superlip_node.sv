// superlip_node: one FPGA of a multi-FPGA CNN accelerator cluster.
//
// The node runs the node's share of one convolution layer. Off-chip data
// arrive as AXI-stream-like beats: IFM tiles IP words wide, weight tiles WP
// words wide; finished OFM tiles leave OP words wide. FPGAs are arranged as
// a 2D torus. The FPGAs of one row split the OFM channels among them and
// therefore need the same IFM tiles; the FPGAs of one column split batch,
// rows or columns and need the same weight tiles. Instead of every FPGA
// reading a whole shared tile from its own memory, each reads 1/p of it and
// the parts are passed around the ring over the inter-FPGA links (XFER):
// the row link carries IFM parts, the column link weight parts. This moves
// traffic from the memory bus onto the links and is what lets p FPGAs run
// more than p times faster than one when a layer is memory bound.
//
// Inside: superlip_ctrl sequences the loop nest; two xfer_loader instances
// fill the double-buffered IFM buffer (Tn banks) and weight buffer (Tm*Tn
// banks); conv_engine performs Tm*Tn MACs per cycle into the
// double-buffered ofm_buffer; ofm_store drains finished OFM tiles. Four
// async_fifo instances move link beats between the accelerator clock 'clk'
// and the link clock 'link_clk' (the serial-link IP's user clock). The
// link ports carry {link_hdr_t, data} and use valid/ready in link_clk.
// With p_row = p_col = 1 the node is a single-FPGA accelerator and the link
// ports stay idle.
//
// The parameters default to the paper's 16-bit design: Tm = 128, Tn = 10,
// Ip = 4, Wp = 8, Op = 4, rings of up to 4 FPGAs. Tr = 7 and Tc = 14 come from
// the paper's uniform cross-layer design; the maximum kernel (11) and stride
// (4) are chosen to cover AlexNet.
module superlip_node
  import slp_pkg::*;
#(
  parameter int TM   = 128,
  parameter int TN   = 10,
  parameter int TR   = 7,
  parameter int TC   = 14,
  parameter int KMAX = 11,
  parameter int SMAX = 4,
  parameter int IP   = 4,
  parameter int WP   = 8,
  parameter int OP   = 4,
  parameter int PMAX = 4,
  parameter int FAW  = 4,
  parameter int ROWLW = HDRW + IP * DW,
  parameter int COLLW = HDRW + WP * DW
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               link_clk,
  input  logic               link_rst_n,
  // host control
  input  layer_cfg_t         cfg,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic               ofm_stall,
  // off-chip streams (DMA)
  input  logic               ifm_valid,
  output logic               ifm_ready,
  input  data_t [IP-1:0]     ifm_data,
  input  logic               wei_valid,
  output logic               wei_ready,
  input  data_t [WP-1:0]     wei_data,
  output logic               ofm_valid,
  input  logic               ofm_ready,
  output data_t [OP-1:0]     ofm_data,
  // row ring (IFM sharing), link_clk domain
  output logic               row_tx_valid,
  input  logic               row_tx_ready,
  output logic [ROWLW-1:0]   row_tx_data,
  input  logic               row_rx_valid,
  output logic               row_rx_ready,
  input  logic [ROWLW-1:0]   row_rx_data,
  // column ring (weight sharing), link_clk domain
  output logic               col_tx_valid,
  input  logic               col_tx_ready,
  output logic [COLLW-1:0]   col_tx_data,
  input  logic               col_rx_valid,
  output logic               col_rx_ready,
  input  logic [COLLW-1:0]   col_rx_data
);

  localparam int TRI    = (TR - 1) * SMAX + KMAX;
  localparam int TCI    = (TC - 1) * SMAX + KMAX;
  localparam int IDEPTH = TRI * TCI;
  localparam int WDEPTH = KMAX * KMAX;
  localparam int NPIX   = TR * TC;

  // ---------------- controller ----------------
  layer_cfg_t      cfg_q;
  logic            ld_start, ld_tag, ld_half, ifm_done, wei_done;
  logic [CNTW-1:0] ifm_beats, wei_beats;
  logic            eng_start, eng_first, eng_ihalf, eng_ohalf, eng_done, eng_busy;
  logic            st_start, st_half, st_done, st_busy;

  superlip_ctrl #(.TM(TM), .TN(TN), .TR(TR), .TC(TC), .IP(IP), .WP(WP)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .cfg_q,
    .ld_start, .ld_tag, .ld_half, .ifm_beats, .wei_beats, .ifm_done, .wei_done,
    .eng_start, .eng_first, .eng_ihalf, .eng_ohalf, .eng_done,
    .st_start, .st_half, .st_done, .ofm_stall);

  // ---------------- link FIFOs ----------------
  logic             rtx_v, rtx_r, rrx_v, rrx_r, ctx_v, ctx_r, crx_v, crx_r;
  logic [ROWLW-1:0] rtx_d, rrx_d;
  logic [COLLW-1:0] ctx_d, crx_d;

  async_fifo #(.WIDTH(ROWLW), .AW(FAW)) u_row_tx (
    .wclk(clk), .wrst_n(rst_n), .w_valid(rtx_v), .w_ready(rtx_r), .w_data(rtx_d),
    .rclk(link_clk), .rrst_n(link_rst_n), .r_valid(row_tx_valid), .r_ready(row_tx_ready), .r_data(row_tx_data));
  async_fifo #(.WIDTH(ROWLW), .AW(FAW)) u_row_rx (
    .wclk(link_clk), .wrst_n(link_rst_n), .w_valid(row_rx_valid), .w_ready(row_rx_ready), .w_data(row_rx_data),
    .rclk(clk), .rrst_n(rst_n), .r_valid(rrx_v), .r_ready(rrx_r), .r_data(rrx_d));
  async_fifo #(.WIDTH(COLLW), .AW(FAW)) u_col_tx (
    .wclk(clk), .wrst_n(rst_n), .w_valid(ctx_v), .w_ready(ctx_r), .w_data(ctx_d),
    .rclk(link_clk), .rrst_n(link_rst_n), .r_valid(col_tx_valid), .r_ready(col_tx_ready), .r_data(col_tx_data));
  async_fifo #(.WIDTH(COLLW), .AW(FAW)) u_col_rx (
    .wclk(link_clk), .wrst_n(link_rst_n), .w_valid(col_rx_valid), .w_ready(col_rx_ready), .w_data(col_rx_data),
    .rclk(clk), .rrst_n(rst_n), .r_valid(crx_v), .r_ready(crx_r), .r_data(crx_d));

  // ---------------- XFER loaders ----------------
  logic [1:0]           iwr_en, wwr_en;
  logic [1:0][CNTW-1:0] iwr_beat, wwr_beat;
  data_t [1:0][IP-1:0]  iwr_data;
  data_t [1:0][WP-1:0]  wwr_data;
  link_hdr_t            itx_hdr, wtx_hdr;
  data_t [IP-1:0]       itx_data;
  data_t [WP-1:0]       wtx_data;
  logic                 ifm_busy, wei_busy;

  xfer_loader #(.W(IP), .PMAX(PMAX)) u_ifm_ld (
    .clk, .rst_n, .start(ld_start), .tag(ld_tag), .n_beats(ifm_beats),
    .p(cfg_q.p_row), .pos(cfg_q.row_pos), .busy(ifm_busy), .done(ifm_done),
    .mem_valid(ifm_valid), .mem_ready(ifm_ready), .mem_data(ifm_data),
    .rx_valid(rrx_v), .rx_ready(rrx_r), .rx_hdr(link_hdr_t'(rrx_d[ROWLW-1 -: HDRW])),
    .rx_data(rrx_d[IP*DW-1:0]),
    .tx_valid(rtx_v), .tx_ready(rtx_r), .tx_hdr(itx_hdr), .tx_data(itx_data),
    .wr_en(iwr_en), .wr_beat(iwr_beat), .wr_data(iwr_data));
  assign rtx_d = {itx_hdr, itx_data};

  xfer_loader #(.W(WP), .PMAX(PMAX)) u_wei_ld (
    .clk, .rst_n, .start(ld_start), .tag(ld_tag), .n_beats(wei_beats),
    .p(cfg_q.p_col), .pos(cfg_q.col_pos), .busy(wei_busy), .done(wei_done),
    .mem_valid(wei_valid), .mem_ready(wei_ready), .mem_data(wei_data),
    .rx_valid(crx_v), .rx_ready(crx_r), .rx_hdr(link_hdr_t'(crx_d[COLLW-1 -: HDRW])),
    .rx_data(crx_d[WP*DW-1:0]),
    .tx_valid(ctx_v), .tx_ready(ctx_r), .tx_hdr(wtx_hdr), .tx_data(wtx_data),
    .wr_en(wwr_en), .wr_beat(wwr_beat), .wr_data(wwr_data));
  assign ctx_d = {wtx_hdr, wtx_data};

  // ---------------- buffers ----------------
  logic [$clog2(IDEPTH)-1:0] ib_raddr;
  logic [$clog2(WDEPTH)-1:0] wb_raddr;
  data_t [TN-1:0]            ib_rdata;
  data_t [TM*TN-1:0]         wb_rdata;

  input_tile_buffer #(.BANKS(TN), .DEPTH(IDEPTH), .W(IP)) u_ibuf (
    .clk, .wsel(ld_half), .wr_en(iwr_en), .wr_beat(iwr_beat), .wr_data(iwr_data),
    .rsel(eng_ihalf), .raddr(ib_raddr), .rdata(ib_rdata));

  input_tile_buffer #(.BANKS(TM*TN), .DEPTH(WDEPTH), .W(WP)) u_wbuf (
    .clk, .wsel(ld_half), .wr_en(wwr_en), .wr_beat(wwr_beat), .wr_data(wwr_data),
    .rsel(eng_ihalf), .raddr(wb_raddr), .rdata(wb_rdata));

  logic [$clog2(NPIX)-1:0] ob_raddr, ob_waddr, so_raddr;
  acc_t [TM-1:0]           ob_rdata, ob_wdata, so_rdata;
  logic                    ob_we, so_sel;

  ofm_buffer #(.TM(TM), .TR(TR), .TC(TC)) u_obuf (
    .clk, .e_sel(eng_ohalf), .e_raddr(ob_raddr), .e_rdata(ob_rdata),
    .e_we(ob_we), .e_waddr(ob_waddr), .e_wdata(ob_wdata),
    .s_sel(so_sel), .s_raddr(so_raddr), .s_rdata(so_rdata));

  // ---------------- engine and store ----------------
  conv_engine #(.TM(TM), .TN(TN), .TR(TR), .TC(TC), .KMAX(KMAX), .SMAX(SMAX)) u_engine (
    .clk, .rst_n, .start(eng_start), .k(cfg_q.k), .stride(cfg_q.stride), .first(eng_first),
    .busy(eng_busy), .done(eng_done),
    .ib_raddr, .ib_rdata, .wb_raddr, .wb_rdata,
    .ob_raddr, .ob_rdata, .ob_we, .ob_waddr, .ob_wdata);

  ofm_store #(.TM(TM), .TR(TR), .TC(TC), .OP(OP)) u_store (
    .clk, .rst_n, .start(st_start), .sel(st_half), .frac(cfg_q.frac),
    .busy(st_busy), .done(st_done), .ob_sel(so_sel), .ob_raddr(so_raddr), .ob_rdata(so_rdata),
    .out_valid(ofm_valid), .out_ready(ofm_ready), .out_data(ofm_data));

  // the engine never writes the OFM half the store unit is reading
  a_ofm_halves: assert property (@(posedge clk) disable iff (!rst_n)
    (ob_we && st_busy) |-> (eng_ohalf != so_sel));

endmodule
