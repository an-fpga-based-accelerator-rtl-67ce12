// accel_top: the accelerator -- storage, control and computing systems.
//
// Storage system: the DMA engine (with scatter and gather) moves data between the
// external memory port and three ping-pong buffers: the input & fused-result buffer
// (feature banks IN_A / IN_B), the output & fused-result buffer (OUT_A / OUT_B) and
// the weight buffer (banks 0 / 1).
// Control system: the host writes per-layer descriptors into the configuration
// registers; the selector hands the current and next descriptors to the
// fused-mode/layer controller, which sequences DMA transfers and engine runs for
// layer-by-layer, vertically fused (VF) and horizontally fused (HF) execution.
// Computing system: the CONV module (Z-flow / Kseg dataflow on the PX x PY x PF MAC
// cube) and the DWCV/POOL module. The engine of the current layer reads its source
// feature bank and weight bank and writes its destination feature bank; any of the
// four feature banks can be source or destination, which is how fused results stay
// on chip.
// Interface: host register port (`cfg_we`, `cfg_addr`, `cfg_wdata`), `start` with
// `nlayers`, `busy` and a one-cycle `done`, and the external-memory port of
// dma_engine (request/grant, in-order read data). Parameters default to the
// paper's 8 x 8 x 16 array; buffer sizes and layer count are this design's choices.
// Note on `px_data`: Verilator reports it as circular combinational logic. There is
// no real loop: the engines form `px_en`/`px_addr` only from registered sequencer
// state, never from `px_data`, which goes into registers (the pixel array). The
// report arises because the wide pixel vectors are analysed as whole signals; it
// costs simulation speed only.
module accel_top
  import acc_pkg::*;
#(
  parameter int unsigned PX  = POX,
  parameter int unsigned PY  = POY,
  parameter int unsigned PF  = POF,
  parameter int unsigned FAW = FBUF_AW,
  parameter int unsigned WAW = WBUF_AW,
  parameter int unsigned NL  = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host
  input  logic                         cfg_we,
  input  logic [$clog2(NL*CFG_WORDS)-1:0] cfg_addr,
  input  logic [31:0]                  cfg_wdata,
  input  logic                         start,
  input  logic [$clog2(NL+1)-1:0]      nlayers,
  output logic                         busy,
  output logic                         done,
  // external memory
  output logic                         m_req,
  output logic                         m_we,
  output logic [MADDR_W-1:0]           m_addr,
  output logic [BUS_BYTES-1:0][DW-1:0] m_wdata,
  output logic [BUS_BYTES-1:0]         m_be,
  input  logic                         m_gnt,
  input  logic                         m_rvalid,
  input  logic [BUS_BYTES-1:0][DW-1:0] m_rdata
);

  localparam int unsigned WB = BUS_BYTES;

  // ---------------- control system ----------------
  layer_cfg_t cfg_cur, cfg_nxt;
  logic [$clog2(NL)-1:0] sel_cur, sel_nxt;

  config_regs #(.NL(NL)) u_cfg (
    .clk, .rst_n, .wr_en(cfg_we), .wr_addr(cfg_addr), .wr_data(cfg_wdata),
    .sel_cur, .sel_nxt, .cfg_cur, .cfg_nxt);

  logic cmd_valid, cmd_ready, cmd_store, cmd_weight, dma_done, dma_busy;
  logic [1:0] cmd_bank;
  logic [MADDR_W-1:0] cmd_maddr, cmd_len;
  logic [FAW-1:0] cmd_baddr;
  logic conv_start, dw_start, conv_done, dw_done, conv_busy, dw_busy;
  logic ev_pf_w, ev_pf_in;

  fused_ctrl #(.NL(NL), .FAW(FAW)) u_ctrl (
    .clk, .rst_n, .start, .nlayers, .busy, .done,
    .sel_cur, .sel_nxt, .cfg_cur, .cfg_nxt,
    .cmd_valid, .cmd_ready, .cmd_store, .cmd_weight, .cmd_bank, .cmd_maddr, .cmd_baddr,
    .cmd_len, .dma_done,
    .conv_start, .dw_start, .eng_done(conv_done || dw_done),
    .ev_prefetch_w(ev_pf_w), .ev_prefetch_in(ev_pf_in));

  // ---------------- storage system ----------------
  logic fb_we, wb_we, wb_bank;
  logic [1:0] fb_bank, gr_bank;
  logic [FAW-1:0] b_waddr, gr_addr;
  logic [WB-1:0][DW-1:0] b_wdata, gr_data;
  logic [WB-1:0] b_wbe;

  dma_engine #(.WB(WB), .FAW(FAW), .WAW(WAW)) u_dma (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_store, .cmd_weight, .cmd_bank, .cmd_maddr, .cmd_baddr,
    .cmd_len, .done(dma_done), .busy(dma_busy),
    .m_req, .m_we, .m_addr, .m_wdata, .m_be, .m_gnt, .m_rvalid, .m_rdata,
    .fb_we, .fb_bank, .wb_we, .wb_bank, .b_waddr, .b_wdata, .b_wbe,
    .gr_bank, .gr_addr, .gr_data);

  // engine-side signals of the active engine
  logic                         use_dw;
  logic [PY*PX-1:0]             px_en, c_px_en, d_px_en;
  logic [PY*PX-1:0][FAW-1:0]    px_addr, c_px_addr, d_px_addr;
  logic [PY*PX-1:0][DW-1:0]     px_data, px_data_in, px_data_out;
  logic                         e_we, c_we, d_we;
  logic [FAW-1:0]               e_waddr, c_waddr, d_waddr;
  logic [PX-1:0][DW-1:0]        e_wdata, c_wdata, d_wdata;
  logic [PX-1:0]                e_wbe, c_wbe, d_wbe;
  logic [PF-1:0][WAW-1:0]       w_addr, c_w_addr;
  logic [PF-1:0][DW-1:0]        w_data;
  logic [WAW-1:0]               d_w_addr;
  logic [WB-1:0][DW-1:0]        gr_in, gr_out;

  assign use_dw = (cfg_cur.engine != ENG_CONV);
  always_comb begin
    px_en   = use_dw ? d_px_en   : c_px_en;
    px_addr = use_dw ? d_px_addr : c_px_addr;
    e_we    = use_dw ? d_we      : c_we;
    e_waddr = use_dw ? d_waddr   : c_waddr;
    e_wdata = use_dw ? d_wdata   : c_wdata;
    e_wbe   = use_dw ? d_wbe     : c_wbe;
    w_addr  = c_w_addr;
    if (use_dw) w_addr[0] = d_w_addr;
  end
  assign px_data = cfg_cur.src[1] ? px_data_out : px_data_in;
  assign gr_data = gr_bank[1] ? gr_out : gr_in;

  feature_buffer #(.AW(FAW), .NRD(PY*PX), .WB(WB)) u_fbuf_in (
    .clk,
    .dw_en(fb_we && !fb_bank[1]), .dw_bank(fb_bank[0]), .dw_addr(b_waddr),
    .dw_data(b_wdata), .dw_be(b_wbe),
    .ew_en(e_we && !cfg_cur.dst[1]), .ew_bank(cfg_cur.dst[0]), .ew_addr(e_waddr),
    .ew_data(e_wdata), .ew_be(e_wbe),
    .win_bank(cfg_cur.src[0]), .win_en(px_en & {(PY*PX){!cfg_cur.src[1]}}),
    .win_addr(px_addr), .win_data(px_data_in),
    .dr_bank(gr_bank[0]), .dr_addr(gr_addr), .dr_data(gr_in));

  feature_buffer #(.AW(FAW), .NRD(PY*PX), .WB(WB)) u_fbuf_out (
    .clk,
    .dw_en(fb_we && fb_bank[1]), .dw_bank(fb_bank[0]), .dw_addr(b_waddr),
    .dw_data(b_wdata), .dw_be(b_wbe),
    .ew_en(e_we && cfg_cur.dst[1]), .ew_bank(cfg_cur.dst[0]), .ew_addr(e_waddr),
    .ew_data(e_wdata), .ew_be(e_wbe),
    .win_bank(cfg_cur.src[0]), .win_en(px_en & {(PY*PX){cfg_cur.src[1]}}),
    .win_addr(px_addr), .win_data(px_data_out),
    .dr_bank(gr_bank[0]), .dr_addr(gr_addr), .dr_data(gr_out));

  weight_buffer #(.AW(WAW), .NRD(PF), .WB(WB)) u_wbuf (
    .clk, .dw_en(wb_we), .dw_bank(wb_bank), .dw_addr(WAW'(b_waddr)), .dw_data(b_wdata),
    .dw_be(b_wbe), .rd_bank(cfg_cur.wbank), .rd_addr(w_addr), .rd_data(w_data));

  // ---------------- computing system ----------------
  logic conv_stall, conv_seg, dw_stall;

  conv_engine #(.PX(PX), .PY(PY), .PF(PF), .FAW(FAW), .WAW(WAW)) u_conv (
    .clk, .rst_n, .start(conv_start), .cfg(cfg_cur),
    .busy(conv_busy), .done(conv_done), .stall(conv_stall), .seg_event(conv_seg),
    .px_en(c_px_en), .px_addr(c_px_addr), .px_data(px_data),
    .w_addr(c_w_addr), .w_data(w_data),
    .wr_en(c_we), .wr_addr(c_waddr), .wr_data(c_wdata), .wr_be(c_wbe));

  dwpool_engine #(.PX(PX), .PY(PY), .FAW(FAW), .WAW(WAW)) u_dwpool (
    .clk, .rst_n, .start(dw_start), .cfg(cfg_cur),
    .busy(dw_busy), .done(dw_done), .stall(dw_stall),
    .px_en(d_px_en), .px_addr(d_px_addr), .px_data(px_data),
    .w_addr(d_w_addr), .w_data(w_data[0]),
    .wr_en(d_we), .wr_addr(d_waddr), .wr_data(d_wdata), .wr_be(d_wbe));

endmodule
