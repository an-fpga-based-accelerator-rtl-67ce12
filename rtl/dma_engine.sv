// dma_engine: DMA between external memory and the on-chip buffers, with scatter
// and gather.
//
// A command moves `len` bytes between external-memory byte address `maddr` and
// buffer byte address `baddr`, both multiples of WB (the memory word is WB bytes).
//   load  (store = 0): WB-byte words are requested from memory in order and each
//                      returned word is scattered into WB parallel byte lanes of the
//                      target buffer (feature bank or weight bank), the last word
//                      with only the remaining byte lanes enabled;
//   store (store = 1): WB bytes at a time are gathered from a feature bank and
//                      written to memory, the last word with a partial byte mask.
// Memory port: `m_req` with `m_we`, `m_addr`, `m_wdata`, `m_be` is accepted when
// `m_gnt` is high; read data return in request order on `m_rvalid`/`m_rdata`, any
// number of cycles later. One word per cycle when the memory grants every cycle.
// Command port: valid/ready; `done` pulses when the last word has been written.
// The paper only names the DMA engine, scatter (serial-to-parallel) and gather
// (parallel-to-serial); the command format and memory protocol are this design's.
module dma_engine
  import acc_pkg::*;
#(
  parameter int unsigned WB  = BUS_BYTES,
  parameter int unsigned FAW = FBUF_AW,
  parameter int unsigned WAW = WBUF_AW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // command
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  logic                   cmd_store,    // 1: buffer -> memory
  input  logic                   cmd_weight,   // 1: target is the weight buffer
  input  logic [1:0]             cmd_bank,     // buf_sel_e, or weight bank in bit 0
  input  logic [MADDR_W-1:0]     cmd_maddr,
  input  logic [FAW-1:0]         cmd_baddr,
  input  logic [MADDR_W-1:0]     cmd_len,
  output logic                   done,
  output logic                   busy,
  // memory
  output logic                   m_req,
  output logic                   m_we,
  output logic [MADDR_W-1:0]     m_addr,
  output logic [WB-1:0][DW-1:0]  m_wdata,
  output logic [WB-1:0]          m_be,
  input  logic                   m_gnt,
  input  logic                   m_rvalid,
  input  logic [WB-1:0][DW-1:0]  m_rdata,
  // scatter: buffer writes
  output logic                   fb_we,
  output logic [1:0]             fb_bank,
  output logic                   wb_we,
  output logic                   wb_bank,
  output logic [FAW-1:0]         b_waddr,
  output logic [WB-1:0][DW-1:0]  b_wdata,
  output logic [WB-1:0]          b_wbe,
  // gather: feature buffer read
  output logic [1:0]             gr_bank,
  output logic [FAW-1:0]         gr_addr,
  input  logic [WB-1:0][DW-1:0]  gr_data
);

  localparam int unsigned OFFW = $clog2(WB);

  logic                 store_r, weight_r;
  logic [1:0]           bank_r;
  logic [MADDR_W-1:0]   maddr_r, len_r;
  logic [FAW-1:0]       baddr_r;
  logic [MADDR_W-1:0]   nwords, req_cnt, rsp_cnt;

  function automatic logic [WB-1:0] mask(input logic [MADDR_W-1:0] word,
                                         input logic [MADDR_W-1:0] len);
    logic [WB-1:0] m;
    for (int b = 0; b < int'(WB); b++)
      m[b] = (word * WB + MADDR_W'(b)) < len;
    return m;
  endfunction

  assign cmd_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; store_r <= 1'b0; weight_r <= 1'b0; bank_r <= '0;
      maddr_r <= '0; len_r <= '0; baddr_r <= '0; nwords <= '0; req_cnt <= '0; rsp_cnt <= '0;
    end else if (cmd_valid && cmd_ready) begin
      busy     <= (cmd_len != '0);
      store_r  <= cmd_store;
      weight_r <= cmd_weight;
      bank_r   <= cmd_bank;
      maddr_r  <= cmd_maddr;
      len_r    <= cmd_len;
      baddr_r  <= cmd_baddr;
      nwords   <= (cmd_len + MADDR_W'(WB - 1)) >> OFFW;
      req_cnt  <= '0;
      rsp_cnt  <= '0;
    end else if (busy) begin
      if (m_req && m_gnt) req_cnt <= req_cnt + 1'b1;
      if (!store_r && m_rvalid) rsp_cnt <= rsp_cnt + 1'b1;
      if (store_r ? (m_req && m_gnt && req_cnt + 1'b1 == nwords)
                  : (m_rvalid && rsp_cnt + 1'b1 == nwords))
        busy <= 1'b0;
    end
  end

  assign done = busy && (store_r ? (m_req && m_gnt && req_cnt + 1'b1 == nwords)
                                 : (m_rvalid && rsp_cnt + 1'b1 == nwords));

  // requests
  assign m_req   = busy && (req_cnt < nwords);
  assign m_we    = store_r;
  assign m_addr  = maddr_r + (req_cnt << OFFW);
  assign gr_bank = bank_r;
  assign gr_addr = baddr_r + FAW'(req_cnt << OFFW);
  assign m_wdata = gr_data;
  assign m_be    = store_r ? mask(req_cnt, len_r) : '1;

  // scatter
  assign fb_we   = busy && !store_r && m_rvalid && !weight_r;
  assign wb_we   = busy && !store_r && m_rvalid && weight_r;
  assign fb_bank = bank_r;
  assign wb_bank = bank_r[0];
  assign b_waddr = baddr_r + FAW'(rsp_cnt << OFFW);
  assign b_wdata = m_rdata;
  assign b_wbe   = mask(rsp_cnt, len_r);

  a_rsp_only_when_loading: assert property (@(posedge clk) disable iff (!rst_n)
      m_rvalid |-> busy && !store_r)
    else $error("dma_engine: read data without an outstanding load");

endmodule
