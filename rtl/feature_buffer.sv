// feature_buffer: two-bank (A/B) ping-pong buffer for feature maps.
//
// Each bank holds 2**AW bytes; a map is stored channel-major, row by row
// (address = c * H * W + y * W + x). The same buffer serves as input/output buffer
// and as store for fused intermediate results: in vertical fusion one layer writes
// its output into a bank that the next layer then reads.
// Ports:
//   * DMA write (scatter side): WB bytes at a byte address, with byte enables.
//   * engine write: one output row segment of WB bytes, with byte enables.
//   * window read: NRD independent byte addresses, combinational, for the engine's
//     pixel register array (only the pixels it needs are read: `win_en`).
//   * DMA read (gather side): WB consecutive bytes, combinational.
// Both write ports may be active in one cycle. The paper gives the ping-pong
// organisation and the roles of the banks; word organisation, port count and
// combinational reads are this design's choices (the many read ports stand in for
// the paper's parallel buffer banks).
module feature_buffer
  import acc_pkg::*;
#(
  parameter int unsigned AW  = FBUF_AW,
  parameter int unsigned NRD = POX * POY,
  parameter int unsigned WB  = BUS_BYTES
) (
  input  logic                    clk,
  // DMA write
  input  logic                    dw_en,
  input  logic                    dw_bank,
  input  logic [AW-1:0]           dw_addr,
  input  logic [WB-1:0][DW-1:0]   dw_data,
  input  logic [WB-1:0]           dw_be,
  // engine write
  input  logic                    ew_en,
  input  logic                    ew_bank,
  input  logic [AW-1:0]           ew_addr,
  input  logic [WB-1:0][DW-1:0]   ew_data,
  input  logic [WB-1:0]           ew_be,
  // window read
  input  logic                    win_bank,
  input  logic [NRD-1:0]          win_en,
  input  logic [NRD-1:0][AW-1:0]  win_addr,
  output logic [NRD-1:0][DW-1:0]  win_data,
  // DMA read
  input  logic                    dr_bank,
  input  logic [AW-1:0]           dr_addr,
  output logic [WB-1:0][DW-1:0]   dr_data
);

  logic [DW-1:0] mem [2][2**AW];

  always_ff @(posedge clk) begin
    for (int b = 0; b < int'(WB); b++) begin
      if (dw_en && dw_be[b]) mem[dw_bank][dw_addr + AW'(b)] <= dw_data[b];
      if (ew_en && ew_be[b]) mem[ew_bank][ew_addr + AW'(b)] <= ew_data[b];
    end
  end

  always_comb begin
    for (int i = 0; i < int'(NRD); i++)
      win_data[i] = win_en[i] ? mem[win_bank][win_addr[i]] : '0;
    for (int b = 0; b < int'(WB); b++)
      dr_data[b] = mem[dr_bank][dr_addr + AW'(b)];
  end

  a_no_write_clash: assert property (@(posedge clk)
      !(dw_en && ew_en && dw_bank == ew_bank && dw_addr == ew_addr && |(dw_be & ew_be)))
    else $error("feature_buffer: DMA and engine write the same bytes");

endmodule
