// weight_buffer: two-bank ping-pong weight buffer.
//
// Each bank holds 2**AW bytes of kernel weights, laid out as
// [group][output channel in group][input channel in group][ky][kx]. While an engine
// reads one bank, the DMA may fill the other with the next layer's weights, which
// is what hides the weight transfer behind computation.
// Ports: a DMA write of WB bytes with byte enables, and NRD combinational read
// ports (one weight per kernel lane per cycle) on the selected bank. The ping-pong
// organisation is the paper's; the layout and port shape are this design's.
module weight_buffer
  import acc_pkg::*;
#(
  parameter int unsigned AW  = WBUF_AW,
  parameter int unsigned NRD = POF,
  parameter int unsigned WB  = BUS_BYTES
) (
  input  logic                    clk,
  input  logic                    dw_en,
  input  logic                    dw_bank,
  input  logic [AW-1:0]           dw_addr,
  input  logic [WB-1:0][DW-1:0]   dw_data,
  input  logic [WB-1:0]           dw_be,
  input  logic                    rd_bank,
  input  logic [NRD-1:0][AW-1:0]  rd_addr,
  output logic [NRD-1:0][DW-1:0]  rd_data
);

  logic [DW-1:0] mem [2][2**AW];

  always_ff @(posedge clk) begin
    for (int b = 0; b < int'(WB); b++)
      if (dw_en && dw_be[b]) mem[dw_bank][dw_addr + AW'(b)] <= dw_data[b];
  end

  always_comb begin
    for (int i = 0; i < int'(NRD); i++) rd_data[i] = mem[rd_bank][rd_addr[i]];
  end

endmodule
