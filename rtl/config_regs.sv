// config_regs: per-layer configuration registers and the layer selector.
//
// NL layer descriptors (acc_pkg::layer_cfg_t, CFG_WORDS words of 32 bits each) are
// written by the host through a simple register port: word w of layer l sits at
// address l * CFG_WORDS + w, word 0 holding descriptor bits 31:0. The selector
// presents two descriptors to the fused-mode/layer controller: the layer being
// executed (`sel_cur`) and the one after it (`sel_nxt`), so that the controller can
// prefetch the next layer's data. Reads are combinational; writes take effect at
// the next clock edge. The registers are from the paper; their number, width and
// the two-port selector are this design's choices.
module config_regs
  import acc_pkg::*;
#(
  parameter int unsigned NL = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            wr_en,
  input  logic [$clog2(NL*CFG_WORDS)-1:0] wr_addr,
  input  logic [31:0]                     wr_data,
  input  logic [$clog2(NL)-1:0]           sel_cur,
  input  logic [$clog2(NL)-1:0]           sel_nxt,
  output layer_cfg_t                      cfg_cur,
  output layer_cfg_t                      cfg_nxt
);

  logic [NL-1:0][CFG_WORDS-1:0][31:0] regs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) regs <= '0;
    else if (wr_en) regs[wr_addr / CFG_WORDS][wr_addr % CFG_WORDS] <= wr_data;
  end

  assign cfg_cur = layer_cfg_t'(regs[sel_cur]);
  assign cfg_nxt = layer_cfg_t'(regs[sel_nxt]);

endmodule
