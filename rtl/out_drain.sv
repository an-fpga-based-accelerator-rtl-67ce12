// out_drain: post-processing data arrangement and output staging.
//
// When `cap` is pulsed (the cycle after an output block's last MAC step) it
// requantises all LANES x PY x PX accumulators to signed 8 bits -- arithmetic right
// shift by `shift`, ReLU when `relu` is set, saturation to [-128, 127] -- and stores
// them in a staging register together with the block's output addresses. It then
// writes the staged block to the output buffer, one output row of PX pixels per
// cycle, lane by lane: row y of lane f goes to
//   och[f] * plane + (oy0 + y) * nox + ox0,  byte x enabled when ox0 + x < nox,
// for f < nlanes and y < nrows. `och` gives each lane's destination channel, which is
// where the engine rearranges the outputs of horizontally fused branches. Because
// the results sit in the staging register, the MACs are free to compute the next
// block while this block drains; `busy` is high while rows remain.
// Writing pre-computed per-lane channels is from the paper (outputs are "rearranged
// and sent to the corresponding address"); the quantiser (shift/ReLU/saturate) is
// this design's choice, as the paper only states 8-bit quantisation.
module out_drain
  import acc_pkg::*;
#(
  parameter int unsigned PX    = POX,
  parameter int unsigned PY    = POY,
  parameter int unsigned LANES = POF,
  parameter int unsigned AW    = FBUF_AW
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 cap,
  input  logic [LANES-1:0][PY-1:0][PX-1:0][ACCW-1:0] acc,
  input  logic [4:0]                           shift,
  input  logic                                 relu,
  input  logic [LANES-1:0][DIM_W-1:0]          och,
  input  logic [$clog2(LANES+1)-1:0]           nlanes,  // >= 1
  input  logic [$clog2(PY+1)-1:0]              nrows,   // >= 1
  input  logic [DIM_W-1:0]                     oy0,
  input  logic [DIM_W-1:0]                     ox0,
  input  logic [DIM_W-1:0]                     nox,
  input  logic [AW-1:0]                        plane,   // noy * nox
  output logic                                 busy,
  output logic                                 wr_en,
  output logic [AW-1:0]                        wr_addr,
  output logic [PX-1:0][DW-1:0]                wr_data,
  output logic [PX-1:0]                        wr_be
);

  localparam int unsigned LW = $clog2(LANES + 1);
  localparam int unsigned RW = $clog2(PY + 1);

  logic [LANES-1:0][PY-1:0][PX-1:0][DW-1:0] stage;
  logic [LANES-1:0][DIM_W-1:0] och_r;
  logic [LW-1:0] nl_r, li;
  logic [RW-1:0] nr_r, ri;
  logic [DIM_W-1:0] oy0_r, ox0_r, nox_r;
  logic [AW-1:0] plane_r;

  function automatic logic [DW-1:0] quant(input logic [ACCW-1:0] a, input logic [4:0] sh,
                                          input logic rl);
    logic signed [ACCW-1:0] v;
    v = $signed(a) >>> sh;
    if (rl && v < 0) v = '0;
    if (v > 127) return 8'sd127;
    if (v < -128) return 8'h80;
    return v[DW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      stage <= '0; och_r <= '0; nl_r <= '0; nr_r <= '0; li <= '0; ri <= '0;
      oy0_r <= '0; ox0_r <= '0; nox_r <= '0; plane_r <= '0;
    end else if (cap) begin
      busy <= 1'b1;
      for (int f = 0; f < int'(LANES); f++)
        for (int y = 0; y < int'(PY); y++)
          for (int x = 0; x < int'(PX); x++)
            stage[f][y][x] <= quant(acc[f][y][x], shift, relu);
      och_r <= och; nl_r <= nlanes; nr_r <= nrows; li <= '0; ri <= '0;
      oy0_r <= oy0; ox0_r <= ox0; nox_r <= nox; plane_r <= plane;
    end else if (busy) begin
      if (ri == nr_r - 1'b1) begin
        ri <= '0;
        if (li == nl_r - 1'b1) busy <= 1'b0;
        else                   li <= li + 1'b1;
      end else begin
        ri <= ri + 1'b1;
      end
    end
  end

  always_comb begin
    wr_en   = busy;
    wr_addr = AW'(och_r[li] * plane_r) + AW'((oy0_r + DIM_W'(ri)) * nox_r) + AW'(ox0_r);
    wr_data = stage[li][ri];
    for (int x = 0; x < int'(PX); x++) wr_be[x] = (ox0_r + DIM_W'(x)) < nox_r;
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) cap |-> !busy)
    else $error("out_drain: new block captured while the previous one still drains");

endmodule
