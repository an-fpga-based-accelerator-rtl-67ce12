// zflow_addr_gen: kernel-step sequencer of the Z-flow method with kernel segmentation.
//
// For one output block the PE array visits every kernel position of every input
// channel, one position per cycle, because the kernel dimensions are not unrolled.
// The order is the Z-flow snake: along a kernel row left to right (the pixel
// register array shifts left), the next row right to left (mirrored, shifts right),
// and between rows the window moves up by one row (inflection point). Each step
// carries the register-array operation the engine applies.
//
// Kernel segmentation (Kseg): a kernel dimension longer than 2*Pox (2*Poy) is cut
// into sub-kernels of Pox (Poy) positions until at most 2*Pox (2*Poy) remain, which
// form the last sub-kernel. Each sub-kernel starts with a full window load; the
// partial sums of all sub-kernels accumulate in the same MACs.
// Stride 2: the kernel is split into its four stride phases (even/odd rows x
// even/odd columns). Within one phase consecutive positions are 2 apart, so a
// neighbouring PE holds exactly the pixel needed next, as with stride 1.
//
// Interface: pulse `start` (accepted when idle or on the last step of a block) with
// the kernel size, stride and channel count; `valid` then stays high and a step is
// consumed on every cycle `hold` is low. `first` marks the block's first step (clear
// accumulators), `last` its last one. No bubble between back-to-back blocks:
// a block takes nch * nkx * nky cycles.
// The snake order, the Pox-sized first sub-kernel and the stride-phase mapping follow
// the paper; the rule for the remaining segment sizes and the sequencing hardware
// are this design's choices.
module zflow_addr_gen
  import acc_pkg::*;
#(
  parameter int unsigned PX = POX,
  parameter int unsigned PY = POY
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [KW-1:0]    nkx,
  input  logic [KW-1:0]    nky,
  input  logic [1:0]       stride,    // 1 or 2
  input  logic [DIM_W-1:0] nch,       // input channels per block, >= 1
  input  logic             hold,
  output logic             valid,
  output zf_op_e           op,
  output logic [KW-1:0]    kx,
  output logic [KW-1:0]    ky,
  output logic [DIM_W-1:0] ch,
  output logic             first,
  output logic             last,
  output logic             seg_start  // a sub-kernel other than the first begins
);

  // Latched block configuration.
  logic [KW-1:0]    nkx_r, nky_r;
  logic             s2_r;
  logic [DIM_W-1:0] nch_r;

  // Position state.
  logic             run;
  logic [DIM_W-1:0] ch_r;
  logic             px, py;           // stride phase
  logic [KW-1:0]    sx0, sy0;         // sub-kernel origin (phase-decimated units)
  logic [KW-1:0]    jx, jy;           // position inside the sub-kernel
  zf_op_e           op_r;
  logic             first_r;

  // Length of a kernel dimension in one stride phase.
  function automatic logic [KW-1:0] plen(input logic [KW-1:0] n, input logic p, input logic s2);
    if (!s2) return n;
    return (n > KW'(p)) ? KW'((n - KW'(p) + 1) >> 1) : '0;
  endfunction

  // Segment width starting at s0 in a dimension of length l with unit u.
  function automatic logic [KW-1:0] segw(input logic [KW-1:0] l, input logic [KW-1:0] s0,
                                         input int unsigned u);
    logic [KW-1:0] rem;
    rem = l - s0;
    return (int'(rem) > 2 * int'(u)) ? KW'(u) : rem;
  endfunction

  logic [KW-1:0] lx, ly, wx, wy;
  logic          row_fwd;
  logic          seg_end, segx_more, segy_more, phx_more, phy_more, ch_more;

  always_comb begin
    lx = plen(nkx_r, px, s2_r);
    ly = plen(nky_r, py, s2_r);
    wx = segw(lx, sx0, PX);
    wy = segw(ly, sy0, PY);
    row_fwd   = ~jy[0];
    seg_end   = (jy == wy - 1) && (row_fwd ? (jx == wx - 1) : (jx == '0));
    segx_more = (sx0 + wx) < lx;
    segy_more = (sy0 + wy) < ly;
    phx_more  = s2_r && !px && (plen(nkx_r, 1'b1, 1'b1) != '0);
    phy_more  = s2_r && !py && (plen(nky_r, 1'b1, 1'b1) != '0);
    ch_more   = (ch_r + 1'b1) < nch_r;
  end

  wire is_last = seg_end && !segx_more && !segy_more && !phx_more && !phy_more && !ch_more;
  wire adv     = run && !hold;
  wire go      = start && (!run || (adv && is_last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      nkx_r <= '0; nky_r <= '0; s2_r <= 1'b0; nch_r <= '0;
      ch_r <= '0; px <= 1'b0; py <= 1'b0; sx0 <= '0; sy0 <= '0; jx <= '0; jy <= '0;
      op_r <= ZF_LOAD; first_r <= 1'b0;
    end else if (go) begin
      run <= 1'b1;
      nkx_r <= nkx; nky_r <= nky; s2_r <= (stride == 2'd2);
      nch_r <= (nch == '0) ? DIM_W'(1) : nch;
      ch_r <= '0; px <= 1'b0; py <= 1'b0; sx0 <= '0; sy0 <= '0; jx <= '0; jy <= '0;
      op_r <= ZF_LOAD; first_r <= 1'b1;
    end else if (adv) begin
      first_r <= 1'b0;
      if (!seg_end) begin
        if (row_fwd && jx != wx - 1) begin
          jx <= jx + 1'b1; op_r <= ZF_SHL;
        end else if (!row_fwd && jx != '0) begin
          jx <= jx - 1'b1; op_r <= ZF_SHR;
        end else begin
          jy <= jy + 1'b1; op_r <= ZF_SHU;
        end
      end else begin
        jx <= '0; jy <= '0; op_r <= ZF_LOAD;
        if (segx_more) begin
          sx0 <= sx0 + wx;
        end else if (segy_more) begin
          sx0 <= '0; sy0 <= sy0 + wy;
        end else if (phx_more) begin
          sx0 <= '0; sy0 <= '0; px <= 1'b1;
        end else if (phy_more) begin
          sx0 <= '0; sy0 <= '0; px <= 1'b0; py <= 1'b1;
        end else if (ch_more) begin
          sx0 <= '0; sy0 <= '0; px <= 1'b0; py <= 1'b0; ch_r <= ch_r + 1'b1;
        end else begin
          run <= 1'b0;
        end
      end
    end
  end

  assign valid = run;
  assign op    = op_r;
  assign kx    = KW'({1'b0, px}) + (s2_r ? KW'((sx0 + jx) << 1) : KW'(sx0 + jx));
  assign ky    = KW'({1'b0, py}) + (s2_r ? KW'((sy0 + jy) << 1) : KW'(sy0 + jy));
  assign ch    = ch_r;
  assign first = run && first_r;
  assign last  = run && is_last;
  assign seg_start = run && (op_r == ZF_LOAD) && (sx0 != '0 || sy0 != '0);

endmodule
