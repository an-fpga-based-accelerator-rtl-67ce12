// conv_engine: the CONV module -- standard, group and horizontally fused convolution
// of arbitrary kernel size, stride 1 or 2.
//
// Parallelism is PX x PY output pixels of one map times PF output channels; the
// kernel (kx, ky) and the input channels are walked in time. The output is cut into
// blocks of PX x PY pixels x PF channels, visited group by group, channel chunk by
// channel chunk, then row-block by row-block and column-block by column-block.
// Per block the Z-flow sequencer (zflow_addr_gen) emits one step per cycle for every
// input channel of the group and every kernel position, in snake order and cut into
// sub-kernels (Kseg) and stride phases. Pipeline:
//   step cycle : pixel and weight addresses are formed and read; the pixel register
//                array (zflow_arrangement) loads or shifts, the lane weights are
//                registered;
//   +1         : the MAC cube multiplies and accumulates;
//   +2         : after a block's last step the accumulators are handed to
//                out_drain, which requantises them and writes them out while the
//                next block is computed.
// A block's last step is held back (stall) while the previous block still drains.
// Padding positions read as zero. Per block the engine needs
// nifg * nkx * nky cycles, so a layer takes
//   groups * ceil(noft/PF) * ceil(noy/PY) * ceil(nox/PX) * nifg * nkx * nky
// cycles plus stalls -- the form of the paper's Eq. (1).
// Horizontal fusion (HF): the lanes of group g carry the output channels of all
// branches for that group, concatenated (noft = sum of the branches' nofg); the
// drain sends lane j of branch i to channel och_base_i + g * nofg_i + (j - offset_i).
// Interface: `start` (one cycle) with `cfg` stable until `done` (one-cycle pulse).
// The buffer bank selection is done outside; this module produces byte addresses.
// From the paper: the array shape, Z-flow, Kseg, stride-2 phase mapping, group and
// HF execution. This design's choices: block order, pipeline depth, zero padding,
// weight layout and the stall rule.
module conv_engine
  import acc_pkg::*;
#(
  parameter int unsigned PX  = POX,
  parameter int unsigned PY  = POY,
  parameter int unsigned PF  = POF,
  parameter int unsigned FAW = FBUF_AW,
  parameter int unsigned WAW = WBUF_AW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  layer_cfg_t                    cfg,
  output logic                          busy,
  output logic                          done,
  output logic                          stall,
  output logic                          seg_event,   // a further sub-kernel started
  // pixel reads
  output logic [PY*PX-1:0]              px_en,
  output logic [PY*PX-1:0][FAW-1:0]     px_addr,
  input  logic [PY*PX-1:0][DW-1:0]      px_data,
  // weight reads
  output logic [PF-1:0][WAW-1:0]        w_addr,
  input  logic [PF-1:0][DW-1:0]         w_data,
  // output writes
  output logic                          wr_en,
  output logic [FAW-1:0]                wr_addr,
  output logic [PX-1:0][DW-1:0]         wr_data,
  output logic [PX-1:0]                 wr_be
);

  localparam int unsigned LW = $clog2(PF + 1);
  localparam int unsigned RW = $clog2(PY + 1);

  typedef struct packed {
    logic [DIM_W-1:0] g;
    logic [DIM_W-1:0] ofc;
    logic [DIM_W-1:0] oyb;
    logic [DIM_W-1:0] oxb;
  } blk_t;

  layer_cfg_t       c;
  logic [DIM_W-1:0] nox, noy;
  logic [FAW-1:0]   plane_in, plane_out;
  logic [WAW-1:0]   nk2, lane_pitch;
  blk_t             blk, blk1, blk2;
  logic             issuing, tail;

  // ---- Z-flow sequencer ----
  logic             g_start, g_valid, g_first, g_last, g_hold, g_seg;
  zf_op_e           g_op;
  logic [KW-1:0]    g_kx, g_ky;
  logic [DIM_W-1:0] g_ch;
  logic             v1, first1, last1, res_v;
  logic             drain_busy;

  wire final_blk = (32'(blk.oxb) + PX >= 32'(nox)) && (32'(blk.oyb) + PY >= 32'(noy)) &&
                   (32'(blk.ofc) + PF >= 32'(c.noft)) && (32'(blk.g) + 1 >= 32'(c.groups));
  assign g_hold  = g_last && (drain_busy || (v1 && last1) || res_v);
  wire   adv     = g_valid && !g_hold;
  assign g_start = (start && !busy) || (adv && g_last && !final_blk);

  zflow_addr_gen #(.PX(PX), .PY(PY)) u_seq (
    .clk, .rst_n, .start(g_start),
    .nkx(start && !busy ? cfg.nkx : c.nkx), .nky(start && !busy ? cfg.nky : c.nky),
    .stride(start && !busy ? cfg.stride : c.stride),
    .nch(start && !busy ? cfg.nifg : c.nifg), .hold(g_hold),
    .valid(g_valid), .op(g_op), .kx(g_kx), .ky(g_ky), .ch(g_ch),
    .first(g_first), .last(g_last), .seg_start(g_seg));

  // ---- layer and block state ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; nox <= '0; noy <= '0; plane_in <= '0; plane_out <= '0; nk2 <= '0;
      lane_pitch <= '0; blk <= '0; busy <= 1'b0; issuing <= 1'b0; tail <= 1'b0;
    end else if (start && !busy) begin
      c   <= cfg;
      nox <= out_dim(cfg.nix, cfg.nkx, cfg.pad, cfg.stride);
      noy <= out_dim(cfg.niy, cfg.nky, cfg.pad, cfg.stride);
      plane_in  <= FAW'(cfg.nix * cfg.niy);
      plane_out <= FAW'(out_dim(cfg.nix, cfg.nkx, cfg.pad, cfg.stride) *
                        out_dim(cfg.niy, cfg.nky, cfg.pad, cfg.stride));
      nk2        <= WAW'(cfg.nkx * cfg.nky);
      lane_pitch <= WAW'(cfg.nifg * cfg.nkx * cfg.nky);
      blk  <= '0;
      busy <= 1'b1; issuing <= 1'b1; tail <= 1'b0;
    end else if (busy) begin
      if (adv && g_last) begin
        if (final_blk) begin
          issuing <= 1'b0; tail <= 1'b1;
        end else if (32'(blk.oxb) + PX < 32'(nox)) begin
          blk.oxb <= blk.oxb + DIM_W'(PX);
        end else if (32'(blk.oyb) + PY < 32'(noy)) begin
          blk.oxb <= '0; blk.oyb <= blk.oyb + DIM_W'(PY);
        end else if (32'(blk.ofc) + PF < 32'(c.noft)) begin
          blk.oxb <= '0; blk.oyb <= '0; blk.ofc <= blk.ofc + DIM_W'(PF);
        end else begin
          blk.oxb <= '0; blk.oyb <= '0; blk.ofc <= '0; blk.g <= blk.g + 1'b1;
        end
      end
      if (tail && !v1 && !res_v && !drain_busy) begin
        busy <= 1'b0; tail <= 1'b0;
      end
    end
  end

  assign done  = busy && tail && !v1 && !res_v && !drain_busy;
  assign stall = g_valid && g_hold;
  assign seg_event = adv && g_seg;

  // ---- step cycle: addresses ----
  logic [PY-1:0][PX-1:0]         need;
  logic [PY-1:0][PX-1:0][DW-1:0] rd_pix, win;
  logic [DIM_W-1:0]              ic;

  always_comb begin
    int iy, ix;
    ic = DIM_W'(blk.g * c.nifg + g_ch);
    for (int y = 0; y < int'(PY); y++) begin
      for (int x = 0; x < int'(PX); x++) begin
        iy = (c.stride == 2'd2 ? 2 : 1) * (int'(blk.oyb) + y) + int'(g_ky) - int'(c.pad);
        ix = (c.stride == 2'd2 ? 2 : 1) * (int'(blk.oxb) + x) + int'(g_kx) - int'(c.pad);
        px_addr[y*PX+x] = FAW'(int'(ic) * int'(plane_in) + iy * int'(c.nix) + ix);
        px_en[y*PX+x]   = adv && need[y][x] &&
                          iy >= 0 && iy < int'(c.niy) && ix >= 0 && ix < int'(c.nix);
        rd_pix[y][x]    = px_en[y*PX+x] ? px_data[y*PX+x] : '0;
      end
    end
    for (int f = 0; f < int'(PF); f++) begin
      w_addr[f] = WAW'((int'(blk.g) * int'(c.noft) + int'(blk.ofc)) * int'(lane_pitch)
                       + f * int'(lane_pitch) + int'(g_ch) * int'(nk2)
                       + int'(g_ky) * int'(c.nkx) + int'(g_kx));
    end
  end

  zflow_arrangement #(.PX(PX), .PY(PY)) u_arr (
    .clk, .rst_n, .op(adv ? g_op : ZF_HOLD), .rd_data(rd_pix), .rd_need(need), .win(win));

  logic [PF-1:0][DW-1:0] w1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w1 <= '0; v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; res_v <= 1'b0;
      blk1 <= '0; blk2 <= '0;
    end else begin
      v1     <= adv;
      first1 <= adv && g_first;
      last1  <= adv && g_last;
      if (adv) begin
        blk1 <= blk;
        for (int f = 0; f < int'(PF); f++)
          w1[f] <= (32'(blk.ofc) + 32'(f) < 32'(c.noft)) ? w_data[f] : '0;
      end
      res_v <= v1 && last1;
      if (v1 && last1) blk2 <= blk1;
    end
  end

  // ---- MAC cube ----
  logic [PF-1:0][PY-1:0][PX-1:0][ACCW-1:0] acc;
  mac_cube #(.PX(PX), .PY(PY), .PF(PF)) u_mac (
    .clk, .rst_n, .en(v1), .clr(first1), .win(win), .w(w1), .acc(acc));

  // ---- output channel of each lane (HF rearrangement) ----
  logic [PF-1:0][DIM_W-1:0] och;
  logic [LW-1:0]            nl;
  logic [RW-1:0]            nr;
  always_comb begin
    int off, j;
    for (int f = 0; f < int'(PF); f++) begin
      j = int'(blk2.ofc) + f;
      och[f] = '0;
      off = 0;
      for (int i = 0; i < int'(NBR); i++) begin
        if (i < int'(c.nbr) && j >= off && j < off + int'(c.br[i].nofg))
          och[f] = DIM_W'(int'(c.br[i].och_base) + int'(blk2.g) * int'(c.br[i].nofg) + j - off);
        if (i < int'(c.nbr)) off += int'(c.br[i].nofg);
      end
    end
    nl = (int'(c.noft) - int'(blk2.ofc) >= int'(PF)) ? LW'(PF) : LW'(int'(c.noft) - int'(blk2.ofc));
    nr = (int'(noy) - int'(blk2.oyb) >= int'(PY)) ? RW'(PY) : RW'(int'(noy) - int'(blk2.oyb));
  end

  out_drain #(.PX(PX), .PY(PY), .LANES(PF), .AW(FAW)) u_drain (
    .clk, .rst_n, .cap(res_v), .acc(acc), .shift(c.shift), .relu(c.relu),
    .och(och), .nlanes(nl), .nrows(nr), .oy0(blk2.oyb), .ox0(blk2.oxb), .nox(nox),
    .plane(plane_out), .busy(drain_busy),
    .wr_en, .wr_addr, .wr_data, .wr_be);

endmodule
