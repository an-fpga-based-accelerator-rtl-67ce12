// dwpool_engine: the DWCV/POOL module -- depthwise convolution and max pooling of
// arbitrary window size, stride 1 or 2.
//
// Works on one channel at a time: the output of channel c is cut into blocks of
// PX x PY pixels, and for each block the same Z-flow sequencer as the CONV module
// (zflow_addr_gen, one input channel) walks the window positions in snake order,
// with Kseg segmentation and stride phases. The pixel register array
// (zflow_arrangement) reuses neighbouring pixels exactly as in the CONV module.
// The PX x PY pool units either multiply-accumulate with the channel's weight
// (ENG_DWCV) or keep the running maximum (ENG_POOL). Padding positions read as zero
// for DWCV and as -128 for pooling. Results go through out_drain (requantisation,
// staging, row-wise writes to channel c) while the next block is computed.
// Timing: nkx * nky cycles per block, nif * ceil(noy/PY) * ceil(nox/PX) blocks,
// plus stalls while a block still drains.
// Interface: `start` with `cfg` stable until the one-cycle `done`.
// The paper names the module (DWCV/POOL, with address generator, data arrangement
// and POOL MAX units) but not its insides: sharing the CONV module's Z-flow
// sequencing and giving it PX x PY units are this design's choices.
module dwpool_engine
  import acc_pkg::*;
#(
  parameter int unsigned PX  = POX,
  parameter int unsigned PY  = POY,
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
  output logic [PY*PX-1:0]              px_en,
  output logic [PY*PX-1:0][FAW-1:0]     px_addr,
  input  logic [PY*PX-1:0][DW-1:0]      px_data,
  output logic [WAW-1:0]                w_addr,
  input  logic [DW-1:0]                 w_data,
  output logic                          wr_en,
  output logic [FAW-1:0]                wr_addr,
  output logic [PX-1:0][DW-1:0]         wr_data,
  output logic [PX-1:0]                 wr_be
);

  localparam int unsigned RW = $clog2(PY + 1);

  typedef struct packed {
    logic [DIM_W-1:0] ch;
    logic [DIM_W-1:0] oyb;
    logic [DIM_W-1:0] oxb;
  } blk_t;

  layer_cfg_t       c;
  logic             is_pool;
  logic [DIM_W-1:0] nox, noy;
  logic [FAW-1:0]   plane_in, plane_out;
  logic [WAW-1:0]   nk2;
  blk_t             blk, blk1, blk2;
  logic             tail;

  logic             g_start, g_valid, g_first, g_last, g_hold, g_seg;
  zf_op_e           g_op;
  logic [KW-1:0]    g_kx, g_ky;
  logic [DIM_W-1:0] g_ch;
  logic             v1, first1, last1, res_v, drain_busy;

  wire final_blk = (32'(blk.oxb) + PX >= 32'(nox)) && (32'(blk.oyb) + PY >= 32'(noy)) &&
                   (32'(blk.ch) + 1 >= 32'(c.nif));
  assign g_hold  = g_last && (drain_busy || (v1 && last1) || res_v);
  wire   adv     = g_valid && !g_hold;
  wire   go      = start && !busy;
  assign g_start = go || (adv && g_last && !final_blk);

  zflow_addr_gen #(.PX(PX), .PY(PY)) u_seq (
    .clk, .rst_n, .start(g_start),
    .nkx(go ? cfg.nkx : c.nkx), .nky(go ? cfg.nky : c.nky),
    .stride(go ? cfg.stride : c.stride), .nch(DIM_W'(1)), .hold(g_hold),
    .valid(g_valid), .op(g_op), .kx(g_kx), .ky(g_ky), .ch(g_ch),
    .first(g_first), .last(g_last), .seg_start(g_seg));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; is_pool <= 1'b0; nox <= '0; noy <= '0; plane_in <= '0; plane_out <= '0;
      nk2 <= '0; blk <= '0; busy <= 1'b0; tail <= 1'b0;
    end else if (go) begin
      c       <= cfg;
      is_pool <= (cfg.engine == ENG_POOL);
      nox <= out_dim(cfg.nix, cfg.nkx, cfg.pad, cfg.stride);
      noy <= out_dim(cfg.niy, cfg.nky, cfg.pad, cfg.stride);
      plane_in  <= FAW'(cfg.nix * cfg.niy);
      plane_out <= FAW'(out_dim(cfg.nix, cfg.nkx, cfg.pad, cfg.stride) *
                        out_dim(cfg.niy, cfg.nky, cfg.pad, cfg.stride));
      nk2  <= WAW'(cfg.nkx * cfg.nky);
      blk  <= '0;
      busy <= 1'b1; tail <= 1'b0;
    end else if (busy) begin
      if (adv && g_last) begin
        if (final_blk) begin
          tail <= 1'b1;
        end else if (32'(blk.oxb) + PX < 32'(nox)) begin
          blk.oxb <= blk.oxb + DIM_W'(PX);
        end else if (32'(blk.oyb) + PY < 32'(noy)) begin
          blk.oxb <= '0; blk.oyb <= blk.oyb + DIM_W'(PY);
        end else begin
          blk.oxb <= '0; blk.oyb <= '0; blk.ch <= blk.ch + 1'b1;
        end
      end
      if (tail && !v1 && !res_v && !drain_busy) begin
        busy <= 1'b0; tail <= 1'b0;
      end
    end
  end

  assign done  = busy && tail && !v1 && !res_v && !drain_busy;
  assign stall = g_valid && g_hold;

  logic [PY-1:0][PX-1:0]         need;
  logic [PY-1:0][PX-1:0][DW-1:0] rd_pix, win;
  logic [DW-1:0]                 pad_val;

  always_comb begin
    int iy, ix;
    logic inb;
    pad_val = is_pool ? 8'h80 : 8'h00;
    for (int y = 0; y < int'(PY); y++) begin
      for (int x = 0; x < int'(PX); x++) begin
        iy  = (c.stride == 2'd2 ? 2 : 1) * (int'(blk.oyb) + y) + int'(g_ky) - int'(c.pad);
        ix  = (c.stride == 2'd2 ? 2 : 1) * (int'(blk.oxb) + x) + int'(g_kx) - int'(c.pad);
        inb = iy >= 0 && iy < int'(c.niy) && ix >= 0 && ix < int'(c.nix);
        px_addr[y*PX+x] = FAW'(int'(blk.ch) * int'(plane_in) + iy * int'(c.nix) + ix);
        px_en[y*PX+x]   = adv && need[y][x] && inb;
        rd_pix[y][x]    = inb ? px_data[y*PX+x] : pad_val;
      end
    end
    w_addr = WAW'(int'(blk.ch) * int'(nk2) + int'(g_ky) * int'(c.nkx) + int'(g_kx));
  end

  zflow_arrangement #(.PX(PX), .PY(PY)) u_arr (
    .clk, .rst_n, .op(adv ? g_op : ZF_HOLD), .rd_data(rd_pix), .rd_need(need), .win(win));

  // Pool units: multiply-accumulate (DWCV) or running maximum (POOL).
  logic [DW-1:0] w1;
  logic [0:0][PY-1:0][PX-1:0][ACCW-1:0] acc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w1 <= '0; v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; res_v <= 1'b0;
      blk1 <= '0; blk2 <= '0; acc <= '0;
    end else begin
      v1     <= adv;
      first1 <= adv && g_first;
      last1  <= adv && g_last;
      if (adv) begin
        blk1 <= blk;
        w1   <= w_data;
      end
      if (v1) begin
        for (int y = 0; y < int'(PY); y++) begin
          for (int x = 0; x < int'(PX); x++) begin
            if (is_pool) begin
              if (first1 || $signed(ACCW'($signed(win[y][x]))) > $signed(acc[0][y][x]))
                acc[0][y][x] <= ACCW'($signed(win[y][x]));
            end else begin
              acc[0][y][x] <= (first1 ? '0 : acc[0][y][x])
                              + ACCW'($signed(win[y][x]) * $signed(w1));
            end
          end
        end
      end
      res_v <= v1 && last1;
      if (v1 && last1) blk2 <= blk1;
    end
  end

  logic [RW-1:0] nr;
  assign nr = (int'(noy) - int'(blk2.oyb) >= int'(PY)) ? RW'(PY) : RW'(int'(noy) - int'(blk2.oyb));

  out_drain #(.PX(PX), .PY(PY), .LANES(1), .AW(FAW)) u_drain (
    .clk, .rst_n, .cap(res_v), .acc(acc), .shift(c.shift), .relu(c.relu),
    .och(blk2.ch), .nlanes(1'b1), .nrows(nr), .oy0(blk2.oyb), .ox0(blk2.oxb), .nox(nox),
    .plane(plane_out), .busy(drain_busy),
    .wr_en, .wr_addr, .wr_data, .wr_be);

endmodule
