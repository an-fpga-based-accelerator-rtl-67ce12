// fused_ctrl: fused-mode/layer control.
//
// Executes the layer descriptors 0 .. nlayers-1 held in the configuration
// registers. For each layer:
//   1. weights: if `load_w` and not already prefetched, DMA them into bank `wbank`;
//   2. input:   if `load_in` and not already prefetched, DMA the input map into
//               feature bank `src`;
//   3. compute: start the CONV or the DWCV/POOL engine. While it runs, the next
//               layer's weights are prefetched into the other weight bank (ping-pong)
//               and its input map into a feature bank the current layer does not
//               use, so both transfers overlap the computation;
//   4. output:  if `store_out`, DMA the output map from bank `dst` to memory.
// The execution schedule is therefore set by the descriptors:
//   layer-by-layer : every layer loads its input and stores its output;
//   vertical fusion (VF) : only the first fused layer loads and only the last one
//     stores; in between, layer k writes its output into a feature bank (input B,
//     output A, ...) that layer k+1 reads, so fused intermediate results never leave
//     the chip and use no extra storage;
//   horizontal fusion (HF) : the parallel branches of a multi-branch block form one
//     CONV descriptor with nbr > 1 branches; the shared input is transferred once.
// Maps sit at address 0 of their bank. `done` pulses after the last layer.
// The three schedules and the weight/input prefetch follow the paper; the
// descriptor format and the rule that a prefetch must not touch a bank the current
// layer uses are this design's.
module fused_ctrl
  import acc_pkg::*;
#(
  parameter int unsigned NL  = 16,
  parameter int unsigned FAW = FBUF_AW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [$clog2(NL+1)-1:0] nlayers,
  output logic                   busy,
  output logic                   done,
  // selector
  output logic [$clog2(NL)-1:0]  sel_cur,
  output logic [$clog2(NL)-1:0]  sel_nxt,
  input  layer_cfg_t             cfg_cur,
  input  layer_cfg_t             cfg_nxt,
  // DMA
  output logic                   cmd_valid,
  input  logic                   cmd_ready,
  output logic                   cmd_store,
  output logic                   cmd_weight,
  output logic [1:0]             cmd_bank,
  output logic [MADDR_W-1:0]     cmd_maddr,
  output logic [FAW-1:0]         cmd_baddr,
  output logic [MADDR_W-1:0]     cmd_len,
  input  logic                   dma_done,
  // engines
  output logic                   conv_start,
  output logic                   dw_start,
  input  logic                   eng_done,
  // events
  output logic                   ev_prefetch_w,
  output logic                   ev_prefetch_in
);

  typedef enum logic [2:0] {S_IDLE, S_LOADW, S_LOADI, S_RUN, S_WAIT, S_STORE, S_NEXT} state_e;
  state_e st;

  logic [$clog2(NL+1)-1:0] n_r, li;
  logic  pending;                 // a DMA command is in flight
  logic  w_have, in_have;         // current layer's weights/input already on chip
  logic  pf_w, pf_in;             // next layer's weights/input prefetched
  logic  eng_fin;

  wire has_next = (li + 1'b1) < n_r;
  wire [MADDR_W-1:0] in_len  = MADDR_W'(cfg_cur.nif * cfg_cur.niy * cfg_cur.nix);
  wire [MADDR_W-1:0] nin_len = MADDR_W'(cfg_nxt.nif * cfg_nxt.niy * cfg_nxt.nix);
  wire [MADDR_W-1:0] out_len = MADDR_W'(cfg_cur.nof *
                                 out_dim(cfg_cur.niy, cfg_cur.nky, cfg_cur.pad, cfg_cur.stride) *
                                 out_dim(cfg_cur.nix, cfg_cur.nkx, cfg_cur.pad, cfg_cur.stride));
  wire want_pf_w  = has_next && cfg_nxt.load_w && !pf_w && (cfg_nxt.wbank != cfg_cur.wbank);
  wire want_pf_in = has_next && cfg_nxt.load_in && !pf_in &&
                    (cfg_nxt.src != cfg_cur.src) && (cfg_nxt.src != cfg_cur.dst);

  assign sel_cur = $clog2(NL)'(li);
  assign sel_nxt = $clog2(NL)'(li + 1'b1);

  // DMA command selection
  always_comb begin
    cmd_valid = 1'b0; cmd_store = 1'b0; cmd_weight = 1'b0; cmd_bank = '0;
    cmd_maddr = '0; cmd_baddr = '0; cmd_len = '0;
    ev_prefetch_w = 1'b0; ev_prefetch_in = 1'b0;
    if (!pending) begin
      unique case (st)
        S_LOADW: if (cfg_cur.load_w && !w_have) begin
          cmd_valid = 1'b1; cmd_weight = 1'b1; cmd_bank = {1'b0, cfg_cur.wbank};
          cmd_maddr = cfg_cur.w_addr; cmd_len = cfg_cur.w_len;
        end
        S_LOADI: if (cfg_cur.load_in && !in_have) begin
          cmd_valid = 1'b1; cmd_bank = cfg_cur.src;
          cmd_maddr = cfg_cur.in_addr; cmd_len = in_len;
        end
        S_WAIT: if (want_pf_w) begin
          cmd_valid = 1'b1; cmd_weight = 1'b1; cmd_bank = {1'b0, cfg_nxt.wbank};
          cmd_maddr = cfg_nxt.w_addr; cmd_len = cfg_nxt.w_len;
          ev_prefetch_w = cmd_ready;
        end else if (want_pf_in) begin
          cmd_valid = 1'b1; cmd_bank = cfg_nxt.src;
          cmd_maddr = cfg_nxt.in_addr; cmd_len = nin_len;
          ev_prefetch_in = cmd_ready;
        end
        S_STORE: if (cfg_cur.store_out) begin
          cmd_valid = 1'b1; cmd_store = 1'b1; cmd_bank = cfg_cur.dst;
          cmd_maddr = cfg_cur.out_addr; cmd_len = out_len;
        end
        default: ;
      endcase
    end
  end

  wire issue = cmd_valid && cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; n_r <= '0; li <= '0; pending <= 1'b0; w_have <= 1'b0; in_have <= 1'b0;
      pf_w <= 1'b0; pf_in <= 1'b0; eng_fin <= 1'b0;
    end else begin
      if (issue) pending <= 1'b1;
      else if (dma_done) pending <= 1'b0;
      unique case (st)
        S_IDLE: if (start && nlayers != '0) begin
          n_r <= nlayers; li <= '0; w_have <= 1'b0; in_have <= 1'b0;
          pf_w <= 1'b0; pf_in <= 1'b0; st <= S_LOADW;
        end
        S_LOADW: if (!(cfg_cur.load_w && !w_have)) st <= S_LOADI;
                 else if (pending && dma_done) begin w_have <= 1'b1; st <= S_LOADI; end
        S_LOADI: if (!(cfg_cur.load_in && !in_have)) st <= S_RUN;
                 else if (pending && dma_done) begin in_have <= 1'b1; st <= S_RUN; end
        S_RUN: begin eng_fin <= 1'b0; st <= S_WAIT; end
        S_WAIT: begin
          if (eng_done) eng_fin <= 1'b1;
          if (issue && want_pf_w) pf_w <= 1'b1;
          else if (issue && want_pf_in) pf_in <= 1'b1;
          if ((eng_fin || eng_done) && !pending && !issue && !want_pf_w && !want_pf_in)
            st <= S_STORE;
        end
        S_STORE: if (!cfg_cur.store_out || (pending && dma_done)) st <= S_NEXT;
        S_NEXT: begin
          w_have <= pf_w; in_have <= pf_in; pf_w <= 1'b0; pf_in <= 1'b0;
          if (has_next) begin li <= li + 1'b1; st <= S_LOADW; end
          else st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy       = (st != S_IDLE);
  assign done       = (st == S_NEXT) && !has_next;
  assign conv_start = (st == S_RUN) && (cfg_cur.engine == ENG_CONV);
  assign dw_start   = (st == S_RUN) && (cfg_cur.engine != ENG_CONV);

endmodule
