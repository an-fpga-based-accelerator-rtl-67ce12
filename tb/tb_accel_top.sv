// tb_accel_top: end-to-end test of the accelerator at its default parameters.
//
// The host writes a seven-layer program into the configuration registers, places
// random inputs and weights in the external-memory model and starts the run:
//   L0  3x3 conv, stride 1, pad 1, 12x12x8 -> 20 channels (two lane chunks), ReLU
//   L1  3x3 conv, stride 2, 13x13x4 -> 16 (input and weights prefetched during L0)
//   L2  3x3 max pool, stride 2 (input prefetched during L1)
//   L3-L5 vertically fused MBconv-like block: 1x1 conv 8->16 into input bank B,
//       19x19 depthwise conv (kernel segmentation: 19 > 2*Pox) into output bank A,
//       1x1 conv 16->8 into output bank B, which alone is written back
//   L6  horizontally fused PyConv-like layer: two groups, two branches of 2 and 6
//       output channels per group sharing one 5x5 pass
// Every stored output is compared byte by byte with tb_ref_pkg, and for every CONV
// layer the number of issued MAC steps is compared with
//   groups * ceil(noft/16) * ceil(noy/8) * ceil(nox/8) * nifg * nkx * nky.
// The mechanisms the design has -- mirrored rows, inflection-point shifts, Kseg
// sub-kernels, stride-2 phases, drain stalls, weight and input prefetch, VF fused
// writes into the input buffer, HF multi-branch layers, pooling -- are each counted
// and must each occur at least once.
module tb_accel_top;
  import acc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NL = 16;
  localparam int NPROG = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we = 1'b0, start = 1'b0, busy, done;
  logic [$clog2(NL*CFG_WORDS)-1:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  logic [$clog2(NL+1)-1:0] nlayers = '0;
  logic m_req, m_we, m_gnt, m_rvalid;
  logic [MADDR_W-1:0] m_addr;
  logic [BUS_BYTES-1:0][DW-1:0] m_wdata, m_rdata;
  logic [BUS_BYTES-1:0] m_be;

  accel_top dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .start, .nlayers, .busy, .done,
    .m_req, .m_we, .m_addr, .m_wdata, .m_be, .m_gnt, .m_rvalid, .m_rdata);

  dram_model #(.AW(20), .LAT(4)) u_mem (
    .clk, .rst_n, .stall_en(1'b1), .m_req, .m_we, .m_addr, .m_wdata, .m_be,
    .m_gnt, .m_rvalid, .m_rdata);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters ----
  int n_shr = 0, n_shu = 0, n_seg = 0, n_s2 = 0, n_stall = 0, n_pfw = 0, n_pfi = 0;
  int n_vf = 0, n_hf = 0, n_pool = 0, n_dw = 0, n_reads = 0, n_steps = 0;
  longint conv_steps = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_conv.u_seq.valid && !dut.u_conv.g_hold) begin
      conv_steps++;
      if (dut.u_conv.u_seq.op == ZF_SHR) n_shr++;
      if (dut.u_conv.u_seq.op == ZF_SHU) n_shu++;
    end
    if (dut.u_dwpool.u_seq.valid && !dut.u_dwpool.g_hold) begin
      if (dut.u_dwpool.u_seq.op == ZF_SHR) n_shr++;
      if (dut.u_dwpool.u_seq.op == ZF_SHU) n_shu++;
    end
    if ((dut.u_conv.u_seq.seg_start && !dut.u_conv.g_hold) ||
        (dut.u_dwpool.u_seq.seg_start && !dut.u_dwpool.g_hold)) n_seg++;
    if (dut.u_conv.stall || dut.u_dwpool.stall) n_stall++;
    if (dut.ev_pf_w) n_pfw++;
    if (dut.ev_pf_in) n_pfi++;
    if (dut.e_we && dut.cfg_cur.dst == BUF_IN_B) n_vf++;
    if ((dut.conv_start || dut.dw_start) && dut.cfg_cur.stride == 2) n_s2++;
    if (dut.conv_start && dut.cfg_cur.nbr > 1) n_hf++;
    if (dut.dw_start && dut.cfg_cur.engine == ENG_POOL) n_pool++;
    if (dut.dw_start && dut.cfg_cur.engine == ENG_DWCV) n_dw++;
    n_reads += $countones(dut.px_en);
    if ((dut.u_conv.u_seq.valid && !dut.u_conv.g_hold) ||
        (dut.u_dwpool.u_seq.valid && !dut.u_dwpool.g_hold)) n_steps++;
  end

  // per-layer MAC-step count against the closed form
  longint steps_at_start;
  always @(posedge clk) if (rst_n) begin
    if (dut.conv_start) steps_at_start <= conv_steps;
    if (dut.u_conv.done) begin
      layer_cfg_t c;
      longint exp_steps;
      int nox, noy;
      c = dut.u_conv.c;
      nox = int'(out_dim(c.nix, c.nkx, c.pad, c.stride));
      noy = int'(out_dim(c.niy, c.nky, c.pad, c.stride));
      exp_steps = longint'(c.groups) * ((c.noft + 15) / 16) * ((noy + 7) / 8) * ((nox + 7) / 8)
                  * c.nifg * c.nkx * c.nky;
      checks++;
      if (conv_steps - steps_at_start != exp_steps) begin
        failures++;
        $display("conv layer step count %0d, expected %0d", conv_steps - steps_at_start, exp_steps);
      end
    end
  end

  // ---- program ----
  layer_cfg_t prog[NPROG];
  int alloc = 'h100;

  function automatic int take(input int n);
    int a;
    a = alloc;
    alloc = alloc + ((n + 7) / 8) * 8 + 8;
    return a;
  endfunction

  task automatic put_rand(input int addr, input int n, input int lo, input int hi);
    for (int i = 0; i < n; i++) u_mem.mem[addr + i] = 8'($urandom_range(hi - lo) + lo);
  endtask

  task automatic get(input int addr, input int n, ref logic [7:0] a[]);
    a = new[n];
    for (int i = 0; i < n; i++) a[i] = u_mem.mem[addr + i];
  endtask

  task automatic write_cfg(input int l, input layer_cfg_t c);
    logic [CFG_WORDS*32-1:0] bits;
    bits = c;
    for (int w = 0; w < int'(CFG_WORDS); w++) begin
      @(negedge clk);
      cfg_we = 1'b1; cfg_addr = $bits(cfg_addr)'(l * CFG_WORDS + w); cfg_wdata = bits[w*32 +: 32];
    end
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  function automatic int out_bytes(input layer_cfg_t c);
    return int'(c.nof) * int'(out_dim(c.nix, c.nkx, c.pad, c.stride))
                       * int'(out_dim(c.niy, c.nky, c.pad, c.stride));
  endfunction

  task automatic compare(input string name, input int addr, input logic [7:0] exp[]);
    int bad = 0;
    for (int i = 0; i < exp.size(); i++) begin
      checks++;
      if (u_mem.mem[addr + i] !== exp[i]) begin
        failures++;
        if (bad++ < 5) $display("%s byte %0d: got %0d expected %0d", name, i,
                                $signed(u_mem.mem[addr + i]), $signed(exp[i]));
      end
    end
    $display("%s: %0d bytes compared, %0d mismatches", name, exp.size(), bad);
  endtask

  initial begin
    logic [7:0] in0[], w0[], o0[], in1[], w1[], o1[], o2[], in3[], w3[], w4[], w5[],
                t3[], t4[], o5[], in6[], w6[], o6[];
    int inA0, inA1, inA3, inA6;
    layer_cfg_t c;

    // L0: 3x3 conv, 12x12x8 -> 20
    c = mk_cfg(ENG_CONV, 12, 12, 8, 20, 3, 1, 1, 6); c.relu = 1;
    c.load_in = 1; c.load_w = 1; c.store_out = 1; c.src = BUF_IN_A; c.dst = BUF_OUT_A; c.wbank = 0;
    prog[0] = c;
    // L1: 3x3 conv stride 2, 13x13x4 -> 16
    c = mk_cfg(ENG_CONV, 13, 13, 4, 16, 3, 2, 1, 5);
    c.load_in = 1; c.load_w = 1; c.store_out = 1; c.src = BUF_IN_B; c.dst = BUF_OUT_B; c.wbank = 1;
    prog[1] = c;
    // L2: 3x3 max pool stride 2 on L0's input
    c = mk_cfg(ENG_POOL, 12, 12, 8, 8, 3, 2, 1, 0);
    c.load_in = 1; c.store_out = 1; c.src = BUF_IN_A; c.dst = BUF_OUT_A; c.wbank = 0;
    prog[2] = c;
    // L3-L5: VF block
    c = mk_cfg(ENG_CONV, 10, 10, 8, 16, 1, 1, 0, 4);
    c.load_in = 1; c.load_w = 1; c.src = BUF_IN_A; c.dst = BUF_IN_B; c.wbank = 1;
    prog[3] = c;
    c = mk_cfg(ENG_DWCV, 10, 10, 16, 16, 19, 1, 9, 6);
    c.load_w = 1; c.src = BUF_IN_B; c.dst = BUF_OUT_A; c.wbank = 0;
    prog[4] = c;
    c = mk_cfg(ENG_CONV, 10, 10, 16, 8, 1, 1, 0, 4);
    c.load_w = 1; c.store_out = 1; c.src = BUF_OUT_A; c.dst = BUF_OUT_B; c.wbank = 1;
    prog[5] = c;
    // L6: HF layer, 2 groups x (2 + 6) output channels, unified 5x5 kernels
    c = mk_cfg(ENG_CONV, 9, 9, 8, 16, 5, 1, 2, 6);
    c.groups = 2; c.nifg = 4; c.noft = 8; c.nbr = 2;
    c.br[0].nofg = 2; c.br[0].och_base = 0; c.br[1].nofg = 6; c.br[1].och_base = 4;
    c.load_in = 1; c.load_w = 1; c.store_out = 1; c.src = BUF_IN_A; c.dst = BUF_OUT_A; c.wbank = 0;
    prog[6] = c;

    // memory image
    inA0 = take(8*12*12); put_rand(inA0, 8*12*12, -20, 20);
    prog[0].in_addr = inA0; prog[2].in_addr = inA0;
    inA1 = take(4*13*13); put_rand(inA1, 4*13*13, -20, 20); prog[1].in_addr = inA1;
    inA3 = take(8*10*10); put_rand(inA3, 8*10*10, -20, 20); prog[3].in_addr = inA3;
    inA6 = take(8*9*9);   put_rand(inA6, 8*9*9, -20, 20);   prog[6].in_addr = inA6;
    for (int l = 0; l < NPROG; l++) begin
      prog[l].w_len = wbytes(prog[l]);
      prog[l].w_addr = take(wbytes(prog[l]));
      put_rand(int'(prog[l].w_addr), wbytes(prog[l]), -8, 8);
      prog[l].out_addr = take(out_bytes(prog[l]));
    end

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < NPROG; l++) write_cfg(l, prog[l]);

    // reference results
    get(inA0, 8*12*12, in0); get(int'(prog[0].w_addr), wbytes(prog[0]), w0);
    o0 = new[out_bytes(prog[0])]; ref_layer(prog[0], in0, w0, o0);
    get(inA1, 4*13*13, in1); get(int'(prog[1].w_addr), wbytes(prog[1]), w1);
    o1 = new[out_bytes(prog[1])]; ref_layer(prog[1], in1, w1, o1);
    o2 = new[out_bytes(prog[2])]; ref_layer(prog[2], in0, w0, o2);
    get(inA3, 8*10*10, in3); get(int'(prog[3].w_addr), wbytes(prog[3]), w3);
    get(int'(prog[4].w_addr), wbytes(prog[4]), w4); get(int'(prog[5].w_addr), wbytes(prog[5]), w5);
    t3 = new[out_bytes(prog[3])]; ref_layer(prog[3], in3, w3, t3);
    t4 = new[out_bytes(prog[4])]; ref_layer(prog[4], t3, w4, t4);
    o5 = new[out_bytes(prog[5])]; ref_layer(prog[5], t4, w5, o5);
    get(inA6, 8*9*9, in6); get(int'(prog[6].w_addr), wbytes(prog[6]), w6);
    o6 = new[out_bytes(prog[6])]; ref_layer(prog[6], in6, w6, o6);

    @(negedge clk);
    nlayers = NPROG; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wait (done);
    @(negedge clk);
    $display("program finished after %0d cycles", cycle);

    compare("L0 conv3x3", int'(prog[0].out_addr), o0);
    compare("L1 conv3x3 s2", int'(prog[1].out_addr), o1);
    compare("L2 maxpool s2", int'(prog[2].out_addr), o2);
    compare("L3-L5 VF block", int'(prog[5].out_addr), o5);
    compare("L6 HF layer", int'(prog[6].out_addr), o6);

    $display("mechanisms: mirrored rows %0d, inflection shifts %0d, Kseg sub-kernels %0d, stride-2 layers %0d, stalls %0d, weight prefetches %0d, input prefetches %0d, VF fused writes %0d, HF layers %0d, pool layers %0d, DWCV layers %0d",
             n_shr, n_shu, n_seg, n_s2, n_stall, n_pfw, n_pfi, n_vf, n_hf, n_pool, n_dw);
    $display("pixel buffer reads %0d over %0d engine steps (%0.2f per step, %0d PEs)",
             n_reads, n_steps, real'(n_reads) / real'(n_steps), POX * POY);
    begin
      int mech[11];
      mech = '{n_shr, n_shu, n_seg, n_s2, n_stall, n_pfw, n_pfi, n_vf, n_hf, n_pool, n_dw};
      foreach (mech[i]) begin
        checks++;
        if (mech[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    checks++;
    if (n_reads >= n_steps * int'(POX * POY) / 2) begin
      failures++; $display("Z-flow reuse missing: too many buffer reads");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
