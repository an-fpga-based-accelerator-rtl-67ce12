// tb_fused_ctrl: checks the order of transfers and engine runs of the fused-mode /
// layer controller.
//
// The testbench stands in for the configuration registers (an array of
// descriptors), the DMA engine (accepts a command, reports done a random number of
// cycles later) and the engines (done a fixed time after start). A four-layer
// program -- a standalone layer, then a three-layer vertically fused chain -- is run
// and the log of events is compared with the expected schedule: the next layer's
// weights are fetched while the current layer computes (into the other bank), the
// input of a layer that reads a free bank is prefetched, fused layers neither load
// inputs nor store outputs, and a layer does not start before its data are in.
module tb_fused_ctrl;
  import acc_pkg::*;

  localparam int NL = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [$clog2(NL+1)-1:0] nlayers = '0;
  logic [$clog2(NL)-1:0] sel_cur, sel_nxt;
  layer_cfg_t cfg_cur, cfg_nxt;
  logic cmd_valid, cmd_ready, cmd_store, cmd_weight, dma_done = 0;
  logic [1:0] cmd_bank;
  logic [MADDR_W-1:0] cmd_maddr, cmd_len;
  logic [FBUF_AW-1:0] cmd_baddr;
  logic conv_start, dw_start, eng_done = 0, ev_prefetch_w, ev_prefetch_in;

  fused_ctrl #(.NL(NL)) dut (.clk, .rst_n, .start, .nlayers, .busy, .done,
    .sel_cur, .sel_nxt, .cfg_cur, .cfg_nxt, .cmd_valid, .cmd_ready, .cmd_store,
    .cmd_weight, .cmd_bank, .cmd_maddr, .cmd_baddr, .cmd_len, .dma_done,
    .conv_start, .dw_start, .eng_done, .ev_prefetch_w, .ev_prefetch_in);

  layer_cfg_t prog [NL];
  assign cfg_cur = prog[sel_cur];
  assign cfg_nxt = prog[sel_nxt];

  // DMA stand-in
  int dma_left = 0;
  assign cmd_ready = (dma_left == 0);
  string log[$];
  always @(posedge clk) begin
    dma_done <= 0;
    if (cmd_valid && cmd_ready) begin
      dma_left <= 3 + $urandom_range(20);
      log.push_back($sformatf("%s%s@%0h", cmd_store ? "S" : "L", cmd_weight ? "W" : "F", cmd_maddr));
    end else if (dma_left == 1) begin
      dma_left <= 0; dma_done <= 1;
    end else if (dma_left > 1) dma_left <= dma_left - 1;
  end
  // engine stand-in
  int eng_left = 0;
  always @(posedge clk) begin
    eng_done <= 0;
    if (conv_start || dw_start) begin
      eng_left <= 60;
      log.push_back($sformatf("RUN%0d", sel_cur));
    end else if (eng_left == 1) begin
      eng_left <= 0; eng_done <= 1; log.push_back($sformatf("END%0d", sel_cur));
    end else if (eng_left > 1) eng_left <= eng_left - 1;
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string exp[$];
    int npf_w = 0, npf_i = 0;
    foreach (prog[i]) prog[i] = '0;
    // L0: standalone conv
    prog[0].engine = ENG_CONV; prog[0].load_in = 1; prog[0].load_w = 1; prog[0].store_out = 1;
    prog[0].src = BUF_IN_A; prog[0].dst = BUF_OUT_A; prog[0].wbank = 0;
    prog[0].in_addr = 'h100; prog[0].w_addr = 'h200; prog[0].out_addr = 'h300; prog[0].w_len = 16;
    // L1-L3: VF chain, L1 reads IN_B (free during L0, so its input is prefetched)
    prog[1].engine = ENG_CONV; prog[1].load_in = 1; prog[1].load_w = 1;
    prog[1].src = BUF_IN_B; prog[1].dst = BUF_OUT_B; prog[1].wbank = 1;
    prog[1].in_addr = 'h400; prog[1].w_addr = 'h500; prog[1].w_len = 16;
    prog[2].engine = ENG_DWCV; prog[2].load_w = 1;
    prog[2].src = BUF_OUT_B; prog[2].dst = BUF_IN_A; prog[2].wbank = 0;
    prog[2].w_addr = 'h600; prog[2].w_len = 16;
    prog[3].engine = ENG_CONV; prog[3].load_w = 1; prog[3].store_out = 1;
    prog[3].src = BUF_IN_A; prog[3].dst = BUF_OUT_A; prog[3].wbank = 1;
    prog[3].w_addr = 'h700; prog[3].out_addr = 'h800; prog[3].w_len = 16;
    foreach (prog[i]) begin
      prog[i].nix = 4; prog[i].niy = 4; prog[i].nif = 2; prog[i].nof = 2;
      prog[i].nkx = 1; prog[i].nky = 1; prog[i].stride = 1;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    nlayers = 4; start = 1;
    @(negedge clk);
    start = 0;
    fork
      forever @(posedge clk) begin
        if (ev_prefetch_w) npf_w++;
        if (ev_prefetch_in) npf_i++;
      end
    join_none
    wait (done);
    @(posedge clk);
    #1;
    exp = '{"LW@200", "LF@100", "RUN0", "LW@500", "LF@400", "END0", "SF@300",
            "RUN1", "LW@600", "END1", "RUN2", "LW@700", "END2", "RUN3", "END3", "SF@800"};
    checks++;
    if (log.size() != exp.size()) begin
      failures++; $display("log has %0d events, expected %0d", log.size(), exp.size());
    end
    foreach (exp[i]) begin
      checks++;
      if (i >= log.size() || log[i] != exp[i]) begin
        failures++;
        $display("event %0d: %s expected %s", i, (i < log.size()) ? log[i] : "-", exp[i]);
      end
    end
    checks++;
    if (npf_w != 3 || npf_i != 1) begin
      failures++; $display("prefetches: %0d weight, %0d input", npf_w, npf_i);
    end
    checks++;
    if (busy) begin failures++; $display("still busy after done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
