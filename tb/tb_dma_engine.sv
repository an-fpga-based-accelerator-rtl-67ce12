// tb_dma_engine: checks loads (scatter) and stores (gather) of the DMA engine.
//
// Uses the external-memory model with random grant stalls. Loads of several
// lengths (also not a multiple of 8) into a feature bank and into a weight bank are
// captured from the buffer-write outputs and compared with memory; a store gathers
// from a feature-bank model in the testbench and the written memory is compared,
// including that bytes past the end were left untouched. Without stalls a load of
// N words must finish within N + latency + 2 cycles.
module tb_dma_engine;
  import acc_pkg::*;

  localparam int WB = BUS_BYTES;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, cmd_store = 0, cmd_weight = 0, done, busy;
  logic [1:0] cmd_bank = '0;
  logic [MADDR_W-1:0] cmd_maddr = '0, cmd_len = '0;
  logic [FBUF_AW-1:0] cmd_baddr = '0;
  logic m_req, m_we, m_gnt, m_rvalid;
  logic [MADDR_W-1:0] m_addr;
  logic [WB-1:0][DW-1:0] m_wdata, m_rdata;
  logic [WB-1:0] m_be;
  logic fb_we, wb_we, wb_bank;
  logic [1:0] fb_bank, gr_bank;
  logic [FBUF_AW-1:0] b_waddr, gr_addr;
  logic [WB-1:0][DW-1:0] b_wdata, gr_data;
  logic [WB-1:0] b_wbe;
  logic stall_en = 1'b1;

  dma_engine dut (.*);
  dram_model #(.AW(16), .LAT(4)) u_mem (.clk, .rst_n, .stall_en, .m_req, .m_we, .m_addr,
                                        .m_wdata, .m_be, .m_gnt, .m_rvalid, .m_rdata);

  logic [7:0] fmem [4][4096];
  logic [7:0] wmem [2][4096];
  int checks = 0, failures = 0;

  always @(posedge clk) begin
    for (int i = 0; i < WB; i++) begin
      int a;
      a = int'(b_waddr) + i;
      if (fb_we && b_wbe[i]) fmem[fb_bank][a % 4096] = b_wdata[i];
      if (wb_we && b_wbe[i]) wmem[wb_bank][a % 4096] = b_wdata[i];
    end
  end
  always_comb
    for (int i = 0; i < WB; i++) gr_data[i] = fmem[gr_bank][(int'(gr_addr) + i) % 4096];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic xfer(input bit st, input bit w, input int bank, input int maddr,
                      input int baddr, input int len, output int cyc);
    @(negedge clk);
    cmd_valid = 1; cmd_store = st; cmd_weight = w; cmd_bank = 2'(bank);
    cmd_maddr = MADDR_W'(maddr); cmd_baddr = FBUF_AW'(baddr); cmd_len = MADDR_W'(len);
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    for (int b = 0; b < 4; b++) for (int a = 0; a < 4096; a++) fmem[b][a] = 8'($urandom);
    for (int b = 0; b < 2; b++) for (int a = 0; a < 4096; a++) wmem[b][a] = 8'h00;
    for (int a = 0; a < 2**16; a++) u_mem.mem[a] = 8'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // loads into feature banks
    foreach (fmem[b]) begin
      int len, ma, ba;
      len = 1 + $urandom_range(700); ma = 8 * $urandom_range(4000); ba = 8 * $urandom_range(100);
      xfer(0, 0, b, ma, ba, len, cyc);
      for (int i = 0; i < len; i++) begin
        checks++;
        if (fmem[b][ba + i] !== u_mem.mem[ma + i]) failures++;
      end
    end
    // load into weight bank 1
    xfer(0, 1, 1, 800, 0, 333, cyc);
    for (int i = 0; i < 333; i++) begin
      checks++;
      if (wmem[1][i] !== u_mem.mem[800 + i]) failures++;
    end
    checks++;
    if (wmem[1][333] !== 8'h00 || wmem[0][5] !== 8'h00) begin
      failures++; $display("weight write outside the transfer");
    end
    // store from feature bank 2
    begin
      logic [7:0] after;
      after = u_mem.mem[20000 + 205];
      xfer(1, 0, 2, 20000, 64, 205, cyc);
      repeat (2) @(negedge clk);
      for (int i = 0; i < 205; i++) begin
        checks++;
        if (u_mem.mem[20000 + i] !== fmem[2][64 + i]) failures++;
      end
      checks++;
      if (u_mem.mem[20000 + 205] !== after) begin failures++; $display("store overran"); end
    end
    // throughput without stalls: 64 words
    stall_en = 0;
    xfer(0, 0, 0, 0, 0, 512, cyc);
    checks++;
    if (cyc > 64 + 4 + 2) begin failures++; $display("64-word load took %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
