// tb_dwpool_engine: checks the DWCV/POOL module alone against the reference model.
//
// The testbench plays the feature and weight buffers and runs a 3x3 depthwise
// convolution, a 31x31 depthwise convolution (kernel segmentation), a 5x5 stride-2
// depthwise convolution, a 3x3 stride-2 max pool and a 2x2 stride-2 max pool;
// outputs are compared with tb_ref_pkg and the cycle count with
// nif * ceil(noy/8) * ceil(nox/8) * nkx * nky plus stalls and a short tail.
module tb_dwpool_engine;
  import acc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done, stall, wr_en;
  layer_cfg_t cfg = '0;
  logic [POY*POX-1:0] px_en;
  logic [POY*POX-1:0][FBUF_AW-1:0] px_addr;
  logic [POY*POX-1:0][DW-1:0] px_data;
  logic [WBUF_AW-1:0] w_addr;
  logic [DW-1:0] w_data;
  logic [FBUF_AW-1:0] wr_addr;
  logic [POX-1:0][DW-1:0] wr_data;
  logic [POX-1:0] wr_be;

  dwpool_engine dut (.clk, .rst_n, .start, .cfg, .busy, .done, .stall,
                     .px_en, .px_addr, .px_data, .w_addr, .w_data,
                     .wr_en, .wr_addr, .wr_data, .wr_be);

  logic [7:0] fin[], wts[], fout[];

  always_comb begin
    for (int i = 0; i < int'(POY * POX); i++)
      px_data[i] = (px_en[i] && int'(px_addr[i]) < fin.size()) ? fin[px_addr[i]] : 8'h00;
    w_data = (int'(w_addr) < wts.size()) ? wts[w_addr] : 8'h00;
  end
  always @(posedge clk)
    if (wr_en)
      for (int x = 0; x < int'(POX); x++) begin
        int a;
        a = int'(wr_addr) + x;
        if (wr_be[x] && a < fout.size()) fout[a] = wr_data[x];
      end

  int checks = 0, failures = 0, nstall = 0;
  always @(posedge clk) if (stall) nstall++;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input layer_cfg_t c, input string name);
    logic [7:0] exp[];
    int nox, noy, cyc = 0, st0, steps;
    nox = int'(out_dim(c.nix, c.nkx, c.pad, c.stride));
    noy = int'(out_dim(c.niy, c.nky, c.pad, c.stride));
    fin = new[int'(c.nif) * int'(c.niy) * int'(c.nix)];
    foreach (fin[i]) fin[i] = 8'($urandom_range(100) - 50);
    wts = new[(wbytes(c) > 0) ? wbytes(c) : 1];
    foreach (wts[i]) wts[i] = 8'($urandom_range(16) - 8);
    fout = new[int'(c.nof) * noy * nox];
    exp  = new[fout.size()];
    ref_layer(c, fin, wts, exp);
    st0 = nstall;
    @(negedge clk);
    cfg = c; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    steps = int'(c.nif) * ((noy + 7) / 8) * ((nox + 7) / 8) * int'(c.nkx) * int'(c.nky);
    checks++;
    if (cyc < steps || cyc > steps + (nstall - st0) + 20) begin
      failures++; $display("%s: %0d cycles for %0d steps", name, cyc, steps);
    end
    foreach (exp[i]) begin
      checks++;
      if (fout[i] !== exp[i]) begin
        failures++;
        if (failures < 6) $display("%s: out[%0d] = %0d, expected %0d", name, i,
                                   $signed(fout[i]), $signed(exp[i]));
      end
    end
    $display("%s: %0d cycles, %0d steps, %0d outputs", name, cyc, steps, exp.size());
  endtask

  initial begin
    layer_cfg_t c;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    c = mk_cfg(ENG_DWCV, 10, 9, 3, 3, 3, 1, 1, 4); c.relu = 1;
    run(c, "dw3x3");
    c = mk_cfg(ENG_DWCV, 12, 12, 2, 2, 31, 1, 15, 8);
    run(c, "dw31x31");
    c = mk_cfg(ENG_DWCV, 13, 13, 2, 2, 5, 2, 2, 5);
    run(c, "dw5x5s2");
    c = mk_cfg(ENG_POOL, 12, 11, 3, 3, 3, 2, 1, 0);
    run(c, "maxpool3x3s2");
    c = mk_cfg(ENG_POOL, 16, 16, 2, 2, 2, 2, 0, 0);
    run(c, "maxpool2x2s2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
