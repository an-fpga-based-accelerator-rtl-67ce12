// tb_conv_engine: checks the CONV module alone against the reference model.
//
// The testbench plays the feature and weight buffers (combinational reads from
// arrays, writes captured into an output array) and runs five layers: a 3x3
// convolution with a partial lane chunk, a 1x1 convolution (drain stalls), a 3x3
// stride-2 convolution, a 17x17 kernel (Kseg), and a two-group two-branch HF layer.
// Outputs are compared with tb_ref_pkg; the cycle count from start to done must lie
// between the number of MAC steps given by the closed form and that number plus
// the stall cycles and a small pipeline tail.
module tb_conv_engine;
  import acc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done, stall, seg_event, wr_en;
  layer_cfg_t cfg = '0;
  logic [POY*POX-1:0] px_en;
  logic [POY*POX-1:0][FBUF_AW-1:0] px_addr;
  logic [POY*POX-1:0][DW-1:0] px_data;
  logic [POF-1:0][WBUF_AW-1:0] w_addr;
  logic [POF-1:0][DW-1:0] w_data;
  logic [FBUF_AW-1:0] wr_addr;
  logic [POX-1:0][DW-1:0] wr_data;
  logic [POX-1:0] wr_be;

  conv_engine dut (.clk, .rst_n, .start, .cfg, .busy, .done, .stall, .seg_event,
                   .px_en, .px_addr, .px_data, .w_addr, .w_data,
                   .wr_en, .wr_addr, .wr_data, .wr_be);

  logic [7:0] fin[], wts[], fout[];

  always_comb begin
    for (int i = 0; i < int'(POY * POX); i++)
      px_data[i] = (px_en[i] && int'(px_addr[i]) < fin.size()) ? fin[px_addr[i]] : 8'h00;
    for (int f = 0; f < int'(POF); f++)
      w_data[f] = (int'(w_addr[f]) < wts.size()) ? wts[w_addr[f]] : 8'h00;
  end
  always @(posedge clk)
    if (wr_en)
      for (int x = 0; x < int'(POX); x++) begin
        int a;
        a = int'(wr_addr) + x;
        if (wr_be[x] && a < fout.size()) fout[a] = wr_data[x];
      end

  int checks = 0, failures = 0, nstall = 0, nseg = 0;
  always @(posedge clk) begin
    if (stall) nstall++;
    if (seg_event) nseg++;
  end
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
    foreach (fin[i]) fin[i] = 8'($urandom_range(40) - 20);
    wts = new[wbytes(c)];
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
    steps = int'(c.groups) * ((int'(c.noft) + 15) / 16) * ((noy + 7) / 8) * ((nox + 7) / 8)
            * int'(c.nifg) * int'(c.nkx) * int'(c.nky);
    checks++;
    if (cyc < steps || cyc > steps + (nstall - st0) + 140) begin
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
    $display("%s: %0d cycles, %0d MAC steps, %0d outputs", name, cyc, steps, exp.size());
  endtask

  initial begin
    layer_cfg_t c;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    c = mk_cfg(ENG_CONV, 11, 10, 5, 20, 3, 1, 1, 5); c.relu = 1;
    run(c, "conv3x3");
    c = mk_cfg(ENG_CONV, 16, 9, 3, 16, 1, 1, 0, 2);
    run(c, "conv1x1");
    c = mk_cfg(ENG_CONV, 15, 15, 3, 8, 3, 2, 1, 4);
    run(c, "conv3x3s2");
    c = mk_cfg(ENG_CONV, 12, 12, 2, 4, 17, 1, 8, 7);
    run(c, "conv17x17");
    c = mk_cfg(ENG_CONV, 9, 9, 6, 10, 3, 1, 1, 5);
    c.groups = 2; c.nifg = 3; c.nbr = 2; c.noft = 5;
    c.br[0].nofg = 1; c.br[0].och_base = 0; c.br[1].nofg = 4; c.br[1].och_base = 2;
    run(c, "hf");
    checks++;
    if (nstall == 0 || nseg == 0) begin
      failures++; $display("no stall (%0d) or no sub-kernel (%0d) seen", nstall, nseg);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
