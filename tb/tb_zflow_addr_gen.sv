// tb_zflow_addr_gen: checks the Z-flow / Kseg step sequence.
//
// For several kernel sizes (1, 3, 7, 17 and 19 wide -- the last two are split into
// sub-kernels), strides 1 and 2 and channel counts it records every emitted step and
// checks: each (channel, ky, kx) appears exactly once; a shift-left step moves kx up
// by the stride in the same row, shift-right down, shift-up moves ky by the stride
// in the same column; a block takes exactly nch * nkx * nky cycles with no bubble
// between two back-to-back blocks; `first`/`last` mark the ends; the number of
// full-window loads equals the channels x stride phases x sub-kernels worked out
// from the Kseg rule (cut Pox-wide pieces while more than 2*Pox remain).
module tb_zflow_addr_gen;
  import acc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, hold = 1'b0;
  logic [KW-1:0] nkx = '0, nky = '0;
  logic [1:0] stride = 2'd1;
  logic [DIM_W-1:0] nch = '0;
  logic valid, first, last, seg_start;
  zf_op_e op;
  logic [KW-1:0] kx, ky;
  logic [DIM_W-1:0] ch;

  zflow_addr_gen dut (.clk, .rst_n, .start, .nkx, .nky, .stride, .nch, .hold,
                      .valid, .op, .kx, .ky, .ch, .first, .last, .seg_start);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int nseg(input int l, input int u);
    int s = 0, n = 0;
    while (s < l) begin
      s += (l - s > 2 * u) ? u : (l - s);
      n++;
    end
    return n;
  endfunction

  task automatic run(input int kxn, input int kyn, input int s, input int chn, input int reps);
    int seen[int];
    int steps = 0, loads = 0, exp_loads = 0, cyc = 0, pkx, pky, firsts = 0, lasts = 0;
    zf_op_e pop;
    @(negedge clk);
    nkx = KW'(kxn); nky = KW'(kyn); stride = 2'(s); nch = DIM_W'(chn); start = 1'b1;
    for (int r = 0; r < reps; r++) begin
      do begin
        @(posedge clk);
        #1;
        cyc++;
        chk(valid, "valid drops inside a block");
        if (op == ZF_LOAD) loads++;
        else begin
          case (op)
            ZF_SHL: chk(int'(kx) == pkx + s && int'(ky) == pky, "shift-left step");
            ZF_SHR: chk(int'(kx) == pkx - s && int'(ky) == pky, "shift-right step");
            ZF_SHU: chk(int'(ky) == pky + s && int'(kx) == pkx, "shift-up step");
            default: chk(0, "unexpected op");
          endcase
        end
        if (first) firsts++;
        if (last) lasts++;
        seen[(r * 4096 + int'(ch)) * 4096 + int'(ky) * 64 + int'(kx)]++;
        pkx = int'(kx); pky = int'(ky); pop = op;
        steps++;
        if (last && r == reps - 1) start = 1'b0;
      end while (!last);
    end
    @(negedge clk);
    start = 1'b0;
    for (int p = 0; p < s * s; p++) begin
      int lx, ly, px, py;
      px = p % s; py = p / s;
      lx = (s == 1) ? kxn : (kxn - px + 1) / 2;
      ly = (s == 1) ? kyn : (kyn - py + 1) / 2;
      if (lx > 0 && ly > 0) exp_loads += nseg(lx, POX) * nseg(ly, POY);
    end
    exp_loads *= chn * reps;
    chk(steps == reps * chn * kxn * kyn, $sformatf("step count %0d", steps));
    chk(cyc == steps, "bubbles between blocks");
    chk(seen.num() == steps, "a kernel position repeated");
    chk(loads == exp_loads, $sformatf("window loads %0d expected %0d", loads, exp_loads));
    chk(firsts == reps && lasts == reps, "first/last markers");
    @(negedge clk);
    chk(!valid, "idle after the last block");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(3, 3, 1, 2, 2);
    run(1, 1, 1, 5, 3);
    run(7, 7, 1, 1, 1);
    run(19, 19, 1, 1, 1);
    run(17, 5, 1, 2, 1);
    run(3, 3, 2, 2, 1);
    run(7, 7, 2, 1, 2);
    run(31, 31, 1, 1, 1);
    // hold freezes the sequence
    @(negedge clk);
    nkx = 3; nky = 3; stride = 1; nch = 1; start = 1'b1;
    @(negedge clk);
    start = 1'b0; hold = 1'b1;
    begin
      logic [KW-1:0] k0;
      k0 = kx;
      repeat (3) @(negedge clk);
      chk(kx == k0 && valid, "hold keeps the step");
    end
    hold = 1'b0;
    wait (last);
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
