// tb_out_drain: checks requantisation, staging and the row-wise output writes.
//
// Captures random accumulator blocks (values spread so that shift, ReLU and both
// saturation limits occur) with random lane channels, partial lane/row counts and a
// partial last column block, then compares every write -- address, byte enables
// and data -- with the expected rows, and checks that the drain takes exactly
// nlanes * nrows cycles.
module tb_out_drain;
  import acc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int LW = $clog2(POF + 1);
  localparam int RW = $clog2(POY + 1);

  logic cap = 1'b0, relu = 1'b0, busy, wr_en;
  logic [POF-1:0][POY-1:0][POX-1:0][ACCW-1:0] acc = '0;
  logic [4:0] shift = '0;
  logic [POF-1:0][DIM_W-1:0] och = '0;
  logic [LW-1:0] nlanes = '0;
  logic [RW-1:0] nrows = '0;
  logic [DIM_W-1:0] oy0 = '0, ox0 = '0, nox = '0;
  logic [FBUF_AW-1:0] plane = '0, wr_addr;
  logic [POX-1:0][DW-1:0] wr_data;
  logic [POX-1:0] wr_be;

  out_drain dut (.clk, .rst_n, .cap, .acc, .shift, .relu, .och, .nlanes, .nrows, .oy0, .ox0,
                 .nox, .plane, .busy, .wr_en, .wr_addr, .wr_data, .wr_be);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] q(input longint a, input int sh, input bit rl);
    longint v;
    v = a >>> sh;
    if (rl && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return 8'(v);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int blk = 0; blk < 6; blk++) begin
      int nl, nr, cycles;
      @(negedge clk);
      nl = 1 + $urandom_range(POF - 1);
      nr = 1 + $urandom_range(POY - 1);
      for (int f = 0; f < int'(POF); f++) begin
        och[f] = DIM_W'($urandom_range(40));
        for (int y = 0; y < int'(POY); y++)
          for (int x = 0; x < int'(POX); x++)
            acc[f][y][x] = ACCW'($urandom_range(40000) - 20000);
      end
      shift = 5'($urandom_range(8)); relu = 1'($urandom);
      nlanes = LW'(nl); nrows = RW'(nr);
      nox = DIM_W'(20); ox0 = DIM_W'((blk % 3) * 8); oy0 = DIM_W'(8 * (blk % 2));
      plane = FBUF_AW'(20 * 20);
      cap = 1'b1;
      @(negedge clk);
      cap = 1'b0;
      cycles = 0;
      for (int f = 0; f < nl; f++)
        for (int y = 0; y < nr; y++) begin
          checks++;
          if (!wr_en || wr_addr != FBUF_AW'(int'(och[f]) * 400 + (int'(oy0) + y) * 20 + int'(ox0))) begin
            failures++; $display("row address lane %0d row %0d: %0d", f, y, wr_addr);
          end
          for (int x = 0; x < int'(POX); x++) begin
            checks++;
            if (wr_be[x] != (int'(ox0) + x < 20) ||
                wr_data[x] != q(longint'($signed(acc[f][y][x])), int'(shift), relu)) begin
              failures++;
              if (failures < 8) $display("lane %0d row %0d col %0d: %0d", f, y, x, $signed(wr_data[x]));
            end
          end
          @(negedge clk);
          cycles++;
        end
      checks++;
      if (busy || wr_en) begin failures++; $display("drain longer than nlanes*nrows"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
