// tb_mac_cube: checks the 8 x 8 x 16 MAC array.
//
// Runs several accumulation sequences of random length with random signed pixels
// and weights (including -128 and 127 corner values), with idle cycles in between,
// and compares every accumulator with a sum computed in the testbench.
module tb_mac_cube;
  import acc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic en = 1'b0, clr = 1'b0;
  logic [POY-1:0][POX-1:0][DW-1:0] win = '0;
  logic [POF-1:0][DW-1:0] w = '0;
  logic [POF-1:0][POY-1:0][POX-1:0][ACCW-1:0] acc;

  mac_cube dut (.clk, .rst_n, .en, .clr, .win, .w, .acc);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] rnd8();
    int r;
    r = $urandom_range(9);
    if (r == 0) return 8'h80;
    if (r == 1) return 8'h7f;
    return 8'($urandom);
  endfunction

  initial begin
    longint model [POF][POY][POX];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int seq = 0; seq < 12; seq++) begin
      int len;
      len = 1 + $urandom_range(40);
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        en = 1'b1; clr = (t == 0);
        for (int y = 0; y < int'(POY); y++)
          for (int x = 0; x < int'(POX); x++) win[y][x] = rnd8();
        for (int f = 0; f < int'(POF); f++) w[f] = rnd8();
        for (int f = 0; f < int'(POF); f++)
          for (int y = 0; y < int'(POY); y++)
            for (int x = 0; x < int'(POX); x++) begin
              if (t == 0) model[f][y][x] = 0;
              model[f][y][x] += longint'($signed(win[y][x])) * longint'($signed(w[f]));
            end
        if ($urandom_range(3) == 0) begin
          @(negedge clk);
          en = 1'b0;       // idle cycle: accumulators must hold
          win = '1;
        end
      end
      @(negedge clk);
      en = 1'b0;
      for (int f = 0; f < int'(POF); f++)
        for (int y = 0; y < int'(POY); y++)
          for (int x = 0; x < int'(POX); x++) begin
            checks++;
            if ($signed(acc[f][y][x]) != model[f][y][x]) begin
              failures++;
              if (failures < 5) $display("acc[%0d][%0d][%0d] = %0d, expected %0d", f, y, x,
                                         $signed(acc[f][y][x]), model[f][y][x]);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
