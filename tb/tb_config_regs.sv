// tb_config_regs: checks the configuration registers and the layer selector.
//
// Writes random descriptors for all layers word by word and reads every pair of
// (current, next) layers back through the two selector ports as layer_cfg_t.
module tb_config_regs;
  import acc_pkg::*;

  localparam int NL = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_en = 0;
  logic [$clog2(NL*CFG_WORDS)-1:0] wr_addr = '0;
  logic [31:0] wr_data = '0;
  logic [$clog2(NL)-1:0] sel_cur = '0, sel_nxt = '0;
  layer_cfg_t cfg_cur, cfg_nxt;

  config_regs #(.NL(NL)) dut (.*);

  int checks = 0, failures = 0;
  logic [CFG_WORDS*32-1:0] model [NL];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      for (int w = 0; w < int'(CFG_WORDS); w++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = $bits(wr_addr)'(l * CFG_WORDS + w); wr_data = $urandom;
        model[l][w*32 +: 32] = wr_data;
      end
    end
    @(negedge clk);
    wr_en = 0;
    for (int l = 0; l < NL; l++) begin
      sel_cur = $bits(sel_cur)'(l); sel_nxt = $bits(sel_nxt)'((l + 1) % NL);
      #1;
      checks += 2;
      if (cfg_cur !== layer_cfg_t'(model[l])) failures++;
      if (cfg_nxt !== layer_cfg_t'(model[(l + 1) % NL])) failures++;
      // spot-check one field through the struct
      checks++;
      if (cfg_cur.nix !== model[l][$bits(layer_cfg_t) - 1 - 2 - 1 - 5 - 3 - 4 - 1 - 2 - 4 - 12 -: 12])
        failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
