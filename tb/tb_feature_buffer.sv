// tb_feature_buffer: checks the two-bank feature buffer.
//
// Writes random words through the DMA port and the engine port (both in the same
// cycle, to different banks), with random byte enables, into a shadow copy, then
// reads everything back through the window port (with enables) and the DMA read
// port, and checks that the two banks are independent.
module tb_feature_buffer;
  import acc_pkg::*;

  localparam int AW = 10;     // small banks keep the test short
  localparam int NRD = 16;
  localparam int WB = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic dw_en = 0, dw_bank = 0, ew_en = 0, ew_bank = 0, win_bank = 0, dr_bank = 0;
  logic [AW-1:0] dw_addr = '0, ew_addr = '0, dr_addr = '0;
  logic [WB-1:0][DW-1:0] dw_data = '0, ew_data = '0, dr_data;
  logic [WB-1:0] dw_be = '0, ew_be = '0;
  logic [NRD-1:0] win_en = '0;
  logic [NRD-1:0][AW-1:0] win_addr = '0;
  logic [NRD-1:0][DW-1:0] win_data;

  feature_buffer #(.AW(AW), .NRD(NRD), .WB(WB)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] shadow [2][2**AW];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill both banks completely first
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < 2**AW; a += WB) begin
        @(negedge clk);
        dw_en = 1; dw_bank = 1'(b); dw_addr = AW'(a); dw_be = '1;
        for (int i = 0; i < WB; i++) begin dw_data[i] = 8'($urandom); shadow[b][a+i] = dw_data[i]; end
      end
    // random partial writes on both ports at once
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      dw_en = 1; dw_bank = 1'($urandom); dw_addr = AW'($urandom_range(2**AW - WB));
      ew_en = 1; ew_bank = !dw_bank;     ew_addr = AW'($urandom_range(2**AW - WB));
      dw_be = WB'($urandom); ew_be = WB'($urandom);
      for (int i = 0; i < WB; i++) begin
        dw_data[i] = 8'($urandom); ew_data[i] = 8'($urandom);
        if (dw_be[i]) shadow[dw_bank][int'(dw_addr) + i] = dw_data[i];
        if (ew_be[i]) shadow[ew_bank][int'(ew_addr) + i] = ew_data[i];
      end
    end
    @(negedge clk);
    dw_en = 0; ew_en = 0;
    // read back
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      win_bank = 1'($urandom); dr_bank = 1'($urandom);
      dr_addr = AW'($urandom_range(2**AW - WB));
      for (int i = 0; i < NRD; i++) begin
        win_en[i] = 1'($urandom); win_addr[i] = AW'($urandom);
      end
      #1;
      for (int i = 0; i < NRD; i++) begin
        checks++;
        if (win_data[i] !== (win_en[i] ? shadow[win_bank][win_addr[i]] : 8'h00)) failures++;
      end
      for (int i = 0; i < WB; i++) begin
        checks++;
        if (dr_data[i] !== shadow[dr_bank][int'(dr_addr) + i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
