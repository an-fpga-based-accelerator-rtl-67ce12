// tb_weight_buffer: checks the ping-pong weight buffer.
//
// Fills bank 0 and bank 1 with different random contents, then, while rewriting
// bank 1 with new data (the prefetch case), reads bank 0 on all lane ports at random
// addresses; finally reads bank 1 and checks the new contents.
module tb_weight_buffer;
  import acc_pkg::*;

  localparam int AW = 10;
  localparam int NRD = 16;
  localparam int WB = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic dw_en = 0, dw_bank = 0, rd_bank = 0;
  logic [AW-1:0] dw_addr = '0;
  logic [WB-1:0][DW-1:0] dw_data = '0;
  logic [WB-1:0] dw_be = '0;
  logic [NRD-1:0][AW-1:0] rd_addr = '0;
  logic [NRD-1:0][DW-1:0] rd_data;

  weight_buffer #(.AW(AW), .NRD(NRD), .WB(WB)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] shadow [2][2**AW];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input int b);
    for (int a = 0; a < 2**AW; a += WB) begin
      @(negedge clk);
      dw_en = 1; dw_bank = 1'(b); dw_addr = AW'(a); dw_be = '1;
      for (int i = 0; i < WB; i++) begin dw_data[i] = 8'($urandom); shadow[b][a+i] = dw_data[i]; end
      // read the other bank meanwhile
      rd_bank = 1'(!b);
      for (int i = 0; i < NRD; i++) rd_addr[i] = AW'($urandom);
      #1;
      for (int i = 0; i < NRD; i++) begin
        checks++;
        if (rd_data[i] !== shadow[!b][rd_addr[i]]) failures++;
      end
    end
    @(negedge clk);
    dw_en = 0;
  endtask

  initial begin
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < 2**AW; a++) shadow[b][a] = 8'h00;
    // initialise bank 0 so the first reads are defined
    for (int a = 0; a < 2**AW; a += WB) begin
      @(negedge clk);
      dw_en = 1; dw_bank = 0; dw_addr = AW'(a); dw_be = '1; dw_data = '0;
    end
    fill(1);
    fill(0);
    fill(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
