// tb_zflow_arrangement: checks the pixel register array against a plain model.
//
// Applies 2000 random operations (load, shift left, shift right, shift up, hold)
// with random buffer data and compares the window with an independently updated
// copy after every cycle; also checks that only the entering column or row is
// requested from the buffer (rd_need).
module tb_zflow_arrangement;
  import acc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  zf_op_e op = ZF_HOLD;
  logic [POY-1:0][POX-1:0][DW-1:0] rd_data = '0, win, model;
  logic [POY-1:0][POX-1:0] rd_need;

  zflow_arrangement dut (.clk, .rst_n, .op, .rd_data, .rd_need, .win);

  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [POY-1:0][POX-1:0][DW-1:0] nxt;
    int nreq;
    model = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      op = (t == 0) ? ZF_LOAD : zf_op_e'($urandom_range(4));
      for (int y = 0; y < int'(POY); y++)
        for (int x = 0; x < int'(POX); x++) rd_data[y][x] = 8'($urandom);
      #1;
      nreq = $countones(rd_need);
      checks++;
      if (nreq != (op == ZF_LOAD ? POX * POY : op == ZF_HOLD ? 0 :
                   op == ZF_SHU ? POX : POY)) begin
        failures++; $display("rd_need count %0d for op %s", nreq, op.name());
      end
      for (int y = 0; y < int'(POY); y++)
        for (int x = 0; x < int'(POX); x++) begin
          case (op)
            ZF_LOAD: nxt[y][x] = rd_data[y][x];
            ZF_SHL:  nxt[y][x] = (x == int'(POX) - 1) ? rd_data[y][x] : model[y][x+1];
            ZF_SHR:  nxt[y][x] = (x == 0) ? rd_data[y][x] : model[y][x-1];
            ZF_SHU:  nxt[y][x] = (y == int'(POY) - 1) ? rd_data[y][x] : model[y+1][x];
            default: nxt[y][x] = model[y][x];
          endcase
        end
      @(posedge clk);
      #1;
      model = nxt;
      checks++;
      if (win !== model) begin
        failures++;
        if (failures < 5) $display("window mismatch after op %s", op.name());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
