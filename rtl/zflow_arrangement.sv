// zflow_arrangement: pre-processing data arrangement of the Z-flow method.
//
// A PY x PX array of pixel registers, one per output position of the block, whose
// outputs feed the PE array. Depending on the step's operation it
//   ZF_LOAD : loads all PY x PX pixels read from the input buffer,
//   ZF_SHL  : takes each pixel from its right neighbour; column PX-1 is read anew,
//   ZF_SHR  : (mirrored kernel row) takes each pixel from its left neighbour;
//             column 0 is read anew,
//   ZF_SHU  : (inflection point) takes each pixel from the register one row below;
//             row PY-1 is read anew,
//   ZF_HOLD : keeps its contents.
// So after the first load of a sub-kernel only PY (or PX) new pixels per cycle come
// from the buffer; all others are reused. `rd_need` tells the address generator
// which buffer pixels are actually read in this step. The pixel from the buffer
// (`rd_data`) is taken in the same cycle as the operation; the window is valid
// the cycle after. Reuse directions follow the paper's Z-flow description; the
// encoding of the operations is this design's own.
module zflow_arrangement
  import acc_pkg::*;
#(
  parameter int unsigned PX = POX,
  parameter int unsigned PY = POY
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  zf_op_e                    op,
  input  logic [PY-1:0][PX-1:0][DW-1:0] rd_data,  // buffer pixels at the new positions
  output logic [PY-1:0][PX-1:0]     rd_need,      // positions whose pixel comes from the buffer
  output logic [PY-1:0][PX-1:0][DW-1:0] win
);

  always_comb begin
    rd_need = '0;
    for (int y = 0; y < int'(PY); y++) begin
      for (int x = 0; x < int'(PX); x++) begin
        unique case (op)
          ZF_LOAD: rd_need[y][x] = 1'b1;
          ZF_SHL:  rd_need[y][x] = (x == int'(PX) - 1);
          ZF_SHR:  rd_need[y][x] = (x == 0);
          ZF_SHU:  rd_need[y][x] = (y == int'(PY) - 1);
          default: rd_need[y][x] = 1'b0;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win <= '0;
    end else begin
      for (int y = 0; y < int'(PY); y++) begin
        for (int x = 0; x < int'(PX); x++) begin
          if (rd_need[y][x]) begin
            win[y][x] <= rd_data[y][x];
          end else begin
            unique case (op)
              ZF_SHL:  win[y][x] <= win[y][x+1];
              ZF_SHR:  win[y][x] <= win[y][x-1];
              ZF_SHU:  win[y][x] <= win[y+1][x];
              default: win[y][x] <= win[y][x];
            endcase
          end
        end
      end
    end
  end

endmodule
