// mac_cube: the PE array of PX x PY x PF multiply-accumulate units.
//
// Lane f (one kernel map / output channel) has PY x PX MACs that all multiply the
// lane's weight `w[f]` by the shared pixel window `win`; the window is the same for
// every lane, so each pixel is broadcast to PF MACs and each weight to PX*PY MACs.
// Operands are signed 8-bit, accumulators ACCW bits. On a cycle with `en` each
// accumulator adds its product, or starts from the product when `clr` is set
// (first step of an output block). `acc` is valid the cycle after the last step.
// The array shape and the 8-bit operands follow the paper; the accumulator width is
// this design's choice.
module mac_cube
  import acc_pkg::*;
#(
  parameter int unsigned PX = POX,
  parameter int unsigned PY = POY,
  parameter int unsigned PF = POF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic                          clr,
  input  logic [PY-1:0][PX-1:0][DW-1:0] win,
  input  logic [PF-1:0][DW-1:0]         w,
  output logic [PF-1:0][PY-1:0][PX-1:0][ACCW-1:0] acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (en) begin
      for (int f = 0; f < int'(PF); f++) begin
        for (int y = 0; y < int'(PY); y++) begin
          for (int x = 0; x < int'(PX); x++) begin
            acc[f][y][x] <= (clr ? '0 : acc[f][y][x])
                            + ACCW'($signed(win[y][x]) * $signed(w[f]));
          end
        end
      end
    end
  end

endmodule
