// dram_model: behavioural model of the external memory, for simulation only.
//
// A byte array of 2**AW bytes behind the accelerator's memory port. Requests are
// granted on a pseudo-random pattern (about three cycles in four when `stall_en`),
// read data return in order LAT cycles after the grant, writes honour the byte mask.
// The testbench reads and writes `mem` directly to place inputs and check outputs.
module dram_model
  import acc_pkg::*;
#(
  parameter int unsigned AW  = 20,
  parameter int unsigned LAT = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         stall_en,
  input  logic                         m_req,
  input  logic                         m_we,
  input  logic [MADDR_W-1:0]           m_addr,
  input  logic [BUS_BYTES-1:0][DW-1:0] m_wdata,
  input  logic [BUS_BYTES-1:0]         m_be,
  output logic                         m_gnt,
  output logic                         m_rvalid,
  output logic [BUS_BYTES-1:0][DW-1:0] m_rdata
);

  logic [DW-1:0] mem [2**AW];
  logic [LAT-1:0] vpipe;
  logic [LAT-1:0][BUS_BYTES-1:0][DW-1:0] dpipe;
  logic [15:0] lfsr;

  assign m_gnt = !stall_en || (lfsr[1:0] != 2'b00);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe <= '0; dpipe <= '0; lfsr <= 16'hACE1;
    end else begin
      lfsr  <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      vpipe <= {vpipe[LAT-2:0], m_req && m_gnt && !m_we};
      dpipe[LAT-1:1] <= dpipe[LAT-2:0];
      for (int b = 0; b < int'(BUS_BYTES); b++) begin
        dpipe[0][b] <= mem[(AW)'(m_addr) + AW'(b)];
        if (m_req && m_gnt && m_we && m_be[b]) mem[(AW)'(m_addr) + AW'(b)] <= m_wdata[b];
      end
    end
  end

  assign m_rvalid = vpipe[LAT-1];
  assign m_rdata  = dpipe[LAT-1];

endmodule
