// sp_sram: single-port synchronous SRAM, one read or one write per cycle.
//
// Stands for each of the four SRAM blocks of a PE (Accumulated Weights,
// Neuron, Weights, Spike Address). The paper says the SRAMs are
// single-ported; their sizes come from its per-PE table. Read data appears
// one cycle after en with we=0 and holds until the next read. Contents are
// not reset: every location is written during programming before use.
module sp_sram #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 32,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
