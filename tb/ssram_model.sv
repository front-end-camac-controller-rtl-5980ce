// ssram_model: behavioural model of the DMA memory's synchronous SRAM
// (testbench only).
//
// One logical 32-bit port standing for the interleaved pipelined SSRAM
// parts. A request registered by the controller (en, we, addr, wdata) is
// performed at the next clock edge; read data appear LAT-1 clocks after
// that edge, so the controller sees them LAT clocks after its grant.
// Only the low AW address bits are stored, to keep the model small.
module ssram_model #(
  parameter int unsigned AW  = 14,
  parameter int unsigned LAT = 2
) (
  input  logic        clk,
  input  logic        en,
  input  logic        we,
  input  logic [19:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata
);
  logic [31:0] mem [2**AW];
  logic [31:0] pipe [LAT];
  initial for (int i = 0; i < 2**AW; i++) mem[i] = 32'h0;
  initial for (int i = 0; i < LAT; i++) pipe[i] = 32'h0;

  always @(posedge clk) begin
    if (en && we) mem[addr[AW-1:0]] <= wdata;
    pipe[0] <= (en && !we) ? mem[addr[AW-1:0]] : 32'hDEAD_BEEF;
    for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
  end
  assign rdata = pipe[LAT-2];
endmodule
