// dma_slot_arbiter: time-slice arbiter for the DMA memory.
//
// The DMA memory performs one 32-bit access per clock (four interleaved
// 32-bit synchronous SRAM parts, 500 MB/s at 125 MHz). A free-running
// 4-bit slot counter walks a 16-entry table; in each cycle only the owner
// named by the table may use the memory. The paper fixes the shares of the
// FECC2 (4/16 link transmit, 4/16 link receive, 4/16 IEEE CAMAC, 1/16 SLAC
// CAMAC, 3/16 SHARC); the order of the table is this design's choice, with
// the link and IEEE slots every fourth cycle so that a 125 MB/s byte
// stream is served at exactly one word per four clocks. The PCIL2 table
// (9/16 PCI, 2/16 each link direction, 3/16 SHARC) can be given through
// SLOT_TABLE. Slicing is strict: an idle owner's slot is not lent out,
// which keeps every owner's bandwidth and latency fixed.
//
// Interface: req_i[o].valid is held until gnt_o[o]; the access goes to the
// memory in the granted cycle. For a read, rvalid_o[o]/rdata_o arrive
// RD_LAT cycles after the grant (pipelined SSRAM). Memory port: mem_en,
// mem_we, mem_addr, mem_wdata registered out, mem_rdata back RD_LAT-1
// cycles after the registered request.
module dma_slot_arbiter
  import fecc_pkg::*;
#(
  parameter int unsigned NSLOT  = 16,
  parameter int unsigned RD_LAT = 2,
  // Owner of each slot, slot 0 in bits [2:0].
  parameter logic [3*NSLOT-1:0] SLOT_TABLE = {
    OWN_SLAC,  OWN_IEEE, OWN_LINK_RX, OWN_LINK_TX,
    OWN_SHARC, OWN_IEEE, OWN_LINK_RX, OWN_LINK_TX,
    OWN_SHARC, OWN_IEEE, OWN_LINK_RX, OWN_LINK_TX,
    OWN_SHARC, OWN_IEEE, OWN_LINK_RX, OWN_LINK_TX }
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  dma_req_t                 req_i   [N_OWNERS],
  output logic [N_OWNERS-1:0]      gnt_o,
  output logic [N_OWNERS-1:0]      rvalid_o,
  output logic [DMA_DW-1:0]        rdata_o,
  output logic [$clog2(NSLOT)-1:0] slot_o,
  // synchronous SRAM port
  output logic                     mem_en,
  output logic                     mem_we,
  output dma_addr_t                mem_addr,
  output logic [DMA_DW-1:0]        mem_wdata,
  input  logic [DMA_DW-1:0]        mem_rdata
);

  localparam int unsigned SW = $clog2(NSLOT);

  logic [SW-1:0] slot_q;
  logic [2:0]    owner;
  logic [N_OWNERS-1:0] rd_pipe [RD_LAT];

  assign owner  = SLOT_TABLE[3*slot_q +: 3];
  assign slot_o = slot_q;

  always_comb begin
    gnt_o = '0;
    for (int o = 0; o < N_OWNERS; o++)
      if (owner == 3'(o) && req_i[o].valid) gnt_o[o] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_q    <= '0;
      mem_en    <= 1'b0;
      mem_we    <= 1'b0;
      mem_addr  <= '0;
      mem_wdata <= '0;
      for (int i = 0; i < RD_LAT; i++) rd_pipe[i] <= '0;
    end else begin
      slot_q <= (slot_q == SW'(NSLOT-1)) ? '0 : slot_q + 1'b1;
      mem_en <= |gnt_o;
      mem_we <= 1'b0;
      for (int o = 0; o < N_OWNERS; o++)
        if (gnt_o[o]) begin
          mem_we    <= req_i[o].we;
          mem_addr  <= req_i[o].addr;
          mem_wdata <= req_i[o].wdata;
        end
      rd_pipe[0] <= '0;
      for (int o = 0; o < N_OWNERS; o++)
        rd_pipe[0][o] <= gnt_o[o] && !req_i[o].we;
      for (int i = 1; i < RD_LAT; i++) rd_pipe[i] <= rd_pipe[i-1];
    end
  end

  assign rvalid_o = rd_pipe[RD_LAT-1];
  assign rdata_o  = mem_rdata;

  // At most one owner is granted per cycle.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt_o));

endmodule
