// fecc2_top: FPGA logic of the second-generation Front End CAMAC
// Controller (FECC2).
//
// The FECC2 sits near the CAMAC crates and is tied to the control
// computer's PCI link board by a full-duplex gigabit fibre link. Its FPGA
// joins four parts around one DMA memory:
//   - dma_slot_arbiter: 16-slot time slicing of the DMA memory,
//     4/16 link transmit, 4/16 link receive, 4/16 IEEE CAMAC,
//     1/16 SLAC CAMAC, 3/16 SHARC (the paper's shares);
//   - link_tx / link_rx: cells of 32 interleaved RS(19,11) codewords,
//     trigger > synchronous > asynchronous at every cell boundary,
//     16-deep pointer rings per class;
//   - eight camac_unit instances, cables 0..3 for SLAC serial strings and
//     4..7 for IEEE serial highways, each with a synchronous and an
//     asynchronous context and one-cycle preemption;
//   - a register port for the SHARC DSP, which also has its own DMA slots.
// The SHARC, the synchronous SRAM, the serializer, the cable protocol
// engines and the BITBUS master are outside this logic; their signals
// are ports. Everything runs on the 125 MHz link clock.
//
// SHARC register map (word addresses; this design's own):
//   0x000/0x001  W  transmit message, async/sync  {words[31:20], addr[19:0]}
//   0x002/0x003  W  receive buffer, async/sync    {capacity[31:20], addr}
//   0x004/0x005  R  receive completion head, async/sync (bit 31 valid,
//                   [11:0] words);  W  remove that completion
//   0x008..0x00B W  trigger pattern to send, word 0..3;  0x00C W send it
//   0x010..0x013 R  last trigger pattern received, word 0..3
//   0x014        R  {bad cells, cells lost for want of a buffer}
//   0x015        R  {cells dropped by the decoder, bytes corrected}
//   0x016        R  {26'b0, tx ring full[1:0], link busy, rx cmpl[1:0]... }
//   0x100 + 16*cable + 8*ctx + r  (ctx 0 async, 1 sync):
//     r=0 W {crate[19:14], N[13:9], A[8:5], F[4:0]}   r=1 W DMA address
//     r=2 W {recovery enable[31], A[27:24], pointer base[23:0]}
//     r=3 W word count; writing it starts the transfer
//     r=4 R {busy[1], X missing[0]}
module fecc2_top
  import fecc_pkg::*;
#(
  parameter int unsigned N_SLAC = 4,
  parameter int unsigned N_IEEE = 4,
  parameter int unsigned RD_LAT = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  // SHARC register port
  input  logic         reg_we,
  input  logic [9:0]   reg_addr,
  input  logic [31:0]  reg_wdata,
  output logic [31:0]  reg_rdata,
  // SHARC access to DMA memory
  input  dma_req_t     sharc_req,
  output logic         sharc_gnt,
  output logic         sharc_rvalid,
  output logic [31:0]  sharc_rdata,
  // DMA synchronous SRAM
  output logic         mem_en,
  output logic         mem_we,
  output dma_addr_t    mem_addr,
  output logic [31:0]  mem_wdata,
  input  logic [31:0]  mem_rdata,
  // link serializer / deserializer, one byte per clock
  output logic         tx_valid,
  output logic         tx_sof,
  output logic [7:0]   tx_data,
  input  logic         rx_valid,
  input  logic         rx_sof,
  input  logic [7:0]   rx_data,
  // CAMAC cable protocol engines, SLAC cables first
  output logic        [N_SLAC+N_IEEE-1:0] cyc_req,
  output camac_naf_t  cyc_naf   [N_SLAC+N_IEEE],
  output logic [23:0] cyc_wdata [N_SLAC+N_IEEE],
  input  logic        [N_SLAC+N_IEEE-1:0] cyc_ack,
  input  logic [23:0] cyc_rdata [N_SLAC+N_IEEE],
  input  logic        [N_SLAC+N_IEEE-1:0] cyc_q,
  input  logic        [N_SLAC+N_IEEE-1:0] cyc_x,
  // interrupts and events to the SHARC
  output logic         irq_trig,
  output logic [1:0]   irq_link_tx,
  output logic [1:0]   irq_link_rx,
  output logic [2*(N_SLAC+N_IEEE)-1:0] irq_camac,
  output logic         ev_link_preempt,
  output logic        [N_SLAC+N_IEEE-1:0] ev_camac_preempt,
  output logic        [N_SLAC+N_IEEE-1:0] ev_camac_recov
);

  localparam int unsigned NC = N_SLAC + N_IEEE;

  // ------------------------------------------------------------ arbiter
  dma_req_t            own_req [N_OWNERS];
  logic [N_OWNERS-1:0] own_gnt, own_rv;
  logic [31:0]         own_rdata;
  logic [3:0]          slot_unused;

  dma_slot_arbiter #(.NSLOT(16), .RD_LAT(RD_LAT)) u_arb (
    .clk, .rst_n, .req_i(own_req), .gnt_o(own_gnt), .rvalid_o(own_rv),
    .rdata_o(own_rdata), .slot_o(slot_unused),
    .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata);

  assign own_req[OWN_SHARC] = sharc_req;
  assign sharc_gnt    = own_gnt[OWN_SHARC];
  assign sharc_rvalid = own_rv[OWN_SHARC];
  assign sharc_rdata  = own_rdata;

  // ------------------------------------------------------------ link
  logic [1:0]   tx_push, rx_push, cmpl_pop, tx_full, cmpl_ne;
  logic         trig_go, tx_busy, trig_sent_unused;
  logic [127:0] trig_tx_q, trig_rx;
  logic [31:0]  cmpl_head [2];
  logic [15:0]  bad_cells, lost_cells, fixed_bytes, dropped_cells;

  link_tx u_tx (
    .clk, .rst_n, .push(tx_push), .push_data(ring_entry_t'(reg_wdata)),
    .ring_full(tx_full), .trig_load(trig_go), .trig_pattern(trig_tx_q),
    .dma_req(own_req[OWN_LINK_TX]), .dma_gnt(own_gnt[OWN_LINK_TX]),
    .dma_rvalid(own_rv[OWN_LINK_TX]), .dma_rdata(own_rdata),
    .ser_valid(tx_valid), .ser_sof(tx_sof), .ser_data(tx_data),
    .done(irq_link_tx), .trig_sent(trig_sent_unused),
    .preempt(ev_link_preempt), .busy(tx_busy));

  link_rx u_rx (
    .clk, .rst_n, .ser_valid(rx_valid), .ser_sof(rx_sof), .ser_data(rx_data),
    .rxbuf_push(rx_push), .rxbuf_data(ring_entry_t'(reg_wdata)),
    .cmpl_pop(cmpl_pop), .cmpl_head(cmpl_head), .cmpl_nonempty(cmpl_ne),
    .dma_req(own_req[OWN_LINK_RX]), .dma_gnt(own_gnt[OWN_LINK_RX]),
    .trig_pattern(trig_rx), .trig_irq(irq_trig), .rx_done(irq_link_rx),
    .bad_cells, .lost_cells, .fixed_bytes, .dropped_cells);

  // ------------------------------------------------------------ CAMAC
  dma_req_t    cam_req [NC];
  logic [NC-1:0] cam_gnt, cam_rv;
  logic [1:0]  cam_busy [NC];
  logic [1:0]  cam_err  [NC];
  camac_desc_t stage_q  [NC][2];

  for (genvar k = 0; k < NC; k++) begin : g_cable
    logic [1:0] load;
    for (genvar c = 0; c < 2; c++) begin : g_ctx
      assign load[c] = reg_we && reg_addr[9:8] == 2'b01 &&
                       reg_addr[7:4] == 4'(k) && reg_addr[3] == 1'(c) &&
                       reg_addr[2:0] == 3'd3;
    end
    camac_desc_t d;
    always_comb begin
      d = stage_q[k][reg_addr[3]];
      d.count = reg_wdata[15:0];
    end
    camac_unit u_cam (
      .clk, .rst_n, .desc_load(load), .desc_i(d),
      .busy(cam_busy[k]), .done(irq_camac[2*k +: 2]), .err_nox(cam_err[k]),
      .dma_req(cam_req[k]), .dma_gnt(cam_gnt[k]), .dma_rvalid(cam_rv[k]),
      .dma_rdata(own_rdata),
      .cyc_req(cyc_req[k]), .cyc_naf(cyc_naf[k]), .cyc_wdata(cyc_wdata[k]),
      .cyc_ack(cyc_ack[k]), .cyc_rdata(cyc_rdata[k]), .cyc_q(cyc_q[k]),
      .cyc_x(cyc_x[k]), .preempted(ev_camac_preempt[k]),
      .recovered(ev_camac_recov[k]));
  end

  dma_share #(.N(N_SLAC), .RD_LAT(RD_LAT)) u_share_slac (
    .clk, .rst_n, .req_i(cam_req[0:N_SLAC-1]), .gnt_o(cam_gnt[N_SLAC-1:0]),
    .rvalid_o(cam_rv[N_SLAC-1:0]), .up_req(own_req[OWN_SLAC]),
    .up_gnt(own_gnt[OWN_SLAC]), .up_rvalid(own_rv[OWN_SLAC]));

  dma_share #(.N(N_IEEE), .RD_LAT(RD_LAT)) u_share_ieee (
    .clk, .rst_n, .req_i(cam_req[N_SLAC:NC-1]), .gnt_o(cam_gnt[NC-1:N_SLAC]),
    .rvalid_o(cam_rv[NC-1:N_SLAC]), .up_req(own_req[OWN_IEEE]),
    .up_gnt(own_gnt[OWN_IEEE]), .up_rvalid(own_rv[OWN_IEEE]));

  // ------------------------------------------------------------ registers
  always_comb begin
    tx_push  = '0;
    rx_push  = '0;
    cmpl_pop = '0;
    trig_go  = 1'b0;
    if (reg_we && reg_addr[9:8] == 2'b00) begin
      case (reg_addr[7:0])
        8'h00: tx_push[0]  = 1'b1;
        8'h01: tx_push[1]  = 1'b1;
        8'h02: rx_push[0]  = 1'b1;
        8'h03: rx_push[1]  = 1'b1;
        8'h04: cmpl_pop[0] = 1'b1;
        8'h05: cmpl_pop[1] = 1'b1;
        8'h0C: trig_go     = 1'b1;
        default: ;
      endcase
    end
  end

  localparam int unsigned CW = $clog2(NC);
  logic [CW-1:0] cab;          // cable addressed by reg_addr
  logic          cab_ok;
  assign cab    = reg_addr[4 +: CW];
  assign cab_ok = (reg_addr[9:8] == 2'b01) && (int'(reg_addr[7:4]) < int'(NC));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_tx_q <= '0;
      stage_q   <= '{default: '0};
    end else if (reg_we) begin
      if (reg_addr[9:2] == 8'h02) trig_tx_q[32*reg_addr[1:0] +: 32] <= reg_wdata;
      if (cab_ok) begin
        case (reg_addr[2:0])
          3'd0: stage_q[cab][reg_addr[3]].naf   <= camac_naf_t'(reg_wdata[19:0]);
          3'd1: stage_q[cab][reg_addr[3]].addr  <= reg_wdata[DMA_AW-1:0];
          3'd2: begin
            stage_q[cab][reg_addr[3]].recov_en   <= reg_wdata[31];
            stage_q[cab][reg_addr[3]].recov_a    <= reg_wdata[27:24];
            stage_q[cab][reg_addr[3]].recov_base <= reg_wdata[23:0];
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    reg_rdata = '0;
    if (reg_addr[9:8] == 2'b00) begin
      case (reg_addr[7:0])
        8'h04: reg_rdata = cmpl_ne[0] ? cmpl_head[0] : 32'h0;
        8'h05: reg_rdata = cmpl_ne[1] ? cmpl_head[1] : 32'h0;
        8'h10: reg_rdata = trig_rx[31:0];
        8'h11: reg_rdata = trig_rx[63:32];
        8'h12: reg_rdata = trig_rx[95:64];
        8'h13: reg_rdata = trig_rx[127:96];
        8'h14: reg_rdata = {bad_cells, lost_cells};
        8'h15: reg_rdata = {dropped_cells, fixed_bytes};
        8'h16: reg_rdata = {27'b0, tx_full, tx_busy, cmpl_ne};
        default: ;
      endcase
    end else if (cab_ok && reg_addr[2:0] == 3'd4) begin
      reg_rdata = {30'b0, cam_busy[cab][reg_addr[3]], cam_err[cab][reg_addr[3]]};
    end
  end

endmodule
