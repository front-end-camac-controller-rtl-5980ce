// link_rx: link receiver of the FECC2.
//
// The received cell stream is decoded by cell_decoder. The 32-byte header
// of each good cell is captured and its class decides what happens to the
// payload:
//   trigger  - the first 16 payload bytes are the 128-bit trigger pattern;
//              it is latched in trig_pattern and trig_irq pulses.
//   sync /   - payload words are written into the receive buffer at the
//   async      head of that class's 16-deep ring of buffer pointers, at
//              word offset 80 * (cell number). When the last cell of a
//              message has been stored the buffer is taken off the ring
//              and a completion {status, message length} is put in the
//              class's completion ring; rx_done pulses.
// A cell the decoder could not correct, or one that finds no receive
// buffer or too small a buffer, is discarded and counted (bad_cells,
// lost_cells); the paper's acknowledgement and retransmission, which would
// recover it, are not implemented. The separate rings per class, their
// depth and the trigger forwarding are the paper's; header layout,
// completion format and drop policy are this design's.
//
// DMA: writes go through the link-receive slots, one word at a time. A
// finished word waits in its own register while the next one is
// assembled, and the decoder is held only if a second word is complete
// before the first has had its slot. With a slot every four clocks a
// cell is drained in about 352 clocks, inside the 608-clock cell time.
//
// Interface: ser_* is the cell byte stream from the deserializer.
// rxbuf_push[c]/rxbuf_data post a receive buffer {capacity in words,
// address}; cmpl_pop[c] removes the head of completion ring c, whose
// entry is cmpl_head[c] (bit 31 = message complete, [11:0] = words).
module link_rx
  import fecc_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         ser_valid,
  input  logic         ser_sof,
  input  logic [7:0]   ser_data,
  input  logic [1:0]   rxbuf_push,
  input  ring_entry_t  rxbuf_data,
  input  logic [1:0]   cmpl_pop,
  output logic [31:0]  cmpl_head [2],
  output logic [1:0]   cmpl_nonempty,
  output dma_req_t     dma_req,
  input  logic         dma_gnt,
  output logic [127:0] trig_pattern,
  output logic         trig_irq,
  output logic [1:0]   rx_done,
  output logic [15:0]  bad_cells,
  output logic [15:0]  lost_cells,
  output logic [15:0]  fixed_bytes,
  output logic [15:0]  dropped_cells
);

  // ------------------------------------------------------------- decoder
  logic       d_valid, d_ready, d_first, d_last, d_ok;
  logic [7:0] d_data;
  cell_decoder u_dec (
    .clk, .rst_n,
    .in_valid(ser_valid), .in_sof(ser_sof), .in_data(ser_data),
    .out_valid(d_valid), .out_ready(d_ready), .out_data(d_data),
    .out_first(d_first), .out_last(d_last), .out_ok(d_ok),
    .dropped(dropped_cells), .fixed(fixed_bytes));

  // ------------------------------------------------------------- rings
  ring_entry_t bufh [2];
  logic [1:0]  buf_ne, buf_pop, cmpl_push;
  logic [31:0] cmpl_data;
  for (genvar c = 0; c < 2; c++) begin : g_ring
    logic [4:0] cnt0, cnt1;
    logic [3:0] hi0, hi1;
    logic       full0, full1;
    ptr_ring #(.DEPTH(16), .W($bits(ring_entry_t))) u_buf (
      .clk, .rst_n, .push(rxbuf_push[c]), .push_data(rxbuf_data),
      .pop(buf_pop[c]), .head(bufh[c]), .nonempty(buf_ne[c]),
      .full(full0), .count(cnt0), .head_idx(hi0));
    ptr_ring #(.DEPTH(16), .W(32)) u_cmpl (
      .clk, .rst_n, .push(cmpl_push[c]), .push_data(cmpl_data),
      .pop(cmpl_pop[c]), .head(cmpl_head[c]), .nonempty(cmpl_nonempty[c]),
      .full(full1), .count(cnt1), .head_idx(hi1));
  end

  // ------------------------------------------------------------- parsing
  logic [8:0]  bcnt_q;            // systematic byte index of next d byte
  logic [63:0] hdr_sr_q;          // header bytes 0..7
  cell_hdr_t   hdr;
  logic [31:0] word_q;            // word being assembled
  logic [31:0] wdata_q;           // word waiting for its DMA slot
  logic        wpend_q;
  dma_addr_t   waddr_q;
  logic        keep_q;            // payload of this cell is being stored
  logic [6:0]  widx;
  logic [1:0]  bsel;
  logic        fire;

  assign hdr   = cell_hdr_t'(hdr_sr_q);
  assign widx  = 7'((bcnt_q - 9'(HDR_BYTES)) >> 2);
  assign bsel  = bcnt_q[1:0];
  assign fire  = d_valid && d_ready;
  assign d_ready = !(wpend_q && bsel == 2'd3 && !dma_gnt);

  assign dma_req.valid = wpend_q;
  assign dma_req.we    = 1'b1;
  assign dma_req.addr  = waddr_q;
  assign dma_req.wdata = wdata_q;

  // Decision taken when the header is complete (byte 32 arrives).
  logic        is_trig, is_msg, room;
  logic        c_idx;
  logic [31:0] base_off;
  assign is_trig  = (hdr.cls == 8'(CLS_TRIG));
  assign is_msg   = (hdr.cls == 8'(CLS_SYNC)) || (hdr.cls == 8'(CLS_ASYNC));
  assign c_idx    = hdr.cls[0];
  assign base_off = 32'(hdr.seq) * 32'(PAYLOAD_WORDS);
  assign room     = buf_ne[c_idx] &&
                    (base_off + 32'(hdr.nwords) <= 32'(bufh[c_idx].nwords));

  // Word with the current byte merged in; whether this cell is stored.
  logic [31:0] w;
  logic        keep;
  always_comb begin
    w = word_q;
    w[8*bsel +: 8] = d_data;
    keep = (bcnt_q == 9'(HDR_BYTES)) ? (d_ok && is_msg && room) : keep_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bcnt_q       <= '0;
      hdr_sr_q     <= '0;
      word_q       <= '0;
      wdata_q      <= '0;
      wpend_q      <= 1'b0;
      waddr_q      <= '0;
      keep_q       <= 1'b0;
      trig_pattern <= '0;
      trig_irq     <= 1'b0;
      rx_done      <= '0;
      buf_pop      <= '0;
      cmpl_push    <= '0;
      cmpl_data    <= '0;
      bad_cells    <= '0;
      lost_cells   <= '0;
    end else begin
      trig_irq  <= 1'b0;
      rx_done   <= '0;
      buf_pop   <= '0;
      cmpl_push <= '0;
      if (dma_gnt) wpend_q <= 1'b0;
      if (fire) begin
        bcnt_q <= d_last ? '0 : bcnt_q + 1'b1;
        if (d_first && !d_ok) bad_cells <= bad_cells + 1'b1;
        if (bcnt_q < 9'd8) hdr_sr_q[63 - 8*bcnt_q[2:0] -: 8] <= d_data;
        if (bcnt_q == 9'(HDR_BYTES)) begin
          keep_q <= d_ok && is_msg && room;
          if (d_ok && is_msg && !room) lost_cells <= lost_cells + 1'b1;
        end
        if (bcnt_q >= 9'(HDR_BYTES)) begin
          word_q <= w;
          if (d_ok && is_trig && widx < 7'd4)
            trig_pattern[32*widx[1:0] + 8*bsel +: 8] <= d_data;
          if (keep && bsel == 2'd3 && widx < 7'(hdr.nwords)) begin
            wpend_q <= 1'b1;
            wdata_q <= w;
            waddr_q <= bufh[c_idx].addr + dma_addr_t'(base_off) + dma_addr_t'(widx);
          end
        end
        if (d_last && d_ok) begin
          if (is_trig) trig_irq <= 1'b1;
          if (keep_q && hdr.flags[0]) begin
            buf_pop[c_idx]   <= 1'b1;
            cmpl_push[c_idx] <= 1'b1;
            cmpl_data        <= {1'b1, 19'd0, hdr.msg_words[11:0]};
            rx_done[c_idx]   <= 1'b1;
          end
        end
      end
    end
  end

endmodule
