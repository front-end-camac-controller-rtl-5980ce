// link_tx: link transmitter of the FECC2 (and of its PCI-side partner).
//
// Messages are queued as pointers in two 16-deep rings, one per transfer
// class (beam-asynchronous and beam-synchronous); a ring entry gives the
// word address and length of a buffer in DMA memory. A 128-bit trigger
// pattern can be loaded for forwarding on its own. The transmitter cuts
// each message into cells of up to 80 payload words (320 bytes), prefixes
// a 32-byte header and feeds the bytes to cell_encoder, which adds the
// Reed-Solomon parity.
//
// The choice of the next cell is made only at a cell boundary, in the order
// trigger pattern > synchronous > asynchronous. An asynchronous message
// keeps its place (word offset, cell number) while synchronous cells pass
// it, so a synchronous message waits at most one cell time (608 clocks,
// 4.864 us at 125 MHz) for the link. Ring depth, cell format, priority and
// the one-cell latency are the paper's. The header layout (cell_hdr_t), the
// ring-entry format and payload byte order (little-endian words) are this
// design's. Acknowledgement, retransmission, flow control and remote
// register fields of the paper's header are not implemented.
//
// DMA: payload words are read through the link-transmit memory slots (one
// word every four clocks, which matches the 125 MB/s byte rate) into a
// 16-word FIFO; reading starts when the cell is chosen, 32 header clocks
// before the first payload byte is due.
//
// Interface: push[c]/push_data add a message to class c (0 async, 1 sync);
// trig_load latches trig_pattern and requests a trigger cell. done[c]
// pulses when the last cell of a class-c message has been handed to the
// encoder, trig_sent when a trigger cell has; preempt pulses when a sync or
// trigger cell is chosen while an async message is part sent. ser_* is the
// encoded cell stream.
module link_tx
  import fecc_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic [1:0]   push,
  input  ring_entry_t  push_data,
  output logic [1:0]   ring_full,
  input  logic         trig_load,
  input  logic [127:0] trig_pattern,
  output dma_req_t     dma_req,
  input  logic         dma_gnt,
  input  logic         dma_rvalid,
  input  logic [31:0]  dma_rdata,
  output logic         ser_valid,
  output logic         ser_sof,
  output logic [7:0]   ser_data,
  output logic [1:0]   done,
  output logic         trig_sent,
  output logic         preempt,
  output logic         busy
);

  // ---------------------------------------------------------------- rings
  ring_entry_t head [2];
  logic [1:0]  nonempty, pop;
  logic [3:0]  head_idx [2];
  for (genvar c = 0; c < 2; c++) begin : g_ring
    logic [4:0] cnt_unused;
    ptr_ring #(.DEPTH(16), .W($bits(ring_entry_t))) u_ring (
      .clk, .rst_n,
      .push(push[c]), .push_data(push_data),
      .pop(pop[c]), .head(head[c]), .nonempty(nonempty[c]),
      .full(ring_full[c]), .count(cnt_unused), .head_idx(head_idx[c]));
  end

  // --------------------------------------------------------------- state
  typedef enum logic [1:0] { S_IDLE, S_SEND } state_e;
  state_e      state_q;
  logic [1:0]  cls_q;            // class of the cell being sent
  logic [11:0] off_q  [2];       // words of the current message already sent
  logic [15:0] seq_q  [2];       // next cell number of the current message
  logic        trig_pend_q;
  logic [127:0] trig_q;
  cell_hdr_t   hdr_q;
  logic [6:0]  nw_q;             // payload words in this cell
  dma_addr_t   base_q;           // DMA address of this cell's first word
  logic [8:0]  bcnt_q;           // systematic byte index 0..351
  logic        last_q;

  // --------------------------------------------------------- payload FIFO
  logic [31:0] fifo_q [16];
  logic [3:0]  fwr_q, frd_q;
  logic [4:0]  fcnt_q;
  logic [2:0]  infl_q;           // reads granted, data not yet back
  logic [6:0]  issued_q;         // payload words requested so far

  // --------------------------------------------------------- encoder feed
  logic       enc_valid, enc_ready, enc_boundary, enc_ending;
  logic [7:0] enc_data;
  logic       enc_fire;
  logic       in_payload, word_used, fifo_pop;
  logic [6:0] widx;
  logic [1:0] bsel;

  assign in_payload = (bcnt_q >= 9'(HDR_BYTES));
  assign widx       = 7'((bcnt_q - 9'(HDR_BYTES)) >> 2);
  assign bsel       = bcnt_q[1:0];
  assign word_used  = in_payload && (widx < nw_q) && (cls_q != 2'(CLS_TRIG));

  always_comb begin
    logic [31:0] w;
    enc_data  = 8'h00;
    enc_valid = 1'b0;
    w = 32'h0;
    if (state_q == S_SEND) begin
      if (!in_payload) begin
        enc_valid = 1'b1;
        if (bcnt_q < 9'd8) enc_data = hdr_q[63 - 8*bcnt_q[2:0] -: 8];
      end else if (cls_q == 2'(CLS_TRIG)) begin
        enc_valid = 1'b1;
        if (widx < 7'd4) begin
          w = trig_q[32*widx[1:0] +: 32];
          enc_data = w[8*bsel +: 8];
        end
      end else if (word_used) begin
        enc_valid = (fcnt_q != 0);
        w = fifo_q[frd_q];
        enc_data = w[8*bsel +: 8];
      end else begin
        enc_valid = 1'b1;                 // padding after the last word
      end
    end
  end

  assign enc_fire = enc_valid && enc_ready;
  assign fifo_pop = enc_fire && word_used && (bsel == 2'd3);

  cell_encoder u_enc (
    .clk, .rst_n,
    .in_valid(enc_valid), .in_ready(enc_ready), .in_data(enc_data),
    .out_valid(ser_valid), .out_sof(ser_sof), .out_data(ser_data),
    .at_boundary(enc_boundary), .ending(enc_ending));

  // ------------------------------------------------------------ DMA reads
  logic want_rd;
  assign want_rd = (state_q == S_SEND) && (cls_q != 2'(CLS_TRIG)) &&
                   (issued_q < nw_q) && (5'(fcnt_q) + 5'(infl_q) < 5'd15);
  assign dma_req.valid = want_rd;
  assign dma_req.we    = 1'b0;
  assign dma_req.addr  = base_q + dma_addr_t'(issued_q);
  assign dma_req.wdata = '0;

  // ------------------------------------------------------- cell selection
  logic       can_start;
  logic [1:0] pick;
  logic       pick_ok;
  assign can_start = (state_q == S_IDLE) && (enc_boundary || enc_ending);
  always_comb begin
    pick_ok = 1'b1;
    if (trig_pend_q)      pick = 2'(CLS_TRIG);
    else if (nonempty[1]) pick = 2'(CLS_SYNC);
    else if (nonempty[0]) pick = 2'(CLS_ASYNC);
    else begin pick = 2'(CLS_ASYNC); pick_ok = 1'b0; end
  end

  // Size of the next cell of the chosen message class.
  logic [11:0] pick_rem;
  logic [6:0]  pick_nw;
  logic        pick_last;
  always_comb begin
    pick_rem  = head[pick[0]].nwords - off_q[pick[0]];
    pick_last = (pick_rem <= 12'(PAYLOAD_WORDS));
    pick_nw   = pick_last ? 7'(pick_rem) : 7'(PAYLOAD_WORDS);
  end

  assign busy = (state_q != S_IDLE) || !enc_boundary;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      cls_q       <= '0;
      off_q       <= '{default: '0};
      seq_q       <= '{default: '0};
      trig_pend_q <= 1'b0;
      trig_q      <= '0;
      hdr_q       <= '0;
      nw_q        <= '0;
      base_q      <= '0;
      bcnt_q      <= '0;
      last_q      <= 1'b0;
      fwr_q       <= '0;
      frd_q       <= '0;
      fcnt_q      <= '0;
      infl_q      <= '0;
      issued_q    <= '0;
      pop         <= '0;
      done        <= '0;
      trig_sent   <= 1'b0;
      preempt     <= 1'b0;
    end else begin
      pop       <= '0;
      done      <= '0;
      trig_sent <= 1'b0;
      preempt   <= 1'b0;
      if (trig_load) begin
        trig_pend_q <= 1'b1;
        trig_q      <= trig_pattern;
      end
      // FIFO
      if (dma_gnt) issued_q <= issued_q + 1'b1;
      infl_q <= infl_q + 3'(dma_gnt) - 3'(dma_rvalid);
      if (dma_rvalid) begin
        fifo_q[fwr_q] <= dma_rdata;
        fwr_q <= fwr_q + 1'b1;
      end
      fcnt_q <= fcnt_q + 5'(dma_rvalid) - 5'(fifo_pop);
      if (fifo_pop) frd_q <= frd_q + 1'b1;

      case (state_q)
        S_IDLE: if (can_start && pick_ok) begin
          state_q  <= S_SEND;
          cls_q    <= pick;
          bcnt_q   <= '0;
          issued_q <= '0;
          if (pick == 2'(CLS_TRIG)) begin
            hdr_q <= '{cls: 8'(CLS_TRIG), slot: 8'h00, seq: 16'h0, flags: 8'h01,
                       nwords: 8'd4, msg_words: 16'd4};
            nw_q   <= 7'd4;
            last_q <= 1'b1;
            trig_pend_q <= trig_load;   // a new load during selection stays pending
            if (off_q[0] != 0) preempt <= 1'b1;
          end else begin
            nw_q   <= pick_nw;
            base_q <= head[pick[0]].addr + dma_addr_t'(off_q[pick[0]]);
            last_q <= pick_last;
            hdr_q  <= '{cls: 8'(pick), slot: 8'(head_idx[pick[0]]),
                        seq: seq_q[pick[0]],
                        flags: {7'b0, pick_last},
                        nwords: 8'(pick_nw), msg_words: 16'(head[pick[0]].nwords)};
            if (pick == 2'(CLS_SYNC) && off_q[0] != 0) preempt <= 1'b1;
          end
        end
        S_SEND: if (enc_fire) begin
          bcnt_q <= bcnt_q + 1'b1;
          if (bcnt_q == 9'(CELL_SYS-1)) begin
            state_q <= S_IDLE;
            if (cls_q == 2'(CLS_TRIG)) begin
              trig_sent <= 1'b1;
            end else if (last_q) begin
              off_q[cls_q[0]] <= '0;
              seq_q[cls_q[0]] <= '0;
              pop[cls_q[0]]   <= 1'b1;
              done[cls_q[0]]  <= 1'b1;
            end else begin
              off_q[cls_q[0]] <= off_q[cls_q[0]] + 12'(nw_q);
              seq_q[cls_q[0]] <= seq_q[cls_q[0]] + 1'b1;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   dma_rvalid |-> fcnt_q < 5'd16);

endmodule
