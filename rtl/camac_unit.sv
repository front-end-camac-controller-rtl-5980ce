// camac_unit: transfer execution for one serial CAMAC cable.
//
// Each cable has two transfer contexts, beam-synchronous (index 1) and
// beam-asynchronous (index 0), each loaded with a descriptor: crate, N, A,
// F, word count, DMA word address, and an optional recovery cycle. Both
// share the cable's cycle engine (the SLAC or IEEE serial protocol logic,
// outside this module) through a one-cycle-at-a-time request interface.
//
// For every word the unit reads the write data from DMA memory (F16..F23),
// runs the CAMAC cycle, and for a read (F0..F7) stores {X, Q, 6'b0,
// data[23:0]} into DMA memory; other function codes are control cycles and
// touch no memory. The DMA address advances by one per word.
//
// Precedence: the synchronous context is looked at after every CAMAC
// cycle. If it has been started while an asynchronous block transfer is in
// progress, the asynchronous transfer is suspended with its word count and
// address kept, so a synchronous operation waits at most one CAMAC cycle.
// When the synchronous transfer is finished and recovery is enabled in the
// asynchronous descriptor, a recovery cycle F(17) A(recov_a) writes
// recov_base + (words already done) into the module's memory pointer
// register before the asynchronous transfer resumes. The two contexts, the
// one-cycle preemption and the recovery cycle follow the paper; the
// descriptor format, the use of F(17), the status word and one shared DMA
// port per cable are this design's choices.
//
// Interface: desc_load[c] with desc_i loads and starts context c (ignored
// while it is busy). busy[c], done[c] (one-clock pulse at the end) and
// err_nox[c] (sticky from start: some cycle returned X=0). dma_* is the DMA
// port. cyc_req/cyc_naf/cyc_wdata is held until cyc_ack, which returns
// cyc_rdata, cyc_q and cyc_x. preempted/recovered pulse when a preemption
// and a recovery cycle happen.
module camac_unit
  import fecc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  desc_load,
  input  camac_desc_t desc_i,
  output logic [1:0]  busy,
  output logic [1:0]  done,
  output logic [1:0]  err_nox,
  output dma_req_t    dma_req,
  input  logic        dma_gnt,
  input  logic        dma_rvalid,
  input  logic [31:0] dma_rdata,
  output logic        cyc_req,
  output camac_naf_t  cyc_naf,
  output logic [23:0] cyc_wdata,
  input  logic        cyc_ack,
  input  logic [23:0] cyc_rdata,
  input  logic        cyc_q,
  input  logic        cyc_x,
  output logic        preempted,
  output logic        recovered
);

  typedef enum logic [2:0] {
    S_IDLE, S_RD_REQ, S_RD_WAIT, S_CYCLE, S_WR, S_RECOV
  } state_e;

  camac_desc_t d_q    [2];
  logic [15:0] left_q [2];      // words still to do
  dma_addr_t   addr_q [2];
  logic [15:0] doneq  [2];      // words completed
  logic        susp_q;          // async suspended mid-block
  state_e      state_q;
  logic        cur_q;           // context running
  logic [23:0] data_q;
  logic [31:0] stat_q;

  logic is_rd;
  assign is_rd = (d_q[cur_q].naf.f[4:3] == 2'b00);

  // next context to run (sync first)
  logic       any, nxt;
  assign any = busy[1] || busy[0];
  assign nxt = busy[1];

  always_comb begin
    dma_req       = '0;
    dma_req.valid = (state_q == S_RD_REQ) || (state_q == S_WR);
    dma_req.we    = (state_q == S_WR);
    dma_req.addr  = addr_q[cur_q];
    dma_req.wdata = stat_q;
  end

  always_comb begin
    cyc_req   = (state_q == S_CYCLE) || (state_q == S_RECOV);
    cyc_naf   = d_q[cur_q].naf;
    cyc_wdata = data_q;
    if (state_q == S_RECOV) begin
      cyc_naf   = d_q[0].naf;
      cyc_naf.a = d_q[0].recov_a;
      cyc_naf.f = 5'd17;
      cyc_wdata = d_q[0].recov_base + 24'(doneq[0]);
    end
  end

  // Start the word at the head of context c.
  function automatic state_e first_state(input camac_desc_t d);
    return (d.naf.f[4:3] == 2'b10) ? S_RD_REQ : S_CYCLE;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q       <= '{default: '0};
      left_q    <= '{default: '0};
      addr_q    <= '{default: '0};
      doneq     <= '{default: '0};
      busy      <= '0;
      done      <= '0;
      err_nox   <= '0;
      susp_q    <= 1'b0;
      state_q   <= S_IDLE;
      cur_q     <= 1'b0;
      data_q    <= '0;
      stat_q    <= '0;
      preempted <= 1'b0;
      recovered <= 1'b0;
    end else begin
      done      <= '0;
      preempted <= 1'b0;
      recovered <= 1'b0;
      for (int c = 0; c < 2; c++)
        if (desc_load[c] && !busy[c]) begin
          d_q[c]     <= desc_i;
          left_q[c]  <= desc_i.count;
          addr_q[c]  <= desc_i.addr;
          doneq[c]   <= '0;
          busy[c]    <= (desc_i.count != 0);
          done[c]    <= (desc_i.count == 0);
          err_nox[c] <= 1'b0;
        end
      case (state_q)
        S_IDLE: if (any) begin
          cur_q <= nxt;
          if (!nxt && susp_q && d_q[0].recov_en) begin
            state_q <= S_RECOV;
          end else begin
            state_q <= first_state(d_q[nxt]);
            data_q  <= '0;
          end
          if (!nxt) susp_q <= 1'b0;
        end
        S_RD_REQ: if (dma_gnt) state_q <= S_RD_WAIT;
        S_RD_WAIT: if (dma_rvalid) begin
          data_q  <= dma_rdata[23:0];
          state_q <= S_CYCLE;
        end
        S_RECOV: if (cyc_ack) begin
          recovered <= 1'b1;
          state_q   <= first_state(d_q[0]);
          data_q    <= '0;
        end
        S_CYCLE: if (cyc_ack) begin
          stat_q <= {cyc_x, cyc_q, 6'b0, cyc_rdata};
          if (!cyc_x) err_nox[cur_q] <= 1'b1;
          if (is_rd) state_q <= S_WR;
          else       state_q <= S_IDLE;   // word finished
          if (!is_rd) begin
            left_q[cur_q] <= left_q[cur_q] - 1'b1;
            doneq[cur_q]  <= doneq[cur_q] + 1'b1;
            addr_q[cur_q] <= addr_q[cur_q] + 1'b1;
            if (left_q[cur_q] == 16'd1) begin
              busy[cur_q] <= 1'b0;
              done[cur_q] <= 1'b1;
            end
          end
        end
        S_WR: if (dma_gnt) begin
          state_q <= S_IDLE;
          left_q[cur_q] <= left_q[cur_q] - 1'b1;
          doneq[cur_q]  <= doneq[cur_q] + 1'b1;
          addr_q[cur_q] <= addr_q[cur_q] + 1'b1;
          if (left_q[cur_q] == 16'd1) begin
            busy[cur_q] <= 1'b0;
            done[cur_q] <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
      // Leaving an unfinished async word boundary for a sync transfer.
      if (state_q == S_IDLE && any && nxt && busy[0] && doneq[0] != 0 && !susp_q) begin
        susp_q    <= 1'b1;
        preempted <= 1'b1;
      end
    end
  end

  // A cycle request is held stable until acknowledged.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cyc_req && !cyc_ack |=> cyc_req && $stable(cyc_naf));

endmodule
