// dma_share: shares one owner's DMA memory slots among N requesters.
//
// The four IEEE cables share the IEEE slots and the four SLAC cables the
// SLAC slot. A round-robin pointer picks, among the requesters asking,
// the first one at or after it; that request is passed upstream and the
// grant returned to it, after which the pointer moves past it. The index
// of every granted read travels down an RD_LAT-deep pipeline so that the
// read data, which the slot arbiter returns RD_LAT clocks after the grant,
// goes back to the requester that asked for it. Round-robin sharing is
// this design's choice; the paper gives only the share of the whole
// class.
module dma_share
  import fecc_pkg::*;
#(
  parameter int unsigned N      = 4,
  parameter int unsigned RD_LAT = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  dma_req_t      req_i  [N],
  output logic [N-1:0]  gnt_o,
  output logic [N-1:0]  rvalid_o,
  output dma_req_t      up_req,
  input  logic          up_gnt,
  input  logic          up_rvalid
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr_q, sel;
  logic          found;
  logic [N-1:0]  rd_pipe [RD_LAT];

  always_comb begin
    sel   = ptr_q;
    found = 1'b0;
    for (int k = 0; k < int'(N); k++) begin
      int unsigned i;
      i = (int'(ptr_q) + k) % N;
      if (!found && req_i[i].valid) begin
        sel   = IW'(i);
        found = 1'b1;
      end
    end
  end

  always_comb begin
    up_req       = req_i[sel];
    up_req.valid = found;
  end

  always_comb begin
    gnt_o = '0;
    if (found && up_gnt) gnt_o[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q <= '0;
      for (int i = 0; i < RD_LAT; i++) rd_pipe[i] <= '0;
    end else begin
      if (found && up_gnt) ptr_q <= (sel == IW'(N-1)) ? '0 : sel + 1'b1;
      rd_pipe[0] <= (found && up_gnt && !req_i[sel].we) ? gnt_o : '0;
      for (int i = 1; i < RD_LAT; i++) rd_pipe[i] <= rd_pipe[i-1];
    end
  end

  assign rvalid_o = up_rvalid ? rd_pipe[RD_LAT-1] : '0;

endmodule
