// ptr_ring: 16-deep ring buffer of buffer pointers.
//
// The link keeps one such ring of transmit-buffer pointers and one of
// receive-buffer pointers per transfer class (the depth of 16 is the
// paper's). The producer writes an entry at the producer index and
// advances it; the consumer reads the entry at the consumer index (head)
// and advances it with pop. Indices carry one extra wrap bit so that full
// and empty are told apart. Entry width and the count output are this
// design's choice. A push into a full ring or a pop from an empty ring is
// ignored and flagged by an assertion.
//
// Timing: head is valid combinationally from the registered state; push
// and pop take effect at the next clock edge and may happen together.
module ptr_ring #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned W     = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    push,
  input  logic [W-1:0]            push_data,
  input  logic                    pop,
  output logic [W-1:0]            head,
  output logic                    nonempty,
  output logic                    full,
  output logic [$clog2(DEPTH):0]  count,
  output logic [$clog2(DEPTH)-1:0] head_idx
);

  localparam int unsigned IW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [IW:0]  prod_q, cons_q;

  assign count    = prod_q - cons_q;
  assign nonempty = (prod_q != cons_q);
  assign full     = (count == (IW+1)'(DEPTH));
  assign head     = mem[cons_q[IW-1:0]];
  assign head_idx = cons_q[IW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_q <= '0;
      cons_q <= '0;
    end else begin
      if (push && !full) prod_q <= prod_q + 1'b1;
      if (pop && nonempty) cons_q <= cons_q + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (push && !full) mem[prod_q[IW-1:0]] <= push_data;

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && !nonempty));

endmodule
