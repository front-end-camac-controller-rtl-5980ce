// tb_link_tx: checks the link transmitter cell by cell.
//
// DMA memory is modelled with a grant every fourth clock (the link
// transmit slots) and read data two clocks later. Every cell that leaves
// is captured and checked with the reference code (all 32 interleaved
// codewords valid), its header parsed and its payload compared with the
// memory words it should carry. Cases: one 200-word asynchronous message
// (cells of 80, 80 and 40 words, sent back to back at 608 clocks per
// cell); then a 400-word asynchronous message into which a 50-word
// synchronous message and a trigger pattern are pushed while its first
// cell is on the wire. Expected order: async cell 0, trigger, sync, async
// cells 1..4; the synchronous cell must start within one cell time of its
// push, and preempt must pulse.
module tb_link_tx;
  import fecc_pkg::*;
  import tb_rs_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic [1:0]   push, ring_full, done;
  ring_entry_t  push_data;
  logic         trig_load, trig_sent, preempt, busy;
  logic [127:0] trig_pattern;
  dma_req_t     dma_req;
  logic         dma_gnt, dma_rvalid;
  logic [31:0]  dma_rdata;
  logic         ser_valid, ser_sof;
  logic [7:0]   ser_data;
  int checks = 0, failures = 0, cyc = 0;

  link_tx dut (.*);

  function automatic logic [31:0] memval(int a);
    return 32'h5A000000 ^ (a * 32'h01030507);
  endfunction
  logic [1:0]  rv;
  logic [31:0] rd [2];
  assign dma_gnt = dma_req.valid && (cyc % 4 == 0);
  always @(posedge clk) begin
    cyc <= cyc + 1;
    rv <= {rv[0], dma_gnt};
    rd[1] <= rd[0];
    rd[0] <= memval(int'(dma_req.addr));
  end
  assign dma_rvalid = rv[1];
  assign dma_rdata  = rd[1];

  function automatic void check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", msg, cyc); end
  endfunction

  // ---- cell capture
  typedef struct { int cls; int seq; int last; int nw; int msg; int sof_cyc;
                   logic [31:0] w [80]; bit good; } cell_t;
  cell_t cells [$];
  byte unsigned cb [608];
  int nb = -1, sofc;
  always @(posedge clk) if (rst_n && ser_valid) begin
    if (ser_sof) begin nb = 0; sofc = cyc; end
    if (nb >= 0) begin
      cb[nb] = ser_data;
      nb++;
      if (nb == 608) begin
        cell_t c;
        c.good = cell_is_codeword(cb);
        c.cls = cb[0]; c.seq = {cb[2], cb[3]}; c.last = cb[4] & 1; c.nw = cb[5];
        c.msg = {cb[6], cb[7]}; c.sof_cyc = sofc;
        for (int i = 0; i < 80; i++)
          c.w[i] = {cb[32+4*i+3], cb[32+4*i+2], cb[32+4*i+1], cb[32+4*i]};
        cells.push_back(c);
        nb = -1;
      end
    end
  end

  function automatic void check_cell(int i, int cls, int seq, int last, int nw,
                                     int msg, int addr);
    cell_t c;
    c = cells[i];
    check(c.good, $sformatf("cell %0d is a codeword", i));
    check(c.cls == cls && c.seq == seq && c.last == last && c.nw == nw && c.msg == msg,
          $sformatf("cell %0d header cls %0d seq %0d last %0d nw %0d msg %0d", i,
                    c.cls, c.seq, c.last, c.nw, c.msg));
    for (int k = 0; k < 80; k++)
      check(c.w[k] == ((k < nw) ? memval(addr + seq * 80 + k) : 32'h0),
            $sformatf("cell %0d word %0d", i, k));
  endfunction

  task automatic send(input int c, input int addr, input int nw);
    @(negedge clk);
    push = 2'(1 << c);
    push_data = '{nwords: 12'(nw), addr: dma_addr_t'(addr)};
    @(negedge clk) push = 0;
  endtask

  int n_done [2] = '{0, 0};
  int n_pre = 0, n_trig = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) if (done[c]) n_done[c]++;
    if (preempt) n_pre++;
    if (trig_sent) n_trig++;
  end

  initial begin
    int push_cyc;
    push = 0; push_data = '0; trig_load = 0; rv = 0; rd = '{0, 0};
    trig_pattern = 128'h0123456789ABCDEF_FEDCBA9876543210;
    repeat (3) @(posedge clk);
    rst_n = 1;
    tables();
    // ---- 1
    send(0, 'h100, 200);
    wait (cells.size() == 3);
    check_cell(0, 0, 0, 0, 80, 200, 'h100);
    check_cell(1, 0, 1, 0, 80, 200, 'h100);
    check_cell(2, 0, 2, 1, 40, 200, 'h100);
    check(cells[1].sof_cyc - cells[0].sof_cyc == 608, "cells back to back");
    check(cells[2].sof_cyc - cells[1].sof_cyc == 608, "cells back to back");
    check(n_done[0] == 1, "async done");
    // ---- 2
    send(0, 'h1000, 400);
    wait (cells.size() == 3 && nb >= 100);
    send(1, 'h2000, 50);
    push_cyc = cyc;
    @(negedge clk) trig_load = 1;
    @(negedge clk) trig_load = 0;
    wait (cells.size() == 10);
    check_cell(3, 0, 0, 0, 80, 400, 'h1000);
    check(cells[4].cls == 2 && cells[4].good, "trigger cell next");
    check(cells[4].w[0] == trig_pattern[31:0] && cells[4].w[3] == trig_pattern[127:96],
          "trigger payload");
    check_cell(5, 1, 0, 1, 50, 50, 'h2000);
    check(cells[5].sof_cyc - push_cyc <= 2 * 608 + 8, "sync within trigger + one cell");
    check(cells[4].sof_cyc - push_cyc <= 608 + 8, "first preempting cell within one cell");
    for (int i = 1; i < 5; i++) check_cell(5 + i, 0, i, i == 4, 80, 400, 'h1000);
    check(n_pre >= 1, "preemption signalled");
    check(n_trig == 1, "trigger sent once");
    check(n_done[0] == 2 && n_done[1] == 1, "done counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
