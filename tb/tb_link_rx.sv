// tb_link_rx: checks the link receiver with reference-encoded cells.
//
// Cells are built and encoded in the testbench (header layout of
// cell_hdr_t, payload words little-endian) and sent one byte per clock.
// The DMA model grants every fourth clock (the link receive slots) and
// records the writes. Cases: a 200-word asynchronous message (three cells)
// into a posted buffer; a trigger cell, whose pattern must appear with
// trig_irq; a 100-word synchronous message whose second cell carries a
// 128-byte error burst, which must be corrected; an uncorrectable cell,
// which must be counted and must write nothing; and a synchronous cell
// with no buffer posted, which must be counted as lost. Completions must
// carry the message length and rx_done must pulse once per message.
module tb_link_rx;
  import fecc_pkg::*;
  import tb_rs_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic         ser_valid, ser_sof;
  logic [7:0]   ser_data;
  logic [1:0]   rxbuf_push, cmpl_pop, cmpl_nonempty, rx_done;
  ring_entry_t  rxbuf_data;
  logic [31:0]  cmpl_head [2];
  dma_req_t     dma_req;
  logic         dma_gnt, trig_irq;
  logic [127:0] trig_pattern;
  logic [15:0]  bad_cells, lost_cells, fixed_bytes, dropped_cells;
  int checks = 0, failures = 0, cyc = 0;

  link_rx dut (.*);

  logic [31:0] mem [int];
  int nwrites = 0, n_trig = 0;
  int n_done [2] = '{0, 0};
  assign dma_gnt = dma_req.valid && (cyc % 4 == 1);
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (dma_gnt) begin mem[int'(dma_req.addr)] = dma_req.wdata; nwrites++; end
    if (trig_irq) n_trig++;
    for (int c = 0; c < 2; c++) if (rx_done[c]) n_done[c]++;
  end

  function automatic void check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", msg, cyc); end
  endfunction

  function automatic logic [31:0] pat(int m, int i);
    return (m << 24) ^ (i * 32'h00010203) ^ 32'h33;
  endfunction

  task automatic send_cell(input int cls, input int seq, input int last, input int nw,
                           input int msgw, input int m, input int mode);
    byte unsigned s [352];
    byte unsigned c [608];
    for (int k = 0; k < 352; k++) s[k] = 0;
    s[0] = byte'(cls); s[2] = byte'(seq >> 8); s[3] = byte'(seq); s[4] = byte'(last);
    s[5] = byte'(nw); s[6] = byte'(msgw >> 8); s[7] = byte'(msgw);
    for (int i = 0; i < nw; i++) begin
      logic [31:0] w;
      w = pat(m, seq * 80 + i);
      for (int b = 0; b < 4; b++) s[32 + 4*i + b] = w[8*b +: 8];
    end
    encode_cell(s, c);
    if (mode == 1) for (int k = 200; k < 328; k++) c[k] ^= byte'(1 + $urandom % 255);
    if (mode == 2) for (int e = 0; e < 5; e++) c[(e*3 + 1) * 32 + 9] ^= 8'h5A;
    for (int k = 0; k < 608; k++) begin
      @(negedge clk);
      ser_valid = 1; ser_sof = (k == 0); ser_data = c[k];
    end
    @(negedge clk) ser_valid = 0; ser_sof = 0;
    repeat (20) @(posedge clk);
  endtask

  task automatic post(input int c, input int addr, input int cap);
    @(negedge clk);
    rxbuf_push = 2'(1 << c);
    rxbuf_data = '{nwords: 12'(cap), addr: dma_addr_t'(addr)};
    @(negedge clk) rxbuf_push = 0;
  endtask

  task automatic pop_cmpl(input int c, input int words);
    check(cmpl_nonempty[c], $sformatf("completion present on class %0d", c));
    check(cmpl_head[c] == {1'b1, 19'd0, 12'(words)}, $sformatf("completion of class %0d", c));
    @(negedge clk) cmpl_pop = 2'(1 << c);
    @(negedge clk) cmpl_pop = 0;
  endtask

  initial begin
    int w0;
    ser_valid = 0; ser_sof = 0; ser_data = 0; rxbuf_push = 0; rxbuf_data = '0; cmpl_pop = 0;
    tables();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- 1: async message
    post(0, 'h100, 200);
    post(1, 'h800, 100);
    send_cell(0, 0, 0, 80, 200, 1, 0);
    send_cell(0, 1, 0, 80, 200, 1, 0);
    send_cell(0, 2, 1, 40, 200, 1, 0);
    repeat (600) @(posedge clk);
    for (int i = 0; i < 200; i++)
      check(mem.exists('h100 + i) && mem['h100 + i] == pat(1, i), $sformatf("async word %0d", i));
    pop_cmpl(0, 200);
    // ---- 2: trigger
    send_cell(2, 0, 1, 4, 4, 0, 0);
    repeat (600) @(posedge clk);
    check(n_trig == 1, "trigger interrupt");
    check(trig_pattern == {pat(0, 3), pat(0, 2), pat(0, 1), pat(0, 0)}, "trigger pattern");
    // ---- 3: sync message with a burst in cell 1
    send_cell(1, 0, 0, 80, 100, 2, 0);
    send_cell(1, 1, 1, 20, 100, 2, 1);
    repeat (600) @(posedge clk);
    for (int i = 0; i < 100; i++)
      check(mem.exists('h800 + i) && mem['h800 + i] == pat(2, i), $sformatf("sync word %0d", i));
    check(fixed_bytes > 0, "burst corrected");
    pop_cmpl(1, 100);
    // ---- 4: uncorrectable cell
    post(0, 'h2000, 80);
    w0 = nwrites;
    send_cell(0, 0, 1, 80, 80, 3, 2);
    repeat (600) @(posedge clk);
    check(bad_cells == 1, "bad cell counted");
    check(nwrites == w0, "bad cell wrote nothing");
    check(!cmpl_nonempty[0], "no completion for bad cell");
    // ---- 5: no sync buffer posted
    send_cell(1, 0, 1, 10, 10, 4, 0);
    repeat (600) @(posedge clk);
    check(lost_cells == 1, "lost cell counted");
    check(n_done[0] == 1 && n_done[1] == 1, "one completion interrupt per message");
    check(dropped_cells == 0, "no cell dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
