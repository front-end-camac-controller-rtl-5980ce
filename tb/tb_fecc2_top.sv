// tb_fecc2_top: end-to-end test of the FECC2 logic at its default size.
//
// The link transmitter is looped back to the receiver through a fibre
// model that can corrupt a burst of bytes; the DMA memory is an SSRAM
// model; each of the eight cables has a cable model with the paper's
// typical round trip (10 us = 1250 clocks on SLAC cables, 6 us = 750 on
// IEEE cables). Everything is driven through the SHARC register port and
// the SHARC's own DMA slots, as the DSP would.
//
// Scenario: the SHARC writes message data into DMA memory, posts receive
// buffers, and queues a 300-word asynchronous message; during its first
// cell it queues a 60-word synchronous message and a trigger pattern. A
// 100-byte noise burst is put on one cell. Both messages must arrive
// intact in their receive buffers, with completions of the right length,
// and the trigger pattern must be received with its interrupt. Meanwhile
// SLAC cable 1 runs a 12-word asynchronous block write with recovery
// enabled, preempted by a 2-word synchronous read, and IEEE cable 5 runs
// an 8-word block read. Every mechanism (link preemption, trigger
// forwarding, ECC correction, CAMAC preemption, recovery cycle, DMA slot
// contention) is counted and must happen at least once.
module tb_fecc2_top;
  import fecc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  localparam int NC = 8;
  logic         reg_we;
  logic [9:0]   reg_addr;
  logic [31:0]  reg_wdata, reg_rdata;
  dma_req_t     sharc_req;
  logic         sharc_gnt, sharc_rvalid;
  logic [31:0]  sharc_rdata;
  logic         mem_en, mem_we;
  dma_addr_t    mem_addr;
  logic [31:0]  mem_wdata, mem_rdata;
  logic         tx_valid, tx_sof, rx_valid, rx_sof;
  logic [7:0]   tx_data, rx_data;
  logic [NC-1:0] cyc_req, cyc_ack, cyc_q, cyc_x;
  camac_naf_t   cyc_naf [NC];
  logic [23:0]  cyc_wdata [NC], cyc_rdata [NC];
  logic         irq_trig, ev_link_preempt;
  logic [1:0]   irq_link_tx, irq_link_rx;
  logic [2*NC-1:0] irq_camac;
  logic [NC-1:0] ev_camac_preempt, ev_camac_recov;
  int checks = 0, failures = 0, cyc = 0;

  fecc2_top dut (.*);

  ssram_model #(.AW(15), .LAT(2)) u_mem (.clk, .en(mem_en), .we(mem_we), .addr(mem_addr),
    .wdata(mem_wdata), .rdata(mem_rdata));

  for (genvar k = 0; k < NC; k++) begin : g_cab
    camac_cable_model #(.DELAY(k < 4 ? 1250 : 750)) u_cab (.clk, .cyc_req(cyc_req[k]),
      .cyc_naf(cyc_naf[k]), .cyc_wdata(cyc_wdata[k]), .cyc_ack(cyc_ack[k]),
      .cyc_rdata(cyc_rdata[k]), .cyc_q(cyc_q[k]), .cyc_x(cyc_x[k]));
  end

  // ---- fibre loopback with an optional noise burst on cell number hit_cell
  int cell_no = -1, byte_no = 0, hit_cell = 2;
  always @(posedge clk) begin
    rx_valid <= tx_valid;
    rx_sof   <= tx_sof;
    rx_data  <= tx_data;
    if (tx_valid) begin
      if (tx_sof) begin cell_no++; byte_no = 0; end
      if (cell_no == hit_cell && byte_no >= 300 && byte_no < 400) rx_data <= tx_data ^ 8'hC3;
      byte_no++;
    end
  end

  // ---- mechanism counters
  int n_link_pre = 0, n_trig = 0, n_cam_pre = 0, n_recov = 0, n_contend = 0;
  int n_rx_done [2] = '{0, 0};
  int n_cam_done [2*NC];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (ev_link_preempt) n_link_pre++;
    if (irq_trig) n_trig++;
    n_cam_pre += $countones(ev_camac_preempt);
    n_recov   += $countones(ev_camac_recov);
    for (int c = 0; c < 2; c++) if (irq_link_rx[c]) n_rx_done[c]++;
    for (int i = 0; i < 2*NC; i++) if (irq_camac[i]) n_cam_done[i]++;
    if ($countones({dut.own_req[0].valid, dut.own_req[1].valid, dut.own_req[2].valid,
                    dut.own_req[3].valid, dut.own_req[4].valid}) >= 2) n_contend++;
  end

  function automatic void check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", msg, cyc); end
  endfunction

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk);
    reg_we = 1; reg_addr = 10'(a); reg_wdata = d;
    @(negedge clk);
    reg_we = 0;
  endtask

  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk);
    reg_addr = 10'(a);
    #1 d = reg_rdata;
  endtask

  task automatic sharc_write(input int a, input logic [31:0] d);
    @(negedge clk);
    sharc_req = '{valid: 1'b1, we: 1'b1, addr: dma_addr_t'(a), wdata: d};
    do @(posedge clk); while (!sharc_gnt);
    @(negedge clk) sharc_req = '0;
  endtask

  task automatic sharc_read(input int a, output logic [31:0] d);
    @(negedge clk);
    sharc_req = '{valid: 1'b1, we: 1'b0, addr: dma_addr_t'(a), wdata: 32'h0};
    do @(posedge clk); while (!sharc_gnt);
    @(negedge clk) sharc_req = '0;
    do @(posedge clk); while (!sharc_rvalid);
    d = sharc_rdata;
  endtask

  function automatic logic [31:0] msgval(int m, int i);
    return 32'hC0DE0000 ^ (m << 20) ^ (i * 32'h00000101);
  endfunction

  task automatic camac(input int cab, input int ctx, input int crate, input int n,
                       input int a, input int f, input int addr, input bit ren,
                       input int ra, input int rbase, input int count);
    int b;
    b = 'h100 + 16 * cab + 8 * ctx;
    wr(b + 0, {12'b0, 6'(crate), 5'(n), 4'(a), 5'(f)});
    wr(b + 1, addr);
    wr(b + 2, {ren, 3'b0, 4'(ra), 24'(rbase)});
    wr(b + 3, count);
  endtask

  logic [31:0] v;
  initial begin
    reg_we = 0; reg_addr = 0; reg_wdata = 0; sharc_req = '0;
    rx_valid = 0; rx_sof = 0; rx_data = 0;
    for (int i = 0; i < 2*NC; i++) n_cam_done[i] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // ---- message and CAMAC data through the SHARC's slots
    for (int i = 0; i < 300; i++) sharc_write('h100 + i, msgval(1, i));
    for (int i = 0; i < 60; i++)  sharc_write('h600 + i, msgval(2, i));
    for (int i = 0; i < 12; i++)  sharc_write('h3000 + i, 32'h00100000 + i);
    // ---- receive buffers
    wr('h002, {12'd400, 20'h01000});
    wr('h003, {12'd100, 20'h01800});
    // ---- CAMAC: SLAC cable 1 async write with recovery, IEEE cable 5 async read
    camac(1, 0, 2, 9, 0, 16, 'h3000, 1, 3, 'h4000, 12);
    camac(5, 0, 7, 4, 1, 0, 'h3400, 0, 0, 0, 8);
    // ---- link: async message, then sync + trigger during its first cell
    wr('h000, {12'd300, 20'h00100});
    wait (cell_no == 0 && byte_no > 50);
    wr('h001, {12'd60, 20'h00600});
    wr('h008, 32'h11111111); wr('h009, 32'h22222222);
    wr('h00A, 32'h33333333); wr('h00B, 32'h44444444);
    wr('h00C, 0);
    // ---- sync CAMAC read on cable 1 while its async block runs
    repeat (4 * 1260) @(posedge clk);
    camac(1, 1, 2, 10, 2, 0, 'h3800, 0, 0, 0, 2);
    // ---- wait for the link
    wait (n_rx_done[0] == 1 && n_rx_done[1] == 1);
    repeat (50) @(posedge clk);
    for (int i = 0; i < 300; i++)
      check(u_mem.mem['h1000 + i] == msgval(1, i), $sformatf("async rx word %0d", i));
    for (int i = 0; i < 60; i++)
      check(u_mem.mem['h1800 + i] == msgval(2, i), $sformatf("sync rx word %0d", i));
    sharc_read('h1000 + 123, v);
    check(v == msgval(1, 123), "SHARC reads received data");
    rd('h004, v); check(v == {1'b1, 19'd0, 12'd300}, "async completion");
    rd('h005, v); check(v == {1'b1, 19'd0, 12'd60}, "sync completion");
    wr('h004, 0); wr('h005, 0);
    rd('h004, v); check(v == 0, "completion removed");
    rd('h010, v); check(v == 32'h11111111, "trigger word 0");
    rd('h013, v); check(v == 32'h44444444, "trigger word 3");
    rd('h014, v); check(v == 0, "no bad or lost cells");
    rd('h015, v); check(v[15:0] > 0 && v[31:16] == 0, "burst corrected, nothing dropped");
    // ---- wait for CAMAC
    wait (n_cam_done[2] == 1 && n_cam_done[3] == 1 && n_cam_done[10] == 1);
    repeat (20) @(posedge clk);
    begin
      int k, pre;
      k = 0;
      while (g_cab[1].u_cab.log_naf[k].n == 9 && g_cab[1].u_cab.log_naf[k].f == 16) k++;
      pre = k;
      check(pre > 0 && pre < 12, "async ran before preemption");
      check(g_cab[1].u_cab.log_naf[k].n == 10 && g_cab[1].u_cab.log_naf[k+1].n == 10,
            "sync cycles follow");
      check(g_cab[1].u_cab.log_naf[k+2].f == 17 && g_cab[1].u_cab.log_data[k+2] == 24'('h4000 + pre),
            "recovery cycle");
      check(g_cab[1].u_cab.log_naf.size() == 15, "all SLAC cycles run");
      for (int i = 0; i < 12; i++) begin
        int j;
        j = (i < pre) ? i : i + 3;
        check(g_cab[1].u_cab.log_data[j] == 24'(32'h00100000 + i), "SLAC write data");
      end
    end
    for (int i = 0; i < 8; i++)
      check(u_mem.mem['h3400 + i] == {8'hC0, 24'({6'd7, 5'd4, 4'd1})}, "IEEE read data");
    for (int i = 0; i < 2; i++)
      check(u_mem.mem['h3800 + i] == {8'hC0, 24'({6'd2, 5'd10, 4'd2})}, "SLAC sync read data");
    rd('h100 + 16 * 1 + 8 * 0 + 4, v); check(v == 0, "cable 1 async idle, no X error");
    // ---- mechanisms
    check(n_link_pre > 0, "link preemption happened");
    check(n_trig == 1, "trigger forwarded");
    check(n_cam_pre > 0, "CAMAC preemption happened");
    check(n_recov > 0, "recovery cycle happened");
    check(n_contend > 0, "DMA slot contention happened");
    $display("mechanisms: link preempt %0d, trigger %0d, camac preempt %0d, recovery %0d, contention clocks %0d",
             n_link_pre, n_trig, n_cam_pre, n_recov, n_contend);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
