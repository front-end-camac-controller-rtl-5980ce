// tb_dma_slot_arbiter: checks the FECC2 time slicing of the DMA memory.
//
// Phase 1: all five owners request all the time; over 10 rounds of 16
// clocks the grants must be 40 link transmit, 40 link receive, 40 IEEE,
// 10 SLAC and 30 SHARC, each only in a slot the owner holds, and the link
// transmit grants exactly four clocks apart. Phase 2: each owner writes
// its own pattern and reads it back; the read data must reach the right
// owner two clocks after its grant. Phase 3: with only the SLAC owner
// asking, a request must wait for its slot (strict slicing, no lending).
module tb_dma_slot_arbiter;
  import fecc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  dma_req_t          req [N_OWNERS];
  logic [N_OWNERS-1:0] gnt, rvalid;
  logic [31:0]       rdata, mem_wdata, mem_rdata;
  logic [3:0]        slot;
  logic              mem_en, mem_we;
  dma_addr_t         mem_addr;
  int checks = 0, failures = 0;

  dma_slot_arbiter dut (.clk, .rst_n, .req_i(req), .gnt_o(gnt), .rvalid_o(rvalid),
    .rdata_o(rdata), .slot_o(slot), .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata);
  ssram_model #(.AW(10), .LAT(2)) u_mem (.clk, .en(mem_en), .we(mem_we),
    .addr(mem_addr), .wdata(mem_wdata), .rdata(mem_rdata));

  // Expected owner of each slot (0 TX, 1 RX, 2 IEEE, 3 SLAC, 4 SHARC).
  int exp_owner [16] = '{0,1,2,4, 0,1,2,4, 0,1,2,4, 0,1,2,3};

  int cnt [N_OWNERS];
  int last_tx = -1, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (cycle %0d)", msg, cyc); end
  endtask

  initial begin
    for (int o = 0; o < N_OWNERS; o++) begin req[o] = '0; cnt[o] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // ---- phase 1
    for (int o = 0; o < N_OWNERS; o++) begin
      req[o].valid = 1; req[o].we = 1; req[o].addr = dma_addr_t'(o); req[o].wdata = o;
    end
    repeat (160) begin
      @(posedge clk);
      #1;
      for (int o = 0; o < N_OWNERS; o++) if (gnt[o]) begin
        cnt[o]++;
        check(exp_owner[slot] == o, $sformatf("owner %0d granted in slot %0d", o, slot));
        if (o == 0) begin
          if (last_tx >= 0) check(cyc - last_tx == 4, "link transmit spacing");
          last_tx = cyc;
        end
      end
      check($countones(gnt) == 1, "one grant per clock when all ask");
    end
    check(cnt[0] == 40, "tx share");
    check(cnt[1] == 40, "rx share");
    check(cnt[2] == 40, "ieee share");
    check(cnt[3] == 10, "slac share");
    check(cnt[4] == 30, "sharc share");
    // ---- phase 2: write then read back, per owner
    for (int o = 0; o < N_OWNERS; o++) req[o] = '0;
    for (int o = 0; o < N_OWNERS; o++) begin
      @(negedge clk);
      req[o].valid = 1; req[o].we = 1; req[o].addr = dma_addr_t'(100 + o);
      req[o].wdata = 32'hA5000000 + o;
      do @(posedge clk); while (!gnt[o]);
      @(negedge clk) req[o].we = 0;
      do @(posedge clk); while (!gnt[o]);
      @(negedge clk) req[o].valid = 0;
      @(posedge clk); #1;
      check(rvalid == N_OWNERS'(1 << o), $sformatf("rvalid to owner %0d", o));
      check(rdata == 32'hA5000000 + o, $sformatf("read data of owner %0d = %h", o, rdata));
    end
    // ---- phase 3: SLAC waits for slot 15
    @(negedge clk);
    begin
      int waited = 0;
      req[3].valid = 1; req[3].we = 1; req[3].addr = 0;
      while (slot != 4'd15) begin
        check(!gnt[3] && !mem_en, "no lending of idle slots");
        @(negedge clk); waited++;
      end
      check(gnt[3], "slac granted in slot 15");
      req[3] = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
