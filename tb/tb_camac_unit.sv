// tb_camac_unit: checks one cable's transfer execution and preemption.
//
// A cable model acknowledges each CAMAC cycle 20 clocks after the request;
// a DMA model grants one request in four clocks at random and returns
// read data two clocks after the grant. Cases: an asynchronous block write
// (F16) of 10 words, whose cable data must equal the memory words in
// order; an asynchronous block read (F0) of 8 words, whose memory image
// must be {X,Q,0,data}; a 20-word asynchronous write with recovery enabled
// that is preempted by a 3-word synchronous read: the synchronous cycles
// must follow the current asynchronous cycle directly (latency at most one
// CAMAC cycle), then one recovery cycle F17 writing base + words done to
// the pointer subaddress, then the rest of the asynchronous block; and a
// read of an empty slot (X=0), which must set err_nox.
module tb_camac_unit;
  import fecc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic [1:0]  desc_load, busy, done, err_nox;
  camac_desc_t desc_i;
  dma_req_t    dma_req;
  logic        dma_gnt, dma_rvalid;
  logic [31:0] dma_rdata;
  logic        cyc_req, cyc_ack, cyc_q, cyc_x, preempted, recovered;
  camac_naf_t  cyc_naf;
  logic [23:0] cyc_wdata, cyc_rdata;
  int checks = 0, failures = 0;
  int n_pre = 0, n_rec = 0;

  camac_unit dut (.*);
  camac_cable_model #(.DELAY(20)) u_cable (.clk, .cyc_req, .cyc_naf, .cyc_wdata,
    .cyc_ack, .cyc_rdata, .cyc_q, .cyc_x);

  // DMA memory model
  logic [31:0] mem [int];
  logic [1:0]  rv_pipe;
  logic [31:0] rd_pipe [2];
  always_comb dma_gnt = dma_req.valid && ($urandom % 4 == 0);
  always @(posedge clk) begin
    rv_pipe <= {rv_pipe[0], dma_gnt && !dma_req.we};
    rd_pipe[1] <= rd_pipe[0];
    rd_pipe[0] <= mem.exists(int'(dma_req.addr)) ? mem[int'(dma_req.addr)] : 32'h0;
    if (dma_gnt && dma_req.we) mem[int'(dma_req.addr)] = dma_req.wdata;
    if (rst_n && preempted) n_pre++;
    if (rst_n && recovered) n_rec++;
  end
  assign dma_rvalid = rv_pipe[1];
  assign dma_rdata  = rd_pipe[1];

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic camac_desc_t mk(int crate, int n, int a, int f, int count,
                                     int addr, bit ren, int ra, int rbase);
    camac_desc_t d;
    d.naf = '{crate: 6'(crate), n: 5'(n), a: 4'(a), f: 5'(f)};
    d.count = 16'(count); d.addr = dma_addr_t'(addr);
    d.recov_en = ren; d.recov_a = 4'(ra); d.recov_base = 24'(rbase);
    return d;
  endfunction

  task automatic load(input int c, input camac_desc_t d);
    @(negedge clk);
    desc_i = d; desc_load = 2'(1 << c);
    @(negedge clk);
    desc_load = 0;
  endtask

  task automatic wait_idle();
    do @(posedge clk); while (busy != 0);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    int base;
    desc_load = 0; desc_i = '0; rv_pipe = 0; rd_pipe = '{0, 0};
    for (int i = 0; i < 64; i++) mem[32'h100 + i] = 32'h00A00000 + i * 7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- 1: async block write
    load(0, mk(1, 5, 0, 16, 10, 'h100, 0, 0, 0));
    wait_idle();
    check(u_cable.log_naf.size() == 10, "10 write cycles");
    for (int i = 0; i < 10; i++) begin
      check(u_cable.log_naf[i].f == 16 && u_cable.log_naf[i].n == 5, "write naf");
      check(u_cable.log_data[i] == 24'(32'h00A00000 + i * 7), $sformatf("write data %0d", i));
    end
    u_cable.log_naf.delete(); u_cable.log_data.delete();
    // ---- 2: async block read
    load(0, mk(2, 6, 1, 0, 8, 'h200, 0, 0, 0));
    wait_idle();
    for (int i = 0; i < 8; i++)
      check(mem.exists('h200 + i) && mem['h200 + i] == {1'b1, 1'b1, 6'b0, 24'({6'd2, 5'd6, 4'd1})},
            $sformatf("read word %0d", i));
    check(err_nox == 0, "no X error");
    u_cable.log_naf.delete(); u_cable.log_data.delete();
    // ---- 3: preemption with recovery
    load(0, mk(3, 7, 0, 16, 20, 'h100, 1, 2, 'h1000));
    repeat (5 * 25) @(posedge clk);
    begin
      int t0, nasync_before, k;
      t0 = $time;
      load(1, mk(3, 8, 0, 0, 3, 'h300, 0, 0, 0));
      // time until the first sync cycle is requested
      while (!(cyc_req && cyc_naf.n == 8)) @(posedge clk);
      check(($time - t0) / 8 <= 20 + 12, $sformatf("sync waited %0d clocks", ($time - t0) / 8));
      wait_idle();
      k = 0;
      while (k < u_cable.log_naf.size() && u_cable.log_naf[k].n == 7) k++;
      nasync_before = k;
      check(nasync_before >= 4 && nasync_before < 20, "async ran before preemption");
      for (int i = 0; i < 3; i++)
        check(u_cable.log_naf[k + i].n == 8 && u_cable.log_naf[k + i].f == 0, "sync cycles next");
      k += 3;
      check(u_cable.log_naf[k].f == 17 && u_cable.log_naf[k].a == 2 && u_cable.log_naf[k].n == 7,
            "recovery cycle F17 A2");
      check(u_cable.log_data[k] == 24'('h1000 + nasync_before), "recovery pointer value");
      k++;
      check(u_cable.log_naf.size() - k == 20 - nasync_before, "async resumed to the end");
      for (int i = k; i < u_cable.log_naf.size(); i++)
        check(u_cable.log_data[i] == 24'(32'h00A00000 + (i - 4) * 7), "resumed data in order");
      check(n_pre == 1 && n_rec == 1, "one preemption and one recovery");
    end
    // ---- 4: no X
    load(1, mk(4, 30, 0, 0, 1, 'h400, 0, 0, 0));
    wait_idle();
    check(err_nox[1], "X=0 flagged");
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
