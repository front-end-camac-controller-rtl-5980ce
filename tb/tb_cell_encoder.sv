// tb_cell_encoder: checks cell_encoder against the reference encoder.
//
// Three cells of random bytes are streamed in with in_valid held high
// (the second with random gaps). For each cell the 608 output bytes must
// equal the reference encoding, start with out_sof, and be valid on 608
// consecutive clocks when the input never pauses (4.864 us at 125 MHz);
// the reference cell must itself be a codeword of every interleaved code.
module tb_cell_encoder;
  import tb_rs_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic       in_valid, in_ready, out_valid, out_sof, at_boundary, ending;
  logic [7:0] in_data, out_data;
  int checks = 0, failures = 0;

  cell_encoder dut (.*);

  byte unsigned sys [352];
  byte unsigned ref_cell [608];
  byte unsigned got [608];
  int nout, first_cyc, last_cyc, cyc;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    if (nout < 608) got[nout] = out_data;
    if (nout == 0) begin
      first_cyc = cyc;
      checks++;
      if (!out_sof) begin failures++; $display("FAIL: no sof"); end
    end else if (out_sof) begin
      failures++; $display("FAIL: sof inside cell at %0d", nout);
    end
    last_cyc = cyc;
    nout++;
  end

  task automatic run_cell(input bit gaps);
    for (int k = 0; k < 352; k++) sys[k] = byte'($urandom);
    encode_cell(sys, ref_cell);
    checks++;
    if (!cell_is_codeword(ref_cell)) begin failures++; $display("FAIL: reference"); end
    nout = 0;
    for (int k = 0; k < 352; ) begin
      @(negedge clk);
      in_valid = gaps ? ($urandom % 3 != 0) : 1'b1;
      in_data  = sys[k];
      @(posedge clk);
      if (in_valid && in_ready) k++;
    end
    @(negedge clk) in_valid = 0;
    while (nout < 608) @(posedge clk);
    @(negedge clk);
    for (int k = 0; k < 608; k++) begin
      checks++;
      if (got[k] !== ref_cell[k]) begin
        failures++;
        if (failures < 10) $display("FAIL: byte %0d got %02x exp %02x", k, got[k], ref_cell[k]);
      end
    end
    if (!gaps) begin
      checks++;
      if (last_cyc - first_cyc != 607) begin
        failures++; $display("FAIL: cell took %0d clocks", last_cyc - first_cyc + 1);
      end
    end
    checks++;
    if (!at_boundary) begin failures++; $display("FAIL: not at boundary"); end
  endtask

  initial begin
    tables();
    cyc = 0; in_valid = 0; in_data = 0; nout = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_cell(0);
    run_cell(1);
    run_cell(0);
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
