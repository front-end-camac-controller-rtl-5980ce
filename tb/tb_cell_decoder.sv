// tb_cell_decoder: checks cell_decoder with clean and corrupted cells.
//
// Cells are encoded by the reference encoder and sent back to back, one
// byte per clock. Cases: a clean cell; a cell with a 128-byte burst of
// random errors (at most four per codeword, the paper's "more than a
// microsecond" burst); a cell with exactly four scattered errors in every
// codeword; a cell with five errors in one codeword, which must be
// reported bad. The 352 delivered bytes must equal the original header
// and payload, out_ok must match, and the first byte must be offered 33
// clocks after the last byte of the cell arrived (32 decode clocks).
// A slow consumer (random out_ready) is used for part of the run.
module tb_cell_decoder;
  import tb_rs_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic        in_valid, in_sof, out_valid, out_ready, out_first, out_last, out_ok;
  logic [7:0]  in_data, out_data;
  logic [15:0] dropped, fixed;
  int checks = 0, failures = 0;

  cell_decoder dut (.*);

  localparam int NCELL = 6;
  byte unsigned sys_q [NCELL][352];
  bit           exp_ok [NCELL];
  int           last_in_cyc [NCELL];
  int cyc = 0;
  bit slow = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // consumer / checker
  int ocell = 0, obyte = 0;
  always @(negedge clk) out_ready = slow ? ($urandom % 4 != 0) : 1'b1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (obyte == 0) begin
      checks += 2;
      if (!out_first) begin failures++; $display("FAIL: out_first"); end
      if (out_ok !== exp_ok[ocell]) begin
        failures++; $display("FAIL: cell %0d ok=%0d exp %0d", ocell, out_ok, exp_ok[ocell]);
      end
      if (!slow) begin
        checks++;
        if (cyc - last_in_cyc[ocell] != 33) begin
          failures++; $display("FAIL: cell %0d latency %0d", ocell, cyc - last_in_cyc[ocell]);
        end
      end
    end
    if (exp_ok[ocell]) begin
      checks++;
      if (out_data !== sys_q[ocell][obyte]) begin
        failures++;
        if (failures < 10) $display("FAIL: cell %0d byte %0d got %02x exp %02x",
                                    ocell, obyte, out_data, sys_q[ocell][obyte]);
      end
    end
    if (obyte == 351) begin
      checks++;
      if (!out_last) begin failures++; $display("FAIL: out_last"); end
      obyte = 0; ocell++;
    end else obyte++;
  end

  task automatic send(input int n, input int mode);
    byte unsigned c [608];
    for (int k = 0; k < 352; k++) sys_q[n][k] = byte'($urandom);
    encode_cell(sys_q[n], c);
    exp_ok[n] = 1;
    case (mode)
      1: begin                             // burst of 128 bytes
        int s = 40 + $urandom % 400;
        for (int k = s; k < s + 128; k++) c[k] ^= byte'(1 + $urandom % 255);
      end
      2: begin                             // four errors in every codeword
        for (int j = 0; j < 32; j++)
          for (int e = 0; e < 4; e++) c[(e * 5 + j % 3) * 32 + j] ^= byte'(1 + $urandom % 255);
      end
      3: begin                             // five errors in codeword 7
        for (int e = 0; e < 5; e++) c[(e * 3 + 1) * 32 + 7] ^= byte'(1 + $urandom % 255);
        exp_ok[n] = 0;
      end
      default: ;
    endcase
    for (int k = 0; k < 608; k++) begin
      @(negedge clk);
      in_valid = 1; in_sof = (k == 0); in_data = c[k];
    end
    @(posedge clk);
    last_in_cyc[n] = cyc;
    @(negedge clk) in_valid = 0; in_sof = 0;
  endtask

  initial begin
    tables();
    in_valid = 0; in_sof = 0; in_data = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(0, 0);
    send(1, 1);
    send(2, 2);
    send(3, 3);
    slow = 1;
    send(4, 1);
    send(5, 0);
    repeat (3000) @(posedge clk);
    checks++;
    if (ocell != NCELL) begin failures++; $display("FAIL: %0d cells delivered", ocell); end
    checks++;
    if (dropped != 0) begin failures++; $display("FAIL: dropped %0d", dropped); end
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
