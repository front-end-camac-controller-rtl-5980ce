// cell_encoder: Reed-Solomon encoder for one 608-byte link cell.
//
// A cell is 32 interleaved RS(19,11) codewords over GF(2^8). The first 352
// bytes (32-byte header, 320-byte payload) pass straight through; byte k
// of the cell belongs to codeword k mod 32 and is symbol k div 32 of it, so
// each codeword carries one header byte, ten payload bytes and, in the
// last 256 bytes of the cell, its eight parity bytes. A noise burst of up
// to 128 consecutive bytes (1.02 us at 125 MB/s) therefore hits at most
// four symbols of any codeword and can be corrected. The cell geometry is
// the paper's; the field polynomial (0x11D), the generator roots
// alpha^0..alpha^7 and the byte order within the cell are this design's.
//
// Each codeword has its own 8-byte division register (32 in all). For a
// systematic byte the register of its codeword takes one LFSR step; in the
// parity phase each register shifts out its highest byte every 32 cycles.
//
// Interface: in_valid/in_ready/in_data is the systematic byte stream;
// in_ready is low while parity is being sent. out_valid/out_sof/out_data
// is registered: one byte per clock in the parity phase, one per accepted
// input byte before it. at_boundary is high when no cell is in progress;
// ending is high while the last parity byte is sent, so that the next
// cell's first byte can follow on the very next clock.
module cell_encoder
  import fecc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  logic [7:0] in_data,
  output logic       out_valid,
  output logic       out_sof,
  output logic [7:0] out_data,
  output logic       at_boundary,
  output logic       ending
);

  localparam logic [8*RS_NPAR-1:0] GEN = rs_gen_poly();

  logic [9:0] cnt_q;                        // byte index within the cell
  logic [7:0] rem_q [CELL_NCW][RS_NPAR];    // division registers
  logic [4:0] cw;
  logic       sys_phase, step;
  logic [7:0] fb;

  assign cw          = cnt_q[4:0];
  assign sys_phase   = (cnt_q < 10'(CELL_SYS));
  assign in_ready    = sys_phase;
  assign at_boundary = (cnt_q == '0);
  assign ending      = (cnt_q == 10'(CELL_BYTES-1));
  assign step        = sys_phase ? in_valid : 1'b1;
  assign fb          = in_data ^ rem_q[cw][RS_NPAR-1];   // LFSR feedback

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q     <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_data  <= '0;
      for (int j = 0; j < CELL_NCW; j++)
        for (int i = 0; i < RS_NPAR; i++) rem_q[j][i] <= '0;
    end else begin
      out_valid <= step;
      out_sof   <= step && (cnt_q == '0);
      if (step) begin
        cnt_q <= (cnt_q == 10'(CELL_BYTES-1)) ? '0 : cnt_q + 1'b1;
        if (sys_phase) begin
          out_data <= in_data;
          for (int i = RS_NPAR-1; i > 0; i--)
            rem_q[cw][i] <= rem_q[cw][i-1] ^ gf_mul(GEN[8*i +: 8], fb);
          rem_q[cw][0] <= gf_mul(GEN[7:0], fb);
        end else begin
          out_data <= rem_q[cw][RS_NPAR-1];
          for (int i = RS_NPAR-1; i > 0; i--) rem_q[cw][i] <= rem_q[cw][i-1];
          rem_q[cw][0] <= '0;
        end
      end
    end
  end

endmodule
