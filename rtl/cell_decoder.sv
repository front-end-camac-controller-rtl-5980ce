// cell_decoder: Reed-Solomon decoder for one 608-byte link cell.
//
// Inverse of cell_encoder. While a cell arrives, the 352 systematic bytes
// are stored in one of two cell buffers and the eight syndromes of each of
// the 32 interleaved RS(19,11) codewords are accumulated by Horner's rule
// (symbols arrive highest degree first). After the last byte the
// codewords are decoded one per clock: Berlekamp-Massey gives the error
// locator, a Chien search over the 19 symbol positions finds the errors,
// and Forney's formula their values. Up to four wrong bytes per codeword
// are corrected, which covers any burst of 128 consecutive bytes. A
// codeword with more errors marks the cell bad (out_ok low). The
// corrections (at most four per codeword) are kept beside the buffer and
// applied as the cell is read out, so the decoded cell is delivered
// 32 clocks after its last byte.
//
// The paper gives the code, the interleave and the burst tolerance; the
// decoding algorithm, the two-buffer arrangement and the drop of a cell
// that finds both buffers busy are this design's.
//
// Interface: in_valid/in_sof/in_data is the received cell byte stream
// (in_sof with byte 0). out_valid/out_ready/out_data delivers the 352
// systematic bytes of a decoded cell; out_first/out_last mark its first and
// last byte and out_ok is valid with every byte. dropped counts cells lost
// because both buffers were full; fixed counts corrected bytes.
module cell_decoder
  import fecc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_sof,
  input  logic [7:0]  in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [7:0]  out_data,
  output logic        out_first,
  output logic        out_last,
  output logic        out_ok,
  output logic [15:0] dropped,
  output logic [15:0] fixed
);

  localparam int unsigned T = RS_NPAR / 2;  // correctable symbols

  typedef struct packed {
    logic                ok;
    logic [T-1:0]        hit;
    logic [T-1:0][4:0]   pos;   // symbol index 0..18 in arrival order
    logic [T-1:0][7:0]   val;
  } rs_fix_t;

  // Decode one codeword from its syndromes S_0..S_7.
  function automatic rs_fix_t rs_solve(input logic [7:0] s [RS_NPAR]);
    logic [7:0] c [RS_NPAR+1];
    logic [7:0] b [RS_NPAR+1];
    logic [7:0] t [RS_NPAR+1];
    logic [7:0] om [RS_NPAR];
    logic [7:0] bb, d, coef, xinv, lam, dlam, omv, xi;
    int         l, m, nroot;
    rs_fix_t    r;
    for (int i = 0; i <= RS_NPAR; i++) begin c[i] = '0; b[i] = '0; end
    c[0] = 8'h01; b[0] = 8'h01; bb = 8'h01; l = 0; m = 1;
    for (int n = 0; n < RS_NPAR; n++) begin
      d = s[n];
      for (int i = 1; i <= RS_NPAR; i++)
        if (i <= l && i <= n) d ^= gf_mul(c[i], s[n-i]);
      if (d == 8'h00) begin
        m = m + 1;
      end else begin
        coef = gf_mul(d, gf_inv(bb));
        for (int i = 0; i <= RS_NPAR; i++) t[i] = c[i];
        for (int i = 0; i <= RS_NPAR; i++)
          if (i >= m) c[i] ^= gf_mul(coef, b[i-m]);
        if (2*l <= n) begin
          l  = n + 1 - l;
          for (int i = 0; i <= RS_NPAR; i++) b[i] = t[i];
          bb = d;
          m  = 1;
        end else begin
          m = m + 1;
        end
      end
    end
    // Omega(x) = S(x) Lambda(x) mod x^8
    for (int k = 0; k < RS_NPAR; k++) begin
      om[k] = '0;
      for (int i = 0; i <= k; i++) om[k] ^= gf_mul(c[i], s[k-i]);
    end
    r = '0;
    nroot = 0;
    for (int p = 0; p < RS_N; p++) begin     // p = degree of the symbol
      xinv = gf_pow(255 - p);
      xi   = gf_pow(p);
      lam = '0; dlam = '0; omv = '0;
      for (int i = RS_NPAR; i >= 0; i--) lam = gf_mul(lam, xinv) ^ c[i];
      for (int i = RS_NPAR - 1; i >= 0; i--) omv = gf_mul(omv, xinv) ^ om[i];
      for (int i = RS_NPAR; i >= 1; i--)
        dlam = gf_mul(dlam, xinv) ^ ((i % 2 == 1) ? c[i] : 8'h00);
      // dlam is the formal derivative: sum over odd i of c[i] x^(i-1)
      if (lam == 8'h00) begin
        if (nroot < int'(T)) begin
          r.hit[nroot] = 1'b1;
          r.pos[nroot] = 5'(RS_N - 1 - p);
          r.val[nroot] = gf_mul(gf_mul(xi, omv), gf_inv(dlam));
        end
        nroot = nroot + 1;
      end
    end
    r.ok = (l <= int'(T)) && (nroot == l);
    return r;
  endfunction

  // ------------------------------------------------------------- receive
  logic [7:0] buf_q  [2][CELL_SYS];
  logic [7:0] syn_q  [CELL_NCW][RS_NPAR];
  rs_fix_t    fix_q  [2][CELL_NCW];
  logic [1:0] full_q;          // buffer holds a cell (decoding or draining)
  logic [1:0] ready_q;         // buffer decoded, may be drained
  logic [1:0] ok_q;
  logic       wbank_q, rbank_q, rx_act_q, wptr_q;
  logic [9:0] rcnt_q;
  logic       dec_act_q, dec_bank_q;
  logic [4:0] dec_cw_q;
  logic [8:0] ocnt_q;

  logic [7:0] alpha_i [RS_NPAR];
  always_comb
    for (int i = 0; i < RS_NPAR; i++) alpha_i[i] = gf_pow(i);

  // The two buffers form a two-entry queue: filled and drained in turn.
  logic       start_ok;
  logic       wbank_pick;
  assign wbank_pick = wptr_q;
  assign start_ok   = in_valid && in_sof && !full_q[wptr_q];

  rs_fix_t    cur_fix;
  logic [7:0] cur_syn [RS_NPAR];
  always_comb begin
    for (int i = 0; i < RS_NPAR; i++) cur_syn[i] = syn_q[dec_cw_q][i];
    cur_fix = rs_solve(cur_syn);
  end

  // Byte position, buffer and acceptance of the byte arriving now.
  logic [9:0] rx_k;
  logic       rx_act, rx_bank, rx_end;
  always_comb begin
    rx_k    = in_sof ? '0 : rcnt_q;
    rx_act  = in_valid && (in_sof ? start_ok : rx_act_q);
    rx_bank = in_sof ? wbank_pick : wbank_q;
    rx_end  = rx_act && (rx_k == 10'(CELL_BYTES-1));
  end

  logic       drain;
  assign drain = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q     <= '0;
      ready_q    <= '0;
      ok_q       <= '0;
      wbank_q    <= 1'b0;
      wptr_q     <= 1'b0;
      rbank_q    <= 1'b0;
      rx_act_q   <= 1'b0;
      rcnt_q     <= '0;
      dec_act_q  <= 1'b0;
      dec_bank_q <= 1'b0;
      dec_cw_q   <= '0;
      ocnt_q     <= '0;
      dropped    <= '0;
      fixed      <= '0;
      for (int j = 0; j < CELL_NCW; j++)
        for (int i = 0; i < RS_NPAR; i++) syn_q[j][i] <= '0;
    end else begin
      // ---- reception
      if (in_valid) begin
        if (in_sof) begin
          if (start_ok) begin
            wbank_q <= wbank_pick;
            wptr_q  <= !wptr_q;
          end else begin
            dropped <= dropped + 1'b1;
          end
        end
        if (rx_act) begin
          if (rx_k < 10'(CELL_SYS))
            buf_q[rx_bank][rx_k[8:0]] <= in_data;
          for (int i = 0; i < RS_NPAR; i++)
            syn_q[rx_k[4:0]][i] <= ((rx_k < 10'(CELL_NCW)) ? 8'h00
                                    : gf_mul(syn_q[rx_k[4:0]][i], alpha_i[i])) ^ in_data;
          if (rx_end) begin
            dec_act_q        <= 1'b1;
            dec_bank_q       <= rx_bank;
            dec_cw_q         <= '0;
            full_q[rx_bank]  <= 1'b1;
            ok_q[rx_bank]    <= 1'b1;
          end
        end
        rx_act_q <= rx_act && !rx_end;
        rcnt_q   <= rx_k + 1'b1;
      end
      // ---- decoding, one codeword per clock
      if (dec_act_q) begin
        fix_q[dec_bank_q][dec_cw_q] <= cur_fix;
        if (!cur_fix.ok) ok_q[dec_bank_q] <= 1'b0;
        else fixed <= fixed + 16'($countones(cur_fix.hit));
        dec_cw_q <= dec_cw_q + 1'b1;
        if (dec_cw_q == 5'(CELL_NCW-1)) begin
          dec_act_q           <= 1'b0;
          ready_q[dec_bank_q] <= 1'b1;
        end
      end
      // ---- drain
      if (drain) begin
        if (ocnt_q == 9'(CELL_SYS-1)) begin
          ocnt_q          <= '0;
          full_q[rbank_q]  <= 1'b0;
          ready_q[rbank_q] <= 1'b0;
          rbank_q         <= !rbank_q;
        end else begin
          ocnt_q <= ocnt_q + 1'b1;
        end
      end
    end
  end

  rs_fix_t    ofix;
  logic [4:0] osym;
  always_comb begin
    ofix      = fix_q[rbank_q][ocnt_q[4:0]];
    osym      = 5'(ocnt_q >> 5);
    out_valid = ready_q[rbank_q];
    out_ok    = ok_q[rbank_q];
    out_first = (ocnt_q == '0);
    out_last  = (ocnt_q == 9'(CELL_SYS-1));
    out_data  = buf_q[rbank_q][ocnt_q];
    if (ok_q[rbank_q])
      for (int e = 0; e < int'(T); e++)
        if (ofix.hit[e] && ofix.pos[e] == osym) out_data ^= ofix.val[e];
  end

endmodule
