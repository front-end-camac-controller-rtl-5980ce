// fecc_pkg: types, constants and Galois-field helpers shared by the FECC2
// FPGA logic.
//
// The DMA memory is one logical 32-bit port of 1M words (four interleaved
// one-megabyte parts). Every requester talks to it through a dma_req_t /
// dma_rsp_t pair: the requester holds req.valid until it sees gnt, and a
// read returns rvalid/rdata a fixed number of cycles after the grant.
//
// The link carries 608-byte cells, each made of 32 interleaved Reed-Solomon
// (19,11) codewords over GF(2^8). The field polynomial
// x^8+x^4+x^3+x^2+1 and the generator roots alpha^0..alpha^7 are this
// design's choice; the cell geometry is the paper's.
package fecc_pkg;

  localparam int unsigned DMA_AW = 20;           // 1M 32-bit words
  localparam int unsigned DMA_DW = 32;

  typedef logic [DMA_AW-1:0] dma_addr_t;

  typedef struct packed {
    logic             valid;
    logic             we;
    dma_addr_t        addr;
    logic [DMA_DW-1:0] wdata;
  } dma_req_t;

  typedef struct packed {
    logic             gnt;
    logic             rvalid;
    logic [DMA_DW-1:0] rdata;
  } dma_rsp_t;

  // Owners of the DMA memory time slots.
  typedef enum logic [2:0] {
    OWN_LINK_TX = 3'd0,
    OWN_LINK_RX = 3'd1,
    OWN_IEEE    = 3'd2,
    OWN_SLAC    = 3'd3,
    OWN_SHARC   = 3'd4
  } dma_owner_e;
  localparam int unsigned N_OWNERS = 5;

  // Link cell geometry.
  localparam int unsigned CELL_NCW      = 32;   // interleaved codewords
  localparam int unsigned RS_N          = 19;
  localparam int unsigned RS_K          = 11;
  localparam int unsigned RS_NPAR       = RS_N - RS_K;        // 8
  localparam int unsigned CELL_BYTES    = CELL_NCW * RS_N;    // 608
  localparam int unsigned CELL_SYS      = CELL_NCW * RS_K;    // 352
  localparam int unsigned HDR_BYTES     = CELL_NCW;           // 32
  localparam int unsigned PAYLOAD_BYTES = CELL_SYS - HDR_BYTES; // 320
  localparam int unsigned PAYLOAD_WORDS = PAYLOAD_BYTES / 4;  // 80

  // Transfer classes on the link (priority: trigger > sync > async).
  typedef enum logic [1:0] {
    CLS_ASYNC = 2'd0,
    CLS_SYNC  = 2'd1,
    CLS_TRIG  = 2'd2
  } cell_class_e;

  // Cell header fields carried in header bytes 0..7; bytes 8..31 are zero.
  typedef struct packed {
    logic [7:0]  cls;       // byte 0: cell_class_e
    logic [7:0]  slot;      // byte 1: index of the message in its ring
    logic [15:0] seq;       // bytes 2,3: cell number within the message
    logic [7:0]  flags;     // byte 4: bit0 = last cell of the message
    logic [7:0]  nwords;    // byte 5: payload words used in this cell
    logic [15:0] msg_words; // bytes 6,7: message length in words
  } cell_hdr_t;

  // A pointer-ring entry for the link: message word address and length.
  typedef struct packed {
    logic [11:0] nwords;
    dma_addr_t   addr;
  } ring_entry_t;

  // CAMAC cycle as presented to a cable's protocol engine.
  typedef struct packed {
    logic [5:0]  crate;
    logic [4:0]  n;
    logic [3:0]  a;
    logic [4:0]  f;
  } camac_naf_t;

  // Descriptor of one CAMAC transfer (one context of a camac_unit).
  typedef struct packed {
    camac_naf_t  naf;
    logic [15:0] count;        // words (CAMAC cycles)
    dma_addr_t   addr;         // DMA word address of the data
    logic        recov_en;     // recovery cycle after a preemption
    logic [3:0]  recov_a;      // subaddress of the module's pointer register
    logic [23:0] recov_base;   // pointer value at the start of the block
  } camac_desc_t;

  // ---------------------------------------------------------------- GF(2^8)
  // Multiply by alpha (x) modulo the field polynomial.
  function automatic logic [7:0] gf_xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1D : 8'h00);
  endfunction

  // Shift-and-add product, written out without a loop so that the large
  // decoder function stays cheap to elaborate.
  function automatic logic [7:0] gf_mul(input logic [7:0] x, input logic [7:0] y);
    logic [7:0] a1, a2, a3, a4, a5, a6, a7;
    a1 = gf_xtime(x);
    a2 = gf_xtime(a1);
    a3 = gf_xtime(a2);
    a4 = gf_xtime(a3);
    a5 = gf_xtime(a4);
    a6 = gf_xtime(a5);
    a7 = gf_xtime(a6);
    return ({8{y[0]}} & x)  ^ ({8{y[1]}} & a1) ^ ({8{y[2]}} & a2) ^
           ({8{y[3]}} & a3) ^ ({8{y[4]}} & a4) ^ ({8{y[5]}} & a5) ^
           ({8{y[6]}} & a6) ^ ({8{y[7]}} & a7);
  endfunction

  // alpha^e, alpha = 2
  function automatic logic [7:0] gf_pow(input int unsigned e);
    logic [7:0] r, b;
    logic [7:0] k;
    r = 8'h01;
    b = 8'h02;
    k = 8'(e % 255);
    for (int i = 0; i < 8; i++) begin       // square and multiply
      if (k[i]) r = gf_mul(r, b);
      b = gf_mul(b, b);
    end
    return r;
  endfunction

  // Multiplicative inverse: x^254.
  function automatic logic [7:0] gf_inv(input logic [7:0] x);
    logic [7:0] r, b;
    int unsigned e;
    r = 8'h01;
    b = x;
    e = 254;
    for (int i = 0; i < 8; i++) begin
      if (e[i]) r = gf_mul(r, b);
      b = gf_mul(b, b);
    end
    return r;
  endfunction

  // Generator polynomial g(x) = prod_{i=0}^{7} (x - alpha^i); coefficient
  // j of x^j returned in byte j, the monic x^8 term left out.
  function automatic logic [8*RS_NPAR-1:0] rs_gen_poly();
    logic [7:0] g [RS_NPAR+1];
    logic [8*RS_NPAR-1:0] r;
    for (int j = 0; j <= RS_NPAR; j++) g[j] = '0;
    g[0] = 8'h01;
    for (int i = 0; i < RS_NPAR; i++) begin
      logic [7:0] root;
      root = gf_pow(i);
      for (int j = RS_NPAR; j > 0; j--) g[j] = g[j-1] ^ gf_mul(g[j], root);
      g[0] = gf_mul(g[0], root);
    end
    for (int j = 0; j < RS_NPAR; j++) r[8*j +: 8] = g[j];
    return r;
  endfunction

endpackage
