// camac_cable_model: behavioural model of one serial CAMAC cable and its
// crates (testbench only).
//
// Stands for the cable protocol engine (SLAC bit-serial string or IEEE
// serial highway) plus the modules on it. Each cycle request is
// acknowledged DELAY clocks later, the round trip of a real cable. Every
// module position (crate, N, A) has a 24-bit register: F0..F7 read it,
// F16..F23 write it; a read of N=30 returns X=0 (no module). The model
// logs every cycle in order so a testbench can check sequencing.
module camac_cable_model #(
  parameter int unsigned DELAY = 20
) (
  input  logic                  clk,
  input  logic                  cyc_req,
  input  fecc_pkg::camac_naf_t  cyc_naf,
  input  logic [23:0]           cyc_wdata,
  output logic                  cyc_ack,
  output logic [23:0]           cyc_rdata,
  output logic                  cyc_q,
  output logic                  cyc_x
);
  logic [23:0] regs [int];
  fecc_pkg::camac_naf_t log_naf [$];
  logic [23:0]          log_data [$];
  int cnt = 0;
  bit busy = 0;

  initial begin cyc_ack = 0; cyc_rdata = 0; cyc_q = 0; cyc_x = 0; end

  always @(posedge clk) begin
    cyc_ack <= 0;
    if (cyc_req && !busy && !cyc_ack) begin
      busy = 1; cnt = 0;
    end else if (busy) begin
      cnt++;
      if (cnt == DELAY) begin
        int key;
        key = {cyc_naf.crate, cyc_naf.n, cyc_naf.a};
        busy = 0;
        cyc_ack <= 1;
        cyc_x   <= (cyc_naf.n != 5'd30);
        cyc_q   <= 1;
        cyc_rdata <= 24'h0;
        if (cyc_naf.f[4:3] == 2'b00) cyc_rdata <= regs.exists(key) ? regs[key] : 24'(key);
        if (cyc_naf.f[4:3] == 2'b10) regs[key] = cyc_wdata;
        log_naf.push_back(cyc_naf);
        log_data.push_back(cyc_naf.f[4:3] == 2'b10 ? cyc_wdata :
                           (regs.exists(key) ? regs[key] : 24'(key)));
      end
    end
  end
endmodule
