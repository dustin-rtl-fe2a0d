// tcdm_interconnect: single-cycle logarithmic interconnect (LIC) between the
// cluster's masters (cores, DMA ports) and the word-interleaved L1 banks.
//
// Address map: consecutive 32-bit words go to consecutive banks. With 32
// banks, address bits [6:2] select the bank and the next ROW_W bits the word
// in the bank; higher bits are ignored (the L1 is the only target).
//
// How it works: every bank has a round-robin arbiter. In each cycle it grants
// one of the masters that address it, starting the search at the master after
// the one it granted last; the others see no grant and keep requesting (the
// usual request/grant handshake), so concurrent accesses to one bank are
// served one after another. The grant is combinational (same cycle as the
// request); the bank's read data returns to the master one cycle later with
// rvalid_o. A write also gets an rvalid_o pulse, with undefined data.
//
// Follows the paper: single-cycle latency, round-robin service of conflicting
// requests, word-level interleaving over 32 banks. Own choices: arbiter
// pointer update, the rvalid signal for writes, ignoring the upper address
// bits.
module tcdm_interconnect
  import dustin_pkg::tcdm_req_t;
#(
  parameter int unsigned N_MASTERS = 20,
  parameter int unsigned N_BANKS   = 32,
  parameter int unsigned ROW_W     = 10
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  // master side
  input  logic      [N_MASTERS-1:0]             req_i,
  input  tcdm_req_t [N_MASTERS-1:0]             mreq_i,
  output logic      [N_MASTERS-1:0]             gnt_o,
  output logic      [N_MASTERS-1:0]             rvalid_o,
  output logic      [N_MASTERS-1:0][31:0]       rdata_o,
  // bank side
  output logic      [N_BANKS-1:0]               bank_req_o,
  output logic      [N_BANKS-1:0]               bank_we_o,
  output logic      [N_BANKS-1:0][ROW_W-1:0]    bank_addr_o,
  output logic      [N_BANKS-1:0][3:0]          bank_be_o,
  output logic      [N_BANKS-1:0][31:0]         bank_wdata_o,
  input  logic      [N_BANKS-1:0][31:0]         bank_rdata_i
);

  localparam int unsigned BW = $clog2(N_BANKS);
  localparam int unsigned MW = $clog2(N_MASTERS);

  logic [N_MASTERS-1:0][BW-1:0] mbank;
  logic [N_BANKS-1:0][MW-1:0]   rr_q, winner;
  logic [N_BANKS-1:0]           won;

  always_comb begin
    for (int m = 0; m < int'(N_MASTERS); m++) mbank[m] = mreq_i[m].addr[2 +: BW];
  end

  // Round-robin arbitration per bank.
  always_comb begin
    gnt_o = '0;
    for (int b = 0; b < int'(N_BANKS); b++) begin
      int unsigned idx;
      won[b]    = 1'b0;
      winner[b] = '0;
      for (int k = 0; k < int'(N_MASTERS); k++) begin
        idx = (int'(rr_q[b]) + k) % N_MASTERS;
        if (!won[b] && req_i[idx] && mbank[idx] == BW'(b)) begin
          won[b]    = 1'b1;
          winner[b] = MW'(idx);
        end
      end
      if (won[b]) gnt_o[winner[b]] = 1'b1;
      bank_req_o[b]   = won[b];
      bank_we_o[b]    = mreq_i[winner[b]].we;
      bank_addr_o[b]  = mreq_i[winner[b]].addr[2+BW +: ROW_W];
      bank_be_o[b]    = mreq_i[winner[b]].be;
      bank_wdata_o[b] = mreq_i[winner[b]].wdata;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q <= '0;
    end else begin
      for (int b = 0; b < int'(N_BANKS); b++)
        if (won[b]) rr_q[b] <= (int'(winner[b]) == int'(N_MASTERS) - 1) ? '0 : winner[b] + MW'(1);
    end
  end

  // Response path: remember which bank each master was granted by.
  logic [N_MASTERS-1:0][BW-1:0] rbank_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_o <= '0;
      rbank_q  <= '0;
    end else begin
      rvalid_o <= gnt_o;
      rbank_q  <= mbank;
    end
  end

  always_comb begin
    for (int m = 0; m < int'(N_MASTERS); m++) rdata_o[m] = bank_rdata_i[rbank_q[m]];
  end

  // Handshake rule: a grant only answers a pending request.
  assert property (@(posedge clk_i) disable iff (!rst_ni) (gnt_o & ~req_i) == '0)
    else $error("tcdm_interconnect: grant without request");

endmodule
