// lks_unit: lockstep unit between the cores' data ports and the TCDM
// interconnect.
//
// In Vector Lockstep Execution Mode (VLEM) all cores execute the same
// instruction in the same cycle and must stay aligned. A bank conflict in the
// interconnect would serve the cores one after the other and let them drift
// apart. The lockstep unit prevents this and also merges identical loads.
//
// How it works (lockstep_i = 1):
//  - Broadcast unit: compares the request addresses of all cores. If every
//    core issues a load and all addresses are equal, it raises BRDC.
//  - Request silencer: with BRDC only the leader's (core 0) request reaches
//    memory; the followers' requests are blocked. It also blocks the request
//    of a core whose access was already granted while others still wait, so
//    that no access is made twice.
//  - Grant synchronizer: holds back the grants coming from memory until every
//    requesting core has been served, then gives all grants in the same cycle.
//    With BRDC the leader's grant is given to all cores.
//  - Data synchronizer: the TCDM returns read data one cycle after the grant.
//    Data of cores served early is buffered and returned to all cores in the
//    cycle after the common grant. With BRDC the leader's read data goes to
//    every core.
// With lockstep_i = 0 (MIMD) the unit is bypassed: requests, grants and data
// pass unchanged.
//
// Timing: request/grant handshake as at the core: a core keeps core_req_i up
// until it sees lks_gnt_o; lks_rvalid_o/lks_data_o follow one cycle after the
// grant. The mode may only change while no access is outstanding (the
// software enters and leaves VLEM after a barrier).
//
// Follows the paper: the four sub-blocks, the BRDC signal, the leader being
// core 0, holding grants until all accesses completed and releasing them
// simultaneously, forwarding the leader's data on a broadcast, bypass in MIMD.
// Own choices: broadcasting only when all cores issue a load to the same
// address (a store is never merged); the rvalid signals; blocking already
// served requests.
module lks_unit #(
  parameter int unsigned N_CORES = 16
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       lockstep_i,     // VLEM active
  // core side
  input  logic [N_CORES-1:0]         core_req_i,
  input  logic [N_CORES-1:0][31:0]   core_addr_i,
  input  logic [N_CORES-1:0]         core_we_i,
  output logic [N_CORES-1:0]         lks_gnt_o,
  output logic [N_CORES-1:0]         lks_rvalid_o,
  output logic [N_CORES-1:0][31:0]   lks_data_o,
  // memory (interconnect) side
  output logic [N_CORES-1:0]         lks_req_o,
  input  logic [N_CORES-1:0]         mem_gnt_i,
  input  logic [N_CORES-1:0]         mem_rvalid_i,
  input  logic [N_CORES-1:0][31:0]   mem_data_i,
  output logic                       brdc_o          // a broadcast is being served
);

  // ---------------- Broadcast unit ----------------
  logic brdc;
  always_comb begin
    brdc = lockstep_i && (&core_req_i);
    for (int i = 0; i < int'(N_CORES); i++) begin
      if (core_we_i[i] || core_addr_i[i] != core_addr_i[0]) brdc = 1'b0;
    end
  end
  assign brdc_o = brdc;

  // ---------------- Request silencer ----------------
  logic [N_CORES-1:0] served_q;   // granted by memory, grant to the core held back
  always_comb begin
    if (!lockstep_i) begin
      lks_req_o = core_req_i;
    end else if (brdc) begin
      lks_req_o    = '0;
      lks_req_o[0] = core_req_i[0];
    end else begin
      lks_req_o = core_req_i & ~served_q;
    end
  end

  // ---------------- Grant synchronizer ----------------
  logic [N_CORES-1:0] done_now;
  logic               all_done;
  assign done_now = served_q | (mem_gnt_i & lks_req_o);
  assign all_done = brdc ? mem_gnt_i[0] : ((|core_req_i) && ((done_now & core_req_i) == core_req_i));

  always_comb begin
    if (!lockstep_i) lks_gnt_o = mem_gnt_i;
    else             lks_gnt_o = all_done ? core_req_i : '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                       served_q <= '0;
    else if (!lockstep_i || all_done)  served_q <= '0;
    else                               served_q <= done_now & core_req_i;
  end

  // ---------------- Data synchronizer ----------------
  logic [N_CORES-1:0]       release_q;   // cores whose response is due now
  logic                     brdc_q;
  logic [N_CORES-1:0][31:0] data_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      release_q <= '0;
      brdc_q    <= 1'b0;
      data_q    <= '0;
    end else begin
      release_q <= (lockstep_i && all_done) ? core_req_i : '0;
      brdc_q    <= lockstep_i && brdc && all_done;
      for (int i = 0; i < int'(N_CORES); i++) begin
        if (lockstep_i && !release_q[i] && mem_rvalid_i[i]) data_q[i] <= mem_data_i[i];
      end
    end
  end

  always_comb begin
    if (!lockstep_i) begin
      lks_rvalid_o = mem_rvalid_i;
      lks_data_o   = mem_data_i;
    end else begin
      lks_rvalid_o = release_q;
      for (int i = 0; i < int'(N_CORES); i++) begin
        if (brdc_q)               lks_data_o[i] = mem_data_i[0];
        else if (mem_rvalid_i[i]) lks_data_o[i] = mem_data_i[i];
        else                      lks_data_o[i] = data_q[i];
      end
    end
  end

  // In lockstep the cores see their grants all together or not at all.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   lockstep_i |-> (lks_gnt_o == '0 || lks_gnt_o == core_req_i))
    else $error("lks_unit: grants released to a subset of the cores in lockstep");

endmodule
