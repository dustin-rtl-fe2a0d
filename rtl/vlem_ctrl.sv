// vlem_ctrl: mode control of the Vector Lockstep Execution Mode (VLEM).
//
// The cluster runs either MIMD (every core fetches its own instructions) or
// VLEM, where core 0, the leader, fetches and the other cores, the followers,
// execute the instruction the leader fetched in the same cycle. VLEM saves the
// fetch energy of the followers: their IF stages and private instruction
// caches are clock gated.
//
// How it works. A memory-mapped mode register (bit 0 of a write on the cfg
// port) switches the mode in one cycle. Software writes it after all cores
// met at a barrier.
//  - Entering VLEM: lockstep_o rises at the next clock edge. The instruction
//    handed to every follower's ID stage becomes the leader's. The followers'
//    IF clocks stop. Their caches are told to terminate any in-flight refill
//    (icache_abort_o); each cache clock stops once that cache reports no refill
//    in flight (icache_busy_i low). The leader's cache is not touched.
//  - Leaving VLEM: lockstep_o falls at the next clock edge, the clocks return,
//    and pc_set_o pulses for one cycle for every follower with pc_o = the
//    leader's fetch PC, so that all followers resume where the leader is. A
//    follower may then miss in its cache that was asleep.
// lockstep_o also enables the lockstep unit on the data side.
//
// Follows the paper: core 0 as leader, single-cycle switch through a
// memory-mapped register, instruction forwarding, clock gating of follower IF
// stages and caches, termination of in-flight refills before sleep, followers
// taking the leader's PC on exit. Own choices: the cfg port, the busy/abort
// handshake with the caches, the clock gate cells (cluster_clk_gate).
module vlem_ctrl #(
  parameter int unsigned N_CORES = 16
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     test_en_i,
  // memory-mapped mode register
  input  logic                     cfg_we_i,
  input  logic [31:0]              cfg_wdata_i,
  output logic [31:0]              cfg_rdata_o,
  output logic                     lockstep_o,
  // fetch side: what each core's IF stage delivers
  input  logic [N_CORES-1:0][31:0] if_instr_i,
  input  logic [N_CORES-1:0]       if_valid_i,
  input  logic [31:0]              leader_pc_i,
  // decode side: what each core's ID stage executes
  output logic [N_CORES-1:0][31:0] id_instr_o,
  output logic [N_CORES-1:0]       id_valid_o,
  // follower PC resynchronisation on exit
  output logic [N_CORES-1:0]       pc_set_o,
  output logic [31:0]              pc_o,
  // private instruction caches
  input  logic [N_CORES-1:0]       icache_busy_i,
  output logic [N_CORES-1:0]       icache_abort_o,
  // gated clocks
  output logic [N_CORES-1:0]       if_clk_o,
  output logic [N_CORES-1:0]       icache_clk_o,
  output logic [N_CORES-1:0]       if_clk_en_o,
  output logic [N_CORES-1:0]       icache_clk_en_o
);

  logic lockstep_q, exit_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lockstep_q <= 1'b0;
      exit_q     <= 1'b0;
    end else begin
      exit_q <= cfg_we_i && lockstep_q && !cfg_wdata_i[0];
      if (cfg_we_i) lockstep_q <= cfg_wdata_i[0];
    end
  end

  assign lockstep_o  = lockstep_q;
  assign cfg_rdata_o = {31'd0, lockstep_q};
  assign pc_o        = leader_pc_i;

  always_comb begin
    for (int i = 0; i < int'(N_CORES); i++) begin
      if (i == 0) begin
        id_instr_o[i]      = if_instr_i[i];
        id_valid_o[i]      = if_valid_i[i];
        pc_set_o[i]        = 1'b0;
        icache_abort_o[i]  = 1'b0;
        if_clk_en_o[i]     = 1'b1;
        icache_clk_en_o[i] = 1'b1;
      end else begin
        id_instr_o[i]      = lockstep_q ? if_instr_i[0] : if_instr_i[i];
        id_valid_o[i]      = lockstep_q ? if_valid_i[0] : if_valid_i[i];
        pc_set_o[i]        = exit_q;
        icache_abort_o[i]  = lockstep_q;
        if_clk_en_o[i]     = !lockstep_q;
        icache_clk_en_o[i] = !lockstep_q || icache_busy_i[i];
      end
    end
  end

  for (genvar i = 0; i < int'(N_CORES); i++) begin : g_cg
    cluster_clk_gate u_if_cg (
      .clk_i(clk_i), .en_i(if_clk_en_o[i]), .test_en_i(test_en_i), .clk_o(if_clk_o[i])
    );
    cluster_clk_gate u_ic_cg (
      .clk_i(clk_i), .en_i(icache_clk_en_o[i]), .test_en_i(test_en_i), .clk_o(icache_clk_o[i])
    );
  end

endmodule
