// event_unit: barrier synchronisation and core clock gating of the cluster.
//
// Cores synchronise on a hardware barrier: a core that reaches the barrier
// signals it (arrive_i, in the cluster a load from the event unit's aliased
// barrier register) and is put to sleep at once by clearing its clock enable.
// When every core of the barrier mask has arrived, the barrier event fires
// (evt_o, one cycle) and all waiting cores are woken: their clock enables
// return two cycles after the event. The barrier is also what cores use before
// they switch between MIMD and the lockstep mode.
//
// Interface: arrive_i is sampled at the clock edge (one pulse per core and
// barrier); the core's clock enable falls in the next cycle. mask_we_i /
// mask_i set the participating cores (reset: all cores).
// Timing: last arrival sampled at edge t; evt_o is high in the cycle after t;
// core_clk_en_o is high again two cycles after that.
//
// Follows the paper: barrier primitive, clock gating of waiting cores, wake-up
// two cycles after the event. Own choices: the discrete arrive/mask interface
// (the memory-mapped registers behind it are not described) and
// the wake-up pipeline that yields the two cycles.
module event_unit #(
  parameter int unsigned N_CORES = 16
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               mask_we_i,
  input  logic [N_CORES-1:0] mask_i,
  input  logic [N_CORES-1:0] arrive_i,
  output logic [N_CORES-1:0] core_clk_en_o,
  output logic               evt_o
);

  logic [N_CORES-1:0] mask_q, arrived_q, arrived_d;
  logic               fire_q, wake_q, complete;

  assign arrived_d = arrived_q | (arrive_i & mask_q);
  assign complete  = (mask_q != '0) && ((arrived_d & mask_q) == mask_q) && !fire_q && !wake_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mask_q    <= '1;
      arrived_q <= '0;
      fire_q    <= 1'b0;
      wake_q    <= 1'b0;
    end else begin
      if (mask_we_i) mask_q <= mask_i;
      fire_q <= complete;
      wake_q <= fire_q;
      if (wake_q) arrived_q <= '0;
      else        arrived_q <= arrived_d;
    end
  end

  assign core_clk_en_o = ~arrived_q;
  assign evt_o         = fire_q;

endmodule
