// tb_vlem_ctrl: self-checking test of the VLEM mode control.
//
// Checks, cycle by cycle: MIMD at reset with every core decoding its own
// instruction and all clocks running; entry into VLEM one cycle after the
// register write; followers decoding the leader's instruction; follower IF
// clocks stopped (no edges counted on the gated clocks) while the leader's
// runs; a follower cache with a refill in flight keeps its clock and gets the
// abort request until the refill ends; exit one cycle after the write with a
// one-cycle pc_set pulse carrying the leader's PC, and clocks running again.
module tb_vlem_ctrl;
  localparam int N = 16;

  logic clk, rst_n;
  initial begin
    clk = 0;
    rst_n = 0;
    forever #5 clk = ~clk;
  end

  logic               cfg_we, lockstep;
  logic [31:0]        cfg_wdata, cfg_rdata, leader_pc, pc;
  logic [N-1:0][31:0] if_instr, id_instr;
  logic [N-1:0]       if_valid, id_valid, pc_set, ic_busy, ic_abort, if_clk, ic_clk, if_en, ic_en;
  int checks = 0, failures = 0;
  int if_edges[N], ic_edges[N];

  vlem_ctrl #(.N_CORES(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .test_en_i(1'b0), .cfg_we_i(cfg_we), .cfg_wdata_i(cfg_wdata),
    .cfg_rdata_o(cfg_rdata), .lockstep_o(lockstep), .if_instr_i(if_instr), .if_valid_i(if_valid),
    .leader_pc_i(leader_pc), .id_instr_o(id_instr), .id_valid_o(id_valid), .pc_set_o(pc_set),
    .pc_o(pc), .icache_busy_i(ic_busy), .icache_abort_o(ic_abort), .if_clk_o(if_clk),
    .icache_clk_o(ic_clk), .if_clk_en_o(if_en), .icache_clk_en_o(ic_en));

  for (genvar i = 0; i < N; i++) begin : g_cnt
    always @(posedge if_clk[i]) if_edges[i]++;
    always @(posedge ic_clk[i]) ic_edges[i]++;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic clear_edges();
    for (int i = 0; i < N; i++) begin if_edges[i] = 0; ic_edges[i] = 0; end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_wdata = 0; leader_pc = 32'h1C00_8000; ic_busy = '0; if_valid = '1;
    for (int i = 0; i < N; i++) if_instr[i] = 32'h0000_1000 + 32'(i);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    clear_edges();
    repeat (4) @(posedge clk);
    #1;
    chk(!lockstep && cfg_rdata == 0, "MIMD after reset");
    for (int i = 0; i < N; i++) begin
      chk(id_instr[i] == if_instr[i], "MIMD: own instruction");
      chk(if_edges[i] == 4 && ic_edges[i] == 4, "MIMD: all clocks run");
    end
    // enter VLEM, follower 5 has a refill in flight
    ic_busy[5] = 1;
    cfg_we = 1; cfg_wdata = 1;
    #1 chk(!lockstep, "not yet in VLEM before the edge");
    @(posedge clk); #1 cfg_we = 0;
    chk(lockstep && cfg_rdata == 1, "VLEM one cycle after the write");
    clear_edges();
    repeat (3) @(posedge clk);
    #1;
    for (int i = 0; i < N; i++) begin
      chk(id_instr[i] == if_instr[0] && id_valid[i], "VLEM: leader's instruction everywhere");
      if (i == 0) chk(if_edges[i] == 3 && ic_edges[i] == 3 && !ic_abort[i], "leader keeps its clocks");
      else begin
        chk(if_edges[i] == 0, "follower IF gated");
        chk(ic_abort[i], "follower cache told to stop");
        if (i == 5) chk(ic_edges[i] == 3, "busy cache keeps its clock");
        else        chk(ic_edges[i] == 0, "idle follower cache gated");
      end
    end
    ic_busy[5] = 0;
    @(posedge clk); #1;
    clear_edges();
    repeat (2) @(posedge clk);
    #1 chk(ic_edges[5] == 0, "cache gated after the refill ended");
    // exit
    cfg_we = 1; cfg_wdata = 0;
    @(posedge clk); #1 cfg_we = 0;
    chk(!lockstep, "MIMD one cycle after the write");
    for (int i = 1; i < N; i++) chk(pc_set[i] && pc == leader_pc, "followers take the leader's PC");
    chk(!pc_set[0], "leader PC untouched");
    clear_edges();
    @(posedge clk); #1;
    chk(pc_set == '0, "pc_set is a single pulse");
    for (int i = 0; i < N; i++) chk(if_edges[i] == 1 && ic_edges[i] == 1 && id_instr[i] == if_instr[i], "clocks back in MIMD");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
