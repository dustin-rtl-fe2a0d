// tb_lks_unit: self-checking test of the lockstep unit.
//
// The memory side is a small model written here: each core's address picks one
// of 32 banks, each bank grants the lowest-numbered requesting core per cycle,
// read data (a function of the address) follows one cycle after the grant.
// Each core holds its request until granted and records when it saw the grant
// and what data came back. Scenarios:
//   MIMD, 3 cores on one bank: bypass, grants in three successive cycles.
//   VLEM, 16 cores on one bank, different words: no grant until the 16th
//     access, then all grants in one cycle, 16 memory accesses, each core gets
//     its own data in the same cycle.
//   VLEM, 16 loads of one word: broadcast, one memory access, all cores granted
//     in the first cycle and all get the leader's data.
//   VLEM, 16 stores to one word: no broadcast (16 accesses, grants together).
//   VLEM, 16 cores on 16 different banks: all granted in the first cycle.
module tb_lks_unit;
  localparam int N = 16;

  logic clk, rst_n;
  initial begin
    clk = 0;
    rst_n = 0;
    forever #5 clk = ~clk;
  end

  logic                 lockstep;
  logic [N-1:0]         core_req, core_we, lks_gnt, lks_rvalid, lks_req, mem_gnt, mem_rvalid;
  logic [N-1:0][31:0]   core_addr, lks_data, mem_data;
  logic                 brdc;
  int checks = 0, failures = 0;
  int mem_accesses;

  lks_unit #(.N_CORES(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .lockstep_i(lockstep),
    .core_req_i(core_req), .core_addr_i(core_addr), .core_we_i(core_we),
    .lks_gnt_o(lks_gnt), .lks_rvalid_o(lks_rvalid), .lks_data_o(lks_data),
    .lks_req_o(lks_req), .mem_gnt_i(mem_gnt), .mem_rvalid_i(mem_rvalid), .mem_data_i(mem_data),
    .brdc_o(brdc));

  // ---- memory model ----
  function automatic logic [31:0] mem_value(logic [31:0] a);
    return a ^ 32'h5A5A_0000;
  endfunction

  always_comb begin
    logic [31:0] busy;
    busy = '0;
    mem_gnt = '0;
    for (int i = 0; i < N; i++) begin
      if (lks_req[i] && !busy[core_addr[i][6:2]]) begin
        busy[core_addr[i][6:2]] = 1'b1;
        mem_gnt[i] = 1'b1;
      end
    end
  end

  logic [N-1:0][31:0] addr_q;
  always_ff @(posedge clk) begin
    mem_rvalid <= mem_gnt;
    addr_q     <= core_addr;
    if (rst_n) mem_accesses <= mem_accesses + $countones(mem_gnt);
  end
  always_comb for (int i = 0; i < N; i++) mem_data[i] = mem_rvalid[i] ? mem_value(addr_q[i]) : 32'hDEAD_BEEF;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // Run one access from the cores in mask; record grant cycle and data per core.
  int          gnt_cycle[N];
  int          rv_cycle[N];
  logic [31:0] got[N];

  task automatic run(logic [N-1:0] mask, logic [N-1:0][31:0] addr, logic we);
    int cyc;
    logic [N-1:0] pending, waiting;
    for (int i = 0; i < N; i++) begin gnt_cycle[i] = -1; rv_cycle[i] = -1; end
    mem_accesses = 0;
    core_addr = addr; core_we = {N{we}};
    core_req = mask; pending = mask; waiting = mask;
    cyc = 0;
    #1;
    while ((pending | waiting) != 0 && cyc < 100) begin
      for (int i = 0; i < N; i++) begin
        if (lks_rvalid[i] && waiting[i] && !pending[i]) begin
          rv_cycle[i] = cyc; got[i] = lks_data[i]; waiting[i] = 0;
        end
        if (lks_gnt[i] && pending[i]) begin gnt_cycle[i] = cyc; pending[i] = 0; end
      end
      @(posedge clk);
      #1;
      core_req = pending;
      cyc++;
      #1;
    end
    core_req = '0;
    @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0][31:0] addr;
    lockstep = 0; core_req = '0; core_we = '0; core_addr = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    #1;

    // MIMD, 3 cores, same bank
    for (int i = 0; i < N; i++) addr[i] = 32'h1000 + 32'(i) * 128;
    run(16'h0007, addr, 1'b0);
    chk(gnt_cycle[0] == 0 && gnt_cycle[1] == 1 && gnt_cycle[2] == 2, "MIMD sequential grants");
    for (int i = 0; i < 3; i++) chk(rv_cycle[i] == gnt_cycle[i] + 1 && got[i] == mem_value(addr[i]), "MIMD data");
    chk(mem_accesses == 3, "MIMD 3 accesses");

    // VLEM, 16 cores, same bank different words
    lockstep = 1;
    @(posedge clk);
    #1;
    run('1, addr, 1'b0);
    for (int i = 0; i < N; i++) begin
      chk(gnt_cycle[i] == N - 1, "VLEM grants held and released together");
      chk(rv_cycle[i] == N, "VLEM data released together");
      chk(got[i] == mem_value(addr[i]), "VLEM each core its own data");
    end
    chk(mem_accesses == N, "VLEM one access per core");

    // VLEM broadcast: all load the same word
    for (int i = 0; i < N; i++) addr[i] = 32'h2344;
    run('1, addr, 1'b0);
    for (int i = 0; i < N; i++) begin
      chk(gnt_cycle[i] == 0 && rv_cycle[i] == 1, "broadcast served in one cycle");
      chk(got[i] == mem_value(32'h2344), "broadcast data");
    end
    chk(mem_accesses == 1, "broadcast: one memory access");

    // VLEM stores to one word: no broadcast
    run('1, addr, 1'b1);
    for (int i = 0; i < N; i++) chk(gnt_cycle[i] == N - 1, "stores serialised, grants together");
    chk(mem_accesses == N, "stores not merged");

    // VLEM, different banks: no conflict
    for (int i = 0; i < N; i++) addr[i] = 32'h400 + 32'(i) * 4;
    run('1, addr, 1'b0);
    for (int i = 0; i < N; i++) chk(gnt_cycle[i] == 0 && got[i] == mem_value(addr[i]), "no conflict, one cycle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
