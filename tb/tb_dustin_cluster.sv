// tb_dustin_cluster: end-to-end test of the cluster at its full size
// (16 cores, 32 banks, 128 kB L1), with the parameters left at their defaults.
//
// The testbench plays the parts that sit outside the cluster module: the L2
// memory (a model with an 8-cycle read latency), the core that programs the
// DMA, and the sixteen cores' pipelines, which it models as sequences of
// loads, CSR writes and dot-product issues. The operation is the
// inner loop of a mixed-precision 8x2 matrix multiplication run in VLEM:
//   1. The DMA copies 2-bit weights (shared by all cores) and, in one 2-D job,
//      8-bit activations (one misaligned buffer per core, 16 rows) from the L2
//      into the L1; the job must keep more than one L2 read in flight.
//   2. All cores meet at a barrier, then VLEM is entered.
//   3. Every core sets the SIMD format to 8x2 with a MAC target of 2, loads
//      the two weight words (all cores, same address: broadcast), then for 8
//      steps loads its activation word and issues two sum-of-dot-products on
//      the two weight registers, as in the usual convolution inner loop. The
//      mixed-precision controller moves through the weight slices by itself.
//   4. One load with all cores on the same bank (aligned buffers) shows the
//      grant being held until all sixteen accesses are done.
//   5. VLEM is left (followers get the leader's PC), then in MIMD three cores
//      load from one bank and are served one after another.
// All results are compared with values computed here. Each mechanism is
// counted and must occur: DMA write, barrier event, VLEM entry and exit,
// follower clock gating, instruction forwarding, broadcast, grant holding,
// MIMD bank conflict, slice advance, PC resynchronisation.
module tb_dustin_cluster;
  import dustin_pkg::*;
  localparam int N = 16;

  logic clk, rst_n;
  initial begin
    clk = 0;
    rst_n = 0;
    forever #5 clk = ~clk;
  end

  // ---------------- DUT ports ----------------
  logic      [N-1:0]        core_req, core_gnt, core_rvalid;
  tcdm_req_t [N-1:0]        core_mreq;
  logic      [N-1:0][31:0]  core_rdata;
  logic                     dma_start, dma_dir, dma_busy, dma_done;
  logic [31:0]              dma_src, dma_dst, dma_sstr, dma_dstr;
  logic [15:0]              dma_len, dma_rows;
  logic                     l2_req, l2_we, l2_gnt, l2_rvalid;
  logic [31:0]              l2_addr, l2_wdata, l2_rdata;
  logic                     vlem_we, lockstep, brdc;
  logic [31:0]              vlem_wdata, vlem_rdata, leader_pc, pc;
  logic [N-1:0][31:0]       if_instr, id_instr;
  logic [N-1:0]             if_valid, id_valid, pc_set, ic_busy, ic_abort, if_clk, ic_clk, if_en, ic_en;
  logic [N-1:0]             arrive, bmask, core_clk_en;
  logic                     bmask_we, evt;
  logic [N-1:0]             csr_we, dv, dsa, dsb, dacc, dvo;
  logic [N-1:0][11:0]       csr_addr;
  logic [N-1:0][31:0]       csr_wdata, csr_rdata, opa, opb, opc, dres;
  logic [N-1:0][2:0]        dslice;

  dustin_cluster dut (
    .clk_i(clk), .rst_ni(rst_n), .test_en_i(1'b0),
    .core_req_i(core_req), .core_mreq_i(core_mreq), .core_gnt_o(core_gnt),
    .core_rvalid_o(core_rvalid), .core_rdata_o(core_rdata),
    .dma_start_i(dma_start), .dma_dir_i(dma_dir), .dma_src_addr_i(dma_src), .dma_dst_addr_i(dma_dst),
    .dma_len_i(dma_len), .dma_rows_i(dma_rows), .dma_src_stride_i(dma_sstr),
    .dma_dst_stride_i(dma_dstr), .dma_busy_o(dma_busy), .dma_done_o(dma_done),
    .l2_req_o(l2_req), .l2_we_o(l2_we), .l2_addr_o(l2_addr), .l2_wdata_o(l2_wdata),
    .l2_gnt_i(l2_gnt), .l2_rvalid_i(l2_rvalid), .l2_rdata_i(l2_rdata),
    .vlem_cfg_we_i(vlem_we), .vlem_cfg_wdata_i(vlem_wdata), .vlem_cfg_rdata_o(vlem_rdata),
    .lockstep_o(lockstep), .brdc_o(brdc),
    .if_instr_i(if_instr), .if_valid_i(if_valid), .leader_pc_i(leader_pc), .id_instr_o(id_instr),
    .id_valid_o(id_valid), .pc_set_o(pc_set), .pc_o(pc), .icache_busy_i(ic_busy),
    .icache_abort_o(ic_abort), .if_clk_o(if_clk), .icache_clk_o(ic_clk), .if_clk_en_o(if_en),
    .icache_clk_en_o(ic_en),
    .barrier_arrive_i(arrive), .barrier_mask_we_i(bmask_we), .barrier_mask_i(bmask),
    .core_clk_en_o(core_clk_en), .barrier_evt_o(evt),
    .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata),
    .dotp_valid_i(dv), .dotp_signed_a_i(dsa), .dotp_signed_b_i(dsb), .dotp_acc_i(dacc),
    .dotp_op_a_i(opa), .dotp_op_b_i(opb), .dotp_op_c_i(opc), .dotp_result_o(dres),
    .dotp_valid_o(dvo), .dotp_slice_o(dslice));

  int checks = 0, failures = 0;
  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_dma = 0, n_evt = 0, n_enter = 0, n_exit = 0, n_gated = 0, n_fwd = 0, n_brdc = 0;
  int n_hold = 0, n_conflict = 0, n_slice = 0, n_pcset = 0;
  logic lockstep_q;
  logic [2:0] slice_q0 = 3'd0;
  always @(posedge clk) if (rst_n) begin
    lockstep_q <= lockstep;
    slice_q0   <= dslice[0];
    if (dut.ic_gnt[N]) n_dma++;
    if (evt) n_evt++;
    if (lockstep && !lockstep_q) n_enter++;
    if (!lockstep && lockstep_q) n_exit++;
    if (!if_en[1] && !ic_en[1]) n_gated++;
    if (lockstep && id_valid[15] && id_instr[15] == if_instr[0] && if_instr[15] != if_instr[0]) n_fwd++;
    if (brdc && core_gnt == '1) n_brdc++;
    if (lockstep && |(dut.ic_gnt[N-1:0]) && core_gnt == '0) n_hold++;
    if (!lockstep && |(core_req & ~core_gnt)) n_conflict++;
    if (dslice[0] != slice_q0) n_slice++;
    if (|pc_set) n_pcset++;
  end

  // ---------------- helpers ----------------
  int          gnt_cycle[N];
  logic [31:0] got[N];

  // All cores in mask perform one access each (hold request until granted).
  task automatic core_access(logic [N-1:0] mask, logic [N-1:0][31:0] addr, logic we,
                             logic [N-1:0][31:0] wdata);
    int cyc;
    logic [N-1:0] pending, waiting;
    for (int i = 0; i < N; i++) begin
      gnt_cycle[i] = -1;
      core_mreq[i] = '{addr: addr[i], we: we, be: 4'hF, wdata: wdata[i]};
    end
    core_req = mask; pending = mask; waiting = mask; cyc = 0;
    #1;
    while ((pending | waiting) != 0 && cyc < 200) begin
      for (int i = 0; i < N; i++) begin
        if (core_rvalid[i] && waiting[i] && !pending[i]) begin got[i] = core_rdata[i]; waiting[i] = 0; end
        if (core_gnt[i] && pending[i]) begin gnt_cycle[i] = cyc; pending[i] = 0; end
      end
      @(posedge clk); #1;
      core_req = pending;
      cyc++;
      #1;
    end
    chk(cyc < 200, "core access finished");
    core_req = '0;
    @(posedge clk); #1;
  endtask

  // L2 model: 1024 words, always grants, in-order read data 8 cycles later
  logic [31:0] l2mem [1024];
  logic [31:0] l2_qd [$];
  int          l2_qt [$];
  int          l2cyc = 0, l2_inflight = 0, l2_max_inflight = 0, n_dma_done = 0;
  assign l2_gnt = l2_req;
  always @(posedge clk) begin
    automatic int n = l2_inflight;
    l2cyc <= l2cyc + 1;
    l2_rvalid <= 1'b0;
    if (l2_qt.size() > 0 && l2_qt[0] <= l2cyc) begin
      l2_rvalid <= 1'b1;
      l2_rdata  <= l2_qd.pop_front();
      void'(l2_qt.pop_front());
      n--;
    end
    if (l2_req && l2_gnt) begin
      if (l2_we) l2mem[l2_addr[11:2]] <= l2_wdata;
      else begin
        l2_qd.push_back(l2mem[l2_addr[11:2]]);
        l2_qt.push_back(l2cyc + 7);
        n++;
      end
    end
    l2_inflight <= n;
    if (n > l2_max_inflight) l2_max_inflight <= n;
    if (rst_n && dma_done) n_dma_done <= n_dma_done + 1;
  end

  task automatic dma_job(logic d, logic [31:0] src, logic [31:0] dst, int ln, int rw,
                         int sstr, int dstr);
    dma_start = 1; dma_dir = d; dma_src = src; dma_dst = dst;
    dma_len = 16'(ln); dma_rows = 16'(rw); dma_sstr = 32'(sstr); dma_dstr = 32'(dstr);
    @(posedge clk); #1;
    dma_start = 0;
    while (!dma_done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  task automatic csr_all(logic [11:0] a, logic [31:0] d);
    csr_we = '1;
    for (int i = 0; i < N; i++) begin csr_addr[i] = a; csr_wdata[i] = d; end
    @(posedge clk); #1;
    csr_we = '0;
  endtask

  task automatic barrier_all();
    arrive = '1;
    @(posedge clk); #1;
    arrive = '0;
    chk(core_clk_en == '0, "cores asleep at the barrier");
    while (!evt) begin @(posedge clk); #1; end
    repeat (2) @(posedge clk);
    #1 chk(core_clk_en == '1, "cores woken two cycles after the event");
  endtask

  // Reference: element of a packed SIMD word, signed.
  function automatic longint el(logic [31:0] v, int idx, int w);
    longint e;
    e = (longint'(v) >> (idx * w)) & ((longint'(1) << w) - 1);
    if (e >= (longint'(1) << (w - 1))) e -= (longint'(1) << w);
    return e;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- the test ----------------
  localparam logic [31:0] W_BASE   = 32'h0000_0400;                 // shared weights
  localparam logic [31:0] ACT_BASE = 32'h0000_1000;                 // per-core activations
  localparam int          SUB      = 128;                           // sub-buffer size (bytes)
  localparam int          STEPS    = 8;

  initial begin
    logic [31:0]        w0, w1;
    logic [31:0]        act [N][STEPS];
    logic [N-1:0][31:0] addr, wd, b0, b1, a;
    longint             acc0 [N], acc1 [N];
    logic [31:0]        r0 [N], r1 [N];

    core_req = '0; core_mreq = '0; dma_start = 0; dma_dir = 0; dma_src = 0; dma_dst = 0;
    dma_len = 0; dma_rows = 0; dma_sstr = 0; dma_dstr = 0; l2_rvalid = 0; l2_rdata = 0; vlem_we = 0; vlem_wdata = 0;
    leader_pc = 32'h1C00_8000; ic_busy = '0; if_valid = '1; arrive = '0; bmask = '0; bmask_we = 0;
    csr_we = '0; csr_addr = '0; csr_wdata = '0; dv = '0; dsa = '0; dsb = '0; dacc = '0;
    opa = '0; opb = '0; opc = '0; wd = '0;
    for (int i = 0; i < N; i++) if_instr[i] = 32'h0000_0013 + 32'(i << 20);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // 1. DMA fills the L1
    w0 = $urandom; w1 = $urandom;
    l2mem[0] = w0; l2mem[1] = w1;
    for (int c = 0; c < N; c++)
      for (int s = 0; s < STEPS; s++) begin
        act[c][s] = $urandom;
        l2mem[16 + c * STEPS + s] = act[c][s];
      end
    dma_job(0, 32'h0, W_BASE, 2, 1, 8, 8);
    // one 2-D job: 16 rows of STEPS words, packed in L2; in L1 core c's buffer
    // starts c words after a bank-row boundary (misaligned per-core buffers)
    dma_job(0, 32'd64, ACT_BASE, STEPS, N, STEPS * 4, STEPS * 4 + SUB + 4);
    chk(n_dma_done == 2, $sformatf("DMA done event per job (%0d)", n_dma_done));
    chk(l2_max_inflight > 1, "DMA keeps several L2 reads in flight");
    chk(l2_max_inflight <= 16, "at most 16 L2 reads in flight");

    // 2. barrier, enter VLEM
    barrier_all();
    vlem_we = 1; vlem_wdata = 1;
    @(posedge clk); #1 vlem_we = 0;
    chk(lockstep, "VLEM entered");
    ic_busy = '0;
    @(posedge clk); #1;
    chk(id_instr[7] == if_instr[0] && if_en[0] && !if_en[7], "followers decode the leader's instruction, IF gated");

    // 3. mixed-precision kernel
    csr_all(CSR_SIMD_FMT, {28'd0, PREC_8, PREC_2});
    csr_all(CSR_MPC_TARGET, 32'd2);
    for (int i = 0; i < N; i++) begin addr[i] = W_BASE; end
    core_access('1, addr, 1'b0, wd);
    for (int i = 0; i < N; i++) begin b0[i] = got[i]; chk(got[i] == w0 && gnt_cycle[i] == 0, "broadcast weight 0"); end
    for (int i = 0; i < N; i++) addr[i] = W_BASE + 4;
    core_access('1, addr, 1'b0, wd);
    for (int i = 0; i < N; i++) begin b1[i] = got[i]; chk(got[i] == w1 && gnt_cycle[i] == 0, "broadcast weight 1"); end
    for (int i = 0; i < N; i++) begin acc0[i] = 0; acc1[i] = 0; end
    for (int s = 0; s < STEPS; s++) begin
      for (int i = 0; i < N; i++) addr[i] = ACT_BASE + 32'(i * (STEPS * 4 + SUB)) + 32'(i * 4) + 32'(s * 4);
      core_access('1, addr, 1'b0, wd);
      for (int i = 0; i < N; i++) begin
        a[i] = got[i];
        chk(got[i] == act[i][s], "activation load");
        chk(gnt_cycle[i] == 0, "misaligned buffers: no bank conflict");
        chk(int'(dslice[i]) == (s % 4), "slice selector before the MACs");
      end
      // reference for this step (8x2: slice s%4 of each weight word)
      for (int i = 0; i < N; i++)
        for (int k = 0; k < 4; k++) begin
          acc0[i] += el(a[i], k, 8) * el(b0[i], (s % 4) * 4 + k, 2);
          acc1[i] += el(a[i], k, 8) * el(b1[i], (s % 4) * 4 + k, 2);
        end
      // sdotp acc0, A, B0
      dv = '1; dsa = '1; dsb = '1; dacc = '1;
      for (int i = 0; i < N; i++) begin opa[i] = a[i]; opb[i] = b0[i]; opc[i] = r0[i]; if (s == 0) opc[i] = 0; end
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) begin r0[i] = dres[i]; chk(dvo[i], "dot product result one cycle later"); end
      // sdotp acc1, A, B1
      for (int i = 0; i < N; i++) begin opb[i] = b1[i]; opc[i] = r1[i]; if (s == 0) opc[i] = 0; end
      @(posedge clk); #1;
      dv = '0;
      for (int i = 0; i < N; i++) r1[i] = dres[i];
      for (int i = 0; i < N; i++) begin
        chk(r0[i] == 32'(acc0[i]), "accumulator 0");
        chk(r1[i] == 32'(acc1[i]), "accumulator 1");
      end
    end

    // 4. aligned buffers: all cores on one bank, grants held
    for (int i = 0; i < N; i++) addr[i] = ACT_BASE + 32'(i * 128);
    core_access('1, addr, 1'b0, wd);
    for (int i = 0; i < N; i++) begin
      chk(gnt_cycle[i] == N - 1, "grants held until all sixteen served");
      chk(got[i] == act[i][0] || i != 0, "aligned load data (core 0)");
    end

    // 5. leave VLEM, then MIMD conflicts
    leader_pc = 32'h1C00_8120;
    barrier_all();
    vlem_we = 1; vlem_wdata = 0;
    @(posedge clk); #1 vlem_we = 0;
    chk(!lockstep, "VLEM left");
    chk(pc_set[5] && pc == 32'h1C00_8120, "followers resume at the leader's PC");
    for (int i = 0; i < N; i++) addr[i] = ACT_BASE + 32'(i * 128);
    core_access(16'h0007, addr, 1'b0, wd);
    chk(gnt_cycle[0] == 0 && gnt_cycle[1] == 1 && gnt_cycle[2] == 2, "MIMD: served one after another");

    // mechanism coverage
    chk(n_dma > 0, "DMA write happened");
    chk(n_evt == 2, "two barrier events");
    chk(n_enter == 1 && n_exit == 1, "VLEM entered and left once");
    chk(n_gated > 0, "follower clocks gated");
    chk(n_fwd > 0, "instruction forwarded");
    chk(n_brdc >= 2, "broadcasts");
    chk(n_hold > 0, "grants held");
    chk(n_conflict > 0, "MIMD conflict");
    chk(n_slice > 0, "slice advanced");
    chk(n_pcset == 1, "PC resynchronised");
    $display("mechanisms: dma=%0d evt=%0d enter=%0d exit=%0d gated=%0d fwd=%0d brdc=%0d hold=%0d conflict=%0d slice=%0d pcset=%0d",
             n_dma, n_evt, n_enter, n_exit, n_gated, n_fwd, n_brdc, n_hold, n_conflict, n_slice, n_pcset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
