// tb_cluster_dma: self-checking test of the 2-D DMA engine.
//
// Both memories are models written here. The L2 model grants requests at
// random (or always) and returns read data in order after a configurable
// latency; the L1 model behaves like a TCDM port (random grant, read data one
// cycle after the grant). Memory contents start as a function of the address.
// Checked:
//   - random 2-D jobs in both directions: every destination word equals the
//     source word at the matching (row, column), and no word outside the
//     destination block changes;
//   - reads in flight never exceed 16, and reach 16 when the L2 is slow;
//   - rate: with an always-granting L2 of latency 10 (below 16) a job of N
//     words takes at most N + 10 + 4 cycles (one word per cycle); with latency
//     40 it cannot be faster than 16 words per 40 cycles;
//   - busy_o / done_o: one done pulse per job, also for an empty job.
module tb_cluster_dma;
  import dustin_pkg::tcdm_req_t;

  logic clk, rst_ni;
  initial begin clk = 0; forever #5 clk = ~clk; end

  logic        start, dir, busy, done;
  logic [31:0] src_addr, dst_addr, src_stride, dst_stride;
  logic [15:0] len, rows;
  logic        tcdm_req, tcdm_gnt, tcdm_rvalid;
  tcdm_req_t   tcdm_mreq;
  logic [31:0] tcdm_rdata;
  logic        ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr, ext_wdata, ext_rdata;

  cluster_dma dut (
    .clk_i(clk), .rst_ni, .start_i(start), .dir_i(dir), .src_addr_i(src_addr), .dst_addr_i(dst_addr),
    .len_i(len), .rows_i(rows), .src_stride_i(src_stride), .dst_stride_i(dst_stride),
    .busy_o(busy), .done_o(done),
    .tcdm_req_o(tcdm_req), .tcdm_mreq_o(tcdm_mreq), .tcdm_gnt_i(tcdm_gnt),
    .tcdm_rvalid_i(tcdm_rvalid), .tcdm_rdata_i(tcdm_rdata),
    .ext_req_o(ext_req), .ext_we_o(ext_we), .ext_addr_o(ext_addr), .ext_wdata_o(ext_wdata),
    .ext_gnt_i(ext_gnt), .ext_rvalid_i(ext_rvalid), .ext_rdata_i(ext_rdata)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // memories: 4096 words each (16 kB), word index = addr[13:2]
  logic [31:0] l2 [4096];
  logic [31:0] l1 [4096];
  function automatic logic [31:0] init_val(int mem, int idx);
    return 32'(mem * 32'h0100_0000) ^ 32'(idx * 32'h9E37_79B1);
  endfunction

  // L2 model
  int  l2_lat = 10;
  bit  l2_always = 1;
  logic [31:0] l2_q_data [$];
  int          l2_q_time [$];
  int  cyc = 0;
  int  inflight = 0, max_inflight = 0;

  // L1 model
  logic        l1_rv_q;
  logic [31:0] l1_rd_q;

  always_comb begin
    ext_gnt  = ext_req && (l2_always || l1_rand_bit);
    tcdm_gnt = tcdm_req && l1_rand_bit2;
  end
  logic l1_rand_bit, l1_rand_bit2;
  bit   l1_always = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    // L2 responses in order
    ext_rvalid <= 1'b0;
    if (l2_q_time.size() > 0 && l2_q_time[0] <= cyc) begin
      ext_rvalid <= 1'b1;
      ext_rdata  <= l2_q_data.pop_front();
      void'(l2_q_time.pop_front());
    end
    if (ext_req && ext_gnt) begin
      if (ext_we) l2[ext_addr[13:2]] <= ext_wdata;
      else begin
        l2_q_data.push_back(l2[ext_addr[13:2]]);
        l2_q_time.push_back(cyc + l2_lat - 1);
      end
    end
    // L1
    l1_rv_q <= tcdm_req && tcdm_gnt;
    if (tcdm_req && tcdm_gnt) begin
      if (tcdm_mreq.we) l1[tcdm_mreq.addr[13:2]] <= tcdm_mreq.wdata;
      l1_rd_q <= l1[tcdm_mreq.addr[13:2]];
    end
    l1_rand_bit  <= l1_always || ($urandom_range(0, 3) != 0);
    l1_rand_bit2 <= l1_always || ($urandom_range(0, 3) != 0);
  end
  assign tcdm_rvalid = l1_rv_q;
  assign tcdm_rdata  = l1_rd_q;

  // reads in flight on whichever side is the source
  always @(posedge clk) begin
    automatic int n = inflight;
    if (dir == 1'b0) begin
      if (ext_req && ext_gnt && !ext_we) n++;
      if (ext_rvalid) n--;
    end else begin
      if (tcdm_req && tcdm_gnt && !tcdm_mreq.we) n++;
      if (tcdm_rvalid && busy) n--;
    end
    inflight <= n;
    if (n > max_inflight) max_inflight <= n;
    if (n > 16) begin failures++; $display("FAIL more than 16 reads in flight"); end
  end

  int dones = 0;
  always @(posedge clk) if (done) dones <= dones + 1;

  logic [31:0] l1_ref [4096];
  logic [31:0] l2_ref [4096];

  task automatic run_job(bit d, int sw, int dw, int ln, int rw, int ss, int ds, output int cycles);
    int t0, d0, k;
    // reference result
    for (int i = 0; i < 4096; i++) begin l1_ref[i] = l1[i]; l2_ref[i] = l2[i]; end
    for (int r = 0; r < rw; r++)
      for (int c = 0; c < ln; c++) begin
        int si = sw + r * ss + c, di = dw + r * ds + c;
        if (!d) l1_ref[di] = l2[si]; else l2_ref[di] = l1[si];
      end
    d0 = dones;
    @(posedge clk); #1;
    start = 1; dir = d; src_addr = 32'(sw * 4); dst_addr = 32'(dw * 4);
    src_stride = 32'(ss * 4); dst_stride = 32'(ds * 4); len = 16'(ln); rows = 16'(rw);
    t0 = cyc;
    @(posedge clk); #1;
    start = 0;
    k = 0;
    while (!done && k < 20000) begin @(posedge clk); #1; k++; end
    cycles = cyc - t0;
    @(posedge clk); #1;
    check(dones == d0 + 1, "one done pulse per job");
    check(!busy, "idle after done");
    for (int i = 0; i < 4096; i++) begin
      if (!d) check(l1[i] == l1_ref[i], $sformatf("L1 word %0d", i));
      else    check(l2[i] == l2_ref[i], $sformatf("L2 word %0d", i));
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles;
    start = 0; dir = 0; src_addr = 0; dst_addr = 0; src_stride = 0; dst_stride = 0; len = 0; rows = 0;
    ext_rvalid = 0; ext_rdata = 0;
    for (int i = 0; i < 4096; i++) begin l2[i] = init_val(2, i); l1[i] = init_val(1, i); end
    rst_ni = 0;
    repeat (3) @(posedge clk);
    #1 rst_ni = 1;

    // rate, fast L2: one word per cycle
    l2_always = 1; l2_lat = 10; l1_always = 1;
    run_job(0, 0, 0, 64, 4, 100, 64, cycles);
    $display("L2->L1 256 words, latency 10: %0d cycles", cycles);
    check(cycles <= 256 + 10 + 4, "one word per cycle with latency below 16");
    check(max_inflight == 10 || max_inflight == 11, $sformatf("in flight = latency (%0d)", max_inflight));

    // rate, slow L2: limited by 16 reads in flight
    max_inflight = 0; l2_lat = 40;
    run_job(0, 512, 1024, 32, 8, 48, 40, cycles);
    $display("L2->L1 256 words, latency 40: %0d cycles", cycles);
    check(max_inflight == 16, $sformatf("16 reads in flight (%0d)", max_inflight));
    check(cycles >= 256 * 40 / 16, "no faster than 16 reads per latency");
    check(cycles <= 256 * 40 / 16 + 60, "16 reads per latency are kept in flight");

    // L1 -> L2 at full rate
    max_inflight = 0;
    run_job(1, 0, 2048, 16, 16, 64, 20, cycles);
    $display("L1->L2 256 words: %0d cycles", cycles);
    check(cycles <= 256 + 6, "L1 -> L2 one word per cycle");

    // empty job
    run_job(0, 0, 0, 0, 5, 1, 1, cycles);

    // random jobs, random grants and latencies, both directions
    l1_always = 0;
    for (int j = 0; j < 30; j++) begin
      int ln = $urandom_range(1, 24), rw = $urandom_range(1, 12);
      int ss = ln + $urandom_range(0, 20), ds = ln + $urandom_range(0, 20);
      int sw = $urandom_range(0, 4096 - rw * ss - 1), dw = $urandom_range(0, 4096 - rw * ds - 1);
      l2_always = $urandom_range(0, 1);
      l2_lat = $urandom_range(1, 50);
      run_job(j % 2, sw, dw, ln, rw, ss, ds, cycles);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
