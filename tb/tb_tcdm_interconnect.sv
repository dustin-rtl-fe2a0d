// tb_tcdm_interconnect: self-checking test of the L1 interconnect with the
// 32 real banks behind it.
//
// 20 masters issue random reads and writes to a small address window (so that
// bank conflicts are frequent) and hold each request until granted, as the
// handshake requires. A reference memory kept in the testbench is updated at
// each grant; every read's data is compared with it one cycle after its grant.
// Also checked: no bank grants two masters in one cycle, a lone request is
// granted in the same cycle, read data returns exactly one cycle after the
// grant, and conflicting requesters of one bank are served in round-robin
// order (N masters on one bank -> each waits at most N-1 cycles).
module tb_tcdm_interconnect;
  import dustin_pkg::tcdm_req_t;
  localparam int NM = 20, NB = 32, ROW_W = 10;

  logic clk, rst_n;
  initial begin
    clk = 0;
    rst_n = 0;
    forever #5 clk = ~clk;
  end

  logic      [NM-1:0]             req, gnt, rvalid;
  tcdm_req_t [NM-1:0]             mreq;
  logic      [NM-1:0][31:0]       rdata;
  logic      [NB-1:0]             b_req, b_we;
  logic      [NB-1:0][ROW_W-1:0]  b_addr;
  logic      [NB-1:0][3:0]        b_be;
  logic      [NB-1:0][31:0]       b_wdata, b_rdata;
  int checks = 0, failures = 0;

  tcdm_interconnect #(.N_MASTERS(NM), .N_BANKS(NB), .ROW_W(ROW_W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .mreq_i(mreq), .gnt_o(gnt), .rvalid_o(rvalid),
    .rdata_o(rdata), .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr), .bank_be_o(b_be),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata));

  for (genvar b = 0; b < NB; b++) begin : g_bank
    tcdm_bank #(.WORDS(1 << ROW_W)) u_bank (.clk_i(clk), .req_i(b_req[b]), .we_i(b_we[b]),
      .addr_i(b_addr[b]), .be_i(b_be[b]), .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  logic [31:0] refmem [logic [31:0]];
  logic [NM-1:0]       exp_rv;
  logic [NM-1:0][31:0] exp_data;
  int wait_cnt[NM];
  int max_wait;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; mreq = '0; exp_rv = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // initialise a window of 64 words (2 rows of all banks)
    for (int w = 0; w < 64; w++) begin
      req[0] = 1; mreq[0] = '{addr: 32'(w * 4), we: 1, be: 4'hF, wdata: 32'(w * 32'h0101_0101)};
      #1 chk(gnt[0], "lone request granted in the same cycle");
      refmem[32'(w * 4)] = 32'(w * 32'h0101_0101);
      @(posedge clk); #1;
    end
    req = '0;
    // one bank, all masters: round-robin bound
    for (int m = 0; m < NM; m++) begin
      req[m] = 1; mreq[m] = '{addr: 32'h0000_0080, we: 0, be: 4'hF, wdata: 0}; wait_cnt[m] = 0;
    end
    max_wait = 0;
    for (int c = 0; c < NM; c++) begin
      #1;
      chk($countones(gnt) == 1, "one grant per bank and cycle");
      for (int m = 0; m < NM; m++) begin
        if (gnt[m]) req[m] = 0;
        else if (req[m]) begin wait_cnt[m]++; if (wait_cnt[m] > max_wait) max_wait = wait_cnt[m]; end
      end
      @(posedge clk);
    end
    chk(req == '0 && max_wait == NM - 1, "all masters served within N-1 waits");
    #1;
    // random traffic
    for (int cyc = 0; cyc < 3000; cyc++) begin
      logic [31:0] busy;
      // check responses of last cycle's grants
      for (int m = 0; m < NM; m++) begin
        chk(rvalid[m] == exp_rv[m], "rvalid one cycle after grant");
        if (exp_rv[m] && exp_data[m] != 32'hFFFF_FFFF) chk(rdata[m] == exp_data[m], "read data");
      end
      // new requests
      for (int m = 0; m < NM; m++) begin
        if (!req[m] && ($urandom_range(0, 3) != 0)) begin
          req[m] = 1;
          mreq[m].addr  = 32'($urandom_range(0, 63) * 4);
          mreq[m].we    = 1'($urandom_range(0, 3) == 0);
          mreq[m].be    = 4'hF;
          mreq[m].wdata = $urandom;
        end
      end
      #1;
      busy = '0;
      for (int m = 0; m < NM; m++) begin
        exp_rv[m] = gnt[m];
        exp_data[m] = 32'hFFFF_FFFF;
        if (gnt[m]) begin
          chk(!busy[mreq[m].addr[6:2]], "bank granted twice");
          busy[mreq[m].addr[6:2]] = 1;
          if (mreq[m].we) refmem[mreq[m].addr] = mreq[m].wdata;
          else exp_data[m] = refmem[mreq[m].addr];
        end
      end
      @(posedge clk); #1;
      for (int m = 0; m < NM; m++) if (exp_rv[m]) req[m] = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
