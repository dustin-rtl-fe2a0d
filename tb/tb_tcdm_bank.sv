// tb_tcdm_bank: self-checking test of one L1 bank at its full 1024 words.
//
// Fills every word, then performs random byte-masked writes and reads against
// a reference array kept in the testbench, checking each read one cycle after
// the request and that a read is not disturbed by idle cycles.
module tb_tcdm_bank;
  localparam int WORDS = 1024;

  logic clk;
  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  logic        req, we;
  logic [9:0]  addr;
  logic [3:0]  be;
  logic [31:0] wdata, rdata;
  logic [31:0] refm [WORDS];
  int checks = 0, failures = 0;

  tcdm_bank #(.WORDS(WORDS)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be),
                                  .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    @(posedge clk); #1;
    for (int w = 0; w < WORDS; w++) begin
      req = 1; we = 1; be = 4'hF; addr = 10'(w); wdata = $urandom; refm[w] = wdata;
      @(posedge clk); #1;
    end
    for (int i = 0; i < 4000; i++) begin
      addr = 10'($urandom_range(0, WORDS - 1));
      req = 1;
      if ($urandom_range(0, 1) == 1) begin
        we = 1; be = 4'($urandom); wdata = $urandom;
        for (int b = 0; b < 4; b++) if (be[b]) refm[addr][b*8 +: 8] = wdata[b*8 +: 8];
        @(posedge clk); #1;
      end else begin
        we = 0; exp = refm[addr];
        @(posedge clk); #1;
        req = 0;
        @(posedge clk); #1;   // idle cycle: data must stay
        checks++;
        if (rdata !== exp) begin failures++; if (failures < 10) $display("FAIL read %h: %h exp %h", addr, rdata, exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
