// tb_simd_fmt_csr: self-checking test of the SIMD format CSRs.
//
// Writes every format code, the MAC target and the slice register, reads them
// back, and checks the legalisation of a format whose B field is wider than A,
// the write pulses towards the controller, and that other addresses neither
// change the registers nor read anything but zero.
module tb_simd_fmt_csr;
  import dustin_pkg::*;

  logic clk, rst_n;
  initial begin
    clk = 0;
    rst_n = 0;
    forever #5 clk = ~clk;
  end

  logic        we, fmt_we, slice_we;
  logic [11:0] addr;
  logic [31:0] wdata, rdata;
  logic [2:0]  slice_in, slice_wdata;
  simd_fmt_t   fmt;
  logic [7:0]  target;
  int checks = 0, failures = 0;

  simd_fmt_csr dut (.clk_i(clk), .rst_ni(rst_n), .csr_we_i(we), .csr_addr_i(addr), .csr_wdata_i(wdata),
                    .csr_rdata_o(rdata), .slice_i(slice_in), .fmt_o(fmt), .fmt_we_o(fmt_we),
                    .target_o(target), .slice_we_o(slice_we), .slice_wdata_o(slice_wdata));

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [11:0] a, logic [31:0] d);
    we = 1; addr = a; wdata = d;
    #1;
    chk(fmt_we == (a == 12'hBC0), "fmt_we pulse");
    chk(slice_we == (a == 12'hBC2), "slice_we pulse");
    @(posedge clk); #1 we = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr = 0; wdata = 0; slice_in = 3'd6;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    addr = 12'hBC0; #1;
    chk(rdata == 32'h5, "reset format 8x8");
    for (int pa = 0; pa < 4; pa++)
      for (int pb = 0; pb < 4; pb++) begin
        int eb;
        wr(12'hBC0, 32'(pa * 4 + pb) | 32'hFFFF_FF00);
        eb = (pb < pa) ? pa : pb;
        chk(int'(fmt.prec_a) == pa && int'(fmt.prec_b) == eb, "format field");
        addr = 12'hBC0; #1;
        chk(rdata == 32'(pa * 4 + eb), "format readback");
      end
    wr(12'hBC1, 32'd37);
    chk(target == 8'd37, "target");
    addr = 12'hBC1; #1;
    chk(rdata == 32'd37, "target readback");
    wdata = 32'd3; addr = 12'hBC2; we = 1; #1;
    chk(slice_we && slice_wdata == 3'd3, "slice write to controller");
    we = 0;
    addr = 12'hBC2; #1;
    chk(rdata == 32'd6, "slice readback");
    wr(12'h300, 32'hFFFF_FFFF);
    chk(target == 8'd37 && fmt == '{PREC_2, PREC_2}, "other address ignored");
    addr = 12'h300; #1;
    chk(rdata == 0, "other address reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
