// tb_mp_controller: self-checking test of the mixed-precision controller.
//
// Replays the convolution inner loop of an 8x2 kernel with a MAC target of 2
// and checks the (MAC counter, slice) sequence (0,0) (1,0) (0,1) (1,1) (0,2)
// (1,2) (0,3) (1,3) and the wrap back to slice 0; then checks that uniform
// formats never move the slice, that a software write sets the slice and
// clears the counter, that other targets and formats (16x2: 8 slices) wrap at
// the right place, and that a format change restarts the controller. The
// expected values come from a counter model kept in the testbench.
module tb_mp_controller;
  import dustin_pkg::*;

  logic clk, rst_n;
  initial begin
    clk = 0;
    rst_n = 0;
    forever #5 clk = ~clk;
  end

  simd_fmt_t  fmt;
  logic       fmt_we, mac, slice_we;
  logic [7:0] target, cnt;
  logic [2:0] slice_wdata, slice;
  int checks = 0, failures = 0;

  mp_controller dut (.clk_i(clk), .rst_ni(rst_n), .fmt_i(fmt), .fmt_we_i(fmt_we), .target_i(target),
                     .mac_i(mac), .slice_we_i(slice_we), .slice_wdata_i(slice_wdata),
                     .slice_o(slice), .mac_count_o(cnt));

  task automatic check(int exp_cnt, int exp_slice, string what);
    checks++;
    if (int'(cnt) != exp_cnt || int'(slice) != exp_slice) begin
      failures++;
      $display("FAIL %s: counter %0d slice %0d, expected %0d %0d", what, cnt, slice, exp_cnt, exp_slice);
    end
  endtask

  task automatic issue();
    mac = 1;
    @(posedge clk);
    #1 mac = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m_cnt, m_sl, nsl, tg;
    fmt = '{PREC_8, PREC_2}; fmt_we = 0; mac = 0; slice_we = 0; slice_wdata = 0; target = 2;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // Sequence of the 8x2 example (target 2, 4 slices)
    begin
      int exp_c[10] = '{0, 1, 0, 1, 0, 1, 0, 1, 0, 1};
      int exp_s[10] = '{0, 0, 1, 1, 2, 2, 3, 3, 0, 0};
      for (int i = 0; i < 10; i++) begin
        check(exp_c[i], exp_s[i], "8x2 sequence");
        issue();
      end
    end
    // Uniform format: slice stays 0
    fmt = '{PREC_8, PREC_8};
    for (int i = 0; i < 5; i++) begin
      issue();
      checks++;
      if (slice != 0) begin failures++; $display("FAIL uniform format moved slice"); end
    end
    // Software write of the slice
    fmt = '{PREC_16, PREC_2};
    slice_we = 1; slice_wdata = 3'd5;
    @(posedge clk); #1 slice_we = 0;
    check(0, 5, "software slice write");
    // Random formats and targets against a model
    for (int r = 0; r < 40; r++) begin
      int pa, pb;
      pa = $urandom_range(0, 2); pb = $urandom_range(pa + 1, 3);
      fmt = '{prec_e'(pa), prec_e'(pb)};
      tg = $urandom_range(1, 5);
      target = 8'(tg);
      fmt_we = 1;
      @(posedge clk); #1 fmt_we = 0;
      check(0, 0, "restart on format write");
      nsl = 1 << (pb - pa);
      m_cnt = 0; m_sl = 0;
      for (int i = 0; i < 3 * tg * nsl; i++) begin
        issue();
        if (m_cnt + 1 >= tg) begin m_cnt = 0; m_sl = (m_sl + 1 >= nsl) ? 0 : m_sl + 1; end
        else m_cnt++;
        check(m_cnt, m_sl, "random sequence");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
