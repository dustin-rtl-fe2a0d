// tb_dotp_unit: self-checking test of the mixed-precision DOTP unit.
//
// Issues random dot products in all ten precision combinations, with every
// legal slice, signed and unsigned operands, with and without accumulation,
// and compares each result with a reference computed here element by element
// from shifted and masked operands. Also checks the one-cycle latency: the
// result must be valid exactly in the cycle after the issue.
module tb_dotp_unit;
  import dustin_pkg::*;

  logic clk, rst_n;
  initial begin
    clk = 0;
    rst_n = 0;
    forever #5 clk = ~clk;
  end

  logic        valid;
  simd_fmt_t   fmt;
  logic [2:0]  slice;
  logic        sa, sb, acc;
  logic [31:0] a, b, c, res;
  logic        vout;
  int checks = 0, failures = 0;

  dotp_unit dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .fmt_i(fmt), .slice_i(slice),
                 .signed_a_i(sa), .signed_b_i(sb), .accumulate_i(acc),
                 .op_a_i(a), .op_b_i(b), .op_c_i(c), .result_o(res), .valid_o(vout));

  function automatic longint elem(logic [31:0] v, int pos, int w, logic s);
    longint e;
    e = (longint'(v) >> pos) & ((longint'(1) << w) - 1);
    if (s && e >= (longint'(1) << (w - 1))) e -= (longint'(1) << w);
    return e;
  endfunction

  function automatic logic [31:0] ref_dotp(logic [31:0] ra, logic [31:0] rb, logic [31:0] rc,
                                           int wa, int wb, int sl, logic rsa, logic rsb, logic racc);
    longint sum;
    int n;
    n = 32 / wa;
    sum = racc ? longint'(signed'(rc)) : 0;
    for (int k = 0; k < n; k++)
      sum += elem(ra, k*wa, wa, rsa) * elem(rb, (sl*n + k)*wb, wb, rsb);
    return sum[31:0];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    int wa, wb, nsl;
    valid = 0; fmt = '{PREC_8, PREC_8}; slice = 0; sa = 0; sb = 0; acc = 0; a = 0; b = 0; c = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int pa = 0; pa < 4; pa++) begin
      for (int pb = pa; pb < 4; pb++) begin
        for (int t = 0; t < 200; t++) begin
          fmt.prec_a = prec_e'(pa);
          fmt.prec_b = prec_e'(pb);
          wa = 16 >> pa; wb = 16 >> pb; nsl = wa / wb;
          slice = 3'($urandom_range(0, nsl - 1));
          sa = 1'($urandom); sb = 1'($urandom); acc = 1'($urandom);
          a = $urandom; b = $urandom; c = $urandom;
          if (t == 0) begin a = '1; b = '1; sa = 0; sb = 0; end   // largest unsigned
          if (t == 1) begin a = 32'h8888_8888; b = 32'hAAAA_AAAA; sa = 1; sb = 1; end
          exp = ref_dotp(a, b, c, wa, wb, int'(slice), sa, sb, acc);
          valid = 1;
          @(posedge clk);      // issue edge
          #1;
          valid = 0;
          // one cycle after the issue edge: result valid
          checks++;
          if (!vout || res !== exp) begin
            failures++;
            if (failures < 10)
              $display("FAIL fmt %0dx%0d slice %0d sa %0d sb %0d acc %0d a=%h b=%h c=%h got %h (v=%0d) exp %h",
                       wa, wb, slice, sa, sb, acc, a, b, c, res, vout, exp);
          end
          @(posedge clk);
          #1;
          checks++;
          if (vout) begin failures++; $display("FAIL valid held for more than one cycle"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
