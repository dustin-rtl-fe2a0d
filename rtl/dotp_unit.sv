// dotp_unit: mixed-precision SIMD dot-product unit of one core.
//
// Computes dotp(A, B) or the sum-of-dot-product C + dotp(A, B) of two 32-bit
// SIMD registers whose elements are 16, 8, 4 or 2 bits wide, in all ten
// combinations where operand B is no wider than operand A (16x16, 16x8, 16x4,
// 16x2, 8x8, 8x4, 8x2, 4x4, 4x2, 2x2).
//
// How it works. The unit has four "bitwidth regions", DOTP-16, DOTP-8, DOTP-4
// and DOTP-2, each with as many multipliers as operand A holds elements (2, 4,
// 8, 16) and its own adder tree that also adds the 32-bit operand C. The
// precision of operand A (from the SIMD format CSR) picks the region. Operand B
// goes through a slicer & router: it is cut into elements of B's precision, the
// SLICE selector from the mixed-precision controller picks the sub-group of
// 32/width(A) elements that is used now, and each element is sign- or
// zero-extended to A's width. Every region has its own operand registers that
// load only when that region is used (register gating), so the other regions
// do not toggle.
//
// Timing: operands are captured on the clock edge where valid_i is high; the
// result is valid (valid_o) in the following cycle, computed combinationally
// from the captured operands: one cycle of latency.
//
// Follows the paper: the four regions, multiplier counts, per-region adder
// trees with the 32-bit scalar added at their input, the slicer & router
// controlled by the format register and SLICE selector, gated operand
// registers, the output mux, and B always being the narrower operand.
// Own choices: each multiplier is one bit wider than the element so that one
// circuit serves signed and unsigned elements (signed_a_i, signed_b_i); the
// adder tree is written as a plain sum and left to synthesis; the result wraps
// modulo 2**32.
module dotp_unit
  import dustin_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,       // issue a dot product this cycle
  input  simd_fmt_t   fmt_i,         // operand precisions (SIMD format CSR)
  input  logic [2:0]  slice_i,       // sub-group of B to use (mixed-precision controller)
  input  logic        signed_a_i,    // elements of A are signed
  input  logic        signed_b_i,    // elements of B are signed
  input  logic        accumulate_i,  // 1: C + dotp (sdotp), 0: dotp
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic [31:0] op_c_i,
  output logic [31:0] result_o,
  output logic        valid_o
);

  // ---------------------------------------------------------------------
  // Slicer & router: operand B -> vector in A's element format.
  // ---------------------------------------------------------------------
  function automatic logic [31:0] route_b(logic [31:0] b, int unsigned wa, int unsigned wb,
                                          int unsigned sl_idx, logic sgn);
    logic [31:0] r;
    int unsigned n, src;
    r = '0;
    n = 32 / wa;
    for (int unsigned k = 0; k < 16; k++) begin
      for (int unsigned j = 0; j < 16; j++) begin
        if (k < n && j < wa) begin
          src = (sl_idx * n + k) * wb + ((j < wb) ? j : (wb - 1));
          if (src < 32)
            r[k*wa + j] = (j < wb) ? b[src] : (sgn & b[src]);
        end
      end
    end
    return r;
  endfunction

  logic [31:0] b_routed;
  always_comb begin
    int unsigned wa, wb, sl;
    wa = prec_bits(fmt_i.prec_a);
    wb = (fmt_i.prec_b >= fmt_i.prec_a) ? prec_bits(fmt_i.prec_b) : wa;
    sl = (n_slices(fmt_i) > 4'd1) ? 32'(slice_i) % 32'(n_slices(fmt_i)) : 0;
    b_routed = route_b(op_b_i, wa, wb, sl, signed_b_i);
  end

  // ---------------------------------------------------------------------
  // Register-gated operands, one set per region.
  // ---------------------------------------------------------------------
  logic [3:0][31:0] a_q, b_q;
  logic [31:0]      c_q;
  prec_e            region_q;
  logic             sa_q, sb_q, valid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_q      <= '0;
      b_q      <= '0;
      c_q      <= '0;
      region_q <= PREC_16;
      sa_q     <= 1'b0;
      sb_q     <= 1'b0;
      valid_q  <= 1'b0;
    end else begin
      valid_q <= valid_i;
      if (valid_i) begin
        a_q[fmt_i.prec_a] <= op_a_i;
        b_q[fmt_i.prec_a] <= b_routed;
        c_q               <= accumulate_i ? op_c_i : 32'd0;
        region_q          <= fmt_i.prec_a;
        sa_q              <= signed_a_i;
        sb_q              <= signed_b_i;
      end
    end
  end

  // ---------------------------------------------------------------------
  // The four regions: multipliers and adder trees.
  // ---------------------------------------------------------------------
  function automatic logic [31:0] dotp(logic [31:0] a, logic [31:0] b, int unsigned w,
                                       logic sa, logic sb, logic [31:0] c);
    logic signed [31:0] acc;
    logic signed [16:0] ea, eb;
    acc = signed'(c);
    for (int unsigned k = 0; k < 16; k++) begin
      if (k < 32 / w) begin
        ea = '0;
        eb = '0;
        for (int unsigned j = 0; j < 17; j++) begin
          if (j < w) begin
            ea[j] = a[k*w + j];
            eb[j] = b[k*w + j];
          end else begin
            ea[j] = sa & a[k*w + w - 1];
            eb[j] = sb & b[k*w + w - 1];
          end
        end
        acc = acc + 32'(ea * eb);
      end
    end
    return acc;
  endfunction

  logic [3:0][31:0] region_res;
  always_comb begin
    region_res[PREC_16] = dotp(a_q[PREC_16], b_q[PREC_16], 16, sa_q, sb_q, c_q);
    region_res[PREC_8]  = dotp(a_q[PREC_8],  b_q[PREC_8],  8,  sa_q, sb_q, c_q);
    region_res[PREC_4]  = dotp(a_q[PREC_4],  b_q[PREC_4],  4,  sa_q, sb_q, c_q);
    region_res[PREC_2]  = dotp(a_q[PREC_2],  b_q[PREC_2],  2,  sa_q, sb_q, c_q);
  end

  // Output mux.
  assign result_o = region_res[region_q];
  assign valid_o  = valid_q;

endmodule
