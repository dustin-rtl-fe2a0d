// simd_fmt_csr: control and status registers of the bit-scalable SIMD model.
//
// The SIMD dot-product instructions do not encode the precision of their
// operands ("virtual instructions"); the precision comes from a format CSR
// that software writes before a kernel, e.g. SIMD_FMT(M8x4). This block holds
// that register, the MAC-counter target of the mixed-precision controller,
// and gives software access to the controller's slice selector.
//
// Registers (addresses are this design's own choice, see dustin_pkg):
//   CSR_SIMD_FMT   [3:2] precision of A, [1:0] precision of B
//                  (0 = 16 bit, 1 = 8, 2 = 4, 3 = 2). A write whose B field is
//                  wider than A is stored with B = A (uniform format).
//   CSR_MPC_TARGET [7:0] dot products per slice before the slice advances.
//   CSR_MPC_SLICE  [2:0] slice selector; a write sets it, a read returns it.
// Timing: writes (csr_we_i) take effect at the clock edge; reads are
// combinational. fmt_we_o and slice_we_o pulse in the write cycle so that the
// controller restarts together with the new value.
//
// Follows the paper: a CSR holds the operand format; a control register holds
// the MAC counter target; the counter state is software writable. Reset
// values (8x8 format, target 1) are this design's own choice.
module simd_fmt_csr
  import dustin_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        csr_we_i,
  input  logic [11:0] csr_addr_i,
  input  logic [31:0] csr_wdata_i,
  output logic [31:0] csr_rdata_o,
  input  logic [2:0]  slice_i,       // current slice from the controller (read back)
  output simd_fmt_t   fmt_o,
  output logic        fmt_we_o,
  output logic [7:0]  target_o,
  output logic        slice_we_o,
  output logic [2:0]  slice_wdata_o
);

  simd_fmt_t fmt_q, fmt_wr;
  logic [7:0] target_q;

  // Legalise a written format: B may not be wider than A.
  always_comb begin
    fmt_wr.prec_a = prec_e'(csr_wdata_i[3:2]);
    fmt_wr.prec_b = prec_e'(csr_wdata_i[1:0]);
    if (fmt_wr.prec_b < fmt_wr.prec_a) fmt_wr.prec_b = fmt_wr.prec_a;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      fmt_q    <= '{prec_a: PREC_8, prec_b: PREC_8};
      target_q <= 8'd1;
    end else if (csr_we_i) begin
      if (csr_addr_i == CSR_SIMD_FMT)   fmt_q    <= fmt_wr;
      if (csr_addr_i == CSR_MPC_TARGET) target_q <= csr_wdata_i[7:0];
    end
  end

  assign fmt_we_o      = csr_we_i && (csr_addr_i == CSR_SIMD_FMT);
  assign slice_we_o    = csr_we_i && (csr_addr_i == CSR_MPC_SLICE);
  assign slice_wdata_o = csr_wdata_i[2:0];
  assign fmt_o         = fmt_q;
  assign target_o      = target_q;

  always_comb begin
    case (csr_addr_i)
      CSR_SIMD_FMT:   csr_rdata_o = {28'd0, fmt_q};
      CSR_MPC_TARGET: csr_rdata_o = {24'd0, target_q};
      CSR_MPC_SLICE:  csr_rdata_o = {29'd0, slice_i};
      default:        csr_rdata_o = 32'd0;
    endcase
  end

endmodule
