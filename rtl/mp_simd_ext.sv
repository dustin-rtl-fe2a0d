// mp_simd_ext: the mixed-precision extension of one core's pipeline.
//
// Groups the three parts that the bit-scalable SIMD execution model adds to a
// core: the format CSRs (simd_fmt_csr), the mixed-precision controller
// (mp_controller) and the DOTP unit (dotp_unit). The core's decoder issues a
// "virtual" SIMD dot-product instruction (dotp_valid_i with the operand
// signedness and whether to accumulate); the operand precisions come from the
// format CSR, and for a mixed-precision format the controller supplies the
// sub-group of operand B and advances it as the dot products are issued.
//
// Timing: CSR writes act at the clock edge; a dot product issued in cycle t
// uses the slice valid in cycle t and has its result in cycle t+1
// (dotp_valid_o). The MAC counter advances at the issue edge.
//
// Follows the paper: the CSR feeding the format to the execution unit, the
// controller feeding the SLICE selector, the DOTP unit. Own choice: grouping
// the three in one wrapper with this port list.
module mp_simd_ext
  import dustin_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // CSR access from the core
  input  logic        csr_we_i,
  input  logic [11:0] csr_addr_i,
  input  logic [31:0] csr_wdata_i,
  output logic [31:0] csr_rdata_o,
  // virtual SIMD dot-product instruction from the decoder
  input  logic        dotp_valid_i,
  input  logic        signed_a_i,
  input  logic        signed_b_i,
  input  logic        accumulate_i,
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic [31:0] op_c_i,
  output logic [31:0] result_o,
  output logic        result_valid_o,
  output logic [2:0]  slice_o
);

  simd_fmt_t  fmt;
  logic       fmt_we, slice_we;
  logic [2:0] slice_wdata, slice;
  logic [7:0] target, mac_count;

  simd_fmt_csr u_csr (
    .clk_i, .rst_ni, .csr_we_i, .csr_addr_i, .csr_wdata_i, .csr_rdata_o,
    .slice_i(slice), .fmt_o(fmt), .fmt_we_o(fmt_we), .target_o(target),
    .slice_we_o(slice_we), .slice_wdata_o(slice_wdata)
  );

  mp_controller u_mpc (
    .clk_i, .rst_ni, .fmt_i(fmt), .fmt_we_i(fmt_we), .target_i(target),
    .mac_i(dotp_valid_i), .slice_we_i(slice_we), .slice_wdata_i(slice_wdata),
    .slice_o(slice), .mac_count_o(mac_count)
  );

  dotp_unit u_dotp (
    .clk_i, .rst_ni, .valid_i(dotp_valid_i), .fmt_i(fmt), .slice_i(slice),
    .signed_a_i, .signed_b_i, .accumulate_i, .op_a_i, .op_b_i, .op_c_i,
    .result_o, .valid_o(result_valid_o)
  );

  assign slice_o = slice;

  // The MAC counter never passes its target.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (target == 8'd0) || (mac_count < target))
    else $error("mp_simd_ext: MAC counter beyond target");

endmodule
