// mp_controller: mixed-precision controller (MPC) of one core.
//
// In a mixed-precision dot product operand B holds more elements than operand
// A (e.g. 16 two-bit weights against 4 eight-bit activations), so one B
// register serves several dot products, each on a different sub-group
// ("slice") of its elements. The MPC produces the SLICE selector that tells
// the DOTP unit's slicer & router which sub-group to use.
//
// How it works. A MAC counter counts the mixed-precision dot products issued
// with the current slice. When it reaches the programmed target it returns to
// 0 and the slice selector moves on to the next sub-group; after the last
// sub-group (width(A)/width(B) of them) it wraps to 0. With target 2 this gives
// the sequence (counter, slice) = (0,0) (1,0) (0,1) (1,1) (0,2) ..., which is
// the inner loop of a convolution that reuses each B register for two
// accumulators. Software may also write the slice selector directly, for
// access patterns this sequence does not cover.
//
// Interface and timing: slice_o is the slice for an operation issued in the
// current cycle; it advances on the clock edge at which mac_i is high. A
// software write (slice_we_i) or a format change (fmt_we_i) takes effect on
// the next edge and clears the MAC counter.
//
// Follows the paper: the MAC counter with a programmable target, the slice
// selector advancing when the counter wraps, counting only mixed-precision MAC
// operations, and software control of the selected sub-group. Own choices: a
// target of 0 behaves as 1; the selector wraps to 0 after the last sub-group;
// writing the slice or changing the format clears the counter.
module mp_controller
  import dustin_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  simd_fmt_t  fmt_i,         // current SIMD format
  input  logic       fmt_we_i,      // format CSR is being written: restart
  input  logic [7:0] target_i,      // MAC counter target (dot products per slice)
  input  logic       mac_i,         // a SIMD dot product is issued this cycle
  input  logic       slice_we_i,    // software write of the slice selector
  input  logic [2:0] slice_wdata_i,
  output logic [2:0] slice_o,
  output logic [7:0] mac_count_o
);

  logic [7:0] cnt_q;
  logic [2:0] slice_q;
  logic       mixed;
  logic [7:0] tgt;
  logic [3:0] nsl;

  assign nsl   = n_slices(fmt_i);
  assign mixed = (nsl > 4'd1);
  assign tgt   = (target_i == 8'd0) ? 8'd1 : target_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q   <= '0;
      slice_q <= '0;
    end else if (fmt_we_i) begin
      cnt_q   <= '0;
      slice_q <= '0;
    end else if (slice_we_i) begin
      cnt_q   <= '0;
      slice_q <= slice_wdata_i;
    end else if (mac_i && mixed) begin
      if (cnt_q + 8'd1 >= tgt) begin
        cnt_q   <= '0;
        slice_q <= ({1'b0, slice_q} + 4'd1 >= nsl) ? 3'd0 : slice_q + 3'd1;
      end else begin
        cnt_q <= cnt_q + 8'd1;
      end
    end
  end

  assign slice_o     = mixed ? slice_q : 3'd0;
  assign mac_count_o = cnt_q;

endmodule
