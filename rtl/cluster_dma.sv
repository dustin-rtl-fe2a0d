// cluster_dma: DMA engine moving data between the L2 memory and the cluster's
// L1 (TCDM), with two-dimensional transfers and up to 16 reads in flight.
//
// A job is a 2-D block copy: rows_i rows of len_i 32-bit words; consecutive
// words of a row are 4 bytes apart, and row r starts at base + r * stride (a
// separate stride for source and destination, in bytes). dir_i selects the
// direction: 0 copies L2 -> L1, 1 copies L1 -> L2. The job is taken when
// start_i is high and the engine is idle; busy_o is high until the last word
// has been written, and done_o then pulses for one cycle (the event that wakes
// the waiting core).
//
// How it works: a read address generator walks the source block and issues
// reads while fewer than MAX_OUTSTANDING words are either in flight or waiting
// in the data buffer; returning data is pushed into a MAX_OUTSTANDING-deep
// FIFO; a write address generator walks the destination block and writes the
// FIFO head. Reserving buffer space for every read in flight means a read
// response is always accepted, so long L2 latencies are hidden with up to
// MAX_OUTSTANDING reads in flight: one word per cycle as long as the L2 answers
// within MAX_OUTSTANDING cycles.
//
// Interfaces: the L1 side is one TCDM master port (request held until
// granted, read data with rvalid one cycle after the grant; rvalid pulses of
// writes are ignored). The L2 side is a plain request/grant port with in-order
// read responses (ext_rvalid_i) of any latency; writes get no response. On the
// chip this side is the cluster's AXI port, which is not modelled.
//
// Follows the paper: L2 <-> L1 transfers, 2-D transfers, 16 outstanding
// transactions. Own choices: word granularity (addresses and strides are
// multiples of 4), the job interface as plain ports instead of the
// memory-mapped registers behind the peripheral interconnect, one job at a
// time, the simple L2 port in place of AXI.
module cluster_dma
  import dustin_pkg::tcdm_req_t;
#(
  parameter int unsigned MAX_OUTSTANDING = 16,
  parameter int unsigned LEN_W           = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // job
  input  logic             start_i,
  input  logic             dir_i,
  input  logic [31:0]      src_addr_i,
  input  logic [31:0]      dst_addr_i,
  input  logic [LEN_W-1:0] len_i,
  input  logic [LEN_W-1:0] rows_i,
  input  logic [31:0]      src_stride_i,
  input  logic [31:0]      dst_stride_i,
  output logic             busy_o,
  output logic             done_o,
  // L1 (TCDM) master port
  output logic             tcdm_req_o,
  output tcdm_req_t        tcdm_mreq_o,
  input  logic             tcdm_gnt_i,
  input  logic             tcdm_rvalid_i,
  input  logic [31:0]      tcdm_rdata_i,
  // L2 side
  output logic             ext_req_o,
  output logic             ext_we_o,
  output logic [31:0]      ext_addr_o,
  output logic [31:0]      ext_wdata_o,
  input  logic             ext_gnt_i,
  input  logic             ext_rvalid_i,
  input  logic [31:0]      ext_rdata_i
);

  localparam int unsigned PTR_W = $clog2(MAX_OUTSTANDING);
  localparam int unsigned CNT_W = PTR_W + 1;

  logic             busy_q, dir_q, done_q;
  logic [31:0]      src_stride_q, dst_stride_q;
  logic [LEN_W-1:0] len_q;
  // read (source) and write (destination) address generators
  logic [31:0]      rd_addr_q, rd_row_q, wr_addr_q, wr_row_q;
  logic [LEN_W-1:0] rd_col_q, wr_col_q;
  logic [31:0]      rd_left_q, wr_left_q;
  // in-flight reads and data buffer
  logic [CNT_W-1:0] outst_q, fifo_cnt_q;
  logic [PTR_W-1:0] wptr_q, rptr_q;
  logic [31:0]      fifo_q [MAX_OUTSTANDING];

  logic        src_req, src_gnt, src_rvalid, dst_req, dst_gnt;
  logic [31:0] src_rdata, fifo_head;

  assign src_req   = busy_q && (rd_left_q != '0) &&
                     ((outst_q + fifo_cnt_q) < CNT_W'(MAX_OUTSTANDING));
  assign dst_req   = busy_q && (fifo_cnt_q != '0);
  assign fifo_head = fifo_q[rptr_q];

  // direction mux: which memory is read and which is written
  always_comb begin
    tcdm_mreq_o = '0;
    tcdm_mreq_o.be = 4'hF;
    if (!dir_q) begin
      ext_req_o         = src_req;
      ext_we_o          = 1'b0;
      ext_addr_o        = rd_addr_q;
      ext_wdata_o       = '0;
      src_gnt           = ext_gnt_i;
      src_rvalid        = ext_rvalid_i;
      src_rdata         = ext_rdata_i;
      tcdm_req_o        = dst_req;
      tcdm_mreq_o.we    = 1'b1;
      tcdm_mreq_o.addr  = wr_addr_q;
      tcdm_mreq_o.wdata = fifo_head;
      dst_gnt           = tcdm_gnt_i;
    end else begin
      tcdm_req_o        = src_req;
      tcdm_mreq_o.we    = 1'b0;
      tcdm_mreq_o.addr  = rd_addr_q;
      src_gnt           = tcdm_gnt_i;
      src_rvalid        = tcdm_rvalid_i;
      src_rdata         = tcdm_rdata_i;
      ext_req_o         = dst_req;
      ext_we_o          = 1'b1;
      ext_addr_o        = wr_addr_q;
      ext_wdata_o       = fifo_head;
      dst_gnt           = ext_gnt_i;
    end
  end

  logic rd_fire, rd_back, wr_fire;
  assign rd_fire = src_req && src_gnt;
  assign rd_back = busy_q && src_rvalid && (outst_q != '0);
  assign wr_fire = dst_req && dst_gnt;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q       <= 1'b0;
      dir_q        <= 1'b0;
      done_q       <= 1'b0;
      src_stride_q <= '0;
      dst_stride_q <= '0;
      len_q        <= '0;
      rd_addr_q    <= '0;
      rd_row_q     <= '0;
      wr_addr_q    <= '0;
      wr_row_q     <= '0;
      rd_col_q     <= '0;
      wr_col_q     <= '0;
      rd_left_q    <= '0;
      wr_left_q    <= '0;
      outst_q      <= '0;
      fifo_cnt_q   <= '0;
      wptr_q       <= '0;
      rptr_q       <= '0;
    end else begin
      done_q <= 1'b0;
      if (!busy_q) begin
        if (start_i) begin
          dir_q        <= dir_i;
          src_stride_q <= src_stride_i;
          dst_stride_q <= dst_stride_i;
          len_q        <= len_i;
          rd_addr_q    <= src_addr_i;
          rd_row_q     <= src_addr_i;
          wr_addr_q    <= dst_addr_i;
          wr_row_q     <= dst_addr_i;
          rd_col_q     <= '0;
          wr_col_q     <= '0;
          rd_left_q    <= 32'(len_i) * 32'(rows_i);
          wr_left_q    <= 32'(len_i) * 32'(rows_i);
          if ((len_i == '0) || (rows_i == '0)) done_q <= 1'b1;
          else                                 busy_q <= 1'b1;
        end
      end else begin
        // source side: issue reads, collect responses
        if (rd_fire) begin
          rd_left_q <= rd_left_q - 1;
          if (rd_col_q == len_q - 1'b1) begin
            rd_col_q  <= '0;
            rd_row_q  <= rd_row_q + src_stride_q;
            rd_addr_q <= rd_row_q + src_stride_q;
          end else begin
            rd_col_q  <= rd_col_q + 1'b1;
            rd_addr_q <= rd_addr_q + 32'd4;
          end
        end
        outst_q <= outst_q + CNT_W'(rd_fire) - CNT_W'(rd_back);
        if (rd_back) begin
          fifo_q[wptr_q] <= src_rdata;
          wptr_q         <= wptr_q + 1'b1;
        end
        // destination side: write the buffer head
        fifo_cnt_q <= fifo_cnt_q + CNT_W'(rd_back) - CNT_W'(wr_fire);
        if (wr_fire) begin
          rptr_q    <= rptr_q + 1'b1;
          wr_left_q <= wr_left_q - 1;
          if (wr_col_q == len_q - 1'b1) begin
            wr_col_q  <= '0;
            wr_row_q  <= wr_row_q + dst_stride_q;
            wr_addr_q <= wr_row_q + dst_stride_q;
          end else begin
            wr_col_q  <= wr_col_q + 1'b1;
            wr_addr_q <= wr_addr_q + 32'd4;
          end
          if (wr_left_q == 32'd1) begin
            busy_q <= 1'b0;
            done_q <= 1'b1;
          end
        end
      end
    end
  end

  assign busy_o = busy_q;
  assign done_o = done_q;

  // Never more reads in flight plus buffered words than the buffer holds.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (outst_q + fifo_cnt_q) <= CNT_W'(MAX_OUTSTANDING))
    else $error("cluster_dma: buffer overrun");

endmodule
