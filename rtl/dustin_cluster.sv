// dustin_cluster: the 16-core compute cluster, data side and control side of
// the Vector Lockstep Execution Mode and the cores' mixed-precision units.
//
// Structure (one instance each unless noted):
//   - 16 x mp_simd_ext: format CSRs, mixed-precision controller and DOTP unit
//     of each core.
//   - vlem_ctrl: MIMD/VLEM mode register, instruction forwarding from the
//     leader (core 0) to the followers, follower IF / I$ clock gating and PC
//     resynchronisation.
//   - event_unit: barrier and per-core clock enables.
//   - lks_unit: lockstep unit on the cores' data ports (broadcast, request
//     silencing, grant and data synchronisation).
//   - cluster_dma: 2-D DMA between the L2 (port l2_*) and the L1, up to 16
//     reads in flight, one L1 port.
//   - tcdm_interconnect: single-cycle round-robin crossbar, 16 core ports plus
//     the DMA port, to 32 banks.
//   - 32 x tcdm_bank: the 128 kB L1 (TCDM).
// The rest of each core (RI5CY-derived pipeline), the private and shared
// instruction caches, the peripheral interconnect (through which cores program
// the DMA) and the AXI port to the L2 are outside this module: their signals are the ports below. A core
// presents its data request on core_req_i/core_mreq_i and its fetched
// instruction on if_instr_i/if_valid_i; it executes id_instr_o/id_valid_o;
// it issues dot products and CSR accesses on the dotp_*/csr_* ports.
//
// Timing: all ports are synchronous to clk_i; data accesses follow a
// request/grant handshake with read data one cycle after the grant; see the
// sub-blocks for details.
//
// Follows the paper: core, bank and L1 sizes, the placement of the lockstep
// unit between the cores and the interconnect, DMA access to the same L1,
// the leader/follower organisation. Own choices: one DMA port into the L1, the
// DMA job as plain ports, a simple request/grant L2 port in place of AXI.
module dustin_cluster
  import dustin_pkg::tcdm_req_t;
#(
  parameter int unsigned N_CORES    = 16,
  parameter int unsigned N_BANKS    = 32,
  parameter int unsigned BANK_WORDS = 1024,
  parameter int unsigned DMA_MAX_OUTSTANDING = 16
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       test_en_i,
  // core data ports
  input  logic      [N_CORES-1:0]       core_req_i,
  input  tcdm_req_t [N_CORES-1:0]       core_mreq_i,
  output logic      [N_CORES-1:0]       core_gnt_o,
  output logic      [N_CORES-1:0]       core_rvalid_o,
  output logic      [N_CORES-1:0][31:0] core_rdata_o,
  // DMA job (peripheral interconnect) and L2 side
  input  logic                          dma_start_i,
  input  logic                          dma_dir_i,
  input  logic [31:0]                   dma_src_addr_i,
  input  logic [31:0]                   dma_dst_addr_i,
  input  logic [15:0]                   dma_len_i,
  input  logic [15:0]                   dma_rows_i,
  input  logic [31:0]                   dma_src_stride_i,
  input  logic [31:0]                   dma_dst_stride_i,
  output logic                          dma_busy_o,
  output logic                          dma_done_o,
  output logic                          l2_req_o,
  output logic                          l2_we_o,
  output logic [31:0]                   l2_addr_o,
  output logic [31:0]                   l2_wdata_o,
  input  logic                          l2_gnt_i,
  input  logic                          l2_rvalid_i,
  input  logic [31:0]                   l2_rdata_i,
  // VLEM mode register (peripheral interconnect)
  input  logic                          vlem_cfg_we_i,
  input  logic [31:0]                   vlem_cfg_wdata_i,
  output logic [31:0]                   vlem_cfg_rdata_o,
  output logic                          lockstep_o,
  output logic                          brdc_o,
  // instruction side
  input  logic [N_CORES-1:0][31:0]      if_instr_i,
  input  logic [N_CORES-1:0]            if_valid_i,
  input  logic [31:0]                   leader_pc_i,
  output logic [N_CORES-1:0][31:0]      id_instr_o,
  output logic [N_CORES-1:0]            id_valid_o,
  output logic [N_CORES-1:0]            pc_set_o,
  output logic [31:0]                   pc_o,
  input  logic [N_CORES-1:0]            icache_busy_i,
  output logic [N_CORES-1:0]            icache_abort_o,
  output logic [N_CORES-1:0]            if_clk_o,
  output logic [N_CORES-1:0]            icache_clk_o,
  output logic [N_CORES-1:0]            if_clk_en_o,
  output logic [N_CORES-1:0]            icache_clk_en_o,
  // event unit
  input  logic [N_CORES-1:0]            barrier_arrive_i,
  input  logic                          barrier_mask_we_i,
  input  logic [N_CORES-1:0]            barrier_mask_i,
  output logic [N_CORES-1:0]            core_clk_en_o,
  output logic                          barrier_evt_o,
  // mixed-precision extension of each core
  input  logic [N_CORES-1:0]            csr_we_i,
  input  logic [N_CORES-1:0][11:0]      csr_addr_i,
  input  logic [N_CORES-1:0][31:0]      csr_wdata_i,
  output logic [N_CORES-1:0][31:0]      csr_rdata_o,
  input  logic [N_CORES-1:0]            dotp_valid_i,
  input  logic [N_CORES-1:0]            dotp_signed_a_i,
  input  logic [N_CORES-1:0]            dotp_signed_b_i,
  input  logic [N_CORES-1:0]            dotp_acc_i,
  input  logic [N_CORES-1:0][31:0]      dotp_op_a_i,
  input  logic [N_CORES-1:0][31:0]      dotp_op_b_i,
  input  logic [N_CORES-1:0][31:0]      dotp_op_c_i,
  output logic [N_CORES-1:0][31:0]      dotp_result_o,
  output logic [N_CORES-1:0]            dotp_valid_o,
  output logic [N_CORES-1:0][2:0]       dotp_slice_o
);

  localparam int unsigned N_MASTERS = N_CORES + 1;
  localparam int unsigned ROW_W     = $clog2(BANK_WORDS);

  // ---------------- mixed-precision extensions ----------------
  for (genvar i = 0; i < int'(N_CORES); i++) begin : g_core_ext
    mp_simd_ext u_ext (
      .clk_i, .rst_ni,
      .csr_we_i(csr_we_i[i]), .csr_addr_i(csr_addr_i[i]), .csr_wdata_i(csr_wdata_i[i]),
      .csr_rdata_o(csr_rdata_o[i]),
      .dotp_valid_i(dotp_valid_i[i]), .signed_a_i(dotp_signed_a_i[i]),
      .signed_b_i(dotp_signed_b_i[i]), .accumulate_i(dotp_acc_i[i]),
      .op_a_i(dotp_op_a_i[i]), .op_b_i(dotp_op_b_i[i]), .op_c_i(dotp_op_c_i[i]),
      .result_o(dotp_result_o[i]), .result_valid_o(dotp_valid_o[i]), .slice_o(dotp_slice_o[i])
    );
  end

  // ---------------- VLEM control ----------------
  logic lockstep;

  vlem_ctrl #(.N_CORES(N_CORES)) u_vlem (
    .clk_i, .rst_ni, .test_en_i,
    .cfg_we_i(vlem_cfg_we_i), .cfg_wdata_i(vlem_cfg_wdata_i), .cfg_rdata_o(vlem_cfg_rdata_o),
    .lockstep_o(lockstep),
    .if_instr_i, .if_valid_i, .leader_pc_i, .id_instr_o, .id_valid_o, .pc_set_o, .pc_o,
    .icache_busy_i, .icache_abort_o, .if_clk_o, .icache_clk_o, .if_clk_en_o, .icache_clk_en_o
  );
  assign lockstep_o = lockstep;

  // ---------------- event unit ----------------
  event_unit #(.N_CORES(N_CORES)) u_evt (
    .clk_i, .rst_ni, .mask_we_i(barrier_mask_we_i), .mask_i(barrier_mask_i),
    .arrive_i(barrier_arrive_i), .core_clk_en_o, .evt_o(barrier_evt_o)
  );

  // ---------------- lockstep unit ----------------
  logic [N_CORES-1:0]       lks_req;
  logic [N_CORES-1:0][31:0] core_addr;
  logic [N_CORES-1:0]       core_we;
  logic [N_MASTERS-1:0]       ic_req, ic_gnt, ic_rvalid;
  tcdm_req_t [N_MASTERS-1:0]  ic_mreq;
  logic [N_MASTERS-1:0][31:0] ic_rdata;

  always_comb begin
    for (int i = 0; i < int'(N_CORES); i++) begin
      core_addr[i] = core_mreq_i[i].addr;
      core_we[i]   = core_mreq_i[i].we;
    end
  end

  lks_unit #(.N_CORES(N_CORES)) u_lks (
    .clk_i, .rst_ni, .lockstep_i(lockstep),
    .core_req_i, .core_addr_i(core_addr), .core_we_i(core_we),
    .lks_gnt_o(core_gnt_o), .lks_rvalid_o(core_rvalid_o), .lks_data_o(core_rdata_o),
    .lks_req_o(lks_req), .mem_gnt_i(ic_gnt[N_CORES-1:0]),
    .mem_rvalid_i(ic_rvalid[N_CORES-1:0]), .mem_data_i(ic_rdata[N_CORES-1:0]),
    .brdc_o
  );

  // ---------------- interconnect ----------------
  // ---------------- DMA ----------------
  logic      dma_req;
  tcdm_req_t dma_mreq;

  cluster_dma #(.MAX_OUTSTANDING(DMA_MAX_OUTSTANDING), .LEN_W(16)) u_dma (
    .clk_i, .rst_ni,
    .start_i(dma_start_i), .dir_i(dma_dir_i), .src_addr_i(dma_src_addr_i),
    .dst_addr_i(dma_dst_addr_i), .len_i(dma_len_i), .rows_i(dma_rows_i),
    .src_stride_i(dma_src_stride_i), .dst_stride_i(dma_dst_stride_i),
    .busy_o(dma_busy_o), .done_o(dma_done_o),
    .tcdm_req_o(dma_req), .tcdm_mreq_o(dma_mreq), .tcdm_gnt_i(ic_gnt[N_CORES]),
    .tcdm_rvalid_i(ic_rvalid[N_CORES]), .tcdm_rdata_i(ic_rdata[N_CORES]),
    .ext_req_o(l2_req_o), .ext_we_o(l2_we_o), .ext_addr_o(l2_addr_o), .ext_wdata_o(l2_wdata_o),
    .ext_gnt_i(l2_gnt_i), .ext_rvalid_i(l2_rvalid_i), .ext_rdata_i(l2_rdata_i)
  );

  assign ic_req  = {dma_req, lks_req};
  assign ic_mreq = {dma_mreq, core_mreq_i};

  logic [N_BANKS-1:0]            bank_req, bank_we;
  logic [N_BANKS-1:0][ROW_W-1:0] bank_addr;
  logic [N_BANKS-1:0][3:0]       bank_be;
  logic [N_BANKS-1:0][31:0]      bank_wdata, bank_rdata;

  tcdm_interconnect #(.N_MASTERS(N_MASTERS), .N_BANKS(N_BANKS), .ROW_W(ROW_W)) u_lic (
    .clk_i, .rst_ni,
    .req_i(ic_req), .mreq_i(ic_mreq), .gnt_o(ic_gnt), .rvalid_o(ic_rvalid), .rdata_o(ic_rdata),
    .bank_req_o(bank_req), .bank_we_o(bank_we), .bank_addr_o(bank_addr),
    .bank_be_o(bank_be), .bank_wdata_o(bank_wdata), .bank_rdata_i(bank_rdata)
  );

  // ---------------- L1 banks ----------------
  for (genvar b = 0; b < int'(N_BANKS); b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS)) u_bank (
      .clk_i, .req_i(bank_req[b]), .we_i(bank_we[b]), .addr_i(bank_addr[b]),
      .be_i(bank_be[b]), .wdata_i(bank_wdata[b]), .rdata_o(bank_rdata[b])
    );
  end

endmodule
