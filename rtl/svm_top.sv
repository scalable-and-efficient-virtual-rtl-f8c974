// svm_top: the shared-virtual-memory path of one accelerator cluster.
//
// The cluster's miss-tolerant DMA engine (vdma) and the cluster's core port (loads,
// stores and TLB prefetches of the PEs) are merged by axi_mux2 and go through the
// hybrid IOMMU, whose master port leads to the SoC interconnect and the shared DRAM
// (outside this block, as ports). The PEs, the L1 memory and the software that
// handles TLB misses are outside as well: the PEs drive the per-PE DMA command ports,
// receive the completion event and use the DMA's failed-address register; the miss
// handlers write the TLBs through the IOMMU configuration port.
//
// Flow of a DMA burst that misses: vdma issues it, the IOMMU answers SLVERR and drops
// it, the retirement buffer marks it failed, vdma stops issuing and drains; a miss
// handler reads the failed address (dma_reg_*), walks the page table, writes a TLB
// entry (iommu_cfg_*), writes the handled address back (dma_reg_*), and vdma reissues
// the burst. A PE prefetch (core AXI user bit 1) is answered by the IOMMU: OKAY if
// the page is in a TLB, SLVERR otherwise, and never reaches memory. The wiring follows
// the architecture the paper describes; the single cluster and the two-port network
// are this design's simplification.
// Lint note: Verilator reports rst_ni as used both synchronously and asynchronously.
// All flops use it as an asynchronous active-low reset; the synchronous use it sees is
// the 'disable iff (!rst_ni)' of the simulation assertions, which are not hardware.
// core_r_o.id[3] and core_b_o.id[3] are constant 0: that bit is the network's routing
// bit and is cleared before responses return to the core port.
module svm_top
  import svm_pkg::*;
#(
  parameter int unsigned N_PE            = 8,
  parameter int unsigned N_INFLIGHT      = 8,
  parameter int unsigned MAX_BURST_BYTES = 2048,
  parameter int unsigned PAGE_BYTES      = 4096,
  parameter int unsigned L1_TLB_ENTRIES  = 32,
  parameter int unsigned L2_TLB_SETS     = 32,
  parameter int unsigned L2_TLB_WAYS     = 8
) (
  input  logic clk_i,
  input  logic rst_ni,
  // PE DMA command interfaces and completion event
  input  logic [N_PE-1:0]         dma_cmd_valid_i,
  output logic [N_PE-1:0]         dma_cmd_ready_o,
  input  dma_cmd_t                dma_cmd_i [N_PE],
  output logic [DMA_ID_W-1:0]     dma_cmd_id_o,
  output logic                    dma_done_valid_o,
  output logic [$clog2(N_PE)-1:0] dma_done_pe_o,
  output logic [DMA_ID_W-1:0]     dma_done_id_o,
  // DMA failed-address register
  input  logic                    dma_reg_req_i,
  input  logic                    dma_reg_we_i,
  input  logic [31:0]             dma_reg_wdata_i,
  output logic [31:0]             dma_reg_rdata_o,
  // L1 ports of the DMA
  output logic                    l1w_req_o,
  input  logic                    l1w_gnt_i,
  output logic [L1_AW-1:0]        l1w_addr_o,
  output logic [DATA_W-1:0]       l1w_data_o,
  output logic                    l1r_req_o,
  input  logic                    l1r_gnt_i,
  output logic [L1_AW-1:0]        l1r_addr_o,
  input  logic [DATA_W-1:0]       l1r_data_i,
  // core AXI port of the cluster (PE accesses to shared memory, prefetches)
  input  logic core_ar_valid_i, output logic core_ar_ready_o, input  ax_t core_ar_i,
  input  logic core_aw_valid_i, output logic core_aw_ready_o, input  ax_t core_aw_i,
  input  logic core_w_valid_i,  output logic core_w_ready_o,  input  w_t  core_w_i,
  output logic core_r_valid_o,  input  logic core_r_ready_i,  output r_t  core_r_o,
  output logic core_b_valid_o,  input  logic core_b_ready_i,  output b_t  core_b_o,
  // IOMMU configuration (TLB writes by the miss handlers)
  input  logic        iommu_cfg_we_i,
  input  logic [9:0]  iommu_cfg_addr_i,
  input  logic [31:0] iommu_cfg_wdata_i,
  // towards SoC interconnect and shared memory (physical addresses)
  output logic mem_ar_valid_o, input  logic mem_ar_ready_i, output ax_t mem_ar_o,
  output logic mem_aw_valid_o, input  logic mem_aw_ready_i, output ax_t mem_aw_o,
  output logic mem_w_valid_o,  input  logic mem_w_ready_i,  output w_t  mem_w_o,
  input  logic mem_r_valid_i,  output logic mem_r_ready_o,  input  r_t  mem_r_i,
  input  logic mem_b_valid_i,  output logic mem_b_ready_o,  input  b_t  mem_b_i
);

  logic nw_ar_valid [2], nw_ar_ready [2], nw_aw_valid [2], nw_aw_ready [2];
  logic nw_w_valid [2], nw_w_ready [2], nw_r_valid [2], nw_r_ready [2];
  logic nw_b_valid [2], nw_b_ready [2];
  ax_t  nw_ar [2], nw_aw [2];
  w_t   nw_w [2];
  r_t   nw_r [2];
  b_t   nw_b [2];

  logic io_ar_valid, io_ar_ready, io_aw_valid, io_aw_ready, io_w_valid, io_w_ready;
  logic io_r_valid, io_r_ready, io_b_valid, io_b_ready;
  ax_t  io_ar, io_aw;
  w_t   io_w;
  r_t   io_r;
  b_t   io_b;

  vdma #(
    .N_PE            (N_PE),
    .N_INFLIGHT      (N_INFLIGHT),
    .MAX_BURST_BYTES (MAX_BURST_BYTES),
    .PAGE_BYTES      (PAGE_BYTES)
  ) i_dma (
    .clk_i, .rst_ni,
    .cmd_valid_i  (dma_cmd_valid_i),
    .cmd_ready_o  (dma_cmd_ready_o),
    .cmd_i        (dma_cmd_i),
    .cmd_id_o     (dma_cmd_id_o),
    .done_valid_o (dma_done_valid_o),
    .done_pe_o    (dma_done_pe_o),
    .done_id_o    (dma_done_id_o),
    .reg_req_i    (dma_reg_req_i),
    .reg_we_i     (dma_reg_we_i),
    .reg_wdata_i  (dma_reg_wdata_i),
    .reg_rdata_o  (dma_reg_rdata_o),
    .ar_valid_o (nw_ar_valid[0]), .ar_ready_i (nw_ar_ready[0]), .ar_o (nw_ar[0]),
    .aw_valid_o (nw_aw_valid[0]), .aw_ready_i (nw_aw_ready[0]), .aw_o (nw_aw[0]),
    .w_valid_o  (nw_w_valid[0]),  .w_ready_i  (nw_w_ready[0]),  .w_o  (nw_w[0]),
    .r_valid_i  (nw_r_valid[0]),  .r_ready_o  (nw_r_ready[0]),  .r_i  (nw_r[0]),
    .b_valid_i  (nw_b_valid[0]),  .b_ready_o  (nw_b_ready[0]),  .b_i  (nw_b[0]),
    .l1w_req_o, .l1w_gnt_i, .l1w_addr_o, .l1w_data_o,
    .l1r_req_o, .l1r_gnt_i, .l1r_addr_o, .l1r_data_i
  );

  always_comb begin
    nw_ar_valid[1]  = core_ar_valid_i;  core_ar_ready_o = nw_ar_ready[1];  nw_ar[1] = core_ar_i;
    nw_aw_valid[1]  = core_aw_valid_i;  core_aw_ready_o = nw_aw_ready[1];  nw_aw[1] = core_aw_i;
    nw_w_valid[1]   = core_w_valid_i;   core_w_ready_o  = nw_w_ready[1];   nw_w[1]  = core_w_i;
    core_r_valid_o  = nw_r_valid[1];    nw_r_ready[1]   = core_r_ready_i;  core_r_o = nw_r[1];
    core_b_valid_o  = nw_b_valid[1];    nw_b_ready[1]   = core_b_ready_i;  core_b_o = nw_b[1];
  end

  axi_mux2 i_network (
    .clk_i, .rst_ni,
    .s_ar_valid_i (nw_ar_valid), .s_ar_ready_o (nw_ar_ready), .s_ar_i (nw_ar),
    .s_aw_valid_i (nw_aw_valid), .s_aw_ready_o (nw_aw_ready), .s_aw_i (nw_aw),
    .s_w_valid_i  (nw_w_valid),  .s_w_ready_o  (nw_w_ready),  .s_w_i  (nw_w),
    .s_r_valid_o  (nw_r_valid),  .s_r_ready_i  (nw_r_ready),  .s_r_o  (nw_r),
    .s_b_valid_o  (nw_b_valid),  .s_b_ready_i  (nw_b_ready),  .s_b_o  (nw_b),
    .m_ar_valid_o (io_ar_valid), .m_ar_ready_i (io_ar_ready), .m_ar_o (io_ar),
    .m_aw_valid_o (io_aw_valid), .m_aw_ready_i (io_aw_ready), .m_aw_o (io_aw),
    .m_w_valid_o  (io_w_valid),  .m_w_ready_i  (io_w_ready),  .m_w_o  (io_w),
    .m_r_valid_i  (io_r_valid),  .m_r_ready_o  (io_r_ready),  .m_r_i  (io_r),
    .m_b_valid_i  (io_b_valid),  .m_b_ready_o  (io_b_ready),  .m_b_i  (io_b)
  );

  hybrid_iommu #(
    .L1_ENTRIES (L1_TLB_ENTRIES),
    .L2_SETS    (L2_TLB_SETS),
    .L2_WAYS    (L2_TLB_WAYS)
  ) i_iommu (
    .clk_i, .rst_ni,
    .s_ar_valid_i (io_ar_valid), .s_ar_ready_o (io_ar_ready), .s_ar_i (io_ar),
    .s_aw_valid_i (io_aw_valid), .s_aw_ready_o (io_aw_ready), .s_aw_i (io_aw),
    .s_w_valid_i  (io_w_valid),  .s_w_ready_o  (io_w_ready),  .s_w_i  (io_w),
    .s_r_valid_o  (io_r_valid),  .s_r_ready_i  (io_r_ready),  .s_r_o  (io_r),
    .s_b_valid_o  (io_b_valid),  .s_b_ready_i  (io_b_ready),  .s_b_o  (io_b),
    .m_ar_valid_o (mem_ar_valid_o), .m_ar_ready_i (mem_ar_ready_i), .m_ar_o (mem_ar_o),
    .m_aw_valid_o (mem_aw_valid_o), .m_aw_ready_i (mem_aw_ready_i), .m_aw_o (mem_aw_o),
    .m_w_valid_o  (mem_w_valid_o),  .m_w_ready_i  (mem_w_ready_i),  .m_w_o  (mem_w_o),
    .m_r_valid_i  (mem_r_valid_i),  .m_r_ready_o  (mem_r_ready_o),  .m_r_i  (mem_r_i),
    .m_b_valid_i  (mem_b_valid_i),  .m_b_ready_o  (mem_b_ready_o),  .m_b_i  (mem_b_i),
    .cfg_we_i     (iommu_cfg_we_i),
    .cfg_addr_i   (iommu_cfg_addr_i),
    .cfg_wdata_i  (iommu_cfg_wdata_i)
  );

endmodule
