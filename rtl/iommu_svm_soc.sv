// iommu_svm_soc: memory system of a RISC-V host + accelerator SoC that lets
// the accelerator work in the host's virtual address space (shared virtual
// addressing) through an IOMMU.
//
// Block structure (following the SoC block diagram):
//   host master ----------------------\
//   accelerator --> IOMMU --(device)--> 64b AXI crossbar --> 1 MiB L2 SPM
//                         --(walks)---/        |       \--> external port
//                                              v            (cluster slave,
//                                   LLC bypass demux         peripherals)
//                                   |              |
//                           128 KiB LLC       bypass path
//                                   \              /
//                                    mux (2 to 1)
//                                         |
//                                    AXI delayer --> DRAM controller port
//
// The crossbar has three masters (host, IOMMU device port, IOMMU walk port)
// and three slaves: the L2 scratchpad at L2_BASE (1 MiB), the DRAM window,
// which covers both the cached DRAM addresses DRAM_BASE.. and their bypass
// alias DRAM_BASE + BYPASS_OFFSET.., and a default external port that takes
// every other address. Inside the DRAM window, the bypass demux sends the
// alias and the reserved upper half of DRAM around the LLC, the rest through
// it; a mux joins both paths again in front of the delayer, which adds
// dram_delay_i cycles to every B and R response from the DRAM controller.
// The host uses the cached addresses, the IOMMU walker too; the accelerator's
// DMA adds BYPASS_OFFSET to its IOVAs, and the IOMMU carries that bit through
// translation, so its bulk traffic goes around the LLC.
//
// Which blocks exist and how they are connected follows the paper; the
// address map, the offset value and the single clock domain are this design's
// choices (the paper runs the accelerator in its own, slower clock domain,
// which lives outside this top). External masters must use AXI IDs below 32:
// the crossbar and the DRAM mux each add index bits to the ID.
module iommu_svm_soc #(
  parameter axi_pkg::addr_t L2_BASE       = 64'h0000_0000_7800_0000,
  parameter int unsigned    L2_BYTES      = 1024 * 1024,
  parameter axi_pkg::addr_t DRAM_BASE     = 64'h0000_0000_8000_0000,
  parameter axi_pkg::addr_t DRAM_SIZE     = 64'h0000_0000_8000_0000,
  parameter axi_pkg::addr_t BYPASS_OFFSET = 64'h0000_0100_0000_0000,
  parameter int unsigned    IOTLB_ENTRIES = 4,
  parameter int unsigned    LLC_SETS      = 256,
  parameter int unsigned    LLC_WAYS      = 8,
  parameter int unsigned    LLC_BEATS     = 8,
  parameter int unsigned    DELAY_DEPTH   = 1024
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // host (CVA6) AXI master
  input  axi_pkg::req_t         host_req_i,
  output axi_pkg::rsp_t         host_rsp_o,
  // accelerator cluster AXI master (IO virtual addresses)
  input  axi_pkg::req_t         dev_req_i,
  output axi_pkg::rsp_t         dev_rsp_o,
  // default slave port: accelerator register/L1 space and peripherals
  output axi_pkg::req_t         ext_req_o,
  input  axi_pkg::rsp_t         ext_rsp_i,
  // DRAM controller
  output axi_pkg::req_t         dram_req_o,
  input  axi_pkg::rsp_t         dram_rsp_i,
  // configuration and status
  input  logic [15:0]           dram_delay_i,
  input  iommu_pkg::ddtp_mode_e ddtp_mode_i,
  input  iommu_pkg::ppn_t       ddtp_ppn_i,
  input  logic                  iommu_inval_i,
  output logic                  iommu_fault_valid_o,
  output logic [11:0]           iommu_fault_cause_o,
  output axi_pkg::addr_t        iommu_fault_iova_o,
  output logic [31:0]           iommu_stat_hits_o,
  output logic [31:0]           iommu_stat_walks_o,
  output logic [31:0]           iommu_stat_walk_cycles_o,
  input  logic                  llc_flush_i,
  output logic                  llc_flush_busy_o
);
  import axi_pkg::*;

  localparam rule_t RULES [3] = '{
    '{base: L2_BASE,                   size: addr_t'(L2_BYTES), idx: 4'd0},
    '{base: DRAM_BASE,                 size: DRAM_SIZE,         idx: 4'd1},
    '{base: DRAM_BASE + BYPASS_OFFSET, size: DRAM_SIZE,         idx: 4'd1}
  };

  req_t xm_req [3];
  rsp_t xm_rsp [3];
  req_t xs_req [3];
  rsp_t xs_rsp [3];

  assign xm_req[0]  = host_req_i;
  assign host_rsp_o = xm_rsp[0];

  iommu #(
    .IOTLB_ENTRIES (IOTLB_ENTRIES),
    .PASS_MASK     (BYPASS_OFFSET)
  ) u_iommu (
    .clk_i, .rst_ni,
    .ddtp_mode_i,
    .ddtp_ppn_i,
    .inval_i            (iommu_inval_i),
    .fault_valid_o      (iommu_fault_valid_o),
    .fault_cause_o      (iommu_fault_cause_o),
    .fault_iova_o       (iommu_fault_iova_o),
    .stat_hits_o        (iommu_stat_hits_o),
    .stat_walks_o       (iommu_stat_walks_o),
    .stat_walk_cycles_o (iommu_stat_walk_cycles_o),
    .dev_req_i,
    .dev_rsp_o,
    .mem_req_o          (xm_req[1]),
    .mem_rsp_i          (xm_rsp[1]),
    .ptw_req_o          (xm_req[2]),
    .ptw_rsp_i          (xm_rsp[2])
  );

  axi_xbar #(
    .NUM_MST (3), .NUM_SLV (3), .NUM_RULES (3), .RULES (RULES)
  ) u_xbar (
    .clk_i, .rst_ni,
    .mst_req_i (xm_req),
    .mst_rsp_o (xm_rsp),
    .slv_req_o (xs_req),
    .slv_rsp_i (xs_rsp)
  );

  axi_sram #(.MEM_BYTES(L2_BYTES)) u_l2 (
    .clk_i, .rst_ni,
    .slv_req_i (xs_req[0]),
    .slv_rsp_o (xs_rsp[0])
  );

  assign ext_req_o = xs_req[2];
  assign xs_rsp[2] = ext_rsp_i;

  // ---------------- DRAM path ----------------
  req_t llc_req, byp_req, llcm_req, dly_req;
  rsp_t llc_rsp, byp_rsp, llcm_rsp, dly_rsp;
  req_t mx_req [2];
  rsp_t mx_rsp [2];

  llc_bypass_demux #(
    .DRAM_BASE (DRAM_BASE), .DRAM_SIZE (DRAM_SIZE), .BYPASS_OFFSET (BYPASS_OFFSET)
  ) u_byp_demux (
    .clk_i, .rst_ni,
    .slv_req_i (xs_req[1]),
    .slv_rsp_o (xs_rsp[1]),
    .llc_req_o (llc_req),
    .llc_rsp_i (llc_rsp),
    .byp_req_o (byp_req),
    .byp_rsp_i (byp_rsp)
  );

  axi_llc #(
    .SETS (LLC_SETS), .WAYS (LLC_WAYS), .LINE_BEATS (LLC_BEATS)
  ) u_llc (
    .clk_i, .rst_ni,
    .flush_i      (llc_flush_i),
    .flush_busy_o (llc_flush_busy_o),
    .slv_req_i    (llc_req),
    .slv_rsp_o    (llc_rsp),
    .mst_req_o    (llcm_req),
    .mst_rsp_i    (llcm_rsp)
  );

  assign mx_req[0] = llcm_req;
  assign llcm_rsp  = mx_rsp[0];
  assign mx_req[1] = byp_req;
  assign byp_rsp   = mx_rsp[1];

  axi_mux #(.N(2)) u_dram_mux (
    .clk_i, .rst_ni,
    .slv_req_i (mx_req),
    .slv_rsp_o (mx_rsp),
    .mst_req_o (dly_req),
    .mst_rsp_i (dly_rsp)
  );

  axi_delayer #(.DEPTH(DELAY_DEPTH)) u_delayer (
    .clk_i, .rst_ni,
    .delay_i   (dram_delay_i),
    .slv_req_i (dly_req),
    .slv_rsp_o (dly_rsp),
    .mst_req_o (dram_req_o),
    .mst_rsp_i (dram_rsp_i)
  );
endmodule
