// llc_bypass_demux: routes DRAM traffic either through the last-level cache
// or around it.
//
// The same DRAM is visible at two bus addresses a fixed offset apart. Accesses
// to the plain DRAM window [DRAM_BASE, DRAM_BASE + DRAM_SIZE) go to the LLC,
// except for the upper half of DRAM, which is reserved for physically
// contiguous DMA buffers and is never cached. Accesses to the alias window
// [DRAM_BASE + BYPASS_OFFSET, ...) go to the bypass port with BYPASS_OFFSET
// subtracted, so both paths reach the DRAM controller with the same physical
// address. The accelerator's DMA uses the alias for its bulk data, so its
// long bursts are not cut into cache lines and it does not evict host data,
// while host and IOMMU page-table walks use the cached window. The split
// rule (alias plus reserved upper half) follows the paper; the offset and
// DRAM base values are this design's choice. Ordering is kept by axi_demux.
module llc_bypass_demux #(
  parameter axi_pkg::addr_t DRAM_BASE     = 64'h0000_0000_8000_0000,
  parameter axi_pkg::addr_t DRAM_SIZE     = 64'h0000_0000_8000_0000,
  parameter axi_pkg::addr_t BYPASS_OFFSET = 64'h0000_0100_0000_0000
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  axi_pkg::req_t slv_req_i,
  output axi_pkg::rsp_t slv_rsp_o,
  output axi_pkg::req_t llc_req_o,
  input  axi_pkg::rsp_t llc_rsp_i,
  output axi_pkg::req_t byp_req_o,
  input  axi_pkg::rsp_t byp_rsp_i
);
  import axi_pkg::*;

  localparam addr_t RESV_BASE = DRAM_BASE + (DRAM_SIZE >> 1);

  function automatic logic is_alias(addr_t a);
    return a >= (DRAM_BASE + BYPASS_OFFSET) && a < (DRAM_BASE + BYPASS_OFFSET + DRAM_SIZE);
  endfunction
  function automatic logic bypass(addr_t a);
    return is_alias(a) || (a >= RESV_BASE && a < DRAM_BASE + DRAM_SIZE);
  endfunction
  function automatic addr_t strip(addr_t a);
    return is_alias(a) ? a - BYPASS_OFFSET : a;
  endfunction

  req_t d_req;
  req_t m_req [2];
  rsp_t m_rsp [2];

  always_comb begin
    d_req         = slv_req_i;
    d_req.aw.addr = strip(slv_req_i.aw.addr);
    d_req.ar.addr = strip(slv_req_i.ar.addr);
  end

  axi_demux #(.M(2)) u_demux (
    .clk_i, .rst_ni,
    .aw_sel_i  (bypass(slv_req_i.aw.addr) ? 4'd1 : 4'd0),
    .ar_sel_i  (bypass(slv_req_i.ar.addr) ? 4'd1 : 4'd0),
    .slv_req_i (d_req),
    .slv_rsp_o (slv_rsp_o),
    .mst_req_o (m_req),
    .mst_rsp_i (m_rsp)
  );

  assign llc_req_o = m_req[0];
  assign byp_req_o = m_req[1];
  assign m_rsp[0]  = llc_rsp_i;
  assign m_rsp[1]  = byp_rsp_i;
endmodule
