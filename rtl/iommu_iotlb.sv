// iommu_iotlb: fully associative IO translation look-aside buffer.
//
// Holds ENTRIES leaf translations (the paper's IOMMU is configured with four
// entries). An entry is tagged by the device identifier and the Sv39 virtual
// page number, and records the physical page number, the leaf level (4 KiB,
// 2 MiB or 1 GiB page) and the read/write permissions. Lookup is
// combinational: for a superpage only the upper VPN fields are compared and
// the lower ones are carried into the returned PPN. A fill replaces the
// entry at a round-robin pointer, unless the same page is already present,
// in which case that entry is overwritten. flush_i invalidates every entry in
// the next cycle (it has priority over a fill in the same cycle). Tagging by
// device identifier instead of the specification's process/guest context
// identifiers, and round-robin replacement, are this design's choices.
module iommu_iotlb #(
  parameter int unsigned ENTRIES = 4
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              flush_i,
  // lookup
  input  logic [7:0]        lk_did_i,
  input  iommu_pkg::vpn_t   lk_vpn_i,
  output logic              lk_hit_o,
  output iommu_pkg::ppn_t   lk_ppn_o,
  output logic              lk_r_o,
  output logic              lk_w_o,
  // fill
  input  logic              fill_i,
  input  logic [7:0]        fill_did_i,
  input  iommu_pkg::vpn_t   fill_vpn_i,
  input  iommu_pkg::ppn_t   fill_ppn_i,
  input  iommu_pkg::lvl_t   fill_lvl_i,
  input  logic              fill_r_i,
  input  logic              fill_w_i
);
  import iommu_pkg::*;

  localparam int unsigned PW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic       valid;
    logic [7:0] did;
    vpn_t       vpn;
    ppn_t       ppn;
    lvl_t       lvl;
    logic       r;
    logic       w;
  } entry_t;

  entry_t        tlb_q [ENTRIES];
  logic [PW-1:0] rr_q;

  function automatic logic match(entry_t e, logic [7:0] did, vpn_t vpn);
    logic m;
    m = e.valid && (e.did == did) && (e.vpn[26:18] == vpn[26:18]);
    if (e.lvl <= 2'd1) m = m && (e.vpn[17:9] == vpn[17:9]);
    if (e.lvl == 2'd0) m = m && (e.vpn[8:0] == vpn[8:0]);
    return m;
  endfunction

  always_comb begin
    lk_hit_o = 1'b0; lk_ppn_o = '0; lk_r_o = 1'b0; lk_w_o = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (match(tlb_q[i], lk_did_i, lk_vpn_i)) begin
        lk_hit_o = 1'b1;
        lk_r_o   = tlb_q[i].r;
        lk_w_o   = tlb_q[i].w;
        unique case (tlb_q[i].lvl)
          2'd2:    lk_ppn_o = {tlb_q[i].ppn[43:18], lk_vpn_i[17:0]};
          2'd1:    lk_ppn_o = {tlb_q[i].ppn[43:9],  lk_vpn_i[8:0]};
          default: lk_ppn_o = tlb_q[i].ppn;
        endcase
      end
    end
  end

  // Entry to replace: an existing entry of the same page, else round robin.
  logic [PW-1:0] fill_idx;
  logic          fill_dup;
  always_comb begin
    fill_idx = rr_q; fill_dup = 1'b0;
    for (int i = 0; i < ENTRIES; i++)
      if (tlb_q[i].valid && tlb_q[i].did == fill_did_i && tlb_q[i].vpn == fill_vpn_i
          && tlb_q[i].lvl == fill_lvl_i) begin
        fill_idx = PW'(i); fill_dup = 1'b1;
      end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < ENTRIES; i++) tlb_q[i] <= '0;
      rr_q <= '0;
    end else if (flush_i) begin
      for (int i = 0; i < ENTRIES; i++) tlb_q[i].valid <= 1'b0;
    end else if (fill_i) begin
      tlb_q[fill_idx] <= '{valid: 1'b1, did: fill_did_i, vpn: fill_vpn_i, ppn: fill_ppn_i,
                           lvl: fill_lvl_i, r: fill_r_i, w: fill_w_i};
      if (!fill_dup) rr_q <= (rr_q == PW'(ENTRIES - 1)) ? '0 : rr_q + 1'b1;
    end
  end
endmodule
