// Page-tbl builder for IOMMU testbenches, included inside a testbench
// module that has an axi_mem_model instance called `pt_mem` holding the
// device directory and page tables. Builds Sv39 tables the way an OS driver
// would: pt_map() creates the intermediate tables it needs, allocating 4 KiB
// tbl pages from `pt_next_ppn` upward, and writes the leaf entry with the
// A and D bits set. dc_set() writes a base-format device context (tc.V and
// fsc = iosatp MODE/PPN) into a one-level device directory.

iommu_pkg::ppn_t pt_next_ppn;

function automatic iommu_pkg::ppn_t pt_alloc();
  iommu_pkg::ppn_t p = pt_next_ppn;
  pt_next_ppn = pt_next_ppn + 1;
  for (int i = 0; i < 512; i++) pt_mem.poke({8'd0, p, 12'd0} + 64'(i) * 8, 64'd0);
  return p;
endfunction

function automatic void pt_map(input iommu_pkg::ppn_t root, input logic [38:0] iova,
                               input logic [55:0] pa, input int leaf_lvl,
                               input logic r, input logic w);
  iommu_pkg::ppn_t tbl = root;
  for (int lvl = 2; lvl >= 0; lvl--) begin
    automatic logic [8:0] vpn = iova[12 + 9*lvl +: 9];
    automatic axi_pkg::addr_t pte_a = {8'd0, tbl, 12'd0} + 64'(vpn) * 8;
    automatic logic [63:0] pte = pt_mem.peek(pte_a);
    if (lvl == leaf_lvl) begin
      pt_mem.poke(pte_a, {10'd0, pa[55:12], 10'b0} | 64'hC1 | (64'(r) << 1) | (64'(w) << 2));
      return;
    end
    if (!pte[0]) begin
      automatic iommu_pkg::ppn_t nt = pt_alloc();
      pte = {10'd0, nt, 10'b0} | 64'h1;
      pt_mem.poke(pte_a, pte);
    end
    tbl = pte[53:10];
  end
endfunction

function automatic void dc_set(input iommu_pkg::ppn_t ddt, input logic [7:0] did,
                               input logic valid, input logic [3:0] mode, input iommu_pkg::ppn_t root);
  axi_pkg::addr_t dc = {8'd0, ddt, 12'd0} + 64'(did[6:0]) * 32;
  pt_mem.poke(dc + 0,  64'(valid));
  pt_mem.poke(dc + 8,  64'd0);
  pt_mem.poke(dc + 16, 64'd0);
  pt_mem.poke(dc + 24, {mode, 16'd0, root});
endfunction
