// tb_iommu_ptw: self-checking testbench of the device-context fetch and
// Sv39 page-table walker. Page tables are built in a memory model with a
// fixed latency. Checks: results of 4 KiB, 2 MiB and 1 GiB walks; the number
// of sequential memory reads (2 for the device context, then 3, 2 or 1 for
// the page levels); walk time equal to that number of read round trips; a
// Bare device context; and the fault causes for an invalid or misconfigured
// device context, an unmapped page, a write to a read-only page and a bus
// error while reading a page-table entry.
module tb_iommu_ptw;
  import axi_pkg::*;
  import iommu_pkg::*;
  localparam int LAT = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  req_t p_req;
  rsp_t p_rsp;
  logic start, write, dcf, busy, done, fault, dcv, bare, leafv, lr, lw;
  logic [7:0] did;
  logic [38:0] iova;
  ppn_t ddt, root, dc_root, lppn;
  lvl_t llvl;
  logic [11:0] cause;
  int checks = 0, failures = 0;

  iommu_ptw dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .did_i(did), .iova_i(iova), .write_i(write),
    .dc_fetch_i(dcf), .ddt_ppn_i(ddt), .root_ppn_i(root), .busy_o(busy), .done_o(done), .fault_o(fault),
    .cause_o(cause), .dc_valid_o(dcv), .dc_bare_o(bare), .dc_root_ppn_o(dc_root), .leaf_valid_o(leafv),
    .leaf_ppn_o(lppn), .leaf_lvl_o(llvl), .leaf_r_o(lr), .leaf_w_o(lw), .ptw_req_o(p_req), .ptw_rsp_i(p_rsp));
  axi_mem_model #(.LATENCY(LAT), .ERR_BASE(64'h0F00_0000), .ERR_SIZE(64'h1000)) pt_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(p_req), .rsp_o(p_rsp));
  `include "iommu_tb_pt.svh"

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  int reads, cycles;
  task automatic walk(input logic [7:0] d, input logic [38:0] va, input logic wr, input logic fetch_dc, input ppn_t rt);
    automatic int ar0 = pt_mem.n_ar;
    automatic int t0 = 0;
    @(negedge clk);
    start = 1; did = d; iova = va; write = wr; dcf = fetch_dc; root = rt;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); t0++; end
    reads = pt_mem.n_ar - ar0; cycles = t0;
  endtask

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ppn_t r1, unused_ppn;
    start = 0; write = 0; dcf = 0; did = 0; iova = 0; root = 0;
    pt_next_ppn = 44'h80100;
    ddt = pt_alloc();
    r1  = pt_alloc();
    dc_set(ddt, 8'd3, 1'b1, IOSATP_SV39, r1);
    dc_set(ddt, 8'd4, 1'b1, IOSATP_BARE, 44'd0);
    dc_set(ddt, 8'd5, 1'b0, IOSATP_SV39, r1);
    dc_set(ddt, 8'd6, 1'b1, 4'd9, r1);
    dc_set(ddt, 8'd7, 1'b1, IOSATP_SV39, 44'h0F000);   // root table in the bus-error window
    pt_map(r1, 39'h00_1234_5000, 56'h9_8765_4000, 0, 1, 0);   // 4 KiB read-only
    pt_map(r1, 39'h00_4020_0000, 56'h0_C060_0000, 1, 1, 1);   // 2 MiB
    pt_map(r1, 39'h40_0000_0000, 56'h1_0000_0000, 2, 1, 1);   // 1 GiB
    repeat (2) @(negedge clk); rst_n = 1;

    walk(8'd3, 39'h00_1234_5678, 0, 1, '0);
    check(!fault && dcv && !bare && dc_root == r1, "device context fetched");
    check(leafv && lppn == 44'h987654 && llvl == 0 && lr && !lw, "4K leaf");
    check(reads == 5, "DC (2) + three PTE reads");
    check(cycles >= 5 * (LAT + 1) && cycles <= 5 * (LAT + 4), "walk time is 5 sequential round trips");
    $display("4K walk with DC fetch: %0d reads, %0d cycles", reads, cycles);
    walk(8'd3, 39'h00_1234_5678, 0, 0, r1);
    check(reads == 3 && leafv && lppn == 44'h987654, "cached DC: exactly three PTE reads");
    walk(8'd3, 39'h00_4021_2345, 1, 0, r1);
    check(reads == 2 && leafv && llvl == 1 && lppn == 44'hC0600, "2M leaf in two reads");
    walk(8'd3, 39'h40_1234_5678, 1, 0, r1);
    check(reads == 1 && leafv && llvl == 2 && lppn == 44'h100000, "1G leaf in one read");
    walk(8'd4, 39'h00_1234_5678, 0, 1, '0);
    check(!fault && dcv && bare && reads == 2, "bare device context, no walk");
    walk(8'd5, 39'h00_1234_5678, 0, 1, '0);
    check(fault && cause == CAUSE_DDT_INVALID, "invalid DC");
    walk(8'd6, 39'h00_1234_5678, 0, 1, '0);
    check(fault && cause == CAUSE_DDT_MISCONF, "misconfigured DC mode");
    walk(8'd3, 39'h00_7777_7000, 0, 0, r1);
    check(fault && cause == CAUSE_LD_PAGE, "unmapped page: load page fault");
    walk(8'd3, 39'h00_1234_5000, 1, 0, r1);
    check(fault && cause == CAUSE_ST_PAGE && !leafv, "write to read-only page: store page fault");
    walk(8'd7, 39'h00_1234_5000, 0, 1, '0);
    check(fault && cause == CAUSE_LD_ACCESS, "bus error on PTE read: access fault");
    unused_ppn = dc_root;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
