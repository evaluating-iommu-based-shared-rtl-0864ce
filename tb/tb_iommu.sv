// tb_iommu: self-checking testbench of the IOMMU.
// The device port is driven by AXI master tasks, the translated port and the
// walk port each go to their own memory model (data memory and page-table
// memory). Checks: Bare mode passes addresses unchanged; in one-level mode
// data lands at the physical address the page tables give; the first access
// to a page walks (device context + three PTE reads) and later ones hit the
// IOTLB with the same latency as Bare; a fifth page evicts one of the four
// IOTLB entries; the pass-through bit reaches the physical address; faults
// answer SLVERR (all R beats of a read, B after draining W), leave memory
// untouched and report cause and IOVA; invalidation forces a new walk; Off
// mode rejects everything; a device with a Bare context is not translated.
module tb_iommu;
  import axi_pkg::*;
  import iommu_pkg::*;
  localparam int NP = 1;
  localparam int LAT = 12;
  localparam addr_t PASS = 64'h0000_0100_0000_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  req_t tb_req [NP];
  rsp_t tb_rsp [NP];
  req_t d_req, p_req;
  rsp_t d_rsp, p_rsp;
  ddtp_mode_e mode;
  ppn_t ddt;
  logic inval, fvalid;
  logic [11:0] fcause;
  addr_t fiova;
  logic [31:0] s_hits, s_walks, s_wcyc;
  int checks = 0, failures = 0;
  `include "axi_tb_tasks.svh"

  iommu #(.IOTLB_ENTRIES(4), .PASS_MASK(PASS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .ddtp_mode_i(mode), .ddtp_ppn_i(ddt), .inval_i(inval),
    .fault_valid_o(fvalid), .fault_cause_o(fcause), .fault_iova_o(fiova),
    .stat_hits_o(s_hits), .stat_walks_o(s_walks), .stat_walk_cycles_o(s_wcyc),
    .dev_req_i(tb_req[0]), .dev_rsp_o(tb_rsp[0]), .mem_req_o(d_req), .mem_rsp_i(d_rsp),
    .ptw_req_o(p_req), .ptw_rsp_i(p_rsp));
  axi_mem_model #(.LATENCY(LAT)) dmem   (.clk_i(clk), .rst_ni(rst_n), .req_i(d_req), .rsp_o(d_rsp));
  axi_mem_model #(.LATENCY(LAT)) pt_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(p_req), .rsp_o(p_rsp));
  `include "iommu_tb_pt.svh"

  int cyc = 0, t_ar = 0, t_r0 = 0, n_fault = 0; logic first = 1'b1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (tb_req[0].ar_valid && tb_rsp[0].ar_ready) first <= 1'b1;
    if (tb_req[0].ar_valid && first && !(tb_rsp[0].r_valid)) ;
    if (tb_rsp[0].r_valid && tb_req[0].r_ready && first) begin t_r0 <= cyc; first <= 1'b0; end
    if (fvalid) n_fault <= n_fault + 1;
  end
  // request start time: first cycle AR is valid
  logic ar_v_q = 1'b0;
  always @(posedge clk) begin
    ar_v_q <= tb_req[0].ar_valid;
    if (tb_req[0].ar_valid && !ar_v_q) t_ar <= cyc;
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic addr_t pa_of(int k); return 64'h8800_0000 + 64'(k) * 64'h3000; endfunction
  localparam addr_t IOVA0 = 64'h1000_0000;

  initial begin
    logic [63:0] d [$], wd [$];
    logic err;
    ppn_t r1;
    int lat_bare, lat_hit, lat_miss, w0, nf;
    tb_port_init(0);
    mode = DDTP_BARE; inval = 0;
    pt_next_ppn = 44'h90000;
    ddt = pt_alloc();
    r1 = pt_alloc();
    dc_set(ddt, 8'd3, 1'b1, IOSATP_SV39, r1);
    dc_set(ddt, 8'd4, 1'b1, IOSATP_BARE, 44'd0);
    for (int k = 0; k < 6; k++) pt_map(r1, 39'(IOVA0 + 64'(k) * 4096), 56'(pa_of(k)), 0, 1, (k != 5));
    for (int k = 0; k < 6; k++) dmem.poke(pa_of(k), 64'hFEED_0000 + 64'(k));
    dmem.poke(64'h1000_0000, 64'hBA5E);
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- Bare: no translation ----
    tb_read(0, 64'h1000_0000, 0, 8'h1, 8'd3, d, err);
    check(!err && d[0] == 64'hBA5E, "bare mode: address unchanged");
    lat_bare = t_r0 - t_ar;

    // ---- one-level: first access walks, then hits ----
    mode = DDTP_1LVL;
    tb_read(0, IOVA0 + 64'h8, 0, 8'h1, 8'd3, d, err);
    check(!err && d[0] == dmem.peek(pa_of(0) + 64'h8), "translated read");
    lat_miss = t_r0 - t_ar;
    check(s_walks == 1 && pt_mem.n_ar == 5, "first access: one walk, DC + 3 PTE reads");
    tb_read(0, IOVA0, 0, 8'h1, 8'd3, d, err);
    lat_hit = t_r0 - t_ar;
    check(!err && d[0] == 64'hFEED_0000, "IOTLB hit read data");
    check(s_hits == 1 && s_walks == 1 && pt_mem.n_ar == 5, "second access hits the IOTLB");
    check(lat_hit == lat_bare, "IOTLB hit costs no more than Bare");
    check(lat_miss - lat_hit >= 5 * LAT, "miss adds five sequential reads");
    $display("read latency: bare %0d, IOTLB hit %0d, miss with DC fetch %0d", lat_bare, lat_hit, lat_miss);
    // writes through pages 1..3 (fill IOTLB to 4 entries)
    for (int k = 1; k < 4; k++) begin
      wd = '{64'hAB00 + 64'(k), 64'hCD00 + 64'(k)};
      tb_write(0, IOVA0 + 64'(k) * 4096 + 64'h100, wd, 8'h2, 8'd3, err);
      check(!err && dmem.peek(pa_of(k) + 64'h100) == wd[0] && dmem.peek(pa_of(k) + 64'h108) == wd[1],
            "translated write lands at PA");
    end
    check(s_walks == 4 && pt_mem.n_ar == 5 + 9, "three more walks with cached DC");
    for (int k = 0; k < 4; k++) tb_read(0, IOVA0 + 64'(k) * 4096, 0, 8'h1, 8'd3, d, err);
    check(s_walks == 4, "four pages fit in the IOTLB");
    tb_read(0, IOVA0 + 64'd4 * 4096, 0, 8'h1, 8'd3, d, err);
    check(d[0] == 64'hFEED_0004 && s_walks == 5, "fifth page walks");
    tb_read(0, IOVA0, 0, 8'h1, 8'd3, d, err);
    check(s_walks == 6, "fifth page evicted the oldest entry");
    // ---- pass-through bit ----
    dmem.poke(pa_of(2) | PASS, 64'h0A11A5);
    tb_read(0, (IOVA0 + 64'd2 * 4096) | PASS, 0, 8'h1, 8'd3, d, err);
    check(!err && d[0] == 64'h0A11A5, "PASS_MASK bit carried to the physical address");
    // ---- faults ----
    nf = n_fault;
    tb_read(0, 64'h2000_0000, 3, 8'h7, 8'd3, d, err);
    check(err && d.size() == 4, "unmapped read: SLVERR on all four beats");
    check(fcause == CAUSE_LD_PAGE && fiova == 64'h2000_0000 && n_fault == nf + 1, "load page fault reported");
    w0 = dmem.n_aw;
    wd = '{64'h1, 64'h2, 64'h3};
    tb_write(0, IOVA0 + 64'd5 * 4096, wd, 8'h7, 8'd3, err);
    check(err && dmem.n_aw == w0, "write to read-only page: SLVERR, nothing written");
    check(fcause == CAUSE_ST_PAGE, "store page fault reported");
    tb_read(0, 64'h0000_8000_0000_0000, 0, 8'h7, 8'd3, d, err);
    check(err && fcause == CAUSE_LD_PAGE, "non-canonical IOVA faults");
    // after faults normal traffic continues
    tb_read(0, IOVA0 + 64'd3 * 4096 + 64'h100, 0, 8'h1, 8'd3, d, err);
    check(!err && d[0] == 64'hAB03, "traffic continues after faults");
    // ---- invalidation ----
    @(negedge clk); inval = 1; @(negedge clk); inval = 0;
    w0 = pt_mem.n_ar;
    tb_read(0, IOVA0 + 64'd3 * 4096 + 64'h100, 0, 8'h1, 8'd3, d, err);
    check(!err && d[0] == 64'hAB03 && pt_mem.n_ar == w0 + 5, "after invalidation DC and PTEs are re-read");
    // ---- bare device context ----
    tb_read(0, 64'h1000_0000, 0, 8'h1, 8'd4, d, err);
    check(!err && d[0] == 64'hBA5E, "device with Bare context is not translated");
    // ---- Off ----
    mode = DDTP_OFF;
    tb_read(0, IOVA0, 0, 8'h1, 8'd3, d, err);
    check(err && fcause == CAUSE_ALL_OFF, "Off mode rejects");
    check(s_wcyc > 0, "walk cycles counted");
    $display("walks %0d, hits %0d, average walk %0d cycles", s_walks, s_hits, s_wcyc / s_walks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
