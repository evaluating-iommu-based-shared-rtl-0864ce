// tb_workload_axpy: DMA side of the axpy kernel at its evaluated size
// (32768 elements per vector) through the full SoC memory system, at DRAM
// latencies of 200, 600 and 1000 cycles, in three configurations:
//   base  - IOMMU in Bare mode (no translation), the baseline;
//   llc   - IOMMU on, page tables written by the host through the LLC after a
//           flush, so that walks hit in the cache;
//   nollc - IOMMU on, device directory and page tables in the reserved
//           (uncached) DRAM half, so that every walk read goes to DRAM. This
//           stands for the "IOMMU without LLC" configuration.
// The accelerator's compute cores are not part of the design. The testbench
// plays the DMA engine of the cluster: for each 2 KiB tile it reads x and y
// with one 256-beat burst each and writes y = a*x + y back, all through the
// bypass alias, one burst at a time (memory-bound, no compute time). Data are
// 32-bit integers instead of single-precision floats; the traffic is the same.
// x and y live on scattered physical pages; y is restored by backdoor before
// each run and every result word is checked by backdoor after it.
//
// Checks: results of all nine runs; exactly one walk per new page of x and of
// y (the 4-entry IOTLB holds both streams); walks through the LLC take less
// than one DRAM access, uncached walks at least three; the translation
// overhead with the LLC stays below 2 % of the baseline DMA time at every
// latency, as the evaluated system reports for all its kernels, and is larger
// without the LLC. Cycle counts and overheads are printed for each run.
module tb_workload_axpy;
  import axi_pkg::*;
  import iommu_pkg::*;
  localparam int NP = 2;                 // 0 host, 1 device DMA
  localparam int N = 32768;              // elements per vector
  localparam int PAGES = N * 4 / 4096;   // 32 pages per vector
  localparam addr_t OFF = 64'h0000_0100_0000_0000;
  localparam addr_t IOVA_X = 64'h4000_0000, IOVA_Y = 64'h4010_0000;
  localparam int A = 3;
  localparam logic [7:0] DID = 8'd5;
  localparam int NLAT = 3;
  localparam int LATS [NLAT] = '{200, 600, 1000};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  req_t tb_req [NP];
  rsp_t tb_rsp [NP];
  req_t ext_req, dram_req, shadow_req;
  rsp_t ext_rsp, dram_rsp, shadow_rsp;
  ddtp_mode_e mode;
  ppn_t ddt;
  logic [15:0] delay;
  logic inval, flush, flush_busy, fvalid;
  logic [11:0] fcause;
  addr_t fiova;
  logic [31:0] s_hits, s_walks, s_wcyc;
  int checks = 0, failures = 0;
  `include "axi_tb_tasks.svh"

  iommu_svm_soc dut (
    .clk_i(clk), .rst_ni(rst_n),
    .host_req_i(tb_req[0]), .host_rsp_o(tb_rsp[0]),
    .dev_req_i(tb_req[1]), .dev_rsp_o(tb_rsp[1]),
    .ext_req_o(ext_req), .ext_rsp_i(ext_rsp),
    .dram_req_o(dram_req), .dram_rsp_i(dram_rsp),
    .dram_delay_i(delay), .ddtp_mode_i(mode), .ddtp_ppn_i(ddt), .iommu_inval_i(inval),
    .iommu_fault_valid_o(fvalid), .iommu_fault_cause_o(fcause), .iommu_fault_iova_o(fiova),
    .iommu_stat_hits_o(s_hits), .iommu_stat_walks_o(s_walks), .iommu_stat_walk_cycles_o(s_wcyc),
    .llc_flush_i(flush), .llc_flush_busy_o(flush_busy));
  axi_mem_model #(.LATENCY(4)) dram (.clk_i(clk), .rst_ni(rst_n), .req_i(dram_req), .rsp_o(dram_rsp));
  axi_mem_model #(.LATENCY(2)) ext  (.clk_i(clk), .rst_ni(rst_n), .req_i(ext_req), .rsp_o(ext_rsp));
  // scratch store in which the driver builds the page tables
  assign shadow_req = '0;
  axi_mem_model pt_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(shadow_req), .rsp_o(shadow_rsp));
  `include "iommu_tb_pt.svh"

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200ms; failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [31:0] x_ref [N], y_ref [N];
  function automatic addr_t pa_x(int k); return 64'h9000_0000 + 64'(k) * 64'h3000; endfunction
  function automatic addr_t pa_y(int k); return 64'h9400_0000 + 64'(k) * 64'h5000; endfunction

  task automatic restore_y();
    for (int p = 0; p < PAGES; p++)
      for (int w = 0; w < 512; w++) begin
        automatic int e = p * 1024 + 2 * w;
        dram.poke(pa_y(p) + 64'(w) * 8, {y_ref[e+1], y_ref[e]});
      end
  endtask

  // DMA of one axpy run; xa/ya are the bus addresses of the first page, and
  // physical mode (Bare) needs the page-by-page physical addresses.
  task automatic dma_axpy(input logic virt, output int cycles);
    logic [63:0] xd [$], yd [$], wd [$];
    logic err;
    automatic int t0 = cyc;
    for (int p = 0; p < PAGES; p++)
      for (int h = 0; h < 2; h++) begin
        automatic addr_t o = 64'(h) * 2048;
        automatic addr_t xa = (virt ? IOVA_X + 64'(p) * 4096 : pa_x(p)) + OFF + o;
        automatic addr_t ya = (virt ? IOVA_Y + 64'(p) * 4096 : pa_y(p)) + OFF + o;
        tb_read(1, xa, 255, 8'h4, DID, xd, err);
        check(!err, "DMA x read");
        tb_read(1, ya, 255, 8'h5, DID, yd, err);
        check(!err, "DMA y read");
        wd = {};
        for (int i = 0; i < 256; i++)
          wd.push_back({32'(A) * xd[i][63:32] + yd[i][63:32], 32'(A) * xd[i][31:0] + yd[i][31:0]});
        tb_write(1, ya, wd, 8'h6, DID, err);
        check(!err, "DMA y write");
      end
    cycles = cyc - t0;
  endtask

  task automatic check_y(input string what);
    automatic int bad = 0;
    for (int p = 0; p < PAGES; p++)
      for (int w = 0; w < 512; w++) begin
        automatic int e = p * 1024 + 2 * w;
        if (dram.peek(pa_y(p) + 64'(w) * 8) !=
            {32'(A) * x_ref[e+1] + y_ref[e+1], 32'(A) * x_ref[e] + y_ref[e]}) bad++;
      end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d wrong words", what, bad); end
  endtask

  task automatic build_tables(input ppn_t first, output ppn_t ddt_ppn, output ppn_t last);
    ppn_t root;
    pt_next_ppn = first;
    ddt_ppn = pt_alloc();
    root = pt_alloc();
    dc_set(ddt_ppn, DID, 1'b1, IOSATP_SV39, root);
    for (int p = 0; p < PAGES; p++) begin
      pt_map(root, 39'(IOVA_X + 64'(p) * 4096), 56'(pa_x(p)), 0, 1, 0);
      pt_map(root, 39'(IOVA_Y + 64'(p) * 4096), 56'(pa_y(p)), 0, 1, 1);
    end
    last = pt_next_ppn;
  endtask

  task automatic invalidate();
    @(negedge clk); inval = 1; @(negedge clk); inval = 0;
  endtask

  initial begin
    logic [63:0] wd [$];
    logic err;
    ppn_t ddt_llc, ddt_unc, pg_first, pg_last;
    int t_cfg [3][NLAT];
    int walk_avg [3][NLAT];
    int w0, c0, cycles;
    for (int p = 0; p < NP; p++) tb_port_init(p);
    mode = DDTP_BARE; inval = 0; flush = 0; ddt = '0; delay = 16'(LATS[0]);
    for (int i = 0; i < N; i++) begin x_ref[i] = $urandom; y_ref[i] = $urandom; end
    for (int p = 0; p < PAGES; p++)
      for (int w = 0; w < 512; w++) begin
        automatic int e = p * 1024 + 2 * w;
        dram.poke(pa_x(p) + 64'(w) * 8, {x_ref[e+1], x_ref[e]});
      end
    // uncached tables: placed straight into the reserved half of DRAM
    build_tables(44'hE0000, ddt_unc, pg_last);
    for (ppn_t pg = 44'hE0000; pg < pg_last; pg++)
      for (int i = 0; i < 512; i++)
        dram.poke({8'd0, pg, 12'd0} + 64'(i) * 8, pt_mem.peek({8'd0, pg, 12'd0} + 64'(i) * 8));
    repeat (3) @(negedge clk); rst_n = 1;

    // cached tables: the host writes them through the LLC after a flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    while (flush_busy) @(negedge clk);
    pg_first = 44'hA0000;
    build_tables(pg_first, ddt_llc, pg_last);
    for (ppn_t pg = pg_first; pg < pg_last; pg++)
      for (int h = 0; h < 2; h++) begin
        wd = {};
        for (int i = 0; i < 256; i++) wd.push_back(pt_mem.peek({8'd0, pg, 12'd0} + 64'(h) * 2048 + 64'(i) * 8));
        tb_write(0, {8'd0, pg, 12'd0} + 64'(h) * 2048, wd, 8'h2, 8'h0, err);
        check(!err, "page-table write through the LLC");
      end

    for (int l = 0; l < NLAT; l++) begin
      delay = 16'(LATS[l]);
      for (int c = 0; c < 3; c++) begin
        restore_y();
        if (c == 0) mode = DDTP_BARE;
        else begin mode = DDTP_1LVL; ddt = (c == 1) ? ddt_llc : ddt_unc; end
        invalidate();
        w0 = s_walks; c0 = s_wcyc;
        dma_axpy(c != 0, cycles);
        t_cfg[c][l] = cycles;
        check_y($sformatf("axpy results, latency %0d, config %0d", LATS[l], c));
        if (c == 0) check(s_walks == w0, "Bare mode does not walk");
        else begin
          check(s_walks - w0 == 2 * PAGES, $sformatf("one walk per new page (got %0d)", s_walks - w0));
          walk_avg[c][l] = (s_wcyc - c0) / (s_walks - w0 == 0 ? 1 : s_walks - w0);
        end
      end
      $display("latency %4d: base %0d cycles, IOMMU+LLC %0d (+%0.2f%%, walk %0d cycles), IOMMU no LLC %0d (+%0.2f%%, walk %0d cycles)",
               LATS[l], t_cfg[0][l],
               t_cfg[1][l], 100.0 * real'(t_cfg[1][l] - t_cfg[0][l]) / real'(t_cfg[0][l]), walk_avg[1][l],
               t_cfg[2][l], 100.0 * real'(t_cfg[2][l] - t_cfg[0][l]) / real'(t_cfg[0][l]), walk_avg[2][l]);
      check(walk_avg[1][l] < LATS[l], "walks through the LLC take less than one DRAM access");
      check(walk_avg[2][l] >= 3 * LATS[l], "uncached walks take at least three DRAM accesses");
      check(real'(t_cfg[1][l] - t_cfg[0][l]) < 0.02 * real'(t_cfg[0][l]), "translation overhead with the LLC below 2 %");
      check(t_cfg[2][l] > t_cfg[1][l], "uncached walks cost more than walks through the LLC");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
