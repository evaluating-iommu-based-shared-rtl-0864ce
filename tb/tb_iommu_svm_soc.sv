// tb_iommu_svm_soc: end-to-end testbench of the SoC memory system, with every
// parameter of the top at its default (full size).
//
// The host port and the accelerator DMA port are driven by AXI master tasks;
// the DRAM controller port goes to a memory model (the DRAM, with a small
// controller latency) behind the AXI delayer, set to 200 cycles; the external
// port goes to another memory model (accelerator registers). The test runs an
// axpy kernel, y = a*x + y on 32-bit integers, N = 4096 elements, with
// the DMA model reading x and y page by page in 2 KiB bursts and writing y
// back, in the two offload styles the design supports:
//   1. copy-based: IOMMU in Bare mode; the host copies x and y into the
//      reserved, uncached upper half of DRAM, the device works on physical
//      addresses there, and the host copies y back;
//   2. zero-copy: the host flushes the LLC, writes the device directory and
//      page tables through the cached DRAM window (they stay in the LLC),
//      and the device works on IO virtual addresses plus the LLC-bypass
//      offset, translated by the IOMMU; the host then reads y in place.
// Both phases read their arguments from a mailbox in the L2 scratchpad and
// ring a doorbell on the external port. The results are compared with a
// reference computed in the testbench. Every mechanism of the design must
// occur at least once (counted, and a failure if it never happened): IOTLB
// hit, page-table walk, device-directory fetch, IOMMU fault, LLC hit, LLC
// refill, LLC write-back by the flush, LLC bypass through the alias and
// through the reserved half, DMA bursts reaching DRAM unsplit, L2 and
// external-port accesses, and the delayer's added latency. It also checks
// that walks served from the LLC take far less than one DRAM access.
module tb_iommu_svm_soc;
  import axi_pkg::*;
  import iommu_pkg::*;
  localparam int NP = 2;                 // 0 host, 1 device DMA
  localparam int N = 4096;               // elements per vector
  localparam int PAGES = N * 4 / 4096;   // pages per vector
  localparam int DELAY = 200;
  localparam addr_t OFF = 64'h0000_0100_0000_0000;
  localparam addr_t L2 = 64'h7800_0000;
  localparam addr_t DOORBELL = 64'h0300_0000;
  localparam addr_t RESV = 64'hC000_0000;
  localparam addr_t IOVA_X = 64'h4000_0000, IOVA_Y = 64'h4010_0000;
  localparam int A = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  req_t tb_req [NP];
  rsp_t tb_rsp [NP];
  req_t ext_req, dram_req, shadow_req;
  rsp_t ext_rsp, dram_rsp, shadow_rsp;
  ddtp_mode_e mode;
  ppn_t ddt;
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
    .dram_delay_i(16'(DELAY)), .ddtp_mode_i(mode), .ddtp_ppn_i(ddt), .iommu_inval_i(inval),
    .iommu_fault_valid_o(fvalid), .iommu_fault_cause_o(fcause), .iommu_fault_iova_o(fiova),
    .iommu_stat_hits_o(s_hits), .iommu_stat_walks_o(s_walks), .iommu_stat_walk_cycles_o(s_wcyc),
    .llc_flush_i(flush), .llc_flush_busy_o(flush_busy));
  axi_mem_model #(.LATENCY(8)) dram (.clk_i(clk), .rst_ni(rst_n), .req_i(dram_req), .rsp_o(dram_rsp));
  axi_mem_model #(.LATENCY(2)) ext  (.clk_i(clk), .rst_ni(rst_n), .req_i(ext_req), .rsp_o(ext_rsp));
  // scratch store in which the driver builds the page tables before the host
  // writes them to memory (never connected to the bus)
  assign shadow_req = '0;
  axi_mem_model pt_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(shadow_req), .rsp_o(shadow_rsp));
  `include "iommu_tb_pt.svh"

  // ---------------- mechanism counters ----------------
  int n_llc_refill = 0, n_llc_wb = 0, n_long_burst = 0, n_llc_hit = 0, n_byp_alias = 0, n_byp_resv = 0;
  int n_l2 = 0, n_fault = 0, n_dcfetch = 0;
  always @(posedge clk) begin
    if (dram_req.ar_valid && dram_rsp.ar_ready && dram_req.ar.len == 8'd7 && !dram_req.ar.id[0]) n_llc_refill <= n_llc_refill + 1;
    if (dram_req.aw_valid && dram_rsp.aw_ready && dram_req.aw.len == 8'd7 && !dram_req.aw.id[0]) n_llc_wb <= n_llc_wb + 1;
    if (dram_req.ar_valid && dram_rsp.ar_ready && dram_req.ar.len > 8'd7) n_long_burst <= n_long_burst + 1;
    if (dut.u_llc.state_q == dut.u_llc.S_LOOKUP && dut.u_llc.hit) n_llc_hit <= n_llc_hit + 1;
    if (dut.xs_req[1].ar_valid && dut.xs_rsp[1].ar_ready) begin
      if (dut.xs_req[1].ar.addr >= OFF) n_byp_alias <= n_byp_alias + 1;
      else if (dut.xs_req[1].ar.addr >= RESV) n_byp_resv <= n_byp_resv + 1;
    end
    if (dut.xs_req[0].ar_valid && dut.xs_rsp[0].ar_ready) n_l2 <= n_l2 + 1;
    if (fvalid) n_fault <= n_fault + 1;
    if (dut.u_iommu.u_ptw.state_q == dut.u_iommu.u_ptw.W_TC && dut.u_iommu.u_ptw.rbeat) n_dcfetch <= n_dcfetch + 1;
  end
  // device read latency (AR valid to first R beat)
  int cyc = 0, t_ar = 0, lat_max = 0; logic first = 1'b0, arv_q = 1'b0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    arv_q <= tb_req[1].ar_valid;
    if (tb_req[1].ar_valid && !arv_q) begin t_ar <= cyc; first <= 1'b1; end
    if (tb_rsp[1].r_valid && tb_req[1].r_ready && first) begin
      first <= 1'b0;
      if (cyc - t_ar > lat_max) lat_max <= cyc - t_ar;
    end
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic mech(input string name, input int n);
    checks++;
    $display("mechanism %-34s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
  endtask

  initial begin
    #40ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [31:0] x_ref [N], y_ref [N];
  function automatic addr_t pa_x(int k); return 64'h9000_0000 + 64'(k) * 64'h5000; endfunction
  function automatic addr_t pa_y(int k); return 64'h9800_0000 + 64'(k) * 64'h7000; endfunction

  // Host copies `pages` pages between two physical addresses, 2 KiB at a time.
  task automatic host_copy(input addr_t src, input addr_t dst, input int bytes);
    logic [63:0] d [$];
    logic err;
    for (int o = 0; o < bytes; o += 2048) begin
      tb_read(0, src + 64'(o), 255, 8'h1, 8'h0, d, err);
      check(!err, "host copy read");
      tb_write(0, dst + 64'(o), d, 8'h2, 8'h0, err);
      check(!err, "host copy write");
    end
  endtask

  // The accelerator's DMA: reads the arguments from the mailbox, then for
  // every page reads a tile of x and y, computes y = a*x + y, writes y back.
  task automatic device_axpy(input addr_t mbox, input logic [7:0] did);
    logic [63:0] d [$], xd [$], yd [$], wd [$];
    logic err;
    addr_t xa, ya;
    int pages;
    tb_read(1, mbox, 2, 8'h3, did, d, err);
    check(!err, "mailbox read");
    xa = d[0]; ya = d[1]; pages = int'(d[2]);
    for (int p = 0; p < pages; p++)
      for (int h = 0; h < 2; h++) begin
        automatic addr_t o = 64'(p) * 4096 + 64'(h) * 2048;
        tb_read(1, xa + o, 255, 8'h4, did, xd, err);
        check(!err, "DMA x read");
        tb_read(1, ya + o, 255, 8'h5, did, yd, err);
        check(!err, "DMA y read");
        wd = {};
        for (int i = 0; i < 256; i++) begin
          logic [31:0] lo, hi;
          lo = 32'(A) * xd[i][31:0]  + yd[i][31:0];
          hi = 32'(A) * xd[i][63:32] + yd[i][63:32];
          wd.push_back({hi, lo});
        end
        tb_write(1, ya + o, wd, 8'h6, did, err);
        check(!err, "DMA y write");
      end
  endtask

  task automatic check_y(input addr_t base_of_page [PAGES], input string what);
    logic [63:0] d [$];
    logic err;
    automatic int bad = 0;
    for (int p = 0; p < PAGES; p++)
      for (int h = 0; h < 2; h++) begin
        tb_read(0, base_of_page[p] + 64'(h) * 2048, 255, 8'h1, 8'h0, d, err);
        for (int i = 0; i < 256; i++) begin
          automatic int e = p * 1024 + h * 512 + 2 * i;
          if (d[i] != {32'(A) * x_ref[e+1] + y_ref[e+1], 32'(A) * x_ref[e] + y_ref[e]}) begin
            if (bad < 3) $display("  p%0d h%0d i%0d got %h want %h x %h y %h", p, h, i, d[i], {32'(A) * x_ref[e+1] + y_ref[e+1], 32'(A) * x_ref[e] + y_ref[e]}, x_ref[e], y_ref[e]);
            bad++;
          end
        end
      end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d wrong words", what, bad); end
    else $display("%s: all %0d results correct", what, N);
  endtask

  initial begin
    logic [63:0] d [$], wd [$];
    logic err;
    addr_t yb [PAGES];
    ppn_t root, pt_first;
    int t0, t1, walks0;
    for (int p = 0; p < NP; p++) tb_port_init(p);
    mode = DDTP_BARE; inval = 0; flush = 0; ddt = '0;
    for (int i = 0; i < N; i++) begin x_ref[i] = $urandom; y_ref[i] = $urandom; end
    // input data already in DRAM at the host's (physical) pages
    for (int p = 0; p < PAGES; p++)
      for (int w = 0; w < 512; w++) begin
        automatic int e = p * 1024 + 2 * w;
        dram.poke(pa_x(p) + 64'(w) * 8, {x_ref[e+1], x_ref[e]});
        dram.poke(pa_y(p) + 64'(w) * 8, {y_ref[e+1], y_ref[e]});
      end
    repeat (3) @(negedge clk); rst_n = 1;

    // ================= phase 1: copy-based offload, IOMMU Bare =================
    t0 = cyc;
    for (int p = 0; p < PAGES; p++) begin
      host_copy(pa_x(p), RESV + 64'(p) * 4096, 4096);
      host_copy(pa_y(p), RESV + 64'h10_0000 + 64'(p) * 4096, 4096);
    end
    wd = '{RESV, RESV + 64'h10_0000, 64'(PAGES)};
    tb_write(0, L2, wd, 8'h1, 8'h0, err);
    wd = '{64'h1};
    tb_write(0, DOORBELL, wd, 8'h1, 8'h0, err);
    check(ext.peek(DOORBELL) == 64'h1, "doorbell on external port");
    device_axpy(L2, 8'd3);
    for (int p = 0; p < PAGES; p++) yb[p] = RESV + 64'h10_0000 + 64'(p) * 4096;
    check_y(yb, "copy-based offload");
    t1 = cyc;
    $display("copy-based offload: %0d cycles", t1 - t0);
    check(s_walks == 0, "Bare mode never walks");

    // ================= phase 2: zero-copy with shared virtual addresses =================
    t0 = cyc;
    // prepare_input(): the host writes x through the cache (lines become dirty)
    for (int p = 0; p < PAGES; p++)
      for (int h = 0; h < 2; h++) begin
        wd = {};
        for (int i = 0; i < 256; i++) begin
          automatic int e = p * 1024 + h * 512 + 2 * i;
          wd.push_back({x_ref[e+1], x_ref[e]});
        end
        tb_write(0, pa_x(p) + 64'(h) * 2048, wd, 8'h2, 8'h0, err);
      end
    // flush_last_level_cache()
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    while (flush_busy) @(negedge clk);
    // create_iommu_mapping(): build tables, host writes them through the LLC
    pt_next_ppn = 44'hA0000;
    pt_first = pt_next_ppn;
    ddt = pt_alloc();
    root = pt_alloc();
    dc_set(ddt, 8'd3, 1'b1, IOSATP_SV39, root);
    for (int p = 0; p < PAGES; p++) begin
      pt_map(root, 39'(IOVA_X + 64'(p) * 4096), 56'(pa_x(p)), 0, 1, 1);
      pt_map(root, 39'(IOVA_Y + 64'(p) * 4096), 56'(pa_y(p)), 0, 1, 1);
    end
    pt_map(root, 39'(L2), 56'(L2), 0, 1, 1);   // L2 mailbox page, one-to-one
    for (ppn_t pg = pt_first; pg < pt_next_ppn; pg++)
      for (int h = 0; h < 2; h++) begin
        wd = {};
        for (int i = 0; i < 256; i++) wd.push_back(pt_mem.peek({8'd0, pg, 12'd0} + 64'(h) * 2048 + 64'(i) * 8));
        tb_write(0, {8'd0, pg, 12'd0} + 64'(h) * 2048, wd, 8'h2, 8'h0, err);
        check(!err, "page-table write");
      end
    mode = DDTP_1LVL;
    @(negedge clk); inval = 1; @(negedge clk); inval = 0;
    wd = '{IOVA_X + OFF, IOVA_Y + OFF, 64'(PAGES)};
    tb_write(0, L2, wd, 8'h1, 8'h0, err);
    wd = '{64'h2};
    tb_write(0, DOORBELL, wd, 8'h1, 8'h0, err);
    walks0 = s_walks;
    device_axpy(L2, 8'd3);
    for (int p = 0; p < PAGES; p++) yb[p] = pa_y(p);
    check_y(yb, "zero-copy offload");
    t1 = cyc;
    $display("zero-copy offload: %0d cycles", t1 - t0);
    // a stray device access outside the mapping faults and is answered
    tb_read(1, 64'h5000_0000, 0, 8'h7, 8'd3, d, err);
    check(err && fcause == CAUSE_LD_PAGE && fiova == 64'h5000_0000, "unmapped device access faults");
    $display("IOMMU: %0d walks, %0d hits, average walk %0d cycles (DRAM delay %0d)",
             s_walks, s_hits, s_wcyc / (s_walks == 0 ? 1 : s_walks), DELAY);
    check(s_walks > walks0 && s_wcyc / s_walks < DELAY, "walks served by the LLC take less than one DRAM access");
    check(lat_max > DELAY, "delayer adds its latency to device reads");

    mech("IOTLB hit", s_hits);
    mech("page-table walk (IOTLB miss)", s_walks);
    mech("device-directory fetch", n_dcfetch);
    mech("IOMMU fault", n_fault);
    mech("LLC hit", n_llc_hit);
    mech("LLC refill", n_llc_refill);
    mech("LLC write-back", n_llc_wb);
    mech("LLC bypass via alias", n_byp_alias);
    mech("LLC bypass of reserved half", n_byp_resv);
    mech("DMA burst longer than a line at DRAM", n_long_burst);
    mech("L2 scratchpad access", n_l2);
    mech("external-port access", ext.n_aw);
    mech("delayer latency above DRAM delay", lat_max > DELAY);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
