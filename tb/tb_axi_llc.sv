// tb_axi_llc: self-checking testbench of the last-level cache, run with a
// small geometry (8 sets x 2 ways x 4 beats) so that evictions are frequent.
// Random reads and writes over 4 KiB are checked against a reference copy.
// Directed checks: a repeated access to a cached line causes no memory
// traffic and returns within a few cycles; a miss costs exactly one refill
// burst of one line; a dirty eviction writes the victim back first; after a
// flush the memory holds every byte written and all lines are invalid.
module tb_axi_llc;
  import axi_pkg::*;
  localparam int NP = 1;
  localparam int SETS = 8, WAYS = 2, BEATS = 4;
  localparam int WORDS = 512;   // 4 KiB exercised
  localparam addr_t BASE = 64'h8000_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  req_t tb_req [NP];
  rsp_t tb_rsp [NP];
  req_t m_req;
  rsp_t m_rsp;
  logic flush, busy;
  int checks = 0, failures = 0;
  `include "axi_tb_tasks.svh"

  axi_llc #(.SETS(SETS), .WAYS(WAYS), .LINE_BEATS(BEATS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .flush_busy_o(busy),
    .slv_req_i(tb_req[0]), .slv_rsp_o(tb_rsp[0]), .mst_req_o(m_req), .mst_rsp_i(m_rsp));
  axi_mem_model #(.LATENCY(10)) mem (.clk_i(clk), .rst_ni(rst_n), .req_i(m_req), .rsp_o(m_rsp));

  int cyc = 0, t_ar = 0, t_r0 = 0; logic first = 1'b1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (tb_req[0].ar_valid && tb_rsp[0].ar_ready) begin t_ar <= cyc; first <= 1'b1; end
    if (tb_rsp[0].r_valid && tb_req[0].r_ready && first) begin t_r0 <= cyc; first <= 1'b0; end
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [63:0] ref_mem [WORDS];
  initial begin
    logic [63:0] d [$], wd [$];
    logic err;
    int ar0, aw0;
    flush = 1'b0;
    tb_port_init(0);
    for (int i = 0; i < WORDS; i++) begin
      ref_mem[i] = {32'hC0DE_0000, 32'(i)};
      mem.poke(BASE + 64'(i) * 8, ref_mem[i]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // ---- directed: miss then hit ----
    ar0 = mem.n_ar;
    tb_read(0, BASE + 64'h100, 0, 8'h1, 8'h0, d, err);
    check(d[0] == ref_mem[32], "miss read data");
    check(mem.n_ar == ar0 + 1, "one refill burst on a miss");
    check(mem.max_len == BEATS - 1, "refill is one line long");
    tb_read(0, BASE + 64'h108, 1, 8'h1, 8'h0, d, err);
    check(d[0] == ref_mem[33] && d[1] == ref_mem[34], "hit read data");
    check(mem.n_ar == ar0 + 1, "hit causes no memory read");
    check(t_r0 - t_ar <= 3, "hit latency at most 3 cycles");
    // ---- directed: dirty eviction ----
    wd = '{64'h1111};
    tb_write(0, BASE + 64'h100, wd, 8'h2, 8'h0, err); ref_mem[32] = 64'h1111;
    aw0 = mem.n_aw;
    // two more lines of the same set (set stride = SETS*BEATS*8 bytes) evict it
    tb_read(0, BASE + 64'h100 + 64'(SETS*BEATS*8), 0, 8'h1, 8'h0, d, err);
    tb_read(0, BASE + 64'h100 + 64'(2*SETS*BEATS*8), 0, 8'h1, 8'h0, d, err);
    check(mem.n_aw == aw0 + 1, "dirty victim written back");
    check(mem.peek(BASE + 64'h100) == 64'h1111, "written-back data in memory");
    // ---- random traffic ----
    for (int n = 0; n < 300; n++) begin
      automatic int w = $urandom_range(0, WORDS - 8);
      automatic int l = $urandom_range(0, 7);
      if ($urandom_range(0, 1) == 1) begin
        wd = {};
        for (int i = 0; i <= l; i++) begin ref_mem[w+i] = {$urandom, $urandom}; wd.push_back(ref_mem[w+i]); end
        tb_write(0, BASE + 64'(w) * 8, wd, 8'h3, 8'h0, err);
        check(!err, "random write resp");
      end else begin
        tb_read(0, BASE + 64'(w) * 8, l, 8'h4, 8'h0, d, err);
        for (int i = 0; i <= l; i++) check(d[i] == ref_mem[w+i], "random read data");
      end
    end
    // ---- flush ----
    @(negedge clk); flush = 1'b1; @(negedge clk); flush = 1'b0;
    check(busy, "flush busy");
    while (busy) @(negedge clk);
    for (int i = 0; i < WORDS; i++) check(mem.peek(BASE + 64'(i) * 8) == ref_mem[i], "memory after flush");
    ar0 = mem.n_ar;
    tb_read(0, BASE + 64'h100, 0, 8'h1, 8'h0, d, err);
    check(mem.n_ar == ar0 + 1 && d[0] == ref_mem[32], "cache empty after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
