// tb_axi_delayer: self-checking testbench of the AXI delayer.
// A master writes and reads a memory model through the delayer. It checks the
// data, that the added R and B latency grows exactly with the configured
// delay (the FIFO adds one register stage, so delay D adds max(D,1) cycles),
// that a long burst still streams at one beat per cycle after the delay, and
// that AR/AW pass without delay.
module tb_axi_delayer;
  import axi_pkg::*;
  localparam int NP = 1;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  req_t tb_req [NP];
  rsp_t tb_rsp [NP];
  req_t m_req;
  rsp_t m_rsp;
  logic [15:0] delay;
  int checks = 0, failures = 0;
  `include "axi_tb_tasks.svh"

  axi_delayer #(.DEPTH(64)) dut (
    .clk_i(clk), .rst_ni(rst_n), .delay_i(delay),
    .slv_req_i(tb_req[0]), .slv_rsp_o(tb_rsp[0]), .mst_req_o(m_req), .mst_rsp_i(m_rsp));
  axi_mem_model #(.LATENCY(3)) mem (.clk_i(clk), .rst_ni(rst_n), .req_i(m_req), .rsp_o(m_rsp));

  // cycle-stamp monitor
  int cyc = 0, t_ar = 0, t_r0 = 0, t_rl = 0, t_wl = 0, t_b = 0;
  logic first_r = 1'b1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (tb_req[0].ar_valid && tb_rsp[0].ar_ready) begin t_ar <= cyc; first_r <= 1'b1; end
    if (tb_rsp[0].r_valid && tb_req[0].r_ready) begin
      if (first_r) begin t_r0 <= cyc; first_r <= 1'b0; end
      if (tb_rsp[0].r.last) t_rl <= cyc;
    end
    if (tb_req[0].w_valid && tb_rsp[0].w_ready && tb_req[0].w.last) t_wl <= cyc;
    if (tb_rsp[0].b_valid && tb_req[0].b_ready) t_b <= cyc;
    // AR is not delayed: the memory sees it in the same cycle
    if (tb_req[0].ar_valid != m_req.ar_valid) begin
      failures <= failures + 1; $display("FAIL AR not passed through");
    end
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [63:0] pat(int i); return 64'hA5A5_0000_0000_0000 ^ (64'(i) * 64'h0101_0101); endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] d [$], wd [$];
    logic err;
    int lat_r [3], lat_b [3];
    int dl [3] = '{0, 10, 100};
    tb_port_init(0);
    delay = 16'd0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3; k++) begin
      delay = 16'(dl[k]);
      wd = {};
      for (int i = 0; i < 4; i++) wd.push_back(pat(i + 8 * k));
      tb_write(0, 64'h1000 + 64'(k) * 64'h100, wd, 8'h3, 8'h0, err);
      check(!err, "write resp");
      lat_b[k] = t_b - t_wl;
      tb_read(0, 64'h1000 + 64'(k) * 64'h100, 3, 8'h5, 8'h0, d, err);
      check(!err && d.size() == 4, "read length");
      for (int i = 0; i < 4; i++) check(d[i] == wd[i], "read data");
      lat_r[k] = t_r0 - t_ar;
      $display("delay %0d: R latency %0d, B latency %0d", dl[k], lat_r[k], lat_b[k]);
    end
    check(lat_r[1] - lat_r[0] == 9,  "R latency grows by delay-1 from 0 to 10");
    check(lat_r[2] - lat_r[1] == 90, "R latency grows by 90 from 10 to 100");
    check(lat_b[1] - lat_b[0] == 9,  "B latency grows by delay-1 from 0 to 10");
    check(lat_b[2] - lat_b[1] == 90, "B latency grows by 90 from 10 to 100");
    // streaming: 32-beat burst with delay 50 still one beat per cycle
    delay = 16'd50;
    tb_read(0, 64'h2000, 31, 8'h1, 8'h0, d, err);
    check(d.size() == 32, "long burst length");
    check(t_rl - t_r0 == 31, "long burst streams one beat per cycle");
    check(t_r0 - t_ar == lat_r[0] + 49, "long burst first-beat latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
