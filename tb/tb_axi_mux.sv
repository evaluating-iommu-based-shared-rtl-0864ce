// tb_axi_mux: self-checking testbench of the N-to-1 AXI multiplexer.
// Two masters run interleaved writes and reads at the same time through the
// mux into one memory model. Checks: every read returns what that master
// wrote (so W beats followed their AW), the memory side sees the input index
// in the low ID bit, the original ID comes back on B and R, and both masters
// get served (round robin).
module tb_axi_mux;
  import axi_pkg::*;
  localparam int NP = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  req_t tb_req [NP];
  rsp_t tb_rsp [NP];
  req_t m_req;
  rsp_t m_rsp;
  int checks = 0, failures = 0;
  `include "axi_tb_tasks.svh"

  axi_mux #(.N(2)) dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(tb_req), .slv_rsp_o(tb_rsp),
                        .mst_req_o(m_req), .mst_rsp_i(m_rsp));
  axi_mem_model #(.LATENCY(2)) mem (.clk_i(clk), .rst_ni(rst_n), .req_i(m_req), .rsp_o(m_rsp));

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // ID monitors
  id_t last_ar_id [NP], last_aw_id [NP];
  int  served [NP];
  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (tb_req[p].ar_valid && tb_rsp[p].ar_ready) last_ar_id[p] <= tb_req[p].ar.id;
      if (tb_req[p].aw_valid && tb_rsp[p].aw_ready) last_aw_id[p] <= tb_req[p].aw.id;
      if (tb_rsp[p].r_valid && tb_req[p].r_ready) begin
        checks++; if (tb_rsp[p].r.id != last_ar_id[p]) begin failures++; $display("FAIL R id port %0d", p); end
      end
      if (tb_rsp[p].b_valid && tb_req[p].b_ready) begin
        checks++; if (tb_rsp[p].b.id != last_aw_id[p]) begin failures++; $display("FAIL B id port %0d", p); end
      end
    end
    if (m_req.ar_valid && m_rsp.ar_ready) begin
      served[m_req.ar.id[0]] <= served[m_req.ar.id[0]] + 1;
      checks++;
      if (m_req.ar.id[7:1] != tb_req[m_req.ar.id[0]].ar.id[6:0]) begin failures++; $display("FAIL mem-side AR id"); end
    end
  end

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic worker(input int p);
    logic [63:0] d [$], wd [$];
    logic err;
    for (int n = 0; n < 20; n++) begin
      automatic addr_t a = 64'h10000 * 64'(p + 1) + 64'(n) * 64'h40;
      automatic int l = $urandom_range(0, 7);
      wd = {};
      for (int i = 0; i <= l; i++) wd.push_back({8'(p), 24'(n), 32'(i)});
      tb_write(p, a, wd, id_t'(n % 16), 8'h0, err);
      check(!err, "write ok");
      tb_read(p, a, l, id_t'((n + 3) % 16), 8'h0, d, err);
      check(d.size() == l + 1, "read length");
      for (int i = 0; i <= l && i < d.size(); i++) check(d[i] == wd[i], "read data");
    end
  endtask

  initial begin
    tb_port_init(0); tb_port_init(1);
    served[0] = 0; served[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fork
      worker(0);
      worker(1);
    join
    check(served[0] == 20 && served[1] == 20, "both masters served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
