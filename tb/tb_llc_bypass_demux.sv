// tb_llc_bypass_demux: self-checking testbench of the LLC bypass demux.
// Two memory models stand for the LLC and the bypass path. Writes to the
// cached DRAM window must land in the LLC model at the same address, writes
// to the alias window in the bypass model with the offset removed, and writes
// to the reserved upper half of DRAM in the bypass model unchanged. Reads
// return the data of the right path, including when consecutive accesses
// switch between paths.
module tb_llc_bypass_demux;
  import axi_pkg::*;
  localparam int NP = 1;
  localparam addr_t OFF = 64'h0000_0100_0000_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  req_t tb_req [NP];
  rsp_t tb_rsp [NP];
  req_t l_req, b_req;
  rsp_t l_rsp, b_rsp;
  int checks = 0, failures = 0;
  `include "axi_tb_tasks.svh"

  llc_bypass_demux dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(tb_req[0]), .slv_rsp_o(tb_rsp[0]),
    .llc_req_o(l_req), .llc_rsp_i(l_rsp), .byp_req_o(b_req), .byp_rsp_i(b_rsp));
  axi_mem_model #(.LATENCY(2)) m_llc (.clk_i(clk), .rst_ni(rst_n), .req_i(l_req), .rsp_o(l_rsp));
  axi_mem_model #(.LATENCY(5)) m_byp (.clk_i(clk), .rst_ni(rst_n), .req_i(b_req), .rsp_o(b_rsp));

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d [$], wd [$];
    logic err;
    addr_t a;
    tb_port_init(0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 30; n++) begin
      automatic int kind = n % 3;
      a = 64'h8000_0000 + 64'($urandom_range(0, 32'h3fff_fff0)) & ~64'h7;   // lower half
      if (kind == 2) a = a + 64'h4000_0000;                                    // reserved half
      wd = '{64'(n) ^ 64'hDEAD_0000_0000, 64'(n) + 64'h77};
      tb_write(0, (kind == 1) ? a + OFF : a, wd, 8'h2, 8'h0, err);
      check(!err, "write ok");
      if (kind == 0) begin
        check(m_llc.peek(a) == wd[0] && m_llc.peek(a + 8) == wd[1], "cached write reached LLC path");
        check(m_byp.peek(a) != wd[0], "cached write not on bypass");
      end else begin
        check(m_byp.peek(a) == wd[0] && m_byp.peek(a + 8) == wd[1], "bypassed write reached DRAM address");
        check(m_llc.peek(a) != wd[0], "bypassed write not in LLC");
      end
      tb_read(0, (kind == 1) ? a + OFF : a, 1, 8'h3, 8'h0, d, err);
      check(d.size() == 2 && d[0] == wd[0] && d[1] == wd[1], "read back through same path");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
