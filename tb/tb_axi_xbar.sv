// tb_axi_xbar: self-checking testbench of the AXI crossbar.
// Three masters access three memory-model slaves at the same time, using the
// crossbar's default address map (L2 window -> slave 0, DRAM window and its
// alias -> slave 1, anything else -> slave 2). Each master writes and reads
// back its own addresses in every window. Checks: data round trip, that each
// write landed in the slave its address decodes to, and that IDs come back.
module tb_axi_xbar;
  import axi_pkg::*;
  localparam int NP = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  req_t tb_req [NP];
  rsp_t tb_rsp [NP];
  req_t s_req [3];
  rsp_t s_rsp [3];
  int checks = 0, failures = 0;
  `include "axi_tb_tasks.svh"

  axi_xbar dut (.clk_i(clk), .rst_ni(rst_n), .mst_req_i(tb_req), .mst_rsp_o(tb_rsp),
                .slv_req_o(s_req), .slv_rsp_i(s_rsp));
  axi_mem_model #(.LATENCY(1)) m0 (.clk_i(clk), .rst_ni(rst_n), .req_i(s_req[0]), .rsp_o(s_rsp[0]));
  axi_mem_model #(.LATENCY(3)) m1 (.clk_i(clk), .rst_ni(rst_n), .req_i(s_req[1]), .rsp_o(s_rsp[1]));
  axi_mem_model #(.LATENCY(2)) m2 (.clk_i(clk), .rst_ni(rst_n), .req_i(s_req[2]), .rsp_o(s_rsp[2]));

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  id_t last_ar_id [NP];
  always @(posedge clk)
    for (int p = 0; p < NP; p++) begin
      if (tb_req[p].ar_valid && tb_rsp[p].ar_ready) last_ar_id[p] <= tb_req[p].ar.id;
      if (tb_rsp[p].r_valid && tb_req[p].r_ready) begin
        checks++; if (tb_rsp[p].r.id != last_ar_id[p]) begin failures++; $display("FAIL R id"); end
      end
    end

  function automatic logic [63:0] peek_slave(int s, addr_t a);
    case (s)
      0: return m0.peek(a);
      1: return m1.peek(a);
      default: return m2.peek(a);
    endcase
  endfunction

  initial begin
    #800000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic worker(input int p);
    logic [63:0] d [$], wd [$];
    logic err;
    addr_t bases [4] = '{64'h7800_0000, 64'h8000_0000, 64'h100_8000_0000, 64'h0300_0000};
    int    slave [4] = '{0, 1, 1, 2};
    for (int n = 0; n < 24; n++) begin
      automatic int r = n % 4;
      automatic addr_t a = bases[r] + 64'(p) * 64'h1000 + 64'(n) * 64'h40;
      wd = '{{8'(p), 8'(n), 48'h1234}, {8'(p), 8'(n), 48'h5678}};
      tb_write(p, a, wd, id_t'(n % 8), 8'h0, err);
      check(!err, "write ok");
      check(peek_slave(slave[r], a) == wd[0], "write decoded to the right slave");
      tb_read(p, a, 1, id_t'(n % 8), 8'h0, d, err);
      check(d.size() == 2 && d[0] == wd[0] && d[1] == wd[1], "read data");
    end
  endtask

  initial begin
    for (int p = 0; p < NP; p++) tb_port_init(p);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fork worker(0); worker(1); worker(2); join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
