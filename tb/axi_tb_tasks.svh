// AXI master tasks for testbenches, included inside a testbench module.
// The including module must declare `clk`, and the arrays
// `axi_pkg::req_t tb_req [NP]` and `axi_pkg::rsp_t tb_rsp [NP]`; task
// argument `p` selects the port. Outputs are driven with blocking
// assignments just after the falling clock edge and handshakes are tested
// one time unit later, so each handshake completes on the next rising edge.
// One transaction per port at a time; several ports may run in parallel.

task automatic tb_port_init(input int p);
  tb_req[p] = '0;
endtask

task automatic tb_read(input int p, input axi_pkg::addr_t a, input int len,
                       input axi_pkg::id_t id, input axi_pkg::user_t user,
                       output logic [63:0] d [$], output logic err);
  d = {};
  err = 1'b0;
  @(negedge clk);
  tb_req[p].ar       = '{id: id, addr: a, len: 8'(len), size: 3'd3, burst: 2'b01, user: user};
  tb_req[p].ar_valid = 1'b1;
  #1;
  while (!tb_rsp[p].ar_ready) begin @(negedge clk); #1; end
  @(negedge clk);
  tb_req[p].ar_valid = 1'b0;
  tb_req[p].r_ready  = 1'b1;
  #1;
  forever begin
    if (tb_rsp[p].r_valid) begin
      d.push_back(tb_rsp[p].r.data);
      if (tb_rsp[p].r.resp != axi_pkg::RESP_OKAY) err = 1'b1;
      if (tb_rsp[p].r.last) break;
    end
    @(negedge clk); #1;
  end
  @(negedge clk);
  tb_req[p].r_ready = 1'b0;
endtask

task automatic tb_write(input int p, input axi_pkg::addr_t a, input logic [63:0] d [$],
                        input axi_pkg::id_t id, input axi_pkg::user_t user,
                        output logic err);
  int n;
  n = d.size();
  @(negedge clk);
  tb_req[p].aw       = '{id: id, addr: a, len: 8'(n - 1), size: 3'd3, burst: 2'b01, user: user};
  tb_req[p].aw_valid = 1'b1;
  #1;
  while (!tb_rsp[p].aw_ready) begin @(negedge clk); #1; end
  @(negedge clk);
  tb_req[p].aw_valid = 1'b0;
  for (int i = 0; i < n; i++) begin
    tb_req[p].w       = '{data: d[i], strb: 8'hff, last: (i == n - 1)};
    tb_req[p].w_valid = 1'b1;
    #1;
    while (!tb_rsp[p].w_ready) begin @(negedge clk); #1; end
    @(negedge clk);
  end
  tb_req[p].w_valid = 1'b0;
  tb_req[p].b_ready = 1'b1;
  #1;
  while (!tb_rsp[p].b_valid) begin @(negedge clk); #1; end
  err = (tb_rsp[p].b.resp != axi_pkg::RESP_OKAY);
  @(negedge clk);
  tb_req[p].b_ready = 1'b0;
endtask
