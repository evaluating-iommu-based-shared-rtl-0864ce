// tb_axi_sram: self-checking testbench of the AXI scratchpad memory.
// Writes bursts and single beats (with partial strobes) at random word
// addresses, keeps a reference copy, reads everything back and compares;
// also checks the one-beat-per-cycle read rate and the wrap of the address
// modulo the memory size.
module tb_axi_sram;
  import axi_pkg::*;
  localparam int NP = 1;
  localparam int BYTES = 4096;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  req_t tb_req [NP];
  rsp_t tb_rsp [NP];
  int checks = 0, failures = 0;
  `include "axi_tb_tasks.svh"

  axi_sram #(.MEM_BYTES(BYTES)) dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(tb_req[0]), .slv_rsp_o(tb_rsp[0]));

  int cyc = 0, t_r0 = 0, t_rl = 0; logic first = 1'b1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (tb_req[0].ar_valid && tb_rsp[0].ar_ready) first <= 1'b1;
    if (tb_rsp[0].r_valid && tb_req[0].r_ready) begin
      if (first) begin t_r0 <= cyc; first <= 1'b0; end
      if (tb_rsp[0].r.last) t_rl <= cyc;
    end
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [63:0] ref_mem [BYTES/8];
  initial begin
    logic [63:0] d [$], wd [$];
    logic err;
    tb_port_init(0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // fill the whole memory with one long burst per 2 KiB
    for (int blk = 0; blk < BYTES / 2048; blk++) begin
      wd = {};
      for (int i = 0; i < 256; i++) begin
        ref_mem[blk*256 + i] = {$urandom, $urandom};
        wd.push_back(ref_mem[blk*256 + i]);
      end
      tb_write(0, 64'h7800_0000 + 64'(blk) * 2048, wd, 8'h1, 8'h0, err);
      check(!err, "burst write resp");
    end
    // random short bursts
    for (int n = 0; n < 40; n++) begin
      automatic int w = $urandom_range(0, BYTES/8 - 8);
      automatic int l = $urandom_range(0, 7);
      wd = {};
      for (int i = 0; i <= l; i++) begin ref_mem[w+i] = {$urandom, $urandom}; wd.push_back(ref_mem[w+i]); end
      tb_write(0, 64'h7800_0000 + 64'(w) * 8, wd, 8'h2, 8'h0, err);
      check(!err, "short write resp");
    end
    // partial strobe write: only the low 4 bytes change
    @(negedge clk);
    tb_req[0].aw = '{id: 8'h4, addr: 64'h7800_0040, len: 8'd0, size: 3'd3, burst: BURST_INCR, user: '0};
    tb_req[0].aw_valid = 1'b1; #1;
    while (!tb_rsp[0].aw_ready) begin @(negedge clk); #1; end
    @(negedge clk); tb_req[0].aw_valid = 1'b0;
    tb_req[0].w = '{data: 64'h1111_2222_3333_4444, strb: 8'h0f, last: 1'b1}; tb_req[0].w_valid = 1'b1; #1;
    while (!tb_rsp[0].w_ready) begin @(negedge clk); #1; end
    @(negedge clk); tb_req[0].w_valid = 1'b0; tb_req[0].b_ready = 1'b1; #1;
    while (!tb_rsp[0].b_valid) begin @(negedge clk); #1; end
    check(tb_rsp[0].b.id == 8'h4, "B id");
    @(negedge clk); tb_req[0].b_ready = 1'b0;
    ref_mem[8][31:0] = 32'h3333_4444;
    // read back everything
    for (int blk = 0; blk < BYTES / 2048; blk++) begin
      tb_read(0, 64'h7800_0000 + 64'(blk) * 2048, 255, 8'h3, 8'h0, d, err);
      check(d.size() == 256 && !err, "burst read length");
      for (int i = 0; i < 256; i++) check(d[i] == ref_mem[blk*256 + i], "read data");
      check(t_rl - t_r0 == 255, "one beat per cycle");
    end
    // the address wraps modulo the memory size
    tb_read(0, 64'h7800_0000 + BYTES + 64'h40, 0, 8'h3, 8'h0, d, err);
    check(d[0] == ref_mem[8], "address wraps modulo MEM_BYTES");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
