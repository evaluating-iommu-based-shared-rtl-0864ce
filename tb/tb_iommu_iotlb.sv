// tb_iommu_iotlb: self-checking testbench of the 4-entry IOTLB.
// Checks lookups of 4 KiB, 2 MiB and 1 GiB entries (with the low VPN bits
// carried into the returned PPN), device-id tagging, permissions, refill of
// an existing page without using a new entry, round-robin replacement when
// a fifth page is filled, and flush.
module tb_iommu_iotlb;
  import iommu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic flush, fill, hit, r, w, fr, fw;
  logic [7:0] did, fdid;
  vpn_t vpn, fvpn;
  ppn_t ppn, fppn;
  lvl_t flvl;
  int checks = 0, failures = 0;

  iommu_iotlb #(.ENTRIES(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .lk_did_i(did), .lk_vpn_i(vpn), .lk_hit_o(hit), .lk_ppn_o(ppn), .lk_r_o(r), .lk_w_o(w),
    .fill_i(fill), .fill_did_i(fdid), .fill_vpn_i(fvpn), .fill_ppn_i(fppn), .fill_lvl_i(flvl),
    .fill_r_i(fr), .fill_w_i(fw));

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic do_fill(input logic [7:0] d, input vpn_t v, input ppn_t p, input lvl_t l, input logic rr, input logic ww);
    @(negedge clk); fill = 1; fdid = d; fvpn = v; fppn = p; flvl = l; fr = rr; fw = ww;
    @(negedge clk); fill = 0;
  endtask
  task automatic look(input logic [7:0] d, input vpn_t v);
    did = d; vpn = v; #1;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    flush = 0; fill = 0; did = 0; vpn = 0; fdid = 0; fvpn = 0; fppn = 0; flvl = 0; fr = 0; fw = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    look(8'd1, 27'h12345); check(!hit, "empty misses");
    do_fill(8'd1, 27'h12345, 44'hABCDE, 2'd0, 1, 0);
    look(8'd1, 27'h12345); check(hit && ppn == 44'hABCDE && r && !w, "4K hit");
    look(8'd2, 27'h12345); check(!hit, "other device misses");
    look(8'd1, 27'h12346); check(!hit, "neighbour page misses");
    do_fill(8'd1, {9'h3, 9'h7, 9'h0}, 44'h40000, 2'd1, 1, 1);       // 2 MiB page
    look(8'd1, {9'h3, 9'h7, 9'h1AB}); check(hit && ppn == {35'h40000 >> 9, 9'h1AB} && w, "2M hit, low VPN carried");
    look(8'd1, {9'h3, 9'h8, 9'h1AB}); check(!hit, "2M neighbour misses");
    do_fill(8'd1, {9'h5, 9'h0, 9'h0}, 44'h80000, 2'd2, 1, 1);       // 1 GiB page
    look(8'd1, {9'h5, 9'h1F, 9'h0F}); check(hit && ppn == {26'h80000 >> 18, 9'h1F, 9'h0F}, "1G hit");
    do_fill(8'd1, 27'h00100, 44'h11111, 2'd0, 1, 1);                // 4th entry
    do_fill(8'd1, 27'h12345, 44'hABCDE, 2'd0, 1, 1);                // refill of existing page (now writable)
    look(8'd1, 27'h12345); check(hit && w, "refill updates existing entry");
    look(8'd1, 27'h00100); check(hit, "4th entry still present after refill");
    do_fill(8'd1, 27'h00200, 44'h22222, 2'd0, 1, 1);                // 5th page: evicts entry 0
    look(8'd1, 27'h00200); check(hit && ppn == 44'h22222, "5th page present");
    look(8'd1, 27'h12345); check(!hit, "round-robin victim evicted");
    look(8'd1, {9'h3, 9'h7, 9'h1}); check(hit, "other entries kept");
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    look(8'd1, 27'h00200); check(!hit, "flush invalidates");
    look(8'd1, {9'h5, 9'h1, 9'h1}); check(!hit, "flush invalidates all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
