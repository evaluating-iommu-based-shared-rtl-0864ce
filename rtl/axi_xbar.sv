// axi_xbar: fully connected AXI4 crossbar of the SoC.
//
// Every master port has an axi_demux that decodes the AW and AR addresses
// against the rule table RULES (first matching rule wins; an address that
// matches no rule goes to the default slave, the last one), and every slave
// port has an axi_mux that arbitrates between the masters round-robin and adds
// clog2(NUM_MST) bits to the ID. A master therefore reaches a slave in the
// same cycle (combinational path) and responses return the same way. The
// paper only states that the components are joined by a fully connected AXI
// crossbar; this composition, the default-slave rule and the rule format are
// this design's own.
module axi_xbar #(
  parameter int unsigned     NUM_MST   = 3,
  parameter int unsigned     NUM_SLV   = 3,
  parameter int unsigned     NUM_RULES = 3,
  parameter axi_pkg::rule_t  RULES [NUM_RULES] = '{
    '{base: 64'h0000_0000_7800_0000, size: 64'h0000_0000_0010_0000, idx: 4'd0},
    '{base: 64'h0000_0000_8000_0000, size: 64'h0000_0000_8000_0000, idx: 4'd1},
    '{base: 64'h0000_0100_8000_0000, size: 64'h0000_0000_8000_0000, idx: 4'd1}
  }
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  axi_pkg::req_t mst_req_i [NUM_MST],
  output axi_pkg::rsp_t mst_rsp_o [NUM_MST],
  output axi_pkg::req_t slv_req_o [NUM_SLV],
  input  axi_pkg::rsp_t slv_rsp_i [NUM_SLV]
);
  import axi_pkg::*;

  function automatic logic [3:0] decode(addr_t a);
    logic [3:0] s;
    s = 4'(NUM_SLV - 1);
    for (int r = NUM_RULES - 1; r >= 0; r--)
      if (a >= RULES[r].base && a < RULES[r].base + RULES[r].size) s = RULES[r].idx;
    return s;
  endfunction

  req_t cross_req [NUM_MST][NUM_SLV];
  rsp_t cross_rsp [NUM_MST][NUM_SLV];
  req_t mux_req   [NUM_SLV][NUM_MST];
  rsp_t mux_rsp   [NUM_SLV][NUM_MST];

  for (genvar m = 0; m < NUM_MST; m++) begin : gen_mst
    axi_demux #(.M(NUM_SLV)) u_demux (
      .clk_i, .rst_ni,
      .aw_sel_i  (decode(mst_req_i[m].aw.addr)),
      .ar_sel_i  (decode(mst_req_i[m].ar.addr)),
      .slv_req_i (mst_req_i[m]),
      .slv_rsp_o (mst_rsp_o[m]),
      .mst_req_o (cross_req[m]),
      .mst_rsp_i (cross_rsp[m])
    );
  end

  for (genvar s = 0; s < NUM_SLV; s++) begin : gen_slv
    for (genvar m = 0; m < NUM_MST; m++) begin : gen_x
      assign mux_req[s][m]   = cross_req[m][s];
      assign cross_rsp[m][s] = mux_rsp[s][m];
    end
    axi_mux #(.N(NUM_MST)) u_mux (
      .clk_i, .rst_ni,
      .slv_req_i (mux_req[s]),
      .slv_rsp_o (mux_rsp[s]),
      .mst_req_o (slv_req_o[s]),
      .mst_rsp_i (slv_rsp_i[s])
    );
  end
endmodule
