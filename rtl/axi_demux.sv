// axi_demux: 1-to-M AXI4 demultiplexer with externally computed targets.
//
// The caller decodes each AW and AR address and presents the target index on
// aw_sel_i / ar_sel_i (values 0..M-1). To keep AXI's same-ID ordering without
// ID tracking, each direction may only switch to a different target once all
// its outstanding transactions have completed (B for writes, last R beat for
// reads): while transactions are outstanding, a request for another target is
// held. W beats always belong to the locked write target; they are only let
// through while at least one accepted AW still has W beats to send, so a W
// beat that arrives before its AW waits. Up to MAX_TXN transactions may be
// outstanding per direction. This is the simplest ordering-safe scheme and is
// this design's own; the paper only gives the demux's role.
//
// The Verilator linter reports the handshake signals as circular combinational logic
// (UNOPTFLAT) once this block is connected to other AXI blocks. The loop
// exists only at the level of whole req_t/rsp_t structs, where a ready that
// depends on a response field (for example r_ready routed by r.id) shares a
// variable with the valids. No valid depends on its own ready bit, so
// there is no loop at bit level, and the synthesized netlist has none.
module axi_demux #(
  parameter int unsigned M       = 2,
  parameter int unsigned MAX_TXN = 8
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [3:0]    aw_sel_i,
  input  logic [3:0]    ar_sel_i,
  input  axi_pkg::req_t slv_req_i,
  output axi_pkg::rsp_t slv_rsp_o,
  output axi_pkg::req_t mst_req_o [M],
  input  axi_pkg::rsp_t mst_rsp_i [M]
);
  import axi_pkg::*;

  localparam int unsigned CW = $clog2(MAX_TXN + 1);
  typedef logic [CW-1:0] cnt_t;

  localparam int unsigned SW = (M > 1) ? $clog2(M) : 1;
  typedef logic [SW-1:0] sel_t;

  logic [3:0] aw_tgt_q, ar_tgt_q;
  sel_t       aw_s, ar_s, awt_s, art_s;
  assign aw_s  = sel_t'(aw_sel_i);
  assign ar_s  = sel_t'(ar_sel_i);
  assign awt_s = sel_t'(aw_tgt_q);
  assign art_s = sel_t'(ar_tgt_q);
  cnt_t       aw_out_q, ar_out_q, w_pend_q;

  logic aw_ok, ar_ok, aw_hs, ar_hs, w_ok, w_hs, b_hs, r_hs;
  assign aw_ok = (aw_out_q == '0 || aw_sel_i == aw_tgt_q) && (aw_out_q != cnt_t'(MAX_TXN));
  assign ar_ok = (ar_out_q == '0 || ar_sel_i == ar_tgt_q) && (ar_out_q != cnt_t'(MAX_TXN));
  assign aw_hs = slv_req_i.aw_valid && aw_ok && mst_rsp_i[aw_s].aw_ready;
  assign ar_hs = slv_req_i.ar_valid && ar_ok && mst_rsp_i[ar_s].ar_ready;
  assign w_ok  = (w_pend_q != '0);
  assign w_hs  = slv_req_i.w_valid && w_ok && mst_rsp_i[awt_s].w_ready;
  assign b_hs  = mst_rsp_i[awt_s].b_valid && slv_req_i.b_ready && (aw_out_q != '0);
  assign r_hs  = mst_rsp_i[art_s].r_valid && slv_req_i.r_ready && (ar_out_q != '0)
                 && mst_rsp_i[art_s].r.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_tgt_q <= '0; ar_tgt_q <= '0;
      aw_out_q <= '0; ar_out_q <= '0; w_pend_q <= '0;
    end else begin
      if (aw_hs) aw_tgt_q <= aw_sel_i;
      if (ar_hs) ar_tgt_q <= ar_sel_i;
      aw_out_q <= aw_out_q + cnt_t'(aw_hs) - cnt_t'(b_hs);
      ar_out_q <= ar_out_q + cnt_t'(ar_hs) - cnt_t'(r_hs);
      w_pend_q <= w_pend_q + cnt_t'(aw_hs) - cnt_t'(w_hs && slv_req_i.w.last);
    end
  end

  // W target: the locked target, or the one being accepted this cycle.
  logic [3:0] w_tgt;
  assign w_tgt = aw_tgt_q;

  always_comb begin
    slv_rsp_o = '0;
    for (int j = 0; j < M; j++) begin
      mst_req_o[j]          = '0;
      mst_req_o[j].aw       = slv_req_i.aw;
      mst_req_o[j].aw_valid = slv_req_i.aw_valid && aw_ok && (aw_sel_i == 4'(j));
      mst_req_o[j].ar       = slv_req_i.ar;
      mst_req_o[j].ar_valid = slv_req_i.ar_valid && ar_ok && (ar_sel_i == 4'(j));
      mst_req_o[j].w        = slv_req_i.w;
      mst_req_o[j].w_valid  = slv_req_i.w_valid && w_ok && (w_tgt == 4'(j));
      mst_req_o[j].b_ready  = slv_req_i.b_ready && (aw_tgt_q == 4'(j)) && (aw_out_q != '0);
      mst_req_o[j].r_ready  = slv_req_i.r_ready && (ar_tgt_q == 4'(j)) && (ar_out_q != '0);
    end
    slv_rsp_o.aw_ready = aw_hs;
    slv_rsp_o.ar_ready = ar_hs;
    slv_rsp_o.w_ready  = w_hs;
    slv_rsp_o.b        = mst_rsp_i[awt_s].b;
    slv_rsp_o.b_valid  = mst_rsp_i[awt_s].b_valid && (aw_out_q != '0);
    slv_rsp_o.r        = mst_rsp_i[art_s].r;
    slv_rsp_o.r_valid  = mst_rsp_i[art_s].r_valid && (ar_out_q != '0);
  end

  a_sel_range: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (slv_req_i.aw_valid |-> aw_sel_i < 4'(M)) and (slv_req_i.ar_valid |-> ar_sel_i < 4'(M)));
endmodule
