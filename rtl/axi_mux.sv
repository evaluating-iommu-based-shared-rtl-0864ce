// axi_mux: N-to-1 AXI4 multiplexer.
//
// Used as the mux that joins the LLC's memory port and the LLC-bypass path in
// front of the DRAM controller, and as the slave side of every crossbar port.
// AW and AR are arbitrated separately, each with a round-robin pointer that
// moves past the winner after every handshake. The index of the winning input
// is put into the low SW = clog2(N) bits of the outgoing ID (the incoming ID is
// shifted up), and B and R responses are steered back by those bits with the
// original ID restored. Inputs must therefore leave their top SW ID bits at
// zero (checked by an assertion). W beats follow the order of the accepted AW
// bursts: each AW handshake pushes the input index into a small FIFO and W is
// taken from the input at its head until the last beat. AW is held while that
// FIFO is full. How the paper's mux is built is not given: the arbitration
// and ID scheme are this design's own.
//
// The Verilator linter reports the grant and handshake signals as circular combinational logic
// (UNOPTFLAT) once this block is connected to other AXI blocks. The loop
// exists only at the level of whole req_t/rsp_t structs, where a ready that
// depends on a response field (for example r_ready routed by r.id) shares a
// variable with the valids. No valid depends on its own ready bit, so
// there is no loop at bit level, and the synthesized netlist has none.
module axi_mux #(
  parameter int unsigned N        = 2,
  parameter int unsigned W_FIFO_D = 8
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  axi_pkg::req_t slv_req_i [N],
  output axi_pkg::rsp_t slv_rsp_o [N],
  output axi_pkg::req_t mst_req_o,
  input  axi_pkg::rsp_t mst_rsp_i
);
  import axi_pkg::*;

  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned FW = $clog2(W_FIFO_D);
  typedef logic [SW-1:0] idx_t;

  // ---------------- arbitration ----------------
  idx_t aw_ptr_q, ar_ptr_q, aw_gnt, ar_gnt;
  logic aw_any, ar_any;

  always_comb begin
    aw_any = 1'b0; aw_gnt = '0;
    for (int k = N-1; k >= 0; k--) begin
      int unsigned c;
      c = (int'(aw_ptr_q) + k) % N;
      if (slv_req_i[c].aw_valid) begin aw_any = 1'b1; aw_gnt = idx_t'(c); end
    end
    ar_any = 1'b0; ar_gnt = '0;
    for (int k = N-1; k >= 0; k--) begin
      int unsigned c;
      c = (int'(ar_ptr_q) + k) % N;
      if (slv_req_i[c].ar_valid) begin ar_any = 1'b1; ar_gnt = idx_t'(c); end
    end
  end

  // ---------------- W order FIFO ----------------
  idx_t        wf_mem [W_FIFO_D];
  logic [FW:0] wf_cnt_q;
  logic [FW-1:0] wf_wp_q, wf_rp_q;
  logic wf_full, wf_empty, wf_push, wf_pop;
  idx_t w_sel;
  assign wf_full  = (wf_cnt_q == (FW+1)'(W_FIFO_D));
  assign wf_empty = (wf_cnt_q == '0);
  assign w_sel    = wf_mem[wf_rp_q];

  logic aw_hs, ar_hs;
  assign aw_hs   = aw_any && !wf_full && mst_rsp_i.aw_ready;
  assign ar_hs   = ar_any && mst_rsp_i.ar_ready;
  assign wf_push = aw_hs;
  assign wf_pop  = !wf_empty && slv_req_i[w_sel].w_valid && mst_rsp_i.w_ready && slv_req_i[w_sel].w.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_ptr_q <= '0; ar_ptr_q <= '0;
      wf_cnt_q <= '0; wf_wp_q <= '0; wf_rp_q <= '0;
    end else begin
      if (aw_hs) aw_ptr_q <= idx_t'((int'(aw_gnt) + 1) % N);
      if (ar_hs) ar_ptr_q <= idx_t'((int'(ar_gnt) + 1) % N);
      if (wf_push) wf_wp_q <= (wf_wp_q == FW'(W_FIFO_D-1)) ? '0 : wf_wp_q + 1'b1;
      if (wf_pop)  wf_rp_q <= (wf_rp_q == FW'(W_FIFO_D-1)) ? '0 : wf_rp_q + 1'b1;
      wf_cnt_q <= wf_cnt_q + (FW+1)'(wf_push) - (FW+1)'(wf_pop);
    end
  end
  always_ff @(posedge clk_i) if (wf_push) wf_mem[wf_wp_q] <= aw_gnt;

  // ---------------- datapath ----------------
  idx_t b_sel, r_sel;
  assign b_sel = mst_rsp_i.b.id[SW-1:0];
  assign r_sel = mst_rsp_i.r.id[SW-1:0];

  always_comb begin
    mst_req_o = '0;
    mst_req_o.aw       = slv_req_i[aw_gnt].aw;
    mst_req_o.aw.id    = {slv_req_i[aw_gnt].aw.id[ID_W-SW-1:0], aw_gnt};
    mst_req_o.aw_valid = aw_any && !wf_full;
    mst_req_o.ar       = slv_req_i[ar_gnt].ar;
    mst_req_o.ar.id    = {slv_req_i[ar_gnt].ar.id[ID_W-SW-1:0], ar_gnt};
    mst_req_o.ar_valid = ar_any;
    mst_req_o.w        = slv_req_i[w_sel].w;
    mst_req_o.w_valid  = !wf_empty && slv_req_i[w_sel].w_valid;
    mst_req_o.b_ready  = slv_req_i[b_sel].b_ready;
    mst_req_o.r_ready  = slv_req_i[r_sel].r_ready;

    for (int i = 0; i < N; i++) begin
      slv_rsp_o[i]          = '0;
      slv_rsp_o[i].aw_ready = aw_hs && (aw_gnt == idx_t'(i));
      slv_rsp_o[i].ar_ready = ar_hs && (ar_gnt == idx_t'(i));
      slv_rsp_o[i].w_ready  = !wf_empty && (w_sel == idx_t'(i)) && mst_rsp_i.w_ready;
      slv_rsp_o[i].b        = mst_rsp_i.b;
      slv_rsp_o[i].b.id     = id_t'(mst_rsp_i.b.id >> SW);
      slv_rsp_o[i].b_valid  = mst_rsp_i.b_valid && (b_sel == idx_t'(i));
      slv_rsp_o[i].r        = mst_rsp_i.r;
      slv_rsp_o[i].r.id     = id_t'(mst_rsp_i.r.id >> SW);
      slv_rsp_o[i].r_valid  = mst_rsp_i.r_valid && (r_sel == idx_t'(i));
    end
  end

  // The top SW bits of an incoming ID are dropped: they must be zero.
  for (genvar g = 0; g < N; g++) begin : gen_chk
    a_aw_id: assert property (@(posedge clk_i) disable iff (!rst_ni)
      slv_req_i[g].aw_valid |-> slv_req_i[g].aw.id[ID_W-1 -: SW] == '0);
    a_ar_id: assert property (@(posedge clk_i) disable iff (!rst_ni)
      slv_req_i[g].ar_valid |-> slv_req_i[g].ar.id[ID_W-1 -: SW] == '0);
  end
endmodule
