// axi_llc: shared last-level cache in front of DRAM.
//
// In this SoC the LLC caches only host and IOMMU page-table-walk traffic; the
// accelerator's DMA goes around it through the bypass path. Its job is to give
// the IO page-table walker short, low-latency hits on the page-table entries
// that the host has just written. The paper gives the capacity (128 KiB), its
// role, and the flush the host issues before an offload; the organisation
// below is this design's own: SETS x WAYS lines of LINE_BEATS 64-bit words
// (256 x 8 x 64 B = 128 KiB by default), write-back and write-allocate,
// round-robin victim choice per set.
//
// It is a blocking cache that serves one AXI transaction at a time (reads and
// writes alternate when both wait). Each beat address is looked up in one
// cycle; a hit then streams beats at one per cycle while the burst stays in
// the same line. A miss writes back the victim if it is dirty (one
// LINE_BEATS burst on the memory port), refills the line with one
// LINE_BEATS read burst, and looks up again. A pulse on flush_i, taken when
// the cache is idle, writes back every dirty line and invalidates the whole
// cache; flush_busy_o is high until that is done. Only INCR bursts of 64-bit
// beats are handled, and memory-side error responses are not forwarded. The
// run-time split of the array into cache and scratchpad that the paper
// mentions is not built.
//
// The Verilator linter reports pick_w / pick_r as circular combinational logic
// (UNOPTFLAT) once this block is connected to other AXI blocks. The loop
// exists only at the level of whole req_t/rsp_t structs, where a ready that
// depends on a response field (for example r_ready routed by r.id) shares a
// variable with the valids. No valid depends on its own ready bit, so
// there is no loop at bit level, and the synthesized netlist has none.
module axi_llc #(
  parameter int unsigned SETS       = 256,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned LINE_BEATS = 8
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          flush_i,
  output logic          flush_busy_o,
  input  axi_pkg::req_t slv_req_i,
  output axi_pkg::rsp_t slv_rsp_o,
  output axi_pkg::req_t mst_req_o,
  input  axi_pkg::rsp_t mst_rsp_i
);
  import axi_pkg::*;

  localparam int unsigned BB = $clog2(LINE_BEATS);  // beat bits
  localparam int unsigned OB = BB + 3;               // line offset bits
  localparam int unsigned SB = $clog2(SETS);
  localparam int unsigned WB = $clog2(WAYS);
  localparam int unsigned TW = ADDR_W - OB - SB;
  localparam int unsigned FB = SB + WB;

  typedef logic [TW-1:0] tag_t;
  typedef logic [SB-1:0] set_t;
  typedef logic [WB-1:0] way_t;
  typedef logic [BB-1:0] beat_t;

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_RD, S_WR, S_BRESP,
    S_WB_AW, S_WB_W, S_WB_B, S_RF_AR, S_RF_R, S_FLUSH
  } state_e;

  state_e state_q;
  ax_t    ax_q;
  addr_t  cur_q;        // address of the current beat
  logic   last_wr_q, flushing_q;
  set_t   set_q;
  way_t   way_q;
  beat_t  cnt_q;
  logic [FB-1:0] fl_q;

  tag_t            tag_q   [SETS][WAYS];
  logic [WAYS-1:0] valid_q [SETS];
  logic [WAYS-1:0] dirty_q [SETS];
  way_t            rr_q    [SETS];
  data_t           data_q  [SETS*WAYS*LINE_BEATS];

  function automatic int unsigned didx(set_t s, way_t w, beat_t b);
    return (int'(s) * WAYS + int'(w)) * LINE_BEATS + int'(b);
  endfunction

  // ---------------- lookup ----------------
  set_t  cur_set;
  tag_t  cur_tag;
  beat_t cur_beat;
  logic  hit;
  way_t  hit_way;
  assign cur_set  = cur_q[OB +: SB];
  assign cur_tag  = cur_q[ADDR_W-1 -: TW];
  assign cur_beat = cur_q[3 +: BB];
  always_comb begin
    hit = 1'b0; hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid_q[cur_set][w] && tag_q[cur_set][w] == cur_tag) begin
        hit = 1'b1; hit_way = way_t'(w);
      end
  end

  set_t fl_set;
  way_t fl_way;
  assign fl_set = fl_q[WB +: SB];
  assign fl_way = fl_q[WB-1:0];

  logic pick_w, pick_r;
  always_comb begin
    pick_w = 1'b0; pick_r = 1'b0;
    if (state_q == S_IDLE && !flush_i) begin
      if (slv_req_i.aw_valid && slv_req_i.ar_valid) begin
        pick_w = !last_wr_q; pick_r = last_wr_q;
      end else begin
        pick_w = slv_req_i.aw_valid; pick_r = slv_req_i.ar_valid;
      end
    end
  end

  logic beat_last;
  assign beat_last = (cur_beat == beat_t'(LINE_BEATS - 1));

  // ---------------- outputs ----------------
  always_comb begin
    slv_rsp_o          = '0;
    slv_rsp_o.aw_ready = pick_w;
    slv_rsp_o.ar_ready = pick_r;
    slv_rsp_o.r_valid  = (state_q == S_RD);
    slv_rsp_o.r.id     = ax_q.id;
    slv_rsp_o.r.data   = data_q[didx(cur_set, way_q, cur_beat)];
    slv_rsp_o.r.resp   = RESP_OKAY;
    slv_rsp_o.r.last   = (ax_q.len == 8'd0);
    slv_rsp_o.w_ready  = (state_q == S_WR);
    slv_rsp_o.b_valid  = (state_q == S_BRESP);
    slv_rsp_o.b.id     = ax_q.id;
    slv_rsp_o.b.resp   = RESP_OKAY;

    mst_req_o          = '0;
    mst_req_o.aw_valid = (state_q == S_WB_AW);
    mst_req_o.aw.addr  = {tag_q[set_q][way_q], set_q, OB'(0)};
    mst_req_o.aw.len   = 8'(LINE_BEATS - 1);
    mst_req_o.aw.size  = 3'd3;
    mst_req_o.aw.burst = BURST_INCR;
    mst_req_o.w_valid  = (state_q == S_WB_W);
    mst_req_o.w.data   = data_q[didx(set_q, way_q, cnt_q)];
    mst_req_o.w.strb   = '1;
    mst_req_o.w.last   = (cnt_q == beat_t'(LINE_BEATS - 1));
    mst_req_o.b_ready  = (state_q == S_WB_B);
    mst_req_o.ar_valid = (state_q == S_RF_AR);
    mst_req_o.ar.addr  = {cur_tag, cur_set, OB'(0)};
    mst_req_o.ar.len   = 8'(LINE_BEATS - 1);
    mst_req_o.ar.size  = 3'd3;
    mst_req_o.ar.burst = BURST_INCR;
    mst_req_o.r_ready  = (state_q == S_RF_R);
  end

  assign flush_busy_o = flushing_q;

  // ---------------- control ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= S_IDLE;
      ax_q       <= '0;
      cur_q      <= '0;
      last_wr_q  <= 1'b0;
      flushing_q <= 1'b0;
      set_q      <= '0;
      way_q      <= '0;
      cnt_q      <= '0;
      fl_q       <= '0;
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
        rr_q[s]    <= '0;
      end
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (flush_i) begin
            flushing_q <= 1'b1; fl_q <= '0; state_q <= S_FLUSH;
          end else if (pick_w) begin
            ax_q <= slv_req_i.aw; cur_q <= slv_req_i.aw.addr; last_wr_q <= 1'b1; state_q <= S_LOOKUP;
          end else if (pick_r) begin
            ax_q <= slv_req_i.ar; cur_q <= slv_req_i.ar.addr; last_wr_q <= 1'b0; state_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          set_q <= cur_set;
          if (hit) begin
            way_q   <= hit_way;
            state_q <= last_wr_q ? S_WR : S_RD;
          end else begin
            way_q <= rr_q[cur_set];
            if (valid_q[cur_set][rr_q[cur_set]] && dirty_q[cur_set][rr_q[cur_set]])
              state_q <= S_WB_AW;
            else
              state_q <= S_RF_AR;
          end
        end
        S_RD: if (slv_req_i.r_ready) begin
          if (ax_q.len == 8'd0) state_q <= S_IDLE;
          else begin
            ax_q.len <= ax_q.len - 8'd1;
            cur_q    <= cur_q + addr_t'(8);
            if (beat_last) state_q <= S_LOOKUP;
          end
        end
        S_WR: if (slv_req_i.w_valid) begin
          dirty_q[set_q][way_q] <= 1'b1;
          if (slv_req_i.w.last) state_q <= S_BRESP;
          else begin
            cur_q <= cur_q + addr_t'(8);
            if (beat_last) state_q <= S_LOOKUP;
          end
        end
        S_BRESP: if (slv_req_i.b_ready) state_q <= S_IDLE;
        S_WB_AW: if (mst_rsp_i.aw_ready) begin cnt_q <= '0; state_q <= S_WB_W; end
        S_WB_W: if (mst_rsp_i.w_ready) begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == beat_t'(LINE_BEATS - 1)) state_q <= S_WB_B;
        end
        S_WB_B: if (mst_rsp_i.b_valid) begin
          dirty_q[set_q][way_q] <= 1'b0;
          if (flushing_q) begin
            valid_q[set_q][way_q] <= 1'b0;
            fl_q <= fl_q + 1'b1;
            state_q <= (fl_q == FB'(SETS*WAYS - 1)) ? S_IDLE : S_FLUSH;
            if (fl_q == FB'(SETS*WAYS - 1)) flushing_q <= 1'b0;
          end else begin
            state_q <= S_RF_AR;
          end
        end
        S_RF_AR: if (mst_rsp_i.ar_ready) begin cnt_q <= '0; state_q <= S_RF_R; end
        S_RF_R: if (mst_rsp_i.r_valid) begin
          cnt_q <= cnt_q + 1'b1;
          if (mst_rsp_i.r.last) begin
            tag_q[set_q][way_q]   <= cur_tag;
            valid_q[set_q][way_q] <= 1'b1;
            dirty_q[set_q][way_q] <= 1'b0;
            rr_q[set_q]           <= way_q + 1'b1;
            state_q               <= S_LOOKUP;
          end
        end
        S_FLUSH: begin
          set_q <= fl_set;
          way_q <= fl_way;
          if (valid_q[fl_set][fl_way] && dirty_q[fl_set][fl_way]) begin
            state_q <= S_WB_AW;
          end else begin
            valid_q[fl_set][fl_way] <= 1'b0;
            fl_q <= fl_q + 1'b1;
            if (fl_q == FB'(SETS*WAYS - 1)) begin
              flushing_q <= 1'b0; state_q <= S_IDLE;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------- data array ----------------
  always_ff @(posedge clk_i) begin
    if (state_q == S_WR && slv_req_i.w_valid) begin
      for (int b = 0; b < STRB_W; b++)
        if (slv_req_i.w.strb[b])
          data_q[didx(set_q, way_q, cur_beat)][8*b +: 8] <= slv_req_i.w.data[8*b +: 8];
    end else if (state_q == S_RF_R && mst_rsp_i.r_valid) begin
      data_q[didx(set_q, way_q, cnt_q)] <= mst_rsp_i.r.data;
    end
  end

  a_incr_only: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (slv_req_i.ar_valid |-> slv_req_i.ar.burst == BURST_INCR) and
    (slv_req_i.aw_valid |-> slv_req_i.aw.burst == BURST_INCR));
endmodule
