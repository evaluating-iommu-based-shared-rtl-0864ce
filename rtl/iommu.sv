// iommu: IO memory management unit between the accelerator and the SoC bus.
//
// The accelerator issues AXI transactions with IO virtual addresses (IOVAs)
// and its device identifier in the AW/AR user field. The IOMMU translates each
// AW and AR, one at a time, and forwards it on mem_req_o with the physical
// address; W, B and R beats pass through unchanged. Translation state is
// cached in a 4-entry IOTLB and a single device-directory cache entry (one
// device/process pair), the configuration the paper evaluates. On a miss the
// page-table walker reads device context and page-table entries through a
// second AXI master port, ptw_req_o, so that the walk can be routed to the
// shared last-level cache while device data goes around it.
//
// ddtp_mode_i selects Off (every transaction faults), Bare (addresses pass
// unchanged: the "IOMMU disabled" baseline) or one-level device directory at
// ddtp_ppn_i. In one-level mode a device whose context says Bare is not
// translated either (as for the instruction cache with its own device id).
// Address bits in PASS_MASK are removed before translation and put back on
// the physical address; this carries the LLC-bypass alias offset that the
// device adds to an IOVA through the IOMMU. Transactions that fault are
// answered by the IOMMU itself with SLVERR (W beats are drained first) after
// all earlier transactions of the same direction have completed; cause and
// IOVA of the last fault are held on the fault outputs, and fault_valid_o
// pulses for one cycle. inval_i invalidates the IOTLB and the device-directory
// cache. The command queue, fault queue in memory and register file of the
// specification are not built; their effect is provided by these ports. The
// stat_* counters count requests that hit (IOTLB or bare device), requests that needed a walk, and the cycles spent walking,
// from which the average walk time is obtained.
//
// Timing: an IOTLB hit forwards the request two cycles after it was taken
// (select, look up, forward); a miss adds the walk, one AXI read round trip
// per device-context doubleword and per page-table level.
// Each burst is translated once, so it must stay within a 4 KiB page (the
// AXI rule; asserted). The DMA engine splits longer transfers.
module iommu #(
  parameter int unsigned    IOTLB_ENTRIES = 4,
  parameter axi_pkg::addr_t PASS_MASK     = 64'h0000_0100_0000_0000
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  iommu_pkg::ddtp_mode_e ddtp_mode_i,
  input  iommu_pkg::ppn_t       ddtp_ppn_i,
  input  logic                  inval_i,
  output logic                  fault_valid_o,
  output logic [11:0]           fault_cause_o,
  output axi_pkg::addr_t        fault_iova_o,
  output logic [31:0]           stat_hits_o,
  output logic [31:0]           stat_walks_o,
  output logic [31:0]           stat_walk_cycles_o,
  input  axi_pkg::req_t         dev_req_i,
  output axi_pkg::rsp_t         dev_rsp_o,
  output axi_pkg::req_t         mem_req_o,
  input  axi_pkg::rsp_t         mem_rsp_i,
  output axi_pkg::req_t         ptw_req_o,
  input  axi_pkg::rsp_t         ptw_rsp_i
);
  import axi_pkg::*;
  import iommu_pkg::*;

  typedef enum logic [2:0] {T_IDLE, T_LOOKUP, T_WALK, T_FWD, T_FAULT, T_WDROP, T_BERR, T_RERR} state_e;
  state_e state_q;
  ax_t    ax_q;
  logic   wr_q, last_wr_q;
  addr_t  pa_q;
  logic [7:0] beat_q;
  logic       walked_q;   // current request already went through a walk

  // Outstanding transaction bookkeeping.
  logic [7:0] w_credit_q, b_out_q, r_out_q;

  // Device-directory cache (one entry).
  logic       ddtc_v_q, ddtc_bare_q;
  logic [7:0] ddtc_did_q;
  ppn_t       ddtc_root_q;

  // ---------------- address split ----------------
  addr_t iova;
  logic  canonical;
  assign iova      = ax_q.addr & ~PASS_MASK;
  assign canonical = (iova[63:38] == '0) || (iova[63:38] == '1);

  // ---------------- IOTLB ----------------
  logic tlb_hit, tlb_r, tlb_w;
  ppn_t tlb_ppn;
  logic ptw_done, ptw_fault, ptw_dcv, ptw_bare, ptw_leafv, ptw_lr, ptw_lw, ptw_busy;
  logic [11:0] ptw_cause;
  ppn_t ptw_root, ptw_lppn;
  lvl_t ptw_llvl;
  logic ptw_start;

  iommu_iotlb #(.ENTRIES(IOTLB_ENTRIES)) u_iotlb (
    .clk_i, .rst_ni,
    .flush_i    (inval_i),
    .lk_did_i   (ax_q.user),
    .lk_vpn_i   (iova[38:12]),
    .lk_hit_o   (tlb_hit),
    .lk_ppn_o   (tlb_ppn),
    .lk_r_o     (tlb_r),
    .lk_w_o     (tlb_w),
    .fill_i     (ptw_done && ptw_leafv && !inval_i),
    .fill_did_i (ax_q.user),
    .fill_vpn_i (iova[38:12]),
    .fill_ppn_i (ptw_lppn),
    .fill_lvl_i (ptw_llvl),
    .fill_r_i   (ptw_lr),
    .fill_w_i   (ptw_lw)
  );

  logic ddtc_hit;
  assign ddtc_hit = ddtc_v_q && (ddtc_did_q == ax_q.user);

  iommu_ptw u_ptw (
    .clk_i, .rst_ni,
    .start_i       (ptw_start),
    .did_i         (ax_q.user),
    .iova_i        (iova[38:0]),
    .write_i       (wr_q),
    .dc_fetch_i    (!ddtc_hit),
    .ddt_ppn_i     (ddtp_ppn_i),
    .root_ppn_i    (ddtc_root_q),
    .busy_o        (ptw_busy),
    .done_o        (ptw_done),
    .fault_o       (ptw_fault),
    .cause_o       (ptw_cause),
    .dc_valid_o    (ptw_dcv),
    .dc_bare_o     (ptw_bare),
    .dc_root_ppn_o (ptw_root),
    .leaf_valid_o  (ptw_leafv),
    .leaf_ppn_o    (ptw_lppn),
    .leaf_lvl_o    (ptw_llvl),
    .leaf_r_o      (ptw_lr),
    .leaf_w_o      (ptw_lw),
    .ptw_req_o     (ptw_req_o),
    .ptw_rsp_i     (ptw_rsp_i)
  );

  // ---------------- lookup decision ----------------
  typedef enum logic [1:0] {D_FWD, D_WALK, D_FAULT} dec_e;
  dec_e        dec;
  addr_t       dec_pa;
  logic [11:0] dec_cause;
  logic [11:0] pf_cause;
  assign pf_cause = wr_q ? CAUSE_ST_PAGE : CAUSE_LD_PAGE;

  always_comb begin
    dec = D_FWD; dec_pa = ax_q.addr; dec_cause = '0;
    unique case (ddtp_mode_i)
      DDTP_OFF:  begin dec = D_FAULT; dec_cause = CAUSE_ALL_OFF; end
      DDTP_BARE: dec = D_FWD;
      DDTP_1LVL: begin
        if (!ddtc_hit) dec = D_WALK;
        else if (ddtc_bare_q) dec = D_FWD;
        else if (!canonical) begin dec = D_FAULT; dec_cause = pf_cause; end
        else if (!tlb_hit) dec = D_WALK;
        else if ((wr_q && !tlb_w) || (!wr_q && !tlb_r)) begin dec = D_FAULT; dec_cause = pf_cause; end
        else dec_pa = {8'd0, tlb_ppn, iova[11:0]} | (ax_q.addr & PASS_MASK);
      end
      default: begin dec = D_FAULT; dec_cause = CAUSE_DDT_MISCONF; end
    endcase
  end

  assign ptw_start = (state_q == T_LOOKUP) && (dec == D_WALK) && !inval_i;

  // ---------------- handshakes ----------------
  logic pick_w, pick_r;
  always_comb begin
    pick_w = 1'b0; pick_r = 1'b0;
    if (state_q == T_IDLE) begin
      if (dev_req_i.aw_valid && dev_req_i.ar_valid) begin
        pick_w = !last_wr_q; pick_r = last_wr_q;
      end else begin
        pick_w = dev_req_i.aw_valid; pick_r = dev_req_i.ar_valid;
      end
    end
  end

  logic fwd_hs, fault_go;
  assign fwd_hs   = (state_q == T_FWD) && (wr_q ? mem_rsp_i.aw_ready : mem_rsp_i.ar_ready);
  assign fault_go = (state_q == T_FAULT) &&
                    (wr_q ? (w_credit_q == '0 && b_out_q == '0) : (r_out_q == '0));

  logic mem_w_hs, mem_b_hs, mem_r_last_hs;
  assign mem_w_hs      = dev_req_i.w_valid && (w_credit_q != '0) && mem_rsp_i.w_ready;
  assign mem_b_hs      = mem_rsp_i.b_valid && dev_req_i.b_ready && (state_q != T_BERR);
  assign mem_r_last_hs = mem_rsp_i.r_valid && dev_req_i.r_ready && mem_rsp_i.r.last && (state_q != T_RERR);

  always_comb begin
    mem_req_o          = '0;
    mem_req_o.aw       = ax_q;
    mem_req_o.aw.addr  = pa_q;
    mem_req_o.aw_valid = (state_q == T_FWD) && wr_q;
    mem_req_o.ar       = ax_q;
    mem_req_o.ar.addr  = pa_q;
    mem_req_o.ar_valid = (state_q == T_FWD) && !wr_q;
    mem_req_o.w        = dev_req_i.w;
    mem_req_o.w_valid  = dev_req_i.w_valid && (w_credit_q != '0);
    mem_req_o.b_ready  = dev_req_i.b_ready && (state_q != T_BERR);
    mem_req_o.r_ready  = dev_req_i.r_ready && (state_q != T_RERR);

    dev_rsp_o          = '0;
    dev_rsp_o.aw_ready = (fwd_hs || fault_go) && wr_q;
    dev_rsp_o.ar_ready = (fwd_hs || fault_go) && !wr_q;
    dev_rsp_o.w_ready  = (state_q == T_WDROP) || ((w_credit_q != '0) && mem_rsp_i.w_ready);
    if (state_q == T_BERR) begin
      dev_rsp_o.b_valid = 1'b1;
      dev_rsp_o.b.id    = ax_q.id;
      dev_rsp_o.b.resp  = RESP_SLVERR;
    end else begin
      dev_rsp_o.b_valid = mem_rsp_i.b_valid;
      dev_rsp_o.b       = mem_rsp_i.b;
    end
    if (state_q == T_RERR) begin
      dev_rsp_o.r_valid = 1'b1;
      dev_rsp_o.r.id    = ax_q.id;
      dev_rsp_o.r.data  = '0;
      dev_rsp_o.r.resp  = RESP_SLVERR;
      dev_rsp_o.r.last  = (beat_q == ax_q.len);
    end else begin
      dev_rsp_o.r_valid = mem_rsp_i.r_valid;
      dev_rsp_o.r       = mem_rsp_i.r;
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= T_IDLE; ax_q <= '0; wr_q <= 1'b0; last_wr_q <= 1'b0; pa_q <= '0; beat_q <= '0; walked_q <= 1'b0;
      w_credit_q <= '0; b_out_q <= '0; r_out_q <= '0;
      ddtc_v_q <= 1'b0; ddtc_bare_q <= 1'b0; ddtc_did_q <= '0; ddtc_root_q <= '0;
      fault_valid_o <= 1'b0; fault_cause_o <= '0; fault_iova_o <= '0;
      stat_hits_o <= '0; stat_walks_o <= '0; stat_walk_cycles_o <= '0;
    end else begin
      fault_valid_o <= 1'b0;
      w_credit_q <= w_credit_q + 8'(fwd_hs && wr_q) - 8'(mem_w_hs && dev_req_i.w.last);
      b_out_q    <= b_out_q + 8'(fwd_hs && wr_q) - 8'(mem_b_hs);
      r_out_q    <= r_out_q + 8'(fwd_hs && !wr_q) - 8'(mem_r_last_hs);
      if (ptw_busy) stat_walk_cycles_o <= stat_walk_cycles_o + 32'd1;

      if (inval_i) ddtc_v_q <= 1'b0;
      else if (ptw_done && ptw_dcv) begin
        ddtc_v_q <= 1'b1; ddtc_did_q <= ax_q.user; ddtc_bare_q <= ptw_bare; ddtc_root_q <= ptw_root;
      end

      unique case (state_q)
        T_IDLE: begin
          beat_q <= '0;
          walked_q <= 1'b0;
          if (pick_w) begin ax_q <= dev_req_i.aw; wr_q <= 1'b1; last_wr_q <= 1'b1; state_q <= T_LOOKUP; end
          else if (pick_r) begin ax_q <= dev_req_i.ar; wr_q <= 1'b0; last_wr_q <= 1'b0; state_q <= T_LOOKUP; end
        end
        T_LOOKUP: if (!inval_i) begin
          unique case (dec)
            D_FWD: begin
              pa_q <= dec_pa; state_q <= T_FWD;
              if (ddtp_mode_i == DDTP_1LVL && !ddtc_bare_q && !walked_q) stat_hits_o <= stat_hits_o + 32'd1;
            end
            D_WALK: begin
              state_q <= T_WALK; walked_q <= 1'b1;
              if (!walked_q) stat_walks_o <= stat_walks_o + 32'd1;
            end
            default: begin
              state_q <= T_FAULT;
              fault_valid_o <= 1'b1; fault_cause_o <= dec_cause; fault_iova_o <= ax_q.addr;
            end
          endcase
        end
        T_WALK: if (ptw_done) begin
          // After a walk the lookup is repeated: it now hits the IOTLB or the
          // device-directory cache, unless the walk faulted or an
          // invalidation intervened (then the walk is simply redone).
          if (ptw_fault) begin
            state_q <= T_FAULT;
            fault_valid_o <= 1'b1; fault_cause_o <= ptw_cause; fault_iova_o <= ax_q.addr;
          end else begin
            state_q <= T_LOOKUP;
          end
        end
        T_FWD:   if (fwd_hs) state_q <= T_IDLE;
        T_FAULT: if (fault_go) state_q <= wr_q ? T_WDROP : T_RERR;
        T_WDROP: if (dev_req_i.w_valid && dev_req_i.w.last) state_q <= T_BERR;
        T_BERR:  if (dev_req_i.b_ready) state_q <= T_IDLE;
        T_RERR:  if (dev_req_i.r_ready) begin
          beat_q <= beat_q + 8'd1;
          if (beat_q == ax_q.len) state_q <= T_IDLE;
        end
        default: state_q <= T_IDLE;
      endcase
    end
  end

  // One translation serves a whole burst, so a burst must stay inside one
  // 4 KiB page, as AXI requires anyway.
  function automatic logic crosses_page(ax_t ax);
    return ax.burst == BURST_INCR &&
           (int'(ax.addr[11:0]) + ((int'(ax.len) + 1) << ax.size)) > 4096;
  endfunction
  a_aw_page: assert property (@(posedge clk_i) disable iff (!rst_ni)
    dev_req_i.aw_valid && dev_rsp_o.aw_ready |-> !crosses_page(dev_req_i.aw));
  a_ar_page: assert property (@(posedge clk_i) disable iff (!rst_ni)
    dev_req_i.ar_valid && dev_rsp_o.ar_ready |-> !crosses_page(dev_req_i.ar));

  a_credit: assert property (@(posedge clk_i) disable iff (!rst_ni)
    state_q == T_WDROP |-> w_credit_q == '0);
endmodule
