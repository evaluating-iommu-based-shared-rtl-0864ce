// iommu_ptw: device-context fetch and Sv39 IO page-table walker.
//
// Started with a device identifier, an IO virtual address and the access type.
// If the device context is not cached (dc_fetch_i), it first reads the tc and
// fsc doublewords of the device's base-format context from the one-level
// device directory table at ddt_ppn_i: tc.V must be set, and fsc.MODE must be
// Bare (the device is not translated) or Sv39 (fsc.PPN is the root page
// table). The walk itself reads one 8-byte page-table entry per level, at
// most three strictly sequential reads for a 4 KiB page, which is the IOTLB
// miss cost the paper measures. Each read is a single-beat AXI read with
// ID 0; the next read is issued only after the previous R beat arrived.
// A leaf is an entry with R or X set; it must grant the access (R for reads,
// W for writes) and a superpage PPN must be aligned, otherwise a page fault
// is returned. An error response on any read gives an access fault. A/D bits
// are not checked or updated. done_o is a one-cycle pulse carrying the result.
// Only the number of sequential accesses comes from the paper; formats and
// checks follow the RISC-V IOMMU and privileged specifications.
module iommu_ptw (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  logic [7:0]        did_i,
  input  logic [38:0]       iova_i,
  input  logic              write_i,
  input  logic              dc_fetch_i,
  input  iommu_pkg::ppn_t   ddt_ppn_i,
  input  iommu_pkg::ppn_t   root_ppn_i,   // used when dc_fetch_i is low
  output logic              busy_o,
  output logic              done_o,
  output logic              fault_o,
  output logic [11:0]       cause_o,
  output logic              dc_valid_o,   // device context was fetched and is valid
  output logic              dc_bare_o,
  output iommu_pkg::ppn_t   dc_root_ppn_o,
  output logic              leaf_valid_o, // a leaf was found
  output iommu_pkg::ppn_t   leaf_ppn_o,
  output iommu_pkg::lvl_t   leaf_lvl_o,
  output logic              leaf_r_o,
  output logic              leaf_w_o,
  output axi_pkg::req_t     ptw_req_o,
  input  axi_pkg::rsp_t     ptw_rsp_i
);
  import axi_pkg::*;
  import iommu_pkg::*;

  typedef enum logic [2:0] {W_IDLE, W_TC, W_FSC, W_PTE, W_DONE} state_e;
  state_e state_q;
  logic   ar_pend_q;          // AR not yet accepted
  addr_t  addr_q;
  lvl_t   lvl_q;
  logic [38:0] iova_q;
  logic   write_q;
  logic [7:0] did_q;
  ppn_t   ddt_q;

  logic        fault_q, dcv_q, bare_q, leafv_q, lr_q, lw_q;
  logic [11:0] cause_q;
  ppn_t        root_q, lppn_q;
  lvl_t        llvl_q;

  function automatic addr_t pte_addr(ppn_t base, logic [38:0] va, lvl_t l);
    logic [8:0] v;
    unique case (l)
      2'd2:    v = va[38:30];
      2'd1:    v = va[29:21];
      default: v = va[20:12];
    endcase
    return {8'd0, base, 12'd0} + {52'd0, v, 3'b000};
  endfunction

  logic [63:0] d;
  logic        rerr;
  assign d    = ptw_rsp_i.r.data;
  assign rerr = ptw_rsp_i.r.resp inside {RESP_SLVERR, RESP_DECERR};

  logic rbeat;
  assign rbeat = (state_q inside {W_TC, W_FSC, W_PTE}) && !ar_pend_q && ptw_rsp_i.r_valid;

  always_comb begin
    ptw_req_o          = '0;
    ptw_req_o.ar_valid = (state_q inside {W_TC, W_FSC, W_PTE}) && ar_pend_q;
    ptw_req_o.ar.addr  = addr_q;
    ptw_req_o.ar.len   = 8'd0;
    ptw_req_o.ar.size  = 3'd3;
    ptw_req_o.ar.burst = BURST_INCR;
    ptw_req_o.ar.user  = did_q;
    ptw_req_o.r_ready  = (state_q inside {W_TC, W_FSC, W_PTE}) && !ar_pend_q;
  end

  logic [11:0] pf_cause, af_cause;
  assign pf_cause = write_q ? CAUSE_ST_PAGE : CAUSE_LD_PAGE;
  assign af_cause = write_q ? CAUSE_ST_ACCESS : CAUSE_LD_ACCESS;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= W_IDLE; ar_pend_q <= 1'b0; addr_q <= '0; lvl_q <= '0;
      iova_q <= '0; write_q <= 1'b0; did_q <= '0; ddt_q <= '0;
      fault_q <= 1'b0; cause_q <= '0; dcv_q <= 1'b0; bare_q <= 1'b0; root_q <= '0;
      leafv_q <= 1'b0; lppn_q <= '0; llvl_q <= '0; lr_q <= 1'b0; lw_q <= 1'b0;
    end else begin
      if (ptw_req_o.ar_valid && ptw_rsp_i.ar_ready) ar_pend_q <= 1'b0;
      unique case (state_q)
        W_IDLE: if (start_i) begin
          iova_q <= iova_i; write_q <= write_i; did_q <= did_i; ddt_q <= ddt_ppn_i;
          fault_q <= 1'b0; cause_q <= '0; dcv_q <= 1'b0; bare_q <= 1'b0; leafv_q <= 1'b0;
          root_q <= root_ppn_i;
          ar_pend_q <= 1'b1;
          if (dc_fetch_i) begin
            addr_q  <= {8'd0, ddt_ppn_i, 12'd0} + addr_t'(did_i[6:0]) * DC_BYTES + DC_TC_OFF;
            state_q <= W_TC;
          end else begin
            addr_q  <= pte_addr(root_ppn_i, iova_i, 2'd2);
            lvl_q   <= 2'd2;
            state_q <= W_PTE;
          end
        end
        W_TC: if (rbeat) begin
          if (rerr)        begin fault_q <= 1'b1; cause_q <= CAUSE_DDT_ACCESS;  state_q <= W_DONE; end
          else if (!d[0])  begin fault_q <= 1'b1; cause_q <= CAUSE_DDT_INVALID; state_q <= W_DONE; end
          else begin
            addr_q <= {8'd0, ddt_q, 12'd0} + addr_t'(did_q[6:0]) * DC_BYTES + DC_FSC_OFF;
            ar_pend_q <= 1'b1;
            state_q <= W_FSC;
          end
        end
        W_FSC: if (rbeat) begin
          if (rerr) begin
            fault_q <= 1'b1; cause_q <= CAUSE_DDT_ACCESS; state_q <= W_DONE;
          end else if (d[63:60] == IOSATP_BARE) begin
            dcv_q <= 1'b1; bare_q <= 1'b1; state_q <= W_DONE;
          end else if (d[63:60] == IOSATP_SV39) begin
            dcv_q <= 1'b1; root_q <= d[43:0];
            addr_q <= pte_addr(d[43:0], iova_q, 2'd2);
            lvl_q <= 2'd2; ar_pend_q <= 1'b1; state_q <= W_PTE;
          end else begin
            fault_q <= 1'b1; cause_q <= CAUSE_DDT_MISCONF; state_q <= W_DONE;
          end
        end
        W_PTE: if (rbeat) begin
          if (rerr) begin
            fault_q <= 1'b1; cause_q <= af_cause; state_q <= W_DONE;
          end else if (!d[0] || (!d[1] && d[2])) begin
            fault_q <= 1'b1; cause_q <= pf_cause; state_q <= W_DONE;
          end else if (d[1] || d[3]) begin
            // leaf
            if ((write_q && !d[2]) || (!write_q && !d[1]) ||
                (lvl_q == 2'd2 && d[27:10] != '0) || (lvl_q == 2'd1 && d[18:10] != '0)) begin
              fault_q <= 1'b1; cause_q <= pf_cause;
            end else begin
              leafv_q <= 1'b1; lppn_q <= d[53:10]; llvl_q <= lvl_q; lr_q <= d[1]; lw_q <= d[2];
            end
            state_q <= W_DONE;
          end else if (lvl_q == 2'd0) begin
            fault_q <= 1'b1; cause_q <= pf_cause; state_q <= W_DONE;
          end else begin
            addr_q <= pte_addr(d[53:10], iova_q, lvl_q - 2'd1);
            lvl_q <= lvl_q - 2'd1; ar_pend_q <= 1'b1;
          end
        end
        W_DONE: state_q <= W_IDLE;
        default: state_q <= W_IDLE;
      endcase
    end
  end

  assign busy_o        = (state_q != W_IDLE);
  assign done_o        = (state_q == W_DONE);
  assign fault_o       = fault_q;
  assign cause_o       = cause_q;
  assign dc_valid_o    = dcv_q;
  assign dc_bare_o     = bare_q;
  assign dc_root_ppn_o = root_q;
  assign leaf_valid_o  = leafv_q;
  assign leaf_ppn_o    = lppn_q;
  assign leaf_lvl_o    = llvl_q;
  assign leaf_r_o      = lr_q;
  assign leaf_w_o      = lw_q;

  a_one_read: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ptw_req_o.ar_valid |-> !ptw_req_o.r_ready);
endmodule
