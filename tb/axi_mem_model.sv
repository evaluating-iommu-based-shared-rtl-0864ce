// axi_mem_model: behavioural AXI4 memory for testbenches (not synthesizable).
//
// Stands in for the DRAM controller and DRAM (or any memory slave). Storage
// is a sparse associative array of 64-bit words that starts at zero; the
// testbench can preload and inspect it with poke()/peek(). One transaction is
// served at a time. The first R beat of a read comes LATENCY cycles after the
// AR handshake, then one beat per cycle; the B response comes LATENCY cycles
// after the last W beat. Addresses in [ERR_BASE, ERR_BASE + ERR_SIZE) answer
// SLVERR. Counters record the number of AR and AW bursts, the number of reads
// of single beats and the longest burst seen, so that a testbench can tell
// cache-line refills from long DMA bursts.
module axi_mem_model #(
  parameter int unsigned    LATENCY  = 4,
  parameter axi_pkg::addr_t ERR_BASE = '0,
  parameter axi_pkg::addr_t ERR_SIZE = '0
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  axi_pkg::req_t req_i,
  output axi_pkg::rsp_t rsp_o
);
  import axi_pkg::*;

  logic [63:0] mem [longint unsigned];
  int unsigned n_ar = 0, n_aw = 0, n_single_rd = 0, max_len = 0;

  function automatic void poke(input addr_t a, input logic [63:0] d);
    mem[longint'({a[63:3], 3'b000})] = d;
  endfunction
  function automatic logic [63:0] peek(input addr_t a);
    longint unsigned k = longint'({a[63:3], 3'b000});
    return mem.exists(k) ? mem[k] : 64'd0;
  endfunction
  function automatic logic is_err(input addr_t a);
    return ERR_SIZE != 0 && a >= ERR_BASE && a < ERR_BASE + ERR_SIZE;
  endfunction

  typedef enum logic [2:0] {M_IDLE, M_RWAIT, M_READ, M_WRITE, M_BWAIT, M_BRESP} st_e;
  st_e        st;
  ax_t        ax;
  int         wait_cnt;
  logic [7:0] beat;
  logic       err;
  logic [63:0] rdata;
  logic       rerr;

  always_comb begin
    rsp_o          = '0;
    rsp_o.ar_ready = (st == M_IDLE) && !req_i.aw_valid;
    rsp_o.aw_ready = (st == M_IDLE);
    rsp_o.r_valid  = (st == M_READ);
    rsp_o.r.id     = ax.id;
    rsp_o.r.data   = rdata;
    rsp_o.r.resp   = rerr ? RESP_SLVERR : RESP_OKAY;
    rsp_o.r.last   = (beat == ax.len);
    rsp_o.w_ready  = (st == M_WRITE);
    rsp_o.b_valid  = (st == M_BRESP);
    rsp_o.b.id     = ax.id;
    rsp_o.b.resp   = err ? RESP_SLVERR : RESP_OKAY;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st <= M_IDLE; beat <= '0; wait_cnt <= 0; err <= 1'b0; ax <= '0; rdata <= '0; rerr <= 1'b0;
    end else begin
      case (st)
        M_IDLE: begin
          beat <= '0;
          if (req_i.aw_valid) begin
            ax <= req_i.aw; st <= M_WRITE; err <= is_err(req_i.aw.addr);
            n_aw <= n_aw + 1;
            if (int'(req_i.aw.len) > max_len) max_len <= int'(req_i.aw.len);
          end else if (req_i.ar_valid) begin
            ax <= req_i.ar; st <= M_RWAIT; wait_cnt <= 1;
            n_ar <= n_ar + 1;
            if (req_i.ar.len == 0) n_single_rd <= n_single_rd + 1;
            if (int'(req_i.ar.len) > max_len) max_len <= int'(req_i.ar.len);
          end
        end
        M_RWAIT: if (wait_cnt >= int'(LATENCY)) begin
          st <= M_READ; rdata <= peek(ax.addr); rerr <= is_err(ax.addr);
        end else wait_cnt <= wait_cnt + 1;
        M_READ: if (req_i.r_ready) begin
          beat <= beat + 8'd1;
          ax.addr <= ax.addr + 64'd8;
          rdata <= peek(ax.addr + 64'd8);
          rerr  <= is_err(ax.addr + 64'd8);
          if (beat == ax.len) st <= M_IDLE;
        end
        M_WRITE: if (req_i.w_valid) begin
          logic [63:0] v;
          v = peek(ax.addr);
          for (int b = 0; b < 8; b++) if (req_i.w.strb[b]) v[8*b +: 8] = req_i.w.data[8*b +: 8];
          poke(ax.addr, v);
          ax.addr <= ax.addr + 64'd8;
          if (req_i.w.last) begin st <= M_BWAIT; wait_cnt <= 1; end
        end
        M_BWAIT: if (wait_cnt >= int'(LATENCY)) st <= M_BRESP; else wait_cnt <= wait_cnt + 1;
        M_BRESP: if (req_i.b_ready) st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
