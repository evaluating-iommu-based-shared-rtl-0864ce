// axi_sram: AXI4 slave memory, used as the 1 MiB L2 scratchpad of the SoC.
//
// The L2 scratchpad holds device binaries and shared data such as software
// mailboxes; it is physically addressed and not cached. The paper gives its
// size (1 MiB) and its role; the way it is built here is this design's own:
// one transaction at a time, reads and writes alternating in round-robin order
// when both are pending, one 64-bit beat per cycle, INCR and FIXED bursts.
// The word index is the beat address modulo MEM_BYTES, so the memory repeats
// over any address window the interconnect gives it. Read data is read from
// the array in the cycle the R beat is presented; write beats honour the
// byte strobes. The B response follows the last W beat by one cycle.
//
// The Verilator linter reports pick_w / pick_r as circular combinational logic
// (UNOPTFLAT) once this block is connected to other AXI blocks. The loop
// exists only at the level of whole req_t/rsp_t structs, where a ready that
// depends on a response field (for example r_ready routed by r.id) shares a
// variable with the valids. No valid depends on its own ready bit, so
// there is no loop at bit level, and the synthesized netlist has none.
module axi_sram #(
  parameter int unsigned MEM_BYTES = 1024 * 1024
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  axi_pkg::req_t slv_req_i,
  output axi_pkg::rsp_t slv_rsp_o
);
  import axi_pkg::*;

  localparam int unsigned WORDS = MEM_BYTES / 8;
  localparam int unsigned IW    = $clog2(WORDS);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE, S_BRESP} state_e;
  state_e     state_q;
  ax_t        ax_q;
  logic [7:0] beat_q;
  logic       last_wr_q;   // round-robin: last served was a write

  data_t mem [WORDS];

  logic [IW-1:0] widx;
  assign widx = ax_q.addr[IW+2:3];

  logic pick_w, pick_r;
  always_comb begin
    pick_w = 1'b0; pick_r = 1'b0;
    if (state_q == S_IDLE) begin
      if (slv_req_i.aw_valid && slv_req_i.ar_valid) begin
        pick_w = !last_wr_q; pick_r = last_wr_q;
      end else begin
        pick_w = slv_req_i.aw_valid; pick_r = slv_req_i.ar_valid;
      end
    end
  end

  always_comb begin
    slv_rsp_o          = '0;
    slv_rsp_o.aw_ready = pick_w;
    slv_rsp_o.ar_ready = pick_r;
    slv_rsp_o.w_ready  = (state_q == S_WRITE);
    slv_rsp_o.r_valid  = (state_q == S_READ);
    slv_rsp_o.r.id     = ax_q.id;
    slv_rsp_o.r.data   = mem[widx];
    slv_rsp_o.r.resp   = RESP_OKAY;
    slv_rsp_o.r.last   = (beat_q == ax_q.len);
    slv_rsp_o.b_valid  = (state_q == S_BRESP);
    slv_rsp_o.b.id     = ax_q.id;
    slv_rsp_o.b.resp   = RESP_OKAY;
  end

  function automatic addr_t next_addr(ax_t ax);
    return (ax.burst == BURST_FIXED) ? ax.addr : ax.addr + addr_t'(8);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= S_IDLE;
      ax_q      <= '0;
      beat_q    <= '0;
      last_wr_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          beat_q <= '0;
          if (pick_w) begin
            ax_q <= slv_req_i.aw; state_q <= S_WRITE; last_wr_q <= 1'b1;
          end else if (pick_r) begin
            ax_q <= slv_req_i.ar; state_q <= S_READ;  last_wr_q <= 1'b0;
          end
        end
        S_READ: if (slv_req_i.r_ready) begin
          ax_q.addr <= next_addr(ax_q);
          beat_q    <= beat_q + 8'd1;
          if (beat_q == ax_q.len) state_q <= S_IDLE;
        end
        S_WRITE: if (slv_req_i.w_valid) begin
          ax_q.addr <= next_addr(ax_q);
          beat_q    <= beat_q + 8'd1;
          if (slv_req_i.w.last) state_q <= S_BRESP;
        end
        S_BRESP: if (slv_req_i.b_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (state_q == S_WRITE && slv_req_i.w_valid) begin
      for (int b = 0; b < 8; b++)
        if (slv_req_i.w.strb[b]) mem[widx][8*b +: 8] <= slv_req_i.w.data[8*b +: 8];
    end
  end
endmodule
