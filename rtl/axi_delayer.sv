// axi_delayer: adds a run-time configurable latency to the B and R channels
// of an AXI4 link, placed in front of the DRAM controller so that an FPGA
// prototype running at a low clock sees a silicon-like DRAM latency.
//
// As the paper describes, the delay is built from FIFOs and only the B and R
// channels are delayed; AW, W and AR pass straight through (combinationally).
// Each R beat and each B response coming back from the memory is written into
// its FIFO together with a time stamp taken from a free-running cycle counter.
// The FIFO head is released to the SoC side once `delay_i` cycles have passed
// since it entered (at least one cycle, since the FIFO write is registered).
// Because beats enter in order and are stamped with a rising counter, FIFO
// order and release order are the same. A full FIFO back-pressures the memory
// side (r_ready / b_ready low), so DEPTH bounds the number of beats in flight;
// DEPTH = 1024 is this design's choice, large enough for a 1000-cycle delay at
// one beat per cycle. The run-time delay input is also this design's choice.
module axi_delayer #(
  parameter int unsigned DEPTH = 1024
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [15:0]   delay_i,
  input  axi_pkg::req_t slv_req_i,
  output axi_pkg::rsp_t slv_rsp_o,
  output axi_pkg::req_t mst_req_o,
  input  axi_pkg::rsp_t mst_rsp_i
);
  import axi_pkg::*;

  localparam int unsigned PW = $clog2(DEPTH);
  typedef logic [31:0] stamp_t;

  stamp_t now_q;
  always_ff @(posedge clk_i or negedge rst_ni)
    if (!rst_ni) now_q <= '0;
    else         now_q <= now_q + 32'd1;

  // ---------------- R FIFO ----------------
  r_t          r_mem  [DEPTH];
  stamp_t      r_ts   [DEPTH];
  logic [PW:0] r_cnt_q;
  logic [PW-1:0] r_wp_q, r_rp_q;
  logic r_push, r_pop, r_ripe;

  assign r_ripe = (r_cnt_q != '0) && ((now_q - r_ts[r_rp_q]) >= stamp_t'(delay_i));
  assign r_push = mst_rsp_i.r_valid && (r_cnt_q != (PW+1)'(DEPTH));
  assign r_pop  = r_ripe && slv_req_i.r_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r_cnt_q <= '0; r_wp_q <= '0; r_rp_q <= '0;
    end else begin
      if (r_push) r_wp_q <= r_wp_q + 1'b1;
      if (r_pop)  r_rp_q <= r_rp_q + 1'b1;
      r_cnt_q <= r_cnt_q + (PW+1)'(r_push) - (PW+1)'(r_pop);
    end
  end
  always_ff @(posedge clk_i) begin
    if (r_push) begin
      r_mem[r_wp_q] <= mst_rsp_i.r;
      r_ts[r_wp_q]  <= now_q;
    end
  end

  // ---------------- B FIFO ----------------
  b_t          b_mem  [DEPTH];
  stamp_t      b_ts   [DEPTH];
  logic [PW:0] b_cnt_q;
  logic [PW-1:0] b_wp_q, b_rp_q;
  logic b_push, b_pop, b_ripe;

  assign b_ripe = (b_cnt_q != '0) && ((now_q - b_ts[b_rp_q]) >= stamp_t'(delay_i));
  assign b_push = mst_rsp_i.b_valid && (b_cnt_q != (PW+1)'(DEPTH));
  assign b_pop  = b_ripe && slv_req_i.b_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      b_cnt_q <= '0; b_wp_q <= '0; b_rp_q <= '0;
    end else begin
      if (b_push) b_wp_q <= b_wp_q + 1'b1;
      if (b_pop)  b_rp_q <= b_rp_q + 1'b1;
      b_cnt_q <= b_cnt_q + (PW+1)'(b_push) - (PW+1)'(b_pop);
    end
  end
  always_ff @(posedge clk_i) begin
    if (b_push) begin
      b_mem[b_wp_q] <= mst_rsp_i.b;
      b_ts[b_wp_q]  <= now_q;
    end
  end

  // ---------------- wiring ----------------
  always_comb begin
    mst_req_o          = slv_req_i;
    mst_req_o.r_ready  = (r_cnt_q != (PW+1)'(DEPTH));
    mst_req_o.b_ready  = (b_cnt_q != (PW+1)'(DEPTH));

    slv_rsp_o          = mst_rsp_i;
    slv_rsp_o.r_valid  = r_ripe;
    slv_rsp_o.r        = r_mem[r_rp_q];
    slv_rsp_o.b_valid  = b_ripe;
    slv_rsp_o.b        = b_mem[b_rp_q];
  end

  // A released beat must stay stable until it is taken.
  a_r_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    slv_rsp_o.r_valid && !slv_req_i.r_ready |=> slv_rsp_o.r_valid);
endmodule
